// tb_sb_weight_buffer: writes 32 weight rows, reads them in random order and
// checks the data arrives exactly one cycle after the read.
module tb_sb_weight_buffer;
  import sb_pkg::*;
  localparam int COLS = 8;
  logic clk = 0; always #5 clk = ~clk;
  logic rd_en = 0, wr_en = 0;
  logic [WB_AW-1:0] rd_addr = 0, wr_addr = 0;
  logic [COLS*ELEM_W-1:0] rd_data, wr_data = 0;
  logic [COLS*ELEM_W-1:0] ref_m [32];
  int checks = 0, failures = 0;

  sb_weight_buffer #(.ROWS(32), .COLS(COLS)) dut (.clk, .rd_en, .rd_addr, .rd_data, .wr_en, .wr_addr, .wr_data);

  initial begin
    repeat (2000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    for (int i = 0; i < 32; i++) begin
      @(negedge clk); wr_en = 1; wr_addr = WB_AW'(i);
      ref_m[i] = {$urandom, $urandom, $urandom, $urandom}; wr_data = ref_m[i];
    end
    @(negedge clk); wr_en = 0;
    for (int k = 0; k < 40; k++) begin
      int a; a = $urandom_range(0, 31);
      @(negedge clk); rd_en = 1; rd_addr = WB_AW'(a);
      @(negedge clk); rd_en = 0;
      checks++; if (rd_data !== ref_m[a]) begin failures++; $display("FAIL row %0d", a); end
    end
    // read data holds while rd_en is low
    @(negedge clk);
    checks++; if (rd_data !== ref_m[rd_addr]) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
