// tb_sb_inst_buffer: writes random instruction words into a 64-entry buffer
// and reads every entry back through the combinational read port.
module tb_sb_inst_buffer;
  import sb_pkg::*;
  logic clk = 0; always #5 clk = ~clk;
  logic wr_en = 0; pc_t wr_addr = 0, rd_addr = 0; instr_t wr_data = '0, rd_data;
  int checks = 0, failures = 0;
  logic [63:0] ref_m [64];

  sb_inst_buffer #(.DEPTH(64)) dut (.clk, .wr_en, .wr_addr, .wr_data, .rd_addr, .rd_data);

  initial begin
    repeat (2000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    for (int i = 0; i < 64; i++) begin
      @(negedge clk); wr_en = 1; wr_addr = pc_t'(i);
      ref_m[i] = {$urandom, $urandom}; wr_data = instr_t'(ref_m[i]);
    end
    @(negedge clk); wr_en = 0;
    for (int i = 63; i >= 0; i--) begin
      rd_addr = pc_t'(i); #1;
      checks++; if (rd_data !== instr_t'(ref_m[i])) begin failures++; $display("FAIL entry %0d", i); end
    end
    // overwrite one entry and see it at once after the edge
    @(negedge clk); wr_en = 1; wr_addr = 5; wr_data = '1; ref_m[5] = '1;
    @(negedge clk); wr_en = 0; rd_addr = 5; #1;
    checks++; if (rd_data !== instr_t'(ref_m[5])) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
