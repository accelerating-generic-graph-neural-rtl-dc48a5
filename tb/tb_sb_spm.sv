// tb_sb_spm: multi-port scratchpad. Random writes on two write ports and
// random reads on three read ports against a reference array; checks the
// one-cycle read latency, read-before-write on the same row and that the
// higher-numbered write port wins a collision.
module tb_sb_spm;
  import sb_pkg::*;
  localparam int ROWS = 64, NRD = 3, NWR = 2;
  logic clk = 0; always #5 clk = ~clk;
  logic [NRD-1:0] rd_en = '0; addr_t rd_addr [NRD]; row_t rd_data [NRD];
  logic [NWR-1:0] wr_en = '0; addr_t wr_addr [NWR]; row_t wr_data [NWR];
  row_t ref_m [ROWS];
  int checks = 0, failures = 0;

  sb_spm #(.ROWS(ROWS), .NRD(NRD), .NWR(NWR)) dut (.clk, .rd_en, .rd_addr, .rd_data, .wr_en, .wr_addr, .wr_data);

  function automatic row_t rnd_row();
    row_t r; for (int i = 0; i < ROW_W / 32; i++) r[i*32 +: 32] = $urandom; return r;
  endfunction

  initial begin
    repeat (5000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    for (int p = 0; p < NRD; p++) rd_addr[p] = '0;
    for (int p = 0; p < NWR; p++) begin wr_addr[p] = '0; wr_data[p] = '0; end
    // fill
    for (int i = 0; i < ROWS; i++) begin
      @(negedge clk); wr_en = 2'b01; wr_addr[0] = addr_t'(i); ref_m[i] = rnd_row(); wr_data[0] = ref_m[i];
    end
    @(negedge clk); wr_en = '0;
    // random traffic
    for (int k = 0; k < 300; k++) begin
      row_t expv [NRD];
      logic [NRD-1:0] en;
      @(negedge clk);
      for (int p = 0; p < NRD; p++) begin
        rd_en[p] = $urandom_range(0, 1); rd_addr[p] = addr_t'($urandom_range(0, ROWS-1));
        expv[p] = ref_m[rd_addr[p]];     // old contents even if written now
      end
      en = rd_en;
      for (int p = 0; p < NWR; p++) begin
        wr_en[p] = $urandom_range(0, 1); wr_addr[p] = addr_t'($urandom_range(0, ROWS-1)); wr_data[p] = rnd_row();
      end
      if (k % 10 == 0) begin wr_en = 2'b11; wr_addr[1] = wr_addr[0]; end
      for (int p = 0; p < NWR; p++) if (wr_en[p]) ref_m[wr_addr[p]] = wr_data[p];
      @(negedge clk);
      rd_en = '0; wr_en = '0;
      for (int p = 0; p < NRD; p++) if (en[p]) begin
        checks++; if (rd_data[p] !== expv[p]) begin failures++; $display("FAIL port %0d step %0d", p, k); end
      end
    end
    // final sweep
    for (int i = 0; i < ROWS; i++) begin
      @(negedge clk); rd_en = 3'b001; rd_addr[0] = addr_t'(i);
      @(negedge clk); rd_en = '0;
      checks++; if (rd_data[0] !== ref_m[i]) begin failures++; $display("FAIL sweep %0d", i); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
