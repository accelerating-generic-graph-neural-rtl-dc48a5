// tb_sb_emb_xbar: the crossbar between two requesters and the two embedding
// buffers (two small sb_spm instances). Each requester writes rows to either
// buffer; reads must come back from the buffer named by the request, a
// write to one buffer must leave the other untouched, and both requesters
// can reach different buffers in the same cycle.
module tb_sb_emb_xbar;
  import sb_pkg::*;
  localparam int NRD = 2, NWR = 2, ROWS = 16;
  logic clk = 0; always #5 clk = ~clk;
  rd_req_t rd_req [NRD]; row_t rd_data [NRD]; wr_req_t wr_req [NWR];
  logic [NRD-1:0] db_rd_en, seb_rd_en; addr_t db_rd_addr [NRD], seb_rd_addr [NRD];
  row_t db_rd_data [NRD], seb_rd_data [NRD];
  logic [NWR-1:0] db_wr_en, seb_wr_en; addr_t db_wr_addr [NWR], seb_wr_addr [NWR];
  row_t db_wr_data [NWR], seb_wr_data [NWR];
  row_t ref_m [2][ROWS];
  int checks = 0, failures = 0;

  sb_emb_xbar #(.NRD(NRD), .NWR(NWR)) dut (.clk, .rd_req, .rd_data, .wr_req,
    .db_rd_en, .db_rd_addr, .db_rd_data, .db_wr_en, .db_wr_addr, .db_wr_data,
    .seb_rd_en, .seb_rd_addr, .seb_rd_data, .seb_wr_en, .seb_wr_addr, .seb_wr_data);
  sb_spm #(.ROWS(ROWS), .NRD(NRD), .NWR(NWR)) u_db (.clk, .rd_en(db_rd_en), .rd_addr(db_rd_addr),
    .rd_data(db_rd_data), .wr_en(db_wr_en), .wr_addr(db_wr_addr), .wr_data(db_wr_data));
  sb_spm #(.ROWS(ROWS), .NRD(NRD), .NWR(NWR)) u_seb (.clk, .rd_en(seb_rd_en), .rd_addr(seb_rd_addr),
    .rd_data(seb_rd_data), .wr_en(seb_wr_en), .wr_addr(seb_wr_addr), .wr_data(seb_wr_data));

  function automatic row_t rnd_row();
    row_t r; for (int i = 0; i < ROW_W / 32; i++) r[i*32 +: 32] = $urandom; return r;
  endfunction

  initial begin
    repeat (5000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    for (int p = 0; p < NRD; p++) rd_req[p] = '0;
    for (int p = 0; p < NWR; p++) wr_req[p] = '0;
    // requester 0 fills DstBuffer, requester 1 fills SrcEdgeBuffer, same rows, same cycle
    for (int i = 0; i < ROWS; i++) begin
      @(negedge clk);
      ref_m[0][i] = rnd_row(); ref_m[1][i] = rnd_row();
      wr_req[0] = '{we: 1'b1, seb: 1'b0, addr: addr_t'(i), data: ref_m[0][i]};
      wr_req[1] = '{we: 1'b1, seb: 1'b1, addr: addr_t'(i), data: ref_m[1][i]};
    end
    @(negedge clk); wr_req[0].we = 0; wr_req[1].we = 0;
    for (int k = 0; k < 200; k++) begin
      int b0, b1, a0, a1;
      b0 = $urandom_range(0, 1); b1 = $urandom_range(0, 1);
      a0 = $urandom_range(0, ROWS-1); a1 = $urandom_range(0, ROWS-1);
      @(negedge clk);
      rd_req[0] = '{re: 1'b1, seb: b0[0], addr: addr_t'(a0)};
      rd_req[1] = '{re: 1'b1, seb: b1[0], addr: addr_t'(a1)};
      // a random write from requester 1 to a random buffer
      if (k % 3 == 0) begin
        int wb, wa; wb = $urandom_range(0, 1); wa = $urandom_range(0, ROWS-1);
        wr_req[1] = '{we: 1'b1, seb: wb[0], addr: addr_t'(wa), data: rnd_row()};
      end
      @(negedge clk);
      rd_req[0].re = 0; rd_req[1].re = 0;
      checks += 2;
      if (rd_data[0] !== ref_m[b0][a0]) begin failures++; $display("FAIL req0 step %0d", k); end
      if (rd_data[1] !== ref_m[b1][a1]) begin failures++; $display("FAIL req1 step %0d", k); end
      if (wr_req[1].we) ref_m[wr_req[1].seb][wr_req[1].addr] = wr_req[1].data;
      wr_req[1].we = 0;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
