// tb_sb_matrix_unit: a 4 x 32 systolic array running random GEMMs against a
// reference matrix product. The TB plays the embedding buffer (one port,
// registered read) and the weight buffer (one-cycle read). Each GEMM has a
// random item count (several tiles, a partial last tile), input dimension
// up to 64 and output dimension up to 32; the result rows, the untouched
// rows around them and the done pulse with its thread id are checked.
module tb_sb_matrix_unit;
  import sb_pkg::*;
  localparam int R = 4, C = 32, ROWS = 512, WROWS = 128;
  logic clk = 0, rst_n = 0; always #5 clk = ~clk;
  logic in_valid = 0, in_ready, done, busy; uop_t in_uop; tid_t done_tid;
  rd_req_t rd; row_t rd_data; wr_req_t wr;
  logic w_rd_en; logic [WB_AW-1:0] w_rd_addr; logic [C*ELEM_W-1:0] w_rd_data;
  row_t mem [ROWS], ref_m [ROWS];
  logic [C*ELEM_W-1:0] wmem [WROWS];
  int checks = 0, failures = 0, dones = 0;

  sb_matrix_unit #(.R(R), .C(C), .KMAX(64)) dut (.clk, .rst_n, .in_valid, .in_ready, .in_uop,
    .done, .done_tid, .busy, .rd, .rd_data, .wr, .w_rd_en, .w_rd_addr, .w_rd_data);

  always_ff @(posedge clk) begin
    if (rd.re) rd_data <= mem[rd.addr % ROWS];
    if (wr.we) mem[wr.addr % ROWS] <= wr.data;
    if (w_rd_en) w_rd_data <= wmem[w_rd_addr % WROWS];
  end
  always @(posedge clk) if (done) dones++;

  function automatic elem_t rnd_small();
    return elem_t'($urandom_range(0, 1023)) - elem_t'(512);   // -2.0 .. 2.0
  endfunction

  task automatic gemm(int n, int fin, int fout, int tid);
    uop_t u; int d0, cyc;
    u = '0; u.op = OP_GEMM; u.tid = tid_t'(tid); u.n = 16'(n);
    u.fin = 8'(fin); u.fdim = 8'(fout);
    u.rows_in = 4'((fin + 31) / 32); u.rows = 4'((fout + 31) / 32);
    u.a_addr = 0; u.dst_addr = 300; u.w_addr = 0;
    for (int i = 0; i < ROWS; i++) begin
      row_t r; for (int e = 0; e < VLEN; e++) r[e*ELEM_W +: ELEM_W] = rnd_small();
      mem[i] = r; ref_m[i] = r;
    end
    for (int k = 0; k < WROWS; k++)
      for (int j = 0; j < C; j++) wmem[k][j*ELEM_W +: ELEM_W] = rnd_small();
    for (int i = 0; i < n; i++)
      for (int oc = 0; oc < int'(u.rows); oc++)
        for (int e = 0; e < VLEN; e++) begin
          logic signed [ACC_W-1:0] acc; int j;
          j = oc * VLEN + e; acc = '0;
          if (j < fout)
            for (int k = 0; k < fin; k++)
              acc += ACC_W'(get_elem(mem[i * int'(u.rows_in) + k / 32], k % 32)) *
                     ACC_W'(elem_t'(wmem[k][j*ELEM_W +: ELEM_W]));
          ref_m[300 + i * int'(u.rows) + oc][e*ELEM_W +: ELEM_W] = (j < fout) ? elem_t'(acc >>> FRAC) : elem_t'(0);
        end
    d0 = dones; cyc = 0;
    @(negedge clk); in_uop = u; in_valid = 1;
    while (!in_ready) @(negedge clk);
    @(negedge clk); in_valid = 0;
    while (dones == d0 && cyc < 20000) begin @(negedge clk); cyc++; end
    checks++;
    if (dones != d0 + 1 || done_tid != tid_t'(tid)) begin failures++; $display("FAIL done n=%0d", n); end
    for (int i = 0; i < ROWS; i++) begin
      checks++;
      if (mem[i] !== ref_m[i]) begin
        failures++;
        if (failures < 10) $display("FAIL gemm n=%0d fin=%0d fout=%0d row %0d", n, fin, fout, i);
      end
    end
  endtask

  initial begin
    repeat (400000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    in_uop = '0;
    repeat (3) @(negedge clk); rst_n = 1;
    gemm(4, 32, 32, 1);
    gemm(9, 64, 16, 2);
    gemm(1, 1, 1, 0);        // GEMV-like single output
    for (int k = 0; k < 6; k++)
      gemm($urandom_range(1, 13), $urandom_range(1, 64), $urandom_range(1, 32), $urandom_range(0, 3));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
