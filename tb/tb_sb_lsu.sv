// tb_sb_lsu: the load-store unit with a graph buffer and a DRAM model that
// stalls and answers after a latency. It checks
//  * shard prefetch: two shards of the DRAM shard stream land in the first
//    two outdated slots (header, source list, COO edges) and the third slot
//    stays empty because the stream is exhausted; after one slot is marked
//    outdated and the stream rewound, the first shard is loaded again;
//  * LD.D, LD.S (rows gathered through the shard's source ids), LD.E,
//    ST.D and ST.E, each against the DRAM and buffer contents expected,
//    with one done pulse carrying the thread id per instruction.
module tb_sb_lsu;
  import sb_pkg::*;
  localparam int NST = 3, BROWS = 256, SB = 4000;
  logic clk = 0, rst_n = 0; always #5 clk = ~clk;
  logic start = 0, pf_en = 0; daddr_t shard_base = SB; logic [31:0] num_shards = 2;
  logic in_valid = 0, in_ready, done, busy, pf_busy; uop_t in_uop; tid_t done_tid;
  shard_meta_t meta [NST];
  logic gb_wr_meta, gb_wr_src, gb_wr_edge, gb_load_done; logic [1:0] gb_wr_slot, gb_src_slot;
  logic [15:0] gb_wr_word, gb_src_idx; row_t gb_wr_data; logic [31:0] gb_src_id;
  logic [NST-1:0] set_outdated = '0;
  logic [1:0] lk_slot [1]; logic [15:0] lk_idx [1]; edge_t lk_edge [1];
  rd_req_t rd; row_t rd_data; wr_req_t wr;
  logic mem_req_valid, mem_req_ready, mem_req_we, mem_resp_valid; daddr_t mem_req_addr;
  row_t mem_req_wdata, mem_resp_data;
  row_t buf_m [2][BROWS];
  int checks = 0, failures = 0, dones = 0;
  int ns [2] = '{21, 7}; int ne [2] = '{40, 12};
  int srcs [2][32]; edge_t edges [2][48];

  sb_lsu #(.NST(NST)) dut (.clk, .rst_n, .start, .pf_en, .shard_base, .num_shards,
    .in_valid, .in_ready, .in_uop, .done, .done_tid, .busy, .pf_busy, .meta,
    .gb_wr_meta, .gb_wr_src, .gb_wr_edge, .gb_wr_slot, .gb_wr_word, .gb_wr_data, .gb_load_done,
    .gb_src_slot, .gb_src_idx, .gb_src_id, .rd, .rd_data, .wr,
    .mem_req_valid, .mem_req_ready, .mem_req_we, .mem_req_addr, .mem_req_wdata,
    .mem_resp_valid, .mem_resp_data);
  sb_graph_buffer #(.NSLOT(NST), .MAX_SRC(64), .MAX_EDGE(64), .NLOOK(1)) u_gb (.clk, .rst_n,
    .wr_meta(gb_wr_meta), .wr_src(gb_wr_src), .wr_edge(gb_wr_edge), .wr_slot(gb_wr_slot),
    .wr_word(gb_wr_word), .wr_data(gb_wr_data), .load_done(gb_load_done), .set_outdated,
    .meta, .lk_slot, .lk_idx, .lk_edge, .src_slot(gb_src_slot), .src_idx(gb_src_idx), .src_id(gb_src_id));
  sb_dram_model #(.WORDS(8192), .LATENCY(5), .STALL_EVERY(3)) u_dram (.clk, .rst_n,
    .req_valid(mem_req_valid), .req_ready(mem_req_ready), .req_we(mem_req_we), .req_addr(mem_req_addr),
    .req_wdata(mem_req_wdata), .resp_valid(mem_resp_valid), .resp_data(mem_resp_data));

  always_ff @(posedge clk) begin
    if (rd.re) rd_data <= buf_m[rd.seb][rd.addr % BROWS];
    if (wr.we) buf_m[wr.seb][wr.addr % BROWS] <= wr.data;
  end
  always @(posedge clk) if (done) dones++;

  task automatic chk(bit ok, string what);
    checks++; if (!ok) begin failures++; if (failures < 20) $display("FAIL %s", what); end
  endtask
  function automatic row_t rnd_row();
    row_t r; for (int i = 0; i < ROW_W / 32; i++) r[i*32 +: 32] = $urandom; return r;
  endfunction

  task automatic issue(uop_t u);
    int d0, cyc; d0 = dones; cyc = 0;
    @(negedge clk); in_uop = u; in_valid = 1;
    while (!in_ready) @(negedge clk);
    @(negedge clk); in_valid = 0;
    while (dones == d0 && cyc < 5000) begin @(negedge clk); cyc++; end
    chk(dones == d0 + 1 && done_tid == u.tid, $sformatf("done of %s", u.op.name()));
  endtask

  initial begin
    repeat (100000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    int p;
    in_uop = '0; lk_slot[0] = 0; lk_idx[0] = 0;
    // shard stream
    p = SB;
    for (int k = 0; k < 2; k++) begin
      shard_hdr_t h; row_t w;
      for (int i = 0; i < ns[k]; i++) srcs[k][i] = $urandom_range(0, 40);
      for (int i = 0; i < ne[k]; i++) begin edges[k][i].src_l = 16'($urandom); edges[k][i].dst_l = 16'($urandom); end
      h = '0; h.num_src = 16'(ns[k]); h.num_edge = 16'(ne[k]); h.interval = 16'(k); h.last = 16'(k);
      h.edge_off = 32'(100 * k);
      w = '0; w[$bits(shard_hdr_t)-1:0] = h; u_dram.mem[p++] = w;
      for (int b = 0; b * 16 < ns[k]; b++) begin
        w = '0; for (int j = 0; j < 16; j++) if (b*16+j < ns[k]) w[j*32 +: 32] = srcs[k][b*16+j];
        u_dram.mem[p++] = w;
      end
      for (int b = 0; b * 16 < ne[k]; b++) begin
        w = '0; for (int j = 0; j < 16; j++) if (b*16+j < ne[k]) w[j*32 +: 32] = edges[k][b*16+j];
        u_dram.mem[p++] = w;
      end
    end
    for (int i = 0; i < 3000; i++) u_dram.mem[i] = rnd_row();
    repeat (3) @(negedge clk); rst_n = 1;
    for (int s = 0; s < 2; s++) for (int r = 0; r < BROWS; r++) buf_m[s][r] = rnd_row();
    // ---- prefetch ----
    @(negedge clk); start = 1; @(negedge clk); start = 0; pf_en = 1;
    repeat (400) @(negedge clk);
    chk(!pf_busy, "prefetch finished");
    for (int k = 0; k < 2; k++) begin
      chk(meta[k].valid && meta[k].num_src == 16'(ns[k]) && meta[k].num_edge == 16'(ne[k]) &&
          meta[k].interval == 16'(k) && meta[k].last == k[0] && meta[k].edge_off == 32'(100 * k), "meta");
      for (int i = 0; i < ne[k]; i++) begin
        lk_slot[0] = 2'(k); lk_idx[0] = 16'(i); #1;
        chk(lk_edge[0] == edges[k][i], "edge list");
      end
    end
    chk(!meta[2].valid, "stream exhausted, third slot empty");
    // ---- LD.S through the source ids of slot 1 ----
    begin
      uop_t u; u = '0; u.op = OP_LD_S; u.tid = 2; u.slot = 1; u.n = 16'(ns[1]); u.rows = 2;
      u.dram_base = 50; u.dst_seb = 1; u.dst_addr = 20;
      issue(u);
      for (int i = 0; i < ns[1]; i++) for (int c = 0; c < 2; c++)
        chk(buf_m[1][20 + i*2 + c] == u_dram.mem[50 + srcs[1][i]*2 + c], "LD.S row");
    end
    // ---- LD.D ----
    begin
      uop_t u; u = '0; u.op = OP_LD_D; u.tid = 0; u.n = 9; u.rows = 3; u.dram_base = 200;
      u.dram_off = 4; u.dst_seb = 0; u.dst_addr = 30;
      issue(u);
      for (int i = 0; i < 9; i++) for (int c = 0; c < 3; c++)
        chk(buf_m[0][30 + i*3 + c] == u_dram.mem[200 + (4+i)*3 + c], "LD.D row");
    end
    // ---- LD.E ----
    begin
      uop_t u; u = '0; u.op = OP_LD_E; u.tid = 3; u.slot = 2; u.n = 12; u.rows = 1; u.dram_base = 700;
      u.dram_off = 100; u.dst_seb = 1; u.dst_addr = 90;
      issue(u);
      for (int i = 0; i < 12; i++) chk(buf_m[1][90 + i] == u_dram.mem[800 + i], "LD.E row");
    end
    // ---- ST.D and ST.E ----
    begin
      uop_t u; u = '0; u.op = OP_ST_D; u.tid = 0; u.n = 6; u.rows = 2; u.dram_base = 2000;
      u.dram_off = 10; u.dst_seb = 0; u.dst_addr = 140;
      issue(u);
      for (int i = 0; i < 6; i++) for (int c = 0; c < 2; c++)
        chk(u_dram.mem[2000 + (10+i)*2 + c] == buf_m[0][140 + i*2 + c], "ST.D row");
      u = '0; u.op = OP_ST_E; u.tid = 1; u.n = 5; u.rows = 1; u.dram_base = 2500;
      u.dram_off = 7; u.dst_seb = 1; u.dst_addr = 200;
      issue(u);
      for (int i = 0; i < 5; i++) chk(u_dram.mem[2507 + i] == buf_m[1][200 + i], "ST.E row");
    end
    // ---- rewind: slot 0 outdated, stream restarts, shard 0 lands there again ----
    @(negedge clk); start = 1; set_outdated = 3'b001; @(negedge clk); start = 0; set_outdated = '0;
    repeat (300) @(negedge clk);
    chk(meta[0].valid && meta[0].interval == 0 && meta[0].num_src == 16'(ns[0]), "reload after rewind");
    chk(meta[2].valid && meta[2].interval == 1, "second shard into the free slot");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
