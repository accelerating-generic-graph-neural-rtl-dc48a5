// tb_sb_controller: the SLMT controller (phase scheduler, fetch, decoder,
// instruction queues) programmed over its configuration bus, with models of
// the three units (random service time, done pulse with the thread id) and
// of the graph-buffer shard slots. The program has a Scatter (LD.D, ADD,
// NOP), a Gather (LD.S, GEMM, SCTR.F, G.SUM.F) and an Apply (RELU, ST.D)
// phase over three intervals. Checked: each thread's instructions leave the
// right queue in program order with the decoded item count and symbol
// address, no thread has two instructions in flight, two sThreads keep
// different units busy at the same time, the NOP is skipped, and done rises
// after every interval and shard was handled.
module tb_sb_controller;
  import sb_pkg::*;
  localparam int NST = 3, NI = 3, ISZ = 5, NV = 14;
  logic clk = 0, rst_n = 0; always #5 clk = ~clk;
  logic cfg_we = 0; logic [15:0] cfg_addr = 0; logic [63:0] cfg_wdata = 0;
  logic start = 0, done;
  logic mem_valid, vec_valid, mat_valid; logic mem_ready, vec_ready, mat_ready;
  uop_t mem_uop, vec_uop, mat_uop;
  logic mem_done = 0, vec_done = 0, mat_done = 0; tid_t mem_done_tid = 0, vec_done_tid = 0, mat_done_tid = 0;
  shard_meta_t meta [NST]; logic [NST-1:0] set_outdated; logic lsu_rewind, pf_en;
  daddr_t shard_base; logic [31:0] num_shards; logic [NST:0] thread_run; logic [15:0] cur_interval;
  int checks = 0, failures = 0;

  sb_controller #(.NST(NST), .QDEPTH(2), .MAX_GROUPS(2), .IBD(32), .SEB_PART(100)) dut (
    .clk, .rst_n, .cfg_we, .cfg_addr, .cfg_wdata, .start, .done,
    .mem_valid, .mem_ready, .mem_uop, .vec_valid, .vec_ready, .vec_uop, .mat_valid, .mat_ready, .mat_uop,
    .mem_done, .mem_done_tid, .vec_done, .vec_done_tid, .mat_done, .mat_done_tid,
    .meta, .set_outdated, .lsu_rewind, .pf_en, .shard_base, .num_shards, .thread_run, .cur_interval);

  task automatic chk(bit ok, string what);
    checks++; if (!ok) begin failures++; if (failures < 20) $display("FAIL %s (t=%0t)", what, $time); end
  endtask
  task automatic cfg(int a, logic [63:0] d);
    @(negedge clk); cfg_we = 1; cfg_addr = 16'(a); cfg_wdata = d; @(negedge clk); cfg_we = 0;
  endtask
  function automatic instr_t mk(op_e op, sym_type_e dt, int dn);
    instr_t i; i = '0; i.op = op; i.nsel = N_LIT; i.nlit = 12'd3; i.fdim = 8'd32; i.fin = 8'd32;
    i.dst = '{t: dt, num: 4'(dn)}; i.a = '{t: dt, num: 4'(dn)}; i.b = '{t: SYM_W, num: 4'd0};
    return i;
  endfunction

  // ---- shard slots ----
  int sh_itv [$]; bit sh_last [$]; int sh_ns [$];
  int ptr = 0, load_wait = 0, load_slot = -1;
  always @(posedge clk) if (rst_n) begin
    for (int k = 0; k < NST; k++) if (set_outdated[k]) meta[k].valid <= 1'b0;
    if (lsu_rewind) ptr = 0;
    if (load_slot >= 0) begin
      if (load_wait > 0) load_wait--;
      else begin
        meta[load_slot].valid <= 1'b1; meta[load_slot].interval <= 16'(sh_itv[ptr]);
        meta[load_slot].last <= sh_last[ptr]; meta[load_slot].num_src <= 16'(sh_ns[ptr]);
        meta[load_slot].num_edge <= 16'(sh_ns[ptr] + 1); ptr++; load_slot = -1;
      end
    end else if (pf_en && ptr < sh_itv.size()) begin
      for (int k = NST - 1; k >= 0; k--) if (!meta[k].valid && !set_outdated[k]) load_slot = k;
      load_wait = $urandom_range(1, 4);
    end
  end

  // ---- unit models and order checks ----
  op_e ith_prog [4] = '{OP_LD_D, OP_ADD, OP_RELU, OP_ST_D};
  op_e sth_prog [4] = '{OP_LD_S, OP_GEMM, OP_SCTR_F, OP_GSUM_F};
  int pos [NST+1];
  int inflight [NST+1];
  int n_ops = 0, overlap = 0;
  int mem_t = 0, vec_t = 0, mat_t = 0; uop_t mem_h, vec_h, mat_h;
  assign mem_ready = (mem_t == 0); assign vec_ready = (vec_t == 0); assign mat_ready = (mat_t == 0);

  task automatic take(uop_t u, cls_e c);
    int t; op_e e; t = int'(u.tid);
    e = (t == 0) ? ith_prog[pos[t] % 4] : sth_prog[pos[t] % 4];
    chk(u.op == e, $sformatf("thread %0d program order (got %s, want %s)", t, u.op.name(), e.name()));
    chk(op_class(u.op) == c, "queue of the unit");
    chk(inflight[t] == 0, "one instruction in flight per thread");
    if (u.op == OP_LD_S) chk(int'(u.n) == sh_ns_of(t), "LD.S item count from shard");
    if (u.op == OP_LD_D) chk(int'(u.n) == ((NV - int'(cur_interval) * ISZ) < ISZ ? NV - int'(cur_interval) * ISZ : ISZ), "LD.D item count");
    if (u.op == OP_SCTR_F) chk(u.dst_addr == addr_t'(500 + (t - 1) * 100), "E symbol in the thread's part");
    pos[t]++; inflight[t]++; n_ops++;
  endtask
  function automatic int sh_ns_of(int t); return int'(meta[t-1].num_src); endfunction

  always @(posedge clk) if (rst_n) begin
    mem_done <= 0; vec_done <= 0; mat_done <= 0;
    if (mem_t > 1) mem_t <= mem_t - 1; else if (mem_t == 1) begin mem_t <= 0; mem_done <= 1; mem_done_tid <= mem_h.tid; inflight[mem_h.tid]--; end
    if (vec_t > 1) vec_t <= vec_t - 1; else if (vec_t == 1) begin vec_t <= 0; vec_done <= 1; vec_done_tid <= vec_h.tid; inflight[vec_h.tid]--; end
    if (mat_t > 1) mat_t <= mat_t - 1; else if (mat_t == 1) begin mat_t <= 0; mat_done <= 1; mat_done_tid <= mat_h.tid; inflight[mat_h.tid]--; end
    if (mem_valid && mem_ready) begin take(mem_uop, CLS_MEM); mem_h <= mem_uop; mem_t <= $urandom_range(2, 9); end
    if (vec_valid && vec_ready) begin take(vec_uop, CLS_VEC); vec_h <= vec_uop; vec_t <= $urandom_range(2, 9); end
    if (mat_valid && mat_ready) begin take(mat_uop, CLS_MAT); mat_h <= mat_uop; mat_t <= $urandom_range(2, 9); end
    if ((mem_t != 0) + (vec_t != 0) + (mat_t != 0) >= 2) overlap++;
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    int nsh;
    for (int k = 0; k < NST; k++) meta[k] = '0;
    for (int t = 0; t <= NST; t++) begin pos[t] = 0; inflight[t] = 0; end
    for (int i = 0; i < NI; i++) begin
      int k; k = $urandom_range(2, 4);
      for (int j = 0; j < k; j++) begin sh_itv.push_back(i); sh_last.push_back(j == k - 1); sh_ns.push_back($urandom_range(1, 30)); end
    end
    nsh = sh_itv.size();
    repeat (3) @(negedge clk); rst_n = 1;
    // program: Scatter 0..2, Gather 3..6, Apply 7..8, end 9
    cfg(0, mk(OP_LD_D, SYM_D, 0)); cfg(1, mk(OP_ADD, SYM_D, 1)); cfg(2, mk(OP_NOP, SYM_D, 0));
    cfg(3, mk(OP_LD_S, SYM_S, 0)); cfg(4, mk(OP_GEMM, SYM_S, 1)); cfg(5, mk(OP_SCTR_F, SYM_E, 0));
    cfg(6, mk(OP_GSUM_F, SYM_D, 1)); cfg(7, mk(OP_RELU, SYM_D, 2)); cfg(8, mk(OP_ST_D, SYM_D, 2));
    for (int s = 0; s < 64; s++) cfg(16'h1000 + s, 64'(s * 7));
    cfg(16'h1000 + {SYM_E, 4'd0}, 500);
    cfg(16'h1200, 0); cfg(16'h1201, 3); cfg(16'h1202, 7); cfg(16'h1203, 9);
    cfg(16'h1300, 1); cfg(16'h1301, NV); cfg(16'h1302, ISZ); cfg(16'h1303, NI);
    cfg(16'h1304, 1234); cfg(16'h1305, nsh);
    chk(shard_base == 1234 && num_shards == 32'(nsh), "stream registers");
    @(negedge clk); start = 1; @(negedge clk); start = 0;
    while (!done) @(negedge clk);
    repeat (12) @(negedge clk);
    chk(n_ops == NI * 4 + nsh * 4, $sformatf("instruction count %0d", n_ops));
    chk(pos[0] == NI * 4, "iThread ran every interval");
    chk(pos[1] + pos[2] + pos[3] == nsh * 4, "sThreads ran every shard");
    chk(overlap > 0, "units busy together");
    chk((pos[1] > 0) + (pos[2] > 0) + (pos[3] > 0) >= 2, "several sThreads used");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
