// Shared body of the end-to-end testbenches of switchblade_top.
//
// The including module defines the localparams TB_DBR, TB_SEBR, TB_MUC,
// TB_NV (vertices), TB_ISZ (interval size), TB_NE (edges) and TB_CAP (shard
// capacity) and instantiates the accelerator as `dut` on the signals declared here.
//
// The test builds a random graph, partitions it on the "host" with the
// fine-grained method (sources appended one by one with their edges to a
// shard until the capacity rule num_src*dim_src + num_edge*dim_edge <= cap
// would break), writes the shards, features, edge weights and a three-phase
// program, runs the accelerator and compares every output row with a
// reference computed here. The program is one GNN layer:
//   Scatter: LD.D X->D0; D1 = D0-D0; D2 = D0-D0      (zero accumulators)
//   Gather:  LD.S X->S0; S1 = GEMM(S0, W0); LD.E w->E0; E1 = SCTR.F(S1);
//            E1 = E1 * E0 (broadcast); G.SUM.F D1 += E1; G.MAX.F D2 max= E1;
//            E2 = SCTR.B(D0); E2 = E2 + E1; ST.E E2
//   Apply:   D3 = RELU(D1); D4 = D2 - D0; D4 = LKRELU(D4); D5 = D3 + D4;
//            ST.D D5 -> Y; ST.S D3 -> R
// It also counts the mechanisms of the design and fails if one never occurs.

  import sb_pkg::*;

  localparam int NV   = TB_NV;   // vertices
  localparam int ISZ  = TB_ISZ;  // interval size
  localparam int NI   = (NV + ISZ - 1) / ISZ;
  localparam int NE   = TB_NE;   // edges
  localparam int F    = 32;      // feature dimension
  localparam int DIM_SRC = 2, DIM_EDGE = 3, CAP = TB_CAP;   // capacity rule
  localparam int T_X = 0, T_Y = 1000, T_W = 2000, T_E = 3000, T_R = 4000, T_SH = 5000;
  localparam int MAXCYC = 400000;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic        cfg_we = 0;
  logic [15:0] cfg_addr = 0;
  logic [63:0] cfg_wdata = 0;
  logic        w_wr_en = 0;
  logic [WB_AW-1:0] w_wr_addr = 0;
  logic [TB_MUC*ELEM_W-1:0] w_wr_data = 0;
  logic        start = 0, done;
  logic        mem_req_valid, mem_req_ready, mem_req_we, mem_resp_valid;
  daddr_t      mem_req_addr;
  row_t        mem_req_wdata, mem_resp_data;

  sb_dram_model #(.WORDS(8192), .LATENCY(6), .STALL_EVERY(7)) u_dram (
    .clk, .rst_n, .req_valid(mem_req_valid), .req_ready(mem_req_ready), .req_we(mem_req_we),
    .req_addr(mem_req_addr), .req_wdata(mem_req_wdata),
    .resp_valid(mem_resp_valid), .resp_data(mem_resp_data)
  );

  int checks = 0, failures = 0;
  int cyc = 0;

  // ---------------- graph and data ----------------
  int    esrc [NE], edst [NE];
  elem_t X [NV][F];
  elem_t W [F][F];
  elem_t H [NV][F];
  // partitioned edges in emission order
  int    pe_src [NE], pe_dst [NE];
  elem_t pe_w [NE];
  int    n_pe = 0;
  int    nshards = 0;

  function automatic instr_t mk(op_e op, nsel_e ns, int fd, int fi, sym_t d, sym_t a, sym_t b, int ten);
    instr_t i;
    i = '0; i.op = op; i.nsel = ns; i.fdim = 8'(fd); i.fin = 8'(fi);
    i.dst = d; i.a = a; i.b = b; i.tensor = 4'(ten);
    return i;
  endfunction
  function automatic sym_t sD(int n); return '{t: SYM_D, num: 4'(n)}; endfunction
  function automatic sym_t sS(int n); return '{t: SYM_S, num: 4'(n)}; endfunction
  function automatic sym_t sE(int n); return '{t: SYM_E, num: 4'(n)}; endfunction
  function automatic sym_t sW(int n); return '{t: SYM_W, num: 4'(n)}; endfunction

  task automatic cfg(int a, logic [63:0] d);
    @(negedge clk); cfg_we = 1; cfg_addr = 16'(a); cfg_wdata = d;
    @(negedge clk); cfg_we = 0;
  endtask

  function automatic row_t vec_row(elem_t v [F]);
    row_t r; r = '0;
    for (int i = 0; i < F; i++) r[i*ELEM_W +: ELEM_W] = v[i];
    return r;
  endfunction

  // ---------------- host partitioner (fine-grained) ----------------
  int dptr;
  task automatic emit_shard(int itv, bit last, int srcs [$], int el_s [$], int el_d [$], elem_t el_w [$]);
    row_t w; shard_hdr_t h;
    h = '0; h.num_src = 16'(srcs.size()); h.num_edge = 16'(el_s.size());
    h.interval = 16'(itv); h.last = 16'(last); h.edge_off = 32'(n_pe);
    w = '0; w[$bits(shard_hdr_t)-1:0] = h;
    u_dram.mem[dptr] = w; dptr++;
    for (int k = 0; k < srcs.size(); k += 16) begin
      w = '0;
      for (int j = 0; j < 16 && k + j < srcs.size(); j++) w[j*32 +: 32] = 32'(srcs[k+j]);
      u_dram.mem[dptr] = w; dptr++;
    end
    for (int k = 0; k < el_s.size(); k += 16) begin
      w = '0;
      for (int j = 0; j < 16 && k + j < el_s.size(); j++) begin
        edge_t e; e.src_l = 16'(el_s[k+j]); e.dst_l = 16'(el_d[k+j]);
        w[j*32 +: 32] = e;
      end
      u_dram.mem[dptr] = w; dptr++;
    end
    for (int k = 0; k < el_s.size(); k++) begin
      pe_src[n_pe] = srcs[el_s[k]]; pe_dst[n_pe] = itv * ISZ + el_d[k]; pe_w[n_pe] = el_w[k];
      n_pe++;
    end
    nshards++;
  endtask

  task automatic partition();
    dptr = T_SH;
    for (int itv = 0; itv < NI; itv++) begin
      int srcs [$]; int el_s [$]; int el_d [$]; elem_t el_w [$];
      for (int s = 0; s < NV; s++) begin
        int dl [$];
        for (int e = 0; e < NE; e++)
          if (esrc[e] == s && edst[e] / ISZ == itv) dl.push_back(edst[e] - itv * ISZ);
        if (dl.size() > 0) begin
          if ((srcs.size() + 1) * DIM_SRC + (el_s.size() + dl.size()) * DIM_EDGE > CAP) begin
            emit_shard(itv, 0, srcs, el_s, el_d, el_w);
            srcs.delete(); el_s.delete(); el_d.delete(); el_w.delete();
          end
          srcs.push_back(s);
          foreach (dl[k]) begin
            el_s.push_back(srcs.size() - 1); el_d.push_back(dl[k]);
            el_w.push_back(elem_t'($urandom_range(32, 255)));
          end
        end
      end
      emit_shard(itv, 1, srcs, el_s, el_d, el_w);
    end
  endtask

  // ---------------- mechanism counters ----------------
  int n_multi_sthread = 0, n_unit_overlap = 0, n_prefetch = 0, n_wait_next_itv = 0;
  int n_gather_merge = 0, n_bcast = 0, n_mu_tiles = 0, n_itv_switch = 0, n_dram_stall = 0;
  int n_queue_multi = 0;

  always @(posedge clk) if (rst_n) begin
    int nrun, nbusy;
    cyc++;
    nrun = 0;
    for (int t = 1; t <= NUM_STHREAD; t++) nrun += int'(dut.u_ctrl.run[t]);
    if (nrun >= 2) n_multi_sthread++;
    nbusy = int'(dut.u_vu.busy) + int'(dut.u_mu.busy) + int'(dut.u_lsu.busy || dut.u_lsu.pf_busy);
    if (nbusy >= 2) n_unit_overlap++;
    if (dut.u_gb.load_done) n_prefetch++;
    if (dut.u_ctrl.u_ps.state == 3'd2)
      for (int k = 0; k < NUM_STHREAD; k++)
        if (dut.u_gb.meta[k].valid && dut.u_gb.meta[k].interval != dut.u_ctrl.cur_interval)
          n_wait_next_itv++;
    if (dut.u_vu.state == 2'd2 && (dut.u_vu.u.op == OP_GSUM_F || dut.u_vu.u.op == OP_GMAX_F))
      for (int l = 0; l < dut.VU_NC; l++)
        if (dut.u_vu.lv_q[l] && !dut.u_vu.first[l]) n_gather_merge++;
    if (dut.u_vu.state == 2'd2 && dut.u_vu.u.op == OP_MUL && dut.u_vu.u.bcast) n_bcast++;
    if (dut.u_mu.state == 3'd5 && 32'(dut.u_mu.tb) + dut.MU_R < 32'(dut.u_mu.u.n)) n_mu_tiles++;
    if (dut.u_ctrl.u_ps.state == 3'd3 && dut.u_ctrl.u_ps.at_end[0] && !dut.u_ctrl.u_ps.jump[0]) n_itv_switch++;
    if (mem_req_valid && !mem_req_ready) n_dram_stall++;
    if (dut.u_ctrl.u_memq.count + dut.u_ctrl.u_vecq.count + dut.u_ctrl.u_matq.count >= 2) n_queue_multi++;
  end

  task automatic need(string name, int n);
    checks++;
    if (n == 0) begin failures++; $display("FAIL mechanism never seen: %s", name); end
    else $display("mechanism %-28s seen %0d", name, n);
  endtask

  function automatic elem_t relu(elem_t v); return (v < 0) ? elem_t'(0) : v; endfunction
  function automatic elem_t lkrelu(elem_t v); return (v < 0) ? elem_t'(v >>> LK_SHIFT) : v; endfunction

  initial begin : watchdog
    repeat (MAXCYC) @(posedge clk);
    failures++;
    $display("FAIL watchdog after %0d cycles", MAXCYC);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin : main
    int pc;
    int t_start;
    // ---- data ----
    for (int e = 0; e < NE; e++) begin esrc[e] = $urandom_range(0, NV-1); edst[e] = $urandom_range(0, NV-1); end
    for (int v = 0; v < NV; v++) for (int i = 0; i < F; i++) X[v][i] = elem_t'($urandom_range(0, 511)) - 256;
    for (int k = 0; k < F; k++) for (int j = 0; j < F; j++) W[k][j] = elem_t'($urandom_range(0, 127)) - 64;
    for (int v = 0; v < NV; v++) for (int j = 0; j < F; j++) begin
      logic signed [ACC_W-1:0] acc; acc = 0;
      for (int k = 0; k < F; k++) acc += ACC_W'(X[v][k] * W[k][j]);
      H[v][j] = elem_t'(acc >>> FRAC);
    end
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int v = 0; v < NV; v++) u_dram.mem[T_X + v] = vec_row(X[v]);
    partition();
    for (int e = 0; e < n_pe; e++) begin row_t r; r = '0; r[ELEM_W-1:0] = pe_w[e]; u_dram.mem[T_W + e] = r; end
    $display("graph: %0d vertices, %0d edges, %0d intervals, %0d shards", NV, n_pe, NI, nshards);

    // ---- weights ----
    for (int k = 0; k < F; k++) begin
      @(negedge clk); w_wr_en = 1; w_wr_addr = WB_AW'(k); w_wr_data = '0;
      for (int j = 0; j < F; j++) w_wr_data[j*ELEM_W +: ELEM_W] = W[k][j];
    end
    @(negedge clk); w_wr_en = 0;

    // ---- symbol and tensor tables ----
    // D symbols ISZ rows apart (at least 16), S and E symbols sized by the capacity rule
    for (int d = 0; d < 6; d++) cfg(16'h1000 + {SYM_D, 4'(d)}, 64'(d * ((ISZ > 16) ? ISZ : 16)));
    cfg(16'h1000 + {SYM_S, 4'd0}, 0);  cfg(16'h1000 + {SYM_S, 4'd1}, CAP / DIM_SRC);
    cfg(16'h1000 + {SYM_E, 4'd0}, 2 * (CAP / DIM_SRC));
    cfg(16'h1000 + {SYM_E, 4'd1}, 2 * (CAP / DIM_SRC) + CAP / DIM_EDGE);
    cfg(16'h1000 + {SYM_E, 4'd2}, 2 * (CAP / DIM_SRC) + 2 * (CAP / DIM_EDGE));
    cfg(16'h1000 + {SYM_W, 4'd0}, 0);
    cfg(16'h1100, T_X); cfg(16'h1101, T_Y); cfg(16'h1102, T_W); cfg(16'h1103, T_E); cfg(16'h1104, T_R);

    // ---- program ----
    pc = 0;
    cfg(16'h1200, pc);
    cfg(pc++, mk(OP_LD_D,  N_D, F, 0, sD(0), sD(0), sD(0), 0));
    cfg(pc++, mk(OP_SUB,   N_D, F, F, sD(1), sD(0), sD(0), 0));
    cfg(pc++, mk(OP_SUB,   N_D, F, F, sD(2), sD(0), sD(0), 0));
    cfg(16'h1201, pc);
    cfg(pc++, mk(OP_LD_S,  N_S, F, 0, sS(0), sS(0), sS(0), 0));
    cfg(pc++, mk(OP_GEMM,  N_S, F, F, sS(1), sS(0), sW(0), 0));
    cfg(pc++, mk(OP_LD_E,  N_E, 1, 0, sE(0), sE(0), sE(0), 2));
    cfg(pc++, mk(OP_SCTR_F,N_E, F, 0, sE(1), sS(1), sS(1), 0));
    cfg(pc++, mk(OP_MUL,   N_E, F, 1, sE(1), sE(1), sE(0), 0));
    cfg(pc++, mk(OP_GSUM_F,N_E, F, 0, sD(1), sE(1), sE(1), 0));
    cfg(pc++, mk(OP_GMAX_F,N_E, F, 0, sD(2), sE(1), sE(1), 0));
    cfg(pc++, mk(OP_SCTR_B,N_E, F, 0, sE(2), sD(0), sD(0), 0));
    cfg(pc++, mk(OP_ADD,   N_E, F, F, sE(2), sE(2), sE(1), 0));
    cfg(pc++, mk(OP_ST_E,  N_E, F, 0, sE(2), sE(2), sE(2), 3));
    cfg(16'h1202, pc);
    cfg(pc++, mk(OP_RELU,  N_D, F, 0, sD(3), sD(1), sD(1), 0));
    cfg(pc++, mk(OP_SUB,   N_D, F, F, sD(4), sD(2), sD(0), 0));
    cfg(pc++, mk(OP_LKRELU,N_D, F, 0, sD(4), sD(4), sD(4), 0));
    cfg(pc++, mk(OP_ADD,   N_D, F, F, sD(5), sD(3), sD(4), 0));
    cfg(pc++, mk(OP_ST_D,  N_D, F, 0, sD(5), sD(5), sD(5), 1));
    cfg(pc++, mk(OP_ST_S,  N_D, F, 0, sD(3), sD(3), sD(3), 4));
    cfg(16'h1203, pc);
    cfg(16'h1300, 1); cfg(16'h1301, NV); cfg(16'h1302, ISZ); cfg(16'h1303, NI);
    cfg(16'h1304, T_SH); cfg(16'h1305, nshards);

    // ---- run ----
    @(negedge clk); start = 1; @(negedge clk); start = 0;
    t_start = cyc;
    wait (done);
    $display("run finished after %0d cycles", cyc - t_start);
    repeat (5) @(posedge clk);

    // ---- reference and compare ----
    begin
      elem_t s [NV][F], mx [NV][F];
      int bad;
      for (int v = 0; v < NV; v++) for (int j = 0; j < F; j++) begin s[v][j] = 0; mx[v][j] = 0; end
      bad = 0;
      for (int e = 0; e < n_pe; e++) begin
        row_t got, exp_r;
        exp_r = '0;
        for (int j = 0; j < F; j++) begin
          elem_t m;
          m = fx_mul(H[pe_src[e]][j], pe_w[e]);
          s[pe_dst[e]][j] = s[pe_dst[e]][j] + m;
          if (m > mx[pe_dst[e]][j]) mx[pe_dst[e]][j] = m;
          exp_r[j*ELEM_W +: ELEM_W] = X[pe_dst[e]][j] + m;
        end
        got = u_dram.mem[T_E + e];
        checks++;
        if (got !== exp_r) begin failures++; if (bad++ < 5) $display("FAIL edge %0d out", e); end
      end
      for (int v = 0; v < NV; v++) begin
        row_t ey, er;
        ey = '0; er = '0;
        for (int j = 0; j < F; j++) begin
          ey[j*ELEM_W +: ELEM_W] = relu(s[v][j]) + lkrelu(mx[v][j] - X[v][j]);
          er[j*ELEM_W +: ELEM_W] = relu(s[v][j]);
        end
        checks += 2;
        if (u_dram.mem[T_Y + v] !== ey) begin failures++; if (bad++ < 10) $display("FAIL vertex %0d Y", v); end
        if (u_dram.mem[T_R + v] !== er) begin failures++; if (bad++ < 10) $display("FAIL vertex %0d R", v); end
      end
    end

    need("two sThreads running", n_multi_sthread);
    need("units busy together", n_unit_overlap);
    need("shard prefetch", n_prefetch);
    need("shard waits for next interval", n_wait_next_itv);
    need("gather same-destination merge", n_gather_merge);
    need("broadcast operand", n_bcast);
    need("multi-tile GEMM", n_mu_tiles);
    need("interval switch", n_itv_switch);
    need("DRAM backpressure", n_dram_stall);
    need("queues holding 2+ ops", n_queue_multi);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
