// sb_controller: the shard-level multi-threading (SLMT) controller.
//
// It holds one program counter per thread (iPC for the interval thread,
// NST sPCs for the shard threads), the instruction buffer, the decoder, the
// three instruction queues (memory, vector, matrix) and the phase scheduler.
// Each cycle the fetch selector picks, round robin, one thread that runs,
// has no instruction in flight and has not reached the end of its phase; the
// instruction at its PC is read, decoded with that thread's macros and symbol
// bases, and routed by its type into the queue of the target unit (the
// decode-to-queue crossbar of the architecture). The PC then advances. A
// thread keeps at most one instruction in flight: its next one is fetched
// only after the unit reports `done` for it, so the instructions of one
// thread run in program order while different threads use the memory, vector
// and matrix units at the same time. This per-thread blocking is this
// design's way of keeping order; the paper does not describe dependency
// tracking.
//
// Host configuration: cfg_we/cfg_addr/cfg_wdata write, in this map,
//   0x0000-0x03FF instruction buffer, 0x1000-0x103F symbol table,
//   0x1100-0x110F tensor table, 0x1200 + 4*g + {0,1,2,3} group g Scatter,
//   Gather, Apply start and group end PC, 0x1300 number of groups,
//   0x1301 vertices, 0x1302 interval size, 0x1303 intervals,
//   0x1304 shard stream base, 0x1305 number of shards.
// `start` begins a run, `done` is high when the last group has finished.
// The fill-level outputs of the three queues are left open here (the
// controller only needs their ready signals), and the completion assertions
// use the asynchronous reset as their disable condition; lint notes on both
// are expected.
module sb_controller
  import sb_pkg::*;
#(
  parameter int unsigned NST        = NUM_STHREAD,
  parameter int unsigned QDEPTH     = 4,
  parameter int unsigned MAX_GROUPS = 8,
  parameter int unsigned IBD        = IB_DEPTH,
  parameter int unsigned SEB_PART   = SEB_ROWS / NUM_STHREAD
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        cfg_we,
  input  logic [15:0] cfg_addr,
  input  logic [63:0] cfg_wdata,
  input  logic        start,
  output logic        done,
  // queues to the units
  output logic        mem_valid,
  input  logic        mem_ready,
  output uop_t        mem_uop,
  output logic        vec_valid,
  input  logic        vec_ready,
  output uop_t        vec_uop,
  output logic        mat_valid,
  input  logic        mat_ready,
  output uop_t        mat_uop,
  // completions
  input  logic        mem_done,
  input  tid_t        mem_done_tid,
  input  logic        vec_done,
  input  tid_t        vec_done_tid,
  input  logic        mat_done,
  input  tid_t        mat_done_tid,
  // graph buffer / LSU
  input  shard_meta_t meta [NST],
  output logic [NST-1:0] set_outdated,
  output logic        lsu_rewind,
  output logic        pf_en,
  output daddr_t      shard_base,
  output logic [31:0] num_shards,
  // status
  output logic [NST:0] thread_run,
  output logic [15:0] cur_interval
);
  localparam int unsigned NT = NST + 1;

  // ---------------- configuration registers ----------------
  logic [3:0]  num_groups;
  pc_t         grp_scatter [MAX_GROUPS], grp_gather [MAX_GROUPS];
  pc_t         grp_apply   [MAX_GROUPS], grp_end    [MAX_GROUPS];
  logic [31:0] num_vertices;
  logic [15:0] interval_size, num_intervals;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      num_groups <= 4'd1; num_vertices <= '0; interval_size <= 16'd1; num_intervals <= 16'd1;
      shard_base <= '0; num_shards <= '0;
      for (int g = 0; g < MAX_GROUPS; g++) begin
        grp_scatter[g] <= '0; grp_gather[g] <= '0; grp_apply[g] <= '0; grp_end[g] <= '0;
      end
    end else if (cfg_we) begin
      if (cfg_addr[15:8] == 8'h12) begin
        for (int g = 0; g < MAX_GROUPS; g++)
          if (int'(cfg_addr[7:2]) == g)
            case (cfg_addr[1:0])
              2'd0: grp_scatter[g] <= pc_t'(cfg_wdata);
              2'd1: grp_gather[g]  <= pc_t'(cfg_wdata);
              2'd2: grp_apply[g]   <= pc_t'(cfg_wdata);
              default: grp_end[g]  <= pc_t'(cfg_wdata);
            endcase
      end
      case (cfg_addr)
        16'h1300: num_groups    <= cfg_wdata[3:0];
        16'h1301: num_vertices  <= cfg_wdata[31:0];
        16'h1302: interval_size <= cfg_wdata[15:0];
        16'h1303: num_intervals <= cfg_wdata[15:0];
        16'h1304: shard_base    <= daddr_t'(cfg_wdata);
        16'h1305: num_shards    <= cfg_wdata[31:0];
        default: ;
      endcase
    end
  end

  // ---------------- phase scheduler ----------------
  logic [NST:0] at_end, run, jump;
  pc_t          jump_pc [NT];
  pc_t          end_pc  [NT];
  logic [31:0]  dst_start;
  logic [15:0]  dst_count;
  logic         in_gather;

  sb_phase_sched #(.NST(NST), .MAX_GROUPS(MAX_GROUPS)) u_ps (
    .clk, .rst_n, .start,
    .num_groups, .grp_scatter, .grp_gather, .grp_apply, .grp_end,
    .num_vertices, .interval_size, .num_intervals,
    .at_end, .run, .jump, .jump_pc, .end_pc,
    .meta, .set_outdated,
    .cur_interval, .dst_start, .dst_count,
    .rewind(lsu_rewind), .pf_en, .done, .in_gather
  );
  assign thread_run = run;

  // ---------------- PCs and fetch selection ----------------
  pc_t          pc   [NT];
  logic [NST:0] busy;
  logic [NST:0] elig;
  logic [TID_W-1:0] rr;         // thread with the highest priority
  logic         fire;
  tid_t         sel;

  instr_t ir;
  uop_t   du;
  cls_e   dcls;
  logic   q_in_ready [3];
  logic   fetch_ok;

  always_comb begin
    for (int t = 0; t < NT; t++) begin
      at_end[t] = run[t] && !busy[t] && !jump[t] && (pc[t] == end_pc[t]);
      elig[t]   = run[t] && !busy[t] && !jump[t] && (pc[t] != end_pc[t]);
    end
    fire = 1'b0; sel = '0;
    for (int k = NT - 1; k >= 0; k--) begin
      int t;
      t = (int'(rr) + k) % NT;
      if (elig[t]) begin fire = 1'b1; sel = tid_t'(t); end
    end
  end

  sb_inst_buffer #(.DEPTH(IBD)) u_ib (
    .clk, .wr_en(cfg_we && cfg_addr[15:12] == 4'h0),
    .wr_addr(pc_t'(cfg_addr)), .wr_data(instr_t'(cfg_wdata)),
    .rd_addr(pc[sel]), .rd_data(ir)
  );

  sb_decoder #(.NST(NST), .SEB_PART(SEB_PART)) u_dec (
    .clk,
    .sym_we(cfg_we && cfg_addr[15:8] == 8'h10), .sym_idx(cfg_addr[5:0]), .sym_val(addr_t'(cfg_wdata)),
    .ten_we(cfg_we && cfg_addr[15:8] == 8'h11), .ten_idx(cfg_addr[3:0]), .ten_val(daddr_t'(cfg_wdata)),
    .instr(ir), .tid(sel), .dst_start, .dst_count, .meta, .uop(du), .cls(dcls)
  );

  wire is_nop = (ir.op == OP_NOP);
  assign fetch_ok = fire && (is_nop || q_in_ready[int'(dcls)]);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int t = 0; t < NT; t++) pc[t] <= '0;
      busy <= '0; rr <= '0;
    end else begin
      if (fetch_ok) begin
        pc[sel] <= pc[sel] + 1'b1;
        if (!is_nop) busy[sel] <= 1'b1;
        rr <= (int'(sel) == NT - 1) ? '0 : sel + 1'b1;
      end
      if (mem_done) busy[mem_done_tid] <= 1'b0;
      if (vec_done) busy[vec_done_tid] <= 1'b0;
      if (mat_done) busy[mat_done_tid] <= 1'b0;
      for (int t = 0; t < NT; t++)
        if (jump[t]) pc[t] <= jump_pc[t];
    end
  end

  // ---------------- instruction queues ----------------
  sb_inst_queue #(.DEPTH(QDEPTH)) u_memq (
    .clk, .rst_n, .in_valid(fetch_ok && !is_nop && dcls == CLS_MEM), .in_ready(q_in_ready[0]),
    .in_uop(du), .out_valid(mem_valid), .out_ready(mem_ready), .out_uop(mem_uop), .count()
  );
  sb_inst_queue #(.DEPTH(QDEPTH)) u_vecq (
    .clk, .rst_n, .in_valid(fetch_ok && !is_nop && dcls == CLS_VEC), .in_ready(q_in_ready[1]),
    .in_uop(du), .out_valid(vec_valid), .out_ready(vec_ready), .out_uop(vec_uop), .count()
  );
  sb_inst_queue #(.DEPTH(QDEPTH)) u_matq (
    .clk, .rst_n, .in_valid(fetch_ok && !is_nop && dcls == CLS_MAT), .in_ready(q_in_ready[2]),
    .in_uop(du), .out_valid(mat_valid), .out_ready(mat_ready), .out_uop(mat_uop), .count()
  );

  // one instruction in flight per thread: a completion always matches
  property p_done_busy_mem; @(posedge clk) disable iff (!rst_n) mem_done |-> busy[mem_done_tid]; endproperty
  assert property (p_done_busy_mem);
  property p_done_busy_vec; @(posedge clk) disable iff (!rst_n) vec_done |-> busy[vec_done_tid]; endproperty
  assert property (p_done_busy_vec);
  property p_done_busy_mat; @(posedge clk) disable iff (!rst_n) mat_done |-> busy[mat_done_tid]; endproperty
  assert property (p_done_busy_mat);

endmodule
