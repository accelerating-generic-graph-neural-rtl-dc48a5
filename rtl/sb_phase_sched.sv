// sb_phase_sched: the Phase Scheduler (PS) of the SLMT controller.
//
// It carries out the PLOF template program
//     for each interval: ScatterPhase; for each shard: GatherPhase; ApplyPhase
// with one interval thread (iThread, thread 0) and NST shard threads
// (sThreads, threads 1..NST). The thread PCs live in the controller; the PS
// starts a thread by raising run[t] together with a one-cycle jump[t] and the
// phase start address, and is told by at_end[t] that a running thread has
// reached the end of its phase with nothing in flight. The rules are the
// paper's:
//   * iThread ends ScatterPhase -> iThread paused, GatherPhase begins;
//   * an idle sThread whose graph-buffer slot holds a current shard of this
//     interval is given that shard (PC reset to the GatherPhase start);
//   * an sThread that ends its shard is paused and its slot's update flag is
//     set, so the LSU prefetches the next shard into it;
//   * when the interval's last shard is finished and no sThread runs, the
//     iThread is resumed at ApplyPhase;
//   * iThread ends ApplyPhase -> next interval (ScatterPhase) or, after the
//     last interval, the next program group; after the last group, done.
// A program group (one GNN layer part, e.g. one of the groups a compiler
// emits) is four PCs: Scatter, Gather and Apply start and the group end; the
// host writes up to MAX_GROUPS of them. Every group re-reads the same shard
// stream, so at a group switch the PS pulses `rewind` for the LSU.
// Intervals are uniform (interval_size vertices, the last one shorter).
// Pausing and resuming follow the paper; group table, interval arithmetic
// and signalling are this design's.
module sb_phase_sched
  import sb_pkg::*;
#(
  parameter int unsigned NST        = NUM_STHREAD,
  parameter int unsigned MAX_GROUPS = 8
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        start,
  input  logic [3:0]  num_groups,
  input  pc_t         grp_scatter [MAX_GROUPS],
  input  pc_t         grp_gather  [MAX_GROUPS],
  input  pc_t         grp_apply   [MAX_GROUPS],
  input  pc_t         grp_end     [MAX_GROUPS],
  input  logic [31:0] num_vertices,
  input  logic [15:0] interval_size,
  input  logic [15:0] num_intervals,
  // thread status / commands
  input  logic [NST:0] at_end,
  output logic [NST:0] run,
  output logic [NST:0] jump,
  output pc_t         jump_pc [NST+1],
  output pc_t         end_pc  [NST+1],
  // graph buffer
  input  shard_meta_t meta [NST],
  output logic [NST-1:0] set_outdated,
  // interval context
  output logic [15:0] cur_interval,
  output logic [31:0] dst_start,
  output logic [15:0] dst_count,
  output logic        rewind,
  output logic        pf_en,
  output logic        done,
  output logic        in_gather
);
  typedef enum logic [2:0] {P_IDLE, P_SCATTER, P_GATHER, P_APPLY, P_FINISH} pstate_e;
  pstate_e state;
  logic [3:0] grp;
  logic       last_done;

  wire [2:0] g = grp[2:0];

  always_comb begin
    logic [31:0] remain;
    dst_start = 32'(cur_interval) * 32'(interval_size);
    remain    = num_vertices - dst_start;
    dst_count = (remain > 32'(interval_size)) ? interval_size : remain[15:0];
    end_pc[0] = (state == P_APPLY) ? grp_end[g] : grp_gather[g];
    for (int t = 1; t <= NST; t++) end_pc[t] = grp_apply[g];
  end

  assign pf_en     = (state != P_IDLE) && (state != P_FINISH);
  assign in_gather = (state == P_GATHER);

  // does any slot still hold an unfinished shard of the current interval?
  logic pending;
  always_comb begin
    pending = 1'b0;
    for (int k = 0; k < NST; k++)
      if (meta[k].valid && meta[k].interval == cur_interval) pending = 1'b1;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= P_IDLE; grp <= '0; cur_interval <= '0; last_done <= 1'b0;
      run <= '0; jump <= '0; set_outdated <= '0; rewind <= 1'b0; done <= 1'b0;
      for (int t = 0; t <= NST; t++) jump_pc[t] <= '0;
    end else begin
      jump <= '0; set_outdated <= '0; rewind <= 1'b0;
      case (state)
        P_IDLE: if (start) begin
          grp <= '0; cur_interval <= '0; done <= 1'b0;
          run[0] <= 1'b1; jump[0] <= 1'b1; jump_pc[0] <= grp_scatter[0];
          state <= P_SCATTER;
        end
        P_SCATTER: if (at_end[0] && !jump[0]) begin
          run[0] <= 1'b0; last_done <= 1'b0; state <= P_GATHER;
        end
        P_GATHER: begin
          for (int k = 0; k < NST; k++) begin
            if (!run[k+1] && !set_outdated[k] && meta[k].valid && meta[k].interval == cur_interval) begin
              run[k+1] <= 1'b1; jump[k+1] <= 1'b1; jump_pc[k+1] <= grp_gather[g];
            end
            if (run[k+1] && at_end[k+1] && !jump[k+1]) begin
              run[k+1] <= 1'b0; set_outdated[k] <= 1'b1;
              if (meta[k].last) last_done <= 1'b1;
            end
          end
          if (last_done && run[NST:1] == '0 && !pending && set_outdated == '0) begin
            run[0] <= 1'b1; jump[0] <= 1'b1; jump_pc[0] <= grp_apply[g];
            state <= P_APPLY;
          end
        end
        P_APPLY: if (at_end[0] && !jump[0]) begin
          if (cur_interval + 1'b1 < num_intervals) begin
            cur_interval <= cur_interval + 1'b1;
            jump[0] <= 1'b1; jump_pc[0] <= grp_scatter[g];
            state <= P_SCATTER;
          end else if (grp + 1'b1 < num_groups) begin
            grp <= grp + 1'b1; cur_interval <= '0; rewind <= 1'b1;
            jump[0] <= 1'b1; jump_pc[0] <= grp_scatter[3'(grp + 1'b1)];
            state <= P_SCATTER;
          end else begin
            run[0] <= 1'b0; done <= 1'b1; state <= P_FINISH;
          end
        end
        P_FINISH: if (start) begin
          grp <= '0; cur_interval <= '0; done <= 1'b0;
          run[0] <= 1'b1; jump[0] <= 1'b1; jump_pc[0] <= grp_scatter[0];
          state <= P_SCATTER;
        end
        default: state <= P_IDLE;
      endcase
    end
  end

  // an sThread only runs during GatherPhase, the iThread never with them
  property p_exclusive; @(posedge clk) disable iff (!rst_n) run[0] |-> (run[NST:1] == '0); endproperty
  assert property (p_exclusive);

endmodule
