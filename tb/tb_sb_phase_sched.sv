// tb_sb_phase_sched: the phase scheduler with a model of the thread PCs and
// of the graph buffer's shard slots. Threads "run" their phase for a random
// number of cycles after each jump; the slot model loads the next shard of
// the stream into an outdated slot after a delay and restarts the stream on
// rewind. Two program groups over five intervals with one to three shards
// each are run. Checked: the iThread's jumps follow Scatter, Apply per
// interval and group with the right interval and vertex range, every shard
// of an interval is given to exactly one sThread before Apply starts, a
// shard of the next interval waits, the slot is marked outdated when its
// shard ends, one rewind per group switch, and done at the end.
module tb_sb_phase_sched;
  import sb_pkg::*;
  localparam int NST = 3, MG = 8, NG = 2, NI = 5, ISZ = 7, NV = 31;
  logic clk = 0, rst_n = 0; always #5 clk = ~clk;
  logic start = 0; logic [3:0] num_groups = NG;
  pc_t grp_scatter [MG], grp_gather [MG], grp_apply [MG], grp_end [MG];
  logic [31:0] num_vertices = NV; logic [15:0] interval_size = ISZ, num_intervals = NI;
  logic [NST:0] at_end, run, jump; pc_t jump_pc [NST+1], end_pc [NST+1];
  shard_meta_t meta [NST]; logic [NST-1:0] set_outdated;
  logic [15:0] cur_interval, dst_count; logic [31:0] dst_start;
  logic rewind, pf_en, done, in_gather;
  int checks = 0, failures = 0;

  sb_phase_sched #(.NST(NST), .MAX_GROUPS(MG)) dut (.clk, .rst_n, .start, .num_groups,
    .grp_scatter, .grp_gather, .grp_apply, .grp_end, .num_vertices, .interval_size, .num_intervals,
    .at_end, .run, .jump, .jump_pc, .end_pc, .meta, .set_outdated, .cur_interval, .dst_start,
    .dst_count, .rewind, .pf_en, .done, .in_gather);

  task automatic chk(bit ok, string what);
    checks++; if (!ok) begin failures++; if (failures < 20) $display("FAIL %s (t=%0t)", what, $time); end
  endtask

  // shard stream: interval of each shard and its last flag
  int sh_itv [$]; bit sh_last [$];
  int ptr = 0, load_wait = 0, load_slot = -1;
  int slot_shard [NST];
  int cnt [NST+1]; bit started [NST+1];
  int served [NG][32];          // times each shard was given to an sThread
  int exp_grp = 0, exp_itv = 0, exp_apply = 0, rewinds = 0, finished_in_itv = 0;

  always_comb for (int t = 0; t <= NST; t++) at_end[t] = run[t] && !jump[t] && started[t] && cnt[t] == 0;

  always @(posedge clk) if (rst_n) begin
    if (rewind) rewinds++;
    // slot model
    for (int k = 0; k < NST; k++) if (set_outdated[k]) meta[k].valid <= 1'b0;
    if (rewind) ptr = 0;
    if (load_slot >= 0) begin
      if (load_wait > 0) load_wait--;
      else begin
        meta[load_slot].valid <= 1'b1; meta[load_slot].interval <= 16'(sh_itv[ptr]);
        meta[load_slot].last <= sh_last[ptr]; slot_shard[load_slot] = ptr; ptr++; load_slot = -1;
      end
    end else if (pf_en && ptr < sh_itv.size()) begin
      for (int k = NST - 1; k >= 0; k--) if (!meta[k].valid && !set_outdated[k]) load_slot = k;
      load_wait = $urandom_range(1, 6);
    end
    // thread model
    for (int t = 0; t <= NST; t++) begin
      if (jump[t]) begin
        started[t] = 1; cnt[t] = $urandom_range(1, 8);
        if (t == 0) begin
          bit is_sc; is_sc = (jump_pc[0] == grp_scatter[exp_grp]);
          chk(run[0], "iThread runs on jump");
          if (!exp_apply) begin
            chk(is_sc, "iThread jumps to Scatter");
            chk(int'(cur_interval) == exp_itv && int'(dst_start) == exp_itv * ISZ &&
                int'(dst_count) == ((NV - exp_itv * ISZ) < ISZ ? NV - exp_itv * ISZ : ISZ), "interval context");
            exp_apply = 1;
          end else begin
            chk(jump_pc[0] == grp_apply[exp_grp], "iThread jumps to Apply");
            for (int s = 0; s < sh_itv.size(); s++)
              if (sh_itv[s] == exp_itv) chk(served[exp_grp][s] == 1, "each shard served once before Apply");
            exp_apply = 0;
            if (exp_itv + 1 < NI) exp_itv++; else begin exp_itv = 0; exp_grp++; end
          end
        end else begin
          int s; s = slot_shard[t-1];
          chk(jump_pc[t] == grp_gather[exp_grp], "sThread jumps to Gather");
          chk(meta[t-1].valid && int'(meta[t-1].interval) == exp_itv && sh_itv[s] == exp_itv, "sThread gets a shard of this interval");
          served[exp_grp][s]++;
        end
      end else if (run[t] && cnt[t] > 0) cnt[t]--;
      if (!run[t]) started[t] = 0;
    end
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    for (int g = 0; g < MG; g++) begin
      grp_scatter[g] = pc_t'(10*g); grp_gather[g] = pc_t'(10*g + 3);
      grp_apply[g] = pc_t'(10*g + 6); grp_end[g] = pc_t'(10*g + 9);
    end
    for (int i = 0; i < NI; i++) begin
      int k; k = $urandom_range(1, 3);
      for (int j = 0; j < k; j++) begin sh_itv.push_back(i); sh_last.push_back(j == k - 1); end
    end
    for (int k = 0; k < NST; k++) begin meta[k] = '0; slot_shard[k] = 0; end
    for (int t = 0; t <= NST; t++) begin cnt[t] = 0; started[t] = 0; end
    for (int g = 0; g < NG; g++) for (int s = 0; s < 32; s++) served[g][s] = 0;
    repeat (3) @(negedge clk); rst_n = 1;
    @(negedge clk); start = 1; @(negedge clk); start = 0;
    while (!done) @(negedge clk);
    chk(exp_grp == NG && exp_itv == 0 && !exp_apply, "all groups and intervals ran");
    chk(rewinds == NG - 1, "one rewind per group switch");
    chk(run == '0 && !pf_en, "idle at the end");
    for (int g = 0; g < NG; g++) for (int s = 0; s < sh_itv.size(); s++) chk(served[g][s] == 1, "shard served once per group");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
