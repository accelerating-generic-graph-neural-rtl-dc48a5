// tb_sb_decoder: writes random symbol and tensor tables, then decodes random
// instructions for every thread and compares each micro-op field with a
// reference: the item count (op macro or the nsel field), rows from the
// feature dimensions, broadcast, buffer select, symbol base plus the shard
// slot's part of the SrcEdgeBuffer, weight address, tensor base and the
// interval or shard offset, and the unit class.
module tb_sb_decoder;
  import sb_pkg::*;
  localparam int NST = 3, PART = 1000;
  logic clk = 0; always #5 clk = ~clk;
  logic sym_we = 0, ten_we = 0; logic [5:0] sym_idx = 0; addr_t sym_val = 0;
  logic [3:0] ten_idx = 0; daddr_t ten_val = 0;
  instr_t instr; tid_t tid; logic [31:0] dst_start; logic [15:0] dst_count;
  shard_meta_t meta [NST]; uop_t uop; cls_e cls;
  addr_t sb [64]; daddr_t tb_ [16];
  int checks = 0, failures = 0;

  sb_decoder #(.NST(NST), .SEB_PART(PART)) dut (.clk, .sym_we, .sym_idx, .sym_val, .ten_we,
    .ten_idx, .ten_val, .instr, .tid, .dst_start, .dst_count, .meta, .uop, .cls);

  task automatic chk(bit ok, string what);
    checks++; if (!ok) begin failures++; if (failures < 20) $display("FAIL %s op %s tid %0d", what, instr.op.name(), tid); end
  endtask

  function automatic addr_t base_of(sym_t s, int slot);
    addr_t a; a = sb[{s.t, s.num}];
    if (s.t == SYM_S || s.t == SYM_E) a = a + addr_t'(slot * PART);
    return a;
  endfunction

  initial begin
    repeat (100000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    instr = '0; tid = 0; dst_start = 0; dst_count = 0;
    for (int k = 0; k < NST; k++) meta[k] = '0;
    for (int i = 0; i < 64; i++) begin
      @(negedge clk); sb[i] = addr_t'($urandom_range(0, 50000)); sym_we = 1; sym_idx = 6'(i); sym_val = sb[i];
    end
    @(negedge clk); sym_we = 0;
    for (int i = 0; i < 16; i++) begin
      @(negedge clk); tb_[i] = $urandom; ten_we = 1; ten_idx = 4'(i); ten_val = tb_[i];
    end
    @(negedge clk); ten_we = 0;
    for (int k = 0; k < 2000; k++) begin
      int slot, n_exp; op_e op;
      op = op_e'($urandom_range(0, 17));
      instr = '0; instr.op = op; instr.nsel = nsel_e'($urandom_range(0, 3));
      instr.nlit = 12'($urandom); instr.fdim = 8'($urandom_range(1, 128));
      instr.fin = 8'($urandom_range(1, 128));
      if ($urandom_range(0, 3) == 0) instr.fin = 1;
      instr.dst = sym_t'($urandom); instr.a = sym_t'($urandom); instr.b = sym_t'($urandom);
      instr.tensor = 4'($urandom);
      tid = tid_t'($urandom_range(0, 3));
      dst_start = $urandom; dst_count = 16'($urandom);
      for (int m = 0; m < NST; m++) begin
        meta[m] = '0; meta[m].valid = 1; meta[m].num_src = 16'($urandom); meta[m].num_edge = 16'($urandom);
        meta[m].edge_off = $urandom; meta[m].interval = 16'($urandom);
      end
      #1;
      slot = (tid == 0) ? 0 : int'(tid) - 1;
      case (instr.nsel)
        N_D: n_exp = dst_count; N_S: n_exp = meta[slot].num_src;
        N_E: n_exp = meta[slot].num_edge; default: n_exp = instr.nlit;
      endcase
      if (op inside {OP_SCTR_F, OP_SCTR_B, OP_GSUM_F, OP_GMAX_F, OP_LD_E, OP_ST_E}) n_exp = meta[slot].num_edge;
      if (op == OP_LD_S) n_exp = meta[slot].num_src;
      if (op inside {OP_LD_D, OP_ST_D, OP_ST_S}) n_exp = dst_count;
      chk(uop.op == op && uop.tid == tid && uop.slot == 2'(slot), "op/tid/slot");
      chk(uop.n == 16'(n_exp), "item count");
      chk(uop.rows == 4'((int'(instr.fdim) + 31) / 32) && uop.rows_in == 4'((int'(instr.fin) + 31) / 32), "rows");
      chk(uop.bcast == (instr.fin == 1), "broadcast");
      chk(uop.dst_addr == base_of(instr.dst, slot) && uop.a_addr == base_of(instr.a, slot) &&
          uop.b_addr == base_of(instr.b, slot), "symbol addresses");
      chk(uop.dst_seb == (instr.dst.t inside {SYM_S, SYM_E}) && uop.a_seb == (instr.a.t inside {SYM_S, SYM_E}), "buffer select");
      chk(uop.w_addr == WB_AW'(sb[{instr.b.t, instr.b.num}]), "weight address");
      chk(uop.dram_base == tb_[instr.tensor], "tensor base");
      chk(uop.dram_off == ((op inside {OP_LD_E, OP_ST_E}) ? daddr_t'(meta[slot].edge_off) : daddr_t'(dst_start)), "dram offset");
      chk(cls == ((op == OP_GEMM) ? CLS_MAT : (op >= OP_LD_D) ? CLS_MEM : CLS_VEC), "class");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
