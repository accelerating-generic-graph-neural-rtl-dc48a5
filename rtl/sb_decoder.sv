// sb_decoder: instruction decoder with run-time macro resolution.
//
// An instruction names an operator, a data-dimension field and memory
// symbols. The decoder turns it into a micro-op (uop_t) for one unit:
//  * item count: the macros D (size of the current destination interval),
//    S (source vertices of the thread's shard) and E (edges of the thread's
//    shard) are replaced by their current values; graph-traversal and memory
//    operators imply theirs (GTR and LD.E/ST.E: E, LD.S: S, LD.D/ST.D/ST.S: D);
//  * rows per item = ceil(feature dimension / 32);
//  * memory symbols (type D, S, E or W plus a number) become buffer row
//    addresses: base address from the host-written symbol table plus, for S
//    and E, the base of the issuing sThread's private part of the
//    SrcEdgeBuffer (the buffer is split into NST equal parts);
//  * memory operators get the DRAM base of their tensor from the tensor
//    table and the offset of the interval's first vertex or the shard's
//    first edge.
// Purely combinational apart from the two host-written tables.
// The fields and macros follow the paper's ISA description; the encoding and
// the tables are this design's.
module sb_decoder
  import sb_pkg::*;
#(
  parameter int unsigned NST      = NUM_STHREAD,
  parameter int unsigned SEB_PART = SEB_ROWS / NUM_STHREAD
) (
  input  logic        clk,
  // host tables
  input  logic        sym_we,
  input  logic [5:0]  sym_idx,       // {type, number}
  input  addr_t       sym_val,
  input  logic        ten_we,
  input  logic [3:0]  ten_idx,
  input  daddr_t      ten_val,
  // context
  input  instr_t      instr,
  input  tid_t        tid,
  input  logic [31:0] dst_start,     // first vertex of the current interval
  input  logic [15:0] dst_count,     // D
  input  shard_meta_t meta [NST],
  output uop_t        uop,
  output cls_e        cls
);
  addr_t  sym_base [64];
  daddr_t ten_base [16];

  always_ff @(posedge clk) begin
    if (sym_we) sym_base[sym_idx] <= sym_val;
    if (ten_we) ten_base[ten_idx] <= ten_val;
  end

  function automatic logic [3:0] rows_of(logic [7:0] f);
    return 4'((int'(f) + VLEN - 1) / VLEN);
  endfunction

  logic [1:0]  slot;
  shard_meta_t m;
  logic [15:0] nS, nE;

  function automatic addr_t sym_addr(sym_t s, logic [1:0] sl);
    addr_t a;
    a = sym_base[{s.t, s.num}];
    if (s.t == SYM_S || s.t == SYM_E) a = a + addr_t'(int'(sl) * SEB_PART);
    return a;
  endfunction

  always_comb begin
    slot = (tid == '0) ? 2'd0 : 2'(tid - 1'b1);
    m    = meta[slot];
    nS   = m.num_src;
    nE   = m.num_edge;
    cls  = op_class(instr.op);

    uop          = '0;
    uop.op       = instr.op;
    uop.tid      = tid;
    uop.slot     = slot;
    case (instr.nsel)
      N_D:     uop.n = dst_count;
      N_S:     uop.n = nS;
      N_E:     uop.n = nE;
      default: uop.n = 16'(instr.nlit);
    endcase
    case (instr.op)
      OP_SCTR_F, OP_SCTR_B, OP_GSUM_F, OP_GMAX_F, OP_LD_E, OP_ST_E: uop.n = nE;
      OP_LD_S:                    uop.n = nS;
      OP_LD_D, OP_ST_D, OP_ST_S:  uop.n = dst_count;
      default: ;
    endcase
    uop.fdim     = instr.fdim;
    uop.fin      = instr.fin;
    uop.rows     = rows_of(instr.fdim);
    uop.rows_in  = rows_of(instr.fin);
    uop.bcast    = (instr.fin == 8'd1);
    uop.dst_seb  = (instr.dst.t == SYM_S) || (instr.dst.t == SYM_E);
    uop.dst_addr = sym_addr(instr.dst, slot);
    uop.a_seb    = (instr.a.t == SYM_S) || (instr.a.t == SYM_E);
    uop.a_addr   = sym_addr(instr.a, slot);
    uop.b_seb    = (instr.b.t == SYM_S) || (instr.b.t == SYM_E);
    uop.b_addr   = sym_addr(instr.b, slot);
    uop.w_addr   = WB_AW'(sym_base[{instr.b.t, instr.b.num}]);
    uop.dram_base = ten_base[instr.tensor];
    case (instr.op)
      OP_LD_E, OP_ST_E: uop.dram_off = daddr_t'(m.edge_off);
      default:          uop.dram_off = daddr_t'(dst_start);
    endcase
  end

endmodule
