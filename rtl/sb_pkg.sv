// sb_pkg: types and constants shared by the SwitchBlade-style GNN accelerator.
//
// The accelerator runs a three-phase program (ScatterPhase, GatherPhase,
// ApplyPhase) over destination intervals and edge shards of a partitioned
// graph. This package holds the instruction format, the decoded micro-op that
// travels through the instruction queues, the buffer port bundles and the
// default sizes.
//
// Sizes that follow the paper's configuration table: 16 SIMD32 vector cores,
// a 32 x 128 systolic MAC array, an 8 MB destination buffer, a 1 MB
// source/edge buffer, a 2 MB weight buffer, a 128 KB graph buffer and three
// shard threads. The paper gives no number format, instruction encoding,
// buffer row width or instruction buffer depth: the choices here
// (16-bit fixed point with 8 fraction bits, 64-bit instructions, 32-element
// buffer rows, 1024-entry instruction buffer) belong to this design.
package sb_pkg;

  // ---------------- number format and rows ----------------
  localparam int unsigned ELEM_W = 16;        // signed fixed point element
  localparam int unsigned FRAC   = 8;         // fraction bits
  localparam int unsigned VLEN   = 32;        // elements per buffer row (SIMD32)
  localparam int unsigned ROW_W  = ELEM_W * VLEN;  // 512-bit row = 64 bytes

  typedef logic signed [ELEM_W-1:0] elem_t;
  typedef logic [ROW_W-1:0]         row_t;

  // ---------------- threads ----------------
  localparam int unsigned NUM_STHREAD = 3;    // shard threads (Methodology)
  localparam int unsigned TID_W       = 2;    // thread 0 = iThread, 1..NUM_STHREAD = sThreads

  // ---------------- functional units ----------------
  localparam int unsigned VU_CORES = 16;      // 16 x SIMD32 cores
  localparam int unsigned MU_ROWS  = 32;      // 32 x 128 systolic array
  localparam int unsigned MU_COLS  = 128;
  localparam int unsigned ACC_W    = 32;      // MAC accumulator width
  localparam int unsigned LK_SHIFT = 6;       // leaky ReLU slope 2^-6

  // ---------------- memories (rows) ----------------
  localparam int unsigned AW       = 17;              // row address width
  localparam int unsigned DB_ROWS  = 131072;          // 8 MB / 64 B
  localparam int unsigned SEB_ROWS = 16384;           // 1 MB / 64 B
  localparam int unsigned WB_ROWS  = 8192;            // 2 MB / 256 B (one 128-wide weight row)
  localparam int unsigned WB_AW    = 13;
  localparam int unsigned GB_MAX_SRC  = 2048;         // per shard slot
  localparam int unsigned GB_MAX_EDGE = 8192;         // per shard slot
  localparam int unsigned IB_DEPTH = 1024;            // instruction buffer entries
  localparam int unsigned PC_W     = 10;
  localparam int unsigned DRAM_AW  = 32;              // 64-byte word address

  typedef logic [AW-1:0]      addr_t;
  typedef logic [DRAM_AW-1:0] daddr_t;
  typedef logic [PC_W-1:0]    pc_t;
  typedef logic [TID_W-1:0]   tid_t;

  // ---------------- ISA ----------------
  typedef enum logic [4:0] {
    OP_NOP    = 5'd0,
    OP_ADD    = 5'd1,   // ELW
    OP_SUB    = 5'd2,
    OP_MUL    = 5'd3,
    OP_RELU   = 5'd4,
    OP_LKRELU = 5'd5,
    OP_MAX    = 5'd6,
    OP_GEMM   = 5'd7,   // DMM (GEMV is GEMM with one output column)
    OP_SCTR_F = 5'd8,   // GTR: edge <- its source
    OP_SCTR_B = 5'd9,   // GTR: edge <- its destination
    OP_GSUM_F = 5'd10,  // GTR: destination += edge
    OP_GMAX_F = 5'd11,  // GTR: destination = max(destination, edge)
    OP_LD_D   = 5'd12,  // memory: interval vertices -> D symbol
    OP_LD_S   = 5'd13,  // memory: shard sources -> S symbol
    OP_LD_E   = 5'd14,  // memory: shard edges -> E symbol
    OP_ST_D   = 5'd15,  // memory: D symbol -> interval vertices
    OP_ST_S   = 5'd16,  // memory: D symbol -> vertex tensor used later as source
    OP_ST_E   = 5'd17   // memory: E symbol -> shard edges
  } op_e;

  typedef enum logic [1:0] {CLS_MEM = 2'd0, CLS_VEC = 2'd1, CLS_MAT = 2'd2} cls_e;

  typedef enum logic [1:0] {SYM_D = 2'd0, SYM_S = 2'd1, SYM_E = 2'd2, SYM_W = 2'd3} sym_type_e;

  typedef struct packed {
    sym_type_e  t;
    logic [3:0] num;
  } sym_t;

  // item-count macro of the data-dimension field
  typedef enum logic [1:0] {N_D = 2'd0, N_S = 2'd1, N_E = 2'd2, N_LIT = 2'd3} nsel_e;

  // 64-bit instruction word
  typedef struct packed {
    logic [6:0]  pad;
    op_e         op;
    nsel_e       nsel;     // item count: interval size, shard sources, shard edges, literal
    logic [11:0] nlit;
    logic [7:0]  fdim;     // feature dimension of the result
    logic [7:0]  fin;      // GEMM: input dimension; ELW: dimension of operand b (1 = broadcast)
    sym_t        dst;
    sym_t        a;
    sym_t        b;        // GEMM: the weight symbol
    logic [3:0]  tensor;   // memory: off-chip tensor id
  } instr_t;

  // decoded micro-op held in the instruction queues
  typedef struct packed {
    op_e         op;
    tid_t        tid;
    logic [1:0]  slot;       // graph-buffer shard slot of the thread
    logic [15:0] n;          // items (vertices or edges)
    logic [3:0]  rows;       // rows per item of the result (ceil(fdim/32))
    logic [7:0]  fdim;
    logic [7:0]  fin;
    logic [3:0]  rows_in;    // rows per item of operand a (GEMM)
    logic        bcast;      // operand b is one element per item
    logic        dst_seb;    // 1: SrcEdgeBuffer, 0: DstBuffer
    addr_t       dst_addr;
    logic        a_seb;
    addr_t       a_addr;
    logic        b_seb;
    addr_t       b_addr;
    logic [WB_AW-1:0] w_addr;
    daddr_t      dram_base;
    daddr_t      dram_off;   // first vertex (D) or first edge (E) of the interval/shard
  } uop_t;

  function automatic cls_e op_class(op_e op);
    case (op)
      OP_GEMM: return CLS_MAT;
      OP_LD_D, OP_LD_S, OP_LD_E, OP_ST_D, OP_ST_S, OP_ST_E: return CLS_MEM;
      default: return CLS_VEC;
    endcase
  endfunction

  // ---------------- buffer port bundles ----------------
  typedef struct packed {
    logic  re;
    logic  seb;    // target buffer: 1 = SrcEdgeBuffer, 0 = DstBuffer
    addr_t addr;
  } rd_req_t;

  typedef struct packed {
    logic  we;
    logic  seb;
    addr_t addr;
    row_t  data;
  } wr_req_t;

  // ---------------- graph buffer ----------------
  typedef struct packed {
    logic [15:0] src_l;   // local source index inside the shard source list
    logic [15:0] dst_l;   // local destination index inside the interval
  } edge_t;

  typedef struct packed {
    logic        valid;       // shard data loaded and current (update flag = 0)
    logic        last;        // last shard of its interval
    logic [15:0] interval;    // interval the shard belongs to
    logic [15:0] num_src;
    logic [15:0] num_edge;
    logic [31:0] edge_off;    // global index of the shard's first edge
  } shard_meta_t;

  // shard header word in DRAM (low bits of a 64-byte word)
  typedef struct packed {
    logic [31:0] edge_off;
    logic [15:0] interval;
    logic [15:0] num_edge;
    logic [15:0] num_src;
    logic [15:0] last;
  } shard_hdr_t;

  // ---------------- element helpers ----------------
  function automatic elem_t get_elem(row_t r, int unsigned i);
    return elem_t'(r[i*ELEM_W +: ELEM_W]);
  endfunction

  function automatic elem_t fx_mul(elem_t a, elem_t b);
    logic signed [2*ELEM_W-1:0] p;
    p = a * b;
    return elem_t'(p >>> FRAC);
  endfunction

endpackage
