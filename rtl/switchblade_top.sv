// switchblade_top: the GNN accelerator.
//
// The accelerator executes GNN layers compiled into three-phase programs
// (ScatterPhase per destination interval, GatherPhase per edge shard,
// ApplyPhase per interval) over a graph cut into intervals and shards by a
// host partitioner. Its parts, connected as in the architecture diagram:
//   controller     - iThread/sThread PCs, instruction buffer, decoder,
//                    memory/vector/matrix queues, phase scheduler
//   vector unit    - VU_NC SIMD32 cores for element-wise and graph-traversal
//                    operators
//   matrix unit    - MU_R x MU_C output-stationary systolic MAC array
//   weight buffer  - weights for the matrix unit (written by the host)
//   DstBuffer      - destination-interval embeddings (symbol D)
//   SrcEdgeBuffer  - shard source and edge embeddings (symbols S, E), one
//                    private part per sThread
//   crossbar       - every unit reaches both embedding buffers in parallel
//   graph buffer   - shard metadata and COO data, one slot per sThread,
//                    with the prefetch update flags
//   LSU            - memory instructions and shard prefetch over the DRAM
//                    interface
// The DRAM interface itself (an HBM controller in the paper's system) is
// outside: its request/response channel is a port of this module.
// Host side: a 64-bit configuration write port (see sb_controller for the
// map), a weight-row write port, start and done, and a status word with the
// busy flags of the units, the running threads and the current interval.
module switchblade_top
  import sb_pkg::*;
#(
  parameter int unsigned NST     = NUM_STHREAD,
  parameter int unsigned VU_NC   = VU_CORES,
  parameter int unsigned MU_R    = MU_ROWS,
  parameter int unsigned MU_C    = MU_COLS,
  parameter int unsigned DBR     = DB_ROWS,
  parameter int unsigned SEBR    = SEB_ROWS,
  parameter int unsigned WBR     = WB_ROWS,
  parameter int unsigned GB_SRC  = GB_MAX_SRC,
  parameter int unsigned GB_EDGE = GB_MAX_EDGE
) (
  input  logic        clk,
  input  logic        rst_n,
  // host
  input  logic        cfg_we,
  input  logic [15:0] cfg_addr,
  input  logic [63:0] cfg_wdata,
  input  logic        w_wr_en,
  input  logic [WB_AW-1:0] w_wr_addr,
  input  logic [MU_C*ELEM_W-1:0] w_wr_data,
  input  logic        start,
  output logic        done,
  // status: {VU busy, MU busy, LSU busy, prefetch busy, threads running, interval}
  output logic [NST+20:0] status,
  // DRAM interface
  output logic        mem_req_valid,
  input  logic        mem_req_ready,
  output logic        mem_req_we,
  output daddr_t      mem_req_addr,
  output row_t        mem_req_wdata,
  input  logic        mem_resp_valid,
  input  row_t        mem_resp_data
);
  localparam int unsigned NRD = 2 * VU_NC + 2;
  localparam int unsigned NWR = VU_NC + 2;
  localparam int unsigned P_MU = 2 * VU_NC;       // read port of the MU
  localparam int unsigned P_LS = 2 * VU_NC + 1;   // read port of the LSU

  // ---------------- controller ----------------
  logic mem_valid, mem_ready, vec_valid, vec_ready, mat_valid, mat_ready;
  uop_t mem_uop, vec_uop, mat_uop;
  logic mem_done, vec_done, mat_done;
  tid_t mem_done_tid, vec_done_tid, mat_done_tid;
  shard_meta_t meta [NST];
  logic [NST-1:0] set_outdated;
  logic lsu_rewind, pf_en;
  daddr_t shard_base;
  logic [31:0] num_shards;
  logic [NST:0] thread_run;
  logic [15:0] cur_interval;

  sb_controller #(.NST(NST), .SEB_PART(SEBR / NST)) u_ctrl (
    .clk, .rst_n, .cfg_we, .cfg_addr, .cfg_wdata, .start, .done,
    .mem_valid, .mem_ready, .mem_uop, .vec_valid, .vec_ready, .vec_uop,
    .mat_valid, .mat_ready, .mat_uop,
    .mem_done, .mem_done_tid, .vec_done, .vec_done_tid, .mat_done, .mat_done_tid,
    .meta, .set_outdated, .lsu_rewind, .pf_en, .shard_base, .num_shards,
    .thread_run, .cur_interval
  );

  // ---------------- crossbar requests ----------------
  rd_req_t rd_req  [NRD];
  row_t    rd_data [NRD];
  wr_req_t wr_req  [NWR];

  rd_req_t vu_rd_a [VU_NC], vu_rd_b [VU_NC];
  row_t    vu_rd_a_data [VU_NC], vu_rd_b_data [VU_NC];
  wr_req_t vu_wr [VU_NC];
  rd_req_t mu_rd, ls_rd;
  wr_req_t mu_wr, ls_wr;

  always_comb begin
    for (int l = 0; l < VU_NC; l++) begin
      rd_req[l]         = vu_rd_a[l];
      rd_req[VU_NC + l] = vu_rd_b[l];
      vu_rd_a_data[l]   = rd_data[l];
      vu_rd_b_data[l]   = rd_data[VU_NC + l];
      wr_req[l]         = vu_wr[l];
    end
    rd_req[P_MU]  = mu_rd;
    rd_req[P_LS]  = ls_rd;
    wr_req[VU_NC]     = mu_wr;
    wr_req[VU_NC + 1] = ls_wr;
  end

  // ---------------- embedding buffers ----------------
  logic [NRD-1:0] db_rd_en, seb_rd_en;
  addr_t db_rd_addr [NRD], seb_rd_addr [NRD];
  row_t  db_rd_data [NRD], seb_rd_data [NRD];
  logic [NWR-1:0] db_wr_en, seb_wr_en;
  addr_t db_wr_addr [NWR], seb_wr_addr [NWR];
  row_t  db_wr_data [NWR], seb_wr_data [NWR];

  sb_emb_xbar #(.NRD(NRD), .NWR(NWR)) u_xbar (
    .clk, .rd_req, .rd_data, .wr_req,
    .db_rd_en, .db_rd_addr, .db_rd_data, .db_wr_en, .db_wr_addr, .db_wr_data,
    .seb_rd_en, .seb_rd_addr, .seb_rd_data, .seb_wr_en, .seb_wr_addr, .seb_wr_data
  );

  sb_spm #(.ROWS(DBR), .NRD(NRD), .NWR(NWR)) u_dst_buffer (
    .clk, .rd_en(db_rd_en), .rd_addr(db_rd_addr), .rd_data(db_rd_data),
    .wr_en(db_wr_en), .wr_addr(db_wr_addr), .wr_data(db_wr_data)
  );

  sb_spm #(.ROWS(SEBR), .NRD(NRD), .NWR(NWR)) u_src_edge_buffer (
    .clk, .rd_en(seb_rd_en), .rd_addr(seb_rd_addr), .rd_data(seb_rd_data),
    .wr_en(seb_wr_en), .wr_addr(seb_wr_addr), .wr_data(seb_wr_data)
  );

  // ---------------- graph buffer ----------------
  logic        gb_wr_meta, gb_wr_src, gb_wr_edge, gb_load_done;
  logic [1:0]  gb_wr_slot, gb_src_slot;
  logic [15:0] gb_wr_word, gb_src_idx;
  row_t        gb_wr_data;
  logic [31:0] gb_src_id;
  logic [1:0]  lk_slot [VU_NC];
  logic [15:0] lk_idx  [VU_NC];
  edge_t       lk_edge [VU_NC];

  sb_graph_buffer #(.NSLOT(NST), .MAX_SRC(GB_SRC), .MAX_EDGE(GB_EDGE), .NLOOK(VU_NC)) u_gb (
    .clk, .rst_n,
    .wr_meta(gb_wr_meta), .wr_src(gb_wr_src), .wr_edge(gb_wr_edge), .wr_slot(gb_wr_slot),
    .wr_word(gb_wr_word), .wr_data(gb_wr_data), .load_done(gb_load_done),
    .set_outdated, .meta, .lk_slot, .lk_idx, .lk_edge,
    .src_slot(gb_src_slot), .src_idx(gb_src_idx), .src_id(gb_src_id)
  );

  // ---------------- functional units ----------------
  logic vu_busy, mu_busy, ls_busy, ls_pf_busy;

  sb_vector_unit #(.NC(VU_NC)) u_vu (
    .clk, .rst_n, .in_valid(vec_valid), .in_ready(vec_ready), .in_uop(vec_uop),
    .done(vec_done), .done_tid(vec_done_tid), .busy(vu_busy),
    .lk_slot, .lk_idx, .lk_edge,
    .rd_a(vu_rd_a), .rd_b(vu_rd_b), .rd_a_data(vu_rd_a_data), .rd_b_data(vu_rd_b_data),
    .wr(vu_wr)
  );

  logic             w_rd_en;
  logic [WB_AW-1:0] w_rd_addr;
  logic [MU_C*ELEM_W-1:0] w_rd_data;

  sb_matrix_unit #(.R(MU_R), .C(MU_C)) u_mu (
    .clk, .rst_n, .in_valid(mat_valid), .in_ready(mat_ready), .in_uop(mat_uop),
    .done(mat_done), .done_tid(mat_done_tid), .busy(mu_busy),
    .rd(mu_rd), .rd_data(rd_data[P_MU]), .wr(mu_wr),
    .w_rd_en, .w_rd_addr, .w_rd_data
  );

  sb_weight_buffer #(.ROWS(WBR), .COLS(MU_C)) u_wb (
    .clk, .rd_en(w_rd_en), .rd_addr(w_rd_addr), .rd_data(w_rd_data),
    .wr_en(w_wr_en), .wr_addr(w_wr_addr), .wr_data(w_wr_data)
  );

  sb_lsu #(.NST(NST)) u_lsu (
    .clk, .rst_n, .start(start || lsu_rewind), .pf_en, .shard_base, .num_shards,
    .in_valid(mem_valid), .in_ready(mem_ready), .in_uop(mem_uop),
    .done(mem_done), .done_tid(mem_done_tid), .busy(ls_busy), .pf_busy(ls_pf_busy),
    .meta,
    .gb_wr_meta, .gb_wr_src, .gb_wr_edge, .gb_wr_slot, .gb_wr_word, .gb_wr_data,
    .gb_load_done, .gb_src_slot, .gb_src_idx, .gb_src_id,
    .rd(ls_rd), .rd_data(rd_data[P_LS]), .wr(ls_wr),
    .mem_req_valid, .mem_req_ready, .mem_req_we, .mem_req_addr, .mem_req_wdata,
    .mem_resp_valid, .mem_resp_data
  );

  assign status = {vu_busy, mu_busy, ls_busy, ls_pf_busy, thread_run, cur_interval};

endmodule
