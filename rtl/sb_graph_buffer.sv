// sb_graph_buffer: MetaBuffer and DataBuffer of the graph buffer.
//
// The graph buffer holds the structure of one shard per shard thread
// (NUM_STHREAD slots, slot k used by sThread k+1), so that several shards are
// on chip at once. Per slot:
//   MetaBuffer  - scalar shard sizes: number of source vertices and edges,
//                 the interval the shard belongs to, a last-shard-of-interval
//                 mark and the global index of its first edge;
//   DataBuffer  - the source list (global vertex ids, which may be
//                 discontinuous after fine-grained partitioning) and the COO
//                 edge list (local source index, local destination index).
// Each slot has the 1-bit update flag of the prefetch mechanism, kept here
// as its complement meta.valid: flag = 1 (valid = 0) means the data is
// outdated and the LSU should load the next shard; the LSU clears the flag
// when the load completes (load_done), the phase scheduler sets it again when
// its sThread finishes the shard (set_outdated). All flags are 1 after reset.
//
// Writes arrive from the LSU one 64-byte DRAM word at a time: a word holds 16
// source ids (32 bits each) or 16 edges (2 x 16 bits). Reads are
// combinational: NLOOK edge look-ups for the vector unit lanes, one source
// look-up for the LSU, and all metadata for the decoder and the scheduler.
//
// The split into MetaBuffer/DataBuffer, COO format, multiple shards and the
// flag follow the paper; field widths, the word packing and the per-slot
// capacities (2048 sources, 8192 edges, which with metadata fill the 128 KB
// budget) are this design's choice.
module sb_graph_buffer
  import sb_pkg::*;
#(
  parameter int unsigned NSLOT    = NUM_STHREAD,
  parameter int unsigned MAX_SRC  = GB_MAX_SRC,
  parameter int unsigned MAX_EDGE = GB_MAX_EDGE,
  parameter int unsigned NLOOK    = VU_CORES
) (
  input  logic        clk,
  input  logic        rst_n,
  // LSU write side
  input  logic        wr_meta,
  input  logic        wr_src,
  input  logic        wr_edge,
  input  logic [1:0]  wr_slot,
  input  logic [15:0] wr_word,          // word index inside the list
  input  row_t        wr_data,
  input  logic        load_done,        // clear update flag of wr_slot
  // phase scheduler
  input  logic [NSLOT-1:0] set_outdated,
  // read side
  output shard_meta_t meta [NSLOT],
  input  logic [1:0]  lk_slot [NLOOK],
  input  logic [15:0] lk_idx  [NLOOK],
  output edge_t       lk_edge [NLOOK],
  input  logic [1:0]  src_slot,
  input  logic [15:0] src_idx,
  output logic [31:0] src_id
);
  localparam int unsigned SW = $clog2(MAX_SRC);
  localparam int unsigned EW = $clog2(MAX_EDGE);
  localparam int unsigned PER_WORD = ROW_W / 32;   // 16 entries per word

  logic [31:0] src_mem  [NSLOT*MAX_SRC];
  edge_t       edge_mem [NSLOT*MAX_EDGE];

  function automatic int unsigned sidx(logic [1:0] s, logic [15:0] i);
    return int'(s) * MAX_SRC + int'(i[SW-1:0]);
  endfunction
  function automatic int unsigned eidx(logic [1:0] s, logic [15:0] i);
    return int'(s) * MAX_EDGE + int'(i[EW-1:0]);
  endfunction

  always_ff @(posedge clk) begin
    for (int k = 0; k < PER_WORD; k++) begin
      if (wr_src)
        src_mem[sidx(wr_slot, 16'(wr_word * PER_WORD + k))] <= wr_data[k*32 +: 32];
      if (wr_edge)
        edge_mem[eidx(wr_slot, 16'(wr_word * PER_WORD + k))] <= edge_t'(wr_data[k*32 +: 32]);
    end
  end

  shard_hdr_t hdr;
  assign hdr = shard_hdr_t'(wr_data[$bits(shard_hdr_t)-1:0]);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int s = 0; s < NSLOT; s++) meta[s] <= '0;
    end else begin
      for (int s = 0; s < NSLOT; s++) begin
        if (set_outdated[s]) meta[s].valid <= 1'b0;
        if (wr_meta && wr_slot == 2'(s)) begin
          meta[s].valid    <= 1'b0;
          meta[s].last     <= hdr.last[0];
          meta[s].interval <= hdr.interval;
          meta[s].num_src  <= hdr.num_src;
          meta[s].num_edge <= hdr.num_edge;
          meta[s].edge_off <= hdr.edge_off;
        end
        if (load_done && wr_slot == 2'(s)) meta[s].valid <= 1'b1;
      end
    end
  end

  always_comb begin
    for (int l = 0; l < NLOOK; l++) lk_edge[l] = edge_mem[eidx(lk_slot[l], lk_idx[l])];
    src_id = src_mem[sidx(src_slot, src_idx)];
  end

endmodule
