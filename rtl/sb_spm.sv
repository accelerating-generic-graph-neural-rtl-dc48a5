// sb_spm: on-chip scratchpad memory used for both embedding buffers.
//
// One instance is the DstBuffer (destination-interval embeddings, memory
// symbol D, 8 MB by default) and one the SrcEdgeBuffer (shard source and edge
// embeddings, symbols S and E, 1 MB). The memory is an array of 512-bit rows
// (32 elements of 16 bits). Every requester reaching it through the embedding
// crossbar has a read port and a write port of its own, so the vector unit,
// the matrix unit and the load-store unit can work on it in the same cycle,
// as the parallel buffer-to-unit connection of the architecture requires.
//
// Timing: a read presented in cycle t returns its row in cycle t+1
// (registered output). Writes take effect at the clock edge; a read of the
// row being written in the same cycle returns the old contents. When two
// write ports hit one row in the same cycle the higher-numbered port wins;
// the program and the units never do that on purpose.
//
// The paper gives the sizes and the role of the two buffers; the port
// structure and row width are this design's choice.
module sb_spm
  import sb_pkg::*;
#(
  parameter int unsigned ROWS = SEB_ROWS,
  parameter int unsigned NRD  = 2,
  parameter int unsigned NWR  = 1
) (
  input  logic  clk,
  input  logic  [NRD-1:0] rd_en,
  input  addr_t rd_addr [NRD],
  output row_t  rd_data [NRD],
  input  logic  [NWR-1:0] wr_en,
  input  addr_t wr_addr [NWR],
  input  row_t  wr_data [NWR]
);
  localparam int unsigned IW = (ROWS > 1) ? $clog2(ROWS) : 1;

  row_t mem [ROWS];

  always_ff @(posedge clk) begin
    for (int p = 0; p < NRD; p++)
      if (rd_en[p]) rd_data[p] <= mem[rd_addr[p][IW-1:0]];
    for (int p = 0; p < NWR; p++)
      if (wr_en[p]) mem[wr_addr[p][IW-1:0]] <= wr_data[p];
  end

endmodule
