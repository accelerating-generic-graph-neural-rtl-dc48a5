// sb_inst_buffer: instruction memory holding the three-phase program.
//
// The host writes 64-bit instruction words before a run. The controller reads
// the word at the PC of the thread its fetch selector picked. The read is
// combinational so that fetch, decode and enqueue happen in one cycle; the
// memory is small (1024 entries by default, a size the paper does not give).
module sb_inst_buffer
  import sb_pkg::*;
#(
  parameter int unsigned DEPTH = IB_DEPTH
) (
  input  logic   clk,
  input  logic   wr_en,
  input  pc_t    wr_addr,
  input  instr_t wr_data,
  input  pc_t    rd_addr,
  output instr_t rd_data
);
  localparam int unsigned IW = (DEPTH > 1) ? $clog2(DEPTH) : 1;

  instr_t mem [DEPTH];

  always_ff @(posedge clk)
    if (wr_en) mem[wr_addr[IW-1:0]] <= wr_data;

  assign rd_data = mem[rd_addr[IW-1:0]];

endmodule
