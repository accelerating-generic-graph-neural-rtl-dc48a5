// sb_weight_buffer: on-chip weight memory of the matrix unit (2 MB).
//
// Each row holds one row k of a weight matrix, MU_COLS = 128 elements of
// 16 bits, which is exactly what the top edge of the 32 x 128 systolic array
// consumes in one cycle. The matrix unit reads one row per cycle; the host
// writes the weights through the write port before a program starts (the
// paper lists the 2 MB weight memory but does not say how weights arrive, so
// the host port is this design's choice).
//
// Timing: read data appears one cycle after rd_en. Write at the clock edge.
module sb_weight_buffer
  import sb_pkg::*;
#(
  parameter int unsigned ROWS = WB_ROWS,
  parameter int unsigned COLS = MU_COLS
) (
  input  logic                    clk,
  input  logic                    rd_en,
  input  logic [WB_AW-1:0]        rd_addr,
  output logic [COLS*ELEM_W-1:0]  rd_data,
  input  logic                    wr_en,
  input  logic [WB_AW-1:0]        wr_addr,
  input  logic [COLS*ELEM_W-1:0]  wr_data
);
  localparam int unsigned IW = (ROWS > 1) ? $clog2(ROWS) : 1;

  logic [COLS*ELEM_W-1:0] mem [ROWS];

  always_ff @(posedge clk) begin
    if (rd_en) rd_data <= mem[rd_addr[IW-1:0]];
    if (wr_en) mem[wr_addr[IW-1:0]] <= wr_data;
  end

endmodule
