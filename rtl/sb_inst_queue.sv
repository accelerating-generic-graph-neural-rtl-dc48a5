// sb_inst_queue: FIFO of decoded micro-ops in front of one execution unit.
//
// The controller has three of these: the memory queue (to the LSU), the
// vector queue (to the vector unit) and the matrix queue (to the matrix
// unit). A queue holds micro-ops of all threads in arrival order and issues
// its head when the unit is ready (valid/ready handshake, issue when both are
// high). Depth 4 by default, the paper gives none; since every thread keeps at
// most one instruction in flight, four entries never fill with 1 + 3 threads.
module sb_inst_queue
  import sb_pkg::*;
#(
  parameter int unsigned DEPTH = 4
) (
  input  logic clk,
  input  logic rst_n,
  input  logic in_valid,
  output logic in_ready,
  input  uop_t in_uop,
  output logic out_valid,
  input  logic out_ready,
  output uop_t out_uop,
  output logic [$clog2(DEPTH+1)-1:0] count
);
  localparam int unsigned PW = (DEPTH > 1) ? $clog2(DEPTH) : 1;

  uop_t q [DEPTH];
  logic [PW-1:0] rp, wp;

  wire push = in_valid && in_ready;
  wire pop  = out_valid && out_ready;

  assign in_ready  = (count < ($bits(count))'(DEPTH));
  assign out_valid = (count != '0);
  assign out_uop   = q[rp];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rp <= '0; wp <= '0; count <= '0;
    end else begin
      if (push) begin
        q[wp] <= in_uop;
        wp <= (wp == PW'(DEPTH-1)) ? '0 : wp + 1'b1;
      end
      if (pop) rp <= (rp == PW'(DEPTH-1)) ? '0 : rp + 1'b1;
      count <= count + ($bits(count))'(push) - ($bits(count))'(pop);
    end
  end

  // a full queue never accepts, an empty one never issues
  property p_no_overflow;  @(posedge clk) disable iff (!rst_n) in_valid && !in_ready |-> !push; endproperty
  assert property (p_no_overflow);
  property p_count_range;  @(posedge clk) disable iff (!rst_n) count <= ($bits(count))'(DEPTH); endproperty
  assert property (p_count_range);

endmodule
