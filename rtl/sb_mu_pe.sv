// sb_mu_pe: one processing element of the output-stationary systolic array.
//
// Each cycle with `en` the PE multiplies the activation arriving from the
// left by the weight arriving from the top, adds the product to its own
// accumulator (which stays in place: output stationary), and passes both
// operands on, registered, to the right and downward neighbours. `clr`
// zeroes the accumulator and the pass-through registers before a new tile.
module sb_mu_pe
  import sb_pkg::*;
(
  input  logic              clk,
  input  logic              clr,
  input  logic              en,
  input  elem_t             a_in,
  input  elem_t             w_in,
  output elem_t             a_out,
  output elem_t             w_out,
  output logic signed [ACC_W-1:0] acc
);
  always_ff @(posedge clk) begin
    if (clr) begin
      a_out <= '0; w_out <= '0; acc <= '0;
    end else if (en) begin
      a_out <= a_in;
      w_out <= w_in;
      acc   <= acc + ACC_W'(a_in * w_in);
    end
  end
endmodule
