// sb_vu_core: one SIMD32 core of the vector unit (combinational).
//
// Applies one element-wise operation to a 32-element row: a op b for ADD,
// SUB, MUL (fixed-point, product shifted right by FRAC), MAX; ReLU and leaky
// ReLU (negative inputs shifted right by LK_SHIFT, a slope of 1/64) on a;
// a copy of a for the scatter operators. With bcast set, element 0 of b is
// used for every lane (an operand of feature dimension 1, as in the MUL of an
// attention weight with a feature vector). Results wrap to 16 bits.
// The paper names the operators; the arithmetic format is this design's.
module sb_vu_core
  import sb_pkg::*;
(
  input  op_e  op,
  input  logic bcast,
  input  row_t a,
  input  row_t b,
  output row_t y
);
  always_comb begin
    for (int i = 0; i < VLEN; i++) begin
      elem_t ea, eb, ey;
      ea = get_elem(a, i);
      eb = bcast ? get_elem(b, 0) : get_elem(b, i);
      case (op)
        OP_ADD, OP_GSUM_F:  ey = ea + eb;
        OP_SUB:             ey = ea - eb;
        OP_MUL:             ey = fx_mul(ea, eb);
        OP_MAX, OP_GMAX_F:  ey = (ea > eb) ? ea : eb;
        OP_RELU:            ey = (ea < 0) ? '0 : ea;
        OP_LKRELU:          ey = (ea < 0) ? (ea >>> LK_SHIFT) : ea;
        default:            ey = ea;          // SCTR.F / SCTR.B copy
      endcase
      y[i*ELEM_W +: ELEM_W] = ey;
    end
  end
endmodule
