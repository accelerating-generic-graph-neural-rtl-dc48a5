// sb_vector_unit: the vector unit (VU), NC SIMD32 cores for ELW and GTR.
//
// An instruction covers n items (vertices or edges) of `rows` 32-element
// rows each. The unit walks the rows chunk by chunk and, inside a chunk,
// NC consecutive items at a time, one item per core:
//   ELW  (ADD SUB MUL MAX RELU LKRELU): dst[i] = a[i] op b[i]
//   SCTR.F: edge e gets the row of its source   (E <- S[src_l(e)])
//   SCTR.B: edge e gets the row of its destination (E <- D[dst_l(e)])
//   G.SUM.F / G.MAX.F: D[dst_l(e)] = D[dst_l(e)] (+ / max) E[e]
// so each core handles one edge in scatter and one destination update in
// gather, as in the paper. The COO edge of every item is looked up in the
// graph buffer slot of the issuing sThread. When several edges of one group
// of NC share a destination, the first such core adds all of their rows and
// the others do not write, so a gather never loses an update.
//
// Timing: each group of NC items takes two cycles: read (addresses to the
// buffers), then execute and write. A group therefore never reads a
// destination row that the previous group is still writing. An instruction
// with n items and r rows takes 2*r*ceil(n/NC) cycles after it is accepted;
// `done` pulses with the thread id in the cycle after the last write.
// The cores, the per-core work split and the operator list follow the paper;
// the schedule and the conflict merge are this design's.
module sb_vector_unit
  import sb_pkg::*;
#(
  parameter int unsigned NC = VU_CORES
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        in_valid,
  output logic        in_ready,
  input  uop_t        in_uop,
  output logic        done,
  output tid_t        done_tid,
  output logic        busy,
  // graph buffer edge look-up
  output logic [1:0]  lk_slot [NC],
  output logic [15:0] lk_idx  [NC],
  input  edge_t       lk_edge [NC],
  // embedding buffers (through the crossbar)
  output rd_req_t     rd_a [NC],
  output rd_req_t     rd_b [NC],
  input  row_t        rd_a_data [NC],
  input  row_t        rd_b_data [NC],
  output wr_req_t     wr   [NC]
);
  typedef enum logic [1:0] {S_IDLE, S_RD, S_EX, S_DONE} state_e;
  state_e state;
  uop_t   u;
  logic [15:0] i0;
  logic [3:0]  c;

  addr_t       wa_q [NC];
  logic [NC-1:0] lv_q;

  wire is_gather  = (u.op == OP_GSUM_F) || (u.op == OP_GMAX_F);
  wire is_unary   = (u.op == OP_RELU) || (u.op == OP_LKRELU) ||
                    (u.op == OP_SCTR_F) || (u.op == OP_SCTR_B);

  assign in_ready = (state == S_IDLE);
  assign busy     = (state != S_IDLE);

  // ---------------- read stage: addresses ----------------
  // the edge look-up index has a process of its own: the addresses below
  // depend on the looked-up edge, the look-up index does not
  always_comb begin
    for (int l = 0; l < NC; l++) begin
      lk_slot[l] = u.slot;
      lk_idx[l]  = i0 + 16'(l);
    end
  end

  always_comb begin
    for (int l = 0; l < NC; l++) begin
      logic [15:0] item;
      logic        lv;
      addr_t       ra, rb, wa;
      item = i0 + 16'(l);
      lv   = (state == S_RD) && (item < u.n);
      ra = u.a_addr + addr_t'(item) * addr_t'(u.rows) + addr_t'(c);
      rb = u.bcast ? (u.b_addr + addr_t'(item))
                   : (u.b_addr + addr_t'(item) * addr_t'(u.rows) + addr_t'(c));
      wa = u.dst_addr + addr_t'(item) * addr_t'(u.rows) + addr_t'(c);
      case (u.op)
        OP_SCTR_F: ra = u.a_addr + addr_t'(lk_edge[l].src_l) * addr_t'(u.rows) + addr_t'(c);
        OP_SCTR_B: ra = u.a_addr + addr_t'(lk_edge[l].dst_l) * addr_t'(u.rows) + addr_t'(c);
        OP_GSUM_F, OP_GMAX_F: begin
          // a port reads the destination row, b port the edge row
          wa = u.dst_addr + addr_t'(lk_edge[l].dst_l) * addr_t'(u.rows) + addr_t'(c);
          rb = u.a_addr + addr_t'(item) * addr_t'(u.rows) + addr_t'(c);
        end
        default: ;
      endcase
      rd_a[l].re   = lv;
      rd_a[l].seb  = is_gather ? u.dst_seb : u.a_seb;
      rd_a[l].addr = is_gather ? wa : ra;
      rd_b[l].re   = lv && !is_unary;
      rd_b[l].seb  = is_gather ? u.a_seb : u.b_seb;
      rd_b[l].addr = rb;
    end
  end

  // ---------------- execute stage ----------------
  row_t bsum [NC];
  row_t y    [NC];
  logic [NC-1:0] first;

  always_comb begin
    for (int l = 0; l < NC; l++) begin
      first[l] = 1'b1;
      for (int j = 0; j < l; j++)
        if (lv_q[j] && wa_q[j] == wa_q[l]) first[l] = 1'b0;
      bsum[l] = rd_b_data[l];
      for (int j = l + 1; j < NC; j++) begin
        for (int e = 0; e < VLEN; e++) begin
          elem_t x, z, r;
          x = get_elem(bsum[l], e);
          z = get_elem(rd_b_data[j], e);
          r = (u.op == OP_GMAX_F) ? ((z > x) ? z : x) : elem_t'(x + z);
          if (lv_q[j] && wa_q[j] == wa_q[l]) bsum[l][e*ELEM_W +: ELEM_W] = r;
        end
      end
    end
  end

  for (genvar l = 0; l < NC; l++) begin : g_core
    sb_vu_core u_core (
      .op(u.op), .bcast(u.bcast && !is_gather),
      .a(rd_a_data[l]), .b(is_gather ? bsum[l] : rd_b_data[l]), .y(y[l])
    );
  end

  always_comb begin
    for (int l = 0; l < NC; l++) begin
      wr[l].we   = (state == S_EX) && lv_q[l] && (!is_gather || first[l]);
      wr[l].seb  = u.dst_seb;
      wr[l].addr = wa_q[l];
      wr[l].data = y[l];
    end
  end

  // ---------------- sequencing ----------------
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE; i0 <= '0; c <= '0; lv_q <= '0;
      done <= 1'b0; done_tid <= '0; u <= '0;
    end else begin
      done <= 1'b0;
      case (state)
        S_IDLE: if (in_valid) begin
          u <= in_uop; i0 <= '0; c <= '0;
          state <= (in_uop.n == 0 || in_uop.rows == 0) ? S_DONE : S_RD;
        end
        S_RD: begin
          for (int l = 0; l < NC; l++) begin
            lv_q[l] <= rd_a[l].re;
            wa_q[l] <= (is_gather) ? rd_a[l].addr
                                   : (u.dst_addr + addr_t'(i0 + 16'(l)) * addr_t'(u.rows) + addr_t'(c));
          end
          state <= S_EX;
        end
        S_EX: begin
          if (32'(i0) + NC < 32'(u.n)) begin
            i0 <= i0 + 16'(NC); state <= S_RD;
          end else if (c + 1'b1 < u.rows) begin
            i0 <= '0; c <= c + 1'b1; state <= S_RD;
          end else state <= S_DONE;
        end
        S_DONE: begin
          done <= 1'b1; done_tid <= u.tid; state <= S_IDLE;
        end
      endcase
    end
  end

endmodule
