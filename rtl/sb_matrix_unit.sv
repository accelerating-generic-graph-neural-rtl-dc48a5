// sb_matrix_unit: the matrix unit (MU), an R x C output-stationary systolic
// multiply-accumulate array (32 x 128 by default) for the DMM operator GEMM.
//
// GEMM computes out[i][j] = sum_k a[i][k] * w[k][j] for n items i, fin input
// and fout output features (GEMV is the case fout = 1). PE (r, j) owns
// out[tile_base + r][j]. Per tile of R items the unit
//   1. LOAD:    reads the R x fin activation tile from the embedding buffer
//               (one 32-element row per cycle) into a local tile register;
//   2. COMPUTE: streams weight row k of the weight buffer into the top edge
//               (column j delayed by j cycles) and activation a[r][k] into
//               the left edge (row r delayed by r cycles) for fin + R + C - 1
//               cycles, so that every PE sees matching (a, w) pairs;
//   3. DRAIN:   writes each item's fout results (accumulator >>> FRAC,
//               wrapped to 16 bits) back, one 32-element row per cycle.
// A tile thus takes R*ceil(fin/32) + fin + R + C + 1 + R*ceil(fout/32)
// cycles plus two of control; fewer than R items in the last tile shorten
// LOAD and DRAIN only. `done` pulses with the thread id at the end.
//
// fin and fout are limited to KMAX = 128 and C. The array shape and its
// output-stationary dataflow follow the paper; the tile schedule (no overlap
// of load, compute and drain) is this design's simplification.
module sb_matrix_unit
  import sb_pkg::*;
#(
  parameter int unsigned R    = MU_ROWS,
  parameter int unsigned C    = MU_COLS,
  parameter int unsigned KMAX = 128
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        in_valid,
  output logic        in_ready,
  input  uop_t        in_uop,
  output logic        done,
  output tid_t        done_tid,
  output logic        busy,
  // embedding buffers (through the crossbar)
  output rd_req_t     rd,
  input  row_t        rd_data,
  output wr_req_t     wr,
  // weight buffer
  output logic        w_rd_en,
  output logic [WB_AW-1:0] w_rd_addr,
  input  logic [C*ELEM_W-1:0] w_rd_data
);
  localparam int unsigned KR = KMAX / VLEN;   // activation rows per item

  typedef enum logic [2:0] {S_IDLE, S_CLR, S_LOAD, S_COMP, S_DRAIN, S_NEXT, S_DONE} state_e;
  state_e state;
  uop_t   u;

  logic [15:0] tb;            // first item of the tile
  logic [15:0] cnt;           // step counter inside a state
  logic [15:0] tile_n;        // items in this tile
  elem_t       a_tile [R][KMAX];

  // load pipeline
  logic        ld_v;
  logic [7:0]  ld_i;
  logic [3:0]  ld_c;

  // weight stream
  logic        w_v;

  // array wiring
  elem_t a_edge [R];
  elem_t w_top  [C];
  elem_t a_h [R][C];
  elem_t w_v_ [R][C];
  logic signed [ACC_W-1:0] acc [R][C];
  logic clr, en;

  assign in_ready = (state == S_IDLE);
  assign busy     = (state != S_IDLE);
  assign clr      = (state == S_CLR);
  assign en       = (state == S_COMP);

  wire [15:0] rem = u.n - tb;
  assign tile_n   = (rem > 16'(R)) ? 16'(R) : rem;

  // ---------------- buffer requests ----------------
  logic [7:0] li;  logic [3:0] lc;
  logic [7:0] di;  logic [3:0] dc;
  always_comb begin
    li = 8'(cnt / 16'(u.rows_in));
    lc = 4'(cnt % 16'(u.rows_in));
    di = 8'(cnt / 16'(u.rows));
    dc = 4'(cnt % 16'(u.rows));
    rd.re   = (state == S_LOAD) && (cnt < tile_n * 16'(u.rows_in));
    rd.seb  = u.a_seb;
    rd.addr = u.a_addr + addr_t'(tb + 16'(li)) * addr_t'(u.rows_in) + addr_t'(lc);
    w_rd_en   = (state == S_COMP) && (cnt < 16'(u.fin));
    w_rd_addr = u.w_addr + WB_AW'(cnt);
    wr.we   = (state == S_DRAIN) && (cnt < tile_n * 16'(u.rows));
    wr.seb  = u.dst_seb;
    wr.addr = u.dst_addr + addr_t'(tb + 16'(di)) * addr_t'(u.rows) + addr_t'(dc);
    for (int e = 0; e < VLEN; e++) begin
      int unsigned j;
      j = int'(dc) * VLEN + e;
      if (j < C && j < int'(u.fdim))
        wr.data[e*ELEM_W +: ELEM_W] = elem_t'(acc[di[$clog2(R)-1:0]][j] >>> FRAC);
      else
        wr.data[e*ELEM_W +: ELEM_W] = '0;
    end
  end

  // ---------------- edge feeds ----------------
  // activation of row r at compute step t is a[r][t-1-r]
  always_comb begin
    for (int r = 0; r < R; r++) begin
      int k;
      k = int'(cnt) - 1 - r;
      a_edge[r] = (k >= 0 && k < int'(u.fin) && k < int'(KMAX)) ? a_tile[r][k] : '0;
    end
  end

  for (genvar j = 0; j < C; j++) begin : g_wskew
    elem_t dl [j+1];
    assign dl[0] = w_v ? elem_t'(w_rd_data[j*ELEM_W +: ELEM_W]) : '0;
    for (genvar m = 1; m <= j; m++) begin : g_dl
      always_ff @(posedge clk)
        if (clr) dl[m] <= '0; else if (en) dl[m] <= dl[m-1];
    end
    assign w_top[j] = dl[j];
  end

  for (genvar r = 0; r < R; r++) begin : g_row
    for (genvar j = 0; j < C; j++) begin : g_col
      elem_t ai, wi;
      if (j == 0) begin : g_l
        assign ai = a_edge[r];
      end else begin : g_i
        assign ai = a_h[r][j-1];
      end
      if (r == 0) begin : g_t
        assign wi = w_top[j];
      end else begin : g_u
        assign wi = w_v_[r-1][j];
      end
      sb_mu_pe u_pe (
        .clk(clk), .clr(clr), .en(en), .a_in(ai), .w_in(wi),
        .a_out(a_h[r][j]), .w_out(w_v_[r][j]), .acc(acc[r][j])
      );
    end
  end

  // ---------------- sequencing ----------------
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE; u <= '0; tb <= '0; cnt <= '0;
      ld_v <= 1'b0; w_v <= 1'b0; done <= 1'b0; done_tid <= '0;
      ld_i <= '0; ld_c <= '0;
    end else begin
      done <= 1'b0;
      // activation rows arriving from the buffer
      ld_v <= rd.re;
      ld_i <= li;
      ld_c <= lc;
      if (ld_v)
        for (int e = 0; e < VLEN; e++)
          if (int'(ld_c) < int'(KR))
            a_tile[ld_i[$clog2(R)-1:0]][int'(ld_c) * VLEN + e] <= get_elem(rd_data, e);
      w_v <= w_rd_en;
      case (state)
        S_IDLE: if (in_valid) begin
          u <= in_uop; tb <= '0; cnt <= '0;
          state <= (in_uop.n == 0) ? S_DONE : S_CLR;
        end
        S_CLR: begin
          for (int r = 0; r < R; r++)
            for (int k = 0; k < KMAX; k++) a_tile[r][k] <= '0;
          cnt <= '0; state <= S_LOAD;
        end
        S_LOAD: begin
          // one extra step lets the last row arrive
          if (cnt >= tile_n * 16'(u.rows_in)) begin cnt <= '0; state <= S_COMP; end
          else cnt <= cnt + 1'b1;
        end
        S_COMP: begin
          if (cnt == 16'(u.fin) + 16'(R) + 16'(C)) begin cnt <= '0; state <= S_DRAIN; end
          else cnt <= cnt + 1'b1;
        end
        S_DRAIN: begin
          if (cnt + 1'b1 >= tile_n * 16'(u.rows)) begin cnt <= '0; state <= S_NEXT; end
          else cnt <= cnt + 1'b1;
        end
        S_NEXT: begin
          if (32'(tb) + R < 32'(u.n)) begin tb <= tb + 16'(R); state <= S_CLR; end
          else state <= S_DONE;
        end
        S_DONE: begin done <= 1'b1; done_tid <= u.tid; state <= S_IDLE; end
        default: state <= S_IDLE;
      endcase
    end
  end

endmodule
