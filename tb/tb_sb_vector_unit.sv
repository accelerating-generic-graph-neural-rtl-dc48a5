// tb_sb_vector_unit: the vector unit with 4 cores against a reference model.
// The TB plays both embedding buffers (registered read, write at the edge,
// like sb_spm) and the graph-buffer edge look-up. It runs random ELW
// operations (ADD SUB MUL MAX RELU LKRELU, with and without a broadcast
// operand), SCTR.F, SCTR.B, and G.SUM.F / G.MAX.F over edges whose
// destinations collide inside a group of cores, then compares every row of
// both buffers with the model and checks one done pulse per instruction with
// the issuing thread id.
module tb_sb_vector_unit;
  import sb_pkg::*;
  localparam int NC = 4, ROWS = 256;
  logic clk = 0, rst_n = 0; always #5 clk = ~clk;
  logic in_valid = 0, in_ready, done, busy; uop_t in_uop; tid_t done_tid;
  logic [1:0] lk_slot [NC]; logic [15:0] lk_idx [NC]; edge_t lk_edge [NC];
  rd_req_t rd_a [NC], rd_b [NC]; row_t rd_a_data [NC], rd_b_data [NC]; wr_req_t wr [NC];
  row_t mem [2][ROWS];
  row_t ref_m [2][ROWS];
  edge_t edges [64];
  int checks = 0, failures = 0, dones = 0;

  sb_vector_unit #(.NC(NC)) dut (.clk, .rst_n, .in_valid, .in_ready, .in_uop, .done, .done_tid,
    .busy, .lk_slot, .lk_idx, .lk_edge, .rd_a, .rd_b, .rd_a_data, .rd_b_data, .wr);

  always_comb for (int l = 0; l < NC; l++) lk_edge[l] = edges[lk_idx[l] % 64];
  always_ff @(posedge clk) begin
    for (int l = 0; l < NC; l++) begin
      if (rd_a[l].re) rd_a_data[l] <= mem[rd_a[l].seb][rd_a[l].addr % ROWS];
      if (rd_b[l].re) rd_b_data[l] <= mem[rd_b[l].seb][rd_b[l].addr % ROWS];
    end
    for (int l = 0; l < NC; l++) if (wr[l].we) mem[wr[l].seb][wr[l].addr % ROWS] <= wr[l].data;
  end
  always @(posedge clk) if (done) dones++;

  function automatic elem_t alu(op_e op, elem_t a, elem_t b);
    case (op)
      OP_ADD, OP_GSUM_F: return a + b;
      OP_SUB:    return a - b;
      OP_MUL:    return fx_mul(a, b);
      OP_MAX, OP_GMAX_F: return (a > b) ? a : b;
      OP_RELU:   return (a < 0) ? elem_t'(0) : a;
      OP_LKRELU: return (a < 0) ? elem_t'(a >>> LK_SHIFT) : a;
      default:   return a;
    endcase
  endfunction

  function automatic row_t rnd_row();
    row_t r; for (int i = 0; i < ROW_W / 32; i++) r[i*32 +: 32] = $urandom; return r;
  endfunction

  // reference effect of one instruction on ref_m
  task automatic model(uop_t u);
    row_t old [2][ROWS];
    old = ref_m;
    for (int i = 0; i < int'(u.n); i++)
      for (int c = 0; c < int'(u.rows); c++)
        for (int e = 0; e < VLEN; e++) begin
          elem_t a, b; int ra, rb, wa;
          wa = int'(u.dst_addr) + i * int'(u.rows) + c;
          ra = int'(u.a_addr) + i * int'(u.rows) + c;
          rb = u.bcast ? int'(u.b_addr) + i : int'(u.b_addr) + i * int'(u.rows) + c;
          if (u.op == OP_SCTR_F) ra = int'(u.a_addr) + int'(edges[i].src_l) * int'(u.rows) + c;
          if (u.op == OP_SCTR_B) ra = int'(u.a_addr) + int'(edges[i].dst_l) * int'(u.rows) + c;
          if (u.op inside {OP_GSUM_F, OP_GMAX_F}) begin
            wa = int'(u.dst_addr) + int'(edges[i].dst_l) * int'(u.rows) + c;
            a = get_elem(ref_m[u.dst_seb][wa], e);
            b = get_elem(old[u.a_seb][ra], e);
            ref_m[u.dst_seb][wa][e*ELEM_W +: ELEM_W] = alu(u.op, a, b);
          end else begin
            a = get_elem(old[u.a_seb][ra], e);
            b = u.bcast ? get_elem(old[u.b_seb][rb], 0) : get_elem(old[u.b_seb][rb], e);
            ref_m[u.dst_seb][wa][e*ELEM_W +: ELEM_W] = alu(u.op, a, b);
          end
        end
  endtask

  task automatic run(uop_t u);
    int d0, cyc;
    d0 = dones; cyc = 0;
    model(u);
    @(negedge clk); in_uop = u; in_valid = 1;
    do @(negedge clk); while (!in_ready && 0);
    in_valid = 0;
    while (dones == d0 && cyc < 2000) begin @(negedge clk); cyc++; end
    checks++;
    if (dones != d0 + 1 || done_tid != u.tid) begin failures++; $display("FAIL done for op %s", u.op.name()); end
    for (int s = 0; s < 2; s++)
      for (int r = 0; r < ROWS; r++) begin
        checks++;
        if (mem[s][r] !== ref_m[s][r]) begin
          failures++;
          if (failures < 10) $display("FAIL op %s buf %0d row %0d", u.op.name(), s, r);
        end
      end
  endtask

  initial begin
    repeat (200000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    op_e elw [6] = '{OP_ADD, OP_SUB, OP_MUL, OP_MAX, OP_RELU, OP_LKRELU};
    for (int i = 0; i < 64; i++) begin
      edges[i].src_l = 16'($urandom_range(0, 15));
      edges[i].dst_l = 16'($urandom_range(0, 5));      // few destinations: many collisions
    end
    in_uop = '0;
    repeat (3) @(negedge clk); rst_n = 1;
    // buffers are filled once the unit is out of reset
    for (int s = 0; s < 2; s++) for (int r = 0; r < ROWS; r++) begin mem[s][r] = rnd_row(); ref_m[s][r] = mem[s][r]; end
    for (int k = 0; k < 24; k++) begin
      uop_t u; u = '0;
      u.tid = tid_t'($urandom_range(0, 3)); u.rows = 4'($urandom_range(1, 2));
      u.n = 16'($urandom_range(1, 19));
      case (k % 4)
        0, 1: begin
          u.op = elw[$urandom_range(0, 5)]; u.bcast = ($urandom_range(0, 2) == 0);
          u.a_seb = 1; u.a_addr = 0; u.b_seb = 0; u.b_addr = 100; u.dst_seb = 0; u.dst_addr = 180;
        end
        2: begin
          u.op = ($urandom_range(0, 1) != 0) ? OP_SCTR_F : OP_SCTR_B;
          u.a_seb = 0; u.a_addr = 0; u.dst_seb = 1; u.dst_addr = 120;
        end
        default: begin
          u.op = ($urandom_range(0, 1) != 0) ? OP_GSUM_F : OP_GMAX_F;
          u.a_seb = 1; u.a_addr = 40; u.dst_seb = 0; u.dst_addr = 60;
        end
      endcase
      run(u);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
