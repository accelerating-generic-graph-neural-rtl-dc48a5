// tb_sb_graph_buffer: loads two shards word by word into slots 0 and 2 the
// way the LSU does (header, source words, edge words, load_done), then
// checks metadata, update flags, source and edge look-ups, and that
// set_outdated raises the flag of one slot only.
module tb_sb_graph_buffer;
  import sb_pkg::*;
  localparam int NSLOT = 3, NLOOK = 4;
  logic clk = 0, rst_n = 0; always #5 clk = ~clk;
  logic wr_meta = 0, wr_src = 0, wr_edge = 0, load_done = 0;
  logic [1:0] wr_slot = 0; logic [15:0] wr_word = 0; row_t wr_data = '0;
  logic [NSLOT-1:0] set_outdated = '0;
  shard_meta_t meta [NSLOT];
  logic [1:0] lk_slot [NLOOK]; logic [15:0] lk_idx [NLOOK]; edge_t lk_edge [NLOOK];
  logic [1:0] src_slot = 0; logic [15:0] src_idx = 0; logic [31:0] src_id;
  int checks = 0, failures = 0;
  int srcs [2][40]; edge_t edges [2][70];
  int ns [2] = '{37, 5}; int ne [2] = '{70, 9};

  sb_graph_buffer #(.NSLOT(NSLOT), .MAX_SRC(64), .MAX_EDGE(128), .NLOOK(NLOOK)) dut (
    .clk, .rst_n, .wr_meta, .wr_src, .wr_edge, .wr_slot, .wr_word, .wr_data, .load_done,
    .set_outdated, .meta, .lk_slot, .lk_idx, .lk_edge, .src_slot, .src_idx, .src_id);

  task automatic chk(bit ok, string what);
    checks++; if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  initial begin
    repeat (5000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    for (int l = 0; l < NLOOK; l++) begin lk_slot[l] = 0; lk_idx[l] = 0; end
    repeat (2) @(negedge clk); rst_n = 1;
    for (int s = 0; s < NSLOT; s++) chk(!meta[s].valid, "flags set after reset");
    for (int k = 0; k < 2; k++) begin
      shard_hdr_t h;
      int slot; slot = (k == 0) ? 0 : 2;
      for (int i = 0; i < ns[k]; i++) srcs[k][i] = $urandom;
      for (int i = 0; i < ne[k]; i++) begin edges[k][i].src_l = 16'($urandom); edges[k][i].dst_l = 16'($urandom); end
      h = '0; h.num_src = 16'(ns[k]); h.num_edge = 16'(ne[k]); h.interval = 16'(k + 3);
      h.last = 16'(k); h.edge_off = 32'(1000 * (k + 1));
      @(negedge clk); wr_slot = 2'(slot); wr_meta = 1; wr_data = '0; wr_data[$bits(shard_hdr_t)-1:0] = h;
      @(negedge clk); wr_meta = 0;
      for (int w = 0; w * 16 < ns[k]; w++) begin
        wr_src = 1; wr_word = 16'(w); wr_data = '0;
        for (int j = 0; j < 16; j++) if (w*16+j < ns[k]) wr_data[j*32 +: 32] = srcs[k][w*16+j];
        @(negedge clk);
      end
      wr_src = 0;
      for (int w = 0; w * 16 < ne[k]; w++) begin
        wr_edge = 1; wr_word = 16'(w); wr_data = '0;
        for (int j = 0; j < 16; j++) if (w*16+j < ne[k]) wr_data[j*32 +: 32] = edges[k][w*16+j];
        @(negedge clk);
      end
      wr_edge = 0;
      chk(!meta[slot].valid, "flag still set before load_done");
      load_done = 1; @(negedge clk); load_done = 0;
      chk(meta[slot].valid, "flag cleared by load_done");
      chk(meta[slot].num_src == 16'(ns[k]) && meta[slot].num_edge == 16'(ne[k]), "sizes");
      chk(meta[slot].interval == 16'(k + 3) && meta[slot].last == k[0] && meta[slot].edge_off == 32'(1000*(k+1)), "meta fields");
    end
    chk(!meta[1].valid, "untouched slot keeps flag");
    // look-ups
    for (int k = 0; k < 2; k++) begin
      int slot; slot = (k == 0) ? 0 : 2;
      for (int i = 0; i < ns[k]; i++) begin
        src_slot = 2'(slot); src_idx = 16'(i); #1;
        chk(src_id == 32'(srcs[k][i]), "source id");
      end
      for (int i = 0; i < ne[k]; i += NLOOK) begin
        for (int l = 0; l < NLOOK; l++) begin lk_slot[l] = 2'(slot); lk_idx[l] = 16'((i + l) % ne[k]); end
        #1;
        for (int l = 0; l < NLOOK; l++) chk(lk_edge[l] == edges[k][(i + l) % ne[k]], "edge look-up");
      end
    end
    // phase scheduler marks slot 2 outdated
    @(negedge clk); set_outdated = 3'b100; @(negedge clk); set_outdated = '0;
    chk(!meta[2].valid && meta[0].valid, "set_outdated hits one slot");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
