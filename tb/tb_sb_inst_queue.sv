// tb_sb_inst_queue: random pushes and pops against a reference queue;
// checks order, the full and empty flags and the count.
module tb_sb_inst_queue;
  import sb_pkg::*;
  logic clk = 0, rst_n = 0; always #5 clk = ~clk;
  logic in_valid = 0, in_ready, out_valid, out_ready = 0;
  uop_t in_uop = '0, out_uop;
  logic [2:0] count;
  uop_t model [$];
  int checks = 0, failures = 0;

  sb_inst_queue #(.DEPTH(4)) dut (.clk, .rst_n, .in_valid, .in_ready, .in_uop, .out_valid, .out_ready, .out_uop, .count);

  initial begin
    repeat (5000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    int seen_full = 0;
    repeat (2) @(negedge clk); rst_n = 1;
    for (int k = 0; k < 1000; k++) begin
      @(negedge clk);
      in_valid = ($urandom_range(0, 3) != 0);
      in_uop = '0; in_uop.n = 16'($urandom); in_uop.dst_addr = addr_t'($urandom);
      out_ready = ($urandom_range(0, 2) == 0);
      #1;
      checks++;
      if (count != 3'(model.size()) || out_valid != (model.size() > 0) || in_ready != (model.size() < 4)) begin
        failures++; $display("FAIL flags at %0d", k);
      end
      if (model.size() == 4) seen_full++;
      if (out_valid && out_ready) begin
        checks++; if (out_uop !== model[0]) begin failures++; $display("FAIL order at %0d", k); end
      end
      begin
        bit do_pop, do_push;
        do_pop = out_valid && out_ready; do_push = in_valid && in_ready;
        @(posedge clk);
        if (do_pop) void'(model.pop_front());
        if (do_push) model.push_back(in_uop);
      end
    end
    checks++; if (seen_full == 0) begin failures++; $display("FAIL never full"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
