// sb_dram_model: behavioural stand-in for the DRAM interface (testbench only).
//
// The accelerator's off-chip memory is an HBM stack behind a memory
// controller that the design does not contain. This model answers the
// accelerator's request channel with 64-byte words: writes are stored at
// once, reads return in order after LATENCY cycles, one per cycle. When
// STALL_EVERY is not 0 the request channel refuses every STALL_EVERY-th
// cycle (ready low), which exercises the accelerator's handshake. The
// testbench fills and inspects `mem` directly.
module sb_dram_model
  import sb_pkg::*;
#(
  parameter int unsigned WORDS       = 8192,
  parameter int unsigned LATENCY     = 8,
  parameter int unsigned STALL_EVERY = 5
) (
  input  logic   clk,
  input  logic   rst_n,
  input  logic   req_valid,
  output logic   req_ready,
  input  logic   req_we,
  input  daddr_t req_addr,
  input  row_t   req_wdata,
  output logic   resp_valid,
  output row_t   resp_data
);
  row_t mem [WORDS];

  typedef struct packed { logic [31:0] due; row_t data; } pend_t;
  pend_t q [$];
  logic [31:0] cyc;
  logic [31:0] stalls;

  assign req_ready = !(STALL_EVERY != 0 && (cyc % STALL_EVERY) == STALL_EVERY - 1);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cyc <= '0; resp_valid <= 1'b0; resp_data <= '0; stalls <= '0;
      q.delete();
    end else begin
      cyc <= cyc + 1;
      if (req_valid && !req_ready) stalls <= stalls + 1;
      if (req_valid && req_ready) begin
        if (req_we) mem[req_addr % WORDS] <= req_wdata;
        else q.push_back('{due: cyc + LATENCY, data: mem[req_addr % WORDS]});
      end
      resp_valid <= 1'b0;
      if (q.size() > 0 && q[0].due <= cyc) begin
        resp_valid <= 1'b1;
        resp_data  <= q[0].data;
        void'(q.pop_front());
      end
    end
  end
endmodule
