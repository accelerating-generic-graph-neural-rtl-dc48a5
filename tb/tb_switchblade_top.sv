// tb_switchblade_top: end-to-end test of the accelerator at reduced sizes.
//
// Four vector cores, a 4 x 32 systolic array and small buffers keep the
// simulation short; the program, graph and checks are those of
// tb_switchblade_body.svh (one GNN layer over a 40-vertex, 150-edge graph in
// five intervals, shards made by the fine-grained partitioner).
module tb_switchblade_top;
  localparam int TB_DBR  = 128;
  localparam int TB_SEBR = 288;
  localparam int TB_MUC  = 32;
  localparam int TB_NV   = 40;
  localparam int TB_ISZ  = 8;
  localparam int TB_NE   = 150;
  localparam int TB_CAP  = 48;

  `include "tb_switchblade_body.svh"

  switchblade_top #(
    .VU_NC(4), .MU_R(4), .MU_C(TB_MUC), .DBR(TB_DBR), .SEBR(TB_SEBR), .WBR(64),
    .GB_SRC(64), .GB_EDGE(128)
  ) dut (
    .clk, .rst_n, .cfg_we, .cfg_addr, .cfg_wdata, .w_wr_en, .w_wr_addr, .w_wr_data,
    .start, .done, .status(),
    .mem_req_valid, .mem_req_ready, .mem_req_we, .mem_req_addr, .mem_req_wdata,
    .mem_resp_valid, .mem_resp_data
  );
endmodule
