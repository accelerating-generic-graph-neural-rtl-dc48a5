// tb_switchblade_full: end-to-end test of the accelerator at its default
// sizes (16 SIMD32 vector cores, 32 x 128 systolic array, 8 MB DstBuffer,
// 1 MB SrcEdgeBuffer, 2 MB weight buffer, three sThreads). Same program and
// checks as tb_switchblade_top (tb_switchblade_body.svh), on a larger graph
// (160 vertices, 600 edges, four intervals of 40) so that shards hold more
// sources than the 32 array rows and the GEMM spans several tiles.
module tb_switchblade_full;
  localparam int TB_DBR  = sb_pkg::DB_ROWS;
  localparam int TB_SEBR = sb_pkg::SEB_ROWS;
  localparam int TB_MUC  = sb_pkg::MU_COLS;
  localparam int TB_NV   = 160;
  localparam int TB_ISZ  = 40;
  localparam int TB_NE   = 600;
  localparam int TB_CAP  = 200;

  `include "tb_switchblade_body.svh"

  switchblade_top dut (
    .clk, .rst_n, .cfg_we, .cfg_addr, .cfg_wdata, .w_wr_en, .w_wr_addr, .w_wr_data,
    .start, .done, .status(),
    .mem_req_valid, .mem_req_ready, .mem_req_we, .mem_req_addr, .mem_req_wdata,
    .mem_resp_valid, .mem_resp_data
  );
endmodule
