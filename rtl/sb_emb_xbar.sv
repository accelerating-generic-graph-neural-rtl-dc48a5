// sb_emb_xbar: crossbar between the requesters and the two embedding buffers.
//
// Requesters are the vector-unit lanes, the matrix unit and the LSU. Each
// read or write request carries a target bit (seb: 1 = SrcEdgeBuffer, holding
// symbols S and E; 0 = DstBuffer, holding symbol D). The crossbar steers the
// request to the port of the same number on the chosen buffer and, one cycle
// later, returns the row from the buffer that was read (the target bit is
// registered to match the buffers' one-cycle read latency). Every requester
// has a port on both buffers, so no arbitration is needed.
module sb_emb_xbar
  import sb_pkg::*;
#(
  parameter int unsigned NRD = 2,
  parameter int unsigned NWR = 1
) (
  input  logic    clk,
  // requester side
  input  rd_req_t rd_req  [NRD],
  output row_t    rd_data [NRD],
  input  wr_req_t wr_req  [NWR],
  // DstBuffer side
  output logic    [NRD-1:0] db_rd_en,
  output addr_t   db_rd_addr [NRD],
  input  row_t    db_rd_data [NRD],
  output logic    [NWR-1:0] db_wr_en,
  output addr_t   db_wr_addr [NWR],
  output row_t    db_wr_data [NWR],
  // SrcEdgeBuffer side
  output logic    [NRD-1:0] seb_rd_en,
  output addr_t   seb_rd_addr [NRD],
  input  row_t    seb_rd_data [NRD],
  output logic    [NWR-1:0] seb_wr_en,
  output addr_t   seb_wr_addr [NWR],
  output row_t    seb_wr_data [NWR]
);
  logic [NRD-1:0] sel_q;

  always_comb begin
    for (int p = 0; p < NRD; p++) begin
      db_rd_en[p]    = rd_req[p].re && !rd_req[p].seb;
      seb_rd_en[p]   = rd_req[p].re &&  rd_req[p].seb;
      db_rd_addr[p]  = rd_req[p].addr;
      seb_rd_addr[p] = rd_req[p].addr;
      rd_data[p]     = sel_q[p] ? seb_rd_data[p] : db_rd_data[p];
    end
    for (int p = 0; p < NWR; p++) begin
      db_wr_en[p]    = wr_req[p].we && !wr_req[p].seb;
      seb_wr_en[p]   = wr_req[p].we &&  wr_req[p].seb;
      db_wr_addr[p]  = wr_req[p].addr;
      seb_wr_addr[p] = wr_req[p].addr;
      db_wr_data[p]  = wr_req[p].data;
      seb_wr_data[p] = wr_req[p].data;
    end
  end

  always_ff @(posedge clk)
    for (int p = 0; p < NRD; p++)
      if (rd_req[p].re) sel_q[p] <= rd_req[p].seb;

endmodule
