// sb_lsu: load-store unit of the graph buffer.
//
// Two jobs, one at a time:
//  * Shard prefetch. Whenever a graph-buffer slot has its update flag set
//    (meta.valid = 0) and the shard stream is not exhausted, the LSU reads
//    the next shard from DRAM into that slot and clears the flag. A shard in
//    DRAM is one header word (shard_hdr_t) followed by ceil(num_src/16)
//    words of source ids and ceil(num_edge/16) words of COO edges; shards
//    lie back to back from shard_base in the order the partitioner made
//    them (interval by interval). Prefetch has priority over instructions.
//  * Memory instructions from the memory queue. A load or store moves n
//    items of `rows` 64-byte rows between the on-chip symbol (the uop's dst
//    field, for loads and stores alike) and DRAM tensor rows:
//      LD.D / ST.D / ST.S  vertex (dram_off + i), dram_off = first vertex of
//                          the interval;
//      LD.S                vertex src_id(i) from the shard's source list,
//                          looked up in the graph buffer (the translation
//                          of an instruction into transactions "using shard
//                          data" that the paper describes);
//      LD.E / ST.E         edge (dram_off + i), dram_off = first global edge
//                          of the shard.
//    DRAM row address = dram_base + index * rows + chunk.
// DRAM side: a request channel (valid/ready, we, word address, 512-bit data)
// and an in-order read-response channel that is always accepted. Reads are
// issued back to back, one per accepted request; stores take three cycles a
// row (buffer read, capture, DRAM write). `done` pulses with the thread id
// when a memory instruction has finished (after its last store was accepted
// or its last load row was written on chip).
module sb_lsu
  import sb_pkg::*;
#(
  parameter int unsigned NST = NUM_STHREAD
) (
  input  logic        clk,
  input  logic        rst_n,
  // control
  input  logic        start,            // rewind the shard stream
  input  logic        pf_en,
  input  daddr_t      shard_base,
  input  logic [31:0] num_shards,
  // memory queue
  input  logic        in_valid,
  output logic        in_ready,
  input  uop_t        in_uop,
  output logic        done,
  output tid_t        done_tid,
  output logic        busy,
  output logic        pf_busy,
  // graph buffer
  input  shard_meta_t meta [NST],
  output logic        gb_wr_meta,
  output logic        gb_wr_src,
  output logic        gb_wr_edge,
  output logic [1:0]  gb_wr_slot,
  output logic [15:0] gb_wr_word,
  output row_t        gb_wr_data,
  output logic        gb_load_done,
  output logic [1:0]  gb_src_slot,
  output logic [15:0] gb_src_idx,
  input  logic [31:0] gb_src_id,
  // embedding buffers
  output rd_req_t     rd,
  input  row_t        rd_data,
  output wr_req_t     wr,
  // DRAM interface
  output logic        mem_req_valid,
  input  logic        mem_req_ready,
  output logic        mem_req_we,
  output daddr_t      mem_req_addr,
  output row_t        mem_req_wdata,
  input  logic        mem_resp_valid,
  input  row_t        mem_resp_data
);
  typedef enum logic [3:0] {
    S_IDLE, S_PF_HDR, S_PF_HDR_W, S_PF_BODY, S_LD, S_ST_RD, S_ST_CAP, S_ST_WR, S_DONE
  } state_e;
  state_e state;

  uop_t        u;
  daddr_t      ptr;           // next shard in DRAM
  logic [31:0] loaded;        // shards loaded so far
  logic [1:0]  pf_slot;
  logic [15:0] sw, ew;        // source and edge words of the shard being loaded
  logic [31:0] iss, rsp;      // issued / returned words or rows
  logic [15:0] it;            // item of the next issue
  logic [3:0]  ch;            // chunk of the next issue
  logic [31:0] total;
  row_t        st_data;

  // first outdated slot
  logic        need_pf;
  logic        any_free;
  logic [1:0]  free_slot;
  always_comb begin
    any_free = 1'b0; free_slot = '0;
    for (int s = NST - 1; s >= 0; s--)
      if (!meta[s].valid) begin any_free = 1'b1; free_slot = 2'(s); end
    need_pf = any_free && pf_en && (loaded < num_shards);
  end

  shard_hdr_t hdr;
  assign hdr = shard_hdr_t'(mem_resp_data[$bits(shard_hdr_t)-1:0]);

  assign in_ready = (state == S_IDLE) && !need_pf && !start;
  assign busy     = (state inside {S_LD, S_ST_RD, S_ST_CAP, S_ST_WR, S_DONE});
  assign pf_busy  = (state inside {S_PF_HDR, S_PF_HDR_W, S_PF_BODY});

  // DRAM address of the row being issued
  daddr_t row_index, row_addr;
  always_comb begin
    gb_src_slot = u.slot;
    gb_src_idx  = it;
    case (u.op)
      OP_LD_S: row_index = daddr_t'(gb_src_id);
      default: row_index = u.dram_off + daddr_t'(it);
    endcase
    row_addr = u.dram_base + row_index * daddr_t'(u.rows) + daddr_t'(ch);
  end

  always_comb begin
    mem_req_valid = 1'b0; mem_req_we = 1'b0; mem_req_addr = '0; mem_req_wdata = st_data;
    case (state)
      S_PF_HDR:  begin mem_req_valid = 1'b1; mem_req_addr = ptr; end
      S_PF_BODY: if (iss < 32'(sw) + 32'(ew)) begin
                   mem_req_valid = 1'b1; mem_req_addr = ptr + 1 + iss;
                 end
      S_LD:      if (iss < total) begin mem_req_valid = 1'b1; mem_req_addr = row_addr; end
      S_ST_WR:   begin mem_req_valid = 1'b1; mem_req_we = 1'b1; mem_req_addr = row_addr; end
      default: ;
    endcase
  end

  // graph-buffer writes straight from the response channel
  always_comb begin
    gb_wr_slot   = pf_slot;
    gb_wr_data   = mem_resp_data;
    gb_wr_meta   = (state == S_PF_HDR_W) && mem_resp_valid;
    gb_wr_src    = (state == S_PF_BODY) && mem_resp_valid && (rsp < 32'(sw));
    gb_wr_edge   = (state == S_PF_BODY) && mem_resp_valid && (rsp >= 32'(sw));
    gb_wr_word   = (rsp < 32'(sw)) ? 16'(rsp) : 16'(rsp - 32'(sw));
    gb_load_done = (state == S_PF_BODY) && (rsp == 32'(sw) + 32'(ew));
  end

  // embedding-buffer ports
  always_comb begin
    rd.re   = (state == S_ST_RD);
    rd.seb  = u.dst_seb;
    rd.addr = u.dst_addr + addr_t'(iss);
    wr.we   = (state == S_LD) && mem_resp_valid;
    wr.seb  = u.dst_seb;
    wr.addr = u.dst_addr + addr_t'(rsp);
    wr.data = mem_resp_data;
  end

  wire req_fire = mem_req_valid && mem_req_ready;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE; u <= '0; ptr <= '0; loaded <= '0; pf_slot <= '0;
      sw <= '0; ew <= '0; iss <= '0; rsp <= '0; it <= '0; ch <= '0; total <= '0;
      done <= 1'b0; done_tid <= '0; st_data <= '0;
    end else begin
      done <= 1'b0;
      if (start) begin ptr <= shard_base; loaded <= '0; end
      case (state)
        S_IDLE: begin
          iss <= '0; rsp <= '0; it <= '0; ch <= '0;
          if (need_pf && !start) begin
            pf_slot <= free_slot; state <= S_PF_HDR;
          end else if (in_valid && in_ready) begin
            u <= in_uop;
            total <= 32'(in_uop.n) * 32'(in_uop.rows);
            if (in_uop.n == 0 || in_uop.rows == 0) state <= S_DONE;
            else if (in_uop.op inside {OP_LD_D, OP_LD_S, OP_LD_E}) state <= S_LD;
            else state <= S_ST_RD;
          end
        end
        // ---- prefetch ----
        S_PF_HDR: if (req_fire) state <= S_PF_HDR_W;
        S_PF_HDR_W: if (mem_resp_valid) begin
          sw <= 16'((int'(hdr.num_src)  + 15) / 16);
          ew <= 16'((int'(hdr.num_edge) + 15) / 16);
          state <= S_PF_BODY;
        end
        S_PF_BODY: begin
          if (req_fire) iss <= iss + 1;
          if (mem_resp_valid) rsp <= rsp + 1;
          if (rsp == 32'(sw) + 32'(ew)) begin
            ptr    <= ptr + 1 + daddr_t'(sw) + daddr_t'(ew);
            loaded <= loaded + 1;
            state  <= S_IDLE;
          end
        end
        // ---- loads ----
        S_LD: begin
          if (req_fire) begin
            iss <= iss + 1;
            if (ch + 1'b1 == u.rows) begin ch <= '0; it <= it + 1'b1; end
            else ch <= ch + 1'b1;
          end
          if (mem_resp_valid) rsp <= rsp + 1;
          if (rsp == total) state <= S_DONE;
        end
        // ---- stores ----
        S_ST_RD:  state <= S_ST_CAP;
        S_ST_CAP: begin st_data <= rd_data; state <= S_ST_WR; end
        S_ST_WR: if (req_fire) begin
          iss <= iss + 1;
          if (ch + 1'b1 == u.rows) begin ch <= '0; it <= it + 1'b1; end
          else ch <= ch + 1'b1;
          state <= (iss + 1 == total) ? S_DONE : S_ST_RD;
        end
        S_DONE: begin done <= 1'b1; done_tid <= u.tid; state <= S_IDLE; end
        default: state <= S_IDLE;
      endcase
    end
  end

endmodule
