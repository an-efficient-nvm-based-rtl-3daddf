// l1_icache: SRAM L1 instruction cache.
//
// A 16 KB, 4-way, read-only cache of 64-byte blocks in front of the STT-RAM
// instruction LLC. Its size, associativity and block size are those of the
// evaluated system; it has no part in the dirty-block bound, since it never
// holds modified data and loses nothing at a power failure: after the
// volatile reset it simply starts empty and refills on demand.
//
// Everything else is this design's plain choice, as only the size of the
// instruction cache is known: a fetch that misses requests the whole block
// from the instruction LLC, installs it and then answers like a hit; the
// victim is the first invalid way, else a per-set round-robin way (as in the
// data cache); one fetch is handled at a time.
//
// Interface: a fetch is accepted when ic_req_valid && ic_req_ready, with the
// word-aligned byte address ic_req_addr. ic_rsp_valid pulses with the
// instruction word. llc_* is a block request port (reads only, one
// outstanding request). While hold is high no new fetch is accepted; quiet
// is high when no fetch is in progress (used to quiesce before a backup).
// Since the cache only reads, the write flag and the 512-bit data field of
// llc_req are constant zero; they remain so that the port has the same
// block-request type as every other memory level.
//
// Timing (c0 = acceptance cycle): a hit answers in c0 + 1 (SRAM read,
// 1 cycle); a miss adds the instruction-LLC latency and one cycle to
// install the block.
module l1_icache
  import nvm_pkg::*;
(
  input  logic               clk,
  input  logic               rst_n,
  input  logic               ic_req_valid,
  output logic               ic_req_ready,
  input  logic [ADDR_W-1:0]  ic_req_addr,
  output logic               ic_rsp_valid,
  output word_t              ic_rsp_data,
  output logic               llc_req_valid,
  input  logic               llc_req_ready,
  output blk_req_t           llc_req,
  input  logic               llc_rsp_valid,
  input  blk_t               llc_rsp_data,
  input  logic               hold,
  output logic               quiet,
  output logic               ev_miss
);

  typedef logic [L1_IDX_W-1:0] idx_t;
  typedef logic [L1_WAY_W-1:0] way_t;
  typedef enum logic [1:0] { I_IDLE, I_LOOKUP, I_FILL_REQ, I_FILL_WAIT } state_t;

  logic [L1_WAYS-1:0]                valid_q [L1_SETS];
  logic [L1_WAYS-1:0][L1_TAG_W-1:0]  tag_q   [L1_SETS];
  way_t                              rr_q    [L1_SETS];
  blk_t                              data_q  [L1_SETS * L1_WAYS];

  state_t              state;
  logic [ADDR_W-1:0]   addr_q;
  way_t                vic_q;

  baddr_t              req_baddr;
  idx_t                req_idx;
  l1_tag_t             req_tag;
  logic [WOFF_W-1:0]   req_woff;
  assign req_baddr = addr_q[ADDR_W-1:OFF_W];
  assign req_idx   = req_baddr[L1_IDX_W-1:0];
  assign req_tag   = req_baddr[BADDR_W-1:L1_IDX_W];
  assign req_woff  = addr_q[OFF_W-1:2];

  // ---- lookup and victim --------------------------------------------------
  logic hit;
  way_t hit_way, vic_way;
  always_comb begin
    hit     = 1'b0;
    hit_way = '0;
    for (int w = 0; w < L1_WAYS; w++)
      if (valid_q[req_idx][w] && tag_q[req_idx][w] == req_tag) begin
        hit     = 1'b1;
        hit_way = way_t'(w);
      end
    vic_way = rr_q[req_idx];
    for (int w = L1_WAYS - 1; w >= 0; w--)
      if (!valid_q[req_idx][w]) vic_way = way_t'(w);
  end

  blk_t hit_blk;
  assign hit_blk = data_q[{req_idx, hit_way}];

  assign ic_req_ready  = (state == I_IDLE) && !hold;
  assign ic_rsp_valid  = (state == I_LOOKUP) && hit;
  assign ic_rsp_data   = hit_blk[req_woff * WORD_W +: WORD_W];
  assign quiet         = (state == I_IDLE);
  assign ev_miss       = (state == I_LOOKUP) && !hit;

  assign llc_req_valid = (state == I_FILL_REQ);
  always_comb begin
    llc_req      = '0;
    llc_req.addr = req_baddr;
  end

  // ---- control --------------------------------------------------------------
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state  <= I_IDLE;
      addr_q <= '0;
      vic_q  <= '0;
    end else begin
      unique case (state)
        I_IDLE:      if (ic_req_valid && ic_req_ready) begin
                       addr_q <= ic_req_addr;
                       state  <= I_LOOKUP;
                     end
        I_LOOKUP:    if (hit) state <= I_IDLE;
                     else begin
                       vic_q <= vic_way;
                       state <= I_FILL_REQ;
                     end
        I_FILL_REQ:  if (llc_req_ready) state <= I_FILL_WAIT;
        I_FILL_WAIT: if (llc_rsp_valid) state <= I_LOOKUP;
        default:     state <= I_IDLE;
      endcase
    end
  end

  // ---- arrays -----------------------------------------------------------------
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int s = 0; s < L1_SETS; s++) begin
        valid_q[s] <= '0;
        tag_q[s]   <= '0;
        rr_q[s]    <= '0;
      end
    end else if (state == I_FILL_WAIT && llc_rsp_valid) begin
      valid_q[req_idx][vic_q] <= 1'b1;
      tag_q[req_idx][vic_q]   <= req_tag;
      rr_q[req_idx]           <= vic_q + 1'b1;
    end
  end

  always_ff @(posedge clk)
    if (state == I_FILL_WAIT && llc_rsp_valid)
      data_q[{req_idx, vic_q}] <= llc_rsp_data;

  a_word_aligned: assert property (@(posedge clk) disable iff (!rst_n)
    ic_req_valid && ic_req_ready |-> ic_req_addr[1:0] == 2'b00);

endmodule
