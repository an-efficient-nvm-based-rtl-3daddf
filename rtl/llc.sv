// llc: STT-RAM last-level data cache.
//
// A 128 KB, 16-way set-associative, write-back cache of 64-byte blocks in
// front of PCM main memory, with LRU replacement; size, associativity, block
// size, write-back policy, LRU and the STT-RAM latencies (read 2 cycles,
// write 10 cycles) follow the paper. The paper describes the LLC only at that
// level; the controller below is the plain design this RTL chose:
//   * one request at a time, block-granular (whole 512-bit blocks);
//   * a write from the L1 that misses allocates the block without fetching
//     it (the L1 always writes a whole block);
//   * a read miss fetches the block from PCM, installs it clean and returns
//     it; a dirty LRU victim is first written back to PCM;
//   * an invalid way is preferred as victim, otherwise the least recently
//     used one (4-bit age per way, 0 = most recent).
// Because the array is STT-RAM, tags, valid/dirty bits, ages and data are
// non-volatile: they are cleared only by nv_rst_n, never by rst_n, which
// resets just the controller state.
//
// Timing (cycle c0 = cycle in which up_req_valid && up_req_ready): a read
// hit answers in cycle c0 + RD_CYC, a write hit in c0 + WR_CYC (rsp_valid
// high for one cycle; writes answer with an acknowledge). Misses add the
// PCM access time plus one STT-RAM write for the installation.
module llc
  import nvm_pkg::*;
#(
  parameter int unsigned RD_CYC = STT_RD_CYC,
  parameter int unsigned WR_CYC = STT_WR_CYC
) (
  input  logic     clk,
  input  logic     rst_n,
  input  logic     nv_rst_n,
  // from the L1 cache
  input  logic     up_req_valid,
  output logic     up_req_ready,
  input  blk_req_t up_req,
  output logic     up_rsp_valid,
  output blk_t     up_rsp_data,
  // to PCM main memory
  output logic     mem_req_valid,
  input  logic     mem_req_ready,
  output blk_req_t mem_req,
  input  logic     mem_rsp_valid,
  input  blk_t     mem_rsp_data,
  // event pulses for statistics
  output logic     ev_hit,
  output logic     ev_miss,
  output logic     ev_dirty_evict
);

  typedef logic [LLC_TAG_W-1:0] tag_t;
  typedef logic [LLC_IDX_W-1:0] idx_t;
  typedef logic [LLC_WAY_W-1:0] way_t;

  typedef enum logic [2:0] {
    S_IDLE, S_LOOKUP, S_WB_REQ, S_WB_WAIT, S_FILL_REQ, S_FILL_WAIT, S_WAIT, S_RESP
  } state_t;

  // Non-volatile arrays.
  logic [LLC_WAYS-1:0]                 valid_q [LLC_SETS];
  logic [LLC_WAYS-1:0]                 dirty_q [LLC_SETS];
  logic [LLC_WAYS-1:0][LLC_TAG_W-1:0]  tag_q   [LLC_SETS];
  logic [LLC_WAYS-1:0][LLC_WAY_W-1:0]  age_q   [LLC_SETS];
  blk_t                                data_q  [LLC_SETS * LLC_WAYS];

  state_t   state;
  blk_req_t req_q;
  way_t     way_q;
  logic [7:0] cnt;
  blk_t     rdata_q;

  idx_t req_idx;
  tag_t req_tag;
  assign req_idx = req_q.addr[LLC_IDX_W-1:0];
  assign req_tag = req_q.addr[BADDR_W-1:LLC_IDX_W];

  // Tag compare and victim choice on the captured request.
  logic hit;
  way_t hit_way, vic_way;
  always_comb begin
    logic found_inv;
    hit       = 1'b0;
    hit_way   = '0;
    vic_way   = '0;
    found_inv = 1'b0;
    for (int w = 0; w < LLC_WAYS; w++) begin
      if (valid_q[req_idx][w] && tag_q[req_idx][w] == req_tag && !hit) begin
        hit     = 1'b1;
        hit_way = way_t'(w);
      end
    end
    for (int w = 0; w < LLC_WAYS; w++) begin
      if (!valid_q[req_idx][w] && !found_inv) begin
        found_inv = 1'b1;
        vic_way   = way_t'(w);
      end
    end
    if (!found_inv)
      for (int w = 0; w < LLC_WAYS; w++)
        if (age_q[req_idx][w] == way_t'(LLC_WAYS - 1)) vic_way = way_t'(w);
  end

  logic touch;        // update LRU ages for (req_idx, way_q)
  way_t touch_way;

  assign up_req_ready = (state == S_IDLE);
  assign up_rsp_valid = (state == S_RESP);
  assign up_rsp_data  = rdata_q;

  assign mem_req_valid = (state == S_WB_REQ) || (state == S_FILL_REQ);
  always_comb begin
    mem_req = '0;
    if (state == S_WB_REQ) begin
      mem_req.we   = 1'b1;
      mem_req.addr = {tag_q[req_idx][way_q], req_idx};
      mem_req.data = data_q[{req_idx, way_q}];
    end else begin
      mem_req.we   = 1'b0;
      mem_req.addr = req_q.addr;
    end
  end

  assign ev_hit         = (state == S_LOOKUP) && hit;
  assign ev_miss        = (state == S_LOOKUP) && !hit;
  assign ev_dirty_evict = (state == S_WB_REQ) && mem_req_ready;

  // Controller (volatile).
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state   <= S_IDLE;
      req_q   <= '0;
      way_q   <= '0;
      cnt     <= '0;
      rdata_q <= '0;
    end else begin
      unique case (state)
        S_IDLE: if (up_req_valid) begin
          req_q <= up_req;
          state <= S_LOOKUP;
        end
        S_LOOKUP: begin
          if (hit) begin
            way_q <= hit_way;
            if (!req_q.we) rdata_q <= data_q[{req_idx, hit_way}];
            if ((req_q.we ? WR_CYC : RD_CYC) <= 2) state <= S_RESP;
            else begin
              cnt   <= 8'((req_q.we ? WR_CYC : RD_CYC) - 3);
              state <= S_WAIT;
            end
          end else begin
            way_q <= vic_way;
            if (valid_q[req_idx][vic_way] && dirty_q[req_idx][vic_way])
              state <= S_WB_REQ;
            else if (req_q.we) begin
              cnt   <= 8'(WR_CYC - 2);
              state <= S_WAIT;
            end else
              state <= S_FILL_REQ;
          end
        end
        S_WB_REQ:  if (mem_req_ready) state <= S_WB_WAIT;
        S_WB_WAIT: if (mem_rsp_valid) begin
          if (req_q.we) begin
            cnt   <= 8'(WR_CYC - 2);
            state <= S_WAIT;
          end else
            state <= S_FILL_REQ;
        end
        S_FILL_REQ:  if (mem_req_ready) state <= S_FILL_WAIT;
        S_FILL_WAIT: if (mem_rsp_valid) begin
          rdata_q <= mem_rsp_data;
          cnt     <= 8'(WR_CYC - 2);
          state   <= S_WAIT;
        end
        S_WAIT: if (cnt == 0) state <= S_RESP; else cnt <= cnt - 1'b1;
        S_RESP: state <= S_IDLE;
        default: state <= S_IDLE;
      endcase
    end
  end

  // Array writes: write hit (LOOKUP), write-miss allocation (entering WAIT
  // after LOOKUP or WB_WAIT), fill installation (FILL_WAIT).
  logic       arr_we, arr_dirty;
  blk_t       arr_data;
  way_t       arr_way;
  always_comb begin
    arr_we    = 1'b0;
    arr_dirty = 1'b0;
    arr_data  = req_q.data;
    arr_way   = way_q;
    unique case (state)
      S_LOOKUP: begin
        if (hit && req_q.we) begin
          arr_we = 1'b1; arr_dirty = 1'b1; arr_way = hit_way;
        end else if (!hit && req_q.we &&
                     !(valid_q[req_idx][vic_way] && dirty_q[req_idx][vic_way])) begin
          arr_we = 1'b1; arr_dirty = 1'b1; arr_way = vic_way;
        end
      end
      S_WB_WAIT: if (mem_rsp_valid && req_q.we) begin
        arr_we = 1'b1; arr_dirty = 1'b1;
      end
      S_FILL_WAIT: if (mem_rsp_valid) begin
        arr_we = 1'b1; arr_dirty = 1'b0; arr_data = mem_rsp_data;
      end
      default: ;
    endcase
    // Every completed access refreshes the block's recency.
    touch     = (state == S_LOOKUP && hit) || arr_we;
    touch_way = (state == S_LOOKUP && hit) ? hit_way : arr_way;
  end

  always_ff @(posedge clk) begin
    if (arr_we) data_q[{req_idx, arr_way}] <= arr_data;
  end

  always_ff @(posedge clk or negedge nv_rst_n) begin
    if (!nv_rst_n) begin
      for (int s = 0; s < LLC_SETS; s++) begin
        valid_q[s] <= '0;
        dirty_q[s] <= '0;
        tag_q[s]   <= '0;
        for (int w = 0; w < LLC_WAYS; w++) age_q[s][w] <= way_t'(w);
      end
    end else begin
      if (arr_we) begin
        valid_q[req_idx][arr_way] <= 1'b1;
        dirty_q[req_idx][arr_way] <= arr_dirty || (dirty_q[req_idx][arr_way] &&
                                     state == S_LOOKUP && hit);
        tag_q[req_idx][arr_way]   <= req_tag;
      end
      if (touch) begin
        for (int w = 0; w < LLC_WAYS; w++)
          if (age_q[req_idx][w] < age_q[req_idx][touch_way])
            age_q[req_idx][w] <= age_q[req_idx][w] + 1'b1;
        age_q[req_idx][touch_way] <= '0;
      end
    end
  end

  initial assert (RD_CYC >= 2 && WR_CYC >= 3)
    else $error("llc: RD_CYC must be >= 2 and WR_CYC >= 3");

endmodule
