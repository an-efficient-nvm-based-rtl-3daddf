// l1_dcache: SRAM L1 data cache with a bound on its number of dirty blocks.
//
// A 16 KB, 4-way, write-back, write-allocate cache of 64-byte blocks. Each
// block has a valid bit, a dirty bit, a tag and data. The cache never holds
// more than K = M + N dirty blocks, so that a fixed capacitor energy always
// suffices to save them at a power failure. To do this it owns a dirty block
// table (dbt, M entries) and a write-back queue (wbq, N entries) and applies
// the paper's write-hit algorithm:
//   * write hit to a clean block: set D; if the DBT has room, enter the block
//     in it (WC = 1); otherwise the DBT's least-frequently-written entry moves
//     to the WBQ and the new block takes its place; if the WBQ is also full
//     the CPU stalls until the WBQ drains an entry;
//   * write hit to a dirty block: increment its WC if it is in the DBT (a
//     block in the WBQ just receives the new data, which the queued
//     write-back will carry);
//   * read hit: return the word.
// The WBQ is drained in the background: its head block is written to the
// LLC and, when the LLC acknowledges, its D bit is cleared and the entry is
// popped. Misses are handled as in a conventional write-back cache.
//
// Choices of this design where the paper is silent: the drain starts as soon
// as the WBQ is non-empty and the LLC port is free; a write to the block that
// is being drained waits for the drain to finish (it then counts as a write
// to a clean block); a dirty victim of a miss is written to the LLC and its
// DBT/WBQ entry is dropped; the L1 victim is the first invalid way, else a
// per-set round-robin way; the CPU word is 32 bits; the data array may be
// read by the drain and a CPU hit in the same cycle.
//
// Timing (c0 = cycle of cpu_req_valid && cpu_req_ready): a read hit answers
// in c0 + 1 and a write hit in c0 + 2 (SRAM read 1 / write 2 cycles) unless
// it stalls on a full WBQ; cpu_rsp_valid is high for one cycle.
//
// Backup port: while bk_req is high the controller finishes what it is doing,
// goes quiet and raises bk_ack; the backup controller may then read the
// DBT/WBQ entries and L1 blocks (bk_*, combinational) and, after power-up,
// restore blocks (rs_blk_we: valid and dirty) and re-create their DBT/WBQ
// entries (rs_dbt_we, rs_wbq_push).
module l1_dcache
  import nvm_pkg::*;
#(
  parameter int unsigned M    = DEF_M,
  parameter int unsigned N    = DEF_N,
  parameter int unsigned WC_W = DEF_WC_W,
  localparam int unsigned MI_W = (M > 1) ? $clog2(M) : 1,
  localparam int unsigned NP_W = (N > 1) ? $clog2(N) : 1,
  localparam int unsigned K_W  = $clog2(M + N + 1)
) (
  input  logic             clk,
  input  logic             rst_n,
  // CPU side
  input  logic             cpu_req_valid,
  output logic             cpu_req_ready,
  input  cpu_req_t         cpu_req,
  output logic             cpu_rsp_valid,
  output word_t            cpu_rsp_rdata,
  // LLC side
  output logic             llc_req_valid,
  input  logic             llc_req_ready,
  output blk_req_t         llc_req,
  input  logic             llc_rsp_valid,
  input  blk_t             llc_rsp_data,
  // backup / restore port
  input  logic             bk_req,
  output logic             bk_ack,
  input  logic [MI_W-1:0]  bk_dbt_idx,
  output logic             bk_dbt_v,
  output loc_t             bk_dbt_loc,
  output logic [WC_W-1:0]  bk_dbt_wc,
  input  logic [NP_W-1:0]  bk_wbq_pos,
  output logic             bk_wbq_v,
  output loc_t             bk_wbq_loc,
  input  loc_t             bk_loc,
  output l1_tag_t          bk_tag,
  output blk_t             bk_data,
  input  logic             rs_blk_we,
  input  loc_t             rs_loc,
  input  l1_tag_t          rs_tag,
  input  blk_t             rs_data,
  input  logic             rs_dbt_we,
  input  logic [MI_W-1:0]  rs_dbt_idx,
  input  logic [WC_W-1:0]  rs_dbt_wc,
  input  logic             rs_wbq_push,
  // status and event pulses
  output logic [K_W-1:0]   dirty_count,
  output logic             ev_dbt_insert,
  output logic             ev_dbt_replace,
  output logic             ev_wc_halve,
  output logic             ev_wbq_stall,
  output logic             ev_drain_wait,
  output logic             ev_wbq_drain,
  output logic             ev_wbq_hit,
  output logic             ev_miss,
  output logic             ev_dirty_evict
);

  typedef logic [L1_IDX_W-1:0] idx_t;
  typedef logic [L1_WAY_W-1:0] way_t;

  typedef enum logic [3:0] {
    S_IDLE, S_LOOKUP, S_WRDONE, S_MISS, S_EVICT_REQ, S_EVICT_WAIT,
    S_FILL_REQ, S_FILL_WAIT, S_BACKUP
  } state_t;

  typedef enum logic [1:0] { D_IDLE, D_REQ, D_WAIT } dstate_t;

  // ---- Arrays (volatile SRAM) -------------------------------------------
  logic [L1_WAYS-1:0]                valid_q [L1_SETS];
  logic [L1_WAYS-1:0]                dirty_q [L1_SETS];
  logic [L1_WAYS-1:0][L1_TAG_W-1:0]  tag_q   [L1_SETS];
  way_t                              rr_q    [L1_SETS];
  blk_t                              data_q  [L1_SETS * L1_WAYS];

  state_t   state;
  dstate_t  dstate;
  cpu_req_t req_q;
  way_t     vic_q;
  loc_t     drain_loc;
  blk_t     drain_data;

  baddr_t   req_baddr;
  idx_t     req_idx;
  l1_tag_t  req_tag;
  logic [WOFF_W-1:0] req_woff;
  assign req_baddr = req_q.addr[ADDR_W-1:OFF_W];
  assign req_idx   = req_baddr[L1_IDX_W-1:0];
  assign req_tag   = req_baddr[BADDR_W-1:L1_IDX_W];
  assign req_woff  = req_q.addr[OFF_W-1:2];

  // ---- DBT and WBQ -------------------------------------------------------
  loc_t             dbt_lk_loc;
  logic             dbt_lk_hit;
  logic [MI_W-1:0]  dbt_lk_idx;
  logic             dbt_ins, dbt_rep, dbt_inc, dbt_inv, dbt_wr;
  loc_t             dbt_victim_loc, dbt_inv_loc;
  logic [MI_W-1:0]  dbt_victim_idx;
  logic             dbt_full;
  logic [MI_W:0]    dbt_count;

  logic             wbq_push, wbq_pop, wbq_full, wbq_empty, wbq_head_v, wbq_lk_hit;
  logic             wbq_inv;
  loc_t             wbq_push_loc, wbq_head_loc;
  logic [NP_W:0]    wbq_count;

  dbt #(.M(M), .WC_W(WC_W)) u_dbt (
    .clk, .rst_n,
    .lk_loc(dbt_lk_loc), .lk_hit(dbt_lk_hit), .lk_idx(dbt_lk_idx),
    .ins_valid(dbt_ins), .ins_loc(dbt_lk_loc),
    .rep_valid(dbt_rep), .rep_loc(dbt_lk_loc),
    .victim_loc(dbt_victim_loc), .victim_idx(dbt_victim_idx),
    .inc_valid(dbt_inc), .inc_idx(dbt_lk_idx),
    .inv_valid(dbt_inv), .inv_loc(dbt_inv_loc),
    .full(dbt_full), .count(dbt_count), .ev_halve(ev_wc_halve),
    .rd_idx(bk_dbt_idx), .rd_v(bk_dbt_v), .rd_loc(bk_dbt_loc), .rd_wc(bk_dbt_wc),
    .wr_valid(dbt_wr), .wr_idx(rs_dbt_idx), .wr_v(1'b1), .wr_loc(rs_loc),
    .wr_wc(rs_dbt_wc)
  );

  wbq #(.N(N)) u_wbq (
    .clk, .rst_n,
    .push_valid(wbq_push), .push_loc(wbq_push_loc), .pop(wbq_pop),
    .full(wbq_full), .empty(wbq_empty), .count(wbq_count),
    .head_v(wbq_head_v), .head_loc(wbq_head_loc),
    .lk_loc(dbt_lk_loc), .lk_hit(wbq_lk_hit),
    .inv_valid(wbq_inv), .inv_loc(dbt_inv_loc),
    .rd_pos(bk_wbq_pos), .rd_v(bk_wbq_v), .rd_loc(bk_wbq_loc)
  );

  // ---- Tag compare ---------------------------------------------------------
  logic hit;
  way_t hit_way, vic_way;
  always_comb begin
    logic found_inv;
    hit       = 1'b0;
    hit_way   = '0;
    found_inv = 1'b0;
    vic_way   = rr_q[req_idx];
    for (int w = 0; w < L1_WAYS; w++) begin
      if (valid_q[req_idx][w] && tag_q[req_idx][w] == req_tag && !hit) begin
        hit     = 1'b1;
        hit_way = way_t'(w);
      end
      if (!valid_q[req_idx][w] && !found_inv) begin
        found_inv = 1'b1;
        vic_way   = way_t'(w);
      end
    end
  end

  loc_t hit_loc;
  assign hit_loc = '{set: req_idx, way: hit_way};
  logic hit_dirty;
  assign hit_dirty = dirty_q[req_idx][hit_way];

  logic drain_busy;
  assign drain_busy = (dstate != D_IDLE);

  // Write-hit decisions (Algorithm 1), evaluated in S_LOOKUP.
  logic wr_hit, wr_blocked, wr_stall, wr_go;
  assign wr_hit     = (state == S_LOOKUP) && hit && req_q.we;
  assign wr_blocked = drain_busy && (drain_loc == hit_loc);
  assign wr_stall   = wr_hit && (wr_blocked || (!hit_dirty && dbt_full && wbq_full));
  assign wr_go      = wr_hit && !wr_stall;

  always_comb begin
    dbt_lk_loc   = (state == S_BACKUP) ? rs_loc : hit_loc;
    dbt_ins      = wr_go && !hit_dirty && !dbt_full;
    dbt_rep      = wr_go && !hit_dirty &&  dbt_full;
    dbt_inc      = wr_go &&  hit_dirty &&  dbt_lk_hit;
    dbt_inv      = (state == S_EVICT_REQ) && llc_req_ready;
    dbt_inv_loc  = '{set: req_idx, way: vic_q};
    dbt_wr       = (state == S_BACKUP) && rs_dbt_we;
    wbq_push     = dbt_rep || ((state == S_BACKUP) && rs_wbq_push);
    wbq_push_loc = (state == S_BACKUP) ? rs_loc : dbt_victim_loc;
    wbq_inv      = dbt_inv;
  end

  // ---- CPU handshake -------------------------------------------------------
  assign cpu_req_ready = (state == S_IDLE) && !bk_req;
  assign cpu_rsp_valid = ((state == S_LOOKUP) && hit && !req_q.we) || (state == S_WRDONE);
  assign cpu_rsp_rdata = data_q[{req_idx, hit_way}][req_woff*WORD_W +: WORD_W];
  assign bk_ack        = (state == S_BACKUP);
  assign bk_tag        = tag_q[bk_loc.set][bk_loc.way];
  assign bk_data       = data_q[{bk_loc.set, bk_loc.way}];

  // ---- LLC port: miss path or WBQ drain -------------------------------------
  always_comb begin
    llc_req_valid = 1'b0;
    llc_req       = '0;
    if (state == S_EVICT_REQ) begin
      llc_req_valid = 1'b1;
      llc_req.we    = 1'b1;
      llc_req.addr  = {tag_q[req_idx][vic_q], req_idx};
      llc_req.data  = data_q[{req_idx, vic_q}];
    end else if (state == S_FILL_REQ) begin
      llc_req_valid = 1'b1;
      llc_req.we    = 1'b0;
      llc_req.addr  = req_baddr;
    end else if (dstate == D_REQ) begin
      llc_req_valid = 1'b1;
      llc_req.we    = 1'b1;
      llc_req.addr  = {tag_q[drain_loc.set][drain_loc.way], drain_loc.set};
      llc_req.data  = drain_data;
    end
  end

  // The drain may start only while the miss path leaves the LLC alone.
  logic miss_path;
  assign miss_path = state inside {S_MISS, S_EVICT_REQ, S_EVICT_WAIT, S_FILL_REQ, S_FILL_WAIT};
  logic drain_start, drain_skip, drain_done;
  // A drain does not start in the cycle a write hit updates the head block:
  // the drain would copy the data before the write lands and then clear D.
  assign drain_start = (dstate == D_IDLE) && !wbq_empty && wbq_head_v && !miss_path &&
                       !bk_req && (state != S_BACKUP) &&
                       !(wr_hit && hit_loc == wbq_head_loc);
  assign drain_skip  = (dstate == D_IDLE) && !wbq_empty && !wbq_head_v && (state != S_BACKUP);
  assign drain_done  = (dstate == D_WAIT) && llc_rsp_valid;
  assign wbq_pop     = drain_skip || drain_done;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      dstate     <= D_IDLE;
      drain_loc  <= '0;
      drain_data <= '0;
    end else begin
      unique case (dstate)
        D_IDLE: if (drain_start) begin
          drain_loc  <= wbq_head_loc;
          drain_data <= data_q[{wbq_head_loc.set, wbq_head_loc.way}];
          dstate     <= D_REQ;
        end
        D_REQ:  if (llc_req_ready) dstate <= D_WAIT;
        D_WAIT: if (llc_rsp_valid) dstate <= D_IDLE;
        default: dstate <= D_IDLE;
      endcase
    end
  end

  // ---- Main controller -----------------------------------------------------
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE;
      req_q <= '0;
      vic_q <= '0;
    end else begin
      unique case (state)
        S_IDLE: begin
          if (bk_req) begin
            if (!drain_busy) state <= S_BACKUP;
          end else if (cpu_req_valid) begin
            req_q <= cpu_req;
            state <= S_LOOKUP;
          end
        end
        S_LOOKUP: begin
          if (!hit)           state <= S_MISS;
          else if (!req_q.we) state <= S_IDLE;
          else if (wr_go)     state <= S_WRDONE;
        end
        S_WRDONE: state <= S_IDLE;
        S_MISS: if (!drain_busy) begin
          vic_q <= vic_way;
          if (valid_q[req_idx][vic_way] && dirty_q[req_idx][vic_way]) state <= S_EVICT_REQ;
          else state <= S_FILL_REQ;
        end
        S_EVICT_REQ:  if (llc_req_ready) state <= S_EVICT_WAIT;
        S_EVICT_WAIT: if (llc_rsp_valid) state <= S_FILL_REQ;
        S_FILL_REQ:   if (llc_req_ready) state <= S_FILL_WAIT;
        S_FILL_WAIT:  if (llc_rsp_valid) state <= S_LOOKUP;
        S_BACKUP:     if (!bk_req) state <= S_IDLE;
        default:      state <= S_IDLE;
      endcase
    end
  end

  // Tag, valid and dirty arrays; dirty-block counter.
  logic set_d, clr_d_drain, clr_d_evict;
  assign set_d       = wr_go && !hit_dirty;
  assign clr_d_drain = drain_done;
  assign clr_d_evict = (state == S_EVICT_WAIT) && llc_rsp_valid;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int s = 0; s < L1_SETS; s++) begin
        valid_q[s] <= '0;
        dirty_q[s] <= '0;
        tag_q[s]   <= '0;
        rr_q[s]    <= '0;
      end
      dirty_count <= '0;
    end else begin
      if (set_d) dirty_q[req_idx][hit_way] <= 1'b1;
      if (clr_d_drain) dirty_q[drain_loc.set][drain_loc.way] <= 1'b0;
      if (clr_d_evict) begin
        dirty_q[req_idx][vic_q] <= 1'b0;
        valid_q[req_idx][vic_q] <= 1'b0;
      end
      if (state == S_FILL_WAIT && llc_rsp_valid) begin
        valid_q[req_idx][vic_q] <= 1'b1;
        dirty_q[req_idx][vic_q] <= 1'b0;
        tag_q[req_idx][vic_q]   <= req_tag;
        rr_q[req_idx]           <= vic_q + 1'b1;
      end
      if (state == S_BACKUP && rs_blk_we) begin
        valid_q[rs_loc.set][rs_loc.way] <= 1'b1;
        dirty_q[rs_loc.set][rs_loc.way] <= 1'b1;
        tag_q[rs_loc.set][rs_loc.way]   <= rs_tag;
      end
      dirty_count <= dirty_count
                   + K_W'(set_d) + K_W'(state == S_BACKUP && rs_blk_we)
                   - K_W'(clr_d_drain) - K_W'(clr_d_evict);
    end
  end

  // Data array.
  always_ff @(posedge clk) begin
    if (wr_go)
      data_q[{req_idx, hit_way}][req_woff*WORD_W +: WORD_W] <= req_q.wdata;
    if (state == S_FILL_WAIT && llc_rsp_valid)
      data_q[{req_idx, vic_q}] <= llc_rsp_data;
    if (state == S_BACKUP && rs_blk_we)
      data_q[{rs_loc.set, rs_loc.way}] <= rs_data;
  end

  // ---- Events --------------------------------------------------------------
  assign ev_dbt_insert  = dbt_ins;
  assign ev_dbt_replace = dbt_rep;
  assign ev_wbq_stall   = wr_stall && !wr_blocked;
  assign ev_drain_wait  = wr_hit && wr_blocked;
  assign ev_wbq_drain   = drain_done;
  assign ev_wbq_hit     = wr_go && hit_dirty && wbq_lk_hit;
  assign ev_miss        = (state == S_LOOKUP) && !hit;
  assign ev_dirty_evict = clr_d_evict;

  // ---- Rules ---------------------------------------------------------------
  // The number of dirty blocks never exceeds K = M + N, and every dirty
  // block is tracked by the DBT or by a WBQ slot.
  a_dirty_bound: assert property (@(posedge clk) disable iff (!rst_n)
    dirty_count <= K_W'(M + N));
  a_tracked: assert property (@(posedge clk) disable iff (!rst_n)
    !(state inside {S_BACKUP, S_EVICT_WAIT}) |-> (dirty_count <= K_W'(dbt_count) + K_W'(wbq_count)));
  a_llc_exclusive: assert property (@(posedge clk) disable iff (!rst_n)
    !(miss_path && state != S_MISS && dstate != D_IDLE));

endmodule
