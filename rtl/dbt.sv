// dbt: Dirty Block Table.
//
// An M-entry fully associative table that records which L1 blocks are dirty.
// Each entry holds a valid bit, the {set,way} location of the block in the L1
// cache and a write counter (WC). The table, its fields and the
// least-frequently-written (LFW) replacement follow the paper:
//   * a new entry starts with WC = 1 (the write that made the block dirty);
//   * every further write hit to a tracked block increments its WC;
//   * when the WC of the written entry is already at its maximum 2^W-1, the
//     value 2^(W-1) is subtracted from every entry (floored at 0) instead of
//     incrementing, e.g. {19,17,31,3} -> {3,1,15,0} for W = 5;
//   * the victim is the valid entry with the smallest WC.
// Ties between equal WC values go to the lowest index, and the floor at zero,
// are this design's choices.
//
// Interface: one operation per cycle, all applied on the rising clock edge:
//   ins_*  insert a location into a free entry (only when !full)
//   rep_*  overwrite the current LFW victim entry with a new location; the
//          evicted location is visible on victim_loc in the same cycle
//   inc_*  record a further write to entry inc_idx
//   inv_*  drop the entry that tracks inv_loc (block evicted from L1)
//   wr_*   load one entry directly (restore after a power failure)
// lk_loc is looked up combinationally (lk_hit, lk_idx); rd_idx reads an
// entry combinationally for the backup controller. Lookup, victim selection
// and counters are all combinational over the M entries; reset clears all
// valid bits and counters.
module dbt
  import nvm_pkg::*;
#(
  parameter int unsigned M    = DEF_M,
  parameter int unsigned WC_W = DEF_WC_W,
  localparam int unsigned IDX_W = (M > 1) ? $clog2(M) : 1
) (
  input  logic             clk,
  input  logic             rst_n,
  // lookup
  input  loc_t             lk_loc,
  output logic             lk_hit,
  output logic [IDX_W-1:0] lk_idx,
  // insert into a free entry
  input  logic             ins_valid,
  input  loc_t             ins_loc,
  // replace the LFW victim
  input  logic             rep_valid,
  input  loc_t             rep_loc,
  output loc_t             victim_loc,
  output logic [IDX_W-1:0] victim_idx,
  // write counter update
  input  logic             inc_valid,
  input  logic [IDX_W-1:0] inc_idx,
  // invalidate by location
  input  logic             inv_valid,
  input  loc_t             inv_loc,
  // status
  output logic             full,
  output logic [IDX_W:0]   count,
  output logic             ev_halve,   // a write found WC saturated
  // backup read / restore write
  input  logic [IDX_W-1:0] rd_idx,
  output logic             rd_v,
  output loc_t             rd_loc,
  output logic [WC_W-1:0]  rd_wc,
  input  logic             wr_valid,
  input  logic [IDX_W-1:0] wr_idx,
  input  logic             wr_v,
  input  loc_t             wr_loc,
  input  logic [WC_W-1:0]  wr_wc
);

  typedef struct packed {
    logic            v;
    loc_t            loc;
    logic [WC_W-1:0] wc;
  } entry_t;

  localparam logic [WC_W-1:0] WC_MAX  = '1;
  localparam logic [WC_W-1:0] WC_HALF = WC_W'(1) << (WC_W - 1);

  entry_t tbl [M];

  logic             have_free;
  logic [IDX_W-1:0] free_idx;

  // Combinational search: lookup, first free slot, LFW victim, occupancy.
  always_comb begin
    logic [WC_W-1:0] best_wc;
    logic            best_found;
    lk_hit     = 1'b0;
    lk_idx     = '0;
    have_free  = 1'b0;
    free_idx   = '0;
    victim_idx = '0;
    best_wc    = '1;
    best_found = 1'b0;
    count      = '0;
    for (int i = 0; i < M; i++) begin
      if (tbl[i].v) begin
        count = count + 1'b1;
        if (!lk_hit && tbl[i].loc == lk_loc) begin
          lk_hit = 1'b1;
          lk_idx = IDX_W'(i);
        end
        if (!best_found || tbl[i].wc < best_wc) begin
          best_found = 1'b1;
          best_wc    = tbl[i].wc;
          victim_idx = IDX_W'(i);
        end
      end else if (!have_free) begin
        have_free = 1'b1;
        free_idx  = IDX_W'(i);
      end
    end
    full       = !have_free;
    victim_loc = tbl[victim_idx].loc;
    rd_v       = tbl[rd_idx].v;
    rd_loc     = tbl[rd_idx].loc;
    rd_wc      = tbl[rd_idx].wc;
  end

  assign ev_halve = inc_valid && !ins_valid && !rep_valid &&
                    tbl[inc_idx].v && tbl[inc_idx].wc == WC_MAX;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < M; i++) tbl[i] <= '0;
    end else begin
      if (ins_valid && have_free) begin
        tbl[free_idx] <= '{v: 1'b1, loc: ins_loc, wc: WC_W'(1)};
      end else if (rep_valid) begin
        tbl[victim_idx] <= '{v: 1'b1, loc: rep_loc, wc: WC_W'(1)};
      end else if (inc_valid && tbl[inc_idx].v) begin
        if (tbl[inc_idx].wc == WC_MAX) begin
          for (int i = 0; i < M; i++)
            tbl[i].wc <= (tbl[i].wc > WC_HALF) ? tbl[i].wc - WC_HALF : '0;
        end else begin
          tbl[inc_idx].wc <= tbl[inc_idx].wc + 1'b1;
        end
      end else if (inv_valid) begin
        for (int i = 0; i < M; i++)
          if (tbl[i].v && tbl[i].loc == inv_loc) tbl[i].v <= 1'b0;
      end else if (wr_valid) begin
        tbl[wr_idx] <= '{v: wr_v, loc: wr_loc, wc: wr_wc};
      end
    end
  end

  // Insert only into a table with room; one operation per cycle.
  a_ins_not_full: assert property (@(posedge clk) disable iff (!rst_n)
    ins_valid |-> !full);
  a_one_op: assert property (@(posedge clk) disable iff (!rst_n)
    $onehot0({ins_valid, rep_valid, inc_valid, inv_valid, wr_valid}));

endmodule
