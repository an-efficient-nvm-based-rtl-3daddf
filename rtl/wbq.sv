// wbq: Write-Back Queue.
//
// An N-entry first-in first-out queue of L1 block locations ({set,way}) that
// are dirty but no longer tracked by the dirty block table. Entries enter when
// the DBT evicts its least-frequently-written entry; the L1 controller drains
// the head by writing that block's current L1 data to the LLC and then
// clearing the block's dirty bit. The queue holds locations only, so a later
// write hit to a queued block updates the data in L1 and the queued write-back
// carries the new value (the paper's "update the modified value in WBQ").
//
// Besides the FIFO behaviour given by the paper, each slot carries a valid
// bit so that a block evicted from L1 by a miss can be cancelled in place
// (inv_*); a cancelled slot still occupies the queue until it reaches the
// head and is popped. This cancellation is this design's choice.
//
// Interface: push_* and pop may happen in the same cycle; push while full is
// illegal (assertion). head_v/head_loc show the oldest slot. lk_loc is
// searched combinationally over the valid slots. rd_pos (0 = head) reads a
// slot for the backup controller. Reset empties the queue.
module wbq
  import nvm_pkg::*;
#(
  parameter int unsigned N = DEF_N,
  localparam int unsigned PTR_W = (N > 1) ? $clog2(N) : 1
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             push_valid,
  input  loc_t             push_loc,
  input  logic             pop,
  output logic             full,
  output logic             empty,
  output logic [PTR_W:0]   count,
  output logic             head_v,
  output loc_t             head_loc,
  input  loc_t             lk_loc,
  output logic             lk_hit,
  input  logic             inv_valid,
  input  loc_t             inv_loc,
  input  logic [PTR_W-1:0] rd_pos,
  output logic             rd_v,
  output loc_t             rd_loc
);

  logic             slot_v   [N];
  loc_t             slot_loc [N];
  logic [PTR_W-1:0] head, tail;

  function automatic logic [PTR_W-1:0] nxt(input logic [PTR_W-1:0] p);
    return (p == PTR_W'(N - 1)) ? '0 : p + 1'b1;
  endfunction

  function automatic logic [PTR_W-1:0] at(input logic [PTR_W-1:0] base,
                                          input logic [PTR_W-1:0] off);
    logic [PTR_W+1:0] s;
    s = {2'b00, base} + {2'b00, off};
    if (s >= (PTR_W+2)'(N)) s = s - (PTR_W+2)'(N);
    return s[PTR_W-1:0];
  endfunction

  assign full     = (count == (PTR_W+1)'(N));
  assign empty    = (count == '0);
  assign head_v   = !empty && slot_v[head];
  assign head_loc = slot_loc[head];
  assign rd_v     = ({1'b0, rd_pos} < count) && slot_v[at(head, rd_pos)];
  assign rd_loc   = slot_loc[at(head, rd_pos)];

  always_comb begin
    lk_hit = 1'b0;
    for (int i = 0; i < N; i++)
      if (slot_v[i] && slot_loc[i] == lk_loc) lk_hit = 1'b1;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      head  <= '0;
      tail  <= '0;
      count <= '0;
      for (int i = 0; i < N; i++) begin
        slot_v[i]   <= 1'b0;
        slot_loc[i] <= '0;
      end
    end else begin
      if (inv_valid)
        for (int i = 0; i < N; i++)
          if (slot_v[i] && slot_loc[i] == inv_loc) slot_v[i] <= 1'b0;
      if (pop && !empty) begin
        slot_v[head] <= 1'b0;
        head         <= nxt(head);
      end
      if (push_valid && !full) begin
        slot_v[tail]   <= 1'b1;
        slot_loc[tail] <= push_loc;
        tail           <= nxt(tail);
      end
      count <= count + (PTR_W+1)'(push_valid && !full) - (PTR_W+1)'(pop && !empty);
    end
  end

  a_no_push_full: assert property (@(posedge clk) disable iff (!rst_n)
    push_valid |-> !full);
  a_no_pop_empty: assert property (@(posedge clk) disable iff (!rst_n)
    pop |-> !empty);

endmodule
