// wbq_tb: self-checking testbench of the write-back queue.
//
// Drives the default 4-entry queue with random pushes, pops and
// cancellations and compares occupancy, full/empty, the head slot, every
// position read through rd_pos and the location search with a queue model
// kept in the testbench. It also checks strict first-in first-out order on a
// directed fill-then-drain sequence.
module wbq_tb;
  import nvm_pkg::*;

  localparam int N = DEF_N;
  localparam int PW = $clog2(N);

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  logic push, pop, full, empty, head_v, lk_hit, inv, rd_v;
  loc_t push_loc, head_loc, lk_loc, inv_loc, rd_loc;
  logic [PW:0] count;
  logic [PW-1:0] rd_pos;

  wbq u_dut (.clk, .rst_n, .push_valid(push), .push_loc, .pop, .full, .empty, .count,
             .head_v, .head_loc, .lk_loc, .lk_hit, .inv_valid(inv), .inv_loc,
             .rd_pos, .rd_v, .rd_loc);

  // model: queue of {valid, loc}
  typedef struct { bit v; loc_t l; } slot_t;
  slot_t q[$];

  initial begin
    #2000000;
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    push = 0; pop = 0; inv = 0; push_loc = '0; lk_loc = '0; inv_loc = '0; rd_pos = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    @(negedge clk);

    // directed: fill, then drain in order
    for (int i = 0; i < N; i++) begin
      push = 1; push_loc = loc_t'(8'(10 + i)); @(negedge clk);
    end
    push = 0; #1;
    check(full && count == (PW+1)'(N), "full after N pushes");
    for (int i = 0; i < N; i++) begin
      check(head_v && head_loc == loc_t'(8'(10 + i)), "FIFO order");
      pop = 1; @(negedge clk); pop = 0; #1;
    end
    check(empty, "empty after draining");

    for (int t = 0; t < 20000; t++) begin
      int op;
      bit exp_hit;
      push = 0; pop = 0; inv = 0;
      lk_loc = loc_t'($urandom_range(0, 9));
      rd_pos = PW'($urandom_range(0, N - 1));
      #1;
      exp_hit = 0;
      foreach (q[i]) if (q[i].v && q[i].l == lk_loc) exp_hit = 1;
      check(int'(count) == q.size() && full == (q.size() == N) && empty == (q.size() == 0),
            "occupancy");
      check(lk_hit == exp_hit, "search");
      if (q.size() > 0) check(head_v == q[0].v && (!q[0].v || head_loc == q[0].l), "head");
      check(rd_v == (int'(rd_pos) < q.size() && q[rd_pos].v) &&
            (!rd_v || rd_loc == q[rd_pos].l), "position read");
      op = $urandom_range(0, 9);
      if (op < 4 && q.size() < N) begin
        loc_t l = loc_t'($urandom_range(0, 9));
        push = 1; push_loc = l;
      end
      if (op >= 3 && op < 7 && q.size() > 0) pop = 1;
      if (op >= 8) begin inv = 1; inv_loc = loc_t'($urandom_range(0, 9)); end
      // update model in hardware order: cancel, pop, push
      if (inv) foreach (q[i]) if (q[i].l == inv_loc) q[i].v = 0;
      if (pop) void'(q.pop_front());
      if (push) q.push_back('{1'b1, push_loc});
      @(negedge clk);
    end
    push = 0; pop = 0; inv = 0;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
