// dbt_tb: self-checking testbench of the dirty block table.
//
// Part 1 replays the worked example of the write-counter rule with a 4-entry,
// 5-bit table: counters {19,17,31,3}, one more write to the third entry, and
// the counters must become {3,1,15,0}; the LFW victim is then entry 3.
// Part 2 drives the default 12-entry, 6-bit table with random inserts,
// replacements, counter updates and invalidations and compares lookup,
// occupancy, victim choice and every entry with a model kept in the testbench.
module dbt_tb;
  import nvm_pkg::*;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  // ---------------- small instance (paper example) -----------------------
  loc_t s_lk, s_wloc, s_vloc, s_rloc;
  logic s_hit, s_full, s_inc, s_wr, s_rv, s_halve;
  logic [1:0] s_lkidx, s_vidx, s_incidx, s_widx, s_ridx;
  logic [2:0] s_cnt;
  logic [4:0] s_wwc, s_rwc;

  dbt #(.M(4), .WC_W(5)) u_small (
    .clk, .rst_n, .lk_loc(s_lk), .lk_hit(s_hit), .lk_idx(s_lkidx),
    .ins_valid(1'b0), .ins_loc('0), .rep_valid(1'b0), .rep_loc('0),
    .victim_loc(s_vloc), .victim_idx(s_vidx), .inc_valid(s_inc), .inc_idx(s_incidx),
    .inv_valid(1'b0), .inv_loc('0), .full(s_full), .count(s_cnt), .ev_halve(s_halve),
    .rd_idx(s_ridx), .rd_v(s_rv), .rd_loc(s_rloc), .rd_wc(s_rwc),
    .wr_valid(s_wr), .wr_idx(s_widx), .wr_v(1'b1), .wr_loc(s_wloc), .wr_wc(s_wwc));

  // ---------------- default instance -------------------------------------
  localparam int M = DEF_M;
  localparam int W = DEF_WC_W;
  localparam int IW = $clog2(M);
  loc_t lk, ins_loc, rep_loc, inv_loc, vloc, rloc;
  logic hit, ins, rep, inc, inv, full, rv, halve;
  logic [IW-1:0] lkidx, vidx, incidx, ridx;
  logic [IW:0] cnt;
  logic [W-1:0] rwc;

  dbt u_dut (
    .clk, .rst_n, .lk_loc(lk), .lk_hit(hit), .lk_idx(lkidx),
    .ins_valid(ins), .ins_loc(ins_loc), .rep_valid(rep), .rep_loc(rep_loc),
    .victim_loc(vloc), .victim_idx(vidx), .inc_valid(inc), .inc_idx(incidx),
    .inv_valid(inv), .inv_loc(inv_loc), .full(full), .count(cnt), .ev_halve(halve),
    .rd_idx(ridx), .rd_v(rv), .rd_loc(rloc), .rd_wc(rwc),
    .wr_valid(1'b0), .wr_idx('0), .wr_v(1'b0), .wr_loc('0), .wr_wc('0));

  // reference model
  bit       mv [M];
  loc_t     ml [M];
  int       mw [M];

  function automatic int m_count();
    int c = 0;
    for (int i = 0; i < M; i++) c += mv[i];
    return c;
  endfunction
  function automatic int m_find(loc_t l);
    for (int i = 0; i < M; i++) if (mv[i] && ml[i] == l) return i;
    return -1;
  endfunction
  function automatic int m_free();
    for (int i = 0; i < M; i++) if (!mv[i]) return i;
    return -1;
  endfunction
  function automatic int m_victim();
    int b = -1;
    for (int i = 0; i < M; i++) if (mv[i] && (b < 0 || mw[i] < mw[b])) b = i;
    return (b < 0) ? 0 : b;
  endfunction

  initial begin
    #2000000;
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int nhalve = 0;
  initial begin
    int wcs[4] = '{19, 17, 31, 3};
    int exp[4] = '{3, 1, 15, 0};
    s_inc = 0; s_wr = 0; s_lk = '0; s_wloc = '0; s_wwc = '0; s_ridx = '0;
    s_incidx = '0; s_widx = '0;
    ins = 0; rep = 0; inc = 0; inv = 0; lk = '0; ins_loc = '0; rep_loc = '0;
    inv_loc = '0; incidx = '0; ridx = '0;
    for (int i = 0; i < M; i++) begin mv[i] = 0; ml[i] = '0; mw[i] = 0; end
    repeat (2) @(posedge clk);
    rst_n = 1;
    @(negedge clk);

    // ---- Part 1: paper example ----
    for (int i = 0; i < 4; i++) begin
      s_wr = 1; s_widx = 2'(i); s_wloc = loc_t'(8'(i * 5 + 1)); s_wwc = 5'(wcs[i]);
      @(negedge clk);
    end
    s_wr = 0;
    check(s_full && s_cnt == 3'd4, "small table full after 4 loads");
    check(s_vidx == 2'd3, "victim before update is entry with WC 3");
    s_inc = 1; s_incidx = 2'd2;
    #1 check(s_halve, "saturated counter reported");
    @(negedge clk);
    s_inc = 0;
    for (int i = 0; i < 4; i++) begin
      s_ridx = 2'(i); #1;
      check(s_rv && s_rwc == 5'(exp[i]),
            $sformatf("example entry %0d: wc=%0d expected %0d", i, s_rwc, exp[i]));
    end
    check(s_vidx == 2'd3, "victim after halving is entry 3 (WC 0)");
    s_lk = loc_t'(8'(2 * 5 + 1)); #1;
    check(s_hit && s_lkidx == 2'd2, "lookup finds entry 2");

    // ---- Part 2: random against the model ----
    for (int t = 0; t < 20000; t++) begin
      int op, f;
      loc_t l;
      l = loc_t'($urandom_range(0, 13));
      op = $urandom_range(0, 9);
      ins = 0; rep = 0; inc = 0; inv = 0;
      lk = l;
      #1;
      // combinational checks against the model state
      f = m_find(l);
      check(hit == (f >= 0) && (f < 0 || lkidx == IW'(f)), "lookup");
      check(int'(cnt) == m_count() && full == (m_count() == M), "count/full");
      if (m_count() > 0) check(vidx == IW'(m_victim()) && vloc == ml[m_victim()], "LFW victim");
      ridx = IW'($urandom_range(0, M - 1)); #1;
      check(rv == mv[ridx] && (!mv[ridx] || (rloc == ml[ridx] && int'(rwc) == mw[ridx])),
            "entry read");
      if (f >= 0 && op < 9) begin
        // further write to a tracked block
        inc = 1; incidx = IW'(f);
        if (mw[f] == (1 << W) - 1) begin
          nhalve++;
          for (int i = 0; i < M; i++) mw[i] = (mw[i] > (1 << (W - 1))) ? mw[i] - (1 << (W - 1)) : 0;
        end else mw[f]++;
      end else if (f < 0 && op < 8) begin
        if (m_count() < M) begin
          ins = 1; ins_loc = l;
          f = m_free(); mv[f] = 1; ml[f] = l; mw[f] = 1;
        end else begin
          rep = 1; rep_loc = l;
          f = m_victim(); ml[f] = l; mw[f] = 1;
        end
      end else if (f >= 0) begin
        inv = 1; inv_loc = l; mv[f] = 0;
      end
      @(negedge clk);
    end
    ins = 0; rep = 0; inc = 0; inv = 0;
    check(nhalve > 0, "random test reached counter saturation");
    $display("random test: %0d counter saturations", nhalve);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
