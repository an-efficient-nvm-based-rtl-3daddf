// nvm_ic_top_tb: end-to-end testbench of the whole memory hierarchy at its
// default parameters (M = 12, N = 4, 6-bit write counters, 16 KB L1, 128 KB
// LLC), with a PCM model behind it.
//
// A CPU model issues a random mix of loads and stores: a small hot set that
// saturates write counters, an L1-sized region, an LLC-sized region and a
// large cold region, plus bursts of stores to distinct blocks that fill the
// DBT and WBQ. Every load is compared with a reference memory. A third
// thread fetches instructions from a separate code region (loop, LLC-sized
// and larger) and compares each word with the memory's initial content. A second
// thread cuts the power at random moments: it raises power_fail, waits for
// shutdown, checks that the backup took the same fixed number of cycles as
// every other backup, applies the volatile reset (L1, DBT, WBQ and the
// register-file model lose their contents) and checks that after the
// restore the register file and the number of dirty blocks are back and the
// loads keep returning the right data.
// Rules checked on every cycle: at most K = 16 dirty blocks in the L1.
// Latency checked: a read hit or fetch hit answers after 1 cycle, a write
// hit after 2.
// Each mechanism (DBT insert, LFW replacement, counter halving, WBQ stall,
// WBQ drain, write hit to a queued block, L1 dirty eviction, LLC miss, LLC
// dirty eviction, I-cache miss, instruction-LLC miss, backup, restore) must
// occur at least once.
module nvm_ic_top_tb;
  import nvm_pkg::*;
  import nvm_tb_pkg::*;

  localparam int NOPS = 60000;
  localparam int K = DEF_M + DEF_N;

  logic clk = 0;
  always #5 clk = ~clk;
  logic rst_n = 0, nv_rst_n = 0, power_fail = 0;
  int checks = 0, failures = 0;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL @%0t: %s", $time, what);
    end
  endtask

  logic        shutdown, running, cpu_req_valid, cpu_req_ready, cpu_rsp_valid;
  cpu_req_t    cpu_req;
  word_t       cpu_rsp_rdata, rf_rd_data, rf_wr_data;
  logic [4:0]  rf_rd_idx, rf_wr_idx;
  logic        rf_wr_en, mem_req_valid, mem_req_ready, mem_rsp_valid;
  blk_req_t    mem_req;
  blk_t        mem_rsp_data;
  logic [$clog2(K+1)-1:0] dirty_count;
  events_t     ev;
  logic        if_req_valid, if_req_ready, if_rsp_valid;
  logic [ADDR_W-1:0] if_req_addr;
  word_t       if_rsp_data;
  int          pcm_reads, pcm_writes;

  nvm_ic_top dut (
    .clk, .rst_n, .nv_rst_n, .power_fail, .shutdown, .running,
    .cpu_req_valid, .cpu_req_ready, .cpu_req, .cpu_rsp_valid, .cpu_rsp_rdata,
    .if_req_valid, .if_req_ready, .if_req_addr, .if_rsp_valid, .if_rsp_data,
    .rf_rd_idx, .rf_rd_data, .rf_wr_en, .rf_wr_idx, .rf_wr_data,
    .mem_req_valid, .mem_req_ready, .mem_req, .mem_rsp_valid, .mem_rsp_data,
    .dirty_count, .ev);

  blk_mem_model u_pcm (
    .clk, .req_valid(mem_req_valid), .req_ready(mem_req_ready), .req(mem_req),
    .rsp_valid(mem_rsp_valid), .rsp_data(mem_rsp_data),
    .n_reads(pcm_reads), .n_writes(pcm_writes));

  // ---- CPU register file model ----
  word_t rf [NREGS];
  assign rf_rd_data = rf[rf_rd_idx];
  always @(posedge clk) if (rf_wr_en) rf[rf_wr_idx] <= rf_wr_data;

  // ---- reference memory ----
  word_t ref_mem [logic [ADDR_W-1:0]];
  function automatic word_t ref_rd(input logic [ADDR_W-1:0] a);
    return ref_mem.exists(a) ? ref_mem[a] : init_word(a);
  endfunction

  // ---- event counters ----
  int n_dwait = 0;
  int n_l1imiss = 0, n_llcimiss = 0, n_fetch = 0;
  int n_ins, n_rep, n_halve, n_stall, n_drain, n_wbqhit, n_l1miss, n_l1evict,
      n_llcmiss, n_llcevict, n_backup, n_restore;
  initial begin
    n_ins = 0; n_rep = 0; n_halve = 0; n_stall = 0; n_drain = 0; n_wbqhit = 0;
    n_l1miss = 0; n_l1evict = 0; n_llcmiss = 0; n_llcevict = 0; n_backup = 0; n_restore = 0;
  end
  always @(posedge clk) if (rst_n) begin
    n_l1imiss  += ev.l1i_miss;
    n_llcimiss += ev.llci_miss;
    n_ins      += ev.dbt_insert;
    n_rep      += ev.dbt_replace;
    n_halve    += ev.wc_halve;
    n_stall    += ev.wbq_stall;
    n_dwait    += ev.drain_wait;
    n_drain    += ev.wbq_drain;
    n_wbqhit   += ev.wbq_hit;
    n_l1miss   += ev.l1_miss;
    n_l1evict  += ev.l1_dirty_evict;
    n_llcmiss  += ev.llc_miss;
    n_llcevict += ev.llc_dirty_evict;
    if (dirty_count > ($bits(dirty_count))'(K)) check(0, "more than K dirty blocks");
  end

  int cycle = 0;
  always @(posedge clk) cycle++;

  initial begin
    #400000000;
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ---- address generator ----
  logic [ADDR_W-1:0] hot_words [4];
  function automatic logic [ADDR_W-1:0] pick_addr();
    int r = $urandom_range(0, 99);
    if (r < 25) return hot_words[$urandom_range(0, 3)];
    if (r < 55) return ADDR_W'($urandom_range(0, 8 * 1024 / 4 - 1) * 4);           // 8 KB
    if (r < 88) return ADDR_W'(32'h10000 + $urandom_range(0, 96 * 1024 / 4 - 1) * 4); // 96 KB
    return ADDR_W'(32'h100000 + $urandom_range(0, 4 * 1024 * 1024 / 4 - 1) * 4);     // 4 MB
  endfunction

  // One CPU access; returns latency in cycles and whether it missed/stalled.
  task automatic cpu_access(input bit we, input logic [ADDR_W-1:0] a, input word_t wd);
    int lat, miss0, stall0;
    word_t exp;
    cpu_req_valid = 1; cpu_req.we = we; cpu_req.addr = a; cpu_req.wdata = wd;
    #1;
    while (!cpu_req_ready) begin @(negedge clk); #1; end
    exp = ref_rd(a);
    if (we) ref_mem[a] = wd;
    miss0 = n_l1miss; stall0 = n_stall + n_dwait;
    @(negedge clk);
    cpu_req_valid = 0;
    lat = 1;
    while (!cpu_rsp_valid) begin @(negedge clk); lat++; end
    if (!we) check(cpu_rsp_rdata == exp,
                   $sformatf("load %h = %h, expected %h", a, cpu_rsp_rdata, exp));
    // an access without a miss or a stall must have the SRAM latency
    if (n_l1miss == miss0 && n_stall + n_dwait == stall0 && !power_fail)
      check(lat == (we ? SRAM_WR_CYC : SRAM_RD_CYC),
            $sformatf("%s hit latency %0d", we ? "write" : "read", lat));
  endtask

  bit   done = 0;

  // ---- instruction-fetch thread ----
  // Fetches from a code region far above the data: a 2 KB loop that stays in
  // the L1 I-cache, a 64 KB region that fits the instruction LLC and a 1 MB
  // region that does not. Code is never written, so every word must equal
  // the memory's initial content.
  localparam logic [ADDR_W-1:0] CODE_BASE = ADDR_W'(32'h400_0000);
  initial begin
    if_req_valid = 0; if_req_addr = '0;
    wait (nv_rst_n && rst_n && running);
    while (!done) begin
      int r, lat, miss0;
      logic [ADDR_W-1:0] a;
      r = $urandom_range(0, 99);
      if (r < 70)      a = CODE_BASE + ADDR_W'($urandom_range(0, 2 * 1024 / 4 - 1) * 4);
      else if (r < 95) a = CODE_BASE + ADDR_W'(32'h10000 + $urandom_range(0, 64 * 1024 / 4 - 1) * 4);
      else             a = CODE_BASE + ADDR_W'(32'h100000 + $urandom_range(0, 1024 * 1024 / 4 - 1) * 4);
      @(negedge clk);
      if_req_valid = 1; if_req_addr = a;
      #1;
      while (!if_req_ready) begin @(negedge clk); #1; end
      miss0 = n_l1imiss;
      @(negedge clk);
      if_req_valid = 0;
      lat = 1;
      while (!if_rsp_valid) begin @(negedge clk); lat++; end
      n_fetch++;
      check(if_rsp_data == init_word(a),
            $sformatf("fetch %h = %h, expected %h", a, if_rsp_data, init_word(a)));
      if (n_l1imiss == miss0) check(lat == SRAM_RD_CYC, $sformatf("fetch hit latency %0d", lat));
      repeat ($urandom_range(0, 3)) @(negedge clk);
    end
  end

  // ---- power-failure thread ----
  int   bk_cycles_first = -1;
  initial begin
    wait (nv_rst_n && rst_n);
    while (!done) begin
      word_t saved_rf [NREGS];
      int    t0, saved_dirty;
      repeat ($urandom_range(3000, 30000)) @(negedge clk);
      if (done) break;
      // execution changed some registers since the last failure
      for (int i = 0; i < NREGS; i++) if ($urandom_range(0, 1)) rf[i] = $urandom;
      power_fail = 1;
      wait (dut.bk_ack);
      @(negedge clk);
      t0 = cycle;
      saved_rf = rf;
      saved_dirty = int'(dirty_count);
      wait (shutdown);
      @(negedge clk);
      n_backup++;
      if (bk_cycles_first < 0) begin
        bk_cycles_first = cycle - t0;
        $display("backup takes %0d cycles (%0d dirty blocks)", bk_cycles_first, saved_dirty);
        check(bk_cycles_first == (NREGS + K) * (STT_WR_CYC + 1) + 1,
              $sformatf("backup cycles %0d", bk_cycles_first));
      end else
        check(cycle - t0 == bk_cycles_first, "backup time is fixed");
      // supply collapses: volatile state is lost
      rst_n = 0;
      for (int i = 0; i < NREGS; i++) rf[i] = $urandom;
      repeat (5) @(negedge clk);
      power_fail = 0;
      rst_n = 1;
      wait (running);
      @(negedge clk);
      n_restore++;
      check(rf == saved_rf, "register file restored");
      check(int'(dirty_count) == saved_dirty, "dirty blocks restored");
    end
  end

  // ---- CPU thread ----
  initial begin
    cpu_req_valid = 0; cpu_req = '0;
    for (int i = 0; i < NREGS; i++) rf[i] = $urandom;
    for (int i = 0; i < 4; i++) hot_words[i] = ADDR_W'(32'h3000 + i * 256);
    repeat (3) @(negedge clk);
    nv_rst_n = 1;
    @(negedge clk);
    rst_n = 1;
    wait (running);
    @(negedge clk);
    for (int op = 0; op < NOPS; op++) begin
      if ($urandom_range(0, 199) == 0) begin
        // burst of stores to distinct L1-resident blocks
        logic [ADDR_W-1:0] base;
        base = ADDR_W'($urandom_range(0, 63) * 64);
        for (int b = 0; b < 24; b++)
          cpu_access(1, ADDR_W'((base + b * 64 * 3) % (8 * 1024)), $urandom);
      end else begin
        bit we;
        we = ($urandom_range(0, 99) < 45);
        cpu_access(we, pick_addr(), $urandom);
      end
    end
    done = 1;
    wait (!power_fail && running);
    // final sweep: read back every word written
    foreach (ref_mem[a]) begin
      cpu_access(0, a, '0);
    end
    $display("ops=%0d cycles=%0d pcm reads=%0d writes=%0d", NOPS, cycle, pcm_reads, pcm_writes);
    $display("dbt insert=%0d replace=%0d wc_halve=%0d wbq stall=%0d drain=%0d wbq_hit=%0d drain_wait=%0d",
             n_ins, n_rep, n_halve, n_stall, n_drain, n_wbqhit, n_dwait);
    $display("l1 miss=%0d dirty_evict=%0d llc miss=%0d dirty_evict=%0d backup=%0d restore=%0d",
             n_l1miss, n_l1evict, n_llcmiss, n_llcevict, n_backup, n_restore);
    $display("fetches=%0d l1i miss=%0d llci miss=%0d", n_fetch, n_l1imiss, n_llcimiss);
    check(n_l1imiss > 0, "L1 I-cache miss happened");
    check(n_llcimiss > 0, "instruction LLC miss happened");
    check(n_ins > 0, "DBT insert happened");
    check(n_rep > 0, "DBT LFW replacement happened");
    check(n_halve > 0, "write-counter halving happened");
    check(n_stall > 0, "WBQ-full stall happened");
    check(n_dwait > 0, "write waited for its block's drain");
    check(n_drain > 0, "WBQ drain happened");
    check(n_wbqhit > 0, "write hit to a queued block happened");
    check(n_l1evict > 0, "L1 dirty eviction happened");
    check(n_llcmiss > 0, "LLC miss happened");
    check(n_llcevict > 0, "LLC dirty eviction happened");
    check(n_backup > 0, "backup happened");
    check(n_restore > 0, "restore happened");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
