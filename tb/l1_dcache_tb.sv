// l1_dcache_tb: self-checking testbench of the L1 data cache and its
// dirty-block limiting controller, with a model of the LLC (2-cycle read,
// 10-cycle write) behind it.
//
// Directed part: makes 12 blocks dirty with different numbers of writes
// (block i written i+1 times), checks that they fill the DBT with the right
// write counts, then dirties a 13th block and checks that the least
// frequently written block (block 0) leaves the DBT for the WBQ, is written
// to the LLC and becomes clean. Random part: loads and stores, with bursts to
// distinct blocks, compared with a reference memory; the number of dirty
// blocks must never exceed K = 16, hits must take 1 (read) / 2 (write)
// cycles, and a WBQ-full stall must occur. Backup port: with bk_req the
// controller must go quiet, every DBT/WBQ entry must name a dirty block and
// every dirty block must be named; a block written through the restore port
// must then read back.
module l1_dcache_tb;
  import nvm_pkg::*;
  import nvm_tb_pkg::*;

  localparam int M = DEF_M, N = DEF_N, K = M + N;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL @%0t: %s", $time, what); end
  endtask

  logic cpu_req_valid, cpu_req_ready, cpu_rsp_valid;
  cpu_req_t cpu_req;
  word_t cpu_rsp_rdata;
  logic llc_req_valid, llc_req_ready, llc_rsp_valid;
  blk_req_t llc_req;
  blk_t llc_rsp_data;
  logic bk_req, bk_ack, bk_dbt_v, bk_wbq_v;
  logic [3:0] bk_dbt_idx, rs_dbt_idx;
  logic [1:0] bk_wbq_pos;
  loc_t bk_dbt_loc, bk_wbq_loc, bk_loc, rs_loc;
  logic [5:0] bk_dbt_wc, rs_dbt_wc;
  l1_tag_t bk_tag, rs_tag;
  blk_t bk_data, rs_data;
  logic rs_blk_we, rs_dbt_we, rs_wbq_push;
  logic [4:0] dirty_count;
  logic e_ins, e_rep, e_halve, e_stall, e_dwait, e_drain, e_wbqhit, e_miss, e_evict;
  int llc_reads, llc_writes;

  l1_dcache u_dut (.clk, .rst_n, .cpu_req_valid, .cpu_req_ready, .cpu_req, .cpu_rsp_valid,
    .cpu_rsp_rdata, .llc_req_valid, .llc_req_ready, .llc_req, .llc_rsp_valid, .llc_rsp_data,
    .bk_req, .bk_ack, .bk_dbt_idx, .bk_dbt_v, .bk_dbt_loc, .bk_dbt_wc, .bk_wbq_pos, .bk_wbq_v,
    .bk_wbq_loc, .bk_loc, .bk_tag, .bk_data, .rs_blk_we, .rs_loc, .rs_tag, .rs_data,
    .rs_dbt_we, .rs_dbt_idx, .rs_dbt_wc, .rs_wbq_push, .dirty_count,
    .ev_dbt_insert(e_ins), .ev_dbt_replace(e_rep), .ev_wc_halve(e_halve),
    .ev_wbq_stall(e_stall), .ev_drain_wait(e_dwait), .ev_wbq_drain(e_drain),
    .ev_wbq_hit(e_wbqhit), .ev_miss(e_miss), .ev_dirty_evict(e_evict));

  blk_mem_model #(.RD_CYC(STT_RD_CYC), .WR_CYC(STT_WR_CYC)) u_llc (
    .clk, .req_valid(llc_req_valid), .req_ready(llc_req_ready), .req(llc_req),
    .rsp_valid(llc_rsp_valid), .rsp_data(llc_rsp_data), .n_reads(llc_reads),
    .n_writes(llc_writes));

  word_t ref_mem [logic [ADDR_W-1:0]];
  int n_miss = 0, n_stall = 0, n_dwait = 0, n_rep = 0, n_drain = 0;
  always @(posedge clk) if (rst_n) begin
    n_miss += e_miss; n_stall += e_stall; n_dwait += e_dwait; n_rep += e_rep;
    n_drain += e_drain;
    if (dirty_count > 5'(K)) check(0, "more than K dirty blocks");
  end

  task automatic cpu_access(input bit we, input logic [ADDR_W-1:0] a, input word_t wd);
    int lat, m0, s0;
    word_t exp;
    cpu_req_valid = 1; cpu_req.we = we; cpu_req.addr = a; cpu_req.wdata = wd;
    #1;
    while (!cpu_req_ready) begin @(negedge clk); #1; end
    exp = ref_mem.exists(a) ? ref_mem[a] : init_word(a);
    if (we) ref_mem[a] = wd;
    m0 = n_miss; s0 = n_stall + n_dwait;
    @(negedge clk);
    cpu_req_valid = 0;
    lat = 1;
    while (!cpu_rsp_valid) begin @(negedge clk); lat++; end
    if (!we) check(cpu_rsp_rdata == exp, $sformatf("load %h", a));
    if (n_miss == m0 && n_stall + n_dwait == s0)
      check(lat == (we ? SRAM_WR_CYC : SRAM_RD_CYC), $sformatf("hit latency %0d", lat));
  endtask

  function automatic bit is_dirty(loc_t l);
    return u_dut.dirty_q[l.set][l.way];
  endfunction

  initial begin
    #100000000;
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int nd;
    loc_t l0;
    cpu_req_valid = 0; cpu_req = '0; bk_req = 0; bk_dbt_idx = '0; bk_wbq_pos = '0; bk_loc = '0;
    rs_blk_we = 0; rs_loc = '0; rs_tag = '0; rs_data = '0; rs_dbt_we = 0; rs_dbt_idx = '0;
    rs_dbt_wc = '0; rs_wbq_push = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    @(negedge clk);

    // ---- directed: block i (set i) written i+1 times ----
    for (int i = 0; i < M; i++)
      for (int w = 0; w <= i; w++) cpu_access(1, ADDR_W'(i * 64 + w * 4), $urandom);
    check(u_dut.dbt_count == 4'(M), "DBT holds 12 entries");
    for (int i = 0; i < M; i++) begin
      bk_dbt_idx = 4'(i); #1;
      check(bk_dbt_v && bk_dbt_loc.set == 6'(i) && int'(bk_dbt_wc) == i + 1,
            $sformatf("DBT entry %0d wc=%0d", i, bk_dbt_wc));
    end
    l0 = '{set: 6'(0), way: 2'(0)};
    for (int w = 0; w < 4; w++) if (u_dut.valid_q[0][w] && u_dut.dirty_q[0][w]) l0.way = 2'(w);
    cpu_access(1, ADDR_W'(M * 64), $urandom);      // 13th dirty block
    check(n_rep == 1, "13th dirty block replaced a DBT entry");
    bk_dbt_idx = 4'(0); #1;
    check(bk_dbt_loc.set == 6'(M) && bk_dbt_wc == 6'd1, "new block took the LFW slot");
    repeat (30) @(negedge clk);
    check(n_drain == 1 && !is_dirty(l0), "LFW victim written back and clean");
    check(u_llc.mem.exists(baddr_t'(0)) && u_llc.mem[baddr_t'(0)][31:0] == ref_mem[0],
          "LLC holds the written-back data");

    // ---- random traffic ----
    for (int t = 0; t < 20000; t++) begin
      if ($urandom_range(0, 99) == 0) begin
        for (int b = 0; b < 24; b++) cpu_access(1, ADDR_W'(($urandom_range(0, 127)) * 64), $urandom);
      end else begin
        logic [ADDR_W-1:0] a;
        if ($urandom_range(0, 1)) a = ADDR_W'($urandom_range(0, 2047) * 4);
        else a = ADDR_W'($urandom_range(0, 16383) * 4);
        cpu_access($urandom_range(0, 99) < 40, a, $urandom);
      end
    end
    check(n_stall > 0, "WBQ-full stall seen");

    // ---- backup port ----
    bk_req = 1;
    wait (bk_ack);
    @(negedge clk);
    nd = 0;
    for (int i = 0; i < M; i++) begin
      bk_dbt_idx = 4'(i); #1;
      if (bk_dbt_v) begin nd++; check(is_dirty(bk_dbt_loc), "DBT entry names a dirty block"); end
    end
    for (int j = 0; j < N; j++) begin
      bk_wbq_pos = 2'(j); #1;
      if (bk_wbq_v) begin nd++; check(is_dirty(bk_wbq_loc), "WBQ entry names a dirty block"); end
    end
    check(nd == int'(dirty_count), $sformatf("tracked %0d = dirty %0d", nd, dirty_count));
    // restore one block at set 63 way 3 and read it back
    rs_loc = '{set: 6'd63, way: 2'd3}; rs_tag = l1_tag_t'(15'h1234); rs_data = '0;
    rs_data[31:0] = 32'hCAFE_F00D; rs_blk_we = 1;
    @(posedge clk); @(negedge clk); rs_blk_we = 0;
    bk_loc = rs_loc; #1;
    check(bk_tag == rs_tag && bk_data[31:0] == 32'hCAFE_F00D && is_dirty(rs_loc),
          "restored block readable and dirty");
    bk_req = 0;
    $display("misses=%0d stalls=%0d drains=%0d replacements=%0d llc r/w=%0d/%0d",
             n_miss, n_stall, n_drain, n_rep, llc_reads, llc_writes);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
