// l1_icache_tb: self-checking test of the L1 instruction cache.
//
// A block memory with the STT-RAM read latency stands in for the instruction
// LLC; its contents are the fixed initial pattern init_word(), so every
// fetched word is known. A reference model of the tag array (same geometry,
// first-invalid-then-round-robin victim) predicts hit or miss for every
// fetch. Checked per fetch: the instruction word, hit/miss against the
// model, hit latency 1 cycle, miss latency 1 + 2 + LLC read latency cycles,
// and that the LLC sees exactly one read per miss. Also checked: hold keeps
// the port closed, quiet is high only when idle, and the volatile reset
// empties the cache.
module l1_icache_tb;
  import nvm_pkg::*;
  import nvm_tb_pkg::*;

  localparam int NFETCH = 40000;

  logic clk = 0;
  always #5 clk = ~clk;
  logic rst_n = 0;
  int checks = 0, failures = 0;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL @%0t: %s", $time, what);
    end
  endtask

  logic              ic_req_valid, ic_req_ready, ic_rsp_valid, hold, quiet, ev_miss;
  logic [ADDR_W-1:0] ic_req_addr;
  word_t             ic_rsp_data;
  logic              llc_req_valid, llc_req_ready, llc_rsp_valid;
  blk_req_t          llc_req;
  blk_t              llc_rsp_data;
  int                llc_reads, llc_writes;

  l1_icache dut (
    .clk, .rst_n, .ic_req_valid, .ic_req_ready, .ic_req_addr, .ic_rsp_valid,
    .ic_rsp_data, .llc_req_valid, .llc_req_ready, .llc_req, .llc_rsp_valid,
    .llc_rsp_data, .hold, .quiet, .ev_miss);

  blk_mem_model #(.RD_CYC(STT_RD_CYC), .WR_CYC(STT_WR_CYC)) u_llc (
    .clk, .req_valid(llc_req_valid), .req_ready(llc_req_ready), .req(llc_req),
    .rsp_valid(llc_rsp_valid), .rsp_data(llc_rsp_data),
    .n_reads(llc_reads), .n_writes(llc_writes));

  initial begin
    #20000000;
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ---- reference tag model ----
  bit      m_valid [L1_SETS][L1_WAYS];
  baddr_t  m_blk   [L1_SETS][L1_WAYS];
  int      m_rr    [L1_SETS];

  function automatic bit model_access(input logic [ADDR_W-1:0] a);
    baddr_t b = a[ADDR_W-1:OFF_W];
    int s = int'(b) % L1_SETS;
    int v = -1;
    for (int w = 0; w < L1_WAYS; w++)
      if (m_valid[s][w] && m_blk[s][w] == b) return 1'b1;
    for (int w = L1_WAYS - 1; w >= 0; w--) if (!m_valid[s][w]) v = w;
    if (v < 0) v = m_rr[s];
    m_valid[s][v] = 1'b1;
    m_blk[s][v]   = b;
    m_rr[s]       = (v + 1) % L1_WAYS;
    return 1'b0;
  endfunction

  task automatic model_clear();
    foreach (m_valid[s, w]) m_valid[s][w] = 1'b0;
    foreach (m_rr[s]) m_rr[s] = 0;
  endtask

  int n_hit = 0, n_miss = 0;

  task automatic fetch(input logic [ADDR_W-1:0] a);
    int lat, r0;
    bit exp_hit;
    ic_req_valid = 1; ic_req_addr = a;
    #1;
    while (!ic_req_ready) begin @(negedge clk); #1; end
    check(!quiet || ic_req_ready, "quiet while idle");
    exp_hit = model_access(a);
    r0 = llc_reads;
    @(negedge clk);
    ic_req_valid = 0;
    check(!quiet, "not quiet while a fetch is in progress");
    lat = 1;
    while (!ic_rsp_valid) begin @(negedge clk); lat++; end
    check(ic_rsp_data == init_word(a),
          $sformatf("fetch %h = %h, expected %h", a, ic_rsp_data, init_word(a)));
    if (exp_hit) begin
      n_hit++;
      check(lat == SRAM_RD_CYC, $sformatf("hit latency %0d at %h", lat, a));
      check(llc_reads == r0, "no LLC read on a hit");
    end else begin
      n_miss++;
      check(lat == 3 + STT_RD_CYC, $sformatf("miss latency %0d at %h", lat, a));
      check(llc_reads == r0 + 1, "one LLC read per miss");
    end
  endtask

  initial begin
    ic_req_valid = 0; ic_req_addr = '0; hold = 0;
    model_clear();
    repeat (3) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    // sequential code, then a loop that fits, then scattered fetches that
    // conflict in the sets
    for (int i = 0; i < 2048; i++) fetch(ADDR_W'(32'h40000 + i * 4));
    for (int rep = 0; rep < 3; rep++)
      for (int i = 0; i < 1024; i++) fetch(ADDR_W'(32'h40000 + i * 4));
    for (int i = 0; i < NFETCH; i++) begin
      int r;
      logic [ADDR_W-1:0] a;
      r = $urandom_range(0, 99);
      if (r < 60)      a = ADDR_W'(32'h80000 + $urandom_range(0, 12 * 1024 / 4 - 1) * 4);
      else if (r < 90) a = ADDR_W'(32'h80000 + $urandom_range(0, 40 * 1024 / 4 - 1) * 4);
      else             a = ADDR_W'($urandom_range(0, 32'h7ff_ffff / 4) * 4);
      fetch(a);
      // hold closes the port
      if (i % 1000 == 500) begin
        hold = 1;
        @(negedge clk); #1;
        check(!ic_req_ready, "hold closes the fetch port");
        check(quiet, "quiet while held and idle");
        repeat (3) @(negedge clk);
        hold = 0;
      end
    end
    // volatile reset empties the cache: the next fetch of a cached word misses
    fetch(ADDR_W'(32'h40000));
    rst_n = 0;
    @(negedge clk);
    rst_n = 1;
    model_clear();
    @(negedge clk);
    fetch(ADDR_W'(32'h40000));
    $display("hits=%0d misses=%0d llc reads=%0d", n_hit, n_miss, llc_reads);
    check(n_hit > 0 && n_miss > 0, "both hits and misses occurred");
    check(llc_writes == 0, "instruction cache never writes");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
