// llc_tb: self-checking testbench of the STT-RAM last-level cache.
//
// Issues random whole-block reads and writes (the traffic the L1 sends) to a
// region larger than the cache, with a PCM model behind it, and compares
// every read with a reference block memory. It checks the STT-RAM timing of
// hits (read answered 2 cycles, write 10 cycles after acceptance), that
// misses and dirty evictions to PCM both occur, and that the cache contents
// survive the volatile reset rst_n (non-volatile array).
// A directed check fills one set with 17 distinct blocks and verifies that
// the least recently used one is the one that misses again.
module llc_tb;
  import nvm_pkg::*;
  import nvm_tb_pkg::*;

  logic clk = 0, rst_n = 0, nv_rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL @%0t: %s", $time, what); end
  endtask

  logic up_req_valid, up_req_ready, up_rsp_valid, mem_req_valid, mem_req_ready, mem_rsp_valid;
  blk_req_t up_req, mem_req;
  blk_t up_rsp_data, mem_rsp_data;
  logic ev_hit, ev_miss, ev_dirty_evict;
  int pcm_reads, pcm_writes;

  llc u_dut (.clk, .rst_n, .nv_rst_n, .up_req_valid, .up_req_ready, .up_req, .up_rsp_valid,
             .up_rsp_data, .mem_req_valid, .mem_req_ready, .mem_req, .mem_rsp_valid,
             .mem_rsp_data, .ev_hit, .ev_miss, .ev_dirty_evict);
  blk_mem_model u_pcm (.clk, .req_valid(mem_req_valid), .req_ready(mem_req_ready),
                       .req(mem_req), .rsp_valid(mem_rsp_valid), .rsp_data(mem_rsp_data),
                       .n_reads(pcm_reads), .n_writes(pcm_writes));

  blk_t ref_mem [baddr_t];
  int n_hit = 0, n_miss = 0, n_evict = 0;
  always @(posedge clk) if (rst_n) begin
    n_hit += ev_hit; n_miss += ev_miss; n_evict += ev_dirty_evict;
  end

  function automatic blk_t rnd_blk();
    blk_t b;
    for (int i = 0; i < BLK_W; i += 32) b[i +: 32] = $urandom;
    return b;
  endfunction

  task automatic access(input bit we, input baddr_t a, input blk_t d, output bit was_hit);
    int lat, h0;
    blk_t exp;
    up_req_valid = 1; up_req.we = we; up_req.addr = a; up_req.data = d;
    #1;
    while (!up_req_ready) begin @(negedge clk); #1; end
    exp = ref_mem.exists(a) ? ref_mem[a] : init_blk(a);
    if (we) ref_mem[a] = d;
    h0 = n_hit;
    @(negedge clk);
    up_req_valid = 0;
    lat = 1;
    while (!up_rsp_valid) begin @(negedge clk); lat++; end
    was_hit = (n_hit != h0);
    if (!we) check(up_rsp_data == exp, $sformatf("read %h", a));
    if (was_hit) check(lat == (we ? STT_WR_CYC : STT_RD_CYC),
                       $sformatf("%s hit latency %0d", we ? "write" : "read", lat));
  endtask

  initial begin
    #200000000;
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    bit h;
    up_req_valid = 0; up_req = '0;
    repeat (2) @(negedge clk);
    nv_rst_n = 1; rst_n = 1;
    @(negedge clk);
    // LRU: 16 blocks of set 5, touch block 0 again, then a 17th block
    for (int i = 0; i < LLC_WAYS; i++) access(0, baddr_t'(5 + i * LLC_SETS), '0, h);
    access(0, baddr_t'(5), '0, h);
    check(h, "re-read of block 0 hits");
    access(0, baddr_t'(5 + LLC_WAYS * LLC_SETS), '0, h);
    check(!h, "17th block misses");
    access(0, baddr_t'(5), '0, h);
    check(h, "recently used block 0 kept");
    access(0, baddr_t'(5 + 1 * LLC_SETS), '0, h);
    check(!h, "LRU block 1 was the victim");
    // random traffic over 512 KB with a hot 64 KB part
    for (int t = 0; t < 6000; t++) begin
      baddr_t a;
      if ($urandom_range(0, 99) < 70) a = baddr_t'($urandom_range(0, 1023));
      else a = baddr_t'($urandom_range(0, 8191));
      access($urandom_range(0, 1), a, rnd_blk(), h);
      if (t == 3000) begin
        // power cycle of the controller: the STT-RAM array keeps its data
        rst_n = 0; repeat (3) @(negedge clk); rst_n = 1; @(negedge clk);
      end
    end
    foreach (ref_mem[a]) access(0, a, '0, h);
    $display("hits=%0d misses=%0d dirty evictions=%0d pcm r/w=%0d/%0d",
             n_hit, n_miss, n_evict, pcm_reads, pcm_writes);
    check(n_miss > 0 && n_evict > 0 && n_hit > 0, "hits, misses and dirty evictions seen");
    check(pcm_writes == n_evict, "every dirty eviction is one PCM write");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
