// backup_region_tb: self-checking testbench of the STT-RAM backup region.
//
// Writes random data to every block slot and register word, pulses the
// volatile reset (a power cycle) and reads everything back. It checks the
// data, that a write completes exactly 10 cycles and a read exactly 2 cycles
// after acceptance, that the image flag survives rst_n, and that only
// nv_rst_n clears it.
module backup_region_tb;
  import nvm_pkg::*;

  localparam int K = DEF_M + DEF_N;
  localparam int NR = NREGS;
  localparam int SW = BLK_W + 64;
  localparam int IW = $clog2((K > NR) ? K : NR);

  logic clk = 0, rst_n = 0, nv_rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  logic req_valid, req_ready, req_we, req_reg, rsp_valid, set_image, clr_image, image_valid;
  logic [IW-1:0] req_idx;
  logic [SW-1:0] req_blk, rsp_blk;
  word_t req_word, rsp_word;

  backup_region u_dut (.clk, .rst_n, .nv_rst_n, .req_valid, .req_ready, .req_we, .req_reg,
    .req_idx, .req_blk, .req_word, .rsp_valid, .rsp_blk, .rsp_word, .set_image, .clr_image,
    .image_valid);

  logic [SW-1:0] ref_blk [K];
  word_t         ref_reg [NR];

  function automatic logic [SW-1:0] rnd_blk();
    logic [SW-1:0] b;
    for (int i = 0; i < SW; i += 32) b[i +: 32] = $urandom;
    return b;
  endfunction

  // one access; returns the number of cycles from acceptance to rsp_valid
  task automatic access(input bit we, input bit rg, input int idx,
                        input logic [SW-1:0] blk, input word_t w, output int lat);
    req_valid = 1; req_we = we; req_reg = rg; req_idx = IW'(idx); req_blk = blk; req_word = w;
    #1;
    while (!req_ready) begin @(negedge clk); #1; end
    @(negedge clk);
    req_valid = 0;
    lat = 1;
    while (!rsp_valid) begin @(negedge clk); lat++; end
  endtask

  initial begin
    #5000000;
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int lat;
    req_valid = 0; req_we = 0; req_reg = 0; req_idx = '0; req_blk = '0; req_word = '0;
    set_image = 0; clr_image = 0;
    repeat (2) @(posedge clk);
    rst_n = 1; nv_rst_n = 1;
    @(negedge clk);
    check(!image_valid, "flag clear after nv init");
    for (int i = 0; i < K; i++) begin
      ref_blk[i] = rnd_blk();
      access(1, 0, i, ref_blk[i], '0, lat);
      check(lat == STT_WR_CYC, $sformatf("slot write latency %0d", lat));
    end
    for (int i = 0; i < NR; i++) begin
      ref_reg[i] = $urandom;
      access(1, 1, i, '0, ref_reg[i], lat);
      check(lat == STT_WR_CYC, "register write latency");
    end
    set_image = 1; @(negedge clk); set_image = 0;
    check(image_valid, "flag set");
    // power cycle: only the volatile reset
    rst_n = 0; repeat (3) @(negedge clk); rst_n = 1; @(negedge clk);
    check(image_valid, "flag survives rst_n");
    for (int i = K - 1; i >= 0; i--) begin
      access(0, 0, i, '0, '0, lat);
      check(lat == STT_RD_CYC, $sformatf("slot read latency %0d", lat));
      check(rsp_blk == ref_blk[i], $sformatf("slot %0d data", i));
    end
    for (int i = 0; i < NR; i++) begin
      access(0, 1, i, '0, '0, lat);
      check(lat == STT_RD_CYC, "register read latency");
      check(rsp_word == ref_reg[i], $sformatf("reg %0d data", i));
    end
    clr_image = 1; @(negedge clk); clr_image = 0;
    check(!image_valid, "flag cleared");
    set_image = 1; @(negedge clk); set_image = 0;
    nv_rst_n = 0; @(negedge clk); nv_rst_n = 1;
    check(!image_valid, "nv_rst_n clears flag");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
