// backup_ctrl_tb: self-checking testbench of the backup/restore controller,
// connected to the real backup region and to a model of the L1 backup port
// (DBT entries, WBQ slots, L1 blocks) and of the CPU register file.
//
// Three power cycles are run with random contents (a random subset of the 12
// DBT and 4 WBQ entries valid). Each time the testbench raises power_fail,
// acknowledges the stall, waits for shutdown and checks that the backup took
// the fixed (32 + 16) * (10 + 1) + 1 cycles; it then wipes its volatile
// models, applies rst_n and checks that the restore rebuilds the register
// file, every tracked L1 block (tag and data), every DBT entry with its write
// counter at the same index, and the WBQ entries in their original order,
// before running rises. A last reset without a backup must boot straight to
// running.
module backup_ctrl_tb;
  import nvm_pkg::*;

  localparam int M = DEF_M, N = DEF_N, K = M + N, NR = NREGS, WC_W = DEF_WC_W;
  localparam int SW = 1 + $bits(loc_t) + L1_TAG_W + WC_W + BLK_W;

  logic clk = 0, rst_n = 0, nv_rst_n = 0, power_fail = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL @%0t: %s", $time, what); end
  endtask

  logic shutdown, running, bk_req, bk_ack, bk_dbt_v, bk_wbq_v;
  logic [3:0] bk_dbt_idx, rs_dbt_idx;
  logic [1:0] bk_wbq_pos;
  loc_t bk_dbt_loc, bk_wbq_loc, bk_loc, rs_loc;
  logic [WC_W-1:0] bk_dbt_wc, rs_dbt_wc;
  l1_tag_t bk_tag, rs_tag;
  blk_t bk_data, rs_data;
  logic rs_blk_we, rs_dbt_we, rs_wbq_push;
  logic [4:0] rf_rd_idx, rf_wr_idx;
  word_t rf_rd_data, rf_wr_data;
  logic rf_wr_en;
  logic br_req_valid, br_req_ready, br_req_we, br_req_reg, br_rsp_valid;
  logic [4:0] br_req_idx;
  logic [SW-1:0] br_req_blk, br_rsp_blk;
  word_t br_req_word, br_rsp_word;
  logic br_set_image, br_clr_image, br_image_valid;

  backup_ctrl u_dut (.clk, .rst_n, .power_fail, .shutdown, .running,
    .bk_req, .bk_ack, .bk_dbt_idx, .bk_dbt_v, .bk_dbt_loc, .bk_dbt_wc,
    .bk_wbq_pos, .bk_wbq_v, .bk_wbq_loc, .bk_loc, .bk_tag, .bk_data,
    .rs_blk_we, .rs_loc, .rs_tag, .rs_data, .rs_dbt_we, .rs_dbt_idx, .rs_dbt_wc, .rs_wbq_push,
    .rf_rd_idx, .rf_rd_data, .rf_wr_en, .rf_wr_idx, .rf_wr_data,
    .br_req_valid, .br_req_ready, .br_req_we, .br_req_reg, .br_req_idx, .br_req_blk,
    .br_req_word, .br_rsp_valid, .br_rsp_blk, .br_rsp_word, .br_set_image, .br_clr_image,
    .br_image_valid);

  backup_region #(.K(K), .NR(NR), .SLOT_W(SW)) u_br (.clk, .rst_n, .nv_rst_n,
    .req_valid(br_req_valid), .req_ready(br_req_ready), .req_we(br_req_we),
    .req_reg(br_req_reg), .req_idx(br_req_idx), .req_blk(br_req_blk), .req_word(br_req_word),
    .rsp_valid(br_rsp_valid), .rsp_blk(br_rsp_blk), .rsp_word(br_rsp_word),
    .set_image(br_set_image), .clr_image(br_clr_image), .image_valid(br_image_valid));

  // ---- volatile models ----
  word_t rf [NR];
  bit dv [M]; loc_t dl [M]; logic [WC_W-1:0] dw [M];
  bit qv [N]; loc_t ql [N];
  l1_tag_t l1_tag [loc_t];
  blk_t    l1_data [loc_t];
  loc_t    wbq_pushed [$];

  assign rf_rd_data = rf[rf_rd_idx];
  assign bk_dbt_v   = dv[bk_dbt_idx];
  assign bk_dbt_loc = dl[bk_dbt_idx];
  assign bk_dbt_wc  = dw[bk_dbt_idx];
  assign bk_wbq_v   = qv[bk_wbq_pos];
  assign bk_wbq_loc = ql[bk_wbq_pos];
  assign bk_tag     = l1_tag.exists(bk_loc) ? l1_tag[bk_loc] : '0;
  assign bk_data    = l1_data.exists(bk_loc) ? l1_data[bk_loc] : '0;

  logic ack_q = 0;
  always @(posedge clk) ack_q <= bk_req && $urandom_range(0, 3) == 0 ? 1'b1 : (bk_req ? ack_q : 1'b0);
  assign bk_ack = ack_q;

  always @(posedge clk) begin
    if (rf_wr_en) rf[rf_wr_idx] <= rf_wr_data;
    if (rs_blk_we) begin
      check(bk_ack, "restore write only while the L1 is stalled");
      l1_tag[rs_loc] = rs_tag; l1_data[rs_loc] = rs_data;
    end
    if (rs_dbt_we) begin dv[rs_dbt_idx] <= 1; dl[rs_dbt_idx] <= rs_loc; dw[rs_dbt_idx] <= rs_dbt_wc; end
    if (rs_wbq_push) wbq_pushed.push_back(rs_loc);
  end

  int cycle = 0;
  always @(posedge clk) cycle++;

  initial begin
    #50000000;
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic blk_t rnd_blk();
    blk_t b;
    for (int i = 0; i < BLK_W; i += 32) b[i +: 32] = $urandom;
    return b;
  endfunction

  initial begin
    word_t s_rf [NR];
    bit s_dv [M]; loc_t s_dl [M]; logic [WC_W-1:0] s_dw [M];
    loc_t s_q [$];
    l1_tag_t s_tag [loc_t];
    blk_t s_data [loc_t];
    int t0;
    bk_loc = '0;
    repeat (2) @(negedge clk);
    nv_rst_n = 1; rst_n = 1;
    wait (running);
    check(!br_image_valid, "first boot has no image");
    for (int pc = 0; pc < 3; pc++) begin
      // random volatile state: distinct locations for all entries
      l1_tag.delete(); l1_data.delete();
      for (int i = 0; i < K; i++) begin
        loc_t l = loc_t'(8'(i * 13 + pc));
        if (i < M) begin
          dv[i] = $urandom_range(0, 3) != 0; dl[i] = l; dw[i] = WC_W'($urandom);
        end else begin
          qv[i - M] = $urandom_range(0, 1); ql[i - M] = l;
        end
        l1_tag[l] = l1_tag_t'($urandom); l1_data[l] = rnd_blk();
      end
      for (int i = 0; i < NR; i++) rf[i] = $urandom;
      s_rf = rf; s_dv = dv; s_dl = dl; s_dw = dw; s_q.delete();
      for (int j = 0; j < N; j++) if (qv[j]) s_q.push_back(ql[j]);
      s_tag.delete(); s_data.delete();
      for (int i = 0; i < M; i++) if (dv[i]) begin s_tag[dl[i]] = l1_tag[dl[i]]; s_data[dl[i]] = l1_data[dl[i]]; end
      foreach (s_q[j]) begin s_tag[s_q[j]] = l1_tag[s_q[j]]; s_data[s_q[j]] = l1_data[s_q[j]]; end
      repeat ($urandom_range(1, 20)) @(negedge clk);
      power_fail = 1;
      wait (bk_ack);
      t0 = cycle;
      wait (shutdown);
      check(cycle - t0 == (NR + K) * (STT_WR_CYC + 1) + 1,
            $sformatf("backup took %0d cycles", cycle - t0));
      check(br_image_valid, "image marked complete");
      @(negedge clk);
      // power off: volatile state lost
      rst_n = 0;
      for (int i = 0; i < NR; i++) rf[i] = '0;
      for (int i = 0; i < M; i++) begin dv[i] = 0; dl[i] = '0; dw[i] = '0; end
      for (int j = 0; j < N; j++) qv[j] = 0;
      l1_tag.delete(); l1_data.delete(); wbq_pushed.delete();
      repeat (4) @(negedge clk);
      power_fail = 0; rst_n = 1;
      @(negedge clk);
      check(!running, "restore holds the CPU");
      wait (running);
      @(negedge clk);
      check(rf == s_rf, "register file restored");
      for (int i = 0; i < M; i++)
        check(dv[i] == s_dv[i] && (!s_dv[i] || (dl[i] == s_dl[i] && dw[i] == s_dw[i])),
              $sformatf("DBT entry %0d restored", i));
      check(wbq_pushed.size() == s_q.size(), "WBQ entry count restored");
      foreach (s_q[j]) check(j < wbq_pushed.size() && wbq_pushed[j] == s_q[j], "WBQ order restored");
      check(l1_tag.num() == s_tag.num(), "number of restored blocks");
      foreach (s_tag[l]) check(l1_tag.exists(l) && l1_tag[l] == s_tag[l] && l1_data[l] == s_data[l],
                               "L1 block restored");
      check(!br_image_valid, "image consumed");
    end
    // reset without a preceding backup boots directly
    rst_n = 0; repeat (3) @(negedge clk); rst_n = 1;
    repeat (3) @(negedge clk);
    check(running, "boot without image goes straight to running");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
