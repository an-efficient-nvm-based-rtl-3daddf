// nvm_ic_top: energy-bounded memory hierarchy for an intermittently powered
// processor.
//
// Connects the SRAM L1 data cache (with its dirty block table and write-back
// queue), the STT-RAM last-level cache, the STT-RAM backup region and the
// backup/restore controller, as in the paper's architecture figure. The
// instruction side of the evaluated system (a 16 KB L1 I-cache and a 128 KB
// STT-RAM instruction LLC, a second llc instance) is added beside it; the
// two LLCs share the PCM port through a small arbiter, which is this
// design's choice. The CPU, its register file, the PCM main memory and the
// supply monitor are outside this design and appear as ports. The
// instruction LLC's hit and dirty-evict pulses are left unconnected: it is
// never written, and its misses are reported in ev.
//
// A backup starts only when the L1 data cache has acknowledged the stall
// and the instruction cache is quiet, so no memory transaction is in flight
// when the supply is cut.
//
// Reset and power: rst_n is the volatile-domain reset, asserted each time
// power returns; it clears the L1, the DBT, the WBQ and all controllers.
// nv_rst_n initialises the non-volatile state (LLC tags, backup-region flag)
// once, before first use; the LLC and BR keep their contents across rst_n.
// power_fail high makes the controller stall the CPU, save the register
// file and the at most K dirty L1 blocks into the BR, and raise shutdown.
// After the next rst_n the saved state is restored before running rises.
//
// Fetch port: if_req_valid/if_req_ready/if_req_addr and if_rsp_valid/
// if_rsp_data, one cycle for a hit.
// CPU port: a word request is accepted when cpu_req_valid && cpu_req_ready;
// its response (read data or write acknowledge) comes with cpu_rsp_valid,
// one cycle later for a read hit and two for a write hit. PCM port: block
// requests with a valid/ready handshake; mem_rsp_valid answers each request
// (read data or write acknowledge), in order.
module nvm_ic_top
  import nvm_pkg::*;
#(
  parameter int unsigned M    = DEF_M,
  parameter int unsigned N    = DEF_N,
  parameter int unsigned WC_W = DEF_WC_W,
  parameter int unsigned NR   = NREGS,
  localparam int unsigned K_W = $clog2(M + N + 1)
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic                  nv_rst_n,
  // supply monitor
  input  logic                  power_fail,
  output logic                  shutdown,
  output logic                  running,
  // CPU data port
  input  logic                  cpu_req_valid,
  output logic                  cpu_req_ready,
  input  cpu_req_t              cpu_req,
  output logic                  cpu_rsp_valid,
  output word_t                 cpu_rsp_rdata,
  // CPU instruction fetch port
  input  logic                  if_req_valid,
  output logic                  if_req_ready,
  input  logic [ADDR_W-1:0]     if_req_addr,
  output logic                  if_rsp_valid,
  output word_t                 if_rsp_data,
  // CPU register file
  output logic [$clog2(NR)-1:0] rf_rd_idx,
  input  word_t                 rf_rd_data,
  output logic                  rf_wr_en,
  output logic [$clog2(NR)-1:0] rf_wr_idx,
  output word_t                 rf_wr_data,
  // PCM main memory
  output logic                  mem_req_valid,
  input  logic                  mem_req_ready,
  output blk_req_t              mem_req,
  input  logic                  mem_rsp_valid,
  input  blk_t                  mem_rsp_data,
  // status
  output logic [K_W-1:0]        dirty_count,
  output events_t               ev
);

  localparam int unsigned K      = M + N;
  localparam int unsigned MI_W   = (M > 1) ? $clog2(M) : 1;
  localparam int unsigned NP_W   = (N > 1) ? $clog2(N) : 1;
  localparam int unsigned BRI_W  = $clog2((K > NR) ? K : NR);
  localparam int unsigned SLOT_W = 1 + $bits(loc_t) + L1_TAG_W + WC_W + BLK_W;

  // L1 <-> LLC
  logic     llc_req_valid, llc_req_ready, llc_rsp_valid;
  blk_req_t llc_req;
  blk_t     llc_rsp_data;

  // instruction side: L1I <-> instruction LLC, both LLCs <-> memory arbiter
  logic     l1i_req_valid, l1i_req_ready, l1i_rsp_valid, ic_quiet;
  blk_req_t l1i_req;
  blk_t     l1i_rsp_data;
  logic     dm_req_valid, dm_req_ready, dm_rsp_valid;
  logic     im_req_valid, im_req_ready, im_rsp_valid;
  blk_req_t dm_req, im_req;

  // L1 <-> backup controller; the controller starts a backup only when both
  // L1 caches are quiet
  logic             bk_req, bk_ack, bk_ack_d, bk_dbt_v, bk_wbq_v;
  logic [MI_W-1:0]  bk_dbt_idx, rs_dbt_idx;
  logic [NP_W-1:0]  bk_wbq_pos;
  loc_t             bk_dbt_loc, bk_wbq_loc, bk_loc, rs_loc;
  logic [WC_W-1:0]  bk_dbt_wc, rs_dbt_wc;
  l1_tag_t          bk_tag, rs_tag;
  blk_t             bk_data, rs_data;
  logic             rs_blk_we, rs_dbt_we, rs_wbq_push;

  // backup controller <-> backup region
  logic              br_req_valid, br_req_ready, br_req_we, br_req_reg, br_rsp_valid;
  logic [BRI_W-1:0]  br_req_idx;
  logic [SLOT_W-1:0] br_req_blk, br_rsp_blk;
  word_t             br_req_word, br_rsp_word;
  logic              br_set_image, br_clr_image, br_image_valid;

  l1_dcache #(.M(M), .N(N), .WC_W(WC_W)) u_l1 (
    .clk, .rst_n,
    .cpu_req_valid, .cpu_req_ready, .cpu_req, .cpu_rsp_valid, .cpu_rsp_rdata,
    .llc_req_valid, .llc_req_ready, .llc_req, .llc_rsp_valid, .llc_rsp_data,
    .bk_req, .bk_ack(bk_ack_d), .bk_dbt_idx, .bk_dbt_v, .bk_dbt_loc, .bk_dbt_wc,
    .bk_wbq_pos, .bk_wbq_v, .bk_wbq_loc, .bk_loc, .bk_tag, .bk_data,
    .rs_blk_we, .rs_loc, .rs_tag, .rs_data, .rs_dbt_we, .rs_dbt_idx, .rs_dbt_wc,
    .rs_wbq_push,
    .dirty_count,
    .ev_dbt_insert(ev.dbt_insert), .ev_dbt_replace(ev.dbt_replace),
    .ev_wc_halve(ev.wc_halve), .ev_wbq_stall(ev.wbq_stall),
    .ev_drain_wait(ev.drain_wait),
    .ev_wbq_drain(ev.wbq_drain), .ev_wbq_hit(ev.wbq_hit),
    .ev_miss(ev.l1_miss), .ev_dirty_evict(ev.l1_dirty_evict)
  );

  llc u_llc (
    .clk, .rst_n, .nv_rst_n,
    .up_req_valid(llc_req_valid), .up_req_ready(llc_req_ready), .up_req(llc_req),
    .up_rsp_valid(llc_rsp_valid), .up_rsp_data(llc_rsp_data),
    .mem_req_valid(dm_req_valid), .mem_req_ready(dm_req_ready), .mem_req(dm_req),
    .mem_rsp_valid(dm_rsp_valid), .mem_rsp_data,
    .ev_hit(ev.llc_hit), .ev_miss(ev.llc_miss), .ev_dirty_evict(ev.llc_dirty_evict)
  );

  assign bk_ack = bk_ack_d && ic_quiet;

  l1_icache u_l1i (
    .clk, .rst_n,
    .ic_req_valid(if_req_valid), .ic_req_ready(if_req_ready), .ic_req_addr(if_req_addr),
    .ic_rsp_valid(if_rsp_valid), .ic_rsp_data(if_rsp_data),
    .llc_req_valid(l1i_req_valid), .llc_req_ready(l1i_req_ready), .llc_req(l1i_req),
    .llc_rsp_valid(l1i_rsp_valid), .llc_rsp_data(l1i_rsp_data),
    .hold(bk_req), .quiet(ic_quiet), .ev_miss(ev.l1i_miss)
  );

  // instruction LLC: same STT-RAM cache as the data LLC, only ever read
  logic llci_hit, llci_dirty_evict;
  llc u_llci (
    .clk, .rst_n, .nv_rst_n,
    .up_req_valid(l1i_req_valid), .up_req_ready(l1i_req_ready), .up_req(l1i_req),
    .up_rsp_valid(l1i_rsp_valid), .up_rsp_data(l1i_rsp_data),
    .mem_req_valid(im_req_valid), .mem_req_ready(im_req_ready), .mem_req(im_req),
    .mem_rsp_valid(im_rsp_valid), .mem_rsp_data,
    .ev_hit(llci_hit), .ev_miss(ev.llci_miss), .ev_dirty_evict(llci_dirty_evict)
  );

  mem_arb u_arb (
    .clk, .rst_n,
    .d_req_valid(dm_req_valid), .d_req_ready(dm_req_ready), .d_req(dm_req),
    .d_rsp_valid(dm_rsp_valid),
    .i_req_valid(im_req_valid), .i_req_ready(im_req_ready), .i_req(im_req),
    .i_rsp_valid(im_rsp_valid),
    .mem_req_valid, .mem_req_ready, .mem_req, .mem_rsp_valid
  );

  backup_ctrl #(.M(M), .N(N), .WC_W(WC_W), .NR(NR)) u_bkc (
    .clk, .rst_n, .power_fail, .shutdown, .running,
    .bk_req, .bk_ack, .bk_dbt_idx, .bk_dbt_v, .bk_dbt_loc, .bk_dbt_wc,
    .bk_wbq_pos, .bk_wbq_v, .bk_wbq_loc, .bk_loc, .bk_tag, .bk_data,
    .rs_blk_we, .rs_loc, .rs_tag, .rs_data, .rs_dbt_we, .rs_dbt_idx, .rs_dbt_wc,
    .rs_wbq_push,
    .rf_rd_idx, .rf_rd_data, .rf_wr_en, .rf_wr_idx, .rf_wr_data,
    .br_req_valid, .br_req_ready, .br_req_we, .br_req_reg, .br_req_idx,
    .br_req_blk, .br_req_word, .br_rsp_valid, .br_rsp_blk, .br_rsp_word,
    .br_set_image, .br_clr_image, .br_image_valid
  );

  backup_region #(.K(K), .NR(NR), .SLOT_W(SLOT_W)) u_br (
    .clk, .rst_n, .nv_rst_n,
    .req_valid(br_req_valid), .req_ready(br_req_ready), .req_we(br_req_we),
    .req_reg(br_req_reg), .req_idx(br_req_idx), .req_blk(br_req_blk),
    .req_word(br_req_word), .rsp_valid(br_rsp_valid), .rsp_blk(br_rsp_blk),
    .rsp_word(br_rsp_word), .set_image(br_set_image), .clr_image(br_clr_image),
    .image_valid(br_image_valid)
  );

endmodule
