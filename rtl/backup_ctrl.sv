// backup_ctrl: backup and restore controller for power failures.
//
// At a power failure the processor is stalled and this controller copies
// the volatile state that matters into the STT-RAM backup region (BR):
// first the register file, then the L1 blocks named by the dirty block table
// and the write-back queue, read "one entry after another". Because the L1
// never holds more than K = M + N dirty blocks, the amount of data, and so
// the energy the capacitor must supply, is bounded. When power returns, the
// BR contents are moved back: the register file, the L1 blocks (valid and
// dirty) and their DBT and WBQ entries, so that the bound still holds and
// execution resumes where it stopped. All of this follows the paper.
//
// Choices of this design: every one of the K slots is written, valid or not,
// so that a backup always takes the same number of cycles (the paper states
// a fixed backup time); BR slot i < M mirrors DBT entry i and slot M + j
// mirrors WBQ position j counted from the head, so the WBQ order is kept; a
// flag in the BR marks a complete image and is cleared after the restore;
// power_fail is a level that stays high until the volatile reset rst_n.
//
// Interface: power_fail comes from the supply monitor (outside this design).
// bk_req stalls the L1 (and through it the CPU) and bk_ack says it is quiet.
// rf_* reads and writes the CPU register file, which is outside this design.
// br_* is the BR request port (one outstanding request). shutdown rises
// when the backup is complete; running is high while the CPU may execute.
//
// The restore outputs rs_loc, rs_tag, rs_data and rs_dbt_wc are the fields
// of the slot just read from the BR, wired straight through, so a synthesis
// tool sees most of this module's outputs as plain wires.
//
// Timing: a backup takes about NR*(WR+1) + K*(WR+1) cycles after bk_ack
// (WR = STT-RAM write latency, 10 cycles); a restore about
// (NR + K)*(RD + 1) cycles.
module backup_ctrl
  import nvm_pkg::*;
#(
  parameter int unsigned M    = DEF_M,
  parameter int unsigned N    = DEF_N,
  parameter int unsigned WC_W = DEF_WC_W,
  parameter int unsigned NR   = NREGS,
  localparam int unsigned K     = M + N,
  localparam int unsigned MI_W  = (M > 1) ? $clog2(M) : 1,
  localparam int unsigned NP_W  = (N > 1) ? $clog2(N) : 1,
  localparam int unsigned BRI_W = $clog2((K > NR) ? K : NR),
  localparam int unsigned SLOT_W = 1 + $bits(loc_t) + L1_TAG_W + WC_W + BLK_W
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              power_fail,
  output logic              shutdown,
  output logic              running,
  // L1 backup / restore port
  output logic              bk_req,
  input  logic              bk_ack,
  output logic [MI_W-1:0]   bk_dbt_idx,
  input  logic              bk_dbt_v,
  input  loc_t              bk_dbt_loc,
  input  logic [WC_W-1:0]   bk_dbt_wc,
  output logic [NP_W-1:0]   bk_wbq_pos,
  input  logic              bk_wbq_v,
  input  loc_t              bk_wbq_loc,
  output loc_t              bk_loc,
  input  l1_tag_t           bk_tag,
  input  blk_t              bk_data,
  output logic              rs_blk_we,
  output loc_t              rs_loc,
  output l1_tag_t           rs_tag,
  output blk_t              rs_data,
  output logic              rs_dbt_we,
  output logic [MI_W-1:0]   rs_dbt_idx,
  output logic [WC_W-1:0]   rs_dbt_wc,
  output logic              rs_wbq_push,
  // CPU register file
  output logic [$clog2(NR)-1:0] rf_rd_idx,
  input  word_t             rf_rd_data,
  output logic              rf_wr_en,
  output logic [$clog2(NR)-1:0] rf_wr_idx,
  output word_t             rf_wr_data,
  // backup region
  output logic              br_req_valid,
  input  logic              br_req_ready,
  output logic              br_req_we,
  output logic              br_req_reg,
  output logic [BRI_W-1:0]  br_req_idx,
  output logic [SLOT_W-1:0] br_req_blk,
  output word_t             br_req_word,
  input  logic              br_rsp_valid,
  input  logic [SLOT_W-1:0] br_rsp_blk,
  input  word_t             br_rsp_word,
  output logic              br_set_image,
  output logic              br_clr_image,
  input  logic              br_image_valid
);

  typedef struct packed {
    logic            v;
    loc_t            loc;
    l1_tag_t         tag;
    logic [WC_W-1:0] wc;
    blk_t            data;
  } slot_t;

  typedef enum logic [3:0] {
    C_BOOT, C_RUN, C_BK_ACK, C_BK_REG, C_BK_REG_W, C_BK_SLOT, C_BK_SLOT_W, C_DOWN,
    C_RS_ACK, C_RS_REG, C_RS_REG_W, C_RS_SLOT, C_RS_SLOT_W
  } cstate_t;

  cstate_t           st;
  logic [BRI_W:0]    idx;   // register or slot number

  logic in_wbq;
  assign in_wbq = (idx >= (BRI_W+1)'(M));

  // Slot being backed up: DBT entry idx or WBQ position idx - M.
  slot_t cur;
  always_comb begin
    bk_dbt_idx = MI_W'(idx);
    bk_wbq_pos = NP_W'(idx - (BRI_W+1)'(M));
    cur      = '0;
    if (in_wbq) begin
      cur.v   = bk_wbq_v;
      cur.loc = bk_wbq_loc;
    end else begin
      cur.v   = bk_dbt_v;
      cur.loc = bk_dbt_loc;
      cur.wc  = bk_dbt_wc;
    end
    bk_loc   = cur.loc;
    cur.tag  = bk_tag;
    cur.data = bk_data;
    if (!cur.v) begin
      cur.tag  = '0;
      cur.data = '0;
    end
  end

  assign bk_req   = (st != C_RUN);
  assign running  = (st == C_RUN);
  assign shutdown = (st == C_DOWN);

  assign rf_rd_idx  = ($clog2(NR))'(idx);
  assign rf_wr_idx  = ($clog2(NR))'(idx);
  assign rf_wr_data = br_rsp_word;
  assign rf_wr_en   = (st == C_RS_REG_W) && br_rsp_valid;

  assign br_req_valid = st inside {C_BK_REG, C_BK_SLOT, C_RS_REG, C_RS_SLOT};
  assign br_req_we    = st inside {C_BK_REG, C_BK_SLOT};
  assign br_req_reg   = st inside {C_BK_REG, C_RS_REG};
  assign br_req_idx   = BRI_W'(idx);
  assign br_req_blk   = cur;
  assign br_req_word  = rf_rd_data;
  assign br_set_image = (st == C_BK_SLOT_W) && br_rsp_valid && (idx == (BRI_W+1)'(K - 1));
  assign br_clr_image = (st == C_RS_SLOT_W) && br_rsp_valid && (idx == (BRI_W+1)'(K - 1));

  // Restore of one slot as its read completes.
  slot_t rsl;
  assign rsl = br_rsp_blk;
  logic rs_now;
  assign rs_now      = (st == C_RS_SLOT_W) && br_rsp_valid && rsl.v;
  assign rs_blk_we   = rs_now;
  assign rs_loc      = rsl.loc;
  assign rs_tag      = rsl.tag;
  assign rs_data     = rsl.data;
  assign rs_dbt_we   = rs_now && !in_wbq;
  assign rs_dbt_idx  = MI_W'(idx);
  assign rs_dbt_wc   = rsl.wc;
  assign rs_wbq_push = rs_now && in_wbq;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st  <= C_BOOT;
      idx <= '0;
    end else begin
      unique case (st)
        C_BOOT:   st <= br_image_valid ? C_RS_ACK : C_RUN;
        C_RUN:    if (power_fail) st <= C_BK_ACK;
        C_BK_ACK: if (bk_ack) begin idx <= '0; st <= C_BK_REG; end
        C_BK_REG: if (br_req_ready) st <= C_BK_REG_W;
        C_BK_REG_W: if (br_rsp_valid) begin
          if (idx == (BRI_W+1)'(NR - 1)) begin idx <= '0; st <= C_BK_SLOT; end
          else begin idx <= idx + 1'b1; st <= C_BK_REG; end
        end
        C_BK_SLOT: if (br_req_ready) st <= C_BK_SLOT_W;
        C_BK_SLOT_W: if (br_rsp_valid) begin
          if (idx == (BRI_W+1)'(K - 1)) st <= C_DOWN;
          else begin idx <= idx + 1'b1; st <= C_BK_SLOT; end
        end
        C_DOWN: ;  // wait for the supply to collapse (rst_n)
        C_RS_ACK: if (bk_ack) begin idx <= '0; st <= C_RS_REG; end
        C_RS_REG: if (br_req_ready) st <= C_RS_REG_W;
        C_RS_REG_W: if (br_rsp_valid) begin
          if (idx == (BRI_W+1)'(NR - 1)) begin idx <= '0; st <= C_RS_SLOT; end
          else begin idx <= idx + 1'b1; st <= C_RS_REG; end
        end
        C_RS_SLOT: if (br_req_ready) st <= C_RS_SLOT_W;
        C_RS_SLOT_W: if (br_rsp_valid) begin
          if (idx == (BRI_W+1)'(K - 1)) st <= C_RUN;
          else begin idx <= idx + 1'b1; st <= C_RS_SLOT; end
        end
        default: st <= C_BOOT;
      endcase
    end
  end

endmodule
