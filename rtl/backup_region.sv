// backup_region: STT-RAM backup region (BR) beside the last-level cache.
//
// Holds what the backup controller saves at a power failure: up to K L1
// blocks (K = M + N, the DBT plus WBQ capacity) and the register file, plus
// one "image valid" flag that tells the restore logic at power-up that the
// region holds a complete backup. The paper sizes the region at K blocks plus
// the register file and gives it the access latency of the STT-RAM cache;
// both follow the paper. The slot format is opaque here (SLOT_W bits chosen
// by the backup controller), and the flag is this design's choice.
//
// The region is non-volatile: its arrays have no reset and keep their value
// across the volatile-domain reset rst_n. Only nv_rst_n, the one-time
// initialisation of the non-volatile state, clears the flag.
//
// Interface: a request is accepted when req_valid && req_ready. It selects a
// block slot (req_reg = 0, index req_idx < K) or a register word
// (req_reg = 1, index < NREGS). A write completes RD/WR latency later with a
// one-cycle rsp_valid pulse; a read returns rsp_blk/rsp_word with that pulse.
// Write latency WR_CYC (10 cycles) and read latency RD_CYC (2 cycles) follow
// the paper's STT-RAM timing. set_image/clr_image update the flag at once.
module backup_region
  import nvm_pkg::*;
#(
  parameter int unsigned K      = DEF_M + DEF_N,
  parameter int unsigned NR     = NREGS,
  parameter int unsigned SLOT_W = BLK_W + 64,
  parameter int unsigned RD_CYC = STT_RD_CYC,
  parameter int unsigned WR_CYC = STT_WR_CYC,
  localparam int unsigned IDX_W = $clog2((K > NR) ? K : NR)
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              nv_rst_n,
  input  logic              req_valid,
  output logic              req_ready,
  input  logic              req_we,
  input  logic              req_reg,
  input  logic [IDX_W-1:0]  req_idx,
  input  logic [SLOT_W-1:0] req_blk,
  input  word_t             req_word,
  output logic              rsp_valid,
  output logic [SLOT_W-1:0] rsp_blk,
  output word_t             rsp_word,
  input  logic              set_image,
  input  logic              clr_image,
  output logic              image_valid
);

  logic [SLOT_W-1:0] slots [K];
  word_t             regs  [NR];

  logic              busy;
  logic [7:0]        cnt;
  logic              op_we, op_reg;
  logic [IDX_W-1:0]  op_idx;
  logic [SLOT_W-1:0] op_blk;
  word_t             op_word;

  assign req_ready = !busy;

  // Latency sequencer (volatile control state).
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy      <= 1'b0;
      cnt       <= '0;
      rsp_valid <= 1'b0;
      op_we     <= 1'b0;
      op_reg    <= 1'b0;
      op_idx    <= '0;
      op_blk    <= '0;
      op_word   <= '0;
    end else begin
      rsp_valid <= 1'b0;
      if (!busy && req_valid) begin
        busy    <= 1'b1;
        cnt     <= 8'((req_we ? WR_CYC : RD_CYC) - 2);
        op_we   <= req_we;
        op_reg  <= req_reg;
        op_idx  <= req_idx;
        op_blk  <= req_blk;
        op_word <= req_word;
      end else if (busy) begin
        if (cnt == 0) begin
          busy      <= 1'b0;
          rsp_valid <= 1'b1;
        end else begin
          cnt <= cnt - 1'b1;
        end
      end
    end
  end

  // Non-volatile arrays: written when the operation completes, never reset.
  always_ff @(posedge clk) begin
    if (busy && cnt == 0 && op_we) begin
      if (op_reg) regs[op_idx]  <= op_word;
      else        slots[op_idx] <= op_blk;
    end
  end

  // Read data is registered at completion of a read.
  always_ff @(posedge clk) begin
    if (busy && cnt == 0 && !op_we) begin
      rsp_blk  <= slots[op_idx];
      rsp_word <= regs[op_idx];
    end
  end

  always_ff @(posedge clk or negedge nv_rst_n) begin
    if (!nv_rst_n)      image_valid <= 1'b0;
    else if (set_image) image_valid <= 1'b1;
    else if (clr_image) image_valid <= 1'b0;
  end

  a_idx_range: assert property (@(posedge clk) disable iff (!rst_n)
    (req_valid && req_ready) |-> (int'(req_idx) < (req_reg ? NR : K)));

endmodule
