// blk_mem_model: behavioural model of a block-addressed memory (testbench
// only), used for the PCM main memory and, in the L1 testbench, for the LLC.
//
// One request at a time with a valid/ready handshake; a read returns the
// block, a write an acknowledge, with a one-cycle rsp_valid pulse exactly
// RD_CYC or WR_CYC cycles after acceptance (35 and 100 cycles for PCM by
// default). Unwritten blocks read as nvm_tb_pkg::init_blk(). The contents
// are kept across the design's resets, as in a non-volatile memory.
module blk_mem_model
  import nvm_pkg::*;
#(
  parameter int unsigned RD_CYC = PCM_RD_CYC,
  parameter int unsigned WR_CYC = PCM_WR_CYC
) (
  input  logic     clk,
  input  logic     req_valid,
  output logic     req_ready,
  input  blk_req_t req,
  output logic     rsp_valid,
  output blk_t     rsp_data,
  output int       n_reads,
  output int       n_writes
);
  blk_t mem [baddr_t];
  int   cnt = 0;
  bit   busy = 0;
  blk_req_t cur;

  initial begin
    rsp_valid = 0; rsp_data = '0; n_reads = 0; n_writes = 0;
  end
  assign req_ready = !busy;

  always @(posedge clk) begin
    rsp_valid <= 1'b0;
    if (!busy && req_valid) begin
      busy <= 1;
      cur  <= req;
      cnt  <= (req.we ? WR_CYC : RD_CYC) - 2;
    end else if (busy) begin
      if (cnt == 0) begin
        busy      <= 0;
        rsp_valid <= 1'b1;
        if (cur.we) begin
          mem[cur.addr] = cur.data;
          n_writes <= n_writes + 1;
        end else begin
          rsp_data <= mem.exists(cur.addr) ? mem[cur.addr] : nvm_tb_pkg::init_blk(cur.addr);
          n_reads  <= n_reads + 1;
        end
      end else cnt <= cnt - 1;
    end
  end
endmodule
