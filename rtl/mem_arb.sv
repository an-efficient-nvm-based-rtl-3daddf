// mem_arb: shares the main-memory port between the data LLC and the
// instruction LLC.
//
// Both caches issue whole-block requests with one request outstanding each;
// main memory answers every request (read data or write acknowledge) in
// order. The arbiter passes one request at a time: in the idle state it
// grants a requester (round robin between the two when both ask, the one
// not served last goes first), forwards its request to memory and, once
// memory has accepted it, waits for the response and returns it to that
// requester only. This simple one-at-a-time scheme is this design's choice;
// how the two caches share main memory is not described.
//
// Timing: the grant is combinational in the idle cycle, so a request that
// finds the arbiter idle reaches memory in the same cycle. The response is
// routed combinationally.
module mem_arb
  import nvm_pkg::*;
(
  input  logic     clk,
  input  logic     rst_n,
  // requester 0: data LLC
  input  logic     d_req_valid,
  output logic     d_req_ready,
  input  blk_req_t d_req,
  output logic     d_rsp_valid,
  // requester 1: instruction LLC
  input  logic     i_req_valid,
  output logic     i_req_ready,
  input  blk_req_t i_req,
  output logic     i_rsp_valid,
  // main memory
  output logic     mem_req_valid,
  input  logic     mem_req_ready,
  output blk_req_t mem_req,
  input  logic     mem_rsp_valid
);

  logic busy_q, owner_q, last_q;   // owner/last: 0 = data, 1 = instruction
  logic gnt;                       // requester granted in the idle cycle

  always_comb begin
    if (d_req_valid && i_req_valid) gnt = ~last_q;
    else                            gnt = i_req_valid;
  end

  assign mem_req_valid = !busy_q && (d_req_valid || i_req_valid);
  assign mem_req       = gnt ? i_req : d_req;
  assign d_req_ready   = !busy_q && !gnt && mem_req_ready;
  assign i_req_ready   = !busy_q &&  gnt && mem_req_ready;
  assign d_rsp_valid   = busy_q && !owner_q && mem_rsp_valid;
  assign i_rsp_valid   = busy_q &&  owner_q && mem_rsp_valid;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy_q  <= 1'b0;
      owner_q <= 1'b0;
      last_q  <= 1'b1;
    end else if (!busy_q) begin
      if (mem_req_valid && mem_req_ready) begin
        busy_q  <= 1'b1;
        owner_q <= gnt;
        last_q  <= gnt;
      end
    end else if (mem_rsp_valid) begin
      busy_q <= 1'b0;
    end
  end

  a_rsp_only_when_busy: assert property (@(posedge clk) disable iff (!rst_n)
    mem_rsp_valid |-> busy_q);

endmodule
