// local_net: the network inside one NDP unit between its cores and its SE.
//
// Requests: every core offers at most one message (valid/ready). A
// round-robin arbiter passes one of them per cycle to the SE (the paper's
// unit network has a 1-cycle arbiter); the winner is the first requesting
// core after the one that won last. Responses: the SE sends one response with
// a core mask; every core whose mask bit is set sees rsp_valid for one cycle
// (a req_sync waits only for that). Cores always accept responses.
//
// The paper models this network as a buffered crossbar with packet flow
// control and gives only its hop latency; the arbiter-plus-broadcast here is
// this design's simplest form of it. Requests pass combinationally from the
// cores to the SE input in the cycle they are granted.
module local_net
  import syncron_pkg::*;
(
  input  logic clk,
  input  logic rst_n,
  // cores -> SE
  input  logic [CORES_PER_UNIT-1:0] core_req_valid,
  output logic [CORES_PER_UNIT-1:0] core_req_ready,
  input  msg_t                      core_req_msg [CORES_PER_UNIT],
  output logic                      se_req_valid,
  input  logic                      se_req_ready,
  output msg_t                      se_req_msg,
  // SE -> cores
  input  logic                      se_rsp_valid,
  input  rsp_t                      se_rsp,
  output logic [CORES_PER_UNIT-1:0] core_rsp_valid
);
  logic [LID_W-1:0] last, win;
  logic             any;

  always_comb begin
    any = 1'b0;
    win = '0;
    for (int k = CORES_PER_UNIT; k >= 1; k--) begin
      int unsigned c;
      c = (32'(last) + 32'(k)) % CORES_PER_UNIT;
      if (core_req_valid[c]) begin any = 1'b1; win = LID_W'(c); end
    end
  end

  assign se_req_valid = any;
  assign se_req_msg   = core_req_msg[win];
  always_comb begin
    core_req_ready = '0;
    core_req_ready[win] = any && se_req_ready;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) last <= LID_W'(CORES_PER_UNIT - 1);
    else if (any && se_req_ready) last <= win;
  end

  assign core_rsp_valid  = se_rsp_valid ? se_rsp.mask : '0;
endmodule
