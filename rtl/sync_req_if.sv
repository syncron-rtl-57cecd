// sync_req_if: the core-side unit that executes the two synchronization
// instructions of the ISA extension.
//
//   req_sync  addr, opcode, info : builds a message and commits only when a
//                                  response for this core comes back.
//   req_async addr, opcode       : builds a message and commits as soon as
//                                  the message has entered the network.
//
// The core starts an instruction with issue (issue_sync selects req_sync) and
// holds addr/opcode/info for that cycle; the unit latches them, stamps the
// core's ID (MY_CID = {unit global ID, local ID}) into the message and offers
// it to the local network. commit pulses for one cycle when the instruction
// completes: after the network accepts the message (req_async) or when
// rsp_valid arrives (req_sync). busy is high from issue until commit; an
// issue while busy is ignored. req_async leaves MessageInfo zero, as the
// instruction has no info operand. Both instructions act as fences: the core
// issues nothing else while busy. Reset returns the unit to idle.
//
// The two instructions and their blocking behaviour follow the paper; the
// three-state machine, the commit pulse and zeroing the info of
// asynchronous requests are this design's choices. The core_id field of
// req_msg is the constant MY_CID: it is how the SE knows the sender.
module sync_req_if
  import syncron_pkg::*;
#(
  parameter logic [CID_W-1:0] MY_CID = '0
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              issue,
  input  logic              issue_sync,
  input  logic [ADDR_W-1:0] issue_addr,
  input  opcode_e           issue_opcode,
  input  logic [INFO_W-1:0] issue_info,
  output logic              busy,
  output logic              commit,
  output logic              req_valid,
  input  logic              req_ready,
  output msg_t              req_msg,
  input  logic              rsp_valid
);
  typedef enum logic [1:0] {IDLE, SEND, WAIT} st_e;
  st_e  st;
  logic is_sync;

  assign busy      = (st != IDLE);
  assign req_valid = (st == SEND);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st      <= IDLE;
      is_sync <= 1'b0;
      req_msg <= '0;
      commit  <= 1'b0;
    end else begin
      commit <= 1'b0;
      case (st)
        IDLE: if (issue) begin
          is_sync         <= issue_sync;
          req_msg.addr    <= issue_addr;
          req_msg.opcode  <= issue_opcode;
          req_msg.core_id <= MY_CID;
          req_msg.info    <= issue_sync ? issue_info : '0;
          st              <= SEND;
        end
        SEND: if (req_ready) begin
          if (is_sync) st <= WAIT;
          else begin st <= IDLE; commit <= 1'b1; end
        end
        WAIT: if (rsp_valid) begin st <= IDLE; commit <= 1'b1; end
        default: st <= IDLE;
      endcase
    end
  end
endmodule
