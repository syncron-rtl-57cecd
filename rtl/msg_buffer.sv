// msg_buffer: the SPU's message queue.
//
// Messages that reach a Synchronization Engine wait here until the control
// logic takes them, one at a time, in arrival order. It is a circular FIFO of
// DEPTH 140-bit messages; the default of 16 is the paper's 280-byte buffer
// divided by the 140-bit message size. Written as a register array, it maps to
// a small SRAM.
//
// Interface: valid/ready on both sides. push is accepted when push_valid and
// push_ready are high at a clock edge; the head is removed when pop_valid and
// pop_ready are high. A message pushed into an empty queue is visible at the
// head one cycle later. Full and empty are both legal; a push into a full
// queue is refused (push_ready low), never dropped. Reset empties the queue.
module msg_buffer
  import syncron_pkg::*;
#(
  parameter int unsigned DEPTH = 16
) (
  input  logic clk,
  input  logic rst_n,
  input  logic push_valid,
  output logic push_ready,
  input  msg_t push_msg,
  output logic pop_valid,
  input  logic pop_ready,
  output msg_t pop_msg,
  output logic [$clog2(DEPTH+1)-1:0] count
);
  localparam int unsigned PW = (DEPTH > 1) ? $clog2(DEPTH) : 1;

  msg_t            mem [DEPTH];
  logic [PW-1:0]   wp, rp;
  logic [$clog2(DEPTH+1)-1:0] cnt;

  wire do_push = push_valid && push_ready;
  wire do_pop  = pop_valid && pop_ready;

  assign push_ready = (cnt != DEPTH[$clog2(DEPTH+1)-1:0]);
  assign pop_valid  = (cnt != '0);
  assign pop_msg    = mem[rp];
  assign count      = cnt;

  function automatic logic [PW-1:0] inc(input logic [PW-1:0] p);
    return (p == PW'(DEPTH - 1)) ? '0 : p + 1'b1;
  endfunction

  always_ff @(posedge clk) begin
    if (do_push) mem[wp] <= push_msg;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wp <= '0; rp <= '0; cnt <= '0;
    end else begin
      if (do_push) wp <= inc(wp);
      if (do_pop)  rp <= inc(rp);
      case ({do_push, do_pop})
        2'b10:   cnt <= cnt + 1'b1;
        2'b01:   cnt <= cnt - 1'b1;
        default: ;
      endcase
    end
  end

`ifndef SYNTHESIS
  a_no_overflow: assert property (@(posedge clk) disable iff (!rst_n) 32'(cnt) <= DEPTH);
`endif
endmodule
