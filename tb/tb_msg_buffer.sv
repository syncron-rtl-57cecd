// Self-checking testbench for msg_buffer, the 16-entry SPU input buffer.
// Random pushes and pops are applied for 4000 cycles; a SystemVerilog queue
// serves as the reference FIFO. Each cycle the testbench checks that
// push_ready is high exactly when the buffer holds fewer than DEPTH messages,
// that pop_valid matches a non-empty reference, that the head message equals
// the oldest pushed one, and that count equals the reference size. Runs at
// the default depth of 16 (16 x 140-bit messages, 280 bytes).
//
// The depth of 16 messages comes from the paper's 280-byte buffer; the
// handshake is this design's choice.
module tb_msg_buffer;
  import syncron_pkg::*;
  localparam int DEPTH = 16;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic push_valid, push_ready, pop_valid, pop_ready;
  msg_t push_msg, pop_msg;
  logic [$clog2(DEPTH+1)-1:0] count;

  msg_buffer #(.DEPTH(DEPTH)) dut (.*);

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL: %s", what); end
  endtask

  msg_t ref_q [$];
  int   full_seen = 0, empty_seen = 0;

  function automatic msg_t rnd_msg();
    msg_t m;
    m.addr = {$urandom, $urandom}; m.opcode = opcode_e'($urandom_range(0, 37));
    m.core_id = 6'($urandom); m.info = {$urandom, $urandom};
    return m;
  endfunction

  initial begin
    push_valid = 0; pop_ready = 0; push_msg = '0;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    for (int cyc = 0; cyc < 4000; cyc++) begin
      // vary pressure: phases that mostly fill and phases that mostly drain
      int bias;
      bias = ((cyc / 300) % 2) ? 80 : 20;
      @(negedge clk);
      push_valid = ($urandom_range(0, 99) < bias);
      pop_ready  = ($urandom_range(0, 99) < 100 - bias);
      push_msg   = rnd_msg();
      #1;
      check(push_ready == (ref_q.size() < DEPTH), "push_ready vs occupancy");
      check(pop_valid == (ref_q.size() > 0), "pop_valid vs occupancy");
      check(32'(count) == ref_q.size(), "count");
      if (pop_valid && ref_q.size() > 0) check(pop_msg == ref_q[0], "head message order");
      if (ref_q.size() == DEPTH) full_seen++;
      if (ref_q.size() == 0) empty_seen++;
      @(posedge clk);
      if (pop_valid && pop_ready && ref_q.size() > 0) void'(ref_q.pop_front());
      if (push_valid && push_ready) ref_q.push_back(push_msg);
    end
    check(full_seen > 0, "buffer reached full");
    check(empty_seen > 0, "buffer reached empty");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
