// Self-checking testbench for inter_unit_net, the links between the four
// units' SEs. Each source sends flits carrying {source, sequence number} in
// their info field to random destinations. The testbench checks that each
// flit arrives at its destination, unchanged, in order per source and
// destination pair, never sooner than LINK_LAT = 20 cycles, and exactly 20
// cycles after it was sent while the network carries a single flit at a time.
// Destinations stall at random in the second phase to exercise back-pressure.
//
// The 20-cycle link latency is the paper's number; the per-pair ordering
// and the round-robin merge are this design's choices.
module tb_inter_unit_net;
  import syncron_pkg::*;
  localparam int NU = NUM_UNITS, LAT = 20;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic [NU-1:0] in_valid, in_ready, out_valid, out_ready;
  gflit_t in_flit [NU];
  msg_t   out_msg [NU];

  inter_unit_net #(.LINK_LAT(LAT)) dut (.*);

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL: %s", what); end
  endtask

  typedef struct { msg_t m; int t; } sent_t;
  sent_t exp_q [NU][NU][$];      // [src][dst]
  int seq [NU];
  int cyc = 0, sent = 0, got = 0, exact_lat = 0;
  bit single = 1'b1, stall = 1'b0;
  always @(posedge clk) cyc++;

  // receivers
  always @(negedge clk) if (rst_n) begin
    #2;
    for (int d = 0; d < NU; d++)
      if (out_valid[d] && out_ready[d]) begin
        int s; sent_t e;
        s = int'(out_msg[d].info[63:32]);
        got++;
        if (s < 0 || s >= NU || exp_q[s][d].size() == 0) check(1'b0, "unexpected flit");
        else begin
          e = exp_q[s][d].pop_front();
          check(out_msg[d] == e.m, "flit unchanged and in order");
          check(cyc - e.t >= LAT, "no flit faster than the link latency");
          if (single) begin check(cyc - e.t == LAT, $sformatf("link latency is 20 cycles (got %0d)", cyc - e.t)); exact_lat++; end
        end
      end
  end

  initial begin
    in_valid = '0; out_ready = '1;
    foreach (in_flit[s]) in_flit[s] = '0;
    foreach (seq[s]) seq[s] = 0;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    // phase 1: one flit in the network at a time
    for (int i = 0; i < 20; i++) begin
      int s, d;
      s = $urandom_range(0, NU - 1); d = $urandom_range(0, NU - 1);
      @(negedge clk);
      in_valid[s] = 1'b1;
      in_flit[s].dst = 2'(d);
      in_flit[s].msg.addr = {$urandom, $urandom};
      in_flit[s].msg.opcode = opcode_e'($urandom_range(0, 37));
      in_flit[s].msg.core_id = 6'($urandom);
      in_flit[s].msg.info = {32'(s), 32'(seq[s]++)};
      #1;
      check(in_ready[s], "empty link accepts a flit");
      exp_q[s][d].push_back('{in_flit[s].msg, cyc});
      sent++;
      @(posedge clk);
      #1 in_valid[s] = 1'b0;
      repeat (LAT + 3) @(posedge clk);
    end
    single = 1'b0;
    // phase 2: all sources, random destinations, random receiver stalls
    for (int i = 0; i < 3000; i++) begin
      @(negedge clk);
      for (int s = 0; s < NU; s++) begin
        in_valid[s] = ($urandom_range(0, 1) == 1);
        in_flit[s].dst = 2'($urandom_range(0, NU - 1));
        in_flit[s].msg.addr = {$urandom, $urandom};
        in_flit[s].msg.opcode = opcode_e'($urandom_range(0, 37));
        in_flit[s].msg.core_id = 6'($urandom);
        in_flit[s].msg.info = {32'(s), 32'(seq[s])};
      end
      out_ready = 4'($urandom) | ((i / 500) % 2 ? 4'b0000 : 4'b1111);
      #1;
      for (int s = 0; s < NU; s++)
        if (in_valid[s] && in_ready[s]) begin
          exp_q[s][in_flit[s].dst].push_back('{in_flit[s].msg, cyc});
          seq[s]++; sent++;
        end
      @(posedge clk);
    end
    @(negedge clk) in_valid = '0; out_ready = '1;
    repeat (200) @(posedge clk);
    check(got == sent, "every flit delivered");
    check(exact_lat == 20, "latency measured on the idle network");
    $display("sent=%0d delivered=%0d", sent, got);
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
