// Self-checking testbench for sync_req_if, a core's request port into the
// local network. Random synchronous requests (acquire or wait: the core
// stalls until its SE responds) and asynchronous ones (release, post,
// signal: done once the message is accepted) are issued while the network
// stalls at random. Checked: the message fields and the core ID, zeroed info
// for asynchronous requests, req_valid held until accepted, busy while the
// request is open, and a one-cycle commit pulse, given in the cycle after
// the accept (async) or after the response (sync).
//
// The blocking req_sync and non-blocking req_async behaviour follows the
// paper's ISA extension; the commit pulse and handshake are this design's.
module tb_sync_req_if;
  import syncron_pkg::*;
  localparam logic [CID_W-1:0] CID = 6'h2B;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic issue, issue_sync, busy, commit, req_valid, req_ready, rsp_valid;
  logic [ADDR_W-1:0] issue_addr;
  opcode_e issue_opcode;
  logic [INFO_W-1:0] issue_info;
  msg_t req_msg;

  sync_req_if #(.MY_CID(CID)) dut (.*);

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL: %s", what); end
  endtask

  initial begin
    issue = 0; issue_sync = 0; issue_addr = '0; issue_opcode = LOCK_ACQUIRE_GLOBAL;
    issue_info = '0; req_ready = 0; rsp_valid = 0;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    for (int n = 0; n < 300; n++) begin
      bit s; logic [63:0] a, inf; opcode_e o; int w;
      s = $urandom_range(0, 1); a = {$urandom, $urandom}; inf = {$urandom, $urandom};
      o = opcode_e'($urandom_range(0, 37));
      @(negedge clk);
      check(!busy && !req_valid, "idle before issue");
      issue = 1; issue_sync = s; issue_addr = a; issue_opcode = o; issue_info = inf;
      @(negedge clk);
      issue = 0; issue_info = '1;
      check(busy, "busy after issue");
      w = $urandom_range(0, 5);
      repeat (w) begin
        check(req_valid, "request held while not accepted");
        @(negedge clk);
      end
      check(req_valid, "request valid");
      check(req_msg.addr == a && req_msg.opcode == o && req_msg.core_id == CID, "message fields");
      check(req_msg.info == (s ? inf : '0), "info kept for sync, zero for async");
      req_ready = 1;
      @(negedge clk);
      req_ready = 0;
      check(!req_valid, "request dropped after accept");
      if (!s) begin
        check(commit && !busy, "async commits right after accept");
      end else begin
        check(!commit && busy, "sync waits for the response");
        repeat ($urandom_range(0, 8)) begin
          check(busy && !commit, "still waiting");
          @(negedge clk);
        end
        rsp_valid = 1;
        @(negedge clk);
        rsp_valid = 0;
        check(commit && !busy, "sync commits after response");
      end
      @(negedge clk);
      check(!commit, "commit is a single-cycle pulse");
    end
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
