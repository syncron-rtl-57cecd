// Self-checking testbench for local_net, the network between the 16 cores of
// one unit and their SE. Each core holds a random message until it is
// accepted. The testbench checks, every cycle, that at most one core is
// accepted and only while the SE is ready, that the message passed to the SE
// is the accepted core's, that no valid request waits for more than 16
// accepted messages (round-robin bound), and that a response is multicast
// to exactly the cores named in its mask. The network adds no cycles.
//
// The single-cycle arbitration follows the paper's 1-cycle arbiter; the
// round-robin order and the multicast response are this design's choices.
module tb_local_net;
  import syncron_pkg::*;
  localparam int NC = CORES_PER_UNIT;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic [NC-1:0] core_req_valid, core_req_ready, core_rsp_valid;
  msg_t core_req_msg [NC];
  logic se_req_valid, se_req_ready, se_rsp_valid;
  msg_t se_req_msg;
  rsp_t se_rsp;

  local_net dut (.*);

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL: %s", what); end
  endtask

  int waited [NC];
  int max_wait = 0, accepted = 0;

  initial begin
    core_req_valid = '0; se_req_ready = 0; se_rsp_valid = 0; se_rsp = '0;
    foreach (core_req_msg[c]) core_req_msg[c] = '0;
    foreach (waited[c]) waited[c] = 0;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    for (int cyc = 0; cyc < 5000; cyc++) begin
      int n_acc, who;
      @(negedge clk);
      for (int c = 0; c < NC; c++)
        if (!core_req_valid[c] && $urandom_range(0, 3) != 0) begin
          core_req_valid[c] = 1'b1;
          core_req_msg[c].addr = {$urandom, $urandom};
          core_req_msg[c].opcode = opcode_e'($urandom_range(0, 37));
          core_req_msg[c].core_id = 6'(c);
          core_req_msg[c].info = {$urandom, $urandom};
        end
      se_req_ready = ($urandom_range(0, 3) != 0);
      se_rsp_valid = $urandom_range(0, 1);
      se_rsp.mask = 16'($urandom);
      se_rsp.opcode = opcode_e'($urandom_range(0, 37));
      se_rsp.addr = {$urandom, $urandom};
      #1;
      n_acc = 0; who = -1;
      for (int c = 0; c < NC; c++) if (core_req_ready[c]) begin n_acc++; who = c; end
      check(se_req_valid == (core_req_valid != '0), "SE sees a request when any core has one");
      check(n_acc == ((se_req_ready && core_req_valid != '0) ? 1 : 0), "exactly one core accepted");
      if (who >= 0) begin
        check(core_req_valid[who], "accepted core was requesting");
        check(se_req_msg == core_req_msg[who], "message of the accepted core");
      end
      check(core_rsp_valid == (se_rsp_valid ? se_rsp.mask : '0), "response multicast by mask");
      @(posedge clk);
      #1;
      if (who >= 0) begin
        accepted++;
        for (int c = 0; c < NC; c++) if (core_req_valid[c] && c != who) waited[c]++;
        waited[who] = 0;
        core_req_valid[who] = 1'b0;
      end
      foreach (waited[c]) if (waited[c] > max_wait) max_wait = waited[c];
    end
    check(max_wait <= NC - 1, "round-robin: no core passed over more than 15 times");
    check(accepted > 1000, "traffic flowed");
    $display("accepted=%0d max_wait=%0d", accepted, max_wait);
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
