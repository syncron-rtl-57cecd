// Self-checking testbench for index_counters, the 256 overflow indexing
// counters. Random increments and decrements (saturating at 0 and at the
// top) update a reference array; random reads are checked to return the
// value the counter had when rd_en was sampled, exactly RD_LAT = 2 cycles
// later, with rd_valid high in that cycle only.
//
// The 2-cycle read and the 256 entries are the paper's numbers; the counter
// width and saturation are this design's choices and are checked as such.
module tb_index_counters;
  import syncron_pkg::*;
  localparam int E = 256, W = 8, LAT = 2;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic rd_en, rd_valid, upd_en, upd_inc;
  logic [$clog2(E)-1:0] rd_idx, upd_idx;
  logic [W-1:0] rd_cnt;

  index_counters #(.ENTRIES(E), .CNT_W(W), .RD_LAT(LAT)) dut (.*);

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL: %s", what); end
  endtask

  int ref_c [E];
  int exp_q [$];      // expected read data, one slot per cycle (-1 = no read)
  int sat_hi = 0, sat_lo = 0;

  initial begin
    rd_en = 0; upd_en = 0; upd_inc = 0; rd_idx = '0; upd_idx = '0;
    foreach (ref_c[i]) ref_c[i] = 0;
    repeat (LAT) exp_q.push_back(-1);
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    for (int cyc = 0; cyc < 6000; cyc++) begin
      int e;
      @(negedge clk);
      rd_en = $urandom_range(0, 1);
      rd_idx = 8'($urandom_range(0, 3));       // few indices -> deep counts
      upd_en = ($urandom_range(0, 9) < 9);
      upd_idx = 8'($urandom_range(0, 1));
      upd_inc = ((cyc / 1500) % 2 == 0) ? ($urandom_range(0, 9) < 8) : ($urandom_range(0, 9) < 2);
      #1;
      e = exp_q.pop_front();
      check(rd_valid == (e >= 0), "rd_valid timing");
      if (e >= 0) check(32'(rd_cnt) == e, "read value");
      exp_q.push_back(rd_en ? ref_c[rd_idx] : -1);
      @(posedge clk);
      if (upd_en) begin
        if (upd_inc) begin if (ref_c[upd_idx] < 2**W - 1) ref_c[upd_idx]++; else sat_hi++; end
        else         begin if (ref_c[upd_idx] > 0) ref_c[upd_idx]--; else sat_lo++; end
      end
    end
    check(sat_hi > 0 && sat_lo > 0, "both saturation limits reached");
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
