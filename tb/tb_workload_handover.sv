// tb_workload_handover: a fine-grained locking workload on the full system,
// in the style of the linked-list and fine-grained binary-search-tree
// key-value benchmarks: 60 cores (15 per unit) each walk a chain of nodes
// with hand-over-hand locking, holding two node locks at once (lock the next
// node, then release the current one). Node locks are spread over all four
// home units, and the node pool is small enough that cores meet on the same
// nodes. Each walk starts at one of a few "root" nodes, so the roots are
// highly contended, while the deeper nodes are not.
// Checked: no node lock is ever held by two cores, every walk completes, and
// at the end every ST, indexing counter and syncronVar in memory is idle.
// The 60-core count and hand-over-hand pattern follow the paper's workload
// description; node counts, walk lengths and timing are this testbench's.
// Runs at the default parameters of syncron_top.
module tb_workload_handover;
  import syncron_pkg::*;

  localparam int NU = NUM_UNITS, NC = CORES_PER_UNIT, USED = 15;
  localparam int NODES = 96, WALKS = 6, DEPTH = 6;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic    [NU-1:0][NC-1:0] issue, issue_sync, busy, commit;
  logic    [ADDR_W-1:0]     issue_addr   [NU][NC];
  opcode_e                  issue_opcode [NU][NC];
  logic    [INFO_W-1:0]     issue_info   [NU][NC];
  logic [NU-1:0] mem_req_valid, mem_req_ready, mem_req_we, mem_rsp_valid;
  logic [ADDR_W-1:0] mem_req_addr [NU];
  syncronvar_t mem_req_wdata [NU], mem_rsp_rdata [NU];
  logic [$clog2(64+1)-1:0] st_occ [NU];
  logic [NU-1:0] ev_alloc, ev_mem, ev_redirect, ev_retry, ev_local_pass, ev_global_msg;

  syncron_top dut (
    .clk, .rst_n, .issue, .issue_sync, .issue_addr, .issue_opcode, .issue_info, .busy, .commit,
    .mem_req_valid, .mem_req_ready, .mem_req_we, .mem_req_addr, .mem_req_wdata,
    .mem_rsp_valid, .mem_rsp_rdata, .st_occupancy(st_occ),
    .ev_alloc, .ev_mem, .ev_redirect, .ev_retry, .ev_local_pass, .ev_global_msg);

  for (genvar u = 0; u < NU; u++) begin : g_mem
    sync_mem_model #(.LAT(8)) u_mem (
      .clk, .req_valid(mem_req_valid[u]), .req_ready(mem_req_ready[u]), .req_we(mem_req_we[u]),
      .req_addr(mem_req_addr[u]), .req_wdata(mem_req_wdata[u]),
      .rsp_valid(mem_rsp_valid[u]), .rsp_rdata(mem_rsp_rdata[u]));
  end

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  // node n lives at home unit n % 4
  function automatic logic [63:0] node_addr(input int n);
    return (64'(n % NU) << UNIT_SEL_LSB) | (64'h8000 + 64'(n) * 64'h40);
  endfunction

  // per unit: all indexing counters zero and every syncronVar in memory idle
  for (genvar u = 0; u < NU; u++) begin : g_idle
    function automatic bit idle();
      for (int i = 0; i < 256; i++) if (dut.g_unit[u].u_se.u_ic.cnt[i] != 0) return 1'b0;
      return g_mem[u].u_mem.all_idle();
    endfunction
  end

  int holder [NODES];
  int walks_done = 0, both_held = 0, cyc = 0;
  always @(posedge clk) cyc++;

  for (genvar u = 0; u < NU; u++) begin : g_u
    for (genvar c = 0; c < NC; c++) begin : g_c
      task automatic op(input bit s, input logic [63:0] a, input opcode_e o);
        @(negedge clk);
        issue[u][c] = 1'b1; issue_sync[u][c] = s; issue_addr[u][c] = a;
        issue_opcode[u][c] = o; issue_info[u][c] = '0;
        @(negedge clk);
        issue[u][c] = 1'b0;
        while (!commit[u][c]) @(negedge clk);
      endtask
      task automatic take(input int n);
        op(1, node_addr(n), LOCK_ACQUIRE_LOCAL);
        if (holder[n] != -1) begin
          failures++; $display("FAIL: node %0d held by %0d and %0d", n, holder[n], u * NC + c);
        end
        holder[n] = u * NC + c;
      endtask
      task automatic drop(input int n);
        holder[n] = -1;
        op(0, node_addr(n), LOCK_RELEASE_LOCAL);
      endtask

      initial begin
        wait (rst_n);
        if (c < USED) begin
          for (int w = 0; w < WALKS; w++) begin
            int cur, nxt;
            cur = $urandom_range(0, 3);              // one of four roots
            take(cur);
            for (int d = 0; d < DEPTH; d++) begin
              repeat ($urandom_range(1, 10)) @(negedge clk);
              // node numbers only grow along a walk (as keys do in a sorted
              // list), so two walks can never wait for each other in a cycle
              nxt = cur + $urandom_range(1, 14);
              take(nxt);                               // two locks held here
              both_held++;
              drop(cur);
              cur = nxt;
            end
            repeat ($urandom_range(1, 10)) @(negedge clk);
            drop(cur);
          end
          walks_done++;
        end
      end
    end
  end

  initial begin
    issue = '0; issue_sync = '0;
    foreach (issue_addr[u, c]) begin
      issue_addr[u][c] = '0; issue_opcode[u][c] = LOCK_ACQUIRE_GLOBAL; issue_info[u][c] = '0;
    end
    foreach (holder[n]) holder[n] = -1;
    repeat (5) @(posedge clk);
    rst_n = 1'b1;
    wait (walks_done == NU * USED);
    repeat (200) @(posedge clk);
    check(walks_done == NU * USED, "every core finished its walks");
    check(both_held == NU * USED * WALKS * DEPTH, "every step held two node locks");
    for (int u = 0; u < NU; u++) check(st_occ[u] == 0, $sformatf("ST of unit %0d empty", u));
    check(g_idle[0].idle() && g_idle[1].idle() && g_idle[2].idle() && g_idle[3].idle(),
          "indexing counters and memory idle");
    foreach (holder[n]) if (holder[n] != -1) check(1'b0, "a node lock left held");
    $display("walks=%0d steps=%0d cycles=%0d", walks_done * WALKS, both_held, cyc);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog (walks done %0d)", walks_done);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
