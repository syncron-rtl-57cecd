// tb_syncron_top: end-to-end test of the whole system at its default size
// (4 units x 16 cores, 64-entry STs, 20-cycle links).
//
// Every core runs a small program of synchronization instructions; phases
// are separated by the testbench. Behavioural memory models stand in for the
// memory arrays. The testbench keeps its own account of what the primitives
// promise and checks it:
//   P0  uncontended lock latency, local and remote variable
//   P1  all 64 cores contend for one lock: mutual exclusion, all entries done
//   P2  barrier across units with all 64 cores (aggregated per unit)
//   P3  barrier across units with 12 cores (one-level, forwarded arrivals)
//   P4  barrier within one unit
//   P5  counting semaphore, initial value 3: never more than 3 holders
//   P6  condition variable with its lock: signal and broadcast wake-ups
//   P7  ST overflow: 112 locks held at once overflow the Master SE and one
//       local SE; all cores then contend for a lock served through memory,
//       and a barrier is retried while the ST is full
// At the end every ST, indexing counter and in-memory variable must be idle,
// and each mechanism must have happened at least once.
//
// The system size (4 x 16 cores), link latency, table sizes and protocol
// follow the paper; the workloads of each phase are this testbench's own.
module tb_syncron_top;
  import syncron_pkg::*;

  localparam int NU = NUM_UNITS, NC = CORES_PER_UNIT;

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

  function automatic logic [63:0] va(input int home, input int off);
    return (64'(home) << UNIT_SEL_LSB) | 64'(off);
  endfunction

  // ------------------------------------------------------------ shared state
  int phase = -1;
  int done_cnt = 0;
  int in_cs = 0, cs_entries = 0;
  int arrived = 0, departed_bad = 0;
  int holders = 0, max_holders = 0, sem_waited = 0;
  int cv_waiting = 0, cv_woken = 0, cv_signals = 0, cv_broads = 0;
  int held_private = 0;
  int lat_local = 0, lat_remote = 0;
  int cyc = 0;
  int n_alloc = 0, n_mem = 0, n_redirect = 0, n_retry = 0, n_pass = 0, n_glob = 0;
  int n_hier_barrier = 0, n_onelevel_barrier = 0, n_within_barrier = 0;

  always @(posedge clk) begin
    cyc++;
    n_alloc    += $countones(ev_alloc);
    n_mem      += $countones(ev_mem);
    n_redirect += $countones(ev_redirect);
    n_retry    += $countones(ev_retry);
    n_pass     += $countones(ev_local_pass);
    n_glob     += $countones(ev_global_msg);
  end

  initial begin
    issue = '0; issue_sync = '0;
    for (int u = 0; u < NU; u++) for (int c = 0; c < NC; c++) begin
      issue_addr[u][c] = '0; issue_opcode[u][c] = LOCK_ACQUIRE_LOCAL; issue_info[u][c] = '0;
    end
  end

  // ------------------------------------------------------------ per core
  for (genvar u = 0; u < NU; u++) begin : g_u
    for (genvar c = 0; c < NC; c++) begin : g_c
      task automatic op(input bit s, input logic [63:0] a, input opcode_e o, input logic [63:0] inf);
        @(negedge clk);
        issue[u][c] = 1'b1; issue_sync[u][c] = s; issue_addr[u][c] = a;
        issue_opcode[u][c] = o; issue_info[u][c] = inf;
        @(negedge clk);
        issue[u][c] = 1'b0;
        while (!commit[u][c]) @(negedge clk);
      endtask
      task automatic pause(input int n);
        repeat (n) @(negedge clk);
      endtask
      task automatic finish_phase(input int p);
        done_cnt++;
        wait (phase != p);
      endtask

      initial begin
        int t0, ep_base;
        wait (phase == 0);
        // P0: latency of an uncontended lock
        if (u == 0 && c == 0) begin
          t0 = cyc;
          op(1, va(0, 'h40), LOCK_ACQUIRE_LOCAL, 0);
          lat_local = cyc - t0;
          op(0, va(0, 'h40), LOCK_RELEASE_LOCAL, 0);
          pause(20);
          t0 = cyc;
          op(1, va(1, 'h40), LOCK_ACQUIRE_LOCAL, 0);
          lat_remote = cyc - t0;
          op(0, va(1, 'h40), LOCK_RELEASE_LOCAL, 0);
        end
        finish_phase(0);
        // P1: one lock, all cores
        for (int i = 0; i < 4; i++) begin
          pause($urandom_range(0, 6));
          op(1, va(1, 'h100), LOCK_ACQUIRE_LOCAL, 0);
          if (in_cs != 0) begin failures++; $display("FAIL: two lock owners"); end
          in_cs++; cs_entries++;
          pause($urandom_range(0, 3));
          in_cs--;
          op(0, va(1, 'h100), LOCK_RELEASE_LOCAL, 0);
        end
        finish_phase(1);
        // P2: barrier across units, every core
        for (int e = 1; e <= 3; e++) begin
          pause($urandom_range(0, 40));
          arrived++;
          op(1, va(2, 'h200), BARRIER_WAIT_LOCAL_ACROSS, 64'(TOTAL_CORES));
          if (arrived < e * TOTAL_CORES) departed_bad++;
          if (u == 0 && c == 0) n_hier_barrier++;
        end
        finish_phase(2);
        // P3: barrier across units, 12 cores
        if (c < 3) begin
          for (int e = 1; e <= 2; e++) begin
            pause($urandom_range(0, 40));
            arrived++;
            op(1, va(3, 'h300), BARRIER_WAIT_LOCAL_ACROSS, 64'd12);
            if (arrived < 3 * TOTAL_CORES + e * 12) departed_bad++;
            if (u == 1 && c == 0) n_onelevel_barrier++;
          end
        end
        finish_phase(3);
        // P4: barrier within unit 3 (variable homed at unit 0)
        if (u == 3) begin
          for (int e = 1; e <= 2; e++) begin
            pause($urandom_range(0, 40));
            arrived++;
            op(1, va(0, 'h400), BARRIER_WAIT_LOCAL_WITHIN, 64'(NC));
            if (arrived < 3 * TOTAL_CORES + 24 + e * NC) departed_bad++;
            if (c == 0) n_within_barrier++;
          end
        end
        finish_phase(4);
        // P5: semaphore with 3 resources
        for (int i = 0; i < 2; i++) begin
          pause($urandom_range(0, 10));
          t0 = cyc;
          op(1, va(3, 'h500), SEM_WAIT_LOCAL, 64'd3);
          if (cyc - t0 > 120) sem_waited++;
          holders++;
          if (holders > max_holders) max_holders = holders;
          pause($urandom_range(20, 60));
          holders--;
          op(0, va(3, 'h500), SEM_POST_LOCAL, 0);
        end
        finish_phase(5);
        // P6: condition variable (cond homed at unit 1, lock at unit 0)
        if (c % 2 == 0) begin
          op(1, va(0, 'h600), LOCK_ACQUIRE_LOCAL, 0);
          if (in_cs != 0) begin failures++; $display("FAIL: two owners of the cond lock"); end
          cv_waiting++;
          op(1, va(1, 'h640), COND_WAIT_LOCAL, va(0, 'h600));
          if (in_cs != 0) begin failures++; $display("FAIL: woken without the lock"); end
          in_cs++;
          cv_woken++;
          pause(2);
          in_cs--;
          op(0, va(0, 'h600), LOCK_RELEASE_LOCAL, 0);
        end else if (u == 3 && c == 1) begin
          // a single signaler: the Master SE serves local lock waiters first,
          // so several signalers of one unit could keep the lock to themselves
          while (cv_woken < TOTAL_CORES / 2) begin
            pause($urandom_range(5, 30));
            op(1, va(0, 'h600), LOCK_ACQUIRE_LOCAL, 0);
            if (in_cs != 0) begin failures++; $display("FAIL: two owners of the cond lock"); end
            in_cs++;
            if (cv_woken + 8 < TOTAL_CORES / 2) begin
              cv_signals++;
              in_cs--;
              op(0, va(1, 'h640), COND_SIGNAL_LOCAL, 0);
            end else begin
              cv_broads++;
              in_cs--;
              op(0, va(1, 'h640), COND_BROAD_LOCAL, 0);
            end
            op(0, va(0, 'h600), LOCK_RELEASE_LOCAL, 0);
          end
        end
        finish_phase(6);
        // P7: overflow
        if (u == 1 || u == 2) begin
          for (int k = 0; k < (u == 1 ? 5 : 2); k++) begin
            op(1, va(0, 'h1000 + u * 'h1000 + (c * 8 + k) * 8), LOCK_ACQUIRE_LOCAL, 0);
            held_private++;
          end
        end
        wait (held_private == NC * 7);
        for (int i = 0; i < 2; i++) begin
          pause($urandom_range(0, 6));
          op(1, va(0, 'h700), LOCK_ACQUIRE_LOCAL, 0);
          if (in_cs != 0) begin failures++; $display("FAIL: two owners of overflowed lock"); end
          in_cs++; cs_entries++;
          pause($urandom_range(0, 3));
          in_cs--;
          op(0, va(0, 'h700), LOCK_RELEASE_LOCAL, 0);
        end
        if (u == 0) begin
          arrived++;
          op(1, va(0, 'h740), BARRIER_WAIT_LOCAL_WITHIN, 64'(NC));
          if (arrived < 3 * TOTAL_CORES + 24 + 2 * NC + NC) departed_bad++;
        end
        if (u == 1 || u == 2) begin
          pause(400);
          for (int k = 0; k < (u == 1 ? 5 : 2); k++)
            op(0, va(0, 'h1000 + u * 'h1000 + (c * 8 + k) * 8), LOCK_RELEASE_LOCAL, 0);
        end
        finish_phase(7);
      end
    end
  end

  // ------------------------------------------------------------ sequencer
  function automatic bit counters_idle();
    for (int i = 0; i < 256; i++) begin
      if (dut.g_unit[0].u_se.u_ic.cnt[i] != 0) return 0;
      if (dut.g_unit[1].u_se.u_ic.cnt[i] != 0) return 0;
      if (dut.g_unit[2].u_se.u_ic.cnt[i] != 0) return 0;
      if (dut.g_unit[3].u_se.u_ic.cnt[i] != 0) return 0;
    end
    return 1;
  endfunction

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    repeat (3) @(posedge clk);
    for (int p = 0; p <= 7; p++) begin
      done_cnt = 0;
      phase = p;
      wait (done_cnt == TOTAL_CORES);
      repeat (100) @(posedge clk);
      $display("phase %0d done at cycle %0d", p, cyc);
      case (p)
        0: begin
          check(lat_local > 0 && lat_local <= 12, $sformatf("local acquire latency %0d", lat_local));
          check(lat_remote >= 2 * 20 && lat_remote <= 2 * 20 + 30,
                $sformatf("remote acquire latency %0d", lat_remote));
        end
        1: check(cs_entries == 4 * TOTAL_CORES, "P1 every lock acquire completed");
        2: check(arrived == 3 * TOTAL_CORES, "P2 arrivals");
        3: check(arrived == 3 * TOTAL_CORES + 24, "P3 arrivals");
        4: check(arrived == 3 * TOTAL_CORES + 24 + 2 * NC, "P4 arrivals");
        5: begin
          check(max_holders == 3, $sformatf("P5 semaphore holders max %0d", max_holders));
          check(holders == 0, "P5 holders back to 0");
        end
        6: check(cv_woken == TOTAL_CORES / 2, "P6 all waiters woken");
        7: check(cs_entries == 4 * TOTAL_CORES + 2 * TOTAL_CORES, "P7 overflowed lock acquires");
        default: ;
      endcase
      for (int u = 0; u < NU; u++)
        check(st_occ[u] == 0, $sformatf("phase %0d ST %0d empty (%0d)", p, u, st_occ[u]));
    end
    check(departed_bad == 0, "no core left a barrier early");
    check(counters_idle(), "indexing counters back to zero");
    check(g_mem[0].u_mem.all_idle() && g_mem[1].u_mem.all_idle() &&
          g_mem[2].u_mem.all_idle() && g_mem[3].u_mem.all_idle(), "in-memory variables idle");
    // mechanisms
    $display("events: alloc=%0d mem=%0d redirect=%0d retry=%0d local_pass=%0d global=%0d",
             n_alloc, n_mem, n_redirect, n_retry, n_pass, n_glob);
    $display("barriers: hier=%0d onelevel=%0d within=%0d sem_waited=%0d signals=%0d broads=%0d",
             n_hier_barrier, n_onelevel_barrier, n_within_barrier, sem_waited, cv_signals, cv_broads);
    check(n_alloc > 0, "ST entries reserved");
    check(n_glob > 0, "global messages sent");
    check(n_pass > 0, "lock passed inside a unit");
    check(n_mem > 0, "Master SE served through memory");
    check(n_redirect > 0, "local SE redirected overflow messages");
    check(n_retry > 0, "message retried while ST full");
    check(n_hier_barrier > 0 && n_onelevel_barrier > 0 && n_within_barrier > 0, "all barrier kinds");
    check(cv_signals > 0 && cv_broads > 0, "cond signal and broadcast");
    check(sem_waited > 0, "a semaphore wait blocked");
    $display("cycles=%0d", cyc);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (60000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog, phase %0d done_cnt %0d", phase, done_cnt);
    $display("DBG held=%0d cs=%0d busy=%h woken=%0d waiting=%0d sig=%0d br=%0d in_cs=%0d", held_private, cs_entries, busy, cv_woken, cv_waiting, cv_signals, cv_broads, in_cs);
    $display("DBG se0 st=%0d buf=%0d lb=%0d", dut.g_unit[0].u_se.u_ctrl.st, dut.g_unit[0].u_se.buf_count, dut.g_unit[0].u_se.lb_count);
    $display("DBG se1 st=%0d buf=%0d lb=%0d", dut.g_unit[1].u_se.u_ctrl.st, dut.g_unit[1].u_se.buf_count, dut.g_unit[1].u_se.lb_count);
    $display("DBG se2 st=%0d buf=%0d lb=%0d", dut.g_unit[2].u_se.u_ctrl.st, dut.g_unit[2].u_se.buf_count, dut.g_unit[2].u_se.lb_count);
    $display("DBG se3 st=%0d buf=%0d lb=%0d", dut.g_unit[3].u_se.u_ctrl.st, dut.g_unit[3].u_se.buf_count, dut.g_unit[3].u_se.lb_count);
    $display("DBG se0 p_rsp=%b gmask=%b g2=%b retry=%b lbmask=%h gv=%b gr=%b lbv=%b lbr=%b op=%0d", dut.g_unit[0].u_se.u_ctrl.p_rsp_v, dut.g_unit[0].u_se.u_ctrl.p_g_mask, dut.g_unit[0].u_se.u_ctrl.p_g2_v, dut.g_unit[0].u_se.u_ctrl.p_retry, dut.g_unit[0].u_se.u_ctrl.p_lb_mask, dut.g_unit[0].u_se.glb_out_valid, dut.g_unit[0].u_se.glb_out_ready, dut.g_unit[0].u_se.lb_push_v, dut.g_unit[0].u_se.lb_push_r, dut.g_unit[0].u_se.u_ctrl.m.opcode);
    for (int i = 0; i < 64; i++) begin
      if (dut.g_unit[0].u_se.u_st.tbl[i].state) $display("DBG st0[%0d] a=%h g=%b l=%h i=%h", i, dut.g_unit[0].u_se.u_st.tbl[i].addr, dut.g_unit[0].u_se.u_st.tbl[i].gwl, dut.g_unit[0].u_se.u_st.tbl[i].lwl, dut.g_unit[0].u_se.u_st.tbl[i].info);
      if (dut.g_unit[1].u_se.u_st.tbl[i].state) $display("DBG st1[%0d] a=%h g=%b l=%h i=%h", i, dut.g_unit[1].u_se.u_st.tbl[i].addr, dut.g_unit[1].u_se.u_st.tbl[i].gwl, dut.g_unit[1].u_se.u_st.tbl[i].lwl, dut.g_unit[1].u_se.u_st.tbl[i].info);
      if (dut.g_unit[2].u_se.u_st.tbl[i].state) $display("DBG st2[%0d] a=%h g=%b l=%h i=%h", i, dut.g_unit[2].u_se.u_st.tbl[i].addr, dut.g_unit[2].u_se.u_st.tbl[i].gwl, dut.g_unit[2].u_se.u_st.tbl[i].lwl, dut.g_unit[2].u_se.u_st.tbl[i].info);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
