// Self-checking testbench for sync_engine (input buffer, loopback queue,
// SPU control, Synchronization Table, indexing counters) as SE 0 of a
// four-unit system. The testbench plays the 16 local cores, the other
// units' SEs and the memory (sync_mem_model). Scenarios and checks:
//  1. a lock homed here: grant, queueing of a second core, hand-over on
//     release, the ST entry freed afterwards; the service time of a
//     message must stay within the SE's budget of 12 cycles from the cycle
//     it is taken from the network to the response;
//  2. a lock homed at unit 1: one global acquire for many local waiters,
//     the grant from the Master SE, a local hand-over without a global
//     message, one global release at the end;
//  3. a within-unit barrier of 4 cores: nobody leaves before the last
//     arrival, all 4 leave together;
//  4. a remote lock request from unit 2 served by this Master SE;
//  5. ST overflow: with all 64 entries held by local lock owners, another
//     lock homed here is served through memory.
//
// The 12-cycle message budget, the 64-entry table and the hierarchical
// lock protocol are the paper's; message encodings and the exact cycle
// counts are this design's.
module tb_sync_engine;
  import syncron_pkg::*;
  localparam int NC = CORES_PER_UNIT;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic loc_valid, loc_ready, rsp_valid, rsp_ready, glb_in_valid, glb_in_ready;
  logic glb_out_valid, glb_out_ready;
  msg_t loc_msg, glb_in_msg;
  rsp_t rsp;
  gflit_t glb_out_flit;
  logic mem_req_valid, mem_req_ready, mem_req_we, mem_rsp_valid;
  logic [ADDR_W-1:0] mem_req_addr;
  syncronvar_t mem_req_wdata, mem_rsp_rdata;
  logic [$clog2(64+1)-1:0] st_occupancy;
  logic ev_alloc, ev_mem, ev_redirect, ev_retry, ev_local_pass;

  sync_engine #(.MY_ID(2'd0)) dut (.*);

  sync_mem_model #(.LAT(8)) u_mem (
    .clk, .req_valid(mem_req_valid), .req_ready(mem_req_ready), .req_we(mem_req_we),
    .req_addr(mem_req_addr), .req_wdata(mem_req_wdata),
    .rsp_valid(mem_rsp_valid), .rsp_rdata(mem_rsp_rdata));

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  int cyc = 0;
  always @(posedge clk) cyc++;

  // responses and outgoing global messages, collected at the clock edge
  logic [NC-1:0] got_rsp = '0;
  int            rsp_cyc = 0;
  gflit_t        gq [$];
  int n_mem = 0, n_pass = 0, n_alloc = 0;
  always @(posedge clk) if (rst_n) begin
    if (rsp_valid && rsp_ready) begin got_rsp |= rsp.mask; rsp_cyc = cyc; end
    if (glb_out_valid && glb_out_ready) gq.push_back(glb_out_flit);
    n_mem += ev_mem; n_pass += ev_local_pass; n_alloc += ev_alloc;
  end

  function automatic msg_t mk(input logic [63:0] a, input opcode_e o, input int g, input int l,
                              input logic [63:0] inf);
    msg_t m;
    m.addr = a; m.opcode = o; m.core_id = {2'(g), 4'(l)}; m.info = inf;
    return m;
  endfunction

  // send one message from a local core; returns the cycle it was accepted
  task automatic send_loc(input msg_t m, output int t);
    @(negedge clk);
    loc_valid = 1'b1; loc_msg = m;
    do @(posedge clk); while (!loc_ready);
    t = cyc;
    #1 loc_valid = 1'b0;
  endtask
  task automatic send_glb(input msg_t m);
    @(negedge clk);
    glb_in_valid = 1'b1; glb_in_msg = m;
    do @(posedge clk); while (!glb_in_ready);
    #1 glb_in_valid = 1'b0;
  endtask
  task automatic idle(input int n);
    repeat (n) @(posedge clk);
  endtask

  localparam logic [63:0] L_HOME = 64'h40, L_REM = (64'd1 << UNIT_SEL_LSB) | 64'h80;
  localparam logic [63:0] B_HOME = 64'hC0, L_R2 = 64'h100, L_OVF = 64'h5000;

  initial begin
    int t;
    loc_valid = 0; glb_in_valid = 0; loc_msg = '0; glb_in_msg = '0;
    rsp_ready = 1; glb_out_ready = 1;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    idle(2);

    // ---- 1. local lock homed at this SE
    got_rsp = '0;
    send_loc(mk(L_HOME, LOCK_ACQUIRE_LOCAL, 0, 3, 0), t);
    idle(20);
    check(got_rsp == 16'h0008, "lock granted to core 3");
    check(rsp_cyc - t <= 12, $sformatf("SE service time %0d cycles within 12", rsp_cyc - t));
    $display("service time of a lock acquire: %0d cycles", rsp_cyc - t);
    check(st_occupancy == 1, "one ST entry for the held lock");
    got_rsp = '0;
    send_loc(mk(L_HOME, LOCK_ACQUIRE_LOCAL, 0, 5, 0), t);
    idle(30);
    check(got_rsp == '0, "second acquirer waits");
    send_loc(mk(L_HOME, LOCK_RELEASE_LOCAL, 0, 3, 0), t);
    idle(20);
    check(got_rsp == 16'h0020, "release hands the lock to core 5");
    got_rsp = '0;
    send_loc(mk(L_HOME, LOCK_RELEASE_LOCAL, 0, 5, 0), t);
    idle(20);
    check(got_rsp == '0, "no response to the last release");
    check(st_occupancy == 0, "ST entry freed");
    check(gq.size() == 0, "a local lock sends no global message");

    // ---- 2. lock homed at unit 1
    gq.delete(); got_rsp = '0;
    send_loc(mk(L_REM, LOCK_ACQUIRE_LOCAL, 0, 2, 0), t);
    send_loc(mk(L_REM, LOCK_ACQUIRE_LOCAL, 0, 7, 0), t);
    idle(30);
    check(gq.size() == 1, "one global acquire for two local waiters");
    if (gq.size() > 0) begin
      check(gq[0].dst == 2'd1 && gq[0].msg.opcode == LOCK_ACQUIRE_GLOBAL && gq[0].msg.addr == L_REM,
            "global acquire sent to the Master SE of unit 1");
      check(gq[0].msg.core_id[5:4] == 2'd0, "global message carries this SE's ID");
    end
    check(got_rsp == '0, "no grant before the Master SE answers");
    gq.delete();
    send_glb(mk(L_REM, LOCK_GRANT_GLOBAL, 1, 0, 0));
    idle(20);
    check(got_rsp == 16'h0004, "grant from the Master SE reaches core 2");
    got_rsp = '0;
    send_loc(mk(L_REM, LOCK_RELEASE_LOCAL, 0, 2, 0), t);
    idle(20);
    check(got_rsp == 16'h0080, "lock passed locally to core 7");
    check(gq.size() == 0, "local hand-over needs no global message");
    check(n_pass >= 1, "local hand-over event");
    send_loc(mk(L_REM, LOCK_RELEASE_LOCAL, 0, 7, 0), t);
    idle(20);
    check(gq.size() == 1 && gq[0].msg.opcode == LOCK_RELEASE_GLOBAL && gq[0].dst == 2'd1,
          "one global release when no local waiter is left");
    check(st_occupancy == 0, "ST entry freed after remote lock");

    // ---- 3. within-unit barrier of 4 cores
    gq.delete(); got_rsp = '0;
    for (int k = 0; k < 3; k++) begin
      send_loc(mk(B_HOME, BARRIER_WAIT_LOCAL_WITHIN, 0, 4 + k, 64'd4), t);
      idle(15);
      check(got_rsp == '0, "nobody leaves the barrier early");
    end
    send_loc(mk(B_HOME, BARRIER_WAIT_LOCAL_WITHIN, 0, 11, 64'd4), t);
    idle(20);
    check(got_rsp == 16'h0870, "all four cores leave together");
    check(st_occupancy == 0 && gq.size() == 0, "barrier entry freed, no global message");

    // ---- 4. remote SE asks this Master SE for a lock
    gq.delete(); got_rsp = '0;
    send_glb(mk(L_R2, LOCK_ACQUIRE_GLOBAL, 2, 0, 0));
    idle(20);
    check(gq.size() == 1 && gq[0].dst == 2'd2 && gq[0].msg.opcode == LOCK_GRANT_GLOBAL,
          "Master SE grants the lock to SE 2");
    gq.delete();
    send_loc(mk(L_R2, LOCK_ACQUIRE_LOCAL, 0, 1, 0), t);
    idle(20);
    check(got_rsp == '0, "local core waits while SE 2 holds the lock");
    send_glb(mk(L_R2, LOCK_RELEASE_GLOBAL, 2, 0, 0));
    idle(20);
    check(got_rsp == 16'h0002, "release from SE 2 hands the lock to core 1");
    send_loc(mk(L_R2, LOCK_RELEASE_LOCAL, 0, 1, 0), t);
    idle(20);
    check(st_occupancy == 0 && gq.size() == 0, "idle after remote lock");

    // ---- 5. overflow: fill the ST with 64 held locks, then one more
    got_rsp = '0;
    for (int k = 0; k < 64; k++) begin
      send_loc(mk(64'h2000 + 64'(k) * 8, LOCK_ACQUIRE_LOCAL, 0, k % NC, 0), t);
      idle(14);
    end
    check(st_occupancy == 64, "ST full");
    n_mem = 0; got_rsp = '0;
    send_loc(mk(L_OVF, LOCK_ACQUIRE_LOCAL, 0, 9, 0), t);
    idle(60);
    check(got_rsp == 16'h0200, "lock granted from memory while the ST is full");
    check(n_mem >= 1, "served through memory");
    got_rsp = '0;
    send_loc(mk(L_OVF, LOCK_ACQUIRE_LOCAL, 0, 10, 0), t);
    idle(60);
    check(got_rsp == '0, "second acquirer of the overflowed lock waits");
    send_loc(mk(L_OVF, LOCK_RELEASE_LOCAL, 0, 9, 0), t);
    idle(60);
    check(got_rsp == 16'h0400, "overflowed lock handed to core 10");
    send_loc(mk(L_OVF, LOCK_RELEASE_LOCAL, 0, 10, 0), t);
    idle(60);
    check(dut.u_ic.cnt[L_OVF[7:0]] == 0, "indexing counter back to zero");
    for (int k = 0; k < 64; k++) begin
      send_loc(mk(64'h2000 + 64'(k) * 8, LOCK_RELEASE_LOCAL, 0, k % NC, 0), t);
      idle(14);
    end
    idle(20);
    check(st_occupancy == 0, "ST empty at the end");
    check(n_alloc > 0, "entries were allocated");
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
