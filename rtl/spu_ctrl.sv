// spu_ctrl: control logic of the Synchronization Processing Unit (SPU).
//
// It serves the messages of one SE, one at a time, following the paper's
// control flow: (1) decode the message, (2a) look the variable up in the ST and
// (2b) read its indexing counter; if an entry exists, or none exists but the
// counter is zero and the ST has room (a new entry is then reserved), it
// (3) processes the waiting lists, (4a) updates the ST and (5) encodes the
// return messages. Otherwise the variable is in overflow: the Master SE of the
// variable (the SE of the unit whose memory holds it) (2c) reads the syncronVar
// from its local memory, (3) processes it, (4b) writes it back and (5) answers;
// any other SE (2d) re-sends the core's message to the Master SE with an
// overflow opcode.
//
// Protocol (hierarchical message passing). Cores talk only to their own SE.
// A non-master SE keeps the local waiters of a variable in its entry and sends
// one aggregated global message to the Master SE on their behalf; the Master
// SE tracks which SEs wait in the entry's global waiting list.
//  * Locks: the Master SE serves its own local waiters first, then hands the
//    lock to a waiting SE (lock_grant_global). That SE grants the lock to its
//    local waiters in turn and sends one lock_release_global when none is left.
//    TableInfo holds the owner: held flag, SE-or-core flag, global ID, local ID.
//  * Barriers: TableInfo holds {initial count, current count}. A barrier
//    within a unit is completed by the SE that receives it. For a barrier
//    across units, a non-master SE sends one aggregated barrier_wait_global
//    once all its cores have arrived when every core of the system takes part,
//    and forwards each arrival otherwise (the paper's one-level case). The
//    Master SE counts arrivals and, when complete, departs its own cores and
//    sends barrier_depart_global to every waiting SE.
//  * Semaphores: the Master SE owns the count. Its TableInfo holds the number
//    of posts minus grants, so that the count is initial value + TableInfo
//    (sem_post carries no initial value, so a post that comes first still has
//    somewhere to go). A non-master SE keeps one request outstanding at the
//    Master SE while it has local waiters, and forwards posts.
//  * Condition variables: TableInfo holds the lock address. cond_wait records
//    the waiter and releases the associated lock for it; a signal wakes one
//    waiter (local first, then a waiting SE), a broadcast wakes all; a woken
//    core re-acquires the lock, and the lock grant completes its cond_wait.
//    The lock release and re-acquire are messages the SE sends to itself
//    through a loopback queue, served before new messages.
//  At a non-master SE the entry's global waiting list is unused; its own bit
//  marks "a global request is outstanding at the Master SE".
//
// Overflow (hardware-only fallback to memory) is implemented for locks, the
// primitive the paper evaluates it with: the Master SE keeps one 16-bit
// waiting list per SE in the syncronVar; a non-overflowed SE's request sets
// or clears all 16 bits of its list, an overflowed SE's core sets its own bit,
// and OverflowInfo records the overflowed SEs ([3:0]) and the lock state
// ([7]). VarInfo holds the owner. Indexing counters count outstanding
// acquires served through memory; the Master SE sends
// decrease_indexing_counter to an overflowed SE for each of its releases.
// A message of another primitive that finds no entry and no room is put back
// through the loopback queue and retried (this design's choice).
//
// Timing: a message that needs no memory access is served in 5 cycles plus one
// cycle per extra return message; the paper's SPU takes 12 cycles for its
// longest message. Ports: valid/ready for input, response, global output and
// loopback; the memory port is a simple request/response pair.
module spu_ctrl
  import syncron_pkg::*;
#(
  parameter logic [GID_W-1:0] MY_ID      = '0,
  parameter int unsigned      ST_ENTRIES = 64,
  parameter int unsigned      IDX_ENTRIES = 256,
  parameter int unsigned      CNT_W      = 8
) (
  input  logic clk,
  input  logic rst_n,
  // message input (from the buffer or the loopback queue)
  input  logic       in_valid,
  output logic       in_ready,
  input  msg_t       in_msg,
  // ST
  output logic                          st_lk_en,
  output logic [ADDR_W-1:0]             st_lk_addr,
  input  logic                          st_lk_hit,
  input  logic [$clog2(ST_ENTRIES)-1:0] st_lk_idx,
  input  st_entry_t                     st_lk_entry,
  input  logic                          st_lk_full,
  input  logic [$clog2(ST_ENTRIES)-1:0] st_lk_free_idx,
  output logic                          st_wr_en,
  output logic [$clog2(ST_ENTRIES)-1:0] st_wr_idx,
  output st_entry_t                     st_wr_data,
  // indexing counters
  output logic                           ic_rd_en,
  output logic [$clog2(IDX_ENTRIES)-1:0] ic_rd_idx,
  input  logic                           ic_rd_valid,
  input  logic [CNT_W-1:0]               ic_rd_cnt,
  output logic                           ic_upd_en,
  output logic [$clog2(IDX_ENTRIES)-1:0] ic_upd_idx,
  output logic                           ic_upd_inc,
  // local memory (syncronVar)
  output logic              mem_req_valid,
  input  logic              mem_req_ready,
  output logic              mem_req_we,
  output logic [ADDR_W-1:0] mem_req_addr,
  output syncronvar_t       mem_req_wdata,
  input  logic              mem_rsp_valid,
  input  syncronvar_t       mem_rsp_rdata,
  // responses to local cores
  output logic rsp_valid,
  input  logic rsp_ready,
  output rsp_t rsp,
  // messages to other SEs
  output logic   g_valid,
  input  logic   g_ready,
  output gflit_t g_flit,
  // loopback (messages to itself)
  output logic lb_valid,
  input  logic lb_ready,
  output msg_t lb_msg,
  // events, one-cycle pulses, for statistics
  output logic ev_alloc,      // new ST entry reserved
  output logic ev_mem,        // message served through memory (Master SE)
  output logic ev_redirect,   // message re-sent as overflow message (local SE)
  output logic ev_retry,      // message put back for retry
  output logic ev_local_pass  // lock passed on inside a unit without a global message
);
  localparam int unsigned SIW = $clog2(ST_ENTRIES);
  localparam int unsigned CIW = $clog2(IDX_ENTRIES);
  localparam logic [NUM_UNITS-1:0]      NONE_G = '0;
  localparam logic [CORES_PER_UNIT-1:0] ALL_L  = '1;

  typedef enum logic [3:0] {S_IDLE, S_LK1, S_LK2, S_MRD, S_MWAIT, S_PROC, S_MWR, S_OUT} state_e;
  typedef enum logic [1:0] {M_ST, M_MEM, M_NOST} mode_e;

  state_e st;
  mode_e  mode;
  msg_t   m;
  logic [SIW-1:0] idx;
  st_entry_t ent;
  syncronvar_t sv;

  // output plan
  logic          p_rsp_v;   rsp_t p_rsp;
  logic [NUM_UNITS-1:0] p_g_mask; msg_t p_g_msg;
  logic          p_g2_v;    gflit_t p_g2;
  logic          p_retry;
  logic [CORES_PER_UNIT-1:0] p_lb_mask; msg_t p_lb_msg;

  // ---------------------------------------------------------------- decode
  wire opcode_e          op      = m.opcode;
  wire logic [GID_W-1:0] src_g   = m.core_id[CID_W-1 -: GID_W];
  wire logic [LID_W-1:0] src_c   = m.core_id[LID_W-1:0];
  wire logic             master  = (home_unit(m.addr) == MY_ID);
  wire logic [GID_W-1:0] home    = home_unit(m.addr);
  wire logic [CIW-1:0]   cidx    = m.addr[CIW-1:0];

  function automatic logic [CID_W-1:0] cid(input logic [GID_W-1:0] g, input logic [LID_W-1:0] c);
    return {g, c};
  endfunction
  function automatic logic [GID_W-1:0] first_se(input logic [NUM_UNITS-1:0] v);
    logic [GID_W-1:0] r;
    r = '0;
    for (int i = NUM_UNITS - 1; i >= 0; i--) if (v[i]) r = GID_W'(i);
    return r;
  endfunction
  function automatic logic [CORES_PER_UNIT-1:0] lbit(input logic [LID_W-1:0] c);
    return CORES_PER_UNIT'(1) << c;
  endfunction
  function automatic logic [NUM_UNITS-1:0] gbit(input logic [GID_W-1:0] g);
    return NUM_UNITS'(1) << g;
  endfunction

  // Ops that a non-master SE forwards without touching its ST.
  wire logic fwd_only = !master && (op inside {SEM_POST_LOCAL, COND_SIGNAL_LOCAL, COND_BROAD_LOCAL});
  // Ops that need no ST entry when none exists.
  wire logic no_alloc = master && (op inside {COND_SIGNAL_LOCAL, COND_SIGNAL_GLOBAL,
                                              COND_BROAD_LOCAL, COND_BROAD_GLOBAL});

  // --------------------------------------------------- processing (comb)
  st_entry_t   n_ent;
  logic        n_st_we;
  syncronvar_t n_sv;
  logic        c_rsp_v;  rsp_t c_rsp;
  logic [NUM_UNITS-1:0] c_g_mask; msg_t c_g_msg;
  logic        c_g2_v;   gflit_t c_g2;
  logic        c_retry;
  logic [CORES_PER_UNIT-1:0] c_lb_mask; msg_t c_lb_msg;
  logic        c_ic_en, c_ic_inc;
  logic        c_pass;

  always_comb begin
    logic [CORES_PER_UNIT-1:0] lw;
    logic [NUM_UNITS-1:0]      gw;
    logic [63:0]               ti;
    logic [LID_W-1:0]          c;
    logic [GID_W-1:0]          g;
    logic [31:0]               cur, init;
    logic signed [32:0]        avail;
    logic                      locked, found;

    n_ent    = ent;
    n_st_we  = 1'b0;
    n_sv     = sv;
    c_rsp_v  = 1'b0;
    c_rsp    = '{mask: '0, opcode: op, addr: m.addr};
    c_g_mask = '0;
    c_g_msg  = '{addr: m.addr, opcode: op, core_id: cid(MY_ID, '0), info: '0};
    c_g2_v   = 1'b0;
    c_g2     = '{dst: home, msg: m};
    c_retry  = 1'b0;
    c_lb_mask = '0;
    c_lb_msg = '{addr: m.addr, opcode: LOCK_ACQUIRE_LOCAL, core_id: cid(MY_ID, '0), info: '0};
    c_ic_en  = 1'b0;
    c_ic_inc = 1'b0;
    c_pass   = 1'b0;
    lw = ent.lwl; gw = ent.gwl; ti = ent.info;
    c = '0; g = '0; cur = '0; init = '0; avail = '0; locked = 1'b0; found = 1'b0;

    unique case (mode)
    // ============================================================ no ST
    M_NOST: begin
      unique case (op)
        DECREASE_INDEXING_COUNTER: begin c_ic_en = 1'b1; c_ic_inc = 1'b0; end
        LOCK_GRANT_OVERFLOW: begin
          c_rsp_v = 1'b1; c_rsp.mask = lbit(src_c); c_rsp.opcode = LOCK_GRANT_LOCAL;
        end
        SEM_POST_LOCAL:    begin c_g_mask = gbit(home); c_g_msg.opcode = SEM_POST_GLOBAL; end
        COND_SIGNAL_LOCAL: if (!master) begin c_g_mask = gbit(home); c_g_msg.opcode = COND_SIGNAL_GLOBAL; end
        COND_BROAD_LOCAL:  if (!master) begin c_g_mask = gbit(home); c_g_msg.opcode = COND_BROAD_GLOBAL; end
        LOCK_ACQUIRE_LOCAL: begin   // overflowed non-master SE: redirect
          c_g2_v = 1'b1; c_g2.msg.opcode = LOCK_ACQUIRE_OVERFLOW;
          c_ic_en = 1'b1; c_ic_inc = 1'b1;
        end
        LOCK_RELEASE_LOCAL: begin
          c_g2_v = 1'b1; c_g2.msg.opcode = LOCK_RELEASE_OVERFLOW;
        end
        COND_SIGNAL_GLOBAL, COND_BROAD_GLOBAL: ;
        default: c_retry = 1'b1;    // no entry and no room: try again later
      endcase
    end
    // ======================================================= ST entry
    M_ST: begin
      n_st_we = 1'b1;
      unique case (op)
      // ------------------------------------------------------------ locks
      LOCK_ACQUIRE_LOCAL: begin
        if (master) begin
          if (!ti[OWN_HELD]) begin
            ti = '0; ti[OWN_HELD] = 1'b1; ti[LID_W-1:0] = src_c;
            ti[LID_W +: GID_W] = MY_ID;
            c_rsp_v = 1'b1; c_rsp.mask = lbit(src_c); c_rsp.opcode = LOCK_GRANT_LOCAL;
          end else lw = lw | lbit(src_c);
        end else begin
          lw = lw | lbit(src_c);
          if (!ti[OWN_HELD] && !gw[MY_ID]) begin
            gw[MY_ID] = 1'b1;
            c_g_mask = gbit(home); c_g_msg.opcode = LOCK_ACQUIRE_GLOBAL;
          end
        end
      end
      LOCK_ACQUIRE_GLOBAL: begin
        if (!ti[OWN_HELD]) begin
          ti = '0; ti[OWN_HELD] = 1'b1; ti[OWN_GLB] = 1'b1; ti[LID_W +: GID_W] = src_g;
          c_g_mask = gbit(src_g); c_g_msg.opcode = LOCK_GRANT_GLOBAL;
        end else gw = gw | gbit(src_g);
      end
      LOCK_GRANT_GLOBAL: begin   // non-master SE now holds the lock
        gw[MY_ID] = 1'b0;
        c = first_core(lw); lw = lw & ~lbit(c);
        ti = '0; ti[OWN_HELD] = 1'b1; ti[LID_W-1:0] = c; ti[LID_W +: GID_W] = MY_ID;
        c_rsp_v = 1'b1; c_rsp.mask = lbit(c); c_rsp.opcode = LOCK_GRANT_LOCAL;
      end
      LOCK_RELEASE_LOCAL, LOCK_RELEASE_GLOBAL: begin
        if (lw != '0) begin
          c = first_core(lw); lw = lw & ~lbit(c);
          ti = '0; ti[OWN_HELD] = 1'b1; ti[LID_W-1:0] = c; ti[LID_W +: GID_W] = MY_ID;
          c_rsp_v = 1'b1; c_rsp.mask = lbit(c); c_rsp.opcode = LOCK_GRANT_LOCAL;
          c_pass = 1'b1;
        end else if (master && gw != '0) begin
          g = first_se(gw); gw = gw & ~gbit(g);
          ti = '0; ti[OWN_HELD] = 1'b1; ti[OWN_GLB] = 1'b1; ti[LID_W +: GID_W] = g;
          c_g_mask = gbit(g); c_g_msg.opcode = LOCK_GRANT_GLOBAL;
        end else begin
          ti = '0;
          if (!master) begin c_g_mask = gbit(home); c_g_msg.opcode = LOCK_RELEASE_GLOBAL; end
        end
      end
      // ---------------------------------------------------------- barriers
      BARRIER_WAIT_LOCAL_WITHIN, BARRIER_WAIT_LOCAL_ACROSS, BARRIER_WAIT_GLOBAL: begin
        init = m.info[31:0];
        if (op == BARRIER_WAIT_GLOBAL) begin
          gw  = gw | gbit(src_g);
          cur = ti[31:0] + m.info[63:32];
        end else begin
          lw  = lw | lbit(src_c);
          cur = ti[31:0] + 32'd1;
        end
        ti = {init, cur};
        if (op == BARRIER_WAIT_LOCAL_ACROSS && !master) begin
          if (init != TOTAL_CORES) begin
            c_g_mask = gbit(home); c_g_msg.opcode = BARRIER_WAIT_GLOBAL;
            c_g_msg.info = {32'd1, init};
          end else if (cur == CORES_PER_UNIT) begin
            c_g_mask = gbit(home); c_g_msg.opcode = BARRIER_WAIT_GLOBAL;
            c_g_msg.info = {cur, init};
          end
        end else if (cur >= init) begin
          if (lw != '0) begin
            c_rsp_v = 1'b1; c_rsp.mask = lw; c_rsp.opcode = BARRIER_DEPART_LOCAL;
          end
          c_g_mask = gw; c_g_msg.opcode = BARRIER_DEPART_GLOBAL;
          lw = '0; gw = '0; ti = '0;
        end
      end
      BARRIER_DEPART_GLOBAL: begin
        c_rsp_v = 1'b1; c_rsp.mask = lw; c_rsp.opcode = BARRIER_DEPART_LOCAL;
        lw = '0; gw = '0; ti = '0;
      end
      // -------------------------------------------------------- semaphores
      SEM_WAIT_LOCAL, SEM_WAIT_GLOBAL: begin
        if (master) begin
          avail = $signed({1'b0, m.info[31:0]}) + $signed({ti[31], ti[31:0]});
          if (avail > 0) begin
            ti[31:0] = ti[31:0] - 32'd1;
            if (op == SEM_WAIT_LOCAL) begin
              c_rsp_v = 1'b1; c_rsp.mask = lbit(src_c); c_rsp.opcode = SEM_GRANT_LOCAL;
            end else begin
              c_g_mask = gbit(src_g); c_g_msg.opcode = SEM_GRANT_GLOBAL;
            end
          end else if (op == SEM_WAIT_LOCAL) lw = lw | lbit(src_c);
          else gw = gw | gbit(src_g);
          ti[63:32] = m.info[31:0];
        end else begin
          lw = lw | lbit(src_c);
          ti = {32'd0, m.info[31:0]};
          if (!gw[MY_ID]) begin
            gw[MY_ID] = 1'b1;
            c_g_mask = gbit(home); c_g_msg.opcode = SEM_WAIT_GLOBAL; c_g_msg.info = ti;
          end
        end
      end
      SEM_POST_LOCAL, SEM_POST_GLOBAL: begin   // Master SE only
        if (lw != '0) begin
          c = first_core(lw); lw = lw & ~lbit(c);
          c_rsp_v = 1'b1; c_rsp.mask = lbit(c); c_rsp.opcode = SEM_GRANT_LOCAL;
        end else if (gw != '0) begin
          g = first_se(gw); gw = gw & ~gbit(g);
          c_g_mask = gbit(g); c_g_msg.opcode = SEM_GRANT_GLOBAL;
        end else ti[31:0] = ti[31:0] + 32'd1;
      end
      SEM_GRANT_GLOBAL: begin  // non-master SE
        gw[MY_ID] = 1'b0;
        c = first_core(lw); lw = lw & ~lbit(c);
        c_rsp_v = 1'b1; c_rsp.mask = lbit(c); c_rsp.opcode = SEM_GRANT_LOCAL;
        if (lw != '0) begin
          gw[MY_ID] = 1'b1;
          c_g_mask = gbit(home); c_g_msg.opcode = SEM_WAIT_GLOBAL; c_g_msg.info = {32'd0, ti[31:0]};
        end
      end
      // ----------------------------------------------- condition variables
      COND_WAIT_LOCAL: begin
        lw = lw | lbit(src_c);
        ti = m.info;
        c_lb_mask = lbit(src_c);
        c_lb_msg  = '{addr: m.info, opcode: LOCK_RELEASE_LOCAL, core_id: cid(MY_ID, '0), info: '0};
        if (!master && !gw[MY_ID]) begin
          gw[MY_ID] = 1'b1;
          c_g_mask = gbit(home); c_g_msg.opcode = COND_WAIT_GLOBAL; c_g_msg.info = m.info;
        end
      end
      COND_WAIT_GLOBAL: begin
        gw = gw | gbit(src_g);
        ti = m.info;
      end
      COND_SIGNAL_LOCAL, COND_SIGNAL_GLOBAL: begin   // Master SE only
        if (lw != '0) begin
          c = first_core(lw); lw = lw & ~lbit(c);
          c_lb_mask = lbit(c);
          c_lb_msg  = '{addr: ti, opcode: LOCK_ACQUIRE_LOCAL, core_id: cid(MY_ID, '0), info: '0};
        end else if (gw != '0) begin
          g = first_se(gw); gw = gw & ~gbit(g);
          c_g_mask = gbit(g); c_g_msg.opcode = COND_GRANT_GLOBAL; c_g_msg.info = 64'd0;
        end
      end
      COND_BROAD_LOCAL, COND_BROAD_GLOBAL: begin     // Master SE only
        c_lb_mask = lw;
        c_lb_msg  = '{addr: ti, opcode: LOCK_ACQUIRE_LOCAL, core_id: cid(MY_ID, '0), info: '0};
        c_g_mask  = gw; c_g_msg.opcode = COND_GRANT_GLOBAL; c_g_msg.info = 64'd1;
        lw = '0; gw = '0;
      end
      COND_GRANT_GLOBAL: begin   // non-master SE
        gw[MY_ID] = 1'b0;
        c_lb_msg  = '{addr: ti, opcode: LOCK_ACQUIRE_LOCAL, core_id: cid(MY_ID, '0), info: '0};
        if (m.info[0]) begin
          c_lb_mask = lw; lw = '0;
        end else begin
          c = first_core(lw); lw = lw & ~lbit(c); c_lb_mask = lbit(c);
          if (lw != '0) begin
            gw[MY_ID] = 1'b1;
            c_g_mask = gbit(home); c_g_msg.opcode = COND_WAIT_GLOBAL; c_g_msg.info = ti;
          end
        end
      end
      default: n_st_we = 1'b0;
      endcase

      n_ent.lwl  = lw;
      n_ent.gwl  = gw;
      n_ent.info = ti;
      // free the entry once nothing is left to track
      if (op inside {LOCK_ACQUIRE_LOCAL, LOCK_ACQUIRE_GLOBAL, LOCK_GRANT_GLOBAL,
                     LOCK_RELEASE_LOCAL, LOCK_RELEASE_GLOBAL})
        n_ent.state = ti[OWN_HELD] || lw != '0 || gw != '0;
      else if (op inside {SEM_WAIT_LOCAL, SEM_WAIT_GLOBAL, SEM_POST_LOCAL, SEM_POST_GLOBAL})
        n_ent.state = lw != '0 || gw != '0 || (master && ti[31:0] != '0);
      else if (op inside {BARRIER_WAIT_LOCAL_WITHIN, BARRIER_WAIT_LOCAL_ACROSS,
                          BARRIER_WAIT_GLOBAL, BARRIER_DEPART_GLOBAL})
        n_ent.state = ti != '0 || lw != '0 || gw != '0;
      else
        n_ent.state = lw != '0 || gw != '0;
      if (!n_ent.state) n_ent = '0;
    end
    // ================================================ syncronVar in memory
    M_MEM: begin   // Master SE, locks only
      locked = sv.ovf_info[7];
      unique case (op)
        LOCK_ACQUIRE_LOCAL, LOCK_ACQUIRE_GLOBAL, LOCK_ACQUIRE_OVERFLOW: begin
          c_ic_en = 1'b1; c_ic_inc = 1'b1;
          if (op == LOCK_ACQUIRE_OVERFLOW) n_sv.ovf_info[3'(src_g)] = 1'b1;
          if (!locked) begin
            n_sv.ovf_info[7] = 1'b1;
            n_sv.var_info = '0; n_sv.var_info[OWN_HELD] = 1'b1;
            if (op == LOCK_ACQUIRE_LOCAL) begin
              n_sv.var_info[LID_W-1:0] = src_c; n_sv.var_info[LID_W +: GID_W] = MY_ID;
              c_rsp_v = 1'b1; c_rsp.mask = lbit(src_c); c_rsp.opcode = LOCK_GRANT_LOCAL;
            end else if (op == LOCK_ACQUIRE_GLOBAL) begin
              n_sv.var_info[OWN_GLB] = 1'b1; n_sv.var_info[LID_W +: GID_W] = src_g;
              c_g_mask = gbit(src_g); c_g_msg.opcode = LOCK_GRANT_GLOBAL;
            end else begin
              n_sv.var_info[OWN_OVF] = 1'b1;
              n_sv.var_info[LID_W-1:0] = src_c; n_sv.var_info[LID_W +: GID_W] = src_g;
              c_g_mask = gbit(src_g); c_g_msg.opcode = LOCK_GRANT_OVERFLOW;
              c_g_msg.core_id = m.core_id;
            end
          end else begin
            if (op == LOCK_ACQUIRE_GLOBAL) n_sv.wl[src_g] = ALL_L;
            else n_sv.wl[src_g] = n_sv.wl[src_g] | lbit(src_c);
          end
        end
        LOCK_RELEASE_LOCAL, LOCK_RELEASE_GLOBAL, LOCK_RELEASE_OVERFLOW: begin
          c_ic_en = 1'b1; c_ic_inc = 1'b0;
          if (op == LOCK_RELEASE_OVERFLOW) begin
            c_g2_v = 1'b1; c_g2.dst = src_g;
            c_g2.msg = '{addr: m.addr, opcode: DECREASE_INDEXING_COUNTER,
                         core_id: cid(MY_ID, '0), info: '0};
          end
          n_sv.var_info = '0;
          n_sv.ovf_info[7] = 1'b0;
          if (sv.wl[MY_ID] != '0) begin
            c = first_core(sv.wl[MY_ID]);
            n_sv.wl[MY_ID] = sv.wl[MY_ID] & ~lbit(c);
            n_sv.ovf_info[7] = 1'b1;
            n_sv.var_info[OWN_HELD] = 1'b1;
            n_sv.var_info[LID_W-1:0] = c; n_sv.var_info[LID_W +: GID_W] = MY_ID;
            c_rsp_v = 1'b1; c_rsp.mask = lbit(c); c_rsp.opcode = LOCK_GRANT_LOCAL;
          end else begin
            found = 1'b0;
            for (int i = 0; i < NUM_UNITS; i++) begin
              if (!found && GID_W'(i) != MY_ID && sv.wl[i] != '0) begin
                found = 1'b1; g = GID_W'(i);
              end
            end
            if (found) begin
              n_sv.ovf_info[7] = 1'b1;
              n_sv.var_info[OWN_HELD] = 1'b1;
              n_sv.var_info[LID_W +: GID_W] = g;
              if (sv.ovf_info[3'(g)]) begin
                c = first_core(sv.wl[g]);
                n_sv.wl[g] = sv.wl[g] & ~lbit(c);
                n_sv.var_info[OWN_OVF] = 1'b1; n_sv.var_info[LID_W-1:0] = c;
                c_g_mask = gbit(g); c_g_msg.opcode = LOCK_GRANT_OVERFLOW;
                c_g_msg.core_id = cid(g, c);
              end else begin
                n_sv.wl[g] = '0;
                n_sv.var_info[OWN_GLB] = 1'b1;
                c_g_mask = gbit(g); c_g_msg.opcode = LOCK_GRANT_GLOBAL;
              end
            end
          end
          // an overflowed SE with nothing left in memory is no longer overflowed
          for (int i = 0; i < NUM_UNITS; i++)
            if (n_sv.wl[i] == '0 && !(n_sv.var_info[OWN_OVF] && 32'(n_sv.var_info[LID_W +: GID_W]) == i))
              n_sv.ovf_info[i] = 1'b0;
        end
        default: ;
      endcase
    end
    default: ;
    endcase
  end

  // ------------------------------------------------------------- control
  wire logic out_done = !p_rsp_v && p_g_mask == '0 && !p_g2_v && !p_retry && p_lb_mask == '0;

  assign in_ready   = (st == S_IDLE);
  assign st_lk_en   = (st == S_LK1);
  assign st_lk_addr = m.addr;
  assign ic_rd_en   = (st == S_LK1);
  assign ic_rd_idx  = cidx;

  assign st_wr_en   = (st == S_PROC) && (mode == M_ST) && n_st_we;
  assign st_wr_idx  = idx;
  assign st_wr_data = n_ent;
  assign ic_upd_en  = (st == S_PROC) && c_ic_en;
  assign ic_upd_idx = cidx;
  assign ic_upd_inc = c_ic_inc;

  assign mem_req_valid = (st == S_MRD) || (st == S_MWR);
  assign mem_req_we    = (st == S_MWR);
  assign mem_req_addr  = m.addr;
  assign mem_req_wdata = sv;

  // output sequencing
  wire logic [GID_W-1:0] g_dst = first_se(p_g_mask);
  wire logic [LID_W-1:0] lb_c  = first_core(p_lb_mask);
  assign rsp_valid = (st == S_OUT) && p_rsp_v;
  assign rsp       = p_rsp;
  assign g_valid   = (st == S_OUT) && (p_g_mask != '0 || p_g2_v);
  assign g_flit    = (p_g_mask != '0) ? '{dst: g_dst, msg: p_g_msg} : p_g2;
  assign lb_valid  = (st == S_OUT) && (p_retry || p_lb_mask != '0);
  always_comb begin
    lb_msg = p_retry ? m : p_lb_msg;
    if (!p_retry) lb_msg.core_id = cid(MY_ID, lb_c);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= S_IDLE; mode <= M_ST; m <= '0; idx <= '0;
      ent <= '0; sv <= '0;
      p_rsp_v <= 1'b0; p_rsp <= '0; p_g_mask <= '0; p_g_msg <= '0; p_g2_v <= 1'b0;
      p_g2 <= '0; p_retry <= 1'b0; p_lb_mask <= '0; p_lb_msg <= '0;
      ev_alloc <= 1'b0; ev_mem <= 1'b0; ev_redirect <= 1'b0; ev_retry <= 1'b0;
      ev_local_pass <= 1'b0;
    end else begin
      ev_alloc <= 1'b0; ev_mem <= 1'b0; ev_redirect <= 1'b0; ev_retry <= 1'b0;
      ev_local_pass <= 1'b0;
      unique case (st)
        S_IDLE: if (in_valid) begin m <= in_msg; st <= S_LK1; end
        S_LK1:  st <= S_LK2;                       // ST answers after 1 cycle
        S_LK2:  if (ic_rd_valid) begin             // counters after 2 cycles
          if (op == DECREASE_INDEXING_COUNTER || op == LOCK_GRANT_OVERFLOW || fwd_only) begin
            mode <= M_NOST; st <= S_PROC;
          end else if (op inside {LOCK_ACQUIRE_OVERFLOW, LOCK_RELEASE_OVERFLOW}) begin
            if (st_lk_hit) begin mode <= M_NOST; st <= S_PROC; end   // retried
            else begin mode <= M_MEM; st <= S_MRD; end
          end else if (st_lk_hit) begin
            mode <= M_ST; idx <= st_lk_idx; ent <= st_lk_entry; st <= S_PROC;
          end else if (no_alloc) begin
            mode <= M_NOST; st <= S_PROC;   // nothing waits: nothing to do
          end else if (ic_rd_cnt == '0 && !st_lk_full) begin
            mode <= M_ST; idx <= st_lk_free_idx; st <= S_PROC;
            ent <= '{addr: m.addr, gwl: '0, lwl: '0, state: 1'b1, info: '0};
            ev_alloc <= 1'b1;
          end else if (is_lock_op(op) && master) begin
            mode <= M_MEM; st <= S_MRD;
          end else begin
            mode <= M_NOST; st <= S_PROC;
          end
        end
        S_MRD:   if (mem_req_ready) st <= S_MWAIT;
        S_MWAIT: if (mem_rsp_valid) begin sv <= mem_rsp_rdata; st <= S_PROC; end
        S_PROC: begin
          p_rsp_v <= c_rsp_v; p_rsp <= c_rsp;
          p_g_mask <= c_g_mask; p_g_msg <= c_g_msg;
          p_g2_v <= c_g2_v; p_g2 <= c_g2;
          p_retry <= c_retry; p_lb_mask <= c_lb_mask; p_lb_msg <= c_lb_msg;
          ev_mem      <= (mode == M_MEM);
          ev_redirect <= (mode == M_NOST) && c_g2_v;
          ev_retry    <= c_retry;
          ev_local_pass <= c_pass && !master;
          if (mode == M_MEM) begin sv <= n_sv; st <= S_MWR; end
          else st <= S_OUT;
        end
        S_MWR: if (mem_req_ready) st <= S_OUT;
        S_OUT: begin
          if (rsp_valid && rsp_ready) p_rsp_v <= 1'b0;
          if (g_valid && g_ready) begin
            if (p_g_mask != '0) p_g_mask <= p_g_mask & ~gbit(g_dst);
            else p_g2_v <= 1'b0;
          end
          if (lb_valid && lb_ready) begin
            if (p_retry) p_retry <= 1'b0;
            else p_lb_mask <= p_lb_mask & ~lbit(lb_c);
          end
          if (out_done) st <= S_IDLE;
        end
        default: st <= S_IDLE;
      endcase
    end
  end

`ifndef SYNTHESIS
  // A non-master SE never receives global acquire/release requests.
  a_master_only: assert property (@(posedge clk) disable iff (!rst_n)
    (st == S_PROC && (op inside {LOCK_ACQUIRE_GLOBAL, LOCK_RELEASE_GLOBAL, BARRIER_WAIT_GLOBAL,
                                  SEM_WAIT_GLOBAL, SEM_POST_GLOBAL, COND_WAIT_GLOBAL}))
    |-> master);
`endif
endmodule
