// syncron_pkg: types and constants shared by every block of the synchronization
// engine (SE) system.
//
// The system has NUM_UNITS NDP units, each with CORES_PER_UNIT cores and one SE.
// Cores and SEs exchange 140-bit messages: a 64-bit address of the
// synchronization variable, a 6-bit opcode, a 6-bit core ID and a 64-bit
// MessageInfo field (widths as printed in the paper's message-encoding figure).
// A core ID is {global ID of the unit, local ID of the core}; a message sent by
// an SE carries the SE's global ID in the upper bits of the core ID.
//
// A Synchronization Table (ST) entry is 149 bits: 64-bit address, 4-bit global
// waiting list (one bit per SE), 16-bit local waiting list (one bit per core of
// the unit), 1-bit state (free/occupied) and a 64-bit TableInfo field.
//
// The in-memory fallback variable (syncronVar) holds one 16-bit waiting list
// per SE, a 64-bit VarInfo and an 8-bit OverflowInfo field.
//
// The opcode numbering is this design's choice: the paper lists the opcode
// names but not their codes. They are numbered in the order of the paper's
// opcode table.
package syncron_pkg;

  localparam int unsigned NUM_UNITS      = 4;   // NDP units, one SE each
  localparam int unsigned CORES_PER_UNIT = 16;  // NDP cores per unit
  localparam int unsigned TOTAL_CORES    = NUM_UNITS * CORES_PER_UNIT;
  localparam int unsigned GID_W          = $clog2(NUM_UNITS);
  localparam int unsigned LID_W          = $clog2(CORES_PER_UNIT);

  localparam int unsigned ADDR_W = 64;
  localparam int unsigned OPC_W  = 6;
  localparam int unsigned CID_W  = 6;
  localparam int unsigned INFO_W = 64;
  localparam int unsigned MSG_W  = ADDR_W + OPC_W + CID_W + INFO_W;  // 140

  // Address bits that name the unit whose memory holds a variable (and hence
  // its Master SE). Each unit is taken to own a 4 GiB slice of the address map.
  localparam int unsigned UNIT_SEL_LSB = 32;

  typedef enum logic [OPC_W-1:0] {
    // locks
    LOCK_ACQUIRE_GLOBAL      = 6'd0,
    LOCK_ACQUIRE_LOCAL       = 6'd1,
    LOCK_RELEASE_GLOBAL      = 6'd2,
    LOCK_RELEASE_LOCAL       = 6'd3,
    LOCK_GRANT_GLOBAL        = 6'd4,
    LOCK_GRANT_LOCAL         = 6'd5,
    LOCK_ACQUIRE_OVERFLOW    = 6'd6,
    LOCK_RELEASE_OVERFLOW    = 6'd7,
    LOCK_GRANT_OVERFLOW      = 6'd8,
    // barriers
    BARRIER_WAIT_GLOBAL      = 6'd9,
    BARRIER_WAIT_LOCAL_WITHIN = 6'd10,
    BARRIER_WAIT_LOCAL_ACROSS = 6'd11,
    BARRIER_DEPART_GLOBAL    = 6'd12,
    BARRIER_DEPART_LOCAL     = 6'd13,
    BARRIER_WAIT_OVERFLOW    = 6'd14,
    BARRIER_DEPART_OVERFLOW  = 6'd15,
    // semaphores
    SEM_WAIT_GLOBAL          = 6'd16,
    SEM_WAIT_LOCAL           = 6'd17,
    SEM_GRANT_GLOBAL         = 6'd18,
    SEM_GRANT_LOCAL          = 6'd19,
    SEM_POST_GLOBAL          = 6'd20,
    SEM_POST_LOCAL           = 6'd21,
    SEM_WAIT_OVERFLOW        = 6'd22,
    SEM_GRANT_OVERFLOW       = 6'd23,
    SEM_POST_OVERFLOW        = 6'd24,
    // condition variables
    COND_WAIT_GLOBAL         = 6'd25,
    COND_WAIT_LOCAL          = 6'd26,
    COND_SIGNAL_GLOBAL       = 6'd27,
    COND_SIGNAL_LOCAL        = 6'd28,
    COND_BROAD_GLOBAL        = 6'd29,
    COND_BROAD_LOCAL         = 6'd30,
    COND_GRANT_GLOBAL        = 6'd31,
    COND_GRANT_LOCAL         = 6'd32,
    COND_WAIT_OVERFLOW       = 6'd33,
    COND_SIGNAL_OVERFLOW     = 6'd34,
    COND_BROAD_OVERFLOW      = 6'd35,
    COND_GRANT_OVERFLOW      = 6'd36,
    // other
    DECREASE_INDEXING_COUNTER = 6'd37
  } opcode_e;

  typedef struct packed {
    logic [ADDR_W-1:0] addr;
    opcode_e           opcode;
    logic [CID_W-1:0]  core_id;   // {global ID, local ID}
    logic [INFO_W-1:0] info;      // MessageInfo
  } msg_t;

  // A message on the links between units, with its destination SE.
  typedef struct packed {
    logic [GID_W-1:0] dst;
    msg_t             msg;
  } gflit_t;

  // A response from an SE to the cores of its unit. It is multicast: every
  // core whose bit is set in `mask` receives it.
  typedef struct packed {
    logic [CORES_PER_UNIT-1:0] mask;
    opcode_e                   opcode;
    logic [ADDR_W-1:0]         addr;
  } rsp_t;

  typedef struct packed {
    logic [ADDR_W-1:0]         addr;
    logic [NUM_UNITS-1:0]      gwl;     // global waiting list
    logic [CORES_PER_UNIT-1:0] lwl;     // local waiting list
    logic                      state;   // 1 = occupied
    logic [INFO_W-1:0]         info;    // TableInfo
  } st_entry_t;                         // 149 bits

  typedef struct packed {
    logic [NUM_UNITS-1:0][CORES_PER_UNIT-1:0] wl;   // Waitlist[4], uint16 each
    logic [63:0]                              var_info;
    logic [7:0]                               ovf_info;
  } syncronvar_t;                                   // 136 bits

  localparam int unsigned SV_W = $bits(syncronvar_t);

  // Lock owner encoding in TableInfo / VarInfo (this design's choice):
  // [63] lock held, [62] owner is an SE (global) rather than a core,
  // [61] owner is a core of an overflowed SE, [LID_W+GID_W-1:LID_W] global
  // ID, [LID_W-1:0] local ID.
  localparam int unsigned OWN_HELD = 63;
  localparam int unsigned OWN_GLB  = 62;
  localparam int unsigned OWN_OVF  = 61;

  function automatic logic [GID_W-1:0] home_unit(input logic [ADDR_W-1:0] a);
    return a[UNIT_SEL_LSB +: GID_W];
  endfunction

  function automatic logic is_acquire_type(input opcode_e op);
    return op inside {LOCK_ACQUIRE_GLOBAL, LOCK_ACQUIRE_LOCAL, LOCK_ACQUIRE_OVERFLOW,
                      BARRIER_WAIT_GLOBAL, BARRIER_WAIT_LOCAL_WITHIN,
                      BARRIER_WAIT_LOCAL_ACROSS, BARRIER_WAIT_OVERFLOW,
                      SEM_WAIT_GLOBAL, SEM_WAIT_LOCAL, SEM_WAIT_OVERFLOW,
                      COND_WAIT_GLOBAL, COND_WAIT_LOCAL, COND_WAIT_OVERFLOW};
  endfunction

  function automatic logic is_lock_op(input opcode_e op);
    return op inside {LOCK_ACQUIRE_GLOBAL, LOCK_ACQUIRE_LOCAL, LOCK_RELEASE_GLOBAL,
                      LOCK_RELEASE_LOCAL, LOCK_GRANT_GLOBAL, LOCK_GRANT_LOCAL,
                      LOCK_ACQUIRE_OVERFLOW, LOCK_RELEASE_OVERFLOW, LOCK_GRANT_OVERFLOW};
  endfunction

  // Lowest set bit of a waiting list (the next waiter served).
  function automatic logic [LID_W-1:0] first_core(input logic [CORES_PER_UNIT-1:0] v);
    logic [LID_W-1:0] r;
    r = '0;
    for (int i = CORES_PER_UNIT - 1; i >= 0; i--) if (v[i]) r = LID_W'(i);
    return r;
  endfunction

endpackage
