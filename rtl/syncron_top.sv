// syncron_top: an NDP system with SynCron's synchronization support.
//
// NUM_UNITS (4) NDP units, each with CORES_PER_UNIT (16) cores. In every unit
// each core has a sync_req_if (the req_sync / req_async instructions), the
// cores reach their unit's Synchronization Engine through local_net, and the
// SEs of all units talk to each other over inter_unit_net (LINK_LAT cycles per
// message; 20 in the paper's configuration).
//
// The cores themselves and the memory arrays are outside this module: each
// core's synchronization instruction port (issue / busy / commit) and each
// unit's memory port for syncronVar accesses are ports of the top. A core
// issues one instruction at a time: address of the synchronization variable,
// opcode (a *_local opcode, or lock/sem/cond release and post opcodes for
// req_async), and MessageInfo (barrier core count, semaphore initial value or
// the lock address of a condition wait). The variable's home unit, and so its
// Master SE, is given by its address bits [33:32].
//
// Indexed ports: [u] is unit u, [u][c] is local core c of unit u.
module syncron_top
  import syncron_pkg::*;
#(
  parameter int unsigned LINK_LAT    = 20,
  parameter int unsigned ST_ENTRIES  = 64,
  parameter int unsigned BUF_DEPTH   = 16,
  parameter int unsigned IDX_ENTRIES = 256
) (
  input  logic clk,
  input  logic rst_n,
  // core synchronization instruction ports
  input  logic    [NUM_UNITS-1:0][CORES_PER_UNIT-1:0] issue,
  input  logic    [NUM_UNITS-1:0][CORES_PER_UNIT-1:0] issue_sync,
  input  logic    [ADDR_W-1:0]   issue_addr   [NUM_UNITS][CORES_PER_UNIT],
  input  opcode_e                issue_opcode [NUM_UNITS][CORES_PER_UNIT],
  input  logic    [INFO_W-1:0]   issue_info   [NUM_UNITS][CORES_PER_UNIT],
  output logic    [NUM_UNITS-1:0][CORES_PER_UNIT-1:0] busy,
  output logic    [NUM_UNITS-1:0][CORES_PER_UNIT-1:0] commit,
  // per-unit memory ports (syncronVar accesses of the Master SE)
  output logic        [NUM_UNITS-1:0] mem_req_valid,
  input  logic        [NUM_UNITS-1:0] mem_req_ready,
  output logic        [NUM_UNITS-1:0] mem_req_we,
  output logic        [ADDR_W-1:0]    mem_req_addr  [NUM_UNITS],
  output syncronvar_t                 mem_req_wdata [NUM_UNITS],
  input  logic        [NUM_UNITS-1:0] mem_rsp_valid,
  input  syncronvar_t                 mem_rsp_rdata [NUM_UNITS],
  // statistics
  output logic [$clog2(ST_ENTRIES+1)-1:0] st_occupancy [NUM_UNITS],
  output logic [NUM_UNITS-1:0] ev_alloc,
  output logic [NUM_UNITS-1:0] ev_mem,
  output logic [NUM_UNITS-1:0] ev_redirect,
  output logic [NUM_UNITS-1:0] ev_retry,
  output logic [NUM_UNITS-1:0] ev_local_pass,
  output logic [NUM_UNITS-1:0] ev_global_msg
);
  logic   [NUM_UNITS-1:0] g_in_valid, g_in_ready, g_out_valid, g_out_ready;
  gflit_t                 g_out_flit [NUM_UNITS];
  msg_t                   g_in_msg   [NUM_UNITS];

  for (genvar u = 0; u < NUM_UNITS; u++) begin : g_unit
    logic [CORES_PER_UNIT-1:0] req_valid, req_ready, rsp_valid_c;
    msg_t                      req_msg [CORES_PER_UNIT];
    logic se_req_valid, se_req_ready, se_rsp_valid, se_rsp_ready;
    msg_t se_req_msg;
    rsp_t se_rsp;

    for (genvar c = 0; c < CORES_PER_UNIT; c++) begin : g_core
      sync_req_if #(.MY_CID({GID_W'(u), LID_W'(c)})) u_if (
        .clk, .rst_n,
        .issue(issue[u][c]), .issue_sync(issue_sync[u][c]), .issue_addr(issue_addr[u][c]),
        .issue_opcode(issue_opcode[u][c]), .issue_info(issue_info[u][c]),
        .busy(busy[u][c]), .commit(commit[u][c]),
        .req_valid(req_valid[c]), .req_ready(req_ready[c]), .req_msg(req_msg[c]),
        .rsp_valid(rsp_valid_c[c]));
    end

    local_net u_net (
      .clk, .rst_n,
      .core_req_valid(req_valid), .core_req_ready(req_ready), .core_req_msg(req_msg),
      .se_req_valid, .se_req_ready, .se_req_msg,
      .se_rsp_valid, .se_rsp,
      .core_rsp_valid(rsp_valid_c));
    assign se_rsp_ready = 1'b1;

    sync_engine #(.MY_ID(GID_W'(u)), .ST_ENTRIES(ST_ENTRIES), .BUF_DEPTH(BUF_DEPTH),
                  .IDX_ENTRIES(IDX_ENTRIES)) u_se (
      .clk, .rst_n,
      .loc_valid(se_req_valid), .loc_ready(se_req_ready), .loc_msg(se_req_msg),
      .rsp_valid(se_rsp_valid), .rsp_ready(se_rsp_ready), .rsp(se_rsp),
      .glb_in_valid(g_in_valid[u]), .glb_in_ready(g_in_ready[u]), .glb_in_msg(g_in_msg[u]),
      .glb_out_valid(g_out_valid[u]), .glb_out_ready(g_out_ready[u]), .glb_out_flit(g_out_flit[u]),
      .mem_req_valid(mem_req_valid[u]), .mem_req_ready(mem_req_ready[u]), .mem_req_we(mem_req_we[u]),
      .mem_req_addr(mem_req_addr[u]), .mem_req_wdata(mem_req_wdata[u]),
      .mem_rsp_valid(mem_rsp_valid[u]), .mem_rsp_rdata(mem_rsp_rdata[u]),
      .st_occupancy(st_occupancy[u]),
      .ev_alloc(ev_alloc[u]), .ev_mem(ev_mem[u]), .ev_redirect(ev_redirect[u]),
      .ev_retry(ev_retry[u]), .ev_local_pass(ev_local_pass[u]));
    assign ev_global_msg[u] = g_out_valid[u] && g_out_ready[u];
  end

  inter_unit_net #(.LINK_LAT(LINK_LAT)) u_links (
    .clk, .rst_n,
    .in_valid(g_out_valid), .in_ready(g_out_ready), .in_flit(g_out_flit),
    .out_valid(g_in_valid), .out_ready(g_in_ready), .out_msg(g_in_msg));
endmodule
