// sync_engine: one Synchronization Engine (SE), placed in the compute die of
// each NDP unit.
//
// It holds the SPU (message buffer and control logic), the Synchronization
// Table and the indexing counters, wired as in the paper's SE block diagram.
// Messages from the cores of the unit (local port) and from other SEs (global
// port) enter one message buffer; when both arrive in the same cycle the
// global one is taken first. Messages the control logic sends to itself (the
// lock release/re-acquire of a condition wait, and retries) go to a separate
// loopback queue. The loopback queue goes first, but after each loopback
// message the buffer gets a turn, so a message that keeps retrying cannot
// starve the buffer. A new message is taken from the buffer only while the
// loopback queue has room for a whole unit's worth of messages, so the control logic can always finish the message it serves.
//
// The SE with global ID MY_ID is the Master SE of every variable whose home
// address bits name unit MY_ID. Its memory port reaches the unit's own memory
// arrays and is used only in ST overflow. Port timing is valid/ready
// everywhere except the memory response, which the SE always accepts.
module sync_engine
  import syncron_pkg::*;
#(
  parameter logic [GID_W-1:0] MY_ID       = '0,
  parameter int unsigned      ST_ENTRIES  = 64,
  parameter int unsigned      BUF_DEPTH   = 16,
  parameter int unsigned      IDX_ENTRIES = 256,
  parameter int unsigned      CNT_W       = 8
) (
  input  logic clk,
  input  logic rst_n,
  // from the cores of this unit
  input  logic loc_valid,
  output logic loc_ready,
  input  msg_t loc_msg,
  // responses to the cores
  output logic rsp_valid,
  input  logic rsp_ready,
  output rsp_t rsp,
  // from other SEs
  input  logic glb_in_valid,
  output logic glb_in_ready,
  input  msg_t glb_in_msg,
  // to other SEs
  output logic   glb_out_valid,
  input  logic   glb_out_ready,
  output gflit_t glb_out_flit,
  // local memory
  output logic              mem_req_valid,
  input  logic              mem_req_ready,
  output logic              mem_req_we,
  output logic [ADDR_W-1:0] mem_req_addr,
  output syncronvar_t       mem_req_wdata,
  input  logic              mem_rsp_valid,
  input  syncronvar_t       mem_rsp_rdata,
  // statistics
  output logic [$clog2(ST_ENTRIES+1)-1:0] st_occupancy,
  output logic ev_alloc,
  output logic ev_mem,
  output logic ev_redirect,
  output logic ev_retry,
  output logic ev_local_pass
);
  localparam int unsigned LB_DEPTH = 2 * CORES_PER_UNIT;
  localparam int unsigned SIW = $clog2(ST_ENTRIES);
  localparam int unsigned CIW = $clog2(IDX_ENTRIES);

  // input buffer
  logic buf_push_v, buf_push_r, buf_pop_v, buf_pop_r;
  logic [$clog2(BUF_DEPTH+1)-1:0] buf_count;  // occupancy, for debug
  msg_t buf_push_m, buf_pop_m;
  assign buf_push_v   = glb_in_valid || loc_valid;
  assign buf_push_m   = glb_in_valid ? glb_in_msg : loc_msg;
  assign glb_in_ready = buf_push_r;
  assign loc_ready    = buf_push_r && !glb_in_valid;

  msg_buffer #(.DEPTH(BUF_DEPTH)) u_buf (
    .clk, .rst_n,
    .push_valid(buf_push_v), .push_ready(buf_push_r), .push_msg(buf_push_m),
    .pop_valid(buf_pop_v), .pop_ready(buf_pop_r), .pop_msg(buf_pop_m), .count(buf_count));

  // loopback queue
  logic lb_push_v, lb_push_r, lb_pop_v, lb_pop_r;
  msg_t lb_push_m, lb_pop_m;
  logic [$clog2(LB_DEPTH+1)-1:0] lb_count;
  msg_buffer #(.DEPTH(LB_DEPTH)) u_lb (
    .clk, .rst_n,
    .push_valid(lb_push_v), .push_ready(lb_push_r), .push_msg(lb_push_m),
    .pop_valid(lb_pop_v), .pop_ready(lb_pop_r), .pop_msg(lb_pop_m), .count(lb_count));

  wire logic lb_room = (32'(lb_count) + CORES_PER_UNIT) <= LB_DEPTH;

  logic in_valid, in_ready;
  msg_t in_msg;
  // The loopback queue normally goes first, but after one loopback message
  // the input buffer gets a turn, so a message that keeps retrying cannot
  // starve the buffer (which may hold the message that frees the ST).
  logic last_lb;
  wire logic take_buf = buf_pop_v && lb_room && (!lb_pop_v || last_lb);
  assign in_valid  = lb_pop_v || (buf_pop_v && lb_room);
  assign in_msg    = take_buf ? buf_pop_m : lb_pop_m;
  assign lb_pop_r  = in_ready && lb_pop_v && !take_buf;
  assign buf_pop_r = in_ready && take_buf;
  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n)        last_lb <= 1'b0;
    else if (in_ready && in_valid) last_lb <= !take_buf;

  // ST and indexing counters
  logic st_lk_en, st_lk_hit, st_lk_full, st_wr_en;
  logic [ADDR_W-1:0] st_lk_addr;
  logic [SIW-1:0] st_lk_idx, st_lk_free_idx, st_wr_idx;
  st_entry_t st_lk_entry, st_wr_data;

  sync_table #(.ENTRIES(ST_ENTRIES)) u_st (
    .clk, .rst_n,
    .lk_en(st_lk_en), .lk_addr(st_lk_addr), .lk_hit(st_lk_hit), .lk_idx(st_lk_idx),
    .lk_entry(st_lk_entry), .lk_full(st_lk_full), .lk_free_idx(st_lk_free_idx),
    .wr_en(st_wr_en), .wr_idx(st_wr_idx), .wr_data(st_wr_data), .occupancy(st_occupancy));

  logic ic_rd_en, ic_rd_valid, ic_upd_en, ic_upd_inc;
  logic [CIW-1:0] ic_rd_idx, ic_upd_idx;
  logic [CNT_W-1:0] ic_rd_cnt;

  index_counters #(.ENTRIES(IDX_ENTRIES), .CNT_W(CNT_W), .RD_LAT(2)) u_ic (
    .clk, .rst_n,
    .rd_en(ic_rd_en), .rd_idx(ic_rd_idx), .rd_valid(ic_rd_valid), .rd_cnt(ic_rd_cnt),
    .upd_en(ic_upd_en), .upd_idx(ic_upd_idx), .upd_inc(ic_upd_inc));

  spu_ctrl #(.MY_ID(MY_ID), .ST_ENTRIES(ST_ENTRIES), .IDX_ENTRIES(IDX_ENTRIES), .CNT_W(CNT_W)) u_ctrl (
    .clk, .rst_n,
    .in_valid, .in_ready, .in_msg,
    .st_lk_en, .st_lk_addr, .st_lk_hit, .st_lk_idx, .st_lk_entry, .st_lk_full, .st_lk_free_idx,
    .st_wr_en, .st_wr_idx, .st_wr_data,
    .ic_rd_en, .ic_rd_idx, .ic_rd_valid, .ic_rd_cnt, .ic_upd_en, .ic_upd_idx, .ic_upd_inc,
    .mem_req_valid, .mem_req_ready, .mem_req_we, .mem_req_addr, .mem_req_wdata,
    .mem_rsp_valid, .mem_rsp_rdata,
    .rsp_valid, .rsp_ready, .rsp,
    .g_valid(glb_out_valid), .g_ready(glb_out_ready), .g_flit(glb_out_flit),
    .lb_valid(lb_push_v), .lb_ready(lb_push_r), .lb_msg(lb_push_m),
    .ev_alloc, .ev_mem, .ev_redirect, .ev_retry, .ev_local_pass);
endmodule
