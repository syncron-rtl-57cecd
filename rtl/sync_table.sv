// sync_table: the Synchronization Table (ST) of one SE.
//
// ENTRIES entries (64 in the paper) of 149 bits each: variable address, global
// waiting list (one bit per SE), local waiting list (one bit per core of the
// unit), state (free/occupied) and the 64-bit TableInfo field.
//
// The control logic uses it in two ways, matching the INDEX / ENABLE /
// READ-WRITE / DATA signals of the paper's SE block diagram:
//  * lookup: lk_en with lk_addr; one cycle later (the paper's 1-cycle ST)
//    lk_hit says whether an occupied entry holds that address, lk_idx and
//    lk_entry give that entry, lk_full says all entries are occupied and
//    lk_free_idx names the lowest free entry. The match is fully associative
//    (this design's choice: the paper calls the ST a cache structure keyed by
//    the variable address but does not give its organisation).
//  * write: wr_en with wr_idx and wr_data replaces an entry at the clock edge.
//    Writing an entry with state 0 frees it.
// The lookup result reflects writes made up to and including the cycle of
// lk_en. occupancy counts occupied entries. Reset frees every entry.
module sync_table
  import syncron_pkg::*;
#(
  parameter int unsigned ENTRIES = 64
) (
  input  logic clk,
  input  logic rst_n,
  input  logic                       lk_en,
  input  logic [ADDR_W-1:0]          lk_addr,
  output logic                       lk_hit,
  output logic [$clog2(ENTRIES)-1:0] lk_idx,
  output st_entry_t                  lk_entry,
  output logic                       lk_full,
  output logic [$clog2(ENTRIES)-1:0] lk_free_idx,
  input  logic                       wr_en,
  input  logic [$clog2(ENTRIES)-1:0] wr_idx,
  input  st_entry_t                  wr_data,
  output logic [$clog2(ENTRIES+1)-1:0] occupancy
);
  localparam int unsigned IW = $clog2(ENTRIES);

  st_entry_t tbl [ENTRIES];

  logic          hit_c, full_c;
  logic [IW-1:0] hit_idx_c, free_idx_c;
  logic [$clog2(ENTRIES+1)-1:0] occ_c;

  always_comb begin
    hit_c = 1'b0; hit_idx_c = '0; full_c = 1'b1; free_idx_c = '0; occ_c = '0;
    for (int i = ENTRIES - 1; i >= 0; i--) begin
      if (tbl[i].state && tbl[i].addr == lk_addr) begin
        hit_c = 1'b1; hit_idx_c = IW'(i);
      end
      if (!tbl[i].state) begin
        full_c = 1'b0; free_idx_c = IW'(i);
      end
    end
    for (int i = 0; i < ENTRIES; i++) occ_c = occ_c + tbl[i].state;
  end
  assign occupancy = occ_c;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < ENTRIES; i++) tbl[i] <= '0;
      lk_hit <= 1'b0; lk_idx <= '0; lk_entry <= '0; lk_full <= 1'b0; lk_free_idx <= '0;
    end else begin
      if (wr_en) tbl[wr_idx] <= wr_data;
      if (lk_en) begin
        lk_hit      <= hit_c;
        lk_idx      <= hit_idx_c;
        lk_entry    <= tbl[hit_idx_c];
        lk_full     <= full_c;
        lk_free_idx <= free_idx_c;
      end
    end
  end
endmodule
