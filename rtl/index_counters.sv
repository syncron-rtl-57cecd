// index_counters: the SE's indexing counters.
//
// ENTRIES counters (256 in the paper) indexed by the 8 least significant bits
// of a variable's address. A counter above zero means that variables aliasing
// to it are being served through main memory (ST overflow). The control logic
// increments a counter for every acquire-type message it sends to, or serves
// from, main memory, and decrements it for the matching release; aliasing
// costs only performance, never correctness.
//
// Read: rd_en with rd_idx; rd_cnt is valid RD_LAT cycles later (2 in the
// paper), with rd_valid high. Update: upd_en with upd_idx and upd_inc
// (1 = +1, 0 = -1) changes the counter at the clock edge. The counter
// saturates at both ends. CNT_W is this design's choice; the paper does not
// give the counter width. Reset clears every counter.
module index_counters
  import syncron_pkg::*;
#(
  parameter int unsigned ENTRIES = 256,
  parameter int unsigned CNT_W   = 8,
  parameter int unsigned RD_LAT  = 2
) (
  input  logic clk,
  input  logic rst_n,
  input  logic                       rd_en,
  input  logic [$clog2(ENTRIES)-1:0] rd_idx,
  output logic                       rd_valid,
  output logic [CNT_W-1:0]           rd_cnt,
  input  logic                       upd_en,
  input  logic [$clog2(ENTRIES)-1:0] upd_idx,
  input  logic                       upd_inc
);
  logic [CNT_W-1:0] cnt [ENTRIES];
  logic [CNT_W-1:0] pipe_d [RD_LAT];
  logic             pipe_v [RD_LAT];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < ENTRIES; i++) cnt[i] <= '0;
    end else if (upd_en) begin
      if (upd_inc && cnt[upd_idx] != '1)       cnt[upd_idx] <= cnt[upd_idx] + 1'b1;
      else if (!upd_inc && cnt[upd_idx] != '0) cnt[upd_idx] <= cnt[upd_idx] - 1'b1;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int s = 0; s < RD_LAT; s++) begin pipe_v[s] <= 1'b0; pipe_d[s] <= '0; end
    end else begin
      pipe_v[0] <= rd_en;
      pipe_d[0] <= cnt[rd_idx];
      for (int s = 1; s < RD_LAT; s++) begin
        pipe_v[s] <= pipe_v[s-1];
        pipe_d[s] <= pipe_d[s-1];
      end
    end
  end
  assign rd_valid = pipe_v[RD_LAT-1];
  assign rd_cnt   = pipe_d[RD_LAT-1];
endmodule
