// inter_unit_net: the links that join the SEs of the NDP units.
//
// Each SE injects at most one flit (destination + 140-bit message) per cycle.
// Every source has its own link pipeline of LINK_LAT stages (20 cycles in the
// paper's configuration of the links across units). At the far end, a
// round-robin arbiter per destination delivers one flit per cycle to that SE
// (valid/ready). A source whose head flit is not delivered stalls its whole
// pipeline, so messages from one SE to another arrive in the order they were
// sent; the SE protocol relies on that order.
//
// A flit accepted at cycle t reaches the destination port at the earliest at
// cycle t + LINK_LAT. The paper gives the link latency and bandwidth but not
// the topology; a fully connected set of point-to-point links is this
// design's choice. Flits addressed to the sending SE itself are legal and take
// the same path.
module inter_unit_net
  import syncron_pkg::*;
#(
  parameter int unsigned LINK_LAT = 20
) (
  input  logic clk,
  input  logic rst_n,
  input  logic   [NUM_UNITS-1:0] in_valid,
  output logic   [NUM_UNITS-1:0] in_ready,
  input  gflit_t                 in_flit  [NUM_UNITS],
  output logic   [NUM_UNITS-1:0] out_valid,
  input  logic   [NUM_UNITS-1:0] out_ready,
  output msg_t                   out_msg  [NUM_UNITS]
);
  gflit_t pipe   [NUM_UNITS][LINK_LAT];
  logic   pipe_v [NUM_UNITS][LINK_LAT];

  logic [NUM_UNITS-1:0] head_taken;
  logic [NUM_UNITS-1:0] advance;
  logic [GID_W-1:0]     last [NUM_UNITS];
  logic [GID_W-1:0]     win  [NUM_UNITS];

  // destination-side arbitration
  always_comb begin
    head_taken = '0;
    for (int d = 0; d < NUM_UNITS; d++) begin
      out_valid[d] = 1'b0;
      win[d]       = '0;
      for (int k = NUM_UNITS; k >= 1; k--) begin
        int unsigned s;
        s = (32'(last[d]) + 32'(k)) % NUM_UNITS;
        if (pipe_v[s][LINK_LAT-1] && 32'(pipe[s][LINK_LAT-1].dst) == 32'(d)) begin
          out_valid[d] = 1'b1;
          win[d]       = GID_W'(s);
        end
      end
      out_msg[d] = pipe[win[d]][LINK_LAT-1].msg;
      if (out_valid[d] && out_ready[d]) head_taken[win[d]] = 1'b1;
    end
    for (int s = 0; s < NUM_UNITS; s++) begin
      advance[s]  = !pipe_v[s][LINK_LAT-1] || head_taken[s];
      in_ready[s] = advance[s];
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int s = 0; s < NUM_UNITS; s++) begin
        last[s] <= GID_W'(NUM_UNITS - 1);
        for (int p = 0; p < LINK_LAT; p++) begin
          pipe_v[s][p] <= 1'b0;
          pipe[s][p]   <= '0;
        end
      end
    end else begin
      for (int d = 0; d < NUM_UNITS; d++)
        if (out_valid[d] && out_ready[d]) last[d] <= win[d];
      for (int s = 0; s < NUM_UNITS; s++) begin
        if (advance[s]) begin
          pipe_v[s][0] <= in_valid[s];
          pipe[s][0]   <= in_flit[s];
          for (int p = 1; p < LINK_LAT; p++) begin
            pipe_v[s][p] <= pipe_v[s][p-1];
            pipe[s][p]   <= pipe[s][p-1];
          end
        end
      end
    end
  end
endmodule
