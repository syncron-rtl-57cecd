// sync_mem_model: behavioural model of one unit's memory arrays, as seen by
// the SE's syncronVar port. Not synthesizable; testbench use only.
// Every syncronVar starts at zero (the driver clears a variable when it
// creates it). Requests are always accepted; a read returns its data LAT
// cycles later. Writes take effect at once. reads/writes count accesses.
//
// The paper keeps syncronVar in the unit's DRAM; this model stands in for it,
// and its fixed latency is this testbench's choice, not a DRAM timing.
module sync_mem_model
  import syncron_pkg::*;
#(
  parameter int unsigned LAT = 8
) (
  input  logic              clk,
  input  logic              req_valid,
  output logic              req_ready,
  input  logic              req_we,
  input  logic [ADDR_W-1:0] req_addr,
  input  syncronvar_t       req_wdata,
  output logic              rsp_valid,
  output syncronvar_t       rsp_rdata
);
  syncronvar_t mem [logic [ADDR_W-1:0]];
  logic        pv [LAT];
  syncronvar_t pd [LAT];
  int unsigned reads = 0, writes = 0;

  assign req_ready = 1'b1;
  initial for (int i = 0; i < LAT; i++) begin pv[i] = 1'b0; pd[i] = '0; end

  always @(posedge clk) begin
    for (int i = LAT - 1; i > 0; i--) begin pv[i] <= pv[i-1]; pd[i] <= pd[i-1]; end
    pv[0] <= req_valid && !req_we;
    pd[0] <= mem.exists(req_addr) ? mem[req_addr] : '0;
    if (req_valid && req_we) begin mem[req_addr] = req_wdata; writes++; end
    if (req_valid && !req_we) reads++;
  end
  assign rsp_valid = pv[LAT-1];
  assign rsp_rdata = pd[LAT-1];

  function automatic logic all_idle();
    foreach (mem[a]) if (mem[a] != '0) return 1'b0;
    return 1'b1;
  endfunction
endmodule
