// Self-checking testbench for sync_table, the 64-entry Synchronization
// Table. A reference array mirrors every write. Random writes allocate and
// free entries (sometimes until the table is full); random lookups, for
// addresses that are present and that are not, are checked one cycle after
// lk_en (the table's one-cycle lookup): hit, index, the entry read out, the
// full flag, the lowest free index and the occupancy count.
//
// The entry format, the 64 entries and the 1-cycle lookup are the paper's;
// lowest-free-entry allocation is this design's choice.
module tb_sync_table;
  import syncron_pkg::*;
  localparam int E = 64, IW = $clog2(E);
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic lk_en, lk_hit, lk_full, wr_en;
  logic [ADDR_W-1:0] lk_addr;
  logic [IW-1:0] lk_idx, lk_free_idx, wr_idx;
  st_entry_t lk_entry, wr_data;
  logic [$clog2(E+1)-1:0] occupancy;

  sync_table #(.ENTRIES(E)) dut (.*);

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL: %s", what); end
  endtask

  st_entry_t ref_t [E];
  int full_seen = 0, hit_seen = 0, miss_seen = 0;

  initial begin
    lk_en = 0; wr_en = 0; lk_addr = '0; wr_idx = '0; wr_data = '0;
    foreach (ref_t[i]) ref_t[i] = '0;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    for (int it = 0; it < 3000; it++) begin
      int alloc_bias;
      logic [ADDR_W-1:0] a;
      bit exp_hit, exp_full; int exp_idx, exp_free, occ;
      alloc_bias = ((it / 500) % 2) ? 90 : 30;
      // ---- a write: allocate a free entry or free an occupied one
      @(negedge clk);
      wr_en = ($urandom_range(0, 1) == 1);
      wr_idx = IW'($urandom_range(0, E - 1));
      wr_data.addr  = 64'($urandom_range(0, 4095)) << 3;
      wr_data.gwl   = 4'($urandom);
      wr_data.lwl   = 16'($urandom);
      wr_data.info  = {$urandom, $urandom};
      wr_data.state = ($urandom_range(0, 99) < alloc_bias);
      // allocate into the lowest free entry, as the SPU does
      if (wr_data.state)
        for (int i = E - 1; i >= 0; i--) if (!ref_t[i].state) wr_idx = IW'(i);
      // keep addresses unique among occupied entries, as the SPU does
      foreach (ref_t[i]) if (i != wr_idx && ref_t[i].state && ref_t[i].addr == wr_data.addr)
        wr_data.state = 1'b0;
      // ---- a lookup in the same cycle
      lk_en = 1'b1;
      // half the lookups use an address that is stored in the table
      if ($urandom_range(0, 1)) a = ref_t[$urandom_range(0, E - 1)].addr;
      else a = 64'($urandom_range(0, 4095)) << 3;
      lk_addr = a;
      // expected values use the table as it is before this cycle's write
      exp_hit = 0; exp_idx = 0; exp_full = 1; exp_free = 0; occ = 0;
      for (int i = E - 1; i >= 0; i--) begin
        if (ref_t[i].state && ref_t[i].addr == a) begin exp_hit = 1; exp_idx = i; end
        if (!ref_t[i].state) begin exp_full = 0; exp_free = i; end
      end
      foreach (ref_t[i]) occ += ref_t[i].state;
      check(32'(occupancy) == occ, "occupancy");
      @(posedge clk);
      if (wr_en) ref_t[wr_idx] = wr_data;
      #1;
      lk_en = 1'b0; wr_en = 1'b0;
      check(lk_hit == exp_hit, "hit");
      check(lk_full == exp_full, "full");
      if (!exp_full) check(32'(lk_free_idx) == exp_free, "free index is the lowest free entry");
      if (exp_hit) begin
        check(32'(lk_idx) == exp_idx, "hit index");
        check(lk_entry.addr == a && lk_entry.state, "entry read out");
        check(lk_entry.info == ref_t[exp_idx].info || wr_idx == IW'(exp_idx), "entry info");
      end
      if (exp_full) full_seen++;
      if (exp_hit) hit_seen++; else miss_seen++;
    end
    check(full_seen > 0, "table reached full");
    check(hit_seen > 0 && miss_seen > 0, "both hits and misses");
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
