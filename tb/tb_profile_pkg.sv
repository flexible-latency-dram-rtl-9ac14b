// tb_profile_pkg: the "true" latency profile of the simulated DIMMs, shared by
// the SPD ROM model (which hands it to the controller) and the DRAM channel
// model (which injects timing errors wherever it is violated).
//
// The pattern imitates the spatial clustering of slow cells: activation-slow
// cells gather in one band of cache-line columns (column group 4, i.e. lines
// 32..39 at the default geometry) plus a few scattered row groups in bank 3;
// precharge-slow cells gather in one band of rows (row group 5, rows
// 2560..3071 by default); restoration-slow regions are rare. Everything else
// runs at the reduced latencies. The channel number changes the pattern a
// little so the two DIMMs differ.
package tb_profile_pkg;
  import fly_pkg::*;

  // Profile selection, changed by a testbench between runs:
  //   0 clustered pattern described above
  //   1 every region fast (upper bound)
  //   2 each region slow for tRCD and tRP with probability slow_pct percent,
  //     scattered by a hash (no clustering)
  // In every pattern the tRP and tRAS bits depend only on bank and row group,
  // since those latencies act on whole rows.
  int kind = 0;
  int slow_pct = 0;

  function automatic lat_entry_t prof(int ch, int bank, int rg, int lg);
    lat_entry_t e;
    int unsigned h;
    if (kind == 1) return '1;
    if (kind == 2) begin
      h = (32'(ch) * 32'd1000003 + 32'(bank) * 32'd7919 + 32'(rg) * 32'd131 + 32'(lg)) * 32'h9E3779B1;
      e.rcd_fast = ((h >> 8) % 100) >= 32'(slow_pct);
      // tRP and tRAS act on whole rows: same bits for every column group
      h = (32'(ch) * 32'd1000003 + 32'(bank) * 32'd7919 + 32'(rg) * 32'd131) * 32'h85EBCA6B;
      e.rp_fast  = ((h >> 20) % 100) >= 32'(slow_pct);
      e.ras_fast = 1'b1;
      return e;
    end
    e.rcd_fast = !((lg % 16) == 4 || (bank == 3 && (rg % 8) == (1 + ch)));
    e.rp_fast  = !((rg % 32) == 5 || (bank == 6 && ch == 1 && (rg % 32) == 0));
    e.ras_fast = !(bank == 7 && (rg % 4) == 2);
    return e;
  endfunction

  // entry of region index idx = {bank, row group, column group}
  function automatic lat_entry_t prof_idx(int ch, int idx, int nrg, int nlg);
    return prof(ch, idx / (nrg * nlg), (idx / nlg) % nrg, idx % nlg);
  endfunction
endpackage
