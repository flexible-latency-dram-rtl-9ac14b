// tb_spd_loader: loads a reduced profile (256 entries) from the SPD ROM
// model, once with a one-cycle ROM and once with a three-cycle ROM. It checks
// that every table write carries the low three bits of ROM byte
// PROFILE_BASE + index, in index order, that each entry is written exactly
// once, that done rises right after the last write and stays high, and that
// the load takes NENTRY*LAT (+1) cycles.
module tb_spd_loader;
  import fly_pkg::*;
  import tb_profile_pkg::*;
  localparam int NENTRY = 256;
  localparam int BASE = 256;
  localparam int AW = 10;
  int checks = 0, failures = 0;
  logic clk = 0;
  always #2 clk = ~clk;

  task automatic chk(input bit ok, input string s);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", s); end
  endtask

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  bit ldone [2] = '{0, 0};
  logic rst_n [2];
  logic rom_req [2], rom_valid [2], tbl_we [2], done [2];
  logic [AW-1:0] rom_addr [2];
  logic [7:0] rom_data [2];
  logic [7:0] tbl_idx [2];
  lat_entry_t tbl_entry [2];

  for (genvar g = 0; g < 2; g++) begin : g_l
    localparam int LAT = (g == 0) ? 1 : 3;
    spd_loader #(.NENTRY(NENTRY), .PROFILE_BASE(BASE), .ROM_AW(AW)) dut (
      .clk, .rst_n(rst_n[g]), .rom_req(rom_req[g]), .rom_addr(rom_addr[g]),
      .rom_valid(rom_valid[g]), .rom_data(rom_data[g]), .tbl_we(tbl_we[g]),
      .tbl_idx(tbl_idx[g]), .tbl_entry(tbl_entry[g]), .done(done[g]));
    // profile of a 1-bank, 16 x 16 region device
    spd_rom_model #(.CH(g), .PROFILE_BASE(BASE), .NRG(16), .NLG(16), .AW(AW), .LAT(LAT)) rom (
      .clk, .req(rom_req[g]), .addr(rom_addr[g]), .valid(rom_valid[g]), .data(rom_data[g]));

    initial begin
      int nw = 0, t0 = 0, t = 0, tdone = -1;
      bit seen [NENTRY];
      rst_n[g] = 0;
      repeat (2) @(negedge clk);
      rst_n[g] = 1;
      while (tdone < 0 || t < tdone + 20) begin
        @(posedge clk); #1;
        t++;
        if (tbl_we[g]) begin
          chk(int'(tbl_idx[g]) == nw, $sformatf("L%0d write order %0d vs %0d", LAT, tbl_idx[g], nw));
          chk(tbl_entry[g] == prof_idx(g, int'(tbl_idx[g]), 16, 16),
              $sformatf("L%0d entry %0d value %0d exp %0d", LAT, tbl_idx[g], tbl_entry[g], prof_idx(g, int'(tbl_idx[g]), 16, 16)));
          chk(!seen[tbl_idx[g]], "entry written twice");
          seen[tbl_idx[g]] = 1;
          nw++;
        end
        if (done[g] && tdone < 0) begin
          tdone = t;
          chk(nw == NENTRY, $sformatf("L%0d done after %0d writes", LAT, nw));
          chk(tdone >= NENTRY * LAT && tdone <= NENTRY * LAT + 2,
              $sformatf("L%0d load took %0d cycles, expected %0d", LAT, tdone, NENTRY * LAT));
        end
        if (tdone >= 0) chk(done[g] && !tbl_we[g] && !rom_req[g], "not idle after done");
      end
      ldone[g] = 1;
    end
  end

  initial begin
    wait (ldone[0] && ldone[1]);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
