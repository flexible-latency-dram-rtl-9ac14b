// tb_timing_select: checks all 16 combinations of fly_enable and the three
// profile bits against the DDR3-1333H standard (9/9/24 cycles) and reduced
// (5/5/18 cycles: 7.5 ns, 7.5 ns, 27 ns at tCK = 1.5 ns) timings.
module tb_timing_select;
  import fly_pkg::*;
  logic       fly_enable;
  lat_entry_t entry;
  timing_t    timing;
  int checks = 0, failures = 0;

  timing_select dut (.*);

  initial begin
    #10000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int ercd, erp, eras;
    for (int v = 0; v < 16; v++) begin
      fly_enable = v[3];
      entry      = lat_entry_t'(v[2:0]);
      #1;
      ercd = (v[3] && v[0]) ? 5  : 9;
      erp  = (v[3] && v[1]) ? 5  : 9;
      eras = (v[3] && v[2]) ? 18 : 24;
      checks++;
      if (int'(timing.trcd) != ercd || int'(timing.trp) != erp || int'(timing.tras) != eras) begin
        failures++;
        $display("FAIL v=%0d: got %0d/%0d/%0d expected %0d/%0d/%0d", v,
                 timing.trcd, timing.trp, timing.tras, ercd, erp, eras);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
