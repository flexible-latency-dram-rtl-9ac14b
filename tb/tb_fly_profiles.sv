// tb_fly_profiles: runs one synthetic memory workload through the FLY-DRAM
// controller (default size) under several DIMM latency profiles and compares
// the cycles taken, in the manner of the per-DIMM comparison of FLY-DRAM.
//
// The workload: NREQ requests over both channels and all banks to a working
// set of NSET cache lines in a few rows per bank, so that row hits and row
// conflicts both occur: every line is written first, then about 70 % of the
// requests are reads. The same request sequence is
// replayed, after a reset and a fresh profile load, under
//   A  baseline: FLY-DRAM disabled (standard DDR3-1333H timings)
//   B  half the regions slow, scattered
//   C  the clustered profile of tb_profile_pkg
//   D  1 % of the regions slow (a DIMM whose cells are almost all fast)
//   E  upper bound: every region fast
// Checks: all read data and tags correct, no timing or protocol error in the
// DRAM models, and the run times ordered E <= D <= B < A and C < A.
module tb_fly_profiles;
  import fly_pkg::*;
  import tb_profile_pkg::*;

  localparam int NREQ = 400;
  localparam int NSET = 80;   // working set of cache lines
  localparam int NRG = NUM_ROWS / ROWS_PER_REGION;
  localparam int NLG = LINES_PER_ROW / LINES_PER_REGION;
  localparam int NENT = NUM_BANKS * NRG * NLG;
  localparam int AW = ROW_W + BANK_W + COL_W + 1 + OFF_W;
  localparam int SAW = $clog2(256 + NENT);

  logic clk = 0, rst_n = 0, fly_enable = 1;
  always #2 clk = ~clk;

  logic                 init_done, req_valid, req_ready, req_we;
  logic [AW-1:0]        req_addr;
  logic [LINE_BITS-1:0] req_wdata;
  logic [7:0]           req_id;
  logic [1:0]           resp_valid, spd_req, spd_valid, dram_rd_valid;
  logic [7:0]           resp_id [2];
  logic [LINE_BITS-1:0] resp_data [2], dram_wdata [2], dram_rd_data [2];
  logic [SAW-1:0]       spd_addr [2];
  logic [7:0]           spd_data [2];
  dram_cmd_e            dram_cmd [2];
  logic [BANK_W-1:0]    dram_bank [2];
  logic [ROW_W-1:0]     dram_row [2];
  logic [COL_W-1:0]     dram_col [2];
  chan_events_t         events [2];

  initial begin req_valid = 0; req_we = 0; req_addr = 0; req_wdata = 0; req_id = 0; end

  fly_dram_top dut (.*);

  for (genvar c = 0; c < 2; c++) begin : g_m
    spd_rom_model #(.CH(c), .AW(SAW)) u_spd (
      .clk, .req(spd_req[c]), .addr(spd_addr[c]), .valid(spd_valid[c]), .data(spd_data[c]));
    ddr3_channel_model #(.CH(c)) u_dram (
      .clk, .rst_n, .cmd(dram_cmd[c]), .bank(dram_bank[c]), .row(dram_row[c]), .col(dram_col[c]),
      .wdata(dram_wdata[c]), .rd_valid(dram_rd_valid[c]), .rd_data(dram_rd_data[c]));
  end

  int checks = 0, failures = 0;
  longint cycle = 0;
  always @(posedge clk) cycle <= cycle + 1;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  // workload, generated once
  logic [AW-1:0]        w_addr [NREQ];
  bit                   w_we   [NREQ];
  logic [LINE_BITS-1:0] w_data [NREQ];
  logic [LINE_BITS-1:0] w_exp  [NREQ];
  logic [AW-1:0]        wset   [NSET];

  int exp_q [2][$];
  int got = 0, nreads = 0;
  always @(posedge clk) if (rst_n) begin
    for (int c = 0; c < 2; c++) if (resp_valid[c]) begin
      int i;
      got++;
      if (exp_q[c].size() == 0) check(0, "response with nothing outstanding");
      else begin
        i = exp_q[c].pop_front();
        check(resp_id[c] == 8'(i % 256), "tag");
        check(resp_data[c] == w_exp[i], $sformatf("data of request %0d", i));
      end
    end
  end

  task automatic send(input int i);
    @(negedge clk);
    req_valid = 1; req_addr = w_addr[i]; req_we = w_we[i]; req_wdata = w_data[i];
    req_id = 8'(i % 256);
    #1;
    while (!req_ready) begin @(negedge clk); #1; end
    @(posedge clk);
  endtask

  task automatic run(input bit fly, input int k, input int pct, output longint cycles);
    longint t0;
    int errs;
    kind = k; slow_pct = pct;
    rst_n = 0; fly_enable = fly; req_valid = 0;
    repeat (3) @(posedge clk);
    @(negedge clk);
    rst_n = 1;
    while (!init_done) @(posedge clk);
    t0 = cycle;
    for (int i = 0; i < NREQ; i++) begin
      if (!w_we[i]) exp_q[w_addr[i][OFF_W]].push_back(i);
      send(i);
    end
    @(negedge clk); req_valid = 0;
    while (got < nreads) @(posedge clk);
    cycles = cycle - t0;
    got = 0;
    errs = g_m[0].u_dram.timing_errors + g_m[1].u_dram.timing_errors
         + g_m[0].u_dram.protocol_errors + g_m[1].u_dram.protocol_errors;
    check(errs == 0, $sformatf("profile kind %0d/%0d%%: %0d DRAM errors so far", k, pct, errs));
  endtask

  initial begin
    longint ca, cb, cc, cd, ce;
    logic [LINE_BITS-1:0] ref_mem [longint];
    for (int j = 0; j < NSET; j++) begin
      int ch, bank, row, col;
      ch = $urandom % 2; bank = $urandom % 8;
      row = 700 * ($urandom % 4) + ((($urandom % 4) == 0) ? 2600 : 0);
      col = ($urandom % 4 == 0) ? 32 + $urandom % 4 : $urandom % 12;
      wset[j] = {ROW_W'(row), BANK_W'(bank), COL_W'(col), 1'(ch), OFF_W'(0)};
    end
    for (int i = 0; i < NREQ; i++) begin
      logic [AW-1:0] a;
      a = (i < NSET) ? wset[i] : wset[$urandom % NSET];
      w_addr[i] = a;
      w_we[i] = !ref_mem.exists(longint'(a)) || ($urandom % 10 < 3);
      for (int w = 0; w < LINE_BITS / 32; w++) w_data[i][w*32 +: 32] = $urandom;
      if (w_we[i]) ref_mem[longint'(a)] = w_data[i];
      else begin w_exp[i] = ref_mem[longint'(a)]; nreads++; end
    end

    run(0, 0, 0,  ca);
    run(1, 2, 50, cb);
    run(1, 0, 0,  cc);
    run(1, 2, 1,  cd);
    run(1, 1, 0,  ce);
    $display("cycles for %0d requests (%0d reads): baseline %0d, 50%% slow %0d, clustered %0d, 1%% slow %0d, all fast %0d",
             NREQ, nreads, ca, cb, cc, cd, ce);
    $display("speedup over baseline: 50%% slow %0.3f, clustered %0.3f, 1%% slow %0.3f, all fast %0.3f",
             real'(ca) / real'(cb), real'(ca) / real'(cc), real'(ca) / real'(cd), real'(ca) / real'(ce));
    check(nreads > 150, "too few reads");
    check(ce <= cd && cd <= cb && cb < ca, "run times not ordered by profile");
    check(cc < ca, "clustered profile not faster than the baseline");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
