// tb_fly_dram_top: end-to-end test of the FLY-DRAM controller at its default
// size (2 channels, 8 banks, 16K rows, 4096 profile regions per channel).
//
// Each channel gets an SPD ROM model holding that DIMM's latency profile and
// a DRAM channel model that corrupts data whenever a command comes sooner
// than the true latency of its region. The test
//   1. resets, lets both loaders copy the profile (checks the boot time:
//      one entry per cycle, so about 4096 cycles);
//   2. runs the same workload twice, first with FLY-DRAM enabled and then,
//      after a reset, with it disabled (standard DDR3-1333H timings): writes
//      of NLINES cache lines spread over fast and slow regions of both
//      channels, then reads of all of them in a shuffled order, including
//      back-to-back requests that fill the queue;
//   3. checks every read's data and tag, that no timing or protocol error
//      occurred in the DRAM models, that FLY-DRAM finished in fewer cycles
//      than the baseline, and that every mechanism occurred at least once:
//      reduced and standard tRCD activations, reduced-tRP activations,
//      row-conflict precharges, row hits, queue back-pressure and both modes.
module tb_fly_dram_top;
  import fly_pkg::*;

  localparam int NLINES = 96;
  localparam int NRG = NUM_ROWS / ROWS_PER_REGION;
  localparam int NLG = LINES_PER_ROW / LINES_PER_REGION;
  localparam int NENT = NUM_BANKS * NRG * NLG;
  localparam int AW = ROW_W + BANK_W + COL_W + 1 + OFF_W;
  localparam int SAW = $clog2(256 + NENT);

  logic clk = 0, rst_n = 0, fly_enable = 1;
  initial begin req_valid = 0; req_we = 0; req_addr = 0; req_wdata = 0; req_id = 0; end
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

  // mechanism counters
  int n_act_fast = 0, n_act_slow = 0, n_act_fast_rp = 0, n_pre = 0, n_hit = 0;
  int n_rd = 0, n_wr = 0, n_stall = 0, n_fly_runs = 0, n_base_runs = 0;
  int n_ch [2] = '{0, 0};
  always @(posedge clk) if (rst_n) begin
    for (int c = 0; c < 2; c++) begin
      if (events[c].act && events[c].act_fast) n_act_fast++;
      if (events[c].act && !events[c].act_fast) n_act_slow++;
      if (events[c].act_fast_rp) n_act_fast_rp++;
      if (events[c].pre) n_pre++;
      if (events[c].row_hit) n_hit++;
      if (events[c].rd) n_rd++;
      if (events[c].wr) begin n_wr++; n_ch[c]++; end
    end
  end

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  // workload
  logic [AW-1:0]        line_addr [NLINES];
  logic [LINE_BITS-1:0] line_data [NLINES];
  int                   order [NLINES];

  function automatic logic [AW-1:0] mk(int ch, int bank, int row, int col);
    return {ROW_W'(row), BANK_W'(bank), COL_W'(col), 1'(ch), OFF_W'(0)};
  endfunction

  // expected read tags per channel, in issue order
  int exp_q [2][$];
  int got = 0;
  always @(posedge clk) if (rst_n) begin
    for (int c = 0; c < 2; c++) if (resp_valid[c]) begin
      int i;
      got++;
      if (exp_q[c].size() == 0) check(0, "response with nothing outstanding");
      else begin
        i = exp_q[c].pop_front();
        check(resp_id[c] == 8'(i), $sformatf("ch%0d tag %0d expected %0d", c, resp_id[c], i));
        check(resp_data[c] == line_data[i], $sformatf("ch%0d data of line %0d diff=%h t=%0d cor=%0d", c, i, resp_data[c]^line_data[i], g_m[0].u_dram.timing_errors, g_m[0].u_dram.corrupted_reads));
      end
    end
  end

  // drive on the falling edge, handshake completes on the next rising edge
  task automatic send(input logic [AW-1:0] a, input bit we, input logic [LINE_BITS-1:0] d,
                      input int id);
    @(negedge clk);
    req_valid = 1; req_addr = a; req_we = we; req_wdata = d; req_id = 8'(id);
    #1;  // let req_ready settle for the new address
    while (!req_ready) begin
      if (init_done) n_stall++;
      @(negedge clk);
      #1;
    end
    @(posedge clk);
  endtask

  task automatic idle();
    @(negedge clk);
    req_valid = 0;
  endtask

  task automatic run(input bit fly, output longint cycles);
    longint t0;
    rst_n = 0; fly_enable = fly; req_valid = 0;
    repeat (3) @(posedge clk);
    @(negedge clk);
    rst_n = 1;
    t0 = cycle;
    @(posedge clk);
    while (!init_done) @(posedge clk);
    check(cycle - t0 >= NENT && cycle - t0 <= NENT + 8,
          $sformatf("profile load took %0d cycles, expected about %0d", cycle - t0, NENT));
    t0 = cycle;
    for (int i = 0; i < NLINES; i++) send(line_addr[i], 1, line_data[i], i);
    idle();
    for (int k = 0; k < NLINES; k++) begin
      int i = order[k];
      exp_q[line_addr[i][OFF_W]].push_back(i);
      send(line_addr[i], 0, '0, i);
    end
    idle();
    while (got < NLINES) @(posedge clk);
    cycles = cycle - t0;
    got = 0;
    if (fly) n_fly_runs++; else n_base_runs++;
  endtask

  initial begin
    longint c_fly, c_base;
    int errs;
    // lines: mix of fast regions, activation-slow columns (32..39),
    // precharge-slow rows (2560..3071), restoration-slow rows of bank 7,
    // with several lines per row so that row hits and conflicts both occur
    for (int i = 0; i < NLINES; i++) begin
      int ch, bank, rsel, row, col;
      ch   = i % 2;
      bank = (i / 2) % 8;
      rsel = (i / 16) % 6;
      row  = (rsel == 0) ? 100 : (rsel == 1) ? 2600 : (rsel == 2) ? 1100 + bank
               : (rsel == 3) ? 700 : (rsel == 4) ? 3000 : 9000;
      col  = ((i / 16) % 2 == 0) ? 32 + (i % 8) : (i * 5) % 128;
      line_addr[i] = mk(ch, bank, row, col);
      for (int w = 0; w < LINE_BITS / 32; w++) line_data[i][w*32 +: 32] = $urandom;
      order[i] = i;
    end
    order.shuffle();

    run(1, c_fly);
    errs = g_m[0].u_dram.timing_errors + g_m[1].u_dram.timing_errors;
    check(errs == 0, $sformatf("FLY-DRAM run: %0d timing errors", errs));
    errs = g_m[0].u_dram.protocol_errors + g_m[1].u_dram.protocol_errors;
    check(errs == 0, $sformatf("FLY-DRAM run: %0d protocol errors", errs));
    run(0, c_base);
    errs = g_m[0].u_dram.timing_errors + g_m[1].u_dram.timing_errors;
    check(errs == 0, $sformatf("baseline run: %0d timing errors", errs));
    errs = g_m[0].u_dram.protocol_errors + g_m[1].u_dram.protocol_errors;
    check(errs == 0, $sformatf("baseline run: %0d protocol errors", errs));
    $display("workload cycles: FLY-DRAM %0d, baseline %0d", c_fly, c_base);
    check(c_fly < c_base, "FLY-DRAM not faster than the baseline");

    $display("events: act_fast=%0d act_std=%0d act_fast_rp=%0d pre=%0d hit=%0d rd=%0d wr=%0d stall=%0d",
             n_act_fast, n_act_slow, n_act_fast_rp, n_pre, n_hit, n_rd, n_wr, n_stall);
    check(n_act_fast > 0,    "no activation with reduced tRCD");
    check(n_act_slow > 0,    "no activation with standard tRCD");
    check(n_act_fast_rp > 0, "no activation with reduced tRP");
    check(n_pre > 0,         "no row-conflict precharge");
    check(n_hit > 0,         "no row hit");
    check(n_rd == 2 * NLINES && n_wr == 2 * NLINES, "wrong number of column commands");
    check(n_ch[0] > 0 && n_ch[1] > 0, "a channel was never used");
    check(n_stall > 0,       "request port never back-pressured");
    check(n_fly_runs == 1 && n_base_runs == 1, "mode switch not exercised");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

