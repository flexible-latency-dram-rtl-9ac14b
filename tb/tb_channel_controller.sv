// tb_channel_controller: tests one channel controller at the default size
// against the DRAM channel model, with a behavioural profile lookup (one
// cycle latency, contents from tb_profile_pkg).
//   1. Before init_done, req_ready must stay low.
//   2. Directed latency checks on an idle channel, each measured on the
//      command port: ACTIVATE -> WRITE gap of 5 cycles for an activation-fast
//      line and 9 for an activation-slow line (columns 32..39); with
//      fly_enable low, 9 for the fast line too; a row conflict gives
//      PRECHARGE no earlier than ACTIVATE + tRAS (18 fast / 24 standard) and
//      ACTIVATE exactly tRP (5 fast / 9 for rows 2560..3071) after it; a read
//      returns TCL + burst + 1 cycles after its READ command.
//   3. 600 random reads and writes over a few rows of all banks, fast and
//      slow regions, checked against a scoreboard (data and tags, in order).
// Throughout, the DRAM model must see no timing and no protocol error.
module tb_channel_controller;
  import fly_pkg::*;
  import tb_profile_pkg::*;

  localparam int AW = 31;
  logic clk = 0, rst_n = 0, init_done = 0, fly_enable = 1;
  always #2 clk = ~clk;

  logic            req_valid = 0, req_ready, req_we = 0;
  logic [AW-1:0]   req_addr = '0;
  logic [LINE_BITS-1:0] req_wdata = '0;
  logic [7:0]      req_id = '0;
  logic            lut_rd_en;
  logic [11:0]     lut_rd_idx;
  lat_entry_t      lut_rd_entry;
  dram_cmd_e       cmd;
  logic [2:0]      cmd_bank;
  logic [13:0]     cmd_row;
  logic [6:0]      cmd_col;
  logic [LINE_BITS-1:0] cmd_wdata, rd_data, resp_data;
  logic            rd_valid, resp_valid;
  logic [7:0]      resp_id;
  chan_events_t    events;

  channel_controller dut (.*);

  ddr3_channel_model #(.CH(0)) u_dram (
    .clk, .rst_n, .cmd, .bank(cmd_bank), .row(cmd_row), .col(cmd_col), .wdata(cmd_wdata),
    .rd_valid, .rd_data);

  always @(posedge clk) if (lut_rd_en) lut_rd_entry <= prof_idx(0, int'(lut_rd_idx), 32, 16);

  int checks = 0, failures = 0;
  int cycle = 0;
  always @(posedge clk) cycle <= cycle + 1;

  task automatic chk(input bit ok, input string s);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", s); end
  endtask

  // command log
  int t_act, t_pre, t_col, t_rd, t_resp, n_cmd;
  always @(posedge clk) if (rst_n) begin
    if (cmd == CMD_ACT) t_act <= cycle;
    if (cmd == CMD_PRE) t_pre <= cycle;
    if (cmd == CMD_RD || cmd == CMD_WR) t_col <= cycle;
    if (cmd == CMD_RD) t_rd <= cycle;
    if (resp_valid) t_resp <= cycle;
    if (cmd != CMD_NOP) n_cmd <= n_cmd + 1;
  end

  // scoreboard
  logic [LINE_BITS-1:0] ref_mem [longint];
  int exp_id [$];
  logic [LINE_BITS-1:0] exp_data [$];
  int n_resp = 0;
  always @(posedge clk) if (rst_n && resp_valid) begin
    n_resp++;
    if (exp_id.size() == 0) chk(0, "unexpected response");
    else begin
      chk(resp_id == 8'(exp_id.pop_front()), "response tag");
      chk(resp_data == exp_data.pop_front(), "response data");
    end
  end

  function automatic logic [AW-1:0] mk(int bank, int row, int col);
    return {14'(row), 3'(bank), 7'(col), 1'b0, 6'(0)};
  endfunction

  task automatic send(input logic [AW-1:0] a, input bit we, input logic [LINE_BITS-1:0] d,
                      input int id);
    @(negedge clk);
    req_valid = 1; req_addr = a; req_we = we; req_wdata = d; req_id = 8'(id);
    #1;
    while (!req_ready) begin @(negedge clk); #1; end
    @(posedge clk);
    #1;
    req_valid = 0;
    if (!we) begin
      exp_id.push_back(id);
      exp_data.push_back(ref_mem.exists(longint'(a)) ? ref_mem[longint'(a)] : 'x);
    end else ref_mem[longint'(a)] = d;
  endtask

  task automatic settle();
    repeat (60) @(posedge clk);
  endtask

  function automatic logic [LINE_BITS-1:0] rnd();
    logic [LINE_BITS-1:0] v;
    for (int w = 0; w < LINE_BITS / 32; w++) v[w*32 +: 32] = $urandom;
    return v;
  endfunction

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int errs;
    repeat (2) @(negedge clk);
    rst_n = 1;
    // 1. no request before the profile is loaded
    req_valid = 1; req_addr = mk(0, 100, 0);
    repeat (5) begin @(negedge clk); chk(!req_ready, "ready before init_done"); end
    req_valid = 0;
    init_done = 1;

    // 2a. activation-fast line: ACT -> WR = 5
    send(mk(0, 100, 0), 1, rnd(), 0); settle();
    chk(t_col - t_act == TRCD_FAST, $sformatf("fast tRCD gap %0d", t_col - t_act));
    // 2b. activation-slow line (column 32) in a closed bank: gap 9
    send(mk(1, 100, 33), 1, rnd(), 1); settle();
    chk(t_col - t_act == TRCD_STD, $sformatf("slow tRCD gap %0d", t_col - t_act));
    // 2c. row conflict in bank 0 towards a precharge-slow row (2600): tRP 9
    send(mk(0, 2600, 1), 1, rnd(), 2); settle();
    chk(t_act - t_pre == TRP_STD, $sformatf("slow tRP gap %0d", t_act - t_pre));
    chk(t_col - t_act == TRCD_FAST, $sformatf("tRCD after conflict %0d", t_col - t_act));
    // 2d. back to row 100 immediately: PRE waits tRAS (18, row 2600 is
    // restoration-fast) after the ACT, then ACT after a fast tRP of 5
    send(mk(0, 100, 2), 1, rnd(), 3);
    send(mk(0, 2600, 3), 1, rnd(), 4);
    settle();
    chk(t_act - t_pre == TRP_STD, $sformatf("tRP gap back to 2600 %0d", t_act - t_pre));
    send(mk(0, 100, 4), 1, rnd(), 5); settle();
    chk(t_act - t_pre == TRP_FAST, $sformatf("fast tRP gap %0d", t_act - t_pre));
    // 2e. read latency: response TCL + burst after READ, +1 for registering
    send(mk(0, 100, 4), 0, '0, 6); settle();
    chk(t_resp - t_rd == TCL + TBURST + 1, $sformatf("read latency %0d", t_resp - t_rd));
    // 2f. restoration-slow row (bank 7, rows 1024..1535): PRE >= ACT + 24
    send(mk(7, 1100, 0), 1, rnd(), 7);
    send(mk(7, 5000, 0), 1, rnd(), 8); settle();
    // 2g. baseline: fast line uses the standard tRCD
    fly_enable = 0;
    send(mk(2, 100, 0), 1, rnd(), 9); settle();
    chk(t_col - t_act == TRCD_STD, $sformatf("baseline tRCD gap %0d", t_col - t_act));
    fly_enable = 1;

    // 3. random traffic
    for (int n = 0; n < 600; n++) begin
      int b, r, c;
      logic [AW-1:0] a;
      b = $urandom % 8;
      r = (($urandom % 4) == 0) ? 2600 + ($urandom % 2) : 100 + 1000 * ($urandom % 3);
      c = ($urandom % 3 == 0) ? 32 + ($urandom % 4) : $urandom % 6;
      a = mk(b, r, c);
      if (!ref_mem.exists(longint'(a)) || ($urandom % 3 == 0)) send(a, 1, rnd(), n % 256);
      else send(a, 0, '0, n % 256);
    end
    for (int k = 0; k < 5000 && exp_id.size() != 0; k++) @(posedge clk);
    settle();
    chk(exp_id.size() == 0, "responses missing");
    chk(n_resp > 120, $sformatf("only %0d reads", n_resp));
    errs = u_dram.timing_errors;
    chk(errs == 0, $sformatf("%0d timing errors", errs));
    chk(u_dram.protocol_errors == 0, $sformatf("%0d protocol errors", u_dram.protocol_errors));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
