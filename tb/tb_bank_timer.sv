// tb_bank_timer: drives one bank_timer with a random stream of legal
// ACTIVATE/READ/WRITE/PRECHARGE commands and random per-request timings
// (tRCD and tRP of 5 or 9 cycles, tRAS of 18 or 24). Every cycle it
// compares is_open, open_row, act_ok, col_ok and pre_ok with a reference
// built from the cycle numbers of the last commands, so the exact cycle in
// which each timing is met (ACTIVATE + tRCD, ACTIVATE + tRAS, PRECHARGE + tRP,
// READ + tRTP = 5, WRITE + 21) is checked.
module tb_bank_timer;
  import fly_pkg::*;
  logic clk = 0, rst_n = 0;
  always #2 clk = ~clk;
  dram_cmd_e   cmd = CMD_NOP;
  logic [13:0] cmd_row = 0;
  logic [5:0]  cmd_tras = 18, req_trcd = 5, req_trp = 5;
  logic        is_open, act_ok, col_ok, pre_ok;
  logic [13:0] open_row;
  int checks = 0, failures = 0;
  int n_act = 0, n_col = 0, n_pre = 0;

  bank_timer dut (.*);

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int now = 0, l_act = -1000, l_pre = -1000, l_rd = -1000, l_wr = -1000, tras = 0, orow = 0;
    bit open = 0, e_act, e_col, e_pre;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (now = 0; now < 6000; now++) begin
      // new request timings, then compare (outputs are combinational in these)
      req_trcd = ($urandom % 2) ? 5 : 9;
      req_trp  = ($urandom % 2) ? 5 : 9;
      cmd_tras = ($urandom % 2) ? 18 : 24;
      cmd_row  = 14'($urandom);
      #0.5;
      e_act = !open && (now - l_pre >= int'(req_trp));
      e_col = open && (now - l_act >= int'(req_trcd));
      e_pre = open && (now - l_act >= tras) && (now - l_rd >= 5) && (now - l_wr >= 21);
      checks++;
      if (is_open != open || (open && open_row != 14'(orow)) || act_ok != e_act ||
          col_ok != e_col || pre_ok != e_pre) begin
        failures++;
        $display("FAIL cycle %0d: open %0d/%0d act %0d/%0d col %0d/%0d pre %0d/%0d", now,
                 is_open, open, act_ok, e_act, col_ok, e_col, pre_ok, e_pre);
      end
      // pick a legal command (sometimes none)
      cmd = CMD_NOP;
      if (e_act && $urandom % 3 == 0) begin
        cmd = CMD_ACT; open = 1; l_act = now; tras = int'(cmd_tras); orow = int'(cmd_row); n_act++;
      end else if (e_pre && $urandom % 2 == 0) begin
        cmd = CMD_PRE; open = 0; l_pre = now; n_pre++;
      end else if (e_col && $urandom % 6 == 0) begin
        cmd = ($urandom % 2) ? CMD_RD : CMD_WR; n_col++;
        if (cmd == CMD_RD) l_rd = now; else l_wr = now;
      end
      @(negedge clk);
    end
    checks++;
    if (n_act < 50 || n_col < 50 || n_pre < 50) begin
      failures++; $display("FAIL too few commands %0d %0d %0d", n_act, n_col, n_pre);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
