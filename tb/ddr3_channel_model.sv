// ddr3_channel_model: behavioural model of one DDR3 channel (PHY plus a
// single-rank DIMM) with latency variation.
//
// It executes ACTIVATE/READ/WRITE/PRECHARGE from the controller's command
// port, stores written lines, and returns each read line on rd_valid/rd_data
// TCL + TBURST cycles after the READ. Every cell region has a true minimum
// tRCD/tRP/tRAS taken from tb_profile_pkg (reduced where the profile marks it
// fast, standard otherwise). A command that comes sooner than the true
// latency of its region is a timing violation: it is counted, and a READ
// under a violated tRCD, or from a row opened after a too-short tRP, or
// precharged before tRAS and reopened, returns its line with bit 0 flipped,
// as a real chip would show a bit error. It also counts protocol errors
// (column command to a closed bank or wrong row, ACTIVATE to an open bank).
// Stored data survive a reset.
module ddr3_channel_model
  import fly_pkg::*;
  import tb_profile_pkg::*;
#(
  parameter int CH     = 0,
  parameter int NBANK  = NUM_BANKS,
  parameter int NROW   = NUM_ROWS,
  parameter int NLINE  = LINES_PER_ROW,
  parameter int RPR    = ROWS_PER_REGION,
  parameter int LPR    = LINES_PER_REGION,
  localparam int BW = $clog2(NBANK),
  localparam int RW = $clog2(NROW),
  localparam int LW = $clog2(NLINE)
) (
  input  logic                 clk,
  input  logic                 rst_n,   // low: DIMM re-initialized, all banks precharged
  input  dram_cmd_e            cmd,
  input  logic [BW-1:0]        bank,
  input  logic [RW-1:0]        row,
  input  logic [LW-1:0]        col,
  input  logic [LINE_BITS-1:0] wdata,
  output logic                 rd_valid,
  output logic [LINE_BITS-1:0] rd_data
);
  int unsigned timing_errors = 0;   // violations of a region's true latency
  int unsigned protocol_errors = 0;
  int unsigned corrupted_reads = 0;
  longint unsigned cyc = 0;

  logic [LINE_BITS-1:0] mem [longint];
  bit        open_q    [NBANK];
  int        orow      [NBANK];
  longint    t_act     [NBANK];
  longint    t_pre     [NBANK];
  bit        row_bad   [NBANK];   // open row sensed after too-short tRP
  bit        restore_bad[longint]; // rows closed before their tRAS

  typedef struct { longint due; logic [LINE_BITS-1:0] d; } rd_t;
  rd_t rq[$];

  function automatic lat_entry_t truth(int b, int r, int c);
    return prof(CH, b, r / RPR, c / LPR);
  endfunction

  function automatic logic [LINE_BITS-1:0] init_line(longint key);
    return {16{32'(key * 32'h9E3779B1 + 32'h1234)}};
  endfunction

  initial begin
    for (int b = 0; b < NBANK; b++) begin
      open_q[b] = 0; orow[b] = 0; t_act[b] = -1000; t_pre[b] = -1000; row_bad[b] = 0;
    end
    rd_valid = 0;
    rd_data  = '0;
  end

  always @(posedge clk) begin
    longint key;
    lat_entry_t e;
    cyc <= cyc + 1;
    rd_valid <= 0;
    if (!rst_n) begin
      for (int b = 0; b < NBANK; b++) begin open_q[b] = 0; row_bad[b] = 0; t_pre[b] = -1000; end
      rq.delete();
    end else begin
    if (rq.size() > 0 && rq[0].due <= longint'(cyc)) begin
      rd_valid <= 1;
      rd_data  <= rq[0].d;
      void'(rq.pop_front());
    end
    case (cmd)
      CMD_ACT: begin
        e = truth(int'(bank), int'(row), 0);
        if (open_q[bank]) protocol_errors++;
        row_bad[bank] = 0;
        if (longint'(cyc) - t_pre[bank] < (e.rp_fast ? TRP_FAST : TRP_STD)) begin
          timing_errors++; row_bad[bank] = 1;
        end
        key = longint'(bank) * NROW + longint'(row);
        if (restore_bad.exists(key)) begin row_bad[bank] = 1; restore_bad.delete(key); end
        open_q[bank] = 1; orow[bank] = int'(row); t_act[bank] = longint'(cyc);
      end
      CMD_PRE: begin
        e = truth(int'(bank), orow[bank], 0);
        if (!open_q[bank]) protocol_errors++;
        if (longint'(cyc) - t_act[bank] < (e.ras_fast ? TRAS_FAST : TRAS_STD)) begin
          timing_errors++;
          restore_bad[longint'(bank) * NROW + longint'(orow[bank])] = 1;
        end
        open_q[bank] = 0; t_pre[bank] = longint'(cyc);
      end
      CMD_RD, CMD_WR: begin
        rd_t r;
        bit  bad;
        e = truth(int'(bank), orow[bank], int'(col));
        if (!open_q[bank] || orow[bank] != int'(row)) protocol_errors++;
        bad = row_bad[bank];
        if (longint'(cyc) - t_act[bank] < (e.rcd_fast ? TRCD_FAST : TRCD_STD)) begin
          timing_errors++; bad = 1;
        end
        key = (longint'(bank) * NROW + longint'(row)) * NLINE + longint'(col);
        if (cmd == CMD_WR) mem[key] = wdata;
        else begin
          r.due = longint'(cyc) + TCL + TBURST;
          r.d   = mem.exists(key) ? mem[key] : init_line(key);
          if (bad) begin r.d[0] = ~r.d[0]; corrupted_reads++; end
          rq.push_back(r);
        end
      end
      default: ;
    endcase
    end
  end
endmodule
