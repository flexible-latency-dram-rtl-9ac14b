// bank_timer: state and timing bookkeeping of one DRAM bank, with timings
// that vary from request to request.
//
// The bank is either closed (precharged) or open with one row in its row
// buffer. Saturating counters give the cycles since the last ACTIVATE,
// PRECHARGE, READ and WRITE to this bank. Because FLY-DRAM gives every region
// its own latencies, the checks compare these counters with the timings of
// the request being scheduled rather than with fixed constants:
//   act_ok : closed, and cycles since PRECHARGE >= req_trp. The tRP needed is
//            that of the row about to be opened, since a too-short precharge
//            corrupts the sensing of the next row.
//   col_ok : open, and cycles since ACTIVATE >= req_trcd, the tRCD of the cache
//            line being accessed. A reduced tRCD only endangers the first line
//            read after activation, so checking each column command against
//            its own line's tRCD is exact.
//   pre_ok : open, cycles since ACTIVATE >= the tRAS latched when the row was
//            opened (restoration applies to the whole row), and read-to-
//            precharge and write-recovery spacing met.
// Commands take effect at the clock edge of the cycle they are issued in. On
// reset the bank is closed with every counter saturated (an initialized
// DRAM is precharged and idle).
module bank_timer
  import fly_pkg::*;
#(
  parameter int unsigned RW       = ROW_W,
  parameter int unsigned RTP      = TRTP,
  parameter int unsigned WR2PRE   = TWR2PRE
) (
  input  logic              clk,
  input  logic              rst_n,
  input  dram_cmd_e         cmd,       // command issued to this bank this cycle
  input  logic [RW-1:0]     cmd_row,   // row of an ACTIVATE
  input  logic [TIME_W-1:0] cmd_tras,  // tRAS to hold the row opened by an ACTIVATE
  input  logic [TIME_W-1:0] req_trcd,  // timings of the request being scheduled
  input  logic [TIME_W-1:0] req_trp,
  output logic              is_open,
  output logic [RW-1:0]     open_row,
  output logic              act_ok,
  output logic              col_ok,
  output logic              pre_ok
);

  localparam logic [TIME_W-1:0] SAT = '1;

  logic [TIME_W-1:0] since_act, since_pre, since_rd, since_wr, tras_q;

  function automatic logic [TIME_W-1:0] inc(input logic [TIME_W-1:0] v);
    return (v == SAT) ? v : v + 1'b1;
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      is_open   <= 1'b0;
      open_row  <= '0;
      tras_q    <= '0;
      since_act <= SAT;
      since_pre <= SAT;
      since_rd  <= SAT;
      since_wr  <= SAT;
    end else begin
      since_act <= (cmd == CMD_ACT) ? TIME_W'(1) : inc(since_act);
      since_pre <= (cmd == CMD_PRE) ? TIME_W'(1) : inc(since_pre);
      since_rd  <= (cmd == CMD_RD)  ? TIME_W'(1) : inc(since_rd);
      since_wr  <= (cmd == CMD_WR)  ? TIME_W'(1) : inc(since_wr);
      if (cmd == CMD_ACT) begin
        is_open  <= 1'b1;
        open_row <= cmd_row;
        tras_q   <= cmd_tras;
      end else if (cmd == CMD_PRE) begin
        is_open  <= 1'b0;
      end
    end
  end

  always_comb begin
    act_ok = !is_open && (since_pre >= req_trp);
    col_ok =  is_open && (since_act >= req_trcd);
    pre_ok =  is_open && (since_act >= tras_q)
                      && (since_rd >= TIME_W'(RTP))
                      && (since_wr >= TIME_W'(WR2PRE));
  end

endmodule
