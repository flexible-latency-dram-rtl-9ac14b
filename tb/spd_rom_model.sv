// spd_rom_model: behavioural model of a DIMM's Serial Presence Detect ROM
// holding a FLY-DRAM latency profile, seen through a simple parallel read
// port. A read requested with req/addr returns data with valid LAT cycles
// later (one read in flight at a time). Bytes below PROFILE_BASE stand for the standard SPD contents; byte
// PROFILE_BASE+k holds region k's profile entry in its low three bits, with
// the upper five bits set to a filler pattern the controller must ignore.
module spd_rom_model
  import fly_pkg::*;
  import tb_profile_pkg::*;
#(
  parameter int CH           = 0,
  parameter int PROFILE_BASE = 256,
  parameter int NRG          = NUM_ROWS / ROWS_PER_REGION,
  parameter int NLG          = LINES_PER_ROW / LINES_PER_REGION,
  parameter int AW           = 13,
  parameter int LAT          = 1
) (
  input  logic          clk,
  input  logic          req,
  input  logic [AW-1:0] addr,
  output logic          valid,
  output logic [7:0]    data
);
  int         cnt = 0;
  logic [7:0] held = '0;

  function automatic logic [7:0] rom(int a);
    if (a < PROFILE_BASE) return 8'(a * 7 + 3);
    return {5'b10110, 3'(prof_idx(CH, a - PROFILE_BASE, NRG, NLG))};
  endfunction

  // one read in flight at a time
  always @(posedge clk) begin
    if (req) begin held <= rom(int'(addr)); cnt <= LAT; end
    else if (cnt != 0) cnt <= cnt - 1;
  end
  assign valid = (cnt == 1);
  assign data  = held;
endmodule
