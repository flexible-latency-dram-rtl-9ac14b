// addr_mapper: splits a physical byte address into DRAM coordinates and the
// index of the latency region that the addressed cache line belongs to.
//
// Address layout (low to high): 6-bit byte offset in the 64 B cache line,
// channel bit(s), 7-bit cache-line column, 3-bit bank, 14-bit row. Placing the
// column below the bank keeps consecutive cache lines in one open row, which
// suits the open-row policy. The layout itself is this design's choice.
//
// A latency region is ROWS_PER_REGION adjacent rows by LINES_PER_REGION
// adjacent cache lines of one bank; regions are numbered
// {bank, row / ROWS_PER_REGION, column / LINES_PER_REGION}. FLY-DRAM keeps
// one profile entry per region instead of per cache line to bound storage,
// relying on slow cells clustering in space. Every size must be a power of two.
//
// Purely combinational.
module addr_mapper
  import fly_pkg::*;
#(
  parameter int unsigned NCH        = NUM_CHANNELS,
  parameter int unsigned NBANK      = NUM_BANKS,
  parameter int unsigned NROW       = NUM_ROWS,
  parameter int unsigned NLINE      = LINES_PER_ROW,
  parameter int unsigned LBYTES     = LINE_BYTES,
  parameter int unsigned ROWS_PER_R = ROWS_PER_REGION,
  parameter int unsigned LINES_PER_R= LINES_PER_REGION,
  localparam int unsigned OW  = $clog2(LBYTES),
  localparam int unsigned CHB = (NCH > 1) ? $clog2(NCH) : 0,
  localparam int unsigned CW  = (NCH > 1) ? $clog2(NCH) : 1,
  localparam int unsigned LW  = $clog2(NLINE),
  localparam int unsigned BW  = $clog2(NBANK),
  localparam int unsigned RW  = $clog2(NROW),
  localparam int unsigned AW  = OW + CHB + LW + BW + RW,
  localparam int unsigned RGW = $clog2(NROW / ROWS_PER_R),
  localparam int unsigned LGW = $clog2(NLINE / LINES_PER_R),
  localparam int unsigned IW  = BW + RGW + LGW
) (
  input  logic [AW-1:0] addr,
  output logic [CW-1:0] channel,
  output logic [BW-1:0] bank,
  output logic [RW-1:0] row,
  output logic [LW-1:0] col,
  output logic [IW-1:0] region
);

  always_comb begin
    if (CHB > 0) channel = CW'(addr >> OW);
    else         channel = '0;
    col  = addr[OW+CHB +: LW];
    bank = addr[OW+CHB+LW +: BW];
    row  = addr[OW+CHB+LW+BW +: RW];
  end

  // region = {bank, row group, column group}
  if (RGW > 0 && LGW > 0) begin : g_rl
    assign region = {bank, row[RW-1 -: RGW], col[LW-1 -: LGW]};
  end else if (RGW > 0) begin : g_r
    assign region = {bank, row[RW-1 -: RGW]};
  end else if (LGW > 0) begin : g_l
    assign region = {bank, col[LW-1 -: LGW]};
  end else begin : g_b
    assign region = bank;
  end

endmodule
