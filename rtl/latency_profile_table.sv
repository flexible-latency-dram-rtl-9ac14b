// latency_profile_table: on-chip SRAM holding the latency profile of one
// DIMM, one lat_entry_t (three fast/slow bits: tRCD, tRP, tRAS) per region.
//
// FLY-DRAM fills this table from the DIMM's SPD ROM at boot and then reads it
// for every memory request. It is written as a plain array with one write
// port (used only by the boot loader) and one synchronous read port: the entry
// addressed in cycle t appears on rd_entry in cycle t+1. The contents are not
// reset; nothing may read them before the loader has finished.
//
// Default size: 8 banks x 32 row groups x 16 column groups = 4096 entries of
// 3 bits (12 Kbit) per channel. The region size is this design's choice.
module latency_profile_table
  import fly_pkg::*;
#(
  parameter int unsigned DEPTH = NUM_BANKS * (NUM_ROWS / ROWS_PER_REGION)
                                 * (LINES_PER_ROW / LINES_PER_REGION),
  localparam int unsigned IW = $clog2(DEPTH)
) (
  input  logic            clk,
  input  logic            wr_en,
  input  logic [IW-1:0]   wr_idx,
  input  lat_entry_t      wr_entry,
  input  logic            rd_en,
  input  logic [IW-1:0]   rd_idx,
  output lat_entry_t      rd_entry
);

  lat_entry_t mem [DEPTH];

  always_ff @(posedge clk) begin
    if (wr_en) mem[wr_idx] <= wr_entry;
    if (rd_en) rd_entry <= mem[rd_idx];
  end

endmodule
