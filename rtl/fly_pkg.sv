// fly_pkg: shared constants and types of the Flexible-Latency DRAM (FLY-DRAM)
// memory controller.
//
// The controller runs at the DDR3-1333 command clock (667 MHz, tCK = 1.5 ns),
// so every timing below is a count of controller cycles. Standard values are
// the DDR3-1333H baseline (tRCD = tCL = tRP = 13.125 ns, tRAS = 36 ns, rounded
// up to whole cycles). Reduced values are those applied to fast regions:
// tRCD and tRP cut by 42.8 % (7.5 ns) and tRAS by 25 % (27 ns). Both sets come
// from the published FLY-DRAM evaluation. The column-to-column, read/write
// turnaround and write-recovery spacings are not part of FLY-DRAM; they are
// standard DDR3-1333 values chosen here so that the command stream is legal.
//
// Geometry (per channel: one rank, 8 banks, 16K rows, 8 KB rows holding 128
// cache lines of 64 B) follows the evaluated system and the tested DIMMs.
package fly_pkg;

  // ---------------------------------------------------------------- geometry
  localparam int unsigned NUM_CHANNELS  = 2;
  localparam int unsigned NUM_BANKS     = 8;
  localparam int unsigned NUM_ROWS      = 16384;
  localparam int unsigned LINES_PER_ROW = 128;
  localparam int unsigned LINE_BYTES    = 64;
  localparam int unsigned LINE_BITS     = LINE_BYTES * 8;

  localparam int unsigned BANK_W = $clog2(NUM_BANKS);
  localparam int unsigned ROW_W  = $clog2(NUM_ROWS);
  localparam int unsigned COL_W  = $clog2(LINES_PER_ROW);
  localparam int unsigned CH_W   = (NUM_CHANNELS > 1) ? $clog2(NUM_CHANNELS) : 1;
  localparam int unsigned OFF_W  = $clog2(LINE_BYTES);
  // physical address: {row, bank, column, channel, byte offset}
  localparam int unsigned ADDR_W = ROW_W + BANK_W + COL_W
                                 + ((NUM_CHANNELS > 1) ? $clog2(NUM_CHANNELS) : 0) + OFF_W;

  // ------------------------------------------------- latency region geometry
  // A region is a block of ROWS_PER_REGION adjacent rows by LINES_PER_REGION
  // adjacent cache lines inside one bank.
  localparam int unsigned ROWS_PER_REGION  = 512;
  localparam int unsigned LINES_PER_REGION = 8;

  // ------------------------------------------------------- timing (cycles)
  localparam int unsigned TIME_W     = 6;   // width of every timing value/counter
  localparam int unsigned TRCD_STD   = 9;   // 13.125 ns
  localparam int unsigned TRP_STD    = 9;   // 13.125 ns
  localparam int unsigned TRAS_STD   = 24;  // 36 ns
  localparam int unsigned TCL        = 9;   // 13.125 ns (not varied by FLY-DRAM)
  localparam int unsigned TRCD_FAST  = 5;   // 7.5 ns
  localparam int unsigned TRP_FAST   = 5;   // 7.5 ns
  localparam int unsigned TRAS_FAST  = 18;  // 27 ns
  // DDR3-1333 spacings outside FLY-DRAM (BL8 burst = 4 cycles)
  localparam int unsigned TBURST     = 4;   // data burst length in cycles
  localparam int unsigned TCCD       = 4;   // column to column
  localparam int unsigned TRTP       = 5;   // read to precharge
  localparam int unsigned TWR2PRE    = 21;  // write to precharge: tCWL 7 + burst 4 + tWR 10
  localparam int unsigned TRD2WR     = 8;   // read to write turnaround
  localparam int unsigned TWR2RD     = 16;  // write to read: tCWL 7 + burst 4 + tWTR 5

  // --------------------------------------------------------------- types
  typedef enum logic [2:0] {
    CMD_NOP = 3'd0,
    CMD_ACT = 3'd1,
    CMD_RD  = 3'd2,
    CMD_WR  = 3'd3,
    CMD_PRE = 3'd4
  } dram_cmd_e;

  // One latency profile entry per region. A set bit marks the region as able
  // to run the corresponding operation at the reduced latency. Stored in the
  // low three bits of one SPD byte.
  typedef struct packed {
    logic ras_fast;  // bit 2: restoration (tRAS)
    logic rp_fast;   // bit 1: precharge   (tRP)
    logic rcd_fast;  // bit 0: activation  (tRCD)
  } lat_entry_t;

  typedef struct packed {
    logic [TIME_W-1:0] trcd;
    logic [TIME_W-1:0] trp;
    logic [TIME_W-1:0] tras;
  } timing_t;

  // Single-cycle event pulses reported by a channel controller.
  typedef struct packed {
    logic act;        // ACTIVATE issued
    logic act_fast;   // ... whose request used the reduced tRCD
    logic act_fast_rp;// ... that waited only the reduced tRP after a precharge
    logic pre;        // PRECHARGE issued (row conflict under the open-row policy)
    logic rd;         // READ issued
    logic wr;         // WRITE issued
    logic row_hit;    // column command to an already open row, no ACTIVATE needed
  } chan_events_t;

endpackage
