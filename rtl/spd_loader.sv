// spd_loader: copies a DIMM's latency profile from its SPD ROM into the
// on-chip latency profile table during DRAM initialization.
//
// After reset it reads NENTRY bytes from the SPD ROM, starting at byte
// PROFILE_BASE, one outstanding read at a time: it raises rom_req with
// rom_addr for one cycle and waits for rom_valid. Byte k holds the entry of
// region k in its low three bits ({tRAS, tRP, tRCD} fast flags, upper bits
// ignored); each returned byte is written straight into the table, and the
// next read is issued in the same cycle, so a ROM with one cycle of latency
// delivers one entry per cycle. When the last entry is written, done rises
// and stays high until the next reset; the channel controller accepts no
// request before that.
//
// FLY-DRAM only states that the controller reads the profile from the SPD at
// initialization. The parallel request/valid ROM port (standing in for the
// SPD's serial bus), the one-entry-per-byte format and the placement after
// the 256 standard DDR3 SPD bytes are this design's choices.
module spd_loader
  import fly_pkg::*;
#(
  parameter int unsigned NENTRY       = NUM_BANKS * (NUM_ROWS / ROWS_PER_REGION)
                                        * (LINES_PER_ROW / LINES_PER_REGION),
  parameter int unsigned PROFILE_BASE = 256,
  parameter int unsigned ROM_AW       = $clog2(PROFILE_BASE + NENTRY),
  localparam int unsigned IW = $clog2(NENTRY)
) (
  input  logic              clk,
  input  logic              rst_n,
  // SPD ROM read port
  output logic              rom_req,
  output logic [ROM_AW-1:0] rom_addr,
  input  logic              rom_valid,
  input  logic [7:0]        rom_data,
  // latency profile table write port
  output logic              tbl_we,
  output logic [IW-1:0]     tbl_idx,
  output lat_entry_t        tbl_entry,
  output logic              done
);

  typedef enum logic [1:0] {S_ISSUE, S_WAIT, S_DONE} state_e;

  state_e          state;
  logic [IW-1:0]   rd_idx;   // entry whose byte is requested / awaited
  logic            last;

  assign last = (rd_idx == IW'(NENTRY - 1));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state  <= S_ISSUE;
      rd_idx <= '0;
    end else begin
      unique case (state)
        S_ISSUE: state <= S_WAIT;
        S_WAIT: if (rom_valid) begin
          if (last) state <= S_DONE;
          else begin
            rd_idx <= rd_idx + 1'b1;
            state  <= S_WAIT;     // next read issued in this same cycle
          end
        end
        default: state <= S_DONE;
      endcase
    end
  end

  always_comb begin
    rom_req  = (state == S_ISSUE) || (state == S_WAIT && rom_valid && !last);
    rom_addr = (state == S_ISSUE) ? ROM_AW'(PROFILE_BASE) + ROM_AW'(rd_idx)
                                  : ROM_AW'(PROFILE_BASE) + ROM_AW'(rd_idx) + 1'b1;
    tbl_we    = (state == S_WAIT) && rom_valid;
    tbl_idx   = rd_idx;
    tbl_entry = lat_entry_t'(rom_data[2:0]);
    done      = (state == S_DONE);
  end

endmodule
