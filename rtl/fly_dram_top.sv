// fly_dram_top: Flexible-Latency DRAM (FLY-DRAM) memory controller for a
// system with NCH DDR3 channels, one single-rank DIMM per channel.
//
// FLY-DRAM exploits the fact that, inside one DRAM chip, cells that need the
// full standard activation (tRCD), precharge (tRP) and restoration (tRAS)
// latencies cluster in a few regions, while the rest work reliably with much
// shorter ones. The controller therefore
//   (1) at boot, copies each DIMM's per-region latency profile from the DIMM's
//       SPD ROM into an on-chip SRAM (spd_loader -> latency_profile_table),
//   (2) looks up the profile entry of every request from its address
//       (addr_mapper, inside the channel controller), and
//   (3) schedules the request's ACTIVATE/column/PRECHARGE commands with the
//       reduced timings where the profile allows (timing_select, bank_timer).
//
// Interface. One request port (valid/ready; a request must hold still while
// valid is high and ready low) is steered to a channel by the channel bit of
// the address; req_ready reflects the addressed channel. Each channel has its
// own SPD ROM read port, DRAM command port and read-data input (the PHY and
// DIMM sit outside) and its own read-response outputs. init_done rises once
// every channel's profile is loaded; no request is accepted before that.
// fly_enable = 0 makes every request use the standard DDR3-1333H timings.
//
// Sizes default to the evaluated system: 2 channels, 8 banks, 16K rows of
// 128 cache lines. Region size, queue depths and the tag width are this
// design's choices (see fly_pkg and channel_controller).
module fly_dram_top
  import fly_pkg::*;
#(
  parameter int unsigned NCH          = NUM_CHANNELS,
  parameter int unsigned NBANK        = NUM_BANKS,
  parameter int unsigned NROW         = NUM_ROWS,
  parameter int unsigned NLINE        = LINES_PER_ROW,
  parameter int unsigned ROWS_PER_R   = ROWS_PER_REGION,
  parameter int unsigned LINES_PER_R  = LINES_PER_REGION,
  parameter int unsigned QDEPTH       = 32,
  parameter int unsigned ID_W         = 8,
  parameter int unsigned PROFILE_BASE = 256,
  localparam int unsigned DW  = LINE_BITS,
  localparam int unsigned OW  = $clog2(LINE_BYTES),
  localparam int unsigned CHB = (NCH > 1) ? $clog2(NCH) : 0,
  localparam int unsigned CW  = (NCH > 1) ? $clog2(NCH) : 1,
  localparam int unsigned LW  = $clog2(NLINE),
  localparam int unsigned BW  = $clog2(NBANK),
  localparam int unsigned RW  = $clog2(NROW),
  localparam int unsigned AW  = OW + CHB + LW + BW + RW,
  localparam int unsigned NENTRY = NBANK * (NROW / ROWS_PER_R) * (NLINE / LINES_PER_R),
  localparam int unsigned IW  = $clog2(NENTRY),
  localparam int unsigned SAW = $clog2(PROFILE_BASE + NENTRY)
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                fly_enable,
  output logic                init_done,
  // requests (from the last-level cache)
  input  logic                req_valid,
  output logic                req_ready,
  input  logic [AW-1:0]       req_addr,
  input  logic                req_we,
  input  logic [DW-1:0]       req_wdata,
  input  logic [ID_W-1:0]     req_id,
  // read responses, one port per channel
  output logic [NCH-1:0]      resp_valid,
  output logic [ID_W-1:0]     resp_id   [NCH],
  output logic [DW-1:0]       resp_data [NCH],
  // SPD ROM of each DIMM
  output logic [NCH-1:0]      spd_req,
  output logic [SAW-1:0]      spd_addr  [NCH],
  input  logic [NCH-1:0]      spd_valid,
  input  logic [7:0]          spd_data  [NCH],
  // DRAM command/data ports towards each channel's PHY
  output dram_cmd_e           dram_cmd  [NCH],
  output logic [BW-1:0]       dram_bank [NCH],
  output logic [RW-1:0]       dram_row  [NCH],
  output logic [LW-1:0]       dram_col  [NCH],
  output logic [DW-1:0]       dram_wdata[NCH],
  input  logic [NCH-1:0]      dram_rd_valid,
  input  logic [DW-1:0]       dram_rd_data [NCH],
  // per-channel event pulses
  output chan_events_t        events    [NCH]
);

  // channel select
  logic [CW-1:0] sel_ch;
  logic [BW-1:0] sel_bank_unused;
  logic [RW-1:0] sel_row_unused;
  logic [LW-1:0] sel_col_unused;
  logic [IW-1:0] sel_region_unused;

  addr_mapper #(
    .NCH(NCH), .NBANK(NBANK), .NROW(NROW), .NLINE(NLINE), .LBYTES(LINE_BYTES),
    .ROWS_PER_R(ROWS_PER_R), .LINES_PER_R(LINES_PER_R)
  ) u_route (
    .addr(req_addr), .channel(sel_ch), .bank(sel_bank_unused), .row(sel_row_unused),
    .col(sel_col_unused), .region(sel_region_unused)
  );

  logic [NCH-1:0] ch_ready, ch_done;

  assign req_ready = ch_ready[sel_ch];
  assign init_done = &ch_done;

  for (genvar c = 0; c < NCH; c++) begin : g_ch
    logic       tbl_we, lut_rd_en;
    logic [IW-1:0] tbl_idx, lut_rd_idx;
    lat_entry_t tbl_entry, lut_rd_entry;

    spd_loader #(.NENTRY(NENTRY), .PROFILE_BASE(PROFILE_BASE), .ROM_AW(SAW)) u_loader (
      .clk, .rst_n,
      .rom_req(spd_req[c]), .rom_addr(spd_addr[c]),
      .rom_valid(spd_valid[c]), .rom_data(spd_data[c]),
      .tbl_we, .tbl_idx, .tbl_entry, .done(ch_done[c])
    );

    latency_profile_table #(.DEPTH(NENTRY)) u_table (
      .clk,
      .wr_en(tbl_we), .wr_idx(tbl_idx), .wr_entry(tbl_entry),
      .rd_en(lut_rd_en), .rd_idx(lut_rd_idx), .rd_entry(lut_rd_entry)
    );

    channel_controller #(
      .NBANK(NBANK), .NROW(NROW), .NLINE(NLINE), .NCH(NCH),
      .ROWS_PER_R(ROWS_PER_R), .LINES_PER_R(LINES_PER_R),
      .QDEPTH(QDEPTH), .ID_W(ID_W)
    ) u_chan (
      .clk, .rst_n,
      .init_done (init_done),
      .fly_enable,
      .req_valid (req_valid && (sel_ch == CW'(c))),
      .req_ready (ch_ready[c]),
      .req_addr, .req_we, .req_wdata, .req_id,
      .lut_rd_en, .lut_rd_idx, .lut_rd_entry,
      .cmd       (dram_cmd[c]),
      .cmd_bank  (dram_bank[c]),
      .cmd_row   (dram_row[c]),
      .cmd_col   (dram_col[c]),
      .cmd_wdata (dram_wdata[c]),
      .rd_valid  (dram_rd_valid[c]),
      .rd_data   (dram_rd_data[c]),
      .resp_valid(resp_valid[c]),
      .resp_id   (resp_id[c]),
      .resp_data (resp_data[c]),
      .events    (events[c])
    );
  end

  // a request must be held until accepted
  a_req_stable: assert property (@(posedge clk) disable iff (!rst_n)
    req_valid && !req_ready |=> req_valid && $stable(req_addr) && $stable(req_we)
                                && $stable(req_id));

endmodule
