// channel_controller: FLY-DRAM controller for one DDR3 channel (one rank,
// NBANK banks).
//
// Request path. A request (address, read/write, 64 B write data, tag) is
// accepted when req_valid and req_ready are both high. In the accepting cycle
// the address is decoded (addr_mapper) and the request's region index is
// sent to the latency profile table (lut_rd_en/lut_rd_idx); one cycle later
// the returned entry is stored with the request in an in-order queue of QDEPTH
// entries. req_ready is low until the profile has been loaded (init_done) and
// while the queue, counting the request in flight to it, is full.
//
// Scheduling. The request at the head of the queue is served in order with an
// open-row policy: rows stay open after an access. Its profile entry is
// turned into tRCD/tRP/tRAS by timing_select, and one bank_timer per bank
// checks those per-request timings. At most one command is issued per cycle:
//   head row open in its bank  -> READ or WRITE once tRCD and bus spacing allow
//   another row open           -> PRECHARGE once tRAS/tRTP/tWR allow
//   bank closed                -> ACTIVATE once tRP (of the new row) allows
// The column command retires the request. Commands leave on the cmd_* outputs
// one cycle after the decision (registered), so their spacing is unchanged.
//
// Read return. The tag of each READ is queued (RDQ_DEPTH entries; READs stall
// while it is full). The PHY returns each 64 B line with rd_valid, in command
// order; resp_valid/resp_id/resp_data pass it on in that cycle. Writes get no
// response. The consumer of responses cannot stall them.
//
// The address lookup and the per-request timings follow FLY-DRAM. The queue,
// its depth, in-order service, the registered command port and the spacings
// other than tRCD/tRP/tRAS are this design's choices. Refresh is not issued.
module channel_controller
  import fly_pkg::*;
#(
  parameter int unsigned NBANK       = NUM_BANKS,
  parameter int unsigned NROW        = NUM_ROWS,
  parameter int unsigned NLINE       = LINES_PER_ROW,
  parameter int unsigned NCH         = NUM_CHANNELS,
  parameter int unsigned ROWS_PER_R  = ROWS_PER_REGION,
  parameter int unsigned LINES_PER_R = LINES_PER_REGION,
  parameter int unsigned QDEPTH      = 32,
  parameter int unsigned RDQ_DEPTH   = 8,
  parameter int unsigned ID_W        = 8,
  parameter int unsigned DW          = LINE_BITS,
  localparam int unsigned OW  = $clog2(LINE_BYTES),
  localparam int unsigned CHB = (NCH > 1) ? $clog2(NCH) : 0,
  localparam int unsigned CW  = (NCH > 1) ? $clog2(NCH) : 1,
  localparam int unsigned LW  = $clog2(NLINE),
  localparam int unsigned BW  = $clog2(NBANK),
  localparam int unsigned RW  = $clog2(NROW),
  localparam int unsigned AW  = OW + CHB + LW + BW + RW,
  localparam int unsigned IW  = BW + $clog2(NROW / ROWS_PER_R) + $clog2(NLINE / LINES_PER_R)
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic            init_done,   // latency profile loaded
  input  logic            fly_enable,  // 0: standard timings everywhere
  // requests
  input  logic            req_valid,
  output logic            req_ready,
  input  logic [AW-1:0]   req_addr,
  input  logic            req_we,
  input  logic [DW-1:0]   req_wdata,
  input  logic [ID_W-1:0] req_id,
  // latency profile table read port (one cycle latency)
  output logic            lut_rd_en,
  output logic [IW-1:0]   lut_rd_idx,
  input  lat_entry_t      lut_rd_entry,
  // DRAM command port towards the PHY
  output dram_cmd_e       cmd,
  output logic [BW-1:0]   cmd_bank,
  output logic [RW-1:0]   cmd_row,
  output logic [LW-1:0]   cmd_col,
  output logic [DW-1:0]   cmd_wdata,
  // read data from the PHY
  input  logic            rd_valid,
  input  logic [DW-1:0]   rd_data,
  // read responses
  output logic            resp_valid,
  output logic [ID_W-1:0] resp_id,
  output logic [DW-1:0]   resp_data,
  // event pulses
  output chan_events_t    events
);

  typedef struct packed {
    logic            we;
    logic [ID_W-1:0] id;
    logic [DW-1:0]   wdata;
    logic [BW-1:0]   bank;
    logic [RW-1:0]   row;
    logic [LW-1:0]   col;
  } req_t;

  typedef struct packed {
    req_t       r;
    lat_entry_t lat;
  } qent_t;

  localparam int unsigned QPW = $clog2(QDEPTH);
  localparam int unsigned RPW = $clog2(RDQ_DEPTH);

  // ------------------------------------------------------ accept + lookup
  logic [CW-1:0] dec_ch;
  logic [BW-1:0] dec_bank;
  logic [RW-1:0] dec_row;
  logic [LW-1:0] dec_col;
  logic [IW-1:0] dec_region;

  addr_mapper #(
    .NCH(NCH), .NBANK(NBANK), .NROW(NROW), .NLINE(NLINE), .LBYTES(LINE_BYTES),
    .ROWS_PER_R(ROWS_PER_R), .LINES_PER_R(LINES_PER_R)
  ) u_map (
    .addr(req_addr), .channel(dec_ch), .bank(dec_bank), .row(dec_row),
    .col(dec_col), .region(dec_region)
  );

  logic   accept;
  logic   lk_valid;   // request waiting one cycle for its profile entry
  req_t   lk_req;

  logic [QPW:0]   q_count;
  logic [QPW-1:0] q_wp, q_rp;
  qent_t          q_mem [QDEPTH];
  logic           q_push, q_pop;

  assign req_ready  = init_done && ((q_count + (QPW+1)'(lk_valid)) < (QPW+1)'(QDEPTH));
  assign accept     = req_valid && req_ready;
  assign lut_rd_en  = accept;
  assign lut_rd_idx = dec_region;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) lk_valid <= 1'b0;
    else        lk_valid <= accept;
  end

  always_ff @(posedge clk) begin
    if (accept) lk_req <= '{we: req_we, id: req_id, wdata: req_wdata,
                            bank: dec_bank, row: dec_row, col: dec_col};
  end

  // ------------------------------------------------------ request queue
  assign q_push = lk_valid;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      q_count <= '0;
      q_wp    <= '0;
      q_rp    <= '0;
    end else begin
      if (q_push) q_wp <= (q_wp == QPW'(QDEPTH-1)) ? '0 : q_wp + 1'b1;
      if (q_pop)  q_rp <= (q_rp == QPW'(QDEPTH-1)) ? '0 : q_rp + 1'b1;
      q_count <= q_count + (QPW+1)'(q_push) - (QPW+1)'(q_pop);
    end
  end

  always_ff @(posedge clk) begin
    if (q_push) q_mem[q_wp] <= '{r: lk_req, lat: lut_rd_entry};
  end

  // ------------------------------------------------------ scheduler
  qent_t   head;
  logic    head_valid;
  timing_t t;

  assign head       = q_mem[q_rp];
  assign head_valid = (q_count != '0);

  timing_select u_tsel (.fly_enable(fly_enable), .entry(head.lat), .timing(t));

  dram_cmd_e     nxt_cmd;
  logic [NBANK-1:0] b_open, b_act_ok, b_col_ok, b_pre_ok;
  logic [RW-1:0]    b_row [NBANK];

  for (genvar b = 0; b < NBANK; b++) begin : g_bank
    bank_timer #(.RW(RW)) u_bank (
      .clk, .rst_n,
      .cmd      ((head.r.bank == BW'(b)) ? nxt_cmd : CMD_NOP),
      .cmd_row  (head.r.row),
      .cmd_tras (t.tras),
      .req_trcd (t.trcd),
      .req_trp  (t.trp),
      .is_open  (b_open[b]),
      .open_row (b_row[b]),
      .act_ok   (b_act_ok[b]),
      .col_ok   (b_col_ok[b]),
      .pre_ok   (b_pre_ok[b])
    );
  end

  // channel-wide column spacing
  localparam logic [TIME_W-1:0] SAT = '1;
  logic [TIME_W-1:0] ch_since_rd, ch_since_wr;
  logic              bus_ok, hit, head_acted;

  logic [RPW:0]      rdq_count;
  logic [RPW-1:0]    rdq_wp, rdq_rp;
  logic [ID_W-1:0]   rdq_mem [RDQ_DEPTH];

  always_comb begin
    hit = b_open[head.r.bank] && (b_row[head.r.bank] == head.r.row);
    if (head.r.we)
      bus_ok = (ch_since_rd >= TIME_W'(TRD2WR)) && (ch_since_wr >= TIME_W'(TCCD));
    else
      bus_ok = (ch_since_rd >= TIME_W'(TCCD)) && (ch_since_wr >= TIME_W'(TWR2RD))
               && (rdq_count < (RPW+1)'(RDQ_DEPTH));

    nxt_cmd = CMD_NOP;
    if (head_valid) begin
      if (hit) begin
        if (b_col_ok[head.r.bank] && bus_ok) nxt_cmd = head.r.we ? CMD_WR : CMD_RD;
      end else if (b_open[head.r.bank]) begin
        if (b_pre_ok[head.r.bank]) nxt_cmd = CMD_PRE;
      end else if (b_act_ok[head.r.bank]) begin
        nxt_cmd = CMD_ACT;
      end
    end
  end

  assign q_pop = (nxt_cmd == CMD_RD) || (nxt_cmd == CMD_WR);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      ch_since_rd <= SAT;
      ch_since_wr <= SAT;
      head_acted  <= 1'b0;
    end else begin
      ch_since_rd <= (nxt_cmd == CMD_RD) ? TIME_W'(1)
                   : (ch_since_rd == SAT) ? SAT : ch_since_rd + 1'b1;
      ch_since_wr <= (nxt_cmd == CMD_WR) ? TIME_W'(1)
                   : (ch_since_wr == SAT) ? SAT : ch_since_wr + 1'b1;
      if (q_pop)                     head_acted <= 1'b0;
      else if (nxt_cmd == CMD_ACT)   head_acted <= 1'b1;
    end
  end

  // ------------------------------------------------------ command port
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cmd       <= CMD_NOP;
      cmd_bank  <= '0;
      cmd_row   <= '0;
      cmd_col   <= '0;
      events    <= '0;
    end else begin
      cmd       <= nxt_cmd;
      cmd_bank  <= head.r.bank;
      cmd_row   <= head.r.row;
      cmd_col   <= head.r.col;
      events.act         <= (nxt_cmd == CMD_ACT);
      events.act_fast    <= (nxt_cmd == CMD_ACT) && fly_enable && head.lat.rcd_fast;
      events.act_fast_rp <= (nxt_cmd == CMD_ACT) && fly_enable && head.lat.rp_fast;
      events.pre         <= (nxt_cmd == CMD_PRE);
      events.rd          <= (nxt_cmd == CMD_RD);
      events.wr          <= (nxt_cmd == CMD_WR);
      events.row_hit     <= q_pop && !head_acted;
    end
  end

  always_ff @(posedge clk) begin
    if (nxt_cmd == CMD_WR) cmd_wdata <= head.r.wdata;
  end

  // ------------------------------------------------------ read tag queue
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rdq_count <= '0;
      rdq_wp    <= '0;
      rdq_rp    <= '0;
    end else begin
      if (nxt_cmd == CMD_RD) rdq_wp <= (rdq_wp == RPW'(RDQ_DEPTH-1)) ? '0 : rdq_wp + 1'b1;
      if (rd_valid)          rdq_rp <= (rdq_rp == RPW'(RDQ_DEPTH-1)) ? '0 : rdq_rp + 1'b1;
      rdq_count <= rdq_count + (RPW+1)'(nxt_cmd == CMD_RD) - (RPW+1)'(rd_valid);
    end
  end

  always_ff @(posedge clk) begin
    if (nxt_cmd == CMD_RD) rdq_mem[rdq_wp] <= head.r.id;
  end

  assign resp_valid = rd_valid;
  assign resp_id    = rdq_mem[rdq_rp];
  assign resp_data  = rd_data;

  // ------------------------------------------------------ rules
  a_no_spurious_data: assert property (@(posedge clk) disable iff (!rst_n)
    rd_valid |-> rdq_count != '0);
  a_no_req_before_init: assert property (@(posedge clk) disable iff (!rst_n)
    !init_done |-> !accept);

endmodule
