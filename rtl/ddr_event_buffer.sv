// ddr_event_buffer: the external DDR3 SDRAM used as a large event FIFO.
//
// Packaged events arrive as 64-bit words (valid/ready). Eight words, lowest
// word in the low bits, make one 512-bit beat, written at the next beat
// address of a circular region of NUM_BEATS beats through the user interface
// of the DDR3 memory controller (app_* signals: one BL8 write command per
// beat, with its data beat on the write-data channel). Committed beats are
// read back in order (read commands limited by the free space of a small
// read-data FIFO) and leave as 64-bit words towards the readout module. When
// the region is full the input is held off (in_ready low); that back-pressure
// stalls the event builder. Write commands take priority over reads; a command
// once presented is held until app_rdy accepts it. Addresses count 64-bit
// units, so a beat advances app_addr by 8. The paper gives the 1 GB, 64-bit
// DDR3 buffer and the controller's user interface signals; the FIFO scheme,
// the arbitration and the read-back flow are this design's choices. The
// controller is assumed to run in the same clock domain.
module ddr_event_buffer #(
  parameter int unsigned NUM_BEATS  = (1 << 30) / (rain_pkg::APP_DATA_W / 8),
  parameter int unsigned ADDR_W     = rain_pkg::APP_ADDR_W,
  parameter int unsigned RFIFO      = 8,
  localparam int unsigned DW        = rain_pkg::APP_DATA_W,
  localparam int unsigned WPB       = rain_pkg::WORDS_PER_BEAT,
  localparam int unsigned BW        = $clog2(NUM_BEATS + 1)
) (
  input  logic              clk,
  input  logic              rst,
  // event word stream in
  input  logic              in_valid,
  input  logic [63:0]       in_data,
  output logic              in_ready,
  // readout word stream out
  output logic              out_valid,
  output logic [63:0]       out_data,
  input  logic              out_ready,
  // memory controller user interface
  output logic [ADDR_W-1:0] app_addr,
  output logic [2:0]        app_cmd,
  output logic              app_en,
  input  logic              app_rdy,
  output logic [DW-1:0]     app_wdf_data,
  output logic              app_wdf_wren,
  output logic              app_wdf_end,
  output logic [DW/8-1:0]   app_wdf_mask,
  input  logic              app_wdf_rdy,
  input  logic [DW-1:0]     app_rd_data,
  input  logic              app_rd_data_valid,
  // status
  output logic [BW-1:0]     occupancy,       // beats allocated and not yet read
  output logic [31:0]       beats_written,
  output logic [31:0]       beats_read,
  output logic [31:0]       full_stalls      // clocks with input held off (beat hand-off or full)
);
  import rain_pkg::*;
  localparam int unsigned RFW = $clog2(RFIFO + 1);
  localparam int unsigned PW  = (RFIFO > 1) ? $clog2(RFIFO) : 1;
  localparam int unsigned WIW = $clog2(WPB + 1);

  // ---------------- write side ----------------
  logic [WPB-1:0][63:0] wcol;
  logic [WIW-1:0]       wcnt;
  logic                 wpend, wcmd_sent, wdat_sent;
  logic [DW-1:0]        wbeat;
  logic [BW-1:0]        wr_beat, rd_beat;   // next beat index to write / read
  logic [BW-1:0]        readable;
  logic                 alloc, commit;

  assign in_ready = (wcnt != WIW'(WPB));
  assign alloc    = (wcnt == WIW'(WPB)) && !wpend && (occupancy != BW'(NUM_BEATS));

  // ---------------- command channel ----------------
  logic              cmd_v, cmd_is_wr;
  logic [ADDR_W-1:0] cmd_addr;
  logic              cmd_acc, rd_issue;
  logic [RFW-1:0]    outstanding, rf_count;

  assign app_en   = cmd_v;
  assign app_cmd  = cmd_is_wr ? APP_CMD_WRITE : APP_CMD_READ;
  assign app_addr = cmd_addr;
  assign cmd_acc  = cmd_v && app_rdy;
  assign rd_issue = cmd_acc && !cmd_is_wr;

  assign app_wdf_wren = wpend && !wdat_sent;
  assign app_wdf_end  = app_wdf_wren;
  assign app_wdf_data = wbeat;
  assign app_wdf_mask = '0;

  assign commit = wpend && (wcmd_sent || (cmd_acc && cmd_is_wr)) &&
                           (wdat_sent || app_wdf_rdy);

  function automatic logic [ADDR_W-1:0] beat_addr(input logic [BW-1:0] b);
    return ADDR_W'(b) * ADDR_W'(ADDR_PER_BEAT);
  endfunction

  function automatic logic [BW-1:0] next_beat(input logic [BW-1:0] b);
    return (b == BW'(NUM_BEATS - 1)) ? '0 : b + 1'b1;
  endfunction

  // ---------------- read-data FIFO ----------------
  logic [DW-1:0]  rfifo [RFIFO];
  logic [PW-1:0]  rf_wp, rf_rp;
  logic [WIW-1:0] rword;
  logic           rpop_word, rpop_beat;

  assign out_valid = (rf_count != '0);
  assign out_data  = rfifo[rf_rp][rword*64 +: 64];
  assign rpop_word = out_valid && out_ready;
  assign rpop_beat = rpop_word && (rword == WIW'(WPB - 1));

  always_ff @(posedge clk) begin
    if (app_rd_data_valid) rfifo[rf_wp] <= app_rd_data;
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      wcol          <= '0;
      wcnt          <= '0;
      wpend         <= 1'b0;
      wcmd_sent     <= 1'b0;
      wdat_sent     <= 1'b0;
      wbeat         <= '0;
      wr_beat       <= '0;
      rd_beat       <= '0;
      readable      <= '0;
      occupancy     <= '0;
      cmd_v         <= 1'b0;
      cmd_is_wr     <= 1'b0;
      cmd_addr      <= '0;
      outstanding   <= '0;
      rf_count      <= '0;
      rf_wp         <= '0;
      rf_rp         <= '0;
      rword         <= '0;
      beats_written <= '0;
      beats_read    <= '0;
      full_stalls   <= '0;
    end else begin
      // collect words into a beat
      if (in_valid && in_ready) begin
        wcol[wcnt] <= in_data;
        wcnt       <= wcnt + 1'b1;
      end
      if (in_valid && !in_ready) full_stalls <= full_stalls + 1'b1;

      if (alloc) begin
        wpend     <= 1'b1;
        wcmd_sent <= 1'b0;
        wdat_sent <= 1'b0;
        wbeat     <= wcol;
        wcnt      <= '0;
      end else if (wpend) begin
        if (cmd_acc && cmd_is_wr)  wcmd_sent <= 1'b1;
        if (app_wdf_wren && app_wdf_rdy) wdat_sent <= 1'b1;
        if (commit) begin
          wpend         <= 1'b0;
          beats_written <= beats_written + 1'b1;
        end
      end

      // command selection: hold until accepted, writes first
      if (!cmd_v || cmd_acc) begin
        cmd_v <= 1'b0;
        if (wpend && !wcmd_sent && !(cmd_acc && cmd_is_wr)) begin
          cmd_v     <= 1'b1;
          cmd_is_wr <= 1'b1;
          cmd_addr  <= beat_addr(wr_beat);
        end else if ((readable - BW'(rd_issue)) != '0 &&
                     (RFW'(outstanding + RFW'(rd_issue)) + rf_count) < RFW'(RFIFO)) begin
          cmd_v     <= 1'b1;
          cmd_is_wr <= 1'b0;
          cmd_addr  <= beat_addr(rd_issue ? next_beat(rd_beat) : rd_beat);
        end
      end
      if (cmd_acc && cmd_is_wr) wr_beat <= next_beat(wr_beat);
      if (rd_issue)             rd_beat <= next_beat(rd_beat);

      readable  <= readable + BW'(commit) - BW'(rd_issue);
      occupancy <= occupancy + BW'(alloc) - BW'(rd_issue);

      // read data return and unpacking
      outstanding <= outstanding + RFW'(rd_issue) - RFW'(app_rd_data_valid);
      if (app_rd_data_valid) rf_wp <= (rf_wp == PW'(RFIFO - 1)) ? '0 : rf_wp + 1'b1;
      if (rpop_word) rword <= rpop_beat ? '0 : rword + 1'b1;
      if (rpop_beat) begin
        rf_rp      <= (rf_rp == PW'(RFIFO - 1)) ? '0 : rf_rp + 1'b1;
        beats_read <= beats_read + 1'b1;
      end
      rf_count <= rf_count + RFW'(app_rd_data_valid) - RFW'(rpop_beat);
    end
  end

  // User-interface rules: a presented command is held unchanged until accepted,
  // and read data never arrives unrequested.
  assert property (@(posedge clk) disable iff (rst)
    app_en && !app_rdy |=> app_en && $stable(app_addr) && $stable(app_cmd));
  assert property (@(posedge clk) disable iff (rst)
    app_wdf_wren && !app_wdf_rdy |=> app_wdf_wren && $stable(app_wdf_data));
  assert property (@(posedge clk) disable iff (rst)
    app_rd_data_valid |-> outstanding != '0);
endmodule
