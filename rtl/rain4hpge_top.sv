// rain4hpge_top: FPGA firmware of the RAIN4HPGe pulse digitizer.
//
// Eight slow channels (14-bit samples at 100 MSPS, one per clock) and four
// fast channels (12-bit at 1 GSPS, ten per clock) are written continuously
// into per-channel ring buffers. The trigger unit forms Trigger-in from the
// over-threshold discriminator on one selected slow channel, gated by the
// inverted preamplifier inhibit held low for 10 ms, ORed with the 0.05 Hz
// random trigger. A Trigger-in is accepted when every ring buffer is armed
// and no event is in progress; otherwise it is counted as lost (dead time).
// On acceptance the timer value is latched, every ring buffer records its
// post-trigger part and freezes, and the event builder packages all enabled
// channels with event number, timestamp and trigger sources into 64-bit words.
// The words go through the DDR3 event buffer, 512-bit beats over the memory
// controller user interface, and come back out as the readout stream for the
// readout module (ro_*). With test_mode high the controller interface belongs
// to the bandwidth tester instead, which measures write and read efficiency.
// An SPI master serves ADC and DAC slow control.
//
// The ADCs and their LVDS receivers, the memory controller core, the DDR3
// chips and the ZYNQ readout module are outside this module: their signals are
// ports. One clock (100 MHz) drives everything, the memory controller user
// interface included. Channel counts, rates, record lengths, the trigger gates,
// 10 ms veto, 0.05 Hz random rate, 1 GB buffer and the test pattern count
// follow the paper; pre-trigger lengths, formats, handshakes and the
// acceptance rule are this design's choices.
module rain4hpge_top #(
  parameter int unsigned N_SLOW        = rain_pkg::N_SLOW,
  parameter int unsigned N_FAST        = rain_pkg::N_FAST,
  parameter int unsigned FAST_SPC      = rain_pkg::FAST_SPC,
  parameter int unsigned SLOW_RECORD   = rain_pkg::SLOW_RECORD,     // samples
  parameter int unsigned SLOW_PRE      = rain_pkg::SLOW_RECORD / 2, // samples
  parameter int unsigned FAST_RECORD   = rain_pkg::FAST_RECORD,     // samples
  parameter int unsigned FAST_PRE      = rain_pkg::FAST_RECORD / 2, // samples
  parameter int unsigned VETO_CYCLES   = rain_pkg::VETO_CYCLES,
  parameter int unsigned RANDOM_PERIOD = rain_pkg::RANDOM_PERIOD,
  parameter int unsigned NUM_BEATS     = (1 << 30) / (rain_pkg::APP_DATA_W / 8),
  parameter int unsigned NUM_PATTERNS  = 32'h1000_0000,
  parameter int unsigned SPI_CS        = 4,
  localparam int unsigned N_CH         = N_SLOW + N_FAST,
  localparam int unsigned SB           = rain_pkg::SLOW_BITS,
  localparam int unsigned FB           = rain_pkg::FAST_BITS,
  localparam int unsigned DW           = rain_pkg::APP_DATA_W,
  localparam int unsigned AW           = rain_pkg::APP_ADDR_W,
  localparam int unsigned TCW          = $clog2(N_SLOW),
  localparam int unsigned CSW          = (SPI_CS > 1) ? $clog2(SPI_CS) : 1
) (
  input  logic                                clk,
  input  logic                                rst,
  // ADC samples (from the LVDS receivers)
  input  logic [N_SLOW-1:0][SB-1:0]           slow_adc,
  input  logic [N_FAST-1:0][FAST_SPC*FB-1:0]  fast_adc,     // sample 0 in the low bits
  // trigger inputs and settings
  input  logic                                inhibit,
  input  logic [TCW-1:0]                      trig_ch,
  input  logic [SB-1:0]                       threshold,
  input  logic [SB-1:0]                       hysteresis,
  input  logic                                random_en,
  input  logic [N_CH-1:0]                     ch_mask,
  input  logic                                ts_clear,
  // readout stream to the readout module
  output logic                                ro_valid,
  output logic [63:0]                         ro_data,
  input  logic                                ro_ready,
  // DDR3 memory controller user interface
  output logic [AW-1:0]                       app_addr,
  output logic [2:0]                          app_cmd,
  output logic                                app_en,
  input  logic                                app_rdy,
  output logic [DW-1:0]                       app_wdf_data,
  output logic                                app_wdf_wren,
  output logic                                app_wdf_end,
  output logic [DW/8-1:0]                     app_wdf_mask,
  input  logic                                app_wdf_rdy,
  input  logic [DW-1:0]                       app_rd_data,
  input  logic                                app_rd_data_valid,
  // DDR3 bandwidth test
  input  logic                                test_mode,
  input  logic                                bwtest_start,
  output logic                                bwtest_busy,
  output logic                                bwtest_done,
  output logic [31:0]                         bwtest_n_w,
  output logic [31:0]                         bwtest_n_cw,
  output logic [31:0]                         bwtest_n_r,
  output logic [31:0]                         bwtest_n_cr,
  output logic [31:0]                         bwtest_errors,
  // SPI slow control
  input  logic                                spi_start,
  input  logic [CSW-1:0]                      spi_cs_sel,
  input  logic [23:0]                         spi_tx,
  output logic [23:0]                         spi_rx,
  output logic                                spi_busy,
  output logic                                spi_done,
  output logic                                spi_sclk,
  output logic                                spi_mosi,
  input  logic                                spi_miso,
  output logic [SPI_CS-1:0]                   spi_cs_n,
  // status
  output logic [63:0]                         time_now,
  output logic [31:0]                         event_number,
  output logic [31:0]                         accepted_triggers,
  output logic [31:0]                         lost_triggers,
  output logic [31:0]                         vetoed_triggers,
  output logic [31:0]                         inhibit_pulses,
  output logic [31:0]                         ddr_full_stalls,
  output logic [31:0]                         ddr_beats_written,
  output logic [31:0]                         ddr_beats_read,
  output logic [31:0]                         ddr_occupancy,   // beats held
  output logic                                veto_active      // inhibit veto is blocking
);
  import rain_pkg::*;

  localparam int unsigned SLOW_WORDS = SLOW_RECORD;
  localparam int unsigned FAST_WORDS = FAST_RECORD / FAST_SPC;
  localparam int unsigned RWS        = $clog2(SLOW_WORDS);
  localparam int unsigned RWF        = $clog2(FAST_WORDS);
  localparam int unsigned FW         = FAST_SPC * SLOT_W;

  // ---------------- trigger ----------------
  logic      trig_in, veto_n;
  trig_src_t src, src_q;

  trigger_unit #(.SAMPLE_W(SB), .VETO_CYCLES(VETO_CYCLES), .RANDOM_PERIOD(RANDOM_PERIOD)) u_trig (
    .clk, .rst, .inhibit, .sample(slow_adc[trig_ch]), .threshold, .hysteresis, .random_en,
    .trig_in, .src, .veto_n, .vetoed_count(vetoed_triggers), .inhibit_count(inhibit_pulses)
  );

  // ---------------- ring buffers ----------------
  logic [N_SLOW-1:0]          slow_armed, slow_frozen;
  logic [N_FAST-1:0]          fast_armed, fast_frozen;
  logic [N_SLOW-1:0][SLOT_W-1:0] slow_rd_data;
  logic [N_FAST-1:0][FW-1:0]  fast_rd_data;
  logic [RWS-1:0]             slow_rd_addr;
  logic [RWF-1:0]             fast_rd_addr;
  logic                       accept, capturing, eb_start, eb_busy, eb_done;

  for (genvar c = 0; c < N_SLOW; c++) begin : g_slow
    ring_buffer #(.SAMPLE_W(SB), .LANES(1), .RECORD(SLOW_WORDS), .PRE(SLOW_PRE)) u_rb (
      .clk, .rst, .in_data(slow_adc[c]), .trigger(accept), .release_rec(eb_done),
      .armed(slow_armed[c]), .frozen(slow_frozen[c]),
      .rd_addr(slow_rd_addr), .rd_data(slow_rd_data[c])
    );
  end

  for (genvar c = 0; c < N_FAST; c++) begin : g_fast
    ring_buffer #(.SAMPLE_W(FB), .LANES(FAST_SPC), .RECORD(FAST_WORDS), .PRE(FAST_PRE / FAST_SPC)) u_rb (
      .clk, .rst, .in_data(fast_adc[c]), .trigger(accept), .release_rec(eb_done),
      .armed(fast_armed[c]), .frozen(fast_frozen[c]),
      .rd_addr(fast_rd_addr), .rd_data(fast_rd_data[c])
    );
  end

  // A trigger is taken only when all buffers hold a full pre-trigger history
  // and the previous event has been packaged.
  assign accept   = trig_in && !capturing && (&slow_armed) && (&fast_armed);
  assign eb_start = capturing && !eb_busy && !eb_done && (&slow_frozen) && (&fast_frozen);

  always_ff @(posedge clk) begin
    if (rst) begin
      capturing         <= 1'b0;
      src_q             <= '0;
      accepted_triggers <= '0;
      lost_triggers     <= '0;
    end else begin
      if (accept) begin
        capturing         <= 1'b1;
        src_q             <= src;
        accepted_triggers <= accepted_triggers + 1'b1;
      end else if (trig_in) begin
        lost_triggers <= lost_triggers + 1'b1;
      end
      if (eb_done) capturing <= 1'b0;
    end
  end

  // ---------------- timestamp ----------------
  logic [TS_W-1:0] stamp;
  timestamp_timer #(.TS_W(TS_W)) u_ts (
    .clk, .rst, .sync_clear(ts_clear), .latch(accept), .now(time_now), .stamp
  );

  // ---------------- event packaging ----------------
  logic        ev_valid, ev_ready;
  logic [63:0] ev_data;

  event_builder #(
    .N_SLOW(N_SLOW), .N_FAST(N_FAST), .SLOW_WORDS(SLOW_WORDS),
    .FAST_LANES(FAST_SPC), .FAST_WORDS(FAST_WORDS)
  ) u_eb (
    .clk, .rst, .start(eb_start), .ch_mask, .timestamp(stamp), .src(src_q),
    .busy(eb_busy), .done(eb_done), .event_number,
    .slow_rd_addr, .slow_rd_data, .fast_rd_addr, .fast_rd_data,
    .out_valid(ev_valid), .out_data(ev_data), .out_ready(ev_ready)
  );

  // ---------------- DDR3 event buffer and bandwidth tester ----------------
  logic [AW-1:0]   eb_addr,  bt_addr;
  logic [2:0]      eb_cmd,   bt_cmd;
  logic            eb_en,    bt_en;
  logic [DW-1:0]   eb_wdata, bt_wdata;
  logic            eb_wren,  bt_wren, eb_wend, bt_wend;
  logic [DW/8-1:0] eb_wmask, bt_wmask;
  logic [$clog2(NUM_BEATS + 1)-1:0] occ;

  ddr_event_buffer #(.NUM_BEATS(NUM_BEATS), .ADDR_W(AW)) u_ddr (
    .clk, .rst,
    .in_valid(ev_valid), .in_data(ev_data), .in_ready(ev_ready),
    .out_valid(ro_valid), .out_data(ro_data), .out_ready(ro_ready),
    .app_addr(eb_addr), .app_cmd(eb_cmd), .app_en(eb_en), .app_rdy(app_rdy && !test_mode),
    .app_wdf_data(eb_wdata), .app_wdf_wren(eb_wren), .app_wdf_end(eb_wend),
    .app_wdf_mask(eb_wmask), .app_wdf_rdy(app_wdf_rdy && !test_mode),
    .app_rd_data, .app_rd_data_valid(app_rd_data_valid && !test_mode),
    .occupancy(occ), .beats_written(ddr_beats_written),
    .beats_read(ddr_beats_read), .full_stalls(ddr_full_stalls)
  );

  ddr_bw_tester #(.NUM_PATTERNS(NUM_PATTERNS), .ADDR_W(AW)) u_bt (
    .clk, .rst, .start(bwtest_start && test_mode), .busy(bwtest_busy), .done(bwtest_done),
    .n_w(bwtest_n_w), .n_cw(bwtest_n_cw), .n_r(bwtest_n_r), .n_cr(bwtest_n_cr),
    .errors(bwtest_errors),
    .app_addr(bt_addr), .app_cmd(bt_cmd), .app_en(bt_en), .app_rdy(app_rdy && test_mode),
    .app_wdf_data(bt_wdata), .app_wdf_wren(bt_wren), .app_wdf_end(bt_wend),
    .app_wdf_mask(bt_wmask), .app_wdf_rdy(app_wdf_rdy && test_mode),
    .app_rd_data, .app_rd_data_valid(app_rd_data_valid && test_mode)
  );

  assign ddr_occupancy = 32'(occ);
  assign veto_active   = !veto_n;

  always_comb begin
    if (test_mode) begin
      app_addr = bt_addr;  app_cmd = bt_cmd;  app_en = bt_en;
      app_wdf_data = bt_wdata; app_wdf_wren = bt_wren; app_wdf_end = bt_wend; app_wdf_mask = bt_wmask;
    end else begin
      app_addr = eb_addr;  app_cmd = eb_cmd;  app_en = eb_en;
      app_wdf_data = eb_wdata; app_wdf_wren = eb_wren; app_wdf_end = eb_wend; app_wdf_mask = eb_wmask;
    end
  end

  // ---------------- slow control ----------------
  spi_master #(.FRAME_W(24), .NUM_CS(SPI_CS)) u_spi (
    .clk, .rst, .start(spi_start), .cs_sel(spi_cs_sel), .tx_data(spi_tx), .rx_data(spi_rx),
    .busy(spi_busy), .done(spi_done), .sclk(spi_sclk), .mosi(spi_mosi), .miso(spi_miso),
    .cs_n(spi_cs_n)
  );
endmodule
