// tb_rain4hpge_top: end-to-end run of the whole digitizer at reduced sizes
// (16-sample slow and 40-sample fast records, 300-clock veto, random trigger
// every 4000 clocks, a 2-beat DDR3 region behind an 8-beat read FIFO) against the memory-controller
// model. ADC samples are functions of the firmware time counter; every event
// read out is checked sample by sample by rain_event_checker. The run makes
// each mechanism happen and counts it: over-threshold events, random events,
// a trigger lost to dead time, a trigger vetoed after an inhibit pulse, the
// DDR3 buffer filling up and holding the event builder off, an event with a
// partial channel mask, a timestamp clear, a switch to the DDR3 bandwidth test
// and back, and an SPI transfer. A mechanism that never happened counts as a
// failure.
module tb_rain4hpge_top;
  import rain_tb_pkg::*;
  localparam int NS = 8, NF = 4, SPC = 10, SREC = 16, SPRE = 8, FREC = 40, FPRE = 20;
  localparam int VETO = 300, RPER = 4000, NBEATS = 2, NPAT = 16 * 64, TRIG = 2;
  localparam int DW = 512, AW = 27;

  logic clk = 0, rst = 1;
  logic [NS-1:0][13:0] slow_adc;
  logic [NF-1:0][SPC*12-1:0] fast_adc;
  logic inhibit = 0, random_en = 0, ts_clear = 0, ro_ready = 1, test_mode = 0, bwtest_start = 0;
  logic [2:0] trig_ch = 3'(TRIG);
  logic [13:0] threshold = 1000, hysteresis = 50;
  logic [NS+NF-1:0] ch_mask = '1;
  logic ro_valid;
  logic [63:0] ro_data;
  logic [AW-1:0] app_addr;
  logic [2:0] app_cmd;
  logic app_en, app_rdy, app_wdf_wren, app_wdf_end, app_wdf_rdy, app_rd_data_valid;
  logic [DW-1:0] app_wdf_data, app_rd_data;
  logic [DW/8-1:0] app_wdf_mask;
  logic bwtest_busy, bwtest_done;
  logic [31:0] bwtest_n_w, bwtest_n_cw, bwtest_n_r, bwtest_n_cr, bwtest_errors;
  logic spi_start = 0, spi_busy, spi_done, spi_sclk, spi_mosi, spi_miso;
  logic [1:0] spi_cs_sel = 1;
  logic [23:0] spi_tx = 24'hA5_0F_3C, spi_rx;
  logic [3:0] spi_cs_n;
  logic [63:0] time_now;
  logic [31:0] event_number, accepted_triggers, lost_triggers, vetoed_triggers, inhibit_pulses;
  logic [31:0] ddr_full_stalls, ddr_beats_written, ddr_beats_read, ddr_occupancy;
  logic veto_active;

  int checks = 0, failures = 0;
  int ev_events, ev_checks, ev_failures, ev_ot, ev_rnd, ev_partial, ev_words;
  longint unsigned pulse_from = '1, pulse_to = 0;
  logic [23:0] spi_slave_rx;
  int spi_edges = 0;

  rain4hpge_top #(
    .SLOW_RECORD(SREC), .SLOW_PRE(SPRE), .FAST_RECORD(FREC), .FAST_PRE(FPRE),
    .VETO_CYCLES(VETO), .RANDOM_PERIOD(RPER), .NUM_BEATS(NBEATS), .NUM_PATTERNS(NPAT)
  ) dut (.*);

  ddr3_mig_model #(.DW(DW), .AW(AW), .READ_LAT(12), .REFRESH_PERIOD(300), .REFRESH_CYCLES(12), .STALL_PCT(8)) u_mig (
    .clk, .rst, .app_addr, .app_cmd, .app_en, .app_rdy, .app_wdf_data, .app_wdf_wren,
    .app_wdf_end, .app_wdf_mask, .app_wdf_rdy, .app_rd_data, .app_rd_data_valid);

  rain_event_checker #(.N_SLOW(NS), .N_FAST(NF), .FAST_SPC(SPC), .SLOW_RECORD(SREC), .SLOW_PRE(SPRE),
                       .FAST_RECORD(FREC), .FAST_PRE(FPRE), .TRIG_CH(TRIG)) u_chk (
    .clk, .rst, .valid(ro_valid), .ready(ro_ready), .data(ro_data), .events(ev_events), .checks(ev_checks),
    .failures(ev_failures), .n_ot(ev_ot), .n_rnd(ev_rnd), .n_partial(ev_partial), .words(ev_words));

  always_comb begin
    for (int c = 0; c < NS; c++) begin
      slow_adc[c] = slow_base(c, time_now);
      if (c == TRIG && time_now >= pulse_from && time_now < pulse_to) slow_adc[c] += 14'(PULSE_AMP);
    end
    for (int c = 0; c < NF; c++)
      for (int l = 0; l < SPC; l++) fast_adc[c][l*12 +: 12] = fast_val(c, l, time_now);
  end

  // SPI slave: receives the frame
  always @(posedge spi_sclk) if (!spi_cs_n[1]) begin spi_slave_rx = {spi_slave_rx[22:0], spi_mosi}; spi_edges++; end
  assign spi_miso = 1'b1;

  always #5 clk = ~clk;
  initial begin
    #20000000; failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks + ev_checks, failures + ev_failures);
    $finish;
  end

  task automatic pulse(int len);
    @(negedge clk);
    pulse_from = time_now + 1;
    pulse_to   = time_now + 1 + longint'(len);
    repeat (len + 30) @(negedge clk);
  endtask

  task automatic wait_idle();
    // all accepted events read out and the DDR3 buffer empty
    while (ev_events != int'(accepted_triggers) || dut.capturing) @(negedge clk);
    repeat (20) @(negedge clk);
  endtask

  task automatic expect_true(bit cond, string what);
    checks++;
    if (!cond) begin failures++; $display("mechanism missing: %s", what); end
  endtask

  initial begin
    int lost0, vet0, stalls0;
    repeat (3) @(negedge clk);
    rst = 0;
    repeat (10) @(negedge clk);
    ts_clear = 1; @(negedge clk); ts_clear = 0;
    expect_true(time_now < 3, "timestamp clear");
    // slow control
    spi_start = 1; @(negedge clk); spi_start = 0;
    while (!spi_done) @(negedge clk);
    expect_true(spi_slave_rx == spi_tx && spi_edges == 24 && spi_rx == '1, "SPI transfer");
    repeat (50) @(negedge clk);

    // 1. over-threshold event
    pulse(20);
    wait_idle();
    expect_true(ev_events == 1 && ev_ot == 1, "over-threshold event");

    // 2. a second pulse while the first event is still being captured is lost
    lost0 = int'(lost_triggers);
    pulse(3);
    pulse(3);
    wait_idle();
    expect_true(int'(lost_triggers) > lost0, "trigger lost to dead time");

    // 3. inhibit pulse; a pulse inside the 10 ms hold is vetoed
    vet0 = int'(vetoed_triggers);
    @(negedge clk) inhibit = 1;
    repeat (40) @(negedge clk);
    inhibit = 0;
    repeat (20) @(negedge clk);
    expect_true(veto_active, "veto active after inhibit");
    pulse(20);
    expect_true(int'(vetoed_triggers) == vet0 + 1, "over-threshold trigger vetoed");
    repeat (VETO) @(negedge clk);
    expect_true(!veto_active, "veto ends");
    expect_true(inhibit_pulses == 1, "inhibit pulse counted");

    // 4. random trigger
    random_en = 1;
    repeat (RPER + 100) @(negedge clk);
    random_en = 0;
    wait_idle();
    expect_true(ev_rnd >= 1, "random trigger event");

    // 5. readout stalled: the DDR3 region fills and holds the builder off
    stalls0 = int'(ddr_full_stalls);
    ro_ready = 0;
    pulse(20);
    repeat (600) @(negedge clk);
    expect_true(int'(ddr_full_stalls) > stalls0, "DDR3 buffer full back-pressure");
    expect_true(ddr_occupancy == NBEATS, "DDR3 region full");
    ro_ready = 1;
    wait_idle();

    // 6. partial channel mask
    ch_mask = 12'b1010_0000_0101;
    pulse(20);
    wait_idle();
    expect_true(ev_partial == 1, "partial channel mask event");
    ch_mask = '1;

    // 7. DDR3 bandwidth test, then back to event mode
    test_mode = 1;
    @(negedge clk) bwtest_start = 1;
    @(negedge clk) bwtest_start = 0;
    while (!bwtest_done) @(negedge clk);
    expect_true(bwtest_errors == 0 && bwtest_n_w == NPAT / 16 && bwtest_n_r == NPAT / 16, "bandwidth test");
    $display("bandwidth test: write %0d/%0d read %0d/%0d", bwtest_n_w, bwtest_n_cw, bwtest_n_r, bwtest_n_cr);
    test_mode = 0;
    pulse(20);
    wait_idle();
    expect_true(ev_events == int'(accepted_triggers), "event after mode switch");

    checks++;
    if (ev_events != int'(event_number) || ev_words != 8 * int'(ddr_beats_read)) begin
      failures++; $display("events %0d/%0d words %0d beats %0d", ev_events, event_number, ev_words, ddr_beats_read);
    end
    $display("events %0d (over-threshold %0d, random %0d), lost %0d, vetoed %0d, full stalls %0d",
             ev_events, ev_ot, ev_rnd, lost_triggers, vetoed_triggers, ddr_full_stalls);
    $display("TB_RESULT checks=%0d failures=%0d", checks + ev_checks, failures + ev_failures);
    $finish;
  end
endmodule
