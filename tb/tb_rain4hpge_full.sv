// tb_rain4hpge_full: one complete operation of the digitizer at its full
// size, every parameter at its default: eight slow channels with 120 us
// (12000-sample) records and four fast channels with 16 us (16000-sample)
// records, 10 ms veto, 1 GB DDR3 region. After the ring buffers are armed, an
// inhibit pulse opens the 10 ms veto and an over-threshold pulse inside it is
// rejected; a pulse after the veto gives one event, which goes through the
// DDR3 model and is read out and checked sample by sample. Also checks the
// event size (40016 words, 5002 beats) and that no trigger was lost. A second
// event with the channel set of one CDEX-10 detector (three slow, three fast
// channels) checks the 21016-word event of that configuration.
module tb_rain4hpge_full;
  import rain_tb_pkg::*;
  localparam int NS = 8, NF = 4, SPC = 10, TRIG = 0;
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
  logic spi_start = 0, spi_busy, spi_done, spi_sclk, spi_mosi, spi_miso = 0;
  logic [1:0] spi_cs_sel = 0;
  logic [23:0] spi_tx = 0, spi_rx;
  logic [3:0] spi_cs_n;
  logic [63:0] time_now;
  logic [31:0] event_number, accepted_triggers, lost_triggers, vetoed_triggers, inhibit_pulses;
  logic [31:0] ddr_full_stalls, ddr_beats_written, ddr_beats_read, ddr_occupancy;
  logic veto_active;

  int checks = 0, failures = 0;
  int ev_events, ev_checks, ev_failures, ev_ot, ev_rnd, ev_partial, ev_words;
  longint unsigned pulse_from = '1, pulse_to = 0;
  // 3 + 8*(1+3000) + 4*(1+4000) = 40015 words, rounded up to 40016 (5002 beats)
  localparam int EXP_WORDS = 40016;
  // 3 + 3*(1+3000) + 3*(1+4000) = 21009 words, rounded up to 21016
  localparam int EXP_WORDS_3P3 = 21016;

  rain4hpge_top dut (.*);

  ddr3_mig_model #(.DW(DW), .AW(AW)) u_mig (
    .clk, .rst, .app_addr, .app_cmd, .app_en, .app_rdy, .app_wdf_data, .app_wdf_wren,
    .app_wdf_end, .app_wdf_mask, .app_wdf_rdy, .app_rd_data, .app_rd_data_valid);

  rain_event_checker #(.TRIG_CH(TRIG)) u_chk (
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

  always #5 clk = ~clk;
  initial begin
    #40000000; failures++;
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

  initial begin
    repeat (3) @(negedge clk);
    rst = 0;
    repeat (7000) @(negedge clk);          // pre-trigger history of 60 us
    checks++; if (!(&dut.slow_armed) || !(&dut.fast_armed)) begin failures++; $display("not armed"); end
    // inhibit pulse of 0.9 ms opens the 10 ms veto
    inhibit = 1; repeat (90000) @(negedge clk); inhibit = 0;
    repeat (1000) @(negedge clk);
    pulse(100);
    checks++; if (vetoed_triggers != 1 || accepted_triggers != 0) begin failures++; $display("veto failed"); end
    while (veto_active) @(negedge clk);
    pulse(100);
    while (ev_events == 0) @(negedge clk);
    repeat (100) @(negedge clk);
    checks++; if (ev_events != 1 || ev_ot != 1 || lost_triggers != 0) begin failures++; $display("events %0d", ev_events); end
    checks++; if (ev_words != EXP_WORDS) begin failures++; $display("words %0d", ev_words); end
    checks++; if (ddr_beats_written != EXP_WORDS / 8 || ddr_occupancy != 0) failures++;
    $display("event of %0d words read out at t=%0d clocks", ev_words, time_now);
    // one detector of CDEX-10: three shaping (slow 0-2) and three timing (fast 8-10) channels
    ch_mask = 12'b0111_0000_0111;
    repeat (7000) @(negedge clk);
    pulse(100);
    while (ev_events == 1) @(negedge clk);
    repeat (100) @(negedge clk);
    checks++; if (ev_partial != 1 || ev_words != EXP_WORDS + EXP_WORDS_3P3) begin
      failures++; $display("3+3 event: words %0d", ev_words - EXP_WORDS);
    end
    $display("3+3-channel event of %0d words", ev_words - EXP_WORDS);
    $display("TB_RESULT checks=%0d failures=%0d", checks + ev_checks, failures + ev_failures);
    $finish;
  end
endmodule
