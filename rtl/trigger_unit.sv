// trigger_unit: forms Trigger-in from the three trigger sources.
//
//   trig_in = (over_threshold AND veto_n) OR random
//
// veto_n is the inverted preamplifier inhibit held low for 10 ms
// (inhibit_veto), over_threshold is the discriminator on the selected slow
// channel, and random is the 0.05 Hz periodic trigger. trig_in is a one-clock
// pulse; src tells which of the two OR inputs caused it (both may be set).
// The sources also report a count of vetoed over-threshold triggers. The gate
// structure (NOT, Vote 10 ms, AND, OR) is the paper's; pulse widths, the
// source flags and the veto counter are this design's choices. Latency from
// the first over-threshold sample to trig_in is two clocks.
module trigger_unit #(
  parameter int unsigned SAMPLE_W      = rain_pkg::SLOW_BITS,
  parameter int unsigned VETO_CYCLES   = rain_pkg::VETO_CYCLES,
  parameter int unsigned RANDOM_PERIOD = rain_pkg::RANDOM_PERIOD
) (
  input  logic                clk,
  input  logic                rst,
  input  logic                inhibit,
  input  logic [SAMPLE_W-1:0] sample,
  input  logic [SAMPLE_W-1:0] threshold,
  input  logic [SAMPLE_W-1:0] hysteresis,
  input  logic                random_en,
  output logic                trig_in,
  output rain_pkg::trig_src_t src,
  output logic                veto_n,
  output logic [31:0]         vetoed_count,
  output logic [31:0]         inhibit_count
);
  logic ot_trig, rnd_trig, ot_pass, inh_pulse;

  inhibit_veto #(.VETO_CYCLES(VETO_CYCLES)) u_veto (
    .clk, .rst, .inhibit, .veto_n, .pulse_seen(inh_pulse)
  );

  over_threshold_trigger #(.SAMPLE_W(SAMPLE_W)) u_ot (
    .clk, .rst, .sample, .threshold, .hysteresis, .trig(ot_trig)
  );

  random_trigger #(.PERIOD(RANDOM_PERIOD)) u_rnd (
    .clk, .rst, .enable(random_en), .trig(rnd_trig)
  );

  assign ot_pass = ot_trig & veto_n;             // AND gate

  always_ff @(posedge clk) begin
    if (rst) begin
      trig_in       <= 1'b0;
      src           <= '0;
      vetoed_count  <= '0;
      inhibit_count <= '0;
    end else begin
      trig_in            <= ot_pass | rnd_trig;  // OR gate
      src.over_threshold <= ot_pass;
      src.random         <= rnd_trig;
      if (ot_trig && !veto_n) vetoed_count  <= vetoed_count + 1'b1;
      if (inh_pulse)          inhibit_count <= inhibit_count + 1'b1;
    end
  end
endmodule
