// over_threshold_trigger: digital leading-edge discriminator on one slow
// (6 us shaping amplifier, 0-12 keV) channel.
//
// Each 100 MSPS sample is compared with a programmable threshold. When the
// sample rises above the threshold after having been at or below
// (threshold - hysteresis), a one-clock trigger pulse is given; the
// discriminator then stays disarmed until the signal falls back below the
// re-arm level, so a pulse gives one trigger. Output is registered: the pulse
// appears one clock after the first sample above threshold. The paper places
// this trigger in the FPGA and gives its source channel; the comparison,
// hysteresis and one-clock pulse are this design's choices.
module over_threshold_trigger #(
  parameter int unsigned SAMPLE_W = rain_pkg::SLOW_BITS
) (
  input  logic                clk,
  input  logic                rst,
  input  logic [SAMPLE_W-1:0] sample,
  input  logic [SAMPLE_W-1:0] threshold,
  input  logic [SAMPLE_W-1:0] hysteresis,
  output logic                trig
);
  logic armed;
  logic below_rearm;

  // sample <= threshold - hysteresis, computed without underflow.
  assign below_rearm = ({1'b0, sample} + {1'b0, hysteresis}) <= {1'b0, threshold};

  always_ff @(posedge clk) begin
    if (rst) begin
      armed <= 1'b0;
      trig  <= 1'b0;
    end else begin
      trig <= 1'b0;
      if (armed && sample > threshold) begin
        trig  <= 1'b1;
        armed <= 1'b0;
      end else if (!armed && below_rearm) begin
        armed <= 1'b1;
      end
    end
  end
endmodule
