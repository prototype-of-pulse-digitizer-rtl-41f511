// random_trigger: periodic noise-monitoring trigger.
//
// A free-running counter gives a one-clock pulse every PERIOD clocks
// (0.05 Hz, 20 s at 100 MHz). Being unrelated to detector events, these
// triggers sample the baseline noise of the whole chain. The first pulse comes
// PERIOD clocks after reset is released, and then every PERIOD clocks; enable
// low stops and clears the counter. The 0.05 Hz rate is the paper's; the
// enable is this design's addition.
module random_trigger #(
  parameter int unsigned PERIOD = rain_pkg::RANDOM_PERIOD
) (
  input  logic clk,
  input  logic rst,
  input  logic enable,
  output logic trig
);
  localparam int unsigned CW = $clog2(PERIOD);
  logic [CW-1:0] cnt;

  always_ff @(posedge clk) begin
    if (rst || !enable) begin
      cnt  <= '0;
      trig <= 1'b0;
    end else begin
      trig <= (cnt == CW'(PERIOD - 1));
      cnt  <= (cnt == CW'(PERIOD - 1)) ? '0 : cnt + 1'b1;
    end
  end
endmodule
