// timestamp_timer: the time base that stamps every event.
//
// A TS_W-bit counter advances once per clock (10 ns at 100 MHz) from reset.
// When latch is high the current count is captured into stamp, so the stamp
// of an event is the count in the clock its trigger was accepted. sync_clear
// restarts the count at zero, for aligning several boards. The paper says
// only that events are stamped by a timer kept in the FPGA; width, tick and
// clear are this design's choices.
module timestamp_timer #(
  parameter int unsigned TS_W = rain_pkg::TS_W
) (
  input  logic            clk,
  input  logic            rst,
  input  logic            sync_clear,
  input  logic            latch,
  output logic [TS_W-1:0] now,
  output logic [TS_W-1:0] stamp
);
  always_ff @(posedge clk) begin
    if (rst) begin
      now   <= '0;
      stamp <= '0;
    end else begin
      now <= sync_clear ? '0 : now + 1'b1;
      if (latch) stamp <= now;
    end
  end
endmodule
