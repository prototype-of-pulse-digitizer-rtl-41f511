// inhibit_veto: the "NOT gate + Vote 10 ms" stage of the trigger.
//
// The reset-type preamplifier raises its inhibited signal for about 0.9 ms at
// every reset. This stage inverts it and keeps the result at logic 0 while the
// inhibit is high and for VETO_CYCLES clocks (10 ms at 100 MHz) after it
// falls, so over-threshold triggers caused by the reset are blocked. The
// inhibit input is first passed through a two-flop synchronizer. A new inhibit
// pulse during the hold restarts it. veto_n goes low two clocks after inhibit
// rises (synchronizer delay) and stays low for exactly VETO_CYCLES clocks after
// the synchronized inhibit falls. Inversion and the 10 ms hold are the paper's;
// timing the hold from the falling edge and the synchronizer are this design's
// choices.
module inhibit_veto #(
  parameter int unsigned VETO_CYCLES = rain_pkg::VETO_CYCLES
) (
  input  logic clk,
  input  logic rst,
  input  logic inhibit,      // preamplifier inhibited signal, asynchronous
  output logic veto_n,       // 1 = over-threshold triggers allowed
  output logic pulse_seen    // one-cycle pulse on each inhibit rising edge
);
  localparam int unsigned CW = $clog2(VETO_CYCLES + 1);

  logic [1:0]    sync;
  logic          inh_q;
  logic [CW-1:0] hold;

  assign veto_n = !sync[1] && (hold == '0);

  always_ff @(posedge clk) begin
    if (rst) begin
      sync       <= '0;
      inh_q      <= 1'b0;
      hold       <= '0;
      pulse_seen <= 1'b0;
    end else begin
      sync       <= {sync[0], inhibit};
      inh_q      <= sync[1];
      pulse_seen <= sync[1] & ~inh_q;
      if (sync[1])
        hold <= CW'(VETO_CYCLES);
      else if (hold != '0)
        hold <= hold - 1'b1;
    end
  end
endmodule
