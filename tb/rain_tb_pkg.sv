// rain_tb_pkg: waveform functions shared by the full-design testbenches.
// Every ADC sample is a function of channel, lane and the firmware's own time
// counter, so a recorded event can be checked from its timestamp alone. The
// trigger channel adds PULSE_AMP during the pulses a testbench places.
package rain_tb_pkg;
  localparam int unsigned PULSE_AMP = 3000;

  function automatic logic [13:0] slow_base(int unsigned c, longint unsigned t);
    return 14'((t * 5 + longint'(c) * 37) % 512);
  endfunction

  function automatic logic [11:0] fast_val(int unsigned c, int unsigned l, longint unsigned t);
    return 12'((t * 10 + longint'(l)) * 3 + longint'(c) * 100);
  endfunction
endpackage
