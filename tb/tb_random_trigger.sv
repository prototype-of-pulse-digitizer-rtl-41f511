// tb_random_trigger: checks that pulses come every PERIOD clocks, the first
// PERIOD clocks after reset, that each is one clock wide, and that enable low
// stops them and restarts the phase.
module tb_random_trigger;
  localparam int P = 37;
  logic clk = 0, rst = 1, enable = 1, trig;
  int checks = 0, failures = 0, cyc = 0, last = -1, n = 0;

  random_trigger #(.PERIOD(P)) dut (.clk, .rst, .enable, .trig);
  always #5 clk = ~clk;
  initial begin
    #100000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  always @(posedge clk) begin
    if (rst || !enable) cyc <= 0; else cyc <= cyc + 1;
    if (!rst && trig) begin
      n++;
      checks++;
      if (last < 0 ? (cyc != P) : (cyc - last != P)) begin
        failures++;
        $display("pulse at %0d, previous %0d", cyc, last);
      end
      last = cyc;
    end
  end

  initial begin
    repeat (2) @(negedge clk);
    rst = 0;
    repeat (P * 10 + 5) @(negedge clk);
    checks++; if (n != 10) begin failures++; $display("n=%0d", n); end
    enable = 0; last = -1;
    repeat (3 * P) @(negedge clk);
    checks++; if (n != 10) failures++;
    enable = 1;
    repeat (P * 3 + 2) @(negedge clk);
    checks++; if (n != 13) begin failures++; $display("n=%0d", n); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
