// tb_over_threshold_trigger: drives a noisy baseline with pulses of known
// position and a slow signal that wobbles around the threshold. Expects one
// trigger per pulse, one clock after its first sample above threshold, no
// trigger from the baseline, and (thanks to the hysteresis) a single trigger
// from the wobbling signal.
module tb_over_threshold_trigger;
  localparam int W = 14;
  logic clk = 0, rst = 1, trig;
  logic [W-1:0] sample = 100, threshold = 300, hysteresis = 20;
  int checks = 0, failures = 0, trig_count = 0, exp_count = 0;
  int cyc = 0, exp_at [$];

  over_threshold_trigger #(.SAMPLE_W(W)) dut (.clk, .rst, .sample, .threshold, .hysteresis, .trig);

  always #5 clk = ~clk;
  initial begin
    #500000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  always @(posedge clk) begin
    cyc <= cyc + 1;
    if (!rst && trig) begin
      trig_count++;
      checks++;
      if (exp_at.size() == 0 || exp_at[0] != cyc) begin
        failures++;
        $display("unexpected trigger at %0d", cyc);
      end
      if (exp_at.size() > 0) void'(exp_at.pop_front());
    end
  end

  // a shaped pulse: rises over 10 clocks to 400 above baseline, decays slowly
  task automatic shaped_pulse();
    bit first = 1;
    for (int i = 0; i < 120; i++) begin
      int v;
      v = (i < 10) ? 100 + i * 40 : 500 - (i - 10) * 4;
      @(negedge clk) sample = W'(v + $urandom % 5);
      if (first && sample > threshold) begin
        // sampled at the next edge (cyc+1 after this negedge), output one edge later
        exp_at.push_back(cyc + 1);
        exp_count++;
        first = 0;
      end
    end
    repeat (30) @(negedge clk) sample = W'(100 + $urandom % 5);
  endtask

  initial begin
    repeat (3) @(negedge clk);
    rst = 0;
    repeat (50) @(negedge clk) sample = W'(100 + $urandom % 5);
    for (int p = 0; p < 10; p++) shaped_pulse();
    // wobble between 290 and 315: only one trigger, the signal never drops below 280
    for (int i = 0; i < 200; i++) begin
      @(negedge clk) sample = W'((i % 2 == 1) ? 290 : 315);
      if (i == 1) begin exp_at.push_back(cyc); exp_count++; end
    end
    repeat (50) @(negedge clk) sample = 100;
    checks++;
    if (trig_count != exp_count || exp_at.size() != 0) begin
      failures++;
      $display("triggers %0d expected %0d", trig_count, exp_count);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
