// tb_trigger_unit: drives the three trigger sources and checks Trigger-in and
// its source flags against the gate equation (over_threshold AND veto_n) OR
// random. Over-threshold pulses are placed outside and inside the 10 ms
// (here VETO clocks) inhibit hold; random triggers come every PERIOD clocks.
// Checks: every expected trigger appears two clocks after the first sample
// over threshold with the right flags, vetoed pulses give none but are
// counted, and random triggers appear at the right period.
module tb_trigger_unit;
  localparam int W = 14, VETO = 300, PERIOD = 2000;
  logic clk = 0, rst = 1, inhibit = 0, random_en = 1;
  logic [W-1:0] sample = 100, threshold = 300, hysteresis = 20;
  logic trig_in, veto_n;
  rain_pkg::trig_src_t src;
  logic [31:0] vetoed_count, inhibit_count;
  int checks = 0, failures = 0, cyc = 0;
  int n_ot = 0, n_rnd = 0, exp_ot = 0, exp_vetoed = 0, last_rnd = -1;
  int ot_at [$];

  trigger_unit #(.SAMPLE_W(W), .VETO_CYCLES(VETO), .RANDOM_PERIOD(PERIOD)) dut (
    .clk, .rst, .inhibit, .sample, .threshold, .hysteresis, .random_en,
    .trig_in, .src, .veto_n, .vetoed_count, .inhibit_count);

  always #5 clk = ~clk;
  initial begin
    #1000000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  always @(posedge clk) begin
    cyc <= cyc + 1;
    if (!rst && trig_in) begin
      checks++;
      if (!src.over_threshold && !src.random) failures++;
      if (src.over_threshold) begin
        n_ot++;
        if (ot_at.size() == 0 || ot_at[0] != cyc) begin
          failures++; $display("over-threshold trigger at %0d unexpected", cyc);
        end
        if (ot_at.size() > 0) void'(ot_at.pop_front());
      end
      if (src.random) begin
        n_rnd++;
        if (last_rnd >= 0 && cyc - last_rnd != PERIOD) begin
          failures++; $display("random period %0d", cyc - last_rnd);
        end
        last_rnd = cyc;
      end
    end
  end

  // Square pulse of 20 clocks at 500; expect a trigger unless vetoed.
  task automatic square(bit vetoed);
    @(negedge clk) sample = 500;
    if (!vetoed) begin ot_at.push_back(cyc + 2); exp_ot++; end
    else exp_vetoed++;
    repeat (20) @(negedge clk);
    sample = 100;
    repeat (40) @(negedge clk);
  endtask

  initial begin
    repeat (3) @(negedge clk);
    rst = 0;
    repeat (20) @(negedge clk);
    square(0);
    square(0);
    // inhibit pulse of 30 clocks, then pulses inside the hold
    inhibit = 1; repeat (30) @(negedge clk); inhibit = 0;
    repeat (5) @(negedge clk);
    square(1);
    square(1);
    repeat (VETO) @(negedge clk);
    checks++; if (!veto_n) failures++;
    square(0);
    repeat (2 * PERIOD) @(negedge clk);
    checks++; if (n_ot != exp_ot) begin failures++; $display("ot %0d exp %0d", n_ot, exp_ot); end
    checks++; if (vetoed_count != 32'(exp_vetoed)) begin failures++; $display("vetoed %0d", vetoed_count); end
    checks++; if (inhibit_count != 1) failures++;
    checks++; if (n_rnd < 2) begin failures++; $display("random %0d", n_rnd); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
