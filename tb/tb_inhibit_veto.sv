// tb_inhibit_veto: checks the inverted, 10 ms-extended inhibit against a
// history model: veto_n must be high exactly when the inhibit input was low
// in each of the VETO+1 clocks ending one clock before the current one (two
// synchronizer flops). Pulses of several widths and spacings, including one
// that restarts a running hold, are applied; rising edges are counted.
module tb_inhibit_veto;
  localparam int unsigned VETO = 50;
  logic clk = 0, rst = 1, inhibit = 0, veto_n, pulse_seen;
  int checks = 0, failures = 0, pulses = 0, exp_pulses = 0, low_cycles = 0;
  bit hist [$];

  inhibit_veto #(.VETO_CYCLES(VETO)) dut (.clk, .rst, .inhibit, .veto_n, .pulse_seen);

  always #5 clk = ~clk;

  initial begin
    #200000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) if (!rst) begin
    hist.push_back(inhibit);
    if (pulse_seen) pulses++;
  end

  // compare after each edge
  always @(negedge clk) if (!rst && hist.size() > VETO + 2) begin
    bit exp;
    int k;
    k = hist.size() - 1;
    exp = 1;
    for (int i = k - 1 - VETO; i <= k - 1; i++) if (hist[i]) exp = 0;
    checks++;
    if (veto_n !== exp) begin
      failures++;
      if (failures < 10) $display("mismatch at sample %0d: veto_n=%0b exp=%0b", k, veto_n, exp);
    end
    if (!veto_n) low_cycles++;
  end

  task automatic pulse(int width, int gap);
    @(negedge clk) inhibit = 1;
    repeat (width) @(negedge clk);
    inhibit = 0;
    exp_pulses++;
    repeat (gap) @(negedge clk);
  endtask

  initial begin
    repeat (3) @(negedge clk);
    rst = 0;
    repeat (VETO + 10) @(negedge clk);
    pulse(9, 200);          // isolated pulse
    pulse(1, 200);          // one-clock pulse
    pulse(5, 20);           // second pulse inside the hold restarts it
    pulse(5, 200);
    for (int i = 0; i < 20; i++) pulse(1 + $urandom % 8, $urandom % 120);
    repeat (200) @(negedge clk);
    checks++;
    if (pulses != exp_pulses) begin
      failures++;
      $display("pulse count %0d expected %0d", pulses, exp_pulses);
    end
    checks++;
    if (low_cycles < 4 * VETO) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
