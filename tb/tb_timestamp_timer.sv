// tb_timestamp_timer: the counter must advance by one per clock, a latch must
// capture the value of its own clock, and sync_clear must restart from zero.
module tb_timestamp_timer;
  logic clk = 0, rst = 1, sync_clear = 0, latch = 0;
  logic [63:0] now, stamp;
  int checks = 0, failures = 0;
  longint unsigned ref_now = 0, exp_stamp;

  timestamp_timer #(.TS_W(64)) dut (.clk, .rst, .sync_clear, .latch, .now, .stamp);
  always #5 clk = ~clk;
  initial begin
    #100000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    repeat (2) @(negedge clk);
    rst = 0;
    for (int i = 0; i < 500; i++) begin
      @(negedge clk);
      ref_now++;
      checks++; if (now != ref_now) begin failures++; $display("now %0d exp %0d", now, ref_now); end
      if ($urandom % 7 == 0) begin
        latch = 1; exp_stamp = now;
        @(negedge clk); latch = 0; ref_now++;
        checks++; if (stamp != exp_stamp) begin failures++; $display("stamp %0d exp %0d", stamp, exp_stamp); end
      end
      if (i == 250) begin
        sync_clear = 1; @(negedge clk); sync_clear = 0; ref_now = 0;
        checks++; if (now != 0) failures++;
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
