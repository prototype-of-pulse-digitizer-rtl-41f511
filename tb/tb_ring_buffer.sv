// tb_ring_buffer: two-lane buffer with a 20-word record and 8 pre-trigger
// words in a 32-word memory. Every clock's samples are a known function of
// the clock number, so the expected record follows from the trigger clock.
// Checks: a trigger before the buffer is armed is ignored, the buffer freezes
// exactly POST clocks after an accepted trigger, the frozen record reads back
// oldest first with PRE words before the trigger clock, the record stays
// unchanged while frozen, and armed returns only PRE clocks after release.
module tb_ring_buffer;
  localparam int SW = 12, L = 2, REC = 20, PRE = 8, DEPTH = 32, POST = REC - PRE;
  logic clk = 0, rst = 1, trigger = 0, release_rec = 0, armed, frozen;
  logic [L*SW-1:0] in_data;
  logic [$clog2(REC)-1:0] rd_addr = 0;
  logic [L*16-1:0] rd_data;
  int checks = 0, failures = 0, cyc = 0;

  ring_buffer #(.SAMPLE_W(SW), .LANES(L), .RECORD(REC), .PRE(PRE), .DEPTH(DEPTH)) dut (
    .clk, .rst, .in_data, .trigger, .release_rec, .armed, .frozen, .rd_addr, .rd_data);

  function automatic logic [SW-1:0] smp(int c, int l);
    return SW'(c * 7 + l * 1001 + 3);
  endfunction

  always_comb in_data = {smp(cyc, 1), smp(cyc, 0)};
  always #5 clk = ~clk;
  always @(posedge clk) cyc <= cyc + 1;

  initial begin
    #100000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  task automatic read_check(int tcyc);
    for (int i = 0; i < REC; i++) begin
      logic [31:0] exp;
      @(negedge clk) rd_addr = $bits(rd_addr)'(i);
      @(negedge clk);
      exp = {4'b0, smp(tcyc - PRE + i, 1), 4'b0, smp(tcyc - PRE + i, 0)};
      checks++;
      if (rd_data !== exp) begin
        failures++;
        $display("word %0d: %h expected %h", i, rd_data, exp);
      end
    end
  endtask

  task automatic capture();
    int tcyc, fcyc;
    wait (armed); @(negedge clk);
    repeat ($urandom % 40) @(negedge clk);
    trigger = 1; tcyc = cyc; @(negedge clk); trigger = 0;
    while (!frozen) @(negedge clk);
    fcyc = cyc;
    checks++;
    if (fcyc - tcyc != POST) begin failures++; $display("froze after %0d clocks", fcyc - tcyc); end
    repeat (50) @(negedge clk);   // nothing may be overwritten while frozen
    read_check(tcyc);
    release_rec = 1; @(negedge clk); release_rec = 0;
    checks++; if (armed) failures++;
    repeat (PRE - 2) @(negedge clk);
    checks++; if (armed) begin failures++; $display("armed too early"); end
    repeat (3) @(negedge clk);
    checks++; if (!armed) begin failures++; $display("not armed"); end
  endtask

  initial begin
    repeat (2) @(negedge clk);
    rst = 0;
    @(negedge clk);
    trigger = 1; @(negedge clk); trigger = 0;   // not yet armed: ignored
    repeat (POST + 3) @(negedge clk);
    checks++; if (frozen) failures++;
    for (int n = 0; n < 6; n++) capture();
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
