// tb_ddr_bw_tester: runs the DDR3 efficiency test with 3200 patterns (200
// beats) against a memory-controller model with refresh and random stalls.
// Checks: n_w and n_r equal the beat count, no compare errors, the cycle
// counts are at least the beat counts and match the clocks the passes
// actually took (counted here from busy), a sample of memory locations hold
// pattern p at byte address 4p, and a second run after corrupting one stored
// word rewrites it and again reports no error.
module tb_ddr_bw_tester;
  localparam int NP = 3200, NB = NP / 16, DW = 512, AW = 27;
  logic clk = 0, rst = 1, start = 0, busy, done;
  logic [31:0] n_w, n_cw, n_r, n_cr, errors;
  logic [AW-1:0] app_addr;
  logic [2:0] app_cmd;
  logic app_en, app_rdy, app_wdf_wren, app_wdf_end, app_wdf_rdy, app_rd_data_valid;
  logic [DW-1:0] app_wdf_data, app_rd_data;
  logic [DW/8-1:0] app_wdf_mask;
  int checks = 0, failures = 0, busy_cycles = 0;

  ddr_bw_tester #(.NUM_PATTERNS(NP), .ADDR_W(AW)) dut (
    .clk, .rst, .start, .busy, .done, .n_w, .n_cw, .n_r, .n_cr, .errors,
    .app_addr, .app_cmd, .app_en, .app_rdy, .app_wdf_data, .app_wdf_wren, .app_wdf_end,
    .app_wdf_mask, .app_wdf_rdy, .app_rd_data, .app_rd_data_valid);

  ddr3_mig_model #(.DW(DW), .AW(AW), .READ_LAT(10), .REFRESH_PERIOD(100), .REFRESH_CYCLES(8), .STALL_PCT(5)) u_mig (
    .clk, .rst, .app_addr, .app_cmd, .app_en, .app_rdy, .app_wdf_data, .app_wdf_wren,
    .app_wdf_end, .app_wdf_mask, .app_wdf_rdy, .app_rd_data, .app_rd_data_valid);

  always #5 clk = ~clk;
  initial begin
    #2000000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  always @(posedge clk) if (busy) busy_cycles++;

  task automatic run(int exp_err);
    busy_cycles = 0;
    @(negedge clk) start = 1;
    @(negedge clk) start = 0;
    while (!done) @(negedge clk);
    checks++; if (n_w != NB) begin failures++; $display("n_w %0d", n_w); end
    checks++; if (n_r != NB) begin failures++; $display("n_r %0d", n_r); end
    checks++; if (errors != 32'(exp_err)) begin failures++; $display("errors %0d expected %0d", errors, exp_err); end
    checks++; if (n_cw < NB || n_cr < NB) failures++;
    checks++; if (n_cw + n_cr != 32'(busy_cycles)) begin failures++; $display("cycles %0d+%0d vs %0d", n_cw, n_cr, busy_cycles); end
    $display("write efficiency %0d/%0d, read efficiency %0d/%0d", n_w, n_cw, n_r, n_cr);
  endtask

  initial begin
    repeat (3) @(negedge clk);
    rst = 0;
    run(0);
    for (int i = 0; i < 20; i++) begin
      int p;
      p = $urandom % NP;
      checks++;
      if (u_mig.mem[AW'(p / 16 * 8)][(p % 16) * 32 +: 32] != 32'(p)) begin
        failures++; $display("pattern %0d not at its address", p);
      end
    end
    // corrupt one stored pattern: the write pass rewrites it, so no error
    u_mig.mem[AW'(8 * 7)][31:0] = 32'hDEAD_BEEF;
    run(0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
