// tb_ddr_efficiency: the DDR3 write/read efficiency measurement at its full
// size: 268435456 (2^28) 32-bit patterns, 16777216 beats or 1 GB, against the
// memory-controller model with DDR3-1600-like refresh (16 clocks every
// 7.8 us at 100 MHz) and 10 % random not-ready clocks standing in for bank
// and bus turnarounds. Checks beat counts, zero read-back errors, a sample of
// stored patterns at their physical addresses, and that both efficiencies
// lie between the model's lower bound and 100 %. Takes about a minute and
// about 2 GB of memory for the sparse model.
module tb_ddr_efficiency;
  localparam int NP = 1 << 28, NB = NP / 16, DW = 512, AW = 27;
  logic clk = 0, rst = 1, start = 0, busy, done;
  logic [31:0] n_w, n_cw, n_r, n_cr, errors;
  logic [AW-1:0] app_addr;
  logic [2:0] app_cmd;
  logic app_en, app_rdy, app_wdf_wren, app_wdf_end, app_wdf_rdy, app_rd_data_valid;
  logic [DW-1:0] app_wdf_data, app_rd_data;
  logic [DW/8-1:0] app_wdf_mask;
  int checks = 0, failures = 0;

  ddr_bw_tester #(.NUM_PATTERNS(NP), .ADDR_W(AW)) dut (
    .clk, .rst, .start, .busy, .done, .n_w, .n_cw, .n_r, .n_cr, .errors,
    .app_addr, .app_cmd, .app_en, .app_rdy, .app_wdf_data, .app_wdf_wren, .app_wdf_end,
    .app_wdf_mask, .app_wdf_rdy, .app_rd_data, .app_rd_data_valid);

  ddr3_mig_model #(.DW(DW), .AW(AW), .READ_LAT(20), .REFRESH_PERIOD(780), .REFRESH_CYCLES(16), .STALL_PCT(10)) u_mig (
    .clk, .rst, .app_addr, .app_cmd, .app_en, .app_rdy, .app_wdf_data, .app_wdf_wren,
    .app_wdf_end, .app_wdf_mask, .app_wdf_rdy, .app_rd_data, .app_rd_data_valid);

  always #5 clk = ~clk;
  initial begin
    #2000000000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    real ew, er;
    repeat (3) @(negedge clk);
    rst = 0;
    @(negedge clk) start = 1;
    @(negedge clk) start = 0;
    while (!done) @(negedge clk);
    ew = 100.0 * n_w / n_cw;
    er = 100.0 * n_r / n_cr;
    $display("write efficiency %0d/%0d = %0.2f %%, read efficiency %0d/%0d = %0.2f %%", n_w, n_cw, ew, n_r, n_cr, er);
    checks++; if (n_w != NB || n_r != NB) begin failures++; $display("beats %0d %0d", n_w, n_r); end
    checks++; if (errors != 0) begin failures++; $display("errors %0d", errors); end
    // the model stalls 10 % of clocks on each ready plus 2 % refresh: about 80 % at worst
    checks++; if (ew < 70.0 || ew > 100.0 || er < 70.0 || er > 100.0) failures++;
    for (int i = 0; i < 100; i++) begin
      int p;
      p = $urandom % NP;
      checks++;
      if (u_mig.mem[AW'(p / 16 * 8)][(p % 16) * 32 +: 32] != 32'(p)) begin
        failures++; $display("pattern %0d not at its address", p);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
