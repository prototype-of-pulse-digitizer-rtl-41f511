// tb_ddr_event_buffer: streams 600 random 64-bit words through the DDR3 event
// buffer into a memory-controller model that stalls for refresh and at
// random, with a 16-beat region so the buffer fills and holds the input off.
// The reader is slow and bursty. Checks: the output is the input, in order and
// complete; the input was held off at least once while full; occupancy never
// exceeds the region; the beat counters match the traffic.
module tb_ddr_event_buffer;
  localparam int NB = 16, NWORDS = 600, DW = 512, AW = 27;
  logic clk = 0, rst = 1;
  logic in_valid = 0, in_ready, out_valid, out_ready = 0;
  logic [63:0] in_data = 0, out_data;
  logic [AW-1:0] app_addr;
  logic [2:0] app_cmd;
  logic app_en, app_rdy, app_wdf_wren, app_wdf_end, app_wdf_rdy, app_rd_data_valid;
  logic [DW-1:0] app_wdf_data, app_rd_data;
  logic [DW/8-1:0] app_wdf_mask;
  logic [$clog2(NB + 1)-1:0] occupancy;
  logic [31:0] beats_written, beats_read, full_stalls;
  int checks = 0, failures = 0, sent = 0, got = 0, max_occ = 0;
  logic [63:0] ref_q [$];

  ddr_event_buffer #(.NUM_BEATS(NB), .ADDR_W(AW)) dut (
    .clk, .rst, .in_valid, .in_data, .in_ready, .out_valid, .out_data, .out_ready,
    .app_addr, .app_cmd, .app_en, .app_rdy, .app_wdf_data, .app_wdf_wren, .app_wdf_end,
    .app_wdf_mask, .app_wdf_rdy, .app_rd_data, .app_rd_data_valid,
    .occupancy, .beats_written, .beats_read, .full_stalls);

  ddr3_mig_model #(.DW(DW), .AW(AW), .READ_LAT(12), .REFRESH_PERIOD(200), .REFRESH_CYCLES(10), .STALL_PCT(10)) u_mig (
    .clk, .rst, .app_addr, .app_cmd, .app_en, .app_rdy, .app_wdf_data, .app_wdf_wren,
    .app_wdf_end, .app_wdf_mask, .app_wdf_rdy, .app_rd_data, .app_rd_data_valid);

  always #5 clk = ~clk;
  initial begin
    #3000000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  always @(posedge clk) if (!rst) begin
    if (in_valid && in_ready) begin ref_q.push_back(in_data); sent++; end
    if (out_valid && out_ready) begin
      checks++;
      if (ref_q.size() == 0 || ref_q[0] !== out_data) begin
        failures++;
        if (failures < 10) $display("word %0d: %h expected %h", got, out_data, (ref_q.size() != 0) ? ref_q[0] : 64'h0);
      end
      if (ref_q.size() != 0) void'(ref_q.pop_front());
      got++;
    end
    if (int'(occupancy) > max_occ) max_occ = int'(occupancy);
  end

  // producer
  initial begin
    repeat (3) @(negedge clk);
    rst = 0;
    while (sent < NWORDS) begin
      @(negedge clk);
      in_valid = ($urandom % 8 != 0);
      in_data  = {$urandom, $urandom};
    end
    in_valid = 0;
  end

  // consumer: stalled for the first 1500 clocks so the buffer fills up
  initial begin
    repeat (1500) @(negedge clk);
    forever begin
      @(negedge clk);
      out_ready = ($urandom % 3) == 0;
    end
  end

  initial begin
    wait (sent >= NWORDS);
    in_valid = 0;
    wait (got == NWORDS || $time > 2900000);
    repeat (50) @(negedge clk);
    checks++; if (got != NWORDS) begin failures++; $display("got %0d of %0d", got, NWORDS); end
    checks++; if (full_stalls == 0) begin failures++; $display("never full"); end
    checks++; if (max_occ > NB) failures++;
    checks++; if (beats_written != NWORDS / 8 || beats_read != NWORDS / 8) begin
      failures++; $display("beats %0d %0d", beats_written, beats_read);
    end
    $display("full stalls %0d, max occupancy %0d", full_stalls, max_occ);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
