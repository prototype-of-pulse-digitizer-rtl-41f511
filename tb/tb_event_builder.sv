// tb_event_builder: packages events from two slow and one two-lane fast
// channel (records of 8 and 4 ring-buffer words) served by a ring-buffer model
// whose words are a known function of channel and offset. The expected word
// list (headers, channel headers, packed samples, fill to a whole beat) is
// built independently and compared word by word, with random back-pressure
// on the output, for several channel masks. Also checks busy/done and the
// event number sequence.
module tb_event_builder;
  localparam int NS = 2, NF = 1, SWD = 8, FL = 2, FWD = 4, NC = NS + NF;
  logic clk = 0, rst = 1, start = 0, busy, done, out_valid, out_ready = 0;
  logic [NC-1:0] ch_mask;
  logic [63:0] timestamp, out_data;
  rain_pkg::trig_src_t src;
  logic [31:0] event_number;
  logic [$clog2(SWD)-1:0] slow_rd_addr;
  logic [$clog2(FWD)-1:0] fast_rd_addr;
  logic [NS-1:0][15:0] slow_rd_data;
  logic [NF-1:0][FL*16-1:0] fast_rd_data;
  int checks = 0, failures = 0;
  logic [63:0] exp_q [$];

  event_builder #(.N_SLOW(NS), .N_FAST(NF), .SLOW_WORDS(SWD), .FAST_LANES(FL), .FAST_WORDS(FWD)) dut (
    .clk, .rst, .start, .ch_mask, .timestamp, .src, .busy, .done, .event_number,
    .slow_rd_addr, .slow_rd_data, .fast_rd_addr, .fast_rd_data, .out_valid, .out_data, .out_ready);

  function automatic logic [15:0] sval(int c, int a); return 16'(c * 256 + a * 3 + 1); endfunction
  function automatic logic [15:0] fval(int c, int a, int l); return 16'(32'h8000 + c * 256 + a * 2 + l); endfunction

  // ring-buffer model: one clock read latency
  always @(posedge clk) begin
    for (int c = 0; c < NS; c++) slow_rd_data[c] <= sval(c, int'(slow_rd_addr));
    for (int c = 0; c < NF; c++)
      for (int l = 0; l < FL; l++) fast_rd_data[c][l*16 +: 16] <= fval(c, int'(fast_rd_addr), l);
  end

  always #5 clk = ~clk;
  initial begin
    #2000000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  always @(negedge clk) out_ready = ($urandom % 4) != 0;

  always @(posedge clk) if (!rst && out_valid && out_ready) begin
    checks++;
    if (exp_q.size() == 0) begin failures++; $display("extra word %h", out_data); end
    else begin
      logic [63:0] e;
      e = exp_q.pop_front();
      if (out_data !== e) begin failures++; $display("word %h expected %h", out_data, e); end
    end
  end

  task automatic run_event(logic [NC-1:0] m, logic [63:0] ts, rain_pkg::trig_src_t s, int evn);
    logic [15:0] slots [$];
    int n;
    n = 3;
    for (int c = 0; c < NC; c++) if (m[c]) n += 3;
    n = (n + 7) / 8 * 8;
    exp_q.push_back({16'hCDE0, 4'b0, 12'(m), 32'(evn)});
    exp_q.push_back(ts);
    exp_q.push_back({14'b0, s, 16'b0, 32'(n)});
    for (int c = 0; c < NC; c++) if (m[c]) begin
      exp_q.push_back({16'hC4A0, 8'(c), (c < NS) ? 8'd1 : 8'(FL), 32'd2});
      slots.delete();
      if (c < NS) for (int a = 0; a < SWD; a++) slots.push_back(sval(c, a));
      else for (int a = 0; a < FWD; a++) for (int l = 0; l < FL; l++) slots.push_back(fval(c - NS, a, l));
      for (int w = 0; w < slots.size() / 4; w++)
        exp_q.push_back({slots[4*w+3], slots[4*w+2], slots[4*w+1], slots[4*w]});
    end
    while (exp_q.size() % 8 != 0) exp_q.push_back('1);
    @(negedge clk);
    ch_mask = m; timestamp = ts; src = s; start = 1;
    @(negedge clk); start = 0;
    checks++; if (!busy) failures++;
    while (!done) @(negedge clk);
    checks++; if (exp_q.size() != 0) begin failures++; $display("%0d words missing", exp_q.size()); end
    @(negedge clk);
    checks++; if (busy || event_number != 32'(evn + 1)) begin failures++; $display("event number %0d", event_number); end
  endtask

  initial begin
    ch_mask = '1; timestamp = '0; src = '0;
    repeat (2) @(negedge clk);
    rst = 0;
    run_event(3'b111, 64'h0123_4567_89AB_CDEF, 2'b01, 0);
    run_event(3'b101, 64'd1000, 2'b10, 1);
    run_event(3'b010, 64'd2000, 2'b11, 2);
    run_event(3'b000, 64'd3000, 2'b01, 3);
    run_event(3'b100, 64'd4000, 2'b01, 4);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
