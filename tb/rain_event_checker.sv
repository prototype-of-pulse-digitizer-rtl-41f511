// rain_event_checker: parses the readout word stream of the digitizer and
// checks every event: magic numbers, consecutive event numbers, the length
// field against the channel mask, each channel header, every sample against
// the waveform functions of rain_tb_pkg at the event's timestamp (the trigger
// channel may also carry the pulse amplitude), and the fill words. It counts
// events by trigger source and events with a partial channel mask.
module rain_event_checker #(
  parameter int unsigned N_SLOW      = 8,
  parameter int unsigned N_FAST      = 4,
  parameter int unsigned FAST_SPC    = 10,
  parameter int unsigned SLOW_RECORD = 12000,
  parameter int unsigned SLOW_PRE    = 6000,
  parameter int unsigned FAST_RECORD = 16000,
  parameter int unsigned FAST_PRE    = 8000,
  parameter int unsigned TRIG_CH     = 0
) (
  input  logic        clk,
  input  logic        rst,
  input  logic        valid,
  input  logic        ready,
  input  logic [63:0] data,
  output int          events,
  output int          checks,
  output int          failures,
  output int          n_ot,
  output int          n_rnd,
  output int          n_partial,
  output int          words
);
  import rain_tb_pkg::*;
  localparam int unsigned NC = N_SLOW + N_FAST;
  localparam int unsigned FWORDS = FAST_RECORD / FAST_SPC;
  logic [63:0] q [$];

  initial begin events = 0; checks = 0; failures = 0; n_ot = 0; n_rnd = 0; n_partial = 0; words = 0; end

  task automatic expect_eq(logic [63:0] got, logic [63:0] exp, string what);
    checks++;
    if (got !== exp) begin
      failures++;
      if (failures < 20) $display("event %0d %s: %h expected %h", events, what, got, exp);
    end
  endtask

  task automatic check_event();
    logic [11:0] mask;
    logic [63:0] ts;
    int unsigned total, n, k;
    logic [15:0] slots [$];
    mask  = q[0][43:32];
    ts    = q[1];
    total = q[2][31:0];
    expect_eq(64'(q[0][63:48]), 64'hCDE0, "magic");
    expect_eq(64'(q[0][31:0]), 64'(events), "event number");
    n = 3;
    for (int c = 0; c < NC; c++) if (mask[c]) n += 1 + ((c < N_SLOW) ? SLOW_RECORD / 4 : FAST_RECORD / 4);
    n = (n + 7) / 8 * 8;
    expect_eq(64'(total), 64'(n), "length");
    if (q[2][48]) n_ot++;
    if (q[2][49]) n_rnd++;
    checks++; if (q[2][49:48] == 2'b00) failures++;
    if (mask != 12'((1 << NC) - 1)) n_partial++;
    k = 3;
    for (int c = 0; c < NC; c++) if (mask[c]) begin
      bit fast;
      int unsigned dw;
      fast = (c >= N_SLOW);
      dw = fast ? FAST_RECORD / 4 : SLOW_RECORD / 4;
      expect_eq(q[k], {16'hC4A0, 8'(c), fast ? 8'(FAST_SPC) : 8'd1, 32'(dw)}, "channel header");
      k++;
      for (int w = 0; w < dw; w++) begin
        for (int s = 0; s < 4; s++) begin
          int unsigned i;
          logic [15:0] got, e;
          longint unsigned t;
          i = w * 4 + s;
          got = q[k][s*16 +: 16];
          if (!fast) begin
            t = ts - 64'(SLOW_PRE) + 64'(i);
            e = 16'(slow_base(c, t));
            if (c == TRIG_CH && got == 16'(e + PULSE_AMP)) e = got;
          end else begin
            t = ts - 64'(FAST_PRE / FAST_SPC) + 64'(i / FAST_SPC);
            e = 16'(fast_val(c - N_SLOW, i % FAST_SPC, t));
          end
          checks++;
          if (got !== e) begin
            failures++;
            if (failures < 20) $display("event %0d ch %0d sample %0d: %h expected %h", events, c, i, got, e);
          end
        end
        k++;
      end
    end
    while (k < total) begin expect_eq(q[k], '1, "fill"); k++; end
    for (int i = 0; i < int'(total); i++) void'(q.pop_front());
    events++;
  endtask

  always @(posedge clk) if (!rst && valid && ready) begin
    q.push_back(data);
    words++;
    if (q.size() >= 3 && q.size() >= int'(q[2][31:0])) check_event();
  end
endmodule
