// word_packer: gearbox from variable-width input chunks to 64-bit words.
//
// Each accepted input chunk carries in_bits valid bits (LSB first) and is
// appended above the bits already held; whenever 64 or more bits are held the
// lowest 64 leave as one output word (valid/ready). in_room promises space
// for two maximal chunks, so a producer with one chunk in flight may look at
// in_room one clock ahead. Used by the event builder to pack 16-bit slow
// samples, 160-bit fast-sample words and 64-bit header words into one word
// stream. A chunk sum that is not a multiple of 64 stays held until more bits
// arrive; empty reports that nothing is held. This block is this design's own.
module word_packer #(
  parameter int unsigned IN_MAX = 160,
  parameter int unsigned OUT_W  = rain_pkg::WORD_W,
  localparam int unsigned BUF_W = OUT_W + 2 * IN_MAX,
  localparam int unsigned CW    = $clog2(BUF_W + 1)
) (
  input  logic              clk,
  input  logic              rst,
  input  logic              in_valid,
  input  logic [IN_MAX-1:0] in_data,
  input  logic [CW-1:0]     in_bits,
  output logic              in_room,
  output logic              out_valid,
  output logic [OUT_W-1:0]  out_data,
  input  logic              out_ready,
  output logic              empty
);
  logic [BUF_W-1:0] held;
  logic [CW-1:0]    count;
  logic [BUF_W-1:0] after_pop;
  logic [CW-1:0]    count_after_pop;
  logic             pop;
  logic [BUF_W-1:0] mask;

  assign out_valid = (count >= CW'(OUT_W));
  assign out_data  = held[OUT_W-1:0];
  assign pop       = out_valid && out_ready;
  assign in_room   = ({1'b0, count} + (CW+1)'(2 * IN_MAX)) <= (CW+1)'(BUF_W);
  assign empty     = (count == '0);

  assign after_pop       = pop ? (held >> OUT_W) : held;
  assign count_after_pop = pop ? count - CW'(OUT_W) : count;

  always_comb begin
    mask = '0;
    for (int i = 0; i < IN_MAX; i++)
      if (CW'(i) < in_bits) mask[i] = 1'b1;
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      held  <= '0;
      count <= '0;
    end else begin
      if (in_valid) begin
        held  <= after_pop | ((BUF_W'(in_data) & mask) << count_after_pop);
        count <= count_after_pop + in_bits;
      end else begin
        held  <= after_pop;
        count <= count_after_pop;
      end
    end
  end

  // The producer must respect in_room.
  assert property (@(posedge clk) disable iff (rst) in_valid |-> {1'b0, count_after_pop} + {1'b0, in_bits} <= (CW+1)'(BUF_W));
endmodule
