// ring_buffer: circular waveform buffer of one ADC channel.
//
// While running, every clock's LANES samples are written, as one word of
// LANES 16-bit slots (samples zero-extended, lane 0 in the low slot), at the
// next address of a DEPTH-word circular memory, so the buffer always holds the
// most recent history. A trigger starts the post-trigger phase: the word of
// the trigger clock and POST-1 more words are written, then writing stops and
// the record is frozen. The record is the last RECORD words, PRE words before
// the trigger clock and POST = RECORD - PRE from it on. The frozen record is
// read with rd_addr = 0 .. RECORD-1 (oldest first), data one clock later.
// release_rec resumes writing; armed is high once PRE words have been written
// since the last release, so a record never holds stale pre-trigger data.
// Triggers that arrive while the buffer is not armed are ignored.
// The paper gives the ring buffers' role (buffer ADC data in the FPGA and wait
// for the trigger); the freeze-until-read scheme, the pre-trigger length and
// the word layout are this design's choices.
module ring_buffer #(
  parameter int unsigned SAMPLE_W = rain_pkg::SLOW_BITS,
  parameter int unsigned LANES    = 1,
  parameter int unsigned RECORD   = rain_pkg::SLOW_RECORD,       // words
  parameter int unsigned PRE      = rain_pkg::SLOW_RECORD / 2,   // words
  parameter int unsigned DEPTH    = 2 ** $clog2(RECORD),
  localparam int unsigned WORD    = LANES * rain_pkg::SLOT_W,
  localparam int unsigned AW      = $clog2(DEPTH),
  localparam int unsigned RW      = $clog2(RECORD)
) (
  input  logic                      clk,
  input  logic                      rst,
  input  logic [LANES*SAMPLE_W-1:0] in_data,
  input  logic                      trigger,
  input  logic                      release_rec,
  output logic                      armed,
  output logic                      frozen,
  input  logic [RW-1:0]             rd_addr,
  output logic [WORD-1:0]           rd_data
);
  localparam int unsigned POST = RECORD - PRE;

  typedef enum logic [1:0] {RB_RUN, RB_POST, RB_FROZEN} rb_state_e;
  rb_state_e state;

  logic [WORD-1:0] mem [DEPTH];
  logic [AW-1:0]   wr_ptr, start;
  logic [RW:0]     fill;      // words written since release, saturating at PRE
  logic [RW:0]     post_cnt;
  logic [WORD-1:0] in_word;
  logic            we;

  initial begin
    if (DEPTH < RECORD) $error("ring_buffer: DEPTH must hold RECORD words");
    if (PRE >= RECORD)  $error("ring_buffer: PRE must be below RECORD");
    if (DEPTH != 2 ** AW) $error("ring_buffer: DEPTH must be a power of two");
  end

  always_comb begin
    in_word = '0;
    for (int l = 0; l < LANES; l++)
      in_word[l*rain_pkg::SLOT_W +: rain_pkg::SLOT_W] =
        rain_pkg::SLOT_W'(in_data[l*SAMPLE_W +: SAMPLE_W]);
  end

  assign we     = (state != RB_FROZEN);
  assign armed  = (state == RB_RUN) && (fill >= (RW+1)'(PRE));
  assign frozen = (state == RB_FROZEN);

  always_ff @(posedge clk) begin
    if (we) mem[wr_ptr] <= in_word;
    rd_data <= mem[start + AW'(rd_addr)];
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      state    <= RB_RUN;
      wr_ptr   <= '0;
      start    <= '0;
      fill     <= '0;
      post_cnt <= '0;
    end else begin
      if (we) wr_ptr <= wr_ptr + 1'b1;   // DEPTH is a power of two
      unique case (state)
        RB_RUN: begin
          if (fill < (RW+1)'(PRE)) fill <= fill + 1'b1;
          if (trigger && armed) begin
            state    <= (POST == 1) ? RB_FROZEN : RB_POST;
            post_cnt <= (RW+1)'(1);
            start    <= wr_ptr - AW'(PRE);
          end
        end
        RB_POST: begin
          post_cnt <= post_cnt + 1'b1;
          if (post_cnt == (RW+1)'(POST - 1)) state <= RB_FROZEN;
        end
        RB_FROZEN: begin
          if (release_rec) begin
            state <= RB_RUN;
            fill  <= '0;
          end
        end
        default: state <= RB_RUN;
      endcase
    end
  end
endmodule
