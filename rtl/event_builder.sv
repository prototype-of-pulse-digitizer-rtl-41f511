// event_builder: the "Data Package and Timestamp" stage.
//
// When every ring buffer has frozen its record (start), the builder writes one
// event as a stream of 64-bit words:
//   word 0  {EVT_MAGIC[15:0], 4'b0, ch_mask[11:0], event_number[31:0]}
//   word 1  timestamp of the trigger (64 bits)
//   word 2  {14'b0, src[1:0], 16'b0, total_words[31:0]}  src = {random, over_threshold}
//   then for each enabled channel, slow channels 0..N_SLOW-1 first and then
//   fast channels N_SLOW..N_SLOW+N_FAST-1:
//           {CH_MAGIC[15:0], channel[7:0], lanes[7:0], data_words[31:0]}
//           the record, four 16-bit samples per word, oldest sample in the
//           low slot of the first word
//   fill words (all ones) up to a multiple of eight words, one DDR3 beat.
// total_words counts all of these, fill words included. Records are read from
// the ring buffers through one shared offset bus per channel kind, one ring
// buffer word per clock while the packer has room, and packed by word_packer.
// When the last word has left, done pulses for one clock; it releases the ring
// buffers and the event number increments. The paper names the packaging and
// timestamp function; the word format is this design's own.
module event_builder #(
  parameter int unsigned N_SLOW     = rain_pkg::N_SLOW,
  parameter int unsigned N_FAST     = rain_pkg::N_FAST,
  parameter int unsigned SLOW_WORDS = rain_pkg::SLOW_RECORD,                      // ring words
  parameter int unsigned FAST_LANES = rain_pkg::FAST_SPC,
  parameter int unsigned FAST_WORDS = rain_pkg::FAST_RECORD / rain_pkg::FAST_SPC, // ring words
  localparam int unsigned N_CH      = N_SLOW + N_FAST,
  localparam int unsigned SW        = rain_pkg::SLOT_W,
  localparam int unsigned FW        = FAST_LANES * rain_pkg::SLOT_W,
  localparam int unsigned RWS       = $clog2(SLOW_WORDS),
  localparam int unsigned RWF       = $clog2(FAST_WORDS)
) (
  input  logic                       clk,
  input  logic                       rst,
  input  logic                       start,
  input  logic [N_CH-1:0]            ch_mask,
  input  logic [rain_pkg::TS_W-1:0]  timestamp,
  input  rain_pkg::trig_src_t        src,
  output logic                       busy,
  output logic                       done,
  output logic [31:0]                event_number,
  output logic [RWS-1:0]             slow_rd_addr,
  input  logic [N_SLOW-1:0][SW-1:0]  slow_rd_data,
  output logic [RWF-1:0]             fast_rd_addr,
  input  logic [N_FAST-1:0][FW-1:0]  fast_rd_data,
  output logic                       out_valid,
  output logic [63:0]                out_data,
  input  logic                       out_ready
);
  import rain_pkg::*;

  localparam int unsigned SLOW_DW = SLOW_WORDS * SW / 64;   // data words per channel
  localparam int unsigned FAST_DW = FAST_WORDS * FW / 64;
  localparam int unsigned IN_MAX  = (FW > 64) ? FW : 64;
  localparam int unsigned PCW     = $clog2(64 + 2 * IN_MAX + 1);
  localparam int unsigned CHW     = $clog2(N_CH + 1);

  initial begin
    if ((SLOW_WORDS * SW) % 64 != 0 || (FAST_WORDS * FW) % 64 != 0)
      $error("event_builder: records must fill whole 64-bit words");
  end

  typedef enum logic [2:0] {EB_IDLE, EB_HDR, EB_CH_HDR, EB_DATA, EB_FILL, EB_DRAIN} eb_state_e;
  eb_state_e state;

  logic [N_CH-1:0]   mask_q;
  logic [TS_W-1:0]   ts_q;
  trig_src_t         src_q;
  logic [1:0]        hdr_idx;
  logic [CHW-1:0]    ch;
  logic [31:0]       addr_cnt;
  logic [31:0]       words_out;     // 64-bit words pushed into the packer
  logic [31:0]       total_words;
  logic              rd_pending;
  logic              rd_fast_q;
  logic [CHW-1:0]    rd_ch_q;

  logic              pk_valid;
  logic [IN_MAX-1:0] pk_data;
  logic [PCW-1:0]    pk_bits;
  logic              pk_room, pk_empty;

  word_packer #(.IN_MAX(IN_MAX)) u_pack (
    .clk, .rst, .in_valid(pk_valid), .in_data(pk_data), .in_bits(pk_bits),
    .in_room(pk_room), .out_valid, .out_data, .out_ready, .empty(pk_empty)
  );

  // Event length for the latched mask, rounded up to whole beats.
  always_comb begin
    int unsigned n;
    n = 3;
    for (int c = 0; c < N_CH; c++)
      if (ch_mask[c]) n += 1 + ((c < N_SLOW) ? SLOW_DW : FAST_DW);
    n = (n + WORDS_PER_BEAT - 1) / WORDS_PER_BEAT * WORDS_PER_BEAT;
    total_words = 32'(n);
  end

  logic [31:0] total_q;
  logic        cur_fast;
  logic [31:0] cur_len;
  assign cur_fast = (ch >= CHW'(N_SLOW));
  assign cur_len  = cur_fast ? 32'(FAST_WORDS) : 32'(SLOW_WORDS);

  assign slow_rd_addr = RWS'(addr_cnt);
  assign fast_rd_addr = RWF'(addr_cnt);
  assign busy = (state != EB_IDLE);

  // Packer input: a returned ring-buffer word or a header/fill word.
  always_comb begin
    pk_valid = 1'b0;
    pk_data  = '0;
    pk_bits  = '0;
    if (rd_pending) begin
      pk_valid = 1'b1;
      if (rd_fast_q) begin
        pk_data = IN_MAX'(fast_rd_data[rd_ch_q - CHW'(N_SLOW)]);
        pk_bits = PCW'(FW);
      end else begin
        pk_data = IN_MAX'(slow_rd_data[rd_ch_q]);
        pk_bits = PCW'(SW);
      end
    end else if (pk_room) begin
      unique case (state)
        EB_HDR: begin
          pk_valid = 1'b1;
          pk_bits  = PCW'(64);
          unique case (hdr_idx)
            2'd0:    pk_data = IN_MAX'({EVT_MAGIC, 4'b0, 12'(mask_q), event_number});
            2'd1:    pk_data = IN_MAX'(ts_q);
            default: pk_data = IN_MAX'({14'b0, src_q, 16'b0, total_q});
          endcase
        end
        EB_CH_HDR: if (mask_q[ch]) begin
          pk_valid = 1'b1;
          pk_bits  = PCW'(64);
          pk_data  = IN_MAX'({CH_MAGIC, 8'(ch), cur_fast ? 8'(FAST_LANES) : 8'd1,
                              cur_fast ? 32'(FAST_DW) : 32'(SLOW_DW)});
        end
        EB_FILL: if (words_out != total_q) begin
          pk_valid = 1'b1;
          pk_bits  = PCW'(64);
          pk_data  = IN_MAX'(FILL_WORD);
        end
        default: ;
      endcase
    end
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      state        <= EB_IDLE;
      mask_q       <= '0;
      ts_q         <= '0;
      src_q        <= '0;
      total_q      <= '0;
      hdr_idx      <= '0;
      ch           <= '0;
      addr_cnt     <= '0;
      words_out    <= '0;
      rd_pending   <= 1'b0;
      rd_fast_q    <= 1'b0;
      rd_ch_q      <= '0;
      done         <= 1'b0;
      event_number <= '0;
    end else begin
      done       <= 1'b0;
      rd_pending <= 1'b0;
      if (pk_valid && pk_bits == PCW'(64)) words_out <= words_out + 1'b1;
      unique case (state)
        EB_IDLE: if (start) begin
          mask_q    <= ch_mask;
          ts_q      <= timestamp;
          src_q     <= src;
          total_q   <= total_words;
          hdr_idx   <= '0;
          words_out <= '0;
          state     <= EB_HDR;
        end
        EB_HDR: if (!rd_pending && pk_room) begin
          hdr_idx <= hdr_idx + 1'b1;
          if (hdr_idx == 2'd2) begin
            ch    <= '0;
            state <= EB_CH_HDR;
          end
        end
        EB_CH_HDR: begin
          if (ch == CHW'(N_CH)) begin
            state <= EB_FILL;
          end else if (!mask_q[ch]) begin
            ch <= ch + 1'b1;
          end else if (pk_room) begin
            addr_cnt <= '0;
            state    <= EB_DATA;
            words_out <= words_out + 1'b1 + (cur_fast ? 32'(FAST_DW) : 32'(SLOW_DW));
          end
        end
        EB_DATA: begin
          if (addr_cnt == cur_len) begin
            if (!rd_pending) begin
              ch    <= ch + 1'b1;
              state <= EB_CH_HDR;
            end
          end else if (pk_room) begin
            // ring-buffer data arrives next clock; pk_room covers it and the word in flight
            rd_pending <= 1'b1;
            rd_fast_q  <= cur_fast;
            rd_ch_q    <= ch;
            addr_cnt   <= addr_cnt + 1'b1;
          end
        end
        EB_FILL: if (words_out == total_q && !pk_valid) state <= EB_DRAIN;
        EB_DRAIN: if (pk_empty) begin
          done         <= 1'b1;
          event_number <= event_number + 1'b1;
          state        <= EB_IDLE;
        end
        default: state <= EB_IDLE;
      endcase
    end
  end
endmodule
