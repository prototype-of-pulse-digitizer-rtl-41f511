// spi_master: slow-control serial port to the ADCs and the offset DAC.
//
// A write of FRAME_W bits (tx_data, MSB first) to the device chosen by
// cs_sel starts a transfer: the chosen active-low chip select falls, sclk
// runs at clk / (2*CLK_DIV) with SPI mode 0 (data changes on the falling edge,
// is sampled on the rising edge; a frame lasts 2*CLK_DIV*FRAME_W clocks from
// start to done), and the bits read on miso during the same
// frame are returned in rx_data when done pulses. Chip select rises, and sclk
// returns low, one half sclk period after the last rising edge. A 24-bit frame suits the ADCs'
// instruction+data words and the DAC's command words. The paper says only
// that the ADCs are set up over SPI; frame length, mode and rate are this
// design's choices.
module spi_master #(
  parameter int unsigned FRAME_W = 24,
  parameter int unsigned CLK_DIV = 10,
  parameter int unsigned NUM_CS  = 4,
  localparam int unsigned CSW    = (NUM_CS > 1) ? $clog2(NUM_CS) : 1
) (
  input  logic               clk,
  input  logic               rst,
  input  logic               start,
  input  logic [CSW-1:0]     cs_sel,
  input  logic [FRAME_W-1:0] tx_data,
  output logic [FRAME_W-1:0] rx_data,
  output logic               busy,
  output logic               done,
  output logic               sclk,
  output logic               mosi,
  input  logic               miso,
  output logic [NUM_CS-1:0]  cs_n
);
  localparam int unsigned DCW = $clog2(CLK_DIV + 1);
  localparam int unsigned BCW = $clog2(FRAME_W + 1);

  logic [DCW-1:0]     div;
  logic [BCW-1:0]     bits;
  logic [FRAME_W-1:0] sh_tx;
  logic               tick;

  assign tick = (div == DCW'(CLK_DIV - 1));
  assign mosi = sh_tx[FRAME_W-1];

  always_ff @(posedge clk) begin
    if (rst) begin
      div     <= '0;
      bits    <= '0;
      sh_tx   <= '0;
      rx_data <= '0;
      busy    <= 1'b0;
      done    <= 1'b0;
      sclk    <= 1'b0;
      cs_n    <= '1;
    end else begin
      done <= 1'b0;
      if (!busy) begin
        div <= '0;
        if (start) begin
          busy          <= 1'b1;
          sh_tx         <= tx_data;
          bits          <= '0;
          cs_n          <= '1;
          cs_n[cs_sel]  <= 1'b0;
        end
      end else begin
        div <= tick ? '0 : div + 1'b1;
        if (tick) begin
          if (bits == BCW'(FRAME_W)) begin
            // half period after the last rising edge: end of frame
            busy <= 1'b0;
            done <= 1'b1;
            cs_n <= '1;
            sclk <= 1'b0;
          end else if (!sclk) begin
            sclk    <= 1'b1;                          // sample
            rx_data <= {rx_data[FRAME_W-2:0], miso};
            bits    <= bits + 1'b1;
          end else begin
            sclk  <= 1'b0;                            // shift out next bit
            sh_tx <= {sh_tx[FRAME_W-2:0], 1'b0};
          end
        end
      end
    end
  end
endmodule
