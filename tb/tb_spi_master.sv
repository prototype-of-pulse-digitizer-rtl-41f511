// tb_spi_master: a mode-0 SPI slave model shifts mosi in on rising sclk edges
// and drives miso from its own word, changing on falling edges, while its chip
// select is low. For random frames and chip selects it checks the word the
// slave received, the word returned in rx_data, the number of sclk pulses,
// that only the chosen chip select went low, and the frame duration of
// 2*CLK_DIV*FRAME_W clocks from the start edge to the done edge.
module tb_spi_master;
  localparam int FW = 24, DIV = 4, NCS = 4;
  logic clk = 0, rst = 1, start = 0, busy, done, sclk, mosi, miso;
  logic [1:0] cs_sel = 0;
  logic [FW-1:0] tx_data = 0, rx_data;
  logic [NCS-1:0] cs_n;
  int checks = 0, failures = 0, edges = 0;
  logic [FW-1:0] slave_rx, slave_tx;
  logic [NCS-1:0] cs_seen;

  spi_master #(.FRAME_W(FW), .CLK_DIV(DIV), .NUM_CS(NCS)) dut (
    .clk, .rst, .start, .cs_sel, .tx_data, .rx_data, .busy, .done, .sclk, .mosi, .miso, .cs_n);

  always #5 clk = ~clk;
  initial begin
    #1000000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  // slave model
  always @(posedge sclk) if (cs_n != '1) begin slave_rx = {slave_rx[FW-2:0], mosi}; edges++; end
  always @(negedge sclk) if (cs_n != '1) slave_tx = {slave_tx[FW-2:0], 1'b0};
  assign miso = slave_tx[FW-1];
  always @(posedge clk) cs_seen <= cs_seen & cs_n;

  initial begin
    repeat (3) @(negedge clk);
    rst = 0;
    for (int n = 0; n < 12; n++) begin
      int t0, t1;
      logic [FW-1:0] tx, stx;
      tx = FW'($urandom); stx = FW'($urandom);
      slave_tx = stx; edges = 0; cs_seen = '1;
      @(negedge clk);
      tx_data = tx; cs_sel = 2'($urandom); start = 1; t0 = int'($time / 10);
      @(negedge clk) start = 0;
      while (!done) @(negedge clk);
      t1 = int'($time / 10);
      checks++; if (slave_rx !== tx) begin failures++; $display("slave got %h sent %h", slave_rx, tx); end
      checks++; if (rx_data !== stx) begin failures++; $display("rx %h expected %h", rx_data, stx); end
      checks++; if (edges != FW) begin failures++; $display("%0d sclk edges", edges); end
      checks++; if (cs_seen != ~(NCS'(1) << cs_sel)) begin failures++; $display("cs %b", cs_seen); end
      checks++; if (t1 - t0 != 2 * DIV * FW + 1) begin failures++; $display("frame took %0d", t1 - t0); end
      checks++; if (cs_n != '1 || sclk) failures++;
      repeat (5) @(negedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
