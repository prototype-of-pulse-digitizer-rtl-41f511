// ddr_bw_tester: measures the write and read efficiency of the DDR3 buffer.
//
// On start the tester writes the pattern sequence 0, 1, 2, ... NUM_PATTERNS-1
// to the DDR3, each 32-bit pattern at its own physical address (pattern p at
// byte address 4p), sixteen patterns to one 512-bit beat. It then reads every
// beat back in address order and compares it with the expected patterns.
// For each pass it counts the beats moved (n_w, n_r) and the user-clock
// cycles the pass took (n_cw, n_cr), from its first cycle to the acceptance of
// the last write (command and data) or the arrival of the last read beat.
// Efficiency is n_w/n_cw and n_r/n_cr; the gap to 100 % is the time the
// controller is not ready (refresh, bank and bus turnarounds). The pattern
// sequence, its count (0x10000000 at the paper's size) and the efficiency
// definition follow the paper; the beat packing and the per-beat counting are
// this design's choices. Commands and write data are issued on independent
// counters, each held until accepted.
module ddr_bw_tester #(
  parameter int unsigned NUM_PATTERNS = 32'h1000_0000,
  parameter int unsigned ADDR_W       = rain_pkg::APP_ADDR_W,
  localparam int unsigned DW          = rain_pkg::APP_DATA_W,
  localparam int unsigned PPB         = DW / 32,              // patterns per beat
  localparam int unsigned NB          = NUM_PATTERNS / PPB    // beats
) (
  input  logic              clk,
  input  logic              rst,
  input  logic              start,
  output logic              busy,
  output logic              done,
  output logic [31:0]       n_w,
  output logic [31:0]       n_cw,
  output logic [31:0]       n_r,
  output logic [31:0]       n_cr,
  output logic [31:0]       errors,
  // memory controller user interface
  output logic [ADDR_W-1:0] app_addr,
  output logic [2:0]        app_cmd,
  output logic              app_en,
  input  logic              app_rdy,
  output logic [DW-1:0]     app_wdf_data,
  output logic              app_wdf_wren,
  output logic              app_wdf_end,
  output logic [DW/8-1:0]   app_wdf_mask,
  input  logic              app_wdf_rdy,
  input  logic [DW-1:0]     app_rd_data,
  input  logic              app_rd_data_valid
);
  import rain_pkg::*;

  typedef enum logic [1:0] {BT_IDLE, BT_WRITE, BT_READ, BT_DONE} bt_state_e;
  bt_state_e state;

  logic [31:0] cmd_cnt, dat_cnt, ret_cnt;

  function automatic logic [DW-1:0] beat_data(input logic [31:0] b);
    logic [DW-1:0] d;
    for (int k = 0; k < PPB; k++) d[k*32 +: 32] = b * PPB + 32'(k);
    return d;
  endfunction

  assign busy         = (state == BT_WRITE) || (state == BT_READ);
  assign done         = (state == BT_DONE);
  assign app_en       = (state == BT_WRITE || state == BT_READ) && cmd_cnt != NB;
  assign app_cmd      = (state == BT_WRITE) ? APP_CMD_WRITE : APP_CMD_READ;
  assign app_addr     = ADDR_W'(cmd_cnt * ADDR_PER_BEAT);
  assign app_wdf_wren = (state == BT_WRITE) && dat_cnt != NB;
  assign app_wdf_end  = app_wdf_wren;
  assign app_wdf_data = beat_data(dat_cnt);
  assign app_wdf_mask = '0;

  initial if (NUM_PATTERNS % PPB != 0) $error("ddr_bw_tester: NUM_PATTERNS must fill whole beats");

  always_ff @(posedge clk) begin
    if (rst) begin
      state   <= BT_IDLE;
      cmd_cnt <= '0;
      dat_cnt <= '0;
      ret_cnt <= '0;
      n_w     <= '0;
      n_cw    <= '0;
      n_r     <= '0;
      n_cr    <= '0;
      errors  <= '0;
    end else begin
      unique case (state)
        BT_IDLE, BT_DONE: if (start) begin
          state   <= BT_WRITE;
          cmd_cnt <= '0;
          dat_cnt <= '0;
          ret_cnt <= '0;
          n_w     <= '0;
          n_cw    <= '0;
          n_r     <= '0;
          n_cr    <= '0;
          errors  <= '0;
        end
        BT_WRITE: begin
          logic [31:0] c, d;
          c = cmd_cnt + 32'(app_en && app_rdy);
          d = dat_cnt + 32'(app_wdf_wren && app_wdf_rdy);
          cmd_cnt <= c;
          dat_cnt <= d;
          n_cw    <= n_cw + 1'b1;
          n_w     <= (c < d) ? c : d;
          if (c == NB && d == NB) begin
            state   <= BT_READ;
            cmd_cnt <= '0;
          end
        end
        BT_READ: begin
          logic [31:0] r;
          r = ret_cnt + 32'(app_rd_data_valid);
          if (app_en && app_rdy) cmd_cnt <= cmd_cnt + 1'b1;
          if (app_rd_data_valid && app_rd_data != beat_data(ret_cnt))
            errors <= errors + 1'b1;
          ret_cnt <= r;
          n_r     <= r;
          n_cr    <= n_cr + 1'b1;
          if (r == NB) state <= BT_DONE;
        end
        default: state <= BT_IDLE;
      endcase
    end
  end
endmodule
