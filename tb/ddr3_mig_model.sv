// ddr3_mig_model: behavioural model (not synthesizable) of a DDR3 memory
// controller's user interface together with the memory behind it.
//
// It accepts app_* commands and write-data beats like a DDR3 controller core:
// a command is taken when app_en and app_rdy are both high, a write-data beat
// when app_wdf_wren and app_wdf_rdy are. A write is stored once both its
// command and its data have arrived (in order). A read returns the stored beat
// (zero if never written) READ_LAT clocks later, in command order, on
// app_rd_data/app_rd_data_valid. app_rdy drops for REFRESH_CYCLES every
// REFRESH_PERIOD clocks (periodic refresh) and, like app_wdf_rdy, also drops
// at random for STALL_PCT percent of the clocks, so the efficiency seen by a
// user is below 100 %. Memory is a sparse associative array.
module ddr3_mig_model #(
  parameter int unsigned DW             = 512,
  parameter int unsigned AW             = 27,
  parameter int unsigned READ_LAT       = 16,
  parameter int unsigned REFRESH_PERIOD = 780,
  parameter int unsigned REFRESH_CYCLES = 16,
  parameter int unsigned STALL_PCT      = 5
) (
  input  logic          clk,
  input  logic          rst,
  input  logic [AW-1:0] app_addr,
  input  logic [2:0]    app_cmd,
  input  logic          app_en,
  output logic          app_rdy,
  input  logic [DW-1:0] app_wdf_data,
  input  logic          app_wdf_wren,
  input  logic          app_wdf_end,
  input  logic [DW/8-1:0] app_wdf_mask,
  output logic          app_wdf_rdy,
  output logic [DW-1:0] app_rd_data,
  output logic          app_rd_data_valid
);
  logic [DW-1:0] mem [logic [AW-1:0]];
  logic [AW-1:0] wcmd_q [$];
  logic [DW-1:0] wdat_q [$];
  logic [DW-1:0] rdat_q [$];
  longint unsigned rdue_q [$];
  longint unsigned cyc;
  int unsigned refresh_cnt;

  always @(posedge clk) begin
    if (rst) begin
      cyc <= 0;
      refresh_cnt <= 0;
      app_rdy <= 1'b0;
      app_wdf_rdy <= 1'b0;
      app_rd_data_valid <= 1'b0;
      app_rd_data <= '0;
      wcmd_q.delete(); wdat_q.delete(); rdat_q.delete(); rdue_q.delete();
    end else begin
      cyc <= cyc + 1;
      // accept
      if (app_en && app_rdy) begin
        if (app_cmd == 3'b000) wcmd_q.push_back(app_addr);
        else begin
          // earlier writes whose data is present are stored first
          while (wcmd_q.size() > 0 && wdat_q.size() > 0) begin
            mem[wcmd_q.pop_front()] = wdat_q.pop_front();
          end
          rdat_q.push_back(mem.exists(app_addr) ? mem[app_addr] : '0);
          rdue_q.push_back(cyc + longint'(READ_LAT));
        end
      end
      if (app_wdf_wren && app_wdf_rdy) begin
        if (!app_wdf_end) $error("ddr3_mig_model: one beat per burst expected");
        if (app_wdf_mask != '0) $error("ddr3_mig_model: byte masks not modelled");
        wdat_q.push_back(app_wdf_data);
      end
      while (wcmd_q.size() > 0 && wdat_q.size() > 0) begin
        mem[wcmd_q.pop_front()] = wdat_q.pop_front();
      end
      // return read data
      app_rd_data_valid <= 1'b0;
      if (rdue_q.size() > 0 && rdue_q[0] <= cyc) begin
        app_rd_data_valid <= 1'b1;
        app_rd_data <= rdat_q.pop_front();
        void'(rdue_q.pop_front());
      end
      // readiness for the next clock
      refresh_cnt <= (refresh_cnt == REFRESH_PERIOD - 1) ? 0 : refresh_cnt + 1;
      app_rdy     <= (refresh_cnt >= REFRESH_CYCLES) && (($urandom % 100) >= STALL_PCT);
      app_wdf_rdy <= (($urandom % 100) >= STALL_PCT);
    end
  end
endmodule
