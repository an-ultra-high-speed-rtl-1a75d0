// mig_model: behavioural model of the user interface of a DDR3 memory
// controller (the FPGA vendor's generated core) with the memory behind it.
// Not synthesizable. Calibration completes CALIB cycles after reset.
// `app_rdy` and `app_wdf_rdy` drop at random, STALL_PCT percent of cycles
// (plus a forced stall while `hold` is high). A write command takes its
// data in the same cycle (the only way the sequencer issues writes). Read
// data return in order, LAT cycles after the command. Storage is a sparse
// associative array indexed by address, so only touched words cost memory.
module mig_model #(
  parameter int unsigned DW    = 512,
  parameter int unsigned AW    = 29,
  parameter int unsigned LAT   = 20,
  parameter int unsigned CALIB = 50
) (
  input  logic          clk,
  input  logic          rst,
  input  int unsigned   stall_pct,
  input  logic          hold,
  output logic          init_calib_complete,
  input  logic [AW-1:0] app_addr,
  input  logic [2:0]    app_cmd,
  input  logic          app_en,
  output logic          app_rdy,
  input  logic [DW-1:0] app_wdf_data,
  input  logic          app_wdf_wren,
  input  logic          app_wdf_end,
  output logic          app_wdf_rdy,
  output logic [DW-1:0] app_rd_data,
  output logic          app_rd_data_valid,
  output int unsigned   n_writes,
  output int unsigned   n_reads,
  output int unsigned   n_errors
);
  logic [DW-1:0] mem [longint unsigned];
  typedef struct { longint unsigned t; logic [AW-1:0] a; } rd_t;
  rd_t rq[$];
  longint unsigned now;
  int unsigned calib_cnt;

  always_ff @(posedge clk) begin
    if (rst) begin
      now <= 0;
      calib_cnt <= 0;
      init_calib_complete <= 1'b0;
      app_rdy <= 1'b0;
      app_wdf_rdy <= 1'b0;
      app_rd_data_valid <= 1'b0;
      app_rd_data <= '0;
      n_writes <= 0; n_reads <= 0; n_errors <= 0;
    end else begin
      now <= now + 1;
      if (calib_cnt < CALIB) calib_cnt <= calib_cnt + 1;
      else init_calib_complete <= 1'b1;
      // accept
      if (app_en && app_rdy) begin
        if (app_cmd == 3'b000) begin
          if (!(app_wdf_wren && app_wdf_rdy && app_wdf_end)) n_errors <= n_errors + 1;
          mem[longint'(app_addr)] = app_wdf_data;
          n_writes <= n_writes + 1;
        end else if (app_cmd == 3'b001) begin
          rq.push_back('{now + LAT, app_addr});
          n_reads <= n_reads + 1;
        end else n_errors <= n_errors + 1;
      end else if (app_wdf_wren) n_errors <= n_errors + 1;
      // return read data in order
      app_rd_data_valid <= 1'b0;
      if (rq.size() > 0 && rq[0].t <= now) begin
        rd_t r;
        r = rq.pop_front();
        app_rd_data_valid <= 1'b1;
        app_rd_data <= mem.exists(longint'(r.a)) ? mem[longint'(r.a)] : '0;
      end
      app_rdy     <= init_calib_complete && !hold && (($urandom % 100) >= stall_pct);
      app_wdf_rdy <= init_calib_complete && !hold && (($urandom % 100) >= stall_pct);
    end
  end
endmodule
