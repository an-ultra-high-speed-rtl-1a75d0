// ddr_sequencer: moves one capture into the DDR3 memory and back out,
// talking to the user ("app_*") interface of the FPGA vendor's DDR3
// controller, in that controller's clock domain.
//
// `start` (a pulse, with `len_pkts` stable) begins a record of
// len_pkts * 16 memory words of 512 bits. Write phase: each word popped
// from the capture FIFO is sent as one write command at address
// index * 8 (the controller addresses 64-bit units, a 512-bit word is one
// burst of 8) together with its data, in the cycle where both `app_rdy`
// and `app_wdf_rdy` are high. When the whole record is stored, the read
// phase reads it back from address 0 in order and pushes the returned
// words into the upload FIFO. Reads are issued only while the words in
// flight plus those already in the upload FIFO leave room in it, so that
// FIFO can never overflow. `done` pulses after the last word has come
// back. Nothing is issued before the controller reports calibration done.
//
// The paper says the processed data go to DDR3 through the controller
// and are uploaded after being cached; this write-then-read-back order,
// the addressing and the flow control are this design's choices.
module ddr_sequencer
  import digitizer_pkg::*;
#(
  parameter int unsigned LW     = MAX_PKT_WIDTH,
  parameter int unsigned RF_AW  = 5            // upload FIFO depth 2**RF_AW words
) (
  input  logic                   clk,          // controller user clock
  input  logic                   rst,
  input  logic                   start,
  input  logic [LW-1:0]          len_pkts,
  output logic                   busy,
  output logic                   done,
  // capture FIFO, read side
  input  logic                   wf_empty,
  input  logic [APP_DATA_W-1:0]  wf_data,
  output logic                   wf_rd_en,
  // DDR3 controller user interface
  input  logic                   init_calib_complete,
  output logic [APP_ADDR_W-1:0]  app_addr,
  output logic [2:0]             app_cmd,
  output logic                   app_en,
  input  logic                   app_rdy,
  output logic [APP_DATA_W-1:0]  app_wdf_data,
  output logic                   app_wdf_wren,
  output logic                   app_wdf_end,
  input  logic                   app_wdf_rdy,
  input  logic [APP_DATA_W-1:0]  app_rd_data,
  input  logic                   app_rd_data_valid,
  // upload FIFO, write side
  output logic                   rf_wr_en,
  output logic [APP_DATA_W-1:0]  rf_wr_data,
  input  logic [RF_AW:0]         rf_used
);
  localparam int unsigned IW = LW + $clog2(PKT_WORDS);   // word index width
  typedef enum logic [1:0] { Q_IDLE, Q_WRITE, Q_READ } seq_e;
  seq_e state;
  logic [IW-1:0] total, wr_idx, rd_idx, rx_cnt;
  logic [RF_AW+1:0] in_flight;
  logic do_wr, do_rd;

  assign busy = (state != Q_IDLE);

  assign do_wr = (state == Q_WRITE) && init_calib_complete && !wf_empty &&
                 app_rdy && app_wdf_rdy;
  assign do_rd = (state == Q_READ) && init_calib_complete && app_rdy &&
                 (rd_idx != total) &&
                 ((in_flight + (RF_AW+2)'(rf_used)) < (RF_AW+2)'(2**RF_AW));

  always_comb begin
    app_en       = do_wr || do_rd;
    app_cmd      = do_rd ? APP_CMD_READ : APP_CMD_WRITE;
    app_addr     = APP_ADDR_W'(do_rd ? rd_idx : wr_idx) * APP_ADDR_W'(ADDR_STEP);
    app_wdf_wren = do_wr;
    app_wdf_end  = do_wr;
    app_wdf_data = wf_data;
    wf_rd_en     = do_wr;
    rf_wr_en     = (state == Q_READ) && app_rd_data_valid;
    rf_wr_data   = app_rd_data;
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      state     <= Q_IDLE;
      total     <= '0;
      wr_idx    <= '0;
      rd_idx    <= '0;
      rx_cnt    <= '0;
      in_flight <= '0;
      done      <= 1'b0;
    end else begin
      done <= 1'b0;
      unique case (state)
        Q_IDLE: if (start && len_pkts != '0) begin
          total  <= {len_pkts, ($clog2(PKT_WORDS))'(0)};
          wr_idx <= '0;
          rd_idx <= '0;
          rx_cnt <= '0;
          state  <= Q_WRITE;
        end
        Q_WRITE: if (do_wr) begin
          wr_idx <= wr_idx + 1'b1;
          if (wr_idx + 1'b1 == total) state <= Q_READ;
        end
        Q_READ: begin
          if (do_rd) rd_idx <= rd_idx + 1'b1;
          in_flight <= in_flight + (RF_AW+2)'(do_rd) - (RF_AW+2)'(app_rd_data_valid);
          if (app_rd_data_valid) begin
            rx_cnt <= rx_cnt + 1'b1;
            if (rx_cnt + 1'b1 == total) begin
              done  <= 1'b1;
              state <= Q_IDLE;
            end
          end
        end
        default: state <= Q_IDLE;
      endcase
    end
  end

  // Controller handshake rules
  a_no_cmd_before_calib: assert property (@(posedge clk) disable iff (rst)
    app_en |-> init_calib_complete);
  a_wdf_with_write: assert property (@(posedge clk) disable iff (rst)
    app_wdf_wren |-> (app_en && app_cmd == APP_CMD_WRITE && app_wdf_rdy));
endmodule
