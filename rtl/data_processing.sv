// data_processing: trigger handling and sample capture in the ADC word
// clock domain (the "Data Processing" block of the paper's Fig. 3).
//
// Every word clock the aligned lane words hold 8 samples of each of the 4
// ADC cores, one bit per lane. They are regrouped into a 320-bit frame of
// 32 samples: sample j (j = 0 oldest) of core c sits at bits
// [(j*4 + c)*10 +: 10], so in the ADC's interleaved one-channel (5 Gsps)
// mode the frame is already in time order if cores are numbered in
// sampling order. A pulse on `arm` (accepted only after DPA has finished)
// arms the block with a length of `len_pkts` 1024-byte packets; the next
// rising edge of the external trigger starts the capture. Frames are packed
// densely into 512-bit memory words by the gearbox and written to the FIFO
// towards the DDR3 side until len_pkts * 16 words have been accepted.
// The ADC cannot be paused, so a word that meets a full FIFO is lost:
// `overflow` is then set (until the next arm) and the capture runs on
// until the full length has been written, leaving a gap in the record.
//
// The paper says only that on trigger the data go to DDR3 through the
// controller; the frame layout, arming, length in packets, post-trigger
// only capture and overflow handling are this design's choices.
//
// Timing: if the trigger is first sampled high at word clock edge t, the
// first captured frame is the lane word present at edge t+2 (two
// synchronizer stages); the gearbox emits a memory word one cycle after
// the frame that completes it.
module data_processing
  import digitizer_pkg::*;
#(
  parameter int unsigned LW = MAX_PKT_WIDTH
) (
  input  logic                          clk,        // ADC word clock
  input  logic                          rst,
  input  logic [N_LANES-1:0][DESER-1:0] word,       // aligned lane words
  input  logic                          dpa_done,
  input  logic                          trig_in,    // external trigger, asynchronous
  input  logic                          arm,        // one-cycle pulse
  input  logic [LW-1:0]                 len_pkts,   // capture length, packets of 1024 bytes
  input  logic                          fifo_full,
  output logic                          fifo_wr_en,
  output logic [APP_DATA_W-1:0]         fifo_wr_data,
  output logic                          armed,
  output logic                          capturing,
  output logic                          capture_done, // one-cycle pulse
  output logic                          overflow
);
  typedef enum logic [1:0] { C_IDLE, C_ARMED, C_RUN } cap_e;
  cap_e state;

  logic trig_s, trig_d, trig_rise;
  logic [FRAME_W-1:0] frame;
  logic frame_valid;
  logic gb_valid;
  logic [APP_DATA_W-1:0] gb_data;
  logic [LW+$clog2(PKT_WORDS)-1:0] words_left;

  sync_bit u_trig_sync (.clk, .rst, .d(trig_in), .q(trig_s));

  always_ff @(posedge clk) begin
    if (rst) trig_d <= 1'b0;
    else     trig_d <= trig_s;
  end
  assign trig_rise = trig_s && !trig_d;

  // regroup lane bits into samples
  always_ff @(posedge clk) begin
    for (int j = 0; j < DESER; j++)
      for (int c = 0; c < N_CH; c++)
        for (int b = 0; b < ADC_BITS; b++)
          frame[(j*N_CH + c)*ADC_BITS + b] <= word[c*ADC_BITS + b][DESER-1-j];
  end

  gearbox #(.IN_W(FRAME_W), .OUT_W(APP_DATA_W)) u_gearbox (
    .clk, .rst, .clear(state != C_RUN), .in_valid(frame_valid),
    .in_data(frame), .out_valid(gb_valid), .out_data(gb_data));

  assign fifo_wr_en   = gb_valid && (state == C_RUN) && !fifo_full;
  assign fifo_wr_data = gb_data;
  assign armed        = (state == C_ARMED);
  assign capturing    = (state == C_RUN);

  always_ff @(posedge clk) begin
    if (rst) begin
      state        <= C_IDLE;
      frame_valid  <= 1'b0;
      words_left   <= '0;
      overflow     <= 1'b0;
      capture_done <= 1'b0;
    end else begin
      capture_done <= 1'b0;
      unique case (state)
        C_IDLE: if (arm && dpa_done && len_pkts != '0) begin
          overflow   <= 1'b0;
          words_left <= {len_pkts, ($clog2(PKT_WORDS))'(0)};   // len_pkts * 16
          state      <= C_ARMED;
        end
        C_ARMED: if (trig_rise) begin
          frame_valid <= 1'b1;
          state       <= C_RUN;
        end
        C_RUN: begin
          if (gb_valid) begin
            if (fifo_full) begin
              overflow <= 1'b1;              // word lost
            end else if (words_left == 1) begin
              frame_valid  <= 1'b0;
              capture_done <= 1'b1;
              state        <= C_IDLE;
              words_left   <= '0;
            end else begin
              words_left <= words_left - 1'b1;
            end
          end
        end
        default: state <= C_IDLE;
      endcase
    end
  end
endmodule
