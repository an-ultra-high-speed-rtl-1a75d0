// dpa_module: the LVDS receive side of the ADC link for all lanes, i.e. the
// fabric part of the paper's "DPA module" (Fig. 3): one bitslip stage and
// one DPA controller per lane, plus the power-on self-test sequence.
//
// After reset the module asks the ADC for its training pattern
// (`adc_train_mode` high), waits until the configuration write has gone
// out (`cfg_busy` low) and then CFG_WAIT more word-clock cycles for the
// ADC to switch, then runs every lane's DPA controller in
// parallel. When all lanes have finished, `adc_train_mode` drops (the ADC
// returns to normal sampling, as the paper describes) and `dpa_done` rises;
// `dpa_error` is set if any lane failed. A pulse on `restart` runs the
// whole sequence again. The IODELAY and ISERDES primitives themselves sit
// outside: this module takes each lane's deserialized word `raw` and returns
// the IODELAY tap value and load strobe. Running all lanes at once, the
// CFG_WAIT delay and the restart input are this design's choices; the
// paper gives the flow of each lane and the self-test at power-on.
//
// Timing: `raw` is sampled every word clock; `word` is `raw` re-framed by
// the bitslip, one cycle later.
module dpa_module
  import digitizer_pkg::*;
#(
  parameter int unsigned NL       = N_LANES,
  parameter int unsigned W        = DESER,
  parameter int unsigned TW       = TAP_W,
  parameter int unsigned CFG_WAIT = 64
) (
  input  logic                clk,          // word clock
  input  logic                rst,
  input  logic                restart,
  input  logic                cfg_busy,     // ADC configuration write in progress
  input  logic [NL-1:0][W-1:0] raw,         // from the ISERDES of each lane
  output logic [NL-1:0][TW-1:0] tap,        // to the IODELAY of each lane
  output logic [NL-1:0]       tap_ld,
  output logic [NL-1:0][W-1:0] word,        // aligned words
  output logic                adc_train_mode,
  output logic                dpa_done,
  output logic                dpa_error,
  output logic [NL-1:0]       lane_error
);
  typedef enum logic [1:0] { T_CFG, T_START, T_RUN, T_DONE } seq_e;
  seq_e seq;
  logic [$clog2(CFG_WAIT+1)-1:0] cfg_cnt;
  logic start;
  logic [NL-1:0] slip, wvalid, busy, done;

  for (genvar i = 0; i < NL; i++) begin : g_lane
    logic [$clog2(W)-1:0] slip_count;
    logic [TW-1:0] left_tap, right_tap;
    bitslip #(.W(W)) u_bitslip (
      .clk, .rst, .valid(1'b1), .d(raw[i]), .slip(slip[i]),
      .q(word[i]), .q_valid(wvalid[i]), .slip_count(slip_count));
    dpa_lane_fsm #(.W(W), .TW(TW)) u_ctrl (
      .clk, .rst, .start, .word(word[i]), .word_valid(wvalid[i]),
      .tap(tap[i]), .tap_ld(tap_ld[i]), .slip(slip[i]), .busy(busy[i]),
      .done(done[i]), .error(lane_error[i]), .left_tap(left_tap),
      .right_tap(right_tap));
  end

  assign start = (seq == T_START);

  always_ff @(posedge clk) begin
    if (rst) begin
      seq            <= T_CFG;
      cfg_cnt        <= '0;
      adc_train_mode <= 1'b1;
      dpa_done       <= 1'b0;
      dpa_error      <= 1'b0;
    end else begin
      unique case (seq)
        T_CFG: begin                       // self-test: ADC sends training pattern
          adc_train_mode <= 1'b1;
          dpa_done       <= 1'b0;
          if (cfg_busy) begin              // wait for the ADC register write
            cfg_cnt <= '0;
          end else if (cfg_cnt == ($clog2(CFG_WAIT+1))'(CFG_WAIT)) begin
            cfg_cnt <= '0;
            seq     <= T_START;
          end else begin
            cfg_cnt <= cfg_cnt + 1'b1;
          end
        end
        T_START: seq <= T_RUN;
        T_RUN: if (&done && !(|busy)) begin
          adc_train_mode <= 1'b0;          // back to normal sampling
          dpa_done       <= 1'b1;
          dpa_error      <= |lane_error;
          seq            <= T_DONE;
        end
        T_DONE: if (restart) begin
          dpa_error <= 1'b0;
          seq       <= T_CFG;
        end
        default: seq <= T_CFG;
      endcase
    end
  end
endmodule
