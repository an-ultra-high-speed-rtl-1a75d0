// dpa_lane_fsm: dynamic phase alignment (DPA) controller for one LVDS lane.
//
// While the ADC sends its fixed training pattern, this state machine walks
// the lane's IODELAY tap by tap to find the two edges of the data eye, parks
// the tap in the middle, then pulses BITSLIP until the deserialized word
// equals the training word. The order of steps is that of the paper's DPA
// flow chart (Fig. 4): reset IODELAY, increase by one until the left edge
// is detected, increase by one until the right edge is detected, set the
// IODELAY to the centre, activate one BITSLIP at a time until the pattern
// is detected, done.
//
// How an edge is detected is not given in the paper; this design's rule:
// after each tap change it waits SETTLE cycles, then looks at OBS words.
// The tap "shows a transition" if those words disagree among themselves or
// differ from the word seen at the previous tap. The left edge is the
// first tap showing a transition. The right edge is the next tap showing a
// transition after at least one quiet tap (same word as the tap before, no
// jitter), so the jitter around the left edge is not mistaken for it. The
// centre is (left + right) / 2. If the tap range runs out, or MAX_SLIPS
// slips never give the training word, `error` is raised with `done`;
// the error exit is also this design's addition.
//
// Interface: `start` (pulse) begins a run. `tap` drives the IODELAY
// count value and `tap_ld` pulses for one cycle whenever `tap` is new.
// `slip` is a one-cycle BITSLIP request. `word`/`word_valid` come from the
// bitslip stage. `left_tap`/`right_tap` hold the edges found.
module dpa_lane_fsm
  import digitizer_pkg::*;
#(
  parameter int unsigned   W         = DESER,
  parameter int unsigned   TW        = TAP_W,
  parameter logic [W-1:0]  TRAIN     = TRAIN_WORD,
  parameter int unsigned   SETTLE    = 4,
  parameter int unsigned   OBS       = 8,
  parameter int unsigned   MAX_SLIPS = 2 * W
) (
  input  logic          clk,
  input  logic          rst,
  input  logic          start,
  input  logic [W-1:0]  word,
  input  logic          word_valid,
  output logic [TW-1:0] tap,
  output logic          tap_ld,
  output logic          slip,
  output logic          busy,
  output logic          done,
  output logic          error,
  output logic [TW-1:0] left_tap,
  output logic [TW-1:0] right_tap
);
  typedef enum logic [3:0] {
    S_IDLE, S_RESET, S_INC_L, S_INC_R, S_SET, S_SLIP, S_WAIT, S_OBS, S_DONE
  } state_e;

  // which step an observation belongs to
  typedef enum logic [1:0] { P_REF, P_LEFT, P_RIGHT, P_PAT } phase_e;

  state_e  state;
  phase_e  phase;
  logic [$clog2(SETTLE+1)-1:0] wait_cnt;
  logic [$clog2(OBS+1)-1:0]    obs_cnt;
  logic [$clog2(MAX_SLIPS+1)-1:0] slip_cnt;
  logic [W-1:0] first_w, ref_w;
  logic         unstable, seen_quiet;

  logic         transition;
  logic         quiet;
  logic [TW:0]  centre;
  assign transition = unstable || (first_w != ref_w);
  assign quiet      = !transition;
  assign centre     = ({1'b0, left_tap} + {1'b0, right_tap}) >> 1;
  assign busy       = (state != S_IDLE) && (state != S_DONE);

  always_ff @(posedge clk) begin
    if (rst) begin
      state      <= S_IDLE;
      phase      <= P_REF;
      tap        <= '0;
      tap_ld     <= 1'b0;
      slip       <= 1'b0;
      done       <= 1'b0;
      error      <= 1'b0;
      left_tap   <= '0;
      right_tap  <= '0;
      wait_cnt   <= '0;
      obs_cnt    <= '0;
      slip_cnt   <= '0;
      first_w    <= '0;
      ref_w      <= '0;
      unstable   <= 1'b0;
      seen_quiet <= 1'b0;
    end else begin
      tap_ld <= 1'b0;
      slip   <= 1'b0;
      unique case (state)
        S_IDLE, S_DONE: if (start) begin
          done  <= 1'b0;
          error <= 1'b0;
          state <= S_RESET;
        end
        // Fig. 4 "Reset": IODELAY back to tap 0, take a reference word
        S_RESET: begin
          tap        <= '0;
          tap_ld     <= 1'b1;
          seen_quiet <= 1'b0;
          slip_cnt   <= '0;
          phase      <= P_REF;
          wait_cnt   <= '0;
          state      <= S_WAIT;
        end
        // Fig. 4 "Increase IODELAY by one" (left and right searches)
        S_INC_L, S_INC_R: begin
          if (tap == '1) begin
            error <= 1'b1;                 // ran out of taps
            done  <= 1'b1;
            state <= S_DONE;
          end else begin
            tap      <= tap + 1'b1;
            tap_ld   <= 1'b1;
            phase    <= (state == S_INC_L) ? P_LEFT : P_RIGHT;
            wait_cnt <= '0;
            state    <= S_WAIT;
          end
        end
        // Fig. 4 "Set IODELAY" to the centre of the eye
        S_SET: begin
          tap      <= centre[TW-1:0];
          tap_ld   <= 1'b1;
          phase    <= P_PAT;
          wait_cnt <= '0;
          state    <= S_WAIT;
        end
        // Fig. 4 "Activate one BITSLIP"
        S_SLIP: begin
          if (slip_cnt == ($clog2(MAX_SLIPS+1))'(MAX_SLIPS)) begin
            error <= 1'b1;
            done  <= 1'b1;
            state <= S_DONE;
          end else begin
            slip     <= 1'b1;
            slip_cnt <= slip_cnt + 1'b1;
            phase    <= P_PAT;
            wait_cnt <= '0;
            state    <= S_WAIT;
          end
        end
        S_WAIT: begin
          if (wait_cnt == ($clog2(SETTLE+1))'(SETTLE)) begin
            obs_cnt  <= '0;
            unstable <= 1'b0;
            state    <= S_OBS;
          end else begin
            wait_cnt <= wait_cnt + 1'b1;
          end
        end
        S_OBS: begin
          if (obs_cnt == ($clog2(OBS+1))'(OBS)) begin
            // all OBS words seen: decide (the diamonds of Fig. 4)
            ref_w <= first_w;
            unique case (phase)
              P_REF:  state <= S_INC_L;
              P_LEFT: begin
                if (transition) begin
                  left_tap <= tap;         // record left IODELAY value
                  state    <= S_INC_R;
                end else begin
                  state <= S_INC_L;
                end
              end
              P_RIGHT: begin
                if (transition && seen_quiet) begin
                  right_tap <= tap;        // record right IODELAY value
                  state     <= S_SET;
                end else begin
                  if (quiet) seen_quiet <= 1'b1;
                  state <= S_INC_R;
                end
              end
              P_PAT: begin
                if (first_w == TRAIN && !unstable) begin
                  done  <= 1'b1;           // word alignment done
                  state <= S_DONE;
                end else begin
                  state <= S_SLIP;
                end
              end
              default: state <= S_IDLE;
            endcase
          end else if (word_valid) begin
            obs_cnt <= obs_cnt + 1'b1;
            if (obs_cnt == '0) first_w <= word;
            else if (word != first_w) unstable <= 1'b1;
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end
endmodule
