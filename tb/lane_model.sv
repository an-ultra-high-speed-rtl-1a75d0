// lane_model: behavioural model of one ADC output bit as the FPGA sees it
// after the LVDS pad, the IODELAY tap delay line and the 1:W ISERDES.
//
// Not synthesizable. The ADC core CH produces sample s (one per bit time):
//   training mode: bit value = (s mod 8) >= 4, i.e. 0000_1111 per 8 samples
//   normal mode:   sample = (3*s + 37*CH + 5) mod 1024, this lane carries bit BIT
// The lane arrives with a fixed skew of P0 delay taps; the IODELAY adds
// `tap` taps (latched on `tap_ld`). With TPB taps per bit time the total
// delay d = P0 + tap makes the deserializer see sample index s - d/TPB.
// Within JIT taps of a bit boundary the captured bit is random between the
// two neighbouring samples (the data-eye transition region). One word of W
// bits (oldest in the MSB) comes out per word clock.
module lane_model #(
  parameter int unsigned W    = 8,
  parameter int unsigned TW   = 5,
  parameter int unsigned CH   = 0,
  parameter int unsigned BIT  = 0,
  parameter int unsigned P0   = 3,
  parameter int unsigned TPB  = 10,
  parameter int unsigned JIT  = 1
) (
  input  logic          clk,
  input  logic          rst,
  input  logic          train,
  input  logic [TW-1:0] tap,
  input  logic          tap_ld,
  output logic [W-1:0]  q
);
  int unsigned tap_q;
  longint unsigned w_cnt;

  function automatic logic sample_bit(input longint signed s);
    longint unsigned v;
    if (s < 0) return 1'b0;
    if (train) return (s % 8) >= 4;
    v = (3 * s + 37 * CH + 5) % 1024;
    return v[BIT];
  endfunction

  always_ff @(posedge clk) begin
    if (rst) begin
      tap_q <= 0;
      w_cnt <= 0;
      q     <= '0;
    end else begin
      int unsigned d, shift, pos;
      logic [W-1:0] nq;
      if (tap_ld) tap_q <= int'(tap);
      d     = P0 + tap_q;
      shift = d / TPB;
      pos   = d % TPB;
      for (int j = 0; j < W; j++) begin
        longint signed s;
        s = longint'(w_cnt * W + j) - longint'(shift);
        if ((pos < JIT || pos >= TPB - JIT) && ($urandom % 2 == 1))
          nq[W-1-j] = sample_bit((pos < JIT) ? s + 1 : s - 1);
        else
          nq[W-1-j] = sample_bit(s);
      end
      q     <= nq;
      w_cnt <= w_cnt + 1;
    end
  end
endmodule
