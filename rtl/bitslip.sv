// bitslip: word-boundary shifter behind one ISERDES lane.
//
// The ISERDES hands over W bits per word clock, oldest bit in the MSB. The
// word boundary it picks is arbitrary, so this block keeps the previous
// word and outputs a W-bit window of the 2W-bit history {prev, cur}. Each
// one-cycle pulse on `slip` moves the window one bit later in time; after
// W pulses it is back where it started. This gives the same effect as the
// BITSLIP input of the FPGA's deserializer, which the paper's DPA
// controller pulses until the training word appears (Fig. 4 of the paper).
// Doing it in fabric logic, with a registered output, is this design's
// choice.
//
// Timing: `q` is registered; a word entering on `d` with `valid` shows up
// in `q` (as part of the window) one cycle later. `slip` takes effect on
// the next accepted word. `slip_count` reports the current offset.
module bitslip #(
  parameter int unsigned W = 8
) (
  input  logic                 clk,
  input  logic                 rst,
  input  logic                 valid,      // a new word from the deserializer
  input  logic [W-1:0]         d,
  input  logic                 slip,       // move boundary one bit later
  output logic [W-1:0]         q,
  output logic                 q_valid,
  output logic [$clog2(W)-1:0] slip_count
);
  logic [W-1:0]   prev;
  logic [2*W-1:0] hist;

  assign hist = {prev, d};

  always_ff @(posedge clk) begin
    if (rst) begin
      prev       <= '0;
      q          <= '0;
      q_valid    <= 1'b0;
      slip_count <= '0;
    end else begin
      q_valid <= valid;
      if (valid) begin
        prev <= d;
        // window starting slip_count bits after the oldest stored bit
        q    <= hist[2*W-1-32'(slip_count) -: W];
      end
      if (slip) slip_count <= (slip_count == $clog2(W)'(W-1)) ? '0 : slip_count + 1'b1;
    end
  end
endmodule
