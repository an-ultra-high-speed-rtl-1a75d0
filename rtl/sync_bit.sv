// sync_bit: two flip-flop synchronizer for a level signal entering a clock
// domain (the external trigger, status flags). Output follows the input two
// to three `clk` cycles later. Reset value is 0.
module sync_bit (
  input  logic clk,
  input  logic rst,
  input  logic d,
  output logic q
);
  logic s1;
  always_ff @(posedge clk) begin
    if (rst) begin
      s1 <= 1'b0;
      q  <= 1'b0;
    end else begin
      s1 <= d;
      q  <= s1;
    end
  end
endmodule
