// reset_sync: makes a reset for one clock domain from the board's
// asynchronous active-low reset. The reset asserts at once and is released
// two clock edges after `rst_n` rises, in step with `clk`.
module reset_sync (
  input  logic clk,
  input  logic rst_n,
  output logic rst
);
  logic r1;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      r1  <= 1'b1;
      rst <= 1'b1;
    end else begin
      r1  <= 1'b0;
      rst <= r1;
    end
  end
endmodule
