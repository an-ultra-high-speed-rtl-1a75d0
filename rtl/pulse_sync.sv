// pulse_sync: carries a one-cycle pulse from one clock domain to another.
// The source flips a toggle flip-flop; the destination passes it through
// two flip-flops and turns each change back into a one-cycle pulse, three
// destination cycles later. Pulses must be spaced further apart than a few
// destination cycles. Part of this design's clock
// crossings, not described in the paper.
module pulse_sync (
  input  logic src_clk,
  input  logic src_rst,
  input  logic src_pulse,
  input  logic dst_clk,
  input  logic dst_rst,
  output logic dst_pulse
);
  logic tgl;
  logic [2:0] sync;
  always_ff @(posedge src_clk) begin
    if (src_rst)        tgl <= 1'b0;
    else if (src_pulse) tgl <= ~tgl;
  end
  always_ff @(posedge dst_clk) begin
    if (dst_rst) sync <= '0;
    else         sync <= {sync[1:0], tgl};
  end
  assign dst_pulse = sync[2] ^ sync[1];
endmodule
