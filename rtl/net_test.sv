// net_test: the network test source of the paper (Sec. III-A). Each data
// request command asks for N packets, N from 1 to 256; the block then
// offers N packets of 1024 bytes to the UDP transmitter. The data are a
// binary counter, as in the paper: a 32-bit count, sent most significant
// byte first, that advances by one every 4 bytes and carries on across
// packets and requests, so the host can spot lost or corrupted packets.
// Requests out of range are ignored and counted in `rejected`; a request
// that arrives while packets are still pending adds to them.
//
// Interface: `cmd_valid` + `cmd_n` (the request). `req` towards the UDP
// transmitter is high while packets are pending; on `gnt` one packet is
// started and `data` shows the next byte, consumed when `rd` is high.
// The 32-bit counter format and the queueing of requests are this
// design's choices.
module net_test
  import digitizer_pkg::*;
(
  input  logic        clk,
  input  logic        rst,
  input  logic        cmd_valid,
  input  logic [31:0] cmd_n,
  output logic        req,
  input  logic        gnt,
  input  logic        rd,
  output logic [7:0]  data,
  output logic [15:0] pending,
  output logic [15:0] rejected
);
  logic [31:0] count;
  logic [1:0]  bsel;
  logic        ok_n;

  assign ok_n = (cmd_n >= 32'd1) && (cmd_n <= 32'd256);
  assign req  = (pending != '0);
  assign data = count[8*(3 - int'(bsel)) +: 8];

  always_ff @(posedge clk) begin
    if (rst) begin
      pending  <= '0;
      rejected <= '0;
      count    <= '0;
      bsel     <= '0;
    end else begin
      pending <= pending + ((cmd_valid && ok_n) ? cmd_n[15:0] : 16'd0) - (gnt ? 16'd1 : 16'd0);
      if (cmd_valid && !ok_n) rejected <= rejected + 1'b1;
      if (gnt) bsel <= '0;
      if (rd) begin
        bsel <= bsel + 1'b1;
        if (bsel == 2'd3) count <= count + 1'b1;
      end
    end
  end
endmodule
