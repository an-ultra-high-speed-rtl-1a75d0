// upload_packetizer: turns the 512-bit words read back from DDR3 into
// 1024-byte UDP payloads (16 words each), in the Ethernet clock domain.
//
// It asks the UDP transmitter for a packet (`req`) only when a whole
// payload is waiting in the upload FIFO, because a started Ethernet frame
// cannot pause. Bytes of a word go out lowest byte first (bits 7:0 first),
// which keeps the little-endian packing of the 10-bit samples a single bit
// stream across words and packets. The FIFO word is popped as its last
// byte is taken. The paper states that cached data are uploaded over
// gigabit Ethernet in 1024-byte payloads; the byte order and the
// whole-packet rule are this design's choices.
module upload_packetizer
  import digitizer_pkg::*;
#(
  parameter int unsigned AW = 5              // upload FIFO address width
) (
  input  logic                  clk,
  input  logic                  rst,
  input  logic                  rf_empty,
  input  logic [APP_DATA_W-1:0] rf_data,
  input  logic [AW:0]           rf_used,
  output logic                  rf_rd_en,
  output logic                  req,
  input  logic                  gnt,
  input  logic                  rd,
  output logic [7:0]            data,
  output logic [31:0]           pkts_sent
);
  localparam int unsigned BW = $clog2(WORD_BYTES);
  logic        active;
  logic [9:0]  idx;
  logic [BW-1:0] boff;

  assign boff     = idx[BW-1:0];
  assign req      = !active && (rf_used >= (AW+1)'(PKT_WORDS));
  assign data     = rf_data[8*boff +: 8];
  assign rf_rd_en = rd && active && (boff == BW'(WORD_BYTES - 1)) && !rf_empty;

  always_ff @(posedge clk) begin
    if (rst) begin
      active    <= 1'b0;
      idx       <= '0;
      pkts_sent <= '0;
    end else begin
      if (gnt) begin
        active <= 1'b1;
        idx    <= '0;
      end else if (rd && active) begin
        idx <= idx + 1'b1;
        if (idx == 10'(PAYLOAD_BYTES - 1)) begin
          active    <= 1'b0;
          pkts_sent <= pkts_sent + 1'b1;
        end
      end
    end
  end

  a_no_underrun: assert property (@(posedge clk) disable iff (rst)
    (rd && active) |-> !rf_empty);
endmodule
