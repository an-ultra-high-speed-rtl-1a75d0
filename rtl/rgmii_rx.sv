// rgmii_rx: RGMII-to-GMII receive adapter with a crossing from the PHY's
// receive clock to the design's own 125 MHz Ethernet clock.
//
// The PHY sends a byte per cycle of its recovered receive clock `rx_clk`
// as two nibbles (low nibble on the rising edge) and a control line that
// is RX_DV on the rising edge and RX_DV xor RX_ER on the falling edge. The
// double-data-rate input registers sit outside, in the pin-level design;
// this module gets their two outputs per pin (`rx_rise`, `rx_fall`, each
// {ctl, d[3:0]}) in the rx_clk domain and rebuilds the GMII byte, DV and ER.
//
// rx_clk and clk are both nominally 125 MHz but come from different
// crystals, so they drift apart by up to a few hundred ppm. The bytes of
// a frame, plus an end-of-frame marker, go through a small dual-clock FIFO.
// The read side waits until START entries are buffered (or the marker is
// there) and then plays the frame out without gaps until the marker: the
// MAC receiver needs DV to stay high for a whole frame. START = 4 covers
// the drift over a 1522-byte frame (200 ppm of 1522 is under one byte)
// and the FIFO's pointer-synchronizer lag. If the FIFO nevertheless runs
// dry inside a frame, the byte is sent with ER set so the frame is
// discarded rather than corrupted.
//
// Timing: latency from the rx_clk input registers to `gmii_*` is about
// START + 4 cycles. The crossing and its sizes are this design's; the
// paper only names RGMII as the PHY interface.
module rgmii_rx #(
  parameter int unsigned AW    = 4,
  parameter int unsigned START = 4
) (
  input  logic       rx_clk,
  input  logic       rx_rst,
  input  logic [4:0] rx_rise,
  input  logic [4:0] rx_fall,
  input  logic       clk,
  input  logic       rst,
  output logic [7:0] gmii_rxd,
  output logic       gmii_rx_dv,
  output logic       gmii_rx_er
);
  // ---- rx_clk side: decode, write bytes and an end marker {eof, er, d}
  logic       dv, er, dv_q;
  logic [7:0] d;
  logic       wr_en;
  logic [9:0] wr_data;
  always_ff @(posedge rx_clk) begin
    if (rx_rst) begin
      dv <= 1'b0; er <= 1'b0; d <= '0; dv_q <= 1'b0;
    end else begin
      dv   <= rx_rise[4];
      er   <= rx_rise[4] ^ rx_fall[4];
      d    <= {rx_fall[3:0], rx_rise[3:0]};
      dv_q <= dv;
    end
  end
  assign wr_en   = dv || dv_q;
  assign wr_data = dv ? {1'b0, er, d} : {1'b1, 1'b0, 8'h00};

  logic [9:0] rd_data;
  logic       rd_en, rd_empty;
  logic [AW:0] rd_used;
  logic       wr_full_unused;
  logic [AW:0] wr_used_unused;
  async_fifo #(.DW(10), .AW(AW)) u_fifo (
    .wr_clk(rx_clk), .wr_rst(rx_rst), .wr_en, .wr_data, .wr_full(wr_full_unused),
    .wr_used(wr_used_unused),
    .rd_clk(clk), .rd_rst(rst), .rd_en, .rd_data, .rd_empty, .rd_used);

  // ---- clk side: start a frame once START entries wait, then stream it
  logic running;
  logic head_eof;
  assign head_eof = !rd_empty && rd_data[9];
  assign rd_en    = !rd_empty && (running || head_eof ||
                                  rd_used >= (AW+1)'(START));
  always_ff @(posedge clk) begin
    if (rst) begin
      running    <= 1'b0;
      gmii_rx_dv <= 1'b0;
      gmii_rx_er <= 1'b0;
      gmii_rxd   <= '0;
    end else if (!running) begin
      gmii_rx_dv <= 1'b0;
      gmii_rx_er <= 1'b0;
      if (rd_en && !head_eof) begin
        running    <= 1'b1;
        gmii_rx_dv <= 1'b1;
        gmii_rx_er <= rd_data[8];
        gmii_rxd   <= rd_data[7:0];
      end
    end else if (rd_empty) begin       // ran dry inside a frame: poison it
      gmii_rx_dv <= 1'b1;
      gmii_rx_er <= 1'b1;
    end else if (head_eof) begin
      running    <= 1'b0;
      gmii_rx_dv <= 1'b0;
      gmii_rx_er <= 1'b0;
    end else begin
      gmii_rx_dv <= 1'b1;
      gmii_rx_er <= rd_data[8];
      gmii_rxd   <= rd_data[7:0];
    end
  end
endmodule
