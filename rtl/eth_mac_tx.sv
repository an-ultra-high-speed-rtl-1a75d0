// eth_mac_tx: Ethernet MAC transmitter on a GMII-style byte interface
// (one byte per 125 MHz cycle), the transmit half of the paper's
// "Ethernet core" (Fig. 3), framing as in the paper's Fig. 5.
//
// A frame arrives as a byte stream starting with the destination MAC
// address (s_valid / s_ready / s_data / s_last). The MAC sends 7 preamble
// bytes 0x55 and the start delimiter 0xD5, then the frame bytes, zero
// padding up to 60 bytes if the frame is shorter, the CRC-32 frame check
// sequence (4 bytes, complemented, least significant byte first) and then
// keeps the line idle for a 12-byte inter-frame gap. `s_ready` is high
// exactly in the cycles that take a frame byte; once a frame has started
// the source must supply one byte per cycle until `s_last` (asserted
// below). The RGMII conversion to the PHY (4 bits on both clock edges)
// needs the FPGA's DDR output cells and lies outside this module.
// Preamble, padding, FCS and gap follow IEEE 802.3; the paper gives the
// field layout of the frame.
module eth_mac_tx
  import digitizer_pkg::*;
(
  input  logic       clk,
  input  logic       rst,
  input  logic       s_valid,
  output logic       s_ready,
  input  logic [7:0] s_data,
  input  logic       s_last,
  output logic [7:0] gmii_txd,
  output logic       gmii_tx_en,
  output logic       gmii_tx_er,
  output logic       frame_sent      // pulse at the end of each frame
);
  typedef enum logic [2:0] { M_IDLE, M_PRE, M_DATA, M_PAD, M_FCS, M_IFG } mac_e;
  mac_e state;
  logic [3:0]  cnt;
  logic [10:0] len;
  logic [31:0] crc;

  assign s_ready    = (state == M_DATA);
  assign gmii_tx_er = 1'b0;

  always_ff @(posedge clk) begin
    if (rst) begin
      state      <= M_IDLE;
      cnt        <= '0;
      len        <= '0;
      crc        <= '1;
      gmii_txd   <= '0;
      gmii_tx_en <= 1'b0;
      frame_sent <= 1'b0;
    end else begin
      frame_sent <= 1'b0;
      unique case (state)
        M_IDLE: begin
          gmii_tx_en <= 1'b0;
          gmii_txd   <= '0;
          if (s_valid) begin
            state <= M_PRE;
            cnt   <= '0;
          end
        end
        M_PRE: begin
          gmii_tx_en <= 1'b1;
          gmii_txd   <= (cnt == 4'd7) ? 8'hD5 : 8'h55;
          cnt        <= cnt + 1'b1;
          if (cnt == 4'd7) begin
            state <= M_DATA;
            len   <= '0;
            crc   <= '1;
          end
        end
        M_DATA: begin
          gmii_tx_en <= 1'b1;
          gmii_txd   <= s_data;
          crc        <= crc32_byte(crc, s_data);
          len        <= len + 1'b1;
          if (s_last) begin
            cnt   <= '0;
            state <= (len + 1'b1 < 11'd60) ? M_PAD : M_FCS;
          end
        end
        M_PAD: begin
          gmii_txd <= 8'h00;
          crc      <= crc32_byte(crc, 8'h00);
          len      <= len + 1'b1;
          if (len + 1'b1 == 11'd60) state <= M_FCS;
        end
        M_FCS: begin
          gmii_txd <= ~crc[8*cnt[1:0] +: 8];
          cnt      <= cnt + 1'b1;
          if (cnt == 4'd3) begin
            cnt   <= '0;
            state <= M_IFG;
          end
        end
        M_IFG: begin
          gmii_tx_en <= 1'b0;
          gmii_txd   <= '0;
          cnt        <= cnt + 1'b1;
          if (cnt == 4'd0) frame_sent <= 1'b1;
          if (cnt == 4'd11) state <= M_IDLE;
        end
        default: state <= M_IDLE;
      endcase
    end
  end

  // a started frame may not pause: the source streams until s_last
  a_no_underrun: assert property (@(posedge clk) disable iff (rst)
    (state == M_DATA) |-> s_valid);
endmodule
