// eth_mac_rx: Ethernet MAC receiver on a GMII-style byte interface, the
// receive half of the paper's "Ethernet core" (Fig. 3).
//
// It waits for the start delimiter 0xD5 after preamble bytes, then passes
// the frame bytes on, minus the 4-byte frame check sequence. Because the
// end of a frame is only known when `gmii_rx_dv` falls, bytes leave
// through a 5-byte delay line: byte i is output the cycle after byte i+5
// arrives, and the last data byte, with `m_last`, the cycle after
// `gmii_rx_dv` falls. `m_good` comes with `m_last` and is high if the CRC-32 over
// frame and FCS gives the standard residue and no `gmii_rx_er` was seen.
// No backpressure: the consumer takes one byte per valid cycle. Frames
// with less than one byte besides the FCS are dropped. Framing follows IEEE 802.3.
module eth_mac_rx
  import digitizer_pkg::*;
(
  input  logic       clk,
  input  logic       rst,
  input  logic [7:0] gmii_rxd,
  input  logic       gmii_rx_dv,
  input  logic       gmii_rx_er,
  output logic       m_valid,
  output logic [7:0] m_data,
  output logic       m_last,
  output logic       m_good
);
  typedef enum logic [1:0] { R_IDLE, R_PRE, R_DATA } rx_e;
  rx_e state;
  logic [7:0]  dly [5];
  logic [2:0]  fill;
  logic [31:0] crc;
  logic        err;

  always_ff @(posedge clk) begin
    if (rst) begin
      state   <= R_IDLE;
      fill    <= '0;
      crc     <= '1;
      err     <= 1'b0;
      m_valid <= 1'b0;
      m_data  <= '0;
      m_last  <= 1'b0;
      m_good  <= 1'b0;
      for (int i = 0; i < 5; i++) dly[i] <= '0;
    end else begin
      m_valid <= 1'b0;
      m_last  <= 1'b0;
      m_good  <= 1'b0;
      unique case (state)
        R_IDLE: if (gmii_rx_dv) begin
          state <= (gmii_rxd == 8'hD5) ? R_DATA : R_PRE;
          fill  <= '0;
          crc   <= '1;
          err   <= gmii_rx_er;
        end
        R_PRE: begin
          if (!gmii_rx_dv)               state <= R_IDLE;
          else if (gmii_rxd == 8'hD5)    state <= R_DATA;
          else if (gmii_rxd != 8'h55)    state <= R_IDLE;   // not a preamble
        end
        R_DATA: begin
          if (gmii_rx_dv) begin
            crc <= crc32_byte(crc, gmii_rxd);
            if (gmii_rx_er) err <= 1'b1;
            dly[0] <= gmii_rxd;
            for (int i = 1; i < 5; i++) dly[i] <= dly[i-1];
            if (fill == 3'd5) begin
              m_valid <= 1'b1;            // byte with 5 younger bytes behind it
              m_data  <= dly[4];
            end else begin
              fill <= fill + 1'b1;
            end
          end else begin
            // frame ended: dly[4] is the last data byte, dly[3:0] the FCS
            state <= R_IDLE;
            if (fill == 3'd5) begin
              m_valid <= 1'b1;
              m_data  <= dly[4];
              m_last  <= 1'b1;
              m_good  <= (crc == CRC_RESIDUE) && !err;
            end
          end
        end
        default: state <= R_IDLE;
      endcase
    end
  end
endmodule
