// rgmii_tx: GMII-to-RGMII transmit adapter, in the 125 MHz Ethernet clock
// domain. The board reaches its gigabit PHY over RGMII, which carries a
// byte per clock as two nibbles, one on each clock edge, plus a control
// line that is TX_EN on the rising edge and TX_EN xor TX_ER on the falling
// edge. This module prepares, each cycle, the values for the two edges;
// the double-data-rate output registers themselves (one per pin, fed with
// a rising-edge and a falling-edge value) and the transmit clock output
// belong to the pin-level design, like the ADC's delay lines and
// deserializers.
//
// Interface: `txd`/`tx_en`/`tx_er` is the GMII byte stream from the MAC.
// `tx_rise` = {ctl, d[3:0]} for the rising edge, `tx_fall` = {ctl, d[3:0]}
// for the falling edge, low nibble first as RGMII requires.
// Timing: outputs are registered, one cycle after the GMII input.
// The paper names RGMII as the link to its PHY; the split between this
// fabric logic and the output cells is this design's.
module rgmii_tx (
  input  logic       clk,
  input  logic       rst,
  input  logic [7:0] txd,
  input  logic       tx_en,
  input  logic       tx_er,
  output logic [4:0] tx_rise,
  output logic [4:0] tx_fall
);
  always_ff @(posedge clk) begin
    if (rst) begin
      tx_rise <= '0;
      tx_fall <= '0;
    end else begin
      tx_rise <= {tx_en,         txd[3:0]};
      tx_fall <= {tx_en ^ tx_er, txd[7:4]};
    end
  end
endmodule
