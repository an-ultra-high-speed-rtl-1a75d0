// gearbox: packs a stream of IN_W-bit frames densely into OUT_W-bit words.
//
// Bits are kept little-endian: the first frame occupies the lowest bits of
// the first output word, and a frame that does not fit is split across two
// words with its low part first. A holding register of IN_W + OUT_W bits
// collects input; whenever at least OUT_W bits are held, the lowest OUT_W
// leave as one word. One frame in and at most one word out per cycle, so
// IN_W must not exceed OUT_W. `clear` empties the register (start of a
// capture). Output is registered: a word appears the cycle after the frame
// that completed it. Dense packing lets the 10-bit samples fill the DDR3
// memory without padding, which is what the paper's 600 ms storage depth
// needs; the bit order is this design's choice.
module gearbox #(
  parameter int unsigned IN_W  = 320,
  parameter int unsigned OUT_W = 512
) (
  input  logic             clk,
  input  logic             rst,
  input  logic             clear,
  input  logic             in_valid,
  input  logic [IN_W-1:0]  in_data,
  output logic             out_valid,
  output logic [OUT_W-1:0] out_data
);
  localparam int unsigned BW = IN_W + OUT_W;
  localparam int unsigned CW = $clog2(BW + 1);
  logic [BW-1:0] hold, merged;
  logic [CW-1:0] count, merged_cnt;

  always_comb begin
    merged     = hold;
    merged_cnt = count;
    if (in_valid) begin
      merged     = hold | (BW'(in_data) << count);
      merged_cnt = count + CW'(IN_W);
    end
  end

  always_ff @(posedge clk) begin
    if (rst || clear) begin
      hold      <= '0;
      count     <= '0;
      out_valid <= 1'b0;
      out_data  <= '0;
    end else begin
      out_valid <= 1'b0;
      if (merged_cnt >= CW'(OUT_W)) begin
        out_valid <= 1'b1;
        out_data  <= merged[OUT_W-1:0];
        hold      <= merged >> OUT_W;
        count     <= merged_cnt - CW'(OUT_W);
      end else begin
        hold  <= merged;
        count <= merged_cnt;
      end
    end
  end
endmodule
