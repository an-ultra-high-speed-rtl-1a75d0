// async_fifo: dual-clock FIFO with Gray-coded pointers.
//
// Used where data crosses between the ADC word clock, the DDR3 controller
// clock and the Ethernet clock. The storage is a plain array (a block RAM
// on the FPGA). Each side owns a binary pointer one bit wider than the
// address; its Gray-coded copy is passed through two flip-flops to the
// other side, which compares it with its own pointer for full / empty.
// `wr_used` (write side) and `rd_used` (read side) are conservative fill
// levels. First-word-fall-through: `rd_data` shows the head entry whenever
// `rd_empty` is low; `rd_en` pops it. Writes into a full FIFO and reads of
// an empty one are ignored. The paper does not describe its clock-domain
// crossings; this FIFO is this design's way of doing them.
module async_fifo #(
  parameter int unsigned DW = 512,
  parameter int unsigned AW = 5          // depth 2**AW
) (
  input  logic          wr_clk,
  input  logic          wr_rst,
  input  logic          wr_en,
  input  logic [DW-1:0] wr_data,
  output logic          wr_full,
  output logic [AW:0]   wr_used,
  input  logic          rd_clk,
  input  logic          rd_rst,
  input  logic          rd_en,
  output logic [DW-1:0] rd_data,
  output logic          rd_empty,
  output logic [AW:0]   rd_used
);
  logic [DW-1:0] mem [2**AW];
  logic [AW:0] wbin, wgray, rbin, rgray;
  logic [AW:0] rgray_w1, rgray_w2, wgray_r1, wgray_r2;
  logic [AW:0] rbin_w, wbin_r;

  function automatic logic [AW:0] bin2gray(input logic [AW:0] b);
    return b ^ (b >> 1);
  endfunction
  function automatic logic [AW:0] gray2bin(input logic [AW:0] g);
    logic [AW:0] b;
    b[AW] = g[AW];
    for (int i = AW - 1; i >= 0; i--) b[i] = b[i+1] ^ g[i];
    return b;
  endfunction

  // ---- write side
  always_ff @(posedge wr_clk) begin
    if (wr_en && !wr_full) mem[wbin[AW-1:0]] <= wr_data;
  end
  always_ff @(posedge wr_clk) begin
    if (wr_rst) begin
      wbin <= '0; wgray <= '0; rgray_w1 <= '0; rgray_w2 <= '0;
    end else begin
      rgray_w1 <= rgray;
      rgray_w2 <= rgray_w1;
      if (wr_en && !wr_full) begin
        wbin  <= wbin + 1'b1;
        wgray <= bin2gray(wbin + 1'b1);
      end
    end
  end
  assign rbin_w  = gray2bin(rgray_w2);
  assign wr_used = wbin - rbin_w;
  assign wr_full = (wr_used[AW] == 1'b1);

  // ---- read side
  always_ff @(posedge rd_clk) begin
    if (rd_rst) begin
      rbin <= '0; rgray <= '0; wgray_r1 <= '0; wgray_r2 <= '0;
    end else begin
      wgray_r1 <= wgray;
      wgray_r2 <= wgray_r1;
      if (rd_en && !rd_empty) begin
        rbin  <= rbin + 1'b1;
        rgray <= bin2gray(rbin + 1'b1);
      end
    end
  end
  assign wbin_r   = gray2bin(wgray_r2);
  assign rd_used  = wbin_r - rbin;
  assign rd_empty = (rd_used == '0);
  assign rd_data  = mem[rbin[AW-1:0]];
endmodule
