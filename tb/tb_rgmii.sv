// tb_rgmii: the RGMII adapters.
// Receive: for two PHY clocks, one 500 ppm faster and one 500 ppm slower
// than the design clock, 60 frames of random length (8..1530 bytes, with
// random inter-frame gaps of 1..20 cycles and about 1 % of bytes carrying
// RX_ER) are sent as RGMII edge values in the PHY clock domain. On the
// design side each frame must come out as one unbroken DV run with the
// same bytes and ER flags, and nothing else. Transmit: random GMII bytes
// with TX_EN/TX_ER go through rgmii_tx and are decoded back from the edge
// values, one cycle later.
module tb_rgmii;
  logic clk = 0, rst = 1;
  always #4 clk = ~clk;

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL: %s", msg); end
  endtask

  localparam int NF = 60;
  int done_k[2] = '{0, 0};

  for (genvar k = 0; k < 2; k++) begin : g_rx
    // PHY clock: one half period in 500 is one unit longer (k=0) or shorter
    logic rxc = 0;
    initial begin
      #(k + 1);
      forever begin
        repeat (499) #4 rxc = ~rxc;
        #(k == 0 ? 5 : 3) rxc = ~rxc;
      end
    end
    logic rx_rst = 1;
    logic [7:0] d = 0;
    logic dv = 0, er = 0;
    logic [7:0] rxd;
    logic rx_dv, rx_er;
    rgmii_rx dut (.rx_clk(rxc), .rx_rst, .rx_rise({dv, d[3:0]}), .rx_fall({dv ^ er, d[7:4]}),
                  .clk, .rst, .gmii_rxd(rxd), .gmii_rx_dv(rx_dv), .gmii_rx_er(rx_er));

    logic [8:0] sent[$][$];
    initial begin
      repeat (5) @(negedge rxc);
      rx_rst = 0;
      repeat (20) @(negedge rxc);
      for (int f = 0; f < NF; f++) begin
        int len;
        logic [8:0] fr[$];
        len = (f % 3 == 0) ? 1530 - f : $urandom_range(8, 1530);
        fr = {};
        for (int i = 0; i < len; i++) begin
          @(negedge rxc);
          dv = 1; d = 8'($urandom); er = ($urandom_range(0, 99) == 0);
          fr.push_back({er, d});
        end
        sent.push_back(fr);
        @(negedge rxc) dv = 0; er = 0;
        repeat ($urandom_range(0, 19)) @(negedge rxc);
      end
    end

    logic [8:0] cur[$];
    int got = 0;
    always @(posedge clk) if (!rst) begin
      if (rx_dv) cur.push_back({rx_er, rxd});
      else if (cur.size() > 0) begin
        bit same;
        same = (got < sent.size()) && (cur.size() == sent[got].size());
        if (same) foreach (cur[i]) if (cur[i] != sent[got][i]) same = 0;
        check(same, $sformatf("clock %0d frame %0d: %0d bytes out", k, got, cur.size()));
        got++;
        cur = {};
        if (got == NF) done_k[k] = 1;
      end
    end
  end

  // transmit adapter
  logic [7:0] txd = 0;
  logic tx_en = 0, tx_er = 0;
  logic [4:0] tx_rise, tx_fall;
  rgmii_tx u_tx (.clk, .rst, .txd, .tx_en, .tx_er, .tx_rise, .tx_fall);
  logic [9:0] tx_hist[$];
  always @(posedge clk) if (!rst) begin
    if (tx_hist.size() > 0) begin
      logic [9:0] e;
      e = tx_hist.pop_front();
      check({tx_rise[4], tx_rise[4] ^ tx_fall[4], tx_fall[3:0], tx_rise[3:0]} == e,
            "transmit edge values");
    end
    tx_hist.push_back({tx_en, tx_er, txd});
  end
  always @(negedge clk) if (!rst) begin
    txd <= 8'($urandom); tx_en <= 1'($urandom); tx_er <= ($urandom_range(0, 9) == 0);
  end

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (5) @(posedge clk);
    rst = 0;
    wait (done_k[0] == 1 && done_k[1] == 1);
    repeat (50) @(posedge clk);
    check(g_rx[0].cur.size() == 0 && g_rx[1].cur.size() == 0, "nothing after the last frame");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
