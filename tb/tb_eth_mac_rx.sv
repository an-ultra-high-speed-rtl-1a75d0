// tb_eth_mac_rx: frames built by the reference package (preamble, SFD,
// padded data, FCS from an independent bit-serial CRC) are played into the
// GMII receive port with random idle gaps. Checks: each frame's bytes come
// out in order without the FCS, `m_last` on the final byte, `m_good` high
// for intact frames and low for a frame with one flipped bit and for a
// frame with rx_er raised; a stray byte without preamble is ignored.
module tb_eth_mac_rx;
  import digitizer_pkg::*;
  import eth_ref_pkg::*;
  logic clk = 0, rst = 1;
  always #4 clk = ~clk;
  logic [7:0] gmii_rxd = 0;
  logic gmii_rx_dv = 0, gmii_rx_er = 0;
  logic m_valid, m_last, m_good;
  logic [7:0] m_data;

  eth_mac_rx dut (.*);

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL: %s", msg); end
  endtask

  bq_t got[$], cur;
  bit goods[$];
  always @(posedge clk) if (m_valid) begin
    cur.push_back(m_data);
    if (m_last) begin got.push_back(cur); goods.push_back(m_good); cur = {}; end
  end

  task automatic play(input bq_t w, input int corrupt_at, input int er_at);
    foreach (w[i]) begin
      @(negedge clk);
      gmii_rx_dv = 1;
      gmii_rxd   = (i == corrupt_at) ? (w[i] ^ 8'h10) : w[i];
      gmii_rx_er = (i == er_at);
    end
    @(negedge clk) gmii_rx_dv = 0; gmii_rx_er = 0;
    repeat (12 + $urandom % 5) @(negedge clk);
  endtask

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  localparam int NF = 6;
  int lens[NF] = '{60, 61, 100, 1066, 80, 70};
  bq_t frames[NF];
  initial begin
    foreach (frames[i]) for (int k = 0; k < lens[i]; k++) frames[i].push_back(8'($urandom));
    repeat (3) @(posedge clk);
    rst <= 0;
    repeat (3) @(posedge clk);
    play(on_wire(frames[0]), -1, -1);
    // lone byte with data valid, not a preamble
    @(negedge clk) gmii_rx_dv = 1; gmii_rxd = 8'h12;
    @(negedge clk) gmii_rx_dv = 0;
    repeat (12) @(negedge clk);
    play(on_wire(frames[1]), -1, -1);
    play(on_wire(frames[2]), -1, -1);
    play(on_wire(frames[3]), -1, -1);
    play(on_wire(frames[4]), 30, -1);     // flipped bit
    play(on_wire(frames[5]), -1, 20);     // rx_er
    repeat (10) @(posedge clk);
    check(got.size() == NF, $sformatf("%0d frames out", got.size()));
    for (int i = 0; i < NF && i < got.size(); i++) begin
      check(got[i].size() == lens[i], $sformatf("frame %0d length %0d", i, got[i].size()));
      for (int k = 0; k < lens[i] && k < got[i].size(); k++)
        if (!(i == 4 && k == 22))
          check(got[i][k] == frames[i][k], $sformatf("frame %0d byte %0d", i, k));
      check(goods[i] == (i < 4), $sformatf("frame %0d good=%0d", i, goods[i]));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
