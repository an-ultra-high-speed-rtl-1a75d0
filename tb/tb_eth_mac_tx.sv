// tb_eth_mac_tx: frames of 1, 14, 59, 60, 61, 200 and 1066 bytes (1066 is
// a full data packet: 42 header bytes + 1024) are offered back to back.
// The GMII output is compared byte for byte with a reference built by an
// independent bit-serial CRC (checked first against the standard
// "123456789" value 0xCBF43926): preamble, SFD, data, padding, FCS. Also
// checks the 12-cycle idle gap between frames and the frame_sent pulses.
module tb_eth_mac_tx;
  import digitizer_pkg::*;
  import eth_ref_pkg::*;
  logic clk = 0, rst = 1;
  always #4 clk = ~clk;
  logic s_valid = 0, s_ready, s_last;
  logic [7:0] s_data;
  logic [7:0] gmii_txd;
  logic gmii_tx_en, gmii_tx_er, frame_sent;

  eth_mac_tx dut (.*);

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL: %s", msg); end
  endtask

  localparam int NF = 7;
  int lens[NF] = '{1, 14, 59, 60, 61, 200, 1066};
  bq_t frames[NF];

  // source: drives the current frame while s_ready takes bytes
  int fi = 0, bi = 0;
  always_comb begin
    s_valid = (fi < NF) && !rst;
    s_data  = (fi < NF) ? frames[fi][bi] : 8'h00;
    s_last  = (fi < NF) && (bi == frames[fi].size() - 1);
  end
  always @(posedge clk) if (s_valid && s_ready) begin
    if (bi == frames[fi].size() - 1) begin bi <= 0; fi <= fi + 1; end
    else bi <= bi + 1;
  end

  // sink
  bq_t got[$];
  bq_t cur;
  int idle_run = 100, nsent = 0;
  always @(negedge clk) if (frame_sent) begin
    nsent++;
  end
  always @(posedge clk) begin
    if (gmii_tx_en) begin
      if (cur.size() == 0 && got.size() > 0)
        check(idle_run >= 12, $sformatf("gap %0d before frame %0d", idle_run, got.size()));
      cur.push_back(gmii_txd);
      idle_run = 0;
    end else begin
      if (cur.size() > 0) begin got.push_back(cur); cur = {}; end
      idle_run++;
    end
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    bq_t t;
    t = {"1","2","3","4","5","6","7","8","9"};
    check(crc32(t) == 32'hCBF43926, "reference CRC");
    foreach (frames[i]) for (int k = 0; k < lens[i]; k++) frames[i].push_back(8'($urandom));
    repeat (3) @(posedge clk);
    rst <= 0;
    wait (got.size() == NF);
    repeat (20) @(posedge clk);
    for (int i = 0; i < NF; i++) begin
      bq_t w;
      w = on_wire(frames[i]);
      check(got[i].size() == w.size(), $sformatf("frame %0d length %0d expected %0d", i, got[i].size(), w.size()));
      for (int k = 0; k < w.size() && k < got[i].size(); k++)
        check(got[i][k] == w[k], $sformatf("frame %0d byte %0d %h expected %h", i, k, got[i][k], w[k]));
    end
    check(nsent == NF, $sformatf("frame_sent count %0d", nsent));
    check(gmii_tx_er == 0, "no tx_er");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
