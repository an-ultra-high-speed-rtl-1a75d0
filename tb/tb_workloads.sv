// tb_workloads: runs the two workloads of the paper's tests on the full
// design at its default sizes, with the same models as tb_digitizer_top
// (here the PHY receive clock runs 100 ppm faster than the design's).
//  A. Network throughput (Table I of the paper): data requests for
//     N = 1, 2, 4, ..., 256 packets, one after another. For each N the host
//     model measures the time from the start of its request frame to the
//     end of the last reply frame and the payload rate that gives. With no
//     host delay in the loop, the board must reach at least the rate the
//     paper measured for that N and stay below the line limit of
//     1024 / (8 + 1066 + 4 + 12) x 1000 = 939.4 Mb/s. All packets must
//     arrive and carry an unbroken counter.
//  B. ENOB record (Sec. III-B): one record of 98240 samples, the paper's
//     FFT length, taken at 5 Gsps (all four cores interleaved): 98240 x 10
//     bits = 122800 bytes, i.e. 120 packets. Its unpacked ramp must be
//     unbroken across all 120 packets; the upload time is reported.
module tb_workloads;
  import digitizer_pkg::*;
  import eth_ref_pkg::*;

  localparam logic [47:0] BOARD_MAC = 48'h02_00_00_00_00_01;
  localparam logic [31:0] BOARD_IP  = 32'hC0A8_010A;
  localparam logic [15:0] BOARD_PORT = 16'd5000;
  localparam logic [47:0] HOST_MAC  = 48'hA0_B1_C2_D3_E4_F5;
  localparam logic [31:0] HOST_IP   = 32'hC0A8_0164;
  localparam logic [15:0] HOST_PORT = 16'd6001;

  logic rst_n = 0;
  logic clk_adc = 0, clk_ui = 0, clk_eth = 0;
  always #3.2 clk_adc = ~clk_adc;
  always #2.5 clk_ui  = ~clk_ui;
  always #4   clk_eth = ~clk_eth;
  // the PHY's receive clock: its own crystal, 100 ppm faster than clk_eth
  // (one half period in 2500 is one time unit shorter)
  logic rgmii_rxc = 0;
  initial begin
    #1;
    forever begin
      repeat (2499) #4 rgmii_rxc = ~rgmii_rxc;
      #3 rgmii_rxc = ~rgmii_rxc;
    end
  end

  logic [N_LANES-1:0][DESER-1:0] lane_raw;
  logic [N_LANES-1:0][TAP_W-1:0] iodelay_tap;
  logic [N_LANES-1:0] iodelay_ld;
  logic adc_train_mode, trig_in = 0;
  // ADC serial configuration port; the lane models send the training
  // pattern only while the ADC's register says so
  logic adc_spi_csn, adc_spi_sclk, adc_spi_mosi, adc_train;
  int cfg_frames, cfg_bad;
  adc_spi_model adc_cfg (.spi_csn(adc_spi_csn), .spi_sclk(adc_spi_sclk), .spi_mosi(adc_spi_mosi),
                         .train(adc_train), .frames(cfg_frames), .bad_frames(cfg_bad));
  logic init_calib_complete;
  logic [APP_ADDR_W-1:0] app_addr;
  logic [2:0] app_cmd;
  logic app_en, app_rdy, app_wdf_wren, app_wdf_end, app_wdf_rdy, app_rd_data_valid;
  logic [APP_DATA_W-1:0] app_wdf_data, app_rd_data;
  // the host's bytes in and out at the PHY; RGMII edge values towards the design
  logic [7:0] gmii_txd, gmii_rxd = 0;
  logic gmii_tx_en, gmii_tx_er, gmii_rx_dv = 0, gmii_rx_er = 0;
  logic [4:0] rgmii_tx_rise, rgmii_tx_fall, rgmii_rx_rise, rgmii_rx_fall;
  assign rgmii_rx_rise = {gmii_rx_dv, gmii_rxd[3:0]};
  assign rgmii_rx_fall = {gmii_rx_dv ^ gmii_rx_er, gmii_rxd[7:4]};
  assign gmii_txd   = {rgmii_tx_fall[3:0], rgmii_tx_rise[3:0]};
  assign gmii_tx_en = rgmii_tx_rise[4];
  assign gmii_tx_er = rgmii_tx_rise[4] ^ rgmii_tx_fall[4];
  logic dpa_done, dpa_error, capture_armed, capture_active, capture_overflow;
  logic ddr_busy, record_busy;
  logic [31:0] pkts_sent;
  logic [15:0] cmds_rejected, net_test_rejected, frames_dropped;

  digitizer_top dut (.*);

  logic rst_models;
  assign rst_models = !rst_n;
  for (genvar i = 0; i < N_LANES; i++) begin : g_lane
    lane_model #(.W(DESER), .TW(TAP_W), .CH(i / ADC_BITS), .BIT(i % ADC_BITS),
                 .P0((i * 7 + 2) % 10), .TPB(10))
      m (.clk(clk_adc), .rst(rst_models), .train(adc_train), .tap(iodelay_tap[i]),
         .tap_ld(iodelay_ld[i]), .q(lane_raw[i]));
  end

  int unsigned n_writes, n_reads, n_errors;
  mig_model #(.DW(APP_DATA_W), .AW(APP_ADDR_W)) mig (
    .clk(clk_ui), .rst(rst_models), .stall_pct(5), .hold(1'b0), .init_calib_complete,
    .app_addr, .app_cmd, .app_en, .app_rdy, .app_wdf_data, .app_wdf_wren, .app_wdf_end,
    .app_wdf_rdy, .app_rd_data, .app_rd_data_valid, .n_writes, .n_reads, .n_errors);

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; if (failures < 15) $display("FAIL: %s", msg); end
  endtask

  int ip_id = 0;
  realtime t_cmd;
  task automatic send_cmd(input logic [7:0] op, input logic [31:0] a);
    bq_t pl, w;
    pl.push_back(op);
    push32(pl, a);
    w = on_wire(udp_frame(BOARD_MAC, HOST_MAC, HOST_IP, BOARD_IP, HOST_PORT, BOARD_PORT,
                          16'(ip_id++), pl));
    foreach (w[i]) begin
      @(negedge rgmii_rxc);
      if (i == 0) t_cmd = $realtime;
      gmii_rx_dv = 1; gmii_rxd = w[i];
    end
    @(negedge rgmii_rxc) gmii_rx_dv = 0;
  endtask

  // receiver: checks FCS and length, keeps payloads and arrival times
  bq_t payloads[$];
  realtime t_end[$];
  bq_t cur;
  always @(posedge clk_eth) begin
    if (rst_n && gmii_tx_en) cur.push_back(gmii_txd);
    else if (cur.size() > 0) begin
      bq_t f;
      logic [31:0] fcs;
      f = cur[8:cur.size()-5];
      fcs = {cur[cur.size()-1], cur[cur.size()-2], cur[cur.size()-3], cur[cur.size()-4]};
      check(crc32(f) == fcs && f.size() == 1066, "reply frame FCS and size");
      payloads.push_back(f[42:1065]);
      t_end.push_back($realtime);
      cur = {};
    end
  end

  initial begin
    repeat (3000000) @(posedge clk_eth);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // Table I of the paper: N and measured Mb/s
  localparam int NN = 9;
  int tab_n[NN]    = '{1, 2, 4, 8, 16, 32, 64, 128, 256};
  int tab_rate[NN] = '{44, 86, 165, 189, 340, 433, 615, 736, 813};

  initial begin
    longint cnt;
    repeat (10) @(posedge clk_eth);
    rst_n = 1;
    wait (dpa_done && init_calib_complete);
    check(!dpa_error, "lanes aligned");
    repeat (20) @(posedge clk_eth);

    // ---- A: network throughput sweep
    cnt = 0;
    for (int k = 0; k < NN; k++) begin
      real rate;
      bit data_ok;
      send_cmd(OP_NET_TEST, tab_n[k]);
      wait (payloads.size() == tab_n[k]);
      rate = real'(tab_n[k]) * 1024.0 * 8.0 / (t_end[tab_n[k]-1] - t_cmd);   // bits per ns = Gb/s
      rate = rate * 1000.0;
      data_ok = 1;
      for (int p = 0; p < tab_n[k]; p++)
        for (int i = 0; i < 1024; i++) begin
          logic [31:0] c;
          c = 32'(cnt + (p * 1024 + i) / 4);
          if (payloads[p][i] != c[8*(3 - i % 4) +: 8]) data_ok = 0;
        end
      cnt += tab_n[k] * 256;
      check(data_ok, $sformatf("N=%0d counter data", tab_n[k]));
      check(rate >= real'(tab_rate[k]) && rate < 939.5,
            $sformatf("N=%0d rate %0.1f Mb/s (paper %0d)", tab_n[k], rate, tab_rate[k]));
      $display("network test N=%0d: %0.1f Mb/s in simulation, %0d Mb/s in the paper's measurement",
               tab_n[k], rate, tab_rate[k]);
      payloads.delete(); t_end.delete();
      repeat (20) @(posedge clk_eth);
    end

    // ---- B: ENOB record of 98240 samples = 120 packets
    begin
      bit bits[$];
      int nf, breaks;
      logic [9:0] v0;
      realtime t0;
      send_cmd(OP_ARM, 120);
      wait (capture_armed);
      @(negedge clk_adc) trig_in = 1;
      t0 = $realtime;
      repeat (10) @(negedge clk_adc);
      trig_in = 0;
      wait (payloads.size() == 120);
      foreach (payloads[p]) foreach (payloads[p][b]) for (int k = 0; k < 8; k++) bits.push_back(payloads[p][b][k]);
      nf = 98240;
      breaks = 0;
      for (int k = 0; k < nf; k++) begin
        logic [9:0] v, e;
        int f, j, c;
        for (int b = 0; b < 10; b++) v[b] = bits[k*10 + b];
        if (k == 0) v0 = v;
        f = k / 32; j = (k % 32) / 4; c = k % 4;
        e = 10'(v0 + 3 * (f * 8 + j) + 37 * c);
        if (v != e) breaks++;
      end
      check(breaks == 0, $sformatf("ENOB record: %0d of %0d samples off the ramp", breaks, nf));
      check(!capture_overflow, "no overflow");
      $display("ENOB record: %0d samples in 120 packets, trigger to last packet %0.1f us",
               nf, (t_end[119] - t0) / 1000.0);
    end
    check(n_errors == 0, "DDR3 controller saw no protocol error");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
