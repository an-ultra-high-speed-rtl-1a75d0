// tb_digitizer_top: end-to-end test of the digitizer at its default sizes.
// Models around the design: 40 lane_model instances (ADC + IODELAY +
// ISERDES, each lane with its own skew), adc_spi_model (the ADC's serial
// configuration port: the lanes send the training pattern only while its
// register says so), mig_model (DDR3 controller and memory, random
// stalls) and a host that talks over RGMII, on a PHY receive clock 100 ppm
// slower than the design's Ethernet clock, using frames built and checked
// with the reference package.
// Sequence and checks:
//  1. power-on alignment: training mode until all lanes are aligned, no
//     lane error, the ADC register written exactly twice (training on,
//     then off); counts IODELAY loads and bitslips actually used;
//  2. an ARM before alignment is rejected;
//  3. a 3-packet record: ARM, trigger, then 3 UDP packets whose payload,
//     unpacked as little-endian 10-bit fields, is an unbroken ramp per ADC
//     core with the right inter-core offset (so lanes, word boundaries,
//     packing, DDR3 round trip and packet order are all right); a second
//     ARM during the record is rejected;
//  4. network test of 5 packets of counter data, started while a 4-packet
//     record is uploading, so both sources share the link;
//  5. a 4-packet record captured while the DDR3 controller is held busy:
//     the capture FIFO overflows, the overflow flag rises, the record is
//     still delivered, and it shows a break in the ramp.
// Every frame is checked for preamble, FCS, addresses, ports, IP checksum
// and length. Each mechanism above must have happened at least once.
module tb_digitizer_top;
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
  // the PHY's receive clock: its own crystal, 100 ppm slower than clk_eth
  // (one half period in 2500 is one time unit longer)
  logic rgmii_rxc = 0;
  initial begin
    #1;
    forever begin
      repeat (2499) #4 rgmii_rxc = ~rgmii_rxc;
      #5 rgmii_rxc = ~rgmii_rxc;
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

  // ---- models
  logic rst_models;
  assign rst_models = !rst_n;
  for (genvar i = 0; i < N_LANES; i++) begin : g_lane
    lane_model #(.W(DESER), .TW(TAP_W), .CH(i / ADC_BITS), .BIT(i % ADC_BITS),
                 .P0((i * 3) % 10), .TPB(10))
      m (.clk(clk_adc), .rst(rst_models), .train(adc_train), .tap(iodelay_tap[i]),
         .tap_ld(iodelay_ld[i]), .q(lane_raw[i]));
  end

  int unsigned stall_pct = 10, n_writes, n_reads, n_errors;
  logic hold = 0;
  mig_model #(.DW(APP_DATA_W), .AW(APP_ADDR_W)) mig (
    .clk(clk_ui), .rst(rst_models), .stall_pct, .hold, .init_calib_complete,
    .app_addr, .app_cmd, .app_en, .app_rdy, .app_wdf_data, .app_wdf_wren, .app_wdf_end,
    .app_wdf_rdy, .app_rd_data, .app_rd_data_valid, .n_writes, .n_reads, .n_errors);

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; if (failures < 15) $display("FAIL: %s", msg); end
  endtask

  // ---- mechanism counters
  int n_tap_loads = 0, n_slips = 0, n_overflow = 0, n_records = 0, n_net_pkts = 0;
  int n_arm_rejected = 0, n_interleaved = 0, n_ramp_breaks = 0, n_stall_cycles = 0;
  always @(posedge clk_adc) if (rst_n) n_tap_loads += $countones(iodelay_ld);
  for (genvar i = 0; i < N_LANES; i++) begin : g_cnt
    always @(posedge clk_adc) if (rst_n && dut.u_dpa.g_lane[i].u_ctrl.slip) n_slips++;
  end
  always @(posedge clk_ui) if (rst_n && init_calib_complete && !app_rdy) n_stall_cycles++;

  // ---- host: send commands
  int ip_id = 0;
  task automatic send_cmd(input logic [7:0] op, input logic [31:0] a);
    bq_t pl, w;
    pl.push_back(op);
    push32(pl, a);
    w = on_wire(udp_frame(BOARD_MAC, HOST_MAC, HOST_IP, BOARD_IP, HOST_PORT, BOARD_PORT,
                          16'(ip_id++), pl));
    foreach (w[i]) begin
      @(negedge rgmii_rxc);
      gmii_rx_dv = 1; gmii_rxd = w[i];
    end
    @(negedge rgmii_rxc) gmii_rx_dv = 0;
    repeat (12) @(negedge rgmii_rxc);
  endtask

  // ---- host: receive and check frames
  bq_t payloads[$];
  bq_t cur;
  always @(posedge clk_eth) begin
    if (rst_n && gmii_tx_en) cur.push_back(gmii_txd);
    else if (cur.size() > 0) begin
      bq_t f, ip, pl;
      logic [31:0] fcs;
      check(cur.size() == 8 + 1066 + 4, $sformatf("frame size %0d", cur.size()));
      begin
        bit pre_ok;
        pre_ok = (cur[7] == 8'hD5);
        for (int i = 0; i < 7; i++) if (cur[i] != 8'h55) pre_ok = 0;
        check(pre_ok, "preamble");
      end
      f = cur[8:cur.size()-5];
      fcs = {cur[cur.size()-1], cur[cur.size()-2], cur[cur.size()-3], cur[cur.size()-4]};
      check(crc32(f) == fcs, "FCS");
      check({f[0], f[1], f[2], f[3], f[4], f[5]} == HOST_MAC, "destination MAC");
      check({f[6], f[7], f[8], f[9], f[10], f[11]} == BOARD_MAC, "source MAC");
      check({f[12], f[13]} == 16'h0800, "EtherType");
      ip = f[14:33];
      check(ip_checksum(ip) == 16'h0000, "IP header checksum");
      check({f[30], f[31], f[32], f[33]} == HOST_IP && {f[26], f[27], f[28], f[29]} == BOARD_IP, "IP addresses");
      check({f[34], f[35]} == BOARD_PORT && {f[36], f[37]} == HOST_PORT, "UDP ports");
      check({f[38], f[39]} == 16'd1032, "UDP length");
      if (f.size() == 1066) begin
        pl = f[42:1065];
        payloads.push_back(pl);
      end
      cur = {};
    end
  end

  // ---- payload classification and checks
  longint nt_word = 0;        // next expected network-test counter value
  function automatic bit is_net_test(bq_t pl);
    for (int i = 0; i < 1024; i++) begin
      logic [31:0] c;
      c = 32'(nt_word + i / 4);
      if (pl[i] != c[8*(3 - i % 4) +: 8]) return 0;
    end
    return 1;
  endfunction

  // check a record: returns number of ramp breaks
  function automatic int ramp_breaks(bq_t rec[$]);
    bit bits[$];
    int nf, breaks;
    logic [9:0] v0;
    foreach (rec[p]) foreach (rec[p][b]) for (int k = 0; k < 8; k++) bits.push_back(rec[p][b][k]);
    nf = bits.size() / 10;
    breaks = 0;
    for (int k = 0; k < nf; k++) begin
      logic [9:0] v, e;
      int f, j, c;
      for (int b = 0; b < 10; b++) v[b] = bits[k*10 + b];
      if (k == 0) v0 = v;
      f = k / 32; j = (k % 32) / 4; c = k % 4;
      e = 10'(v0 + 3 * (f * 8 + j) + 37 * c);
      if (v != e) begin breaks++; v0 = 10'(v - 3 * (f * 8 + j) - 37 * c); end
    end
    return breaks;
  endfunction

  task automatic trigger();
    @(negedge clk_adc) trig_in = 1;
    repeat (20) @(negedge clk_adc);
    trig_in = 0;
  endtask

  // collect n payloads from the list, separating network-test packets
  task automatic collect(input int n_rec, input int n_nt, output bq_t rec[$]);
    int got_rec, got_nt, seen_rec_before_nt;
    got_rec = 0; got_nt = 0; seen_rec_before_nt = 0;
    rec = {};
    while (got_rec < n_rec || got_nt < n_nt) begin
      bq_t pl;
      wait (payloads.size() > 0);
      pl = payloads.pop_front();
      if (n_nt > got_nt && is_net_test(pl)) begin
        got_nt++; n_net_pkts++; nt_word += 256;
        if (got_rec > 0 && got_rec < n_rec) n_interleaved++;
      end else begin
        rec.push_back(pl); got_rec++;
      end
    end
  endtask

  initial begin
    repeat (400000) @(posedge clk_eth);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    bq_t rec[$];
    int rej0, b;
    repeat (10) @(posedge clk_eth);
    rst_n = 1;
    // 2. ARM before alignment finished
    repeat (20) @(posedge clk_eth);
    check(adc_train_mode && !dpa_done, "training mode during self-test");
    rej0 = cmds_rejected;
    send_cmd(OP_ARM, 2);
    repeat (5) @(posedge clk_eth);
    if (cmds_rejected == rej0 + 1) n_arm_rejected++;
    // 1. alignment
    wait (dpa_done);
    check(!dpa_error && !adc_train_mode, "lanes aligned, ADC in normal mode");
    wait (!adc_train);
    check(cfg_frames == 2 && cfg_bad == 0, "ADC register written twice: training on, then off");
    wait (init_calib_complete);
    repeat (20) @(posedge clk_eth);
    check(!capture_armed, "early ARM left nothing armed");

    // 3. a 3-packet record, and a second ARM while it is in progress
    send_cmd(OP_ARM, 3);
    wait (capture_armed);
    rej0 = cmds_rejected;
    send_cmd(OP_ARM, 1);
    repeat (5) @(posedge clk_eth);
    if (cmds_rejected == rej0 + 1) n_arm_rejected++;
    trigger();
    n_records++;
    collect(3, 0, rec);
    b = ramp_breaks(rec);
    check(b == 0, $sformatf("record 1 has %0d ramp breaks", b));
    wait (!record_busy);

    // 4. network test during the upload of a 4-packet record
    stall_pct = 0;
    send_cmd(OP_ARM, 4);
    wait (capture_armed);
    trigger();
    n_records++;
    wait (payloads.size() > 0);
    send_cmd(OP_NET_TEST, 5);
    collect(4, 5, rec);
    b = ramp_breaks(rec);
    check(b == 0, $sformatf("record 2 has %0d ramp breaks", b));
    check(!capture_overflow, "no overflow without stalls");
    wait (!record_busy);

    // 5. overflow: DDR3 controller busy during the capture
    send_cmd(OP_ARM, 4);
    wait (capture_armed);
    hold = 1;
    trigger();
    n_records++;
    repeat (400) @(posedge clk_adc);
    if (capture_overflow) n_overflow++;
    hold = 0;
    collect(4, 0, rec);
    b = ramp_breaks(rec);
    n_ramp_breaks += b;
    check(b > 0, "overflowed record shows a break in the ramp");
    wait (!record_busy);
    repeat (50) @(posedge clk_eth);
    check(payloads.size() == 0, "no extra packets");
    check(n_errors == 0, "DDR3 controller saw no protocol error");
    check(n_writes == 176 && n_reads == 176, $sformatf("DDR3 writes %0d reads %0d", n_writes, n_reads));
    check(pkts_sent == 16, $sformatf("packets sent %0d", pkts_sent));

    // every mechanism must have happened
    check(n_tap_loads > N_LANES, $sformatf("IODELAY loads %0d", n_tap_loads));
    check(n_slips > 0, $sformatf("bitslips %0d", n_slips));
    check(n_records == 3, "records");
    check(n_arm_rejected == 2, $sformatf("ARM rejections %0d", n_arm_rejected));
    check(n_net_pkts == 5, $sformatf("network test packets %0d", n_net_pkts));
    check(n_interleaved > 0, "network test packets interleaved with an upload");
    check(n_stall_cycles > 0, "DDR3 controller stalls");
    check(n_overflow == 1, "capture FIFO overflow");
    check(cfg_frames == 2 && cfg_bad == 0, "no further ADC register writes");
    $display("mechanisms: tap_loads=%0d slips=%0d records=%0d arm_rejected=%0d net_pkts=%0d interleaved=%0d stalls=%0d overflow=%0d ramp_breaks=%0d",
             n_tap_loads, n_slips, n_records, n_arm_rejected, n_net_pkts, n_interleaved,
             n_stall_cycles, n_overflow, n_ramp_breaks);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
