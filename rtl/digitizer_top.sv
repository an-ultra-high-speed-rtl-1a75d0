// digitizer_top: FPGA design of a 5 Gsps, 10-bit waveform digitizer that
// stores records in DDR3 memory and ships them to a PC over gigabit
// Ethernet/UDP (the signal flow of the paper's Fig. 3).
//
// Three clock domains:
//  * clk_adc, the ADC word clock (156.25 MHz for 1.25 Gb/s lanes and 1:8
//    deserialization): dpa_module aligns the 40 LVDS lanes at power-on,
//    data_processing waits for the trigger and packs samples into 512-bit
//    words.
//  * clk_ui, the DDR3 controller's user clock: ddr_sequencer writes each
//    record to memory, then reads it back.
//  * clk_eth, the 125 MHz Ethernet clock: eth_mac_rx + cmd_rx take host
//    commands, udp_tx + eth_mac_tx send packets, fed by upload_packetizer
//    (the record) and net_test (the network test).
// Two dual-clock FIFOs carry the data (capture FIFO adc -> ui, upload FIFO
// ui -> eth); pulse synchronizers carry the arm command.
//
// A record: the host sends ARM (opcode 1, argument = record length in
// 1024-byte packets). It is accepted once the lanes are aligned and the
// previous record has been uploaded completely. The next trigger edge
// starts the capture; the record is stored in DDR3, read back and sent as
// UDP packets to the host that sent the command. NET_TEST (opcode 2,
// argument N = 1..256) makes the board send N packets of counter data.
//
// Outside this module, reached through ports: the IODELAY and ISERDES
// primitives of each lane (tap value and load strobe out, deserialized word
// in), the ADC's serial configuration pins (adc_spi_cfg writes the
// test-pattern register as `adc_train_mode` asks; its register address
// and values are examples to be set from the ADC's datasheet), the vendor DDR3 controller (its app_* user interface)
// and the RGMII double-data-rate I/O registers to the PHY (rgmii_tx /
// rgmii_rx give and take their rising- and falling-edge values; received
// frames cross from the PHY's clock `rgmii_rxc` into clk_eth). Status
// outputs are in the domain of the block that drives them: dpa_* and
// capture_* in clk_adc, ddr_busy in clk_ui, the rest in clk_eth.
//
// The board's addresses (LOCAL_MAC, LOCAL_IP, CMD_PORT) are parameters
// with example values; the paper gives none. FIFO depths are this design's.
module digitizer_top
  import digitizer_pkg::*;
#(
  parameter logic [47:0] LOCAL_MAC = 48'h02_00_00_00_00_01,
  parameter logic [31:0] LOCAL_IP  = 32'hC0A8_010A,     // 192.168.1.10
  parameter logic [15:0] CMD_PORT  = 16'd5000,
  parameter int unsigned CFG_WAIT  = 64,
  parameter int unsigned CAP_AW    = 5,                  // capture FIFO: 32 words
  parameter int unsigned UPL_AW    = 5                   // upload FIFO: 32 words
) (
  input  logic                           rst_n,
  // ADC LVDS lanes, through IODELAY and ISERDES
  input  logic                           clk_adc,
  input  logic [N_LANES-1:0][DESER-1:0]  lane_raw,
  output logic [N_LANES-1:0][TAP_W-1:0]  iodelay_tap,
  output logic [N_LANES-1:0]             iodelay_ld,
  output logic                           adc_train_mode,
  output logic                           adc_spi_csn,     // ADC serial configuration port
  output logic                           adc_spi_sclk,
  output logic                           adc_spi_mosi,
  input  logic                           trig_in,
  // DDR3 controller user interface
  input  logic                           clk_ui,
  input  logic                           init_calib_complete,
  output logic [APP_ADDR_W-1:0]          app_addr,
  output logic [2:0]                     app_cmd,
  output logic                           app_en,
  input  logic                           app_rdy,
  output logic [APP_DATA_W-1:0]          app_wdf_data,
  output logic                           app_wdf_wren,
  output logic                           app_wdf_end,
  input  logic                           app_wdf_rdy,
  input  logic [APP_DATA_W-1:0]          app_rd_data,
  input  logic                           app_rd_data_valid,
  // RGMII towards the PHY, as the two edge values of each DDR I/O register
  input  logic                           clk_eth,
  output logic [4:0]                     rgmii_tx_rise,   // {TX_CTL, TXD[3:0]} rising edge
  output logic [4:0]                     rgmii_tx_fall,   // {TX_CTL, TXD[3:0]} falling edge
  input  logic                           rgmii_rxc,       // PHY receive clock
  input  logic [4:0]                     rgmii_rx_rise,   // {RX_CTL, RXD[3:0]} rising edge
  input  logic [4:0]                     rgmii_rx_fall,   // {RX_CTL, RXD[3:0]} falling edge
  // status
  output logic                           dpa_done,
  output logic                           dpa_error,
  output logic                           capture_armed,
  output logic                           capture_active,
  output logic                           capture_overflow,
  output logic                           ddr_busy,
  output logic                           record_busy,
  output logic [31:0]                    pkts_sent,
  output logic [15:0]                    cmds_rejected,
  output logic [15:0]                    net_test_rejected,
  output logic [15:0]                    frames_dropped
);
  logic rst_adc, rst_ui, rst_eth;
  reset_sync u_rs_adc (.clk(clk_adc), .rst_n, .rst(rst_adc));
  reset_sync u_rs_ui  (.clk(clk_ui),  .rst_n, .rst(rst_ui));
  reset_sync u_rs_eth (.clk(clk_eth), .rst_n, .rst(rst_eth));
  logic rst_rxc;
  reset_sync u_rs_rxc (.clk(rgmii_rxc), .rst_n, .rst(rst_rxc));

  logic [7:0] gmii_txd, gmii_rxd;
  logic gmii_tx_en, gmii_tx_er, gmii_rx_dv, gmii_rx_er;
  rgmii_rx u_rgmii_rx (
    .rx_clk(rgmii_rxc), .rx_rst(rst_rxc), .rx_rise(rgmii_rx_rise), .rx_fall(rgmii_rx_fall),
    .clk(clk_eth), .rst(rst_eth), .gmii_rxd, .gmii_rx_dv, .gmii_rx_er);
  rgmii_tx u_rgmii_tx (
    .clk(clk_eth), .rst(rst_eth), .txd(gmii_txd), .tx_en(gmii_tx_en), .tx_er(gmii_tx_er),
    .tx_rise(rgmii_tx_rise), .tx_fall(rgmii_tx_fall));

  // ------------------------------------------------------------------
  // ADC domain: lane alignment and capture
  logic [N_LANES-1:0][DESER-1:0] lane_word;
  logic [N_LANES-1:0] lane_error;
  logic arm_adc, cap_wr_en, cap_full, capture_done;
  logic [APP_DATA_W-1:0] cap_wr_data;
  logic [CAP_AW:0] cap_wr_used;
  logic [MAX_PKT_WIDTH-1:0] len_pkts;

  logic adc_cfg_busy, lanes_ready;
  logic [15:0] adc_cfg_writes;
  dpa_module #(.CFG_WAIT(CFG_WAIT)) u_dpa (
    .clk(clk_adc), .rst(rst_adc), .restart(1'b0), .cfg_busy(adc_cfg_busy), .raw(lane_raw),
    .tap(iodelay_tap), .tap_ld(iodelay_ld), .word(lane_word),
    .adc_train_mode, .dpa_done, .dpa_error, .lane_error);

  // ADC register writes: training pattern on / off as DPA asks
  adc_spi_cfg u_adc_cfg (
    .clk(clk_adc), .rst(rst_adc), .train_mode(adc_train_mode), .spi_csn(adc_spi_csn),
    .spi_sclk(adc_spi_sclk), .spi_mosi(adc_spi_mosi), .busy(adc_cfg_busy),
    .writes(adc_cfg_writes));
  // samples are valid once aligned and the ADC is back in normal mode
  assign lanes_ready = dpa_done && !adc_cfg_busy;

  data_processing u_proc (
    .clk(clk_adc), .rst(rst_adc), .word(lane_word), .dpa_done(lanes_ready), .trig_in,
    .arm(arm_adc), .len_pkts, .fifo_full(cap_full), .fifo_wr_en(cap_wr_en),
    .fifo_wr_data(cap_wr_data), .armed(capture_armed), .capturing(capture_active),
    .capture_done, .overflow(capture_overflow));

  // ------------------------------------------------------------------
  // capture FIFO, ADC -> DDR3 controller clock
  logic cap_rd_en, cap_empty;
  logic [APP_DATA_W-1:0] cap_rd_data;
  logic [CAP_AW:0] cap_rd_used;
  async_fifo #(.DW(APP_DATA_W), .AW(CAP_AW)) u_cap_fifo (
    .wr_clk(clk_adc), .wr_rst(rst_adc), .wr_en(cap_wr_en), .wr_data(cap_wr_data),
    .wr_full(cap_full), .wr_used(cap_wr_used),
    .rd_clk(clk_ui), .rd_rst(rst_ui), .rd_en(cap_rd_en), .rd_data(cap_rd_data),
    .rd_empty(cap_empty), .rd_used(cap_rd_used));

  // ------------------------------------------------------------------
  // DDR3 side
  logic arm_ui, ddr_done, upl_wr_en;
  logic [APP_DATA_W-1:0] upl_wr_data;
  logic [UPL_AW:0] upl_wr_used;
  ddr_sequencer #(.RF_AW(UPL_AW)) u_ddr (
    .clk(clk_ui), .rst(rst_ui), .start(arm_ui), .len_pkts, .busy(ddr_busy), .done(ddr_done),
    .wf_empty(cap_empty), .wf_data(cap_rd_data), .wf_rd_en(cap_rd_en),
    .init_calib_complete, .app_addr, .app_cmd, .app_en, .app_rdy, .app_wdf_data,
    .app_wdf_wren, .app_wdf_end, .app_wdf_rdy, .app_rd_data, .app_rd_data_valid,
    .rf_wr_en(upl_wr_en), .rf_wr_data(upl_wr_data), .rf_used(upl_wr_used));

  // upload FIFO, DDR3 controller clock -> Ethernet clock
  logic upl_rd_en, upl_empty;
  logic [APP_DATA_W-1:0] upl_rd_data;
  logic [UPL_AW:0] upl_rd_used;
  async_fifo #(.DW(APP_DATA_W), .AW(UPL_AW)) u_upl_fifo (
    .wr_clk(clk_ui), .wr_rst(rst_ui), .wr_en(upl_wr_en), .wr_data(upl_wr_data),
    .wr_full(), .wr_used(upl_wr_used),
    .rd_clk(clk_eth), .rd_rst(rst_eth), .rd_en(upl_rd_en), .rd_data(upl_rd_data),
    .rd_empty(upl_empty), .rd_used(upl_rd_used));

  // ------------------------------------------------------------------
  // Ethernet domain: commands
  endpoint_t local_ep, host_ep;
  assign local_ep = '{mac: LOCAL_MAC, ip: LOCAL_IP, port: CMD_PORT};

  logic rx_valid, rx_last, rx_good;
  logic [7:0] rx_data;
  eth_mac_rx u_mac_rx (
    .clk(clk_eth), .rst(rst_eth), .gmii_rxd, .gmii_rx_dv, .gmii_rx_er,
    .m_valid(rx_valid), .m_data(rx_data), .m_last(rx_last), .m_good(rx_good));

  logic cmd_valid, host_valid;
  logic [7:0] opcode;
  logic [31:0] arg;
  cmd_rx u_cmd (
    .clk(clk_eth), .rst(rst_eth), .local_ep, .s_valid(rx_valid), .s_data(rx_data),
    .s_last(rx_last), .s_good(rx_good), .cmd_valid, .opcode, .arg, .host_ep,
    .host_valid, .dropped(frames_dropped));

  // ARM: accepted when the lanes are aligned and no record is in progress.
  // A record is in progress from its ARM until its last packet has left.
  logic dpa_done_eth, arm_eth, arm_ok;
  logic [MAX_PKT_WIDTH-1:0] rec_left;
  logic [31:0] upl_pkts, upl_pkts_d;
  sync_bit u_dpa_sync (.clk(clk_eth), .rst(rst_eth), .d(lanes_ready), .q(dpa_done_eth));

  assign arm_ok  = cmd_valid && (opcode == OP_ARM) && dpa_done_eth && (rec_left == '0) &&
                   (arg != 32'd0) && (arg < 32'(2**(MAX_PKT_WIDTH-1)) + 32'd1);
  assign record_busy = (rec_left != '0);

  logic arm_rejected;
  assign arm_rejected = cmd_valid && (opcode == OP_ARM) && !arm_ok;

  always_ff @(posedge clk_eth) begin
    if (rst_eth) begin
      arm_eth       <= 1'b0;
      len_pkts      <= '0;
      rec_left      <= '0;
      upl_pkts_d    <= '0;
      cmds_rejected <= '0;
    end else begin
      arm_eth    <= 1'b0;
      upl_pkts_d <= upl_pkts;
      if (arm_ok) begin
        len_pkts <= arg[MAX_PKT_WIDTH-1:0];
        rec_left <= arg[MAX_PKT_WIDTH-1:0];
        arm_eth  <= 1'b1;
      end else if (upl_pkts != upl_pkts_d && rec_left != '0) begin
        rec_left <= rec_left - 1'b1;
      end
      if (arm_rejected || (cmd_valid && opcode != OP_ARM && opcode != OP_NET_TEST))
        cmds_rejected <= cmds_rejected + 1'b1;
    end
  end

  pulse_sync u_arm_adc (.src_clk(clk_eth), .src_rst(rst_eth), .src_pulse(arm_eth),
                        .dst_clk(clk_adc), .dst_rst(rst_adc), .dst_pulse(arm_adc));
  pulse_sync u_arm_ui  (.src_clk(clk_eth), .src_rst(rst_eth), .src_pulse(arm_eth),
                        .dst_clk(clk_ui),  .dst_rst(rst_ui),  .dst_pulse(arm_ui));

  // ------------------------------------------------------------------
  // Ethernet domain: packet sources, UDP layer, MAC
  logic [1:0] src_req, src_gnt, src_rd;
  logic [1:0][7:0] src_data;
  logic [15:0] nt_pending;

  upload_packetizer #(.AW(UPL_AW)) u_upl (
    .clk(clk_eth), .rst(rst_eth), .rf_empty(upl_empty), .rf_data(upl_rd_data),
    .rf_used(upl_rd_used), .rf_rd_en(upl_rd_en), .req(src_req[0]), .gnt(src_gnt[0]),
    .rd(src_rd[0]), .data(src_data[0]), .pkts_sent(upl_pkts));

  net_test u_nt (
    .clk(clk_eth), .rst(rst_eth), .cmd_valid(cmd_valid && opcode == OP_NET_TEST),
    .cmd_n(arg), .req(src_req[1]), .gnt(src_gnt[1]), .rd(src_rd[1]), .data(src_data[1]),
    .pending(nt_pending), .rejected(net_test_rejected));

  logic tx_valid, tx_ready, tx_last, frame_sent;
  logic [7:0] tx_data;
  udp_tx #(.NSRC(2)) u_udp_tx (
    .clk(clk_eth), .rst(rst_eth), .local_ep, .host_ep, .host_valid, .src_req, .src_gnt,
    .src_rd, .src_data, .m_valid(tx_valid), .m_ready(tx_ready), .m_data(tx_data),
    .m_last(tx_last), .pkt_count(pkts_sent));

  eth_mac_tx u_mac_tx (
    .clk(clk_eth), .rst(rst_eth), .s_valid(tx_valid), .s_ready(tx_ready), .s_data(tx_data),
    .s_last(tx_last), .gmii_txd, .gmii_tx_en, .gmii_tx_er, .frame_sent);
endmodule
