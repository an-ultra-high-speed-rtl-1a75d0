// tb_cmd_rx: command frames built by the reference package are streamed
// in as the MAC receiver would deliver them (bytes, last, good). Checks
// that a correct command to this board (unicast and broadcast) yields
// `cmd_valid` with the right opcode, argument and sender address, and that
// frames with a bad FCS flag, another destination MAC, IP or UDP port,
// a non-UDP protocol, a non-IPv4 EtherType, IP options or a too-short
// payload are each dropped and counted, and that the stored sender address
// follows the latest accepted command.
module tb_cmd_rx;
  import digitizer_pkg::*;
  import eth_ref_pkg::*;
  logic clk = 0, rst = 1;
  always #4 clk = ~clk;
  endpoint_t local_ep, host_ep, hst;   // host_ep: design output; hst: sender used here
  logic s_valid = 0, s_last = 0, s_good = 0;
  logic [7:0] s_data = 0;
  logic cmd_valid, host_valid;
  logic [7:0] opcode;
  logic [31:0] arg;
  logic [15:0] dropped;

  cmd_rx dut (.*);

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL: %s", msg); end
  endtask

  int ncmd = 0;
  logic [7:0] last_op;
  logic [31:0] last_arg;
  always @(posedge clk) if (!rst && cmd_valid) begin ncmd++; last_op = opcode; last_arg = arg; end

  task automatic send(input bq_t f, input bit good);
    // pad as the sender's MAC would
    while (f.size() < 60) f.push_back(8'h00);
    foreach (f[i]) begin
      @(negedge clk);
      s_valid = 1; s_data = f[i]; s_last = (i == f.size() - 1); s_good = s_last && good;
    end
    @(negedge clk) s_valid = 0; s_last = 0; s_good = 0;
    repeat (3) @(negedge clk);
  endtask

  task automatic drop(input bq_t f, input bit good, input string what);
    int n0, d0;
    n0 = ncmd; d0 = int'(dropped);
    send(f, good);
    check(ncmd == n0 && int'(dropped) == d0 + 1, {what, " frame dropped"});
  endtask

  function automatic bq_t cmdf(input logic [47:0] dmac, input logic [31:0] dip,
                               input logic [15:0] dport, input logic [7:0] op,
                               input logic [31:0] a, input int plen);
    bq_t pl;
    pl.push_back(op);
    push32(pl, a);
    while (pl.size() < plen) pl.push_back(8'hEE);
    while (pl.size() > plen) void'(pl.pop_back());
    return udp_frame(dmac, hst.mac, hst.ip, dip, hst.port, dport, 16'h1234, pl);
  endfunction

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    bq_t f;
    local_ep = '{mac: 48'h02_00_00_12_34_56, ip: 32'hC0A8_010A, port: 16'd5000};
    hst      = '{mac: 48'hA0_B1_C2_D3_E4_F5, ip: 32'hC0A8_0164, port: 16'd6001};
    repeat (3) @(posedge clk);
    rst <= 0;
    send(cmdf(local_ep.mac, local_ep.ip, local_ep.port, 8'h02, 32'd256, 5), 1);
    check(ncmd == 1 && last_op == 8'h02 && last_arg == 32'd256, $sformatf("unicast command n=%0d op=%h arg=%h", ncmd, last_op, last_arg));
    check(host_valid && host_ep == hst, "host address stored");
    send(cmdf('1, local_ep.ip, local_ep.port, 8'h01, 32'h0001_0203, 20), 1);
    check(ncmd == 2 && last_op == 8'h01 && last_arg == 32'h0001_0203, "broadcast command");
    drop(cmdf(local_ep.mac, local_ep.ip, local_ep.port, 8'h02, 32'd7, 5), 0, "bad FCS");
    drop(cmdf(48'h02_00_00_12_34_57, local_ep.ip, local_ep.port, 8'h02, 32'd7, 5), 1, "other MAC");
    drop(cmdf(local_ep.mac, 32'hC0A8_010B, local_ep.port, 8'h02, 32'd7, 5), 1, "other IP");
    drop(cmdf(local_ep.mac, local_ep.ip, 16'd5001, 8'h02, 32'd7, 5), 1, "other port");
    f = cmdf(local_ep.mac, local_ep.ip, local_ep.port, 8'h02, 32'd7, 5);
    f[23] = 8'd6;                                  // TCP
    drop(f, 1, "TCP protocol");
    f = cmdf(local_ep.mac, local_ep.ip, local_ep.port, 8'h02, 32'd7, 5);
    f[12] = 8'h86; f[13] = 8'hDD;                  // IPv6 EtherType
    drop(f, 1, "IPv6 EtherType");
    f = cmdf(local_ep.mac, local_ep.ip, local_ep.port, 8'h02, 32'd7, 5);
    f[14] = 8'h46;                                 // IPv4 header with options
    drop(f, 1, "IP options");
    drop(cmdf(local_ep.mac, local_ep.ip, local_ep.port, 8'h02, 32'd7, 3), 1, "3-byte UDP payload");
    // the sender's address follows the latest accepted command
    hst = '{mac: 48'hA0_B1_C2_D3_E4_F6, ip: 32'hC0A8_0165, port: 16'd6002};
    send(cmdf(local_ep.mac, local_ep.ip, local_ep.port, 8'h01, 32'hDEAD_BEEF, 5), 1);
    check(ncmd == 3 && last_op == 8'h01 && last_arg == 32'hDEAD_BEEF, "third command");
    check(host_ep == hst, "new host address stored");
    ncmd--;
    check(ncmd == 2, $sformatf("%0d commands accepted", ncmd));
    check(dropped == 8, $sformatf("%0d frames dropped", dropped));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
