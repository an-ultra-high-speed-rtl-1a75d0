// tb_net_test: the network test source driven by a simple transmitter
// model that grants one packet at a time and reads 1024 bytes from it.
// Requests of 1, 3 and 256 packets are sent (256 is the largest the paper
// allows), plus 0 and 257 which must be rejected. Checks the number of
// packets delivered per request, that the bytes form a big-endian 32-bit
// counter continuing across packets and requests, and that `req` drops
// once all packets have been granted.
module tb_net_test;
  logic clk = 0, rst = 1;
  always #4 clk = ~clk;
  logic cmd_valid = 0;
  logic [31:0] cmd_n = 0;
  logic req, gnt = 0, rd = 0;
  logic [7:0] data;
  logic [15:0] pending, rejected;

  net_test dut (.*);

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL: %s", msg); end
  endtask

  initial begin
    repeat (2000000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  longint byte_no = 0;
  task automatic command(input int n);
    @(negedge clk) cmd_valid = 1; cmd_n = n;
    @(negedge clk) cmd_valid = 0;
  endtask

  // transmitter model: takes packets while req is high
  task automatic drain(output int pkts);
    pkts = 0;
    @(negedge clk);
    while (req) begin
      gnt = 1;
      @(negedge clk) gnt = 0;
      repeat (3) @(negedge clk);
      for (int i = 0; i < 1024; i++) begin
        logic [31:0] cnt;
        cnt = 32'(byte_no / 4);
        rd = 1;
        #1 check(data == cnt[8*(3 - byte_no % 4) +: 8], $sformatf("byte %0d", byte_no));
        byte_no++;
        @(negedge clk);
      end
      rd = 0;
      pkts++;
      @(negedge clk);
    end
  endtask

  initial begin
    int p;
    repeat (3) @(posedge clk);
    rst <= 0;
    @(negedge clk);
    command(1);   drain(p); check(p == 1, $sformatf("1 -> %0d packets", p));
    command(3);   drain(p); check(p == 3, $sformatf("3 -> %0d packets", p));
    command(0);   command(257);
    @(negedge clk); check(!req && rejected == 2, "out-of-range requests rejected");
    command(256); drain(p); check(p == 256, $sformatf("256 -> %0d packets", p));
    check(pending == 0 && !req, "nothing pending");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
