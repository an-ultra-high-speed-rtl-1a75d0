// tb_upload_packetizer: an upload FIFO model is filled with random 512-bit
// words in bursts; a transmitter model grants a packet whenever `req` is
// high and reads 1024 bytes without pause. Checks: `req` stays low while
// fewer than 16 words wait; the payload bytes are the words' bytes, lowest
// first, in FIFO order; exactly 16 words are popped per packet; the
// packet counter.
module tb_upload_packetizer;
  import digitizer_pkg::*;
  localparam int AW = 5;
  logic clk = 0, rst = 1;
  always #4 clk = ~clk;
  logic rf_empty, rf_rd_en, req, gnt = 0, rd = 0;
  logic [APP_DATA_W-1:0] rf_data;
  logic [AW:0] rf_used;
  logic [7:0] data;
  logic [31:0] pkts_sent;

  upload_packetizer #(.AW(AW)) dut (.*);

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL: %s", msg); end
  endtask

  logic [APP_DATA_W-1:0] q[$], all[$];
  assign rf_empty = (q.size() == 0);
  assign rf_used  = (AW+1)'(q.size());
  assign rf_data  = rf_empty ? '0 : q[0];
  logic pop_now = 0;
  int npop = 0;
  always @(posedge clk) pop_now <= rf_rd_en;
  always @(negedge clk) if (pop_now) begin void'(q.pop_front()); npop++; end

  task automatic push_words(input int n);
    for (int i = 0; i < n; i++) begin
      logic [APP_DATA_W-1:0] w;
      for (int k = 0; k < APP_DATA_W / 32; k++) w[k*32 +: 32] = $urandom;
      q.push_back(w); all.push_back(w);
    end
  endtask

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int bno = 0;
  task automatic take_packet();
    @(negedge clk) gnt = 1;
    @(negedge clk) gnt = 0;
    repeat (5) @(negedge clk);
    for (int i = 0; i < 1024; i++) begin
      logic [APP_DATA_W-1:0] w;
      rd = 1;
      w = all[bno / 64];
      #1 check(data == w[8*(bno % 64) +: 8], $sformatf("payload byte %0d", bno));
      bno++;
      @(negedge clk);
    end
    rd = 0;
    @(negedge clk);
  endtask

  initial begin
    repeat (3) @(posedge clk);
    rst <= 0;
    push_words(15);
    repeat (10) @(negedge clk);
    check(!req, "no request with 15 words");
    push_words(1);
    @(negedge clk); #1 check(req, "request with 16 words");
    take_packet();
    check(npop == 16, $sformatf("popped %0d", npop));
    push_words(40);
    @(negedge clk); #1;
    while (req) take_packet();
    check(npop == 48 && q.size() == 8, $sformatf("popped %0d left %0d", npop, q.size()));
    check(pkts_sent == 3, "packet count");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
