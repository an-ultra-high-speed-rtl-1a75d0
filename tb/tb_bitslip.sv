// tb_bitslip: self-checking test of the bitslip word-boundary shifter.
// Random words stream in; slips are requested at random times. A reference
// keeps every bit sent, in time order, and predicts each output window:
// after k slips, the output following input word n is bits
// [(n-1)*W + k .. (n-1)*W + k + W - 1]. Also checks wrap-around after W slips.
module tb_bitslip;
  localparam int unsigned W = 8;
  logic clk = 0, rst = 1;
  logic valid, slip;
  logic [W-1:0] d, q;
  logic q_valid;
  logic [$clog2(W)-1:0] slip_count;
  int checks = 0, failures = 0;

  bitslip #(.W(W)) dut (.*);

  always #5 clk = ~clk;

  bit bits[$];
  int nwords = 0;
  int k = 0;            // reference slip offset

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    valid = 0; slip = 0; d = '0;
    repeat (3) @(posedge clk);
    rst <= 0;
    for (int n = 0; n < 400; n++) begin
      logic [W-1:0] word;
      int kk;
      word = W'($urandom);
      kk = k;
      @(negedge clk);
      valid = 1; d = word;
      slip = (n % 7 == 3);
      for (int j = 0; j < W; j++) bits.push_back(word[W-1-j]);
      @(posedge clk); #1;
      if (slip) k = (k + 1) % W;
      nwords++;
      // output now holds window with offset kk starting at word n-1
      if (n >= 1) begin
        logic [W-1:0] exp;
        for (int j = 0; j < W; j++) exp[W-1-j] = bits[(n-1)*W + kk + j];
        checks++;
        if (q !== exp || !q_valid) begin
          failures++;
          if (failures < 5) $display("mismatch n=%0d k=%0d q=%h exp=%h", n, kk, q, exp);
        end
        checks++;
        if (slip_count != k[$clog2(W)-1:0]) failures++;
      end
      @(negedge clk); valid = 0; slip = 0;
      @(posedge clk); #1;
      checks++;
      if (q_valid) failures++;        // no word in, no word out
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
