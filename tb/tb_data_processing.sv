// tb_data_processing: capture path in the ADC clock domain.
// The test drives lane words built from known per-core sample sequences
// (sample n of core c = (n*7 + c*101) mod 1024), arms, raises the trigger,
// and collects what is written towards the FIFO. It unpacks the 512-bit
// words as a little-endian stream of 10-bit fields in the order
// (sample j, core c) and checks them against the sequence, starting two
// word clocks after the one at which the trigger was first sampled. Also:
// arm before DPA is done is ignored, a trigger while not armed starts
// nothing, exactly len_pkts*16 words are written, and with the FIFO full
// at random the overflow flag rises while the count still completes.
module tb_data_processing;
  import digitizer_pkg::*;
  logic clk = 0, rst = 1;
  always #5 clk = ~clk;
  logic [N_LANES-1:0][DESER-1:0] word;
  logic dpa_done = 0, trig_in = 0, arm = 0, fifo_full = 0;
  logic [MAX_PKT_WIDTH-1:0] len_pkts = 2;
  logic fifo_wr_en, armed, capturing, capture_done, overflow;
  logic [APP_DATA_W-1:0] fifo_wr_data;

  data_processing dut (.*);

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL: %s", msg); end
  endtask

  function automatic logic [9:0] smp(longint n, int c);
    return 10'((n * 7 + c * 101) % 1024);
  endfunction

  // word index n is on `word` during the cycle ending at posedge n
  longint widx = 0;
  always @(negedge clk) begin
    for (int c = 0; c < N_CH; c++)
      for (int j = 0; j < DESER; j++) begin
        logic [9:0] v;
        v = smp(widx * DESER + j, c);
        for (int b = 0; b < ADC_BITS; b++) word[c*ADC_BITS + b][DESER-1-j] = v[b];
      end
    widx++;
  end

  longint pos_cnt = 0;
  always @(posedge clk) pos_cnt <= pos_cnt + 1;

  bit stream[$];
  int nwritten = 0;
  always @(posedge clk) if (fifo_wr_en) begin
    nwritten++;
    for (int i = 0; i < APP_DATA_W; i++) stream.push_back(fifo_wr_data[i]);
  end

  int nfull_cycles = 0;
  bit random_full = 0;
  always @(negedge clk) begin
    fifo_full = random_full && ($urandom % 3 == 0);
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic pulse_arm();
    @(negedge clk) arm = 1;
    @(negedge clk) arm = 0;
  endtask

  longint tpos;
  initial begin
    repeat (3) @(posedge clk);
    rst <= 0;
    repeat (3) @(posedge clk);
    pulse_arm();
    @(posedge clk); #1;
    check(!armed, "arm ignored before DPA done");
    @(negedge clk) trig_in = 1;
    repeat (5) @(negedge clk); trig_in = 0;
    check(!capturing && nwritten == 0, "trigger while idle does nothing");
    dpa_done = 1;
    pulse_arm();
    #1 check(armed, "armed");
    repeat (7) @(negedge clk);
    trig_in = 1;
    @(posedge clk); tpos = widx - 1;      // word index sampled by the synchronizer
    fork
      begin wait (capture_done); end
      begin repeat (3000) @(posedge clk); end
    join_any
    @(negedge clk) trig_in = 0;
    check(nwritten == 32, $sformatf("wrote %0d words, expected 32", nwritten));
    check(!overflow, "no overflow");
    // check the stream
    for (int k = 0; k < nwritten * APP_DATA_W / 10; k++) begin
      logic [9:0] got;
      longint frame_i;
      int sj, sc;
      for (int b = 0; b < 10; b++) got[b] = stream[k*10 + b];
      frame_i = k / (DESER * N_CH);
      sj = (k % (DESER * N_CH)) / N_CH;
      sc = k % N_CH;
      check(got == smp((tpos + 2 + frame_i) * DESER + sj, sc),
            $sformatf("sample %0d got %0d", k, got));
    end
    // second capture with a FIFO that is often full
    stream.delete(); nwritten = 0;
    len_pkts = 3;
    random_full = 1;
    pulse_arm();
    repeat (3) @(negedge clk); trig_in = 1;
    wait (capture_done);
    @(negedge clk) trig_in = 0;
    random_full = 0;
    check(overflow, "overflow seen with full FIFO");
    check(nwritten == 48, $sformatf("overflow run wrote %0d words, expected 48", nwritten));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
