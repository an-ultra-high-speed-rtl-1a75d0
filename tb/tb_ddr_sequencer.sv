// tb_ddr_sequencer: the sequencer between two FIFO models and the DDR3
// controller model. The test pushes len_pkts*16 random 512-bit words into
// the capture FIFO model, lets the sequencer store them and read them back,
// and drains the upload FIFO model slowly (one word every 9 cycles) so that
// read flow control matters. Checks: every word written lands at
// address index*8; the words read back arrive in order and equal what was
// captured; the upload FIFO never holds more than its depth; no command is
// refused by the controller model; `done` pulses once; and with the
// controller not stalling, the write phase runs at one word per cycle.
module tb_ddr_sequencer;
  import digitizer_pkg::*;
  localparam int RF_AW = 3;
  logic clk = 0, rst = 1;
  always #5 clk = ~clk;

  logic start = 0, busy, done;
  logic [MAX_PKT_WIDTH-1:0] len_pkts;
  logic wf_empty, wf_rd_en;
  logic [APP_DATA_W-1:0] wf_data;
  logic init_calib_complete;
  logic [APP_ADDR_W-1:0] app_addr;
  logic [2:0] app_cmd;
  logic app_en, app_rdy, app_wdf_wren, app_wdf_end, app_wdf_rdy, app_rd_data_valid;
  logic [APP_DATA_W-1:0] app_wdf_data, app_rd_data;
  logic rf_wr_en;
  logic [APP_DATA_W-1:0] rf_wr_data;
  logic [RF_AW:0] rf_used;
  int unsigned stall_pct = 0, n_writes, n_reads, n_errors;
  logic hold = 0;

  ddr_sequencer #(.RF_AW(RF_AW)) dut (.*);
  mig_model #(.DW(APP_DATA_W), .AW(APP_ADDR_W)) mig (.*);

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL: %s", msg); end
  endtask

  // capture FIFO model (first word fall through)
  logic [APP_DATA_W-1:0] wq[$], sent[$];
  assign wf_empty = (wq.size() == 0);
  assign wf_data  = wf_empty ? '0 : wq[0];
  // sampled at the clock edge, popped half a cycle later
  logic pop_now = 0;
  always @(posedge clk) begin
    pop_now <= wf_rd_en && !wf_empty;
    if (wf_rd_en && !wf_empty)
      check(app_addr == APP_ADDR_W'(sent.size() * 8), $sformatf("write address %0d", app_addr));
  end
  always @(negedge clk) if (pop_now) sent.push_back(wq.pop_front());

  // upload FIFO model, drained every 9 cycles
  logic [APP_DATA_W-1:0] rq[$];
  int got = 0, cyc = 0, ndone = 0;
  assign rf_used = (RF_AW+1)'(rq.size());
  always @(posedge clk) begin
    cyc++;
    if (done) ndone++;
    if (rf_wr_en) begin
      check(rq.size() < 2**RF_AW, "upload FIFO overflow");
      rq.push_back(rf_wr_data);
    end
    if (cyc % 9 == 0 && rq.size() > 0) begin
      logic [APP_DATA_W-1:0] w;
      w = rq.pop_front();
      check(w == sent[got], $sformatf("read-back word %0d differs", got));
      got++;
    end
  end

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic run(input int pkts, input int stall);
    int t0, t1, nw;
    stall_pct = stall;
    sent.delete(); got = 0; ndone = 0;
    nw = pkts * PKT_WORDS;
    for (int i = 0; i < nw; i++) begin
      logic [APP_DATA_W-1:0] w;
      for (int k = 0; k < APP_DATA_W / 32; k++) w[k*32 +: 32] = $urandom;
      wq.push_back(w);
    end
    len_pkts = MAX_PKT_WIDTH'(pkts);
    @(negedge clk) start = 1;
    @(negedge clk) start = 0;
    t0 = cyc;
    wait (sent.size() == nw);
    t1 = cyc;
    if (stall == 0) check(t1 - t0 <= nw + 2, $sformatf("write phase %0d cycles for %0d words", t1 - t0, nw));
    wait (got == nw);
    repeat (5) @(posedge clk);
    check(ndone == 1, $sformatf("done pulses %0d", ndone));
    check(!busy, "idle after the record");
  endtask

  initial begin
    repeat (3) @(posedge clk);
    rst <= 0;
    wait (init_calib_complete);
    repeat (5) @(posedge clk);
    run(2, 0);
    run(3, 40);
    check(n_errors == 0, "controller model saw no protocol error");
    check(n_writes == 80 && n_reads == 80, $sformatf("writes %0d reads %0d", n_writes, n_reads));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
