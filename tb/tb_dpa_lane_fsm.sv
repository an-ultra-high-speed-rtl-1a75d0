// tb_dpa_lane_fsm: closed-loop test of the per-lane DPA controller.
// Five lanes with different skews (P0 = 0, 3, 5, 7, 9 taps, 10 taps per
// bit) each run lane_model -> bitslip -> dpa_lane_fsm. For each lane the
// test checks, from the model's own geometry:
//  * left and right edges lie on the bit boundaries the model places at
//    d mod TPB in {TPB-1, 0} (d = P0 + tap), one bit time apart;
//  * the final tap sits within 2 taps of the eye centre;
//  * the aligned word equals the training word, and after switching the
//    model to ramp data each word carries 8 consecutive ramp samples whose
//    first index is a multiple of 8 (word alignment).
// A sixth lane has a bit time longer than the tap range and must end in
// error. Also checks the run takes fewer cycles than the worst case.
module tb_dpa_lane_fsm;
  import digitizer_pkg::*;
  localparam int NL = 6;
  localparam int P0S [NL] = '{0, 3, 5, 7, 9, 5};
  localparam int TPBS[NL] = '{10, 10, 10, 10, 10, 40};
  localparam int BITS[NL] = '{0, 1, 2, 5, 9, 3};

  logic clk = 0, rst = 1, start = 0, train = 1;
  always #5 clk = ~clk;

  logic [DESER-1:0] raw [NL], word [NL];
  logic [TAP_W-1:0] tap [NL], left_tap [NL], right_tap [NL];
  logic tap_ld [NL], slip [NL], wvalid [NL], busy [NL], done [NL], error [NL];
  logic [2:0] sc [NL];

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  for (genvar i = 0; i < NL; i++) begin : g_lane
    lane_model #(.W(DESER), .TW(TAP_W), .CH(1), .BIT(BITS[i]), .P0(P0S[i]), .TPB(TPBS[i]))
      m (.clk, .rst, .train, .tap(tap[i]), .tap_ld(tap_ld[i]), .q(raw[i]));
    bitslip #(.W(DESER)) bs (.clk, .rst, .valid(1'b1), .d(raw[i]), .slip(slip[i]),
                             .q(word[i]), .q_valid(wvalid[i]), .slip_count(sc[i]));
    dpa_lane_fsm dut (.clk, .rst, .start, .word(word[i]), .word_valid(wvalid[i]),
                      .tap(tap[i]), .tap_ld(tap_ld[i]), .slip(slip[i]), .busy(busy[i]),
                      .done(done[i]), .error(error[i]), .left_tap(left_tap[i]),
                      .right_tap(right_tap[i]));
  end

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic bit on_edge(int p0, int t, int tpb);
    int pos;
    pos = (p0 + t) % tpb;
    return pos == tpb - 1 || pos == 0;
  endfunction

  // first tap >= from at which the model is on a bit boundary
  function automatic int next_edge(int p0, int from, int tpb);
    for (int t = from; t < 32; t++) if (on_edge(p0, t, tpb)) return t;
    return -1;
  endfunction

  int cycles;
  initial begin
    repeat (4) @(posedge clk);
    rst <= 0;
    @(posedge clk); start <= 1;
    @(posedge clk); start <= 0;
    cycles = 0;
    while (!(done[0] && done[1] && done[2] && done[3] && done[4] && done[5])) begin
      @(posedge clk); cycles++;
    end
    // worst case: 32 taps x (settle + observe + 2) + 16 slips x (settle + observe + 2)
    check(cycles < (32 + 16 + 2) * (4 + 8 + 3), $sformatf("run took %0d cycles", cycles));
    for (int i = 0; i < NL - 1; i++) begin
      int el, er, pos;
      el = next_edge(P0S[i], 1, TPBS[i]);
      check(!error[i], $sformatf("lane %0d error", i));
      // a lane whose tap 0 already sits on a boundary sees its first change at tap 1
      check(int'(left_tap[i]) == el || int'(left_tap[i]) == el + 1 ||
            (on_edge(P0S[i], 0, TPBS[i]) && left_tap[i] == 1),
            $sformatf("lane %0d left %0d expected %0d or +1", i, left_tap[i], el));
      er = next_edge(P0S[i], int'(left_tap[i]) + 2, TPBS[i]);
      check(int'(right_tap[i]) == er || int'(right_tap[i]) == er + 1,
            $sformatf("lane %0d right %0d expected %0d or +1", i, right_tap[i], er));
      pos = (P0S[i] + int'(tap[i])) % TPBS[i];
      check(pos >= 3 && pos <= 7, $sformatf("lane %0d final tap %0d eye pos %0d", i, tap[i], pos));
    end
    check(error[5] && done[5], "lane with no edges in range must flag error");
    // word alignment on the training pattern
    repeat (20) begin
      @(posedge clk); #1;
      for (int i = 0; i < NL - 1; i++) check(word[i] == TRAIN_WORD, $sformatf("lane %0d word %h", i, word[i]));
    end
    // normal data: ramp, sample index of the oldest bit a multiple of 8
    @(negedge clk) train = 0;
    repeat (6) @(posedge clk);
    for (int i = 0; i < NL - 1; i++) begin
      int s0;
      s0 = -1;
      #1;
      for (int s = 0; s < 2000 && s0 < 0; s += 8) begin
        bit ok;
        ok = 1;
        for (int j = 0; j < DESER; j++) begin
          int v;
          v = (3 * (s + j) + 37 + 5) % 1024;
          if (word[i][DESER-1-j] != v[BITS[i]]) ok = 0;
        end
        if (ok) s0 = s;
      end
      check(s0 >= 0, $sformatf("lane %0d no 8-aligned ramp window matches %h", i, word[i]));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
