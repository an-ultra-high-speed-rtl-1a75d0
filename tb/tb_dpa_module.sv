// tb_dpa_module: all 40 lanes of the ADC link. Each lane is a lane_model
// with its own skew (0..9 taps); the model's training mode follows the
// module's adc_train_mode output, but only after a 150-cycle configuration
// write during which `cfg_busy` is high (no tap may be loaded then). Checks: training mode is on from reset
// until alignment completes; no lane errors; after alignment, the ten
// lanes of each channel rebuild ramp samples that advance by 3 per sample
// with the right per-channel offset (37 per core), which only holds if
// every lane's bit timing and word boundary are right. Then a restart
// must raise training mode again and realign.
module tb_dpa_module;
  import digitizer_pkg::*;
  logic clk = 0, rst = 1, restart = 0;
  always #5 clk = ~clk;

  logic [N_LANES-1:0][DESER-1:0] raw, word;
  logic [N_LANES-1:0][TAP_W-1:0] tap;
  logic [N_LANES-1:0] tap_ld, lane_error;
  logic adc_train_mode, dpa_done, dpa_error;

  // ADC configuration port: a change of adc_train_mode takes a 150-cycle
  // register write, and the ADC switches its output only when it ends
  logic adc_train = 0, cfg_busy;
  int busy_left = 0, loads_in_cfg = 0;
  assign cfg_busy = (adc_train != adc_train_mode) || busy_left != 0;
  always @(posedge clk) if (!rst) begin
    if (busy_left == 0 && adc_train != adc_train_mode) busy_left <= 150;
    else if (busy_left > 1) busy_left <= busy_left - 1;
    else if (busy_left == 1) begin busy_left <= 0; adc_train <= adc_train_mode; end
    if (cfg_busy && |tap_ld) loads_in_cfg++;
  end

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL: %s", msg); end
  endtask

  for (genvar i = 0; i < N_LANES; i++) begin : g_lane
    lane_model #(.W(DESER), .TW(TAP_W), .CH(i / ADC_BITS), .BIT(i % ADC_BITS),
                 .P0((i * 7) % 10), .TPB(10))
      m (.clk, .rst, .train(adc_train), .tap(tap[i]), .tap_ld(tap_ld[i]), .q(raw[i]));
  end

  dpa_module dut (.*);

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check_data();
    logic [ADC_BITS-1:0] smp [N_CH][DESER];
    wait (!cfg_busy);                      // ADC back to normal samples
    repeat (8) @(posedge clk);
    repeat (10) begin
      @(posedge clk); #1;
      for (int c = 0; c < N_CH; c++)
        for (int j = 0; j < DESER; j++)
          for (int b = 0; b < ADC_BITS; b++)
            smp[c][j][b] = word[c*ADC_BITS + b][DESER-1-j];
      for (int c = 0; c < N_CH; c++) begin
        for (int j = 1; j < DESER; j++)
          check(smp[c][j] == ADC_BITS'(smp[c][j-1] + 3),
                $sformatf("ch %0d sample %0d %0d after %0d", c, j, smp[c][j], smp[c][j-1]));
        check(smp[c][0] == ADC_BITS'(smp[0][0] + 37 * c), $sformatf("ch %0d offset", c));
      end
    end
  endtask

  initial begin
    repeat (3) @(posedge clk);
    rst <= 0;
    @(posedge clk); #1;
    check(adc_train_mode && !dpa_done, "training mode after reset");
    wait (dpa_done);
    #1;
    check(!adc_train_mode, "training mode off when done");
    check(!dpa_error && lane_error == '0, "no lane error");
    check_data();
    @(negedge clk) restart = 1;
    @(negedge clk) restart = 0;
    @(posedge clk); #1;
    check(adc_train_mode && !dpa_done, "restart raises training mode");
    wait (dpa_done);
    check(!dpa_error, "no error after restart");
    check_data();
    check(loads_in_cfg == 0, "no IODELAY load during ADC configuration");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
