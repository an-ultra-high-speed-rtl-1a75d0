// tb_adc_spi_cfg: the ADC configuration writer against the serial port
// model. After reset one write must put the ADC into the requested mode;
// each later change of `train_mode` (some while a write is still running,
// some held only briefly) must end with the model's register matching the
// last request, with only complete 24-bit frames, SPI mode 0 timing (data
// stable around each rising clock edge) and `busy` low only when the ADC
// agrees with the request.
module tb_adc_spi_cfg;
  logic clk = 0, rst = 1;
  always #5 clk = ~clk;
  logic train_mode = 1;
  logic spi_csn, spi_sclk, spi_mosi, busy;
  logic [15:0] writes;
  logic train;
  int frames, bad_frames;

  adc_spi_cfg #(.DIV(3)) dut (.*);
  adc_spi_model model (.spi_csn, .spi_sclk, .spi_mosi, .train, .frames, .bad_frames);

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL: %s", msg); end
  endtask

  // mode 0: data must not change on a rising clock edge, nor the clock move
  // while chip select is high
  logic mosi_q, sclk_q;
  always @(posedge clk) if (!rst) begin
    if (spi_sclk && !sclk_q) check(spi_mosi == mosi_q, "data stable at rising clock");
    if (spi_csn) check(!spi_sclk, "clock low while deselected");
    mosi_q <= spi_mosi; sclk_q <= spi_sclk;
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (3) @(posedge clk);
    rst <= 0;
    @(posedge clk);
    check(busy, "busy right after reset");
    wait (!busy);
    check(train && writes == 1 && frames == 1, "training pattern on after reset");
    for (int k = 0; k < 40; k++) begin
      @(negedge clk) train_mode = ~train_mode;
      repeat ($urandom_range(0, 250)) @(posedge clk);
      if (!busy) check(train == train_mode, $sformatf("step %0d: ADC mode follows", k));
    end
    @(negedge clk);
    wait (!busy);
    repeat (2) @(posedge clk);
    check(train == train_mode, "final mode");
    check(int'(writes) == frames && bad_frames == 0, $sformatf("%0d writes, %0d frames, %0d bad", writes, frames, bad_frames));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
