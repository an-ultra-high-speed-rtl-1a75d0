// adc_spi_model: the ADC's serial configuration port as seen by the
// testbenches. Bits are taken on each rising serial clock edge while chip
// select is low; when chip select rises after exactly 24 bits forming a
// write ('1', 7-bit address, 16-bit data) the addressed register is
// updated. `train` is high while register REG_ADDR holds VAL_TRAIN: the
// lane models then send the training pattern. Frames of another length
// are counted in `bad_frames`; `frames` counts good writes.
module adc_spi_model #(
  parameter logic [6:0]  REG_ADDR  = 7'h06,
  parameter logic [15:0] VAL_TRAIN = 16'h0001
) (
  input  logic       spi_csn,
  input  logic       spi_sclk,
  input  logic       spi_mosi,
  output logic       train,
  output int         frames,
  output int         bad_frames
);
  logic [15:0] regs [128];
  logic [23:0] sh;
  int nb;
  initial begin
    foreach (regs[i]) regs[i] = '0;
    train = 0; frames = 0; bad_frames = 0; nb = 0; sh = '0;
  end
  always @(posedge spi_sclk) if (!spi_csn) begin
    sh = {sh[22:0], spi_mosi};
    nb++;
  end
  always @(negedge spi_csn) nb = 0;
  always @(posedge spi_csn) begin
    if (nb == 24 && sh[23]) begin
      regs[sh[22:16]] = sh[15:0];
      frames++;
    end else if (nb != 0) bad_frames++;
    train = (regs[REG_ADDR] == VAL_TRAIN);
  end
endmodule
