// adc_spi_cfg: writes the ADC's test-pattern register over its serial
// configuration port, so that the ADC sends the training pattern while the
// lanes are being aligned and normal samples afterwards.
//
// The DPA sequence raises `train_mode` to ask for the training pattern and
// drops it when all lanes are aligned. This block keeps track of what it
// last wrote to the ADC; whenever that differs from `train_mode`, and once
// after reset in any case, it sends one register write: chip select low,
// 24 bits most significant first (a write flag '1', a 7-bit register
// address, 16 data bits), data changing while the serial clock is low and
// sampled by the ADC on its rising edge (SPI mode 0), chip select high
// again. The serial clock is clk / (2*DIV).
//
// Which register and which values select the ADC's test pattern depend on
// the ADC; REG_ADDR, VAL_TRAIN and VAL_NORMAL are example values to be set
// from its datasheet, as are the 24-bit frame format and the clock rate if
// the ADC differs. The paper says only that the ADC is configured to send a
// fixed training pattern at power-on (the "Configure ADC" step of its DPA
// flow chart) and is switched back to normal sampling after alignment.
//
// Timing: one write takes 48*DIV + 2*DIV + 1 cycles (101 at DIV = 2) from
// the change of `train_mode`. `busy` is high from the change until the write
// has finished; `writes` counts completed writes.
module adc_spi_cfg #(
  parameter int unsigned DIV        = 2,
  parameter logic [6:0]  REG_ADDR   = 7'h06,
  parameter logic [15:0] VAL_TRAIN  = 16'h0001,
  parameter logic [15:0] VAL_NORMAL = 16'h0000
) (
  input  logic        clk,
  input  logic        rst,
  input  logic        train_mode,
  output logic        spi_csn,
  output logic        spi_sclk,
  output logic        spi_mosi,
  output logic        busy,
  output logic [15:0] writes
);
  typedef enum logic [2:0] { I_IDLE, I_LOW, I_HIGH, I_END, I_GAP } state_e;
  state_e state;
  logic [23:0] sh;
  logic [4:0]  nbit;
  logic [$clog2(DIV+1)-1:0] cnt;
  logic tick, known, written, target;

  assign tick = (cnt == ($clog2(DIV+1))'(DIV - 1));
  assign busy = (state != I_IDLE) || !known || (written != train_mode);

  always_ff @(posedge clk) begin
    if (rst) begin
      state    <= I_IDLE;
      spi_csn  <= 1'b1;
      spi_sclk <= 1'b0;
      spi_mosi <= 1'b0;
      sh       <= '0;
      nbit     <= '0;
      cnt      <= '0;
      known    <= 1'b0;
      written  <= 1'b0;
      target   <= 1'b0;
      writes   <= '0;
    end else begin
      cnt <= (state == I_IDLE || tick) ? '0 : cnt + 1'b1;
      case (state)
        I_IDLE:
          if (!known || written != train_mode) begin
            sh       <= {1'b1, REG_ADDR, train_mode ? VAL_TRAIN : VAL_NORMAL};
            target   <= train_mode;
            spi_csn  <= 1'b0;
            spi_mosi <= 1'b1;              // first bit: the write flag
            nbit     <= 5'd23;
            state    <= I_LOW;
          end
        I_LOW:
          if (tick) begin
            spi_sclk <= 1'b1;
            state    <= I_HIGH;
          end
        I_HIGH:
          if (tick) begin
            spi_sclk <= 1'b0;
            if (nbit == '0) state <= I_END;
            else begin
              nbit     <= nbit - 1'b1;
              sh       <= sh << 1;
              spi_mosi <= sh[22];
              state    <= I_LOW;
            end
          end
        I_END:
          if (tick) begin
            spi_csn <= 1'b1;
            state   <= I_GAP;
          end
        I_GAP:
          if (tick) begin
            known   <= 1'b1;
            written <= target;
            writes  <= writes + 1'b1;
            state   <= I_IDLE;
          end
        default: state <= I_IDLE;
      endcase
    end
  end
endmodule
