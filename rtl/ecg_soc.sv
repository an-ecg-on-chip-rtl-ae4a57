// ecg_soc: digital core of the ECG-on-Chip.
//
// The analog parts (front-end amplifier with PGA, the ADC's S/H, comparator
// and capacitive DAC, the crystal oscillator) sit outside this module; their
// control and data signals are its ports. Inside: the SAR logic of the
// 12-bit ADC, the central control unit with its 512 x 16 asynchronous FIFO
// and state machine, the duplex SPI slave to the host, and the QRS detector
// with its own read-only SPI port. Data path: every 1/256 s the CCU starts
// a conversion; the code goes to the FIFO and to the QRS detector; the
// detector's R-peak pulses and heart rate go back to the CCU, which frames
// them into the FIFO; the host drains the FIFO over SPI when interrupted.
//
// Clocks: clk is the crystal clock (DIV clocks per sample; 128 for a
// 32.768 kHz crystal); spi_sclk clocks the host side of the CCU and FIFO;
// qspi_sclk clocks the QRS read-out. rst_n is asynchronous.
module ecg_soc
  import ecg_pkg::*;
#(
  parameter int unsigned DIV   = 128,
  parameter int unsigned DEPTH = 512,
  parameter int unsigned N     = 25,
  parameter int unsigned TRAIN = 512,
  parameter int unsigned SEG   = 2560,
  parameter int unsigned AFE_RST_TICKS = 256
) (
  input  logic             clk,
  input  logic             rst_n,
  // front-end amplifier
  output logic             afe_rst,
  output logic [2:0]       pga_gain,
  // SAR ADC analog part
  output logic             adc_sample,
  output logic [ADC_W-1:0] adc_dac_code,
  input  logic             adc_comp,
  // host SPI (CCU)
  input  logic             spi_sclk,
  input  logic             spi_cs_n,
  input  logic             spi_mosi,
  output logic             spi_miso,
  output logic             irq,
  // QRS SPI
  input  logic             qspi_sclk,
  input  logic             qspi_cs_n,
  output logic             qspi_miso
);

  logic             adc_start, adc_busy, adc_done;
  logic [ADC_W-1:0] adc_code;
  logic             qrs_valid;
  logic             qrs_pulse, rr_valid, hr_valid, trng_end_n;
  logic [11:0]      rr_interval, heart_rate;
  logic signed [QRS_W:0] ecg_filt;
  logic             cmd_stb;
  logic [WORD_W-1:0] cmd_word, tx_word;
  ccu_state_e       state;

  sar_logic #(.ADC_W(ADC_W)) u_sar (
    .clk, .rst_n, .start(adc_start), .comp(adc_comp), .sample(adc_sample),
    .dac_code(adc_dac_code), .busy(adc_busy), .done(adc_done), .code(adc_code));

  ccu #(.DIV(DIV), .DEPTH(DEPTH), .AFE_RST_TICKS(AFE_RST_TICKS)) u_ccu (
    .clk, .rst_n, .afe_rst, .pga_gain,
    .adc_start, .adc_done, .adc_code,
    .qrs_valid, .qrs_pulse, .hr_valid, .heart_rate,
    .irq, .state,
    .sclk(spi_sclk), .cmd_stb, .cmd_word, .tx_word);

  spi_slave #(.W(WORD_W)) u_spi (
    .rst_n, .sclk(spi_sclk), .cs_n(spi_cs_n), .mosi(spi_mosi), .miso(spi_miso),
    .cmd_stb, .cmd_word, .tx_word);

  qrs_detector #(.ADC_W(ADC_W), .DW(QRS_W), .N(N), .TRAIN(TRAIN), .SEG(SEG)) u_qrs (
    .clk, .rst_n, .in_valid(qrs_valid), .adc_code(adc_code),
    .qrs_pulse, .rr_interval, .rr_valid, .heart_rate, .hr_valid,
    .ecg_filt, .trng_end_n,
    .qspi_sclk, .qspi_cs_n, .qspi_miso);

endmodule
