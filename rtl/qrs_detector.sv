// qrs_detector: multiscale-morphology QRS detector with heart-rate output.
//
// Chain, one step per ADC sample (in_valid): the morphological filter
// removes baseline wander and noise; the absolute value and a moving
// average enhance the QRS complex; an adaptive threshold detector marks
// each R peak with a one-clock qrs_pulse; the R-R interval and the heart
// rate (peaks in the last 60 s, updated every 10 s) are measured from those
// pulses. A dedicated SPI port reads out the heart rate, the R-R interval
// and the filtered ECG. The order of these stages follows the chip's QRS
// detector block diagram. The filter works on 11-bit samples, the width the
// chip gives for its comparator tree; this design takes the 11 most
// significant bits of the 12-bit ADC code.
//
// Timing: the detector runs at the system clock but advances only on
// in_valid (256 Hz in the chip). A pulse appears a fixed 24 + ~L/2 samples
// after the R peak enters (window centring plus moving-average lag), plus
// 5 clocks.
module qrs_detector #(
  parameter int unsigned ADC_W = 12,
  parameter int unsigned DW    = 11,     // samples inside the filter
  parameter int unsigned N     = 25,     // morphological window
  parameter int unsigned L     = 8,      // moving-average length
  parameter int unsigned TRAIN = 512,    // threshold training samples
  parameter int unsigned SEG   = 2560,   // samples per heart-rate update
  parameter int unsigned NSEG  = 6,      // bins in the heart-rate window
  parameter int unsigned RRW   = 12,
  parameter int unsigned HRW   = 12
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             in_valid,
  input  logic [ADC_W-1:0] adc_code,
  output logic             qrs_pulse,
  output logic [RRW-1:0]   rr_interval,
  output logic             rr_valid,
  output logic [HRW-1:0]   heart_rate,
  output logic             hr_valid,
  output logic signed [DW:0] ecg_filt,
  output logic             trng_end_n,
  // dedicated SPI read-out
  input  logic             qspi_sclk,
  input  logic             qspi_cs_n,
  output logic             qspi_miso
);

  logic             mf_valid;
  logic             ma_valid;
  logic [DW-1:0]    ma_data;
  logic [DW-1:0]    threshold;

  morph_filter #(.DW(DW), .N(N)) u_mf (
    .clk, .rst_n, .in_valid, .in_data(adc_code[ADC_W-1 -: DW]),
    .out_valid(mf_valid), .out_data(ecg_filt));

  abs_mavg #(.DW(DW + 1), .L(L)) u_ma (
    .clk, .rst_n, .in_valid(mf_valid), .in_data(ecg_filt),
    .out_valid(ma_valid), .out_data(ma_data));

  adaptive_threshold #(.DW(DW), .TRAIN(TRAIN)) u_th (
    .clk, .rst_n, .in_valid(ma_valid), .in_data(ma_data),
    .qrs_pulse, .trng_end_n, .threshold);

  rr_hr #(.SEG(SEG), .NSEG(NSEG), .RRW(RRW), .HRW(HRW)) u_rr (
    .clk, .rst_n, .tick(in_valid), .qrs_pulse,
    .rr_interval, .rr_valid, .heart_rate, .hr_valid);

  qrs_spi #(.HRW(HRW), .RRW(RRW), .EW(DW + 1)) u_spi (
    .rst_n, .sclk(qspi_sclk), .cs_n(qspi_cs_n), .miso(qspi_miso),
    .heart_rate, .rr_interval, .ecg_filt);

endmodule
