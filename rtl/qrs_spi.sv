// qrs_spi: dedicated read-only SPI port of the QRS detector.
//
// A parallel-to-serial converter: on the first SPI clock of a transfer
// (cs_n low) it captures a 48-bit frame and then shifts it out MSB first,
// one bit per rising edge of sclk. The frame is three 16-bit words:
//   [47:32] heart rate (R peaks in the last 60 s), zero-extended
//   [31:16] latest R-R interval in samples (1/256 s), zero-extended
//   [15:0]  latest filtered ECG sample, sign-extended
// The master may stop after any number of bits by raising cs_n. That the
// QRS block has its own SPI port carrying the R-R interval, the heart rate
// and the filtered ECG follows the chip description; the frame layout and
// the timing are this design's choice.
//
// Timing: MISO changes after a rising edge of sclk and is stable for the
// master to sample at the following falling edge (SPI mode 1). The frame is
// captured from registers of the system clock domain that change once per
// sample (every few hundred system clocks); a capture that coincides with
// such a change can mix old and new fields of that one frame.
module qrs_spi #(
  parameter int unsigned HRW = 12,
  parameter int unsigned RRW = 12,
  parameter int unsigned EW  = 12
) (
  input  logic                  rst_n,
  input  logic                  sclk,
  input  logic                  cs_n,
  output logic                  miso,
  input  logic [HRW-1:0]        heart_rate,
  input  logic [RRW-1:0]        rr_interval,
  input  logic signed [EW-1:0]  ecg_filt
);

  localparam int unsigned FW = 48;

  logic [FW-1:0] frame;
  logic [FW-1:0] sh;
  logic          loaded;
  logic          clr;

  // Deselect, or chip reset, clears the converter.
  assign clr = cs_n || !rst_n;

  assign frame = {16'(heart_rate), 16'(rr_interval), 16'(ecg_filt)};

  always_ff @(posedge sclk or posedge clr) begin
    if (clr) begin
      sh     <= '0;
      loaded <= 1'b0;
    end else if (!loaded) begin
      sh     <= frame;
      loaded <= 1'b1;
    end else begin
      sh     <= {sh[FW-2:0], 1'b0};
    end
  end

  assign miso = sh[FW-1];

endmodule
