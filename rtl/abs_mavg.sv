// abs_mavg: QRS enhancement, absolute value followed by a moving average.
//
// The filtered ECG (signed) is rectified and smoothed by a moving average
// over L samples to suppress impulse noise. The average uses the serial
// structure of a running sum: each new sample is added and the one leaving
// the L-sample window is subtracted, then the sum is divided by L (a shift,
// L must be a power of two). Absolute value plus moving average follow the
// chip description; L = 8 is this design's choice (the length is not
// published). The magnitude of the most negative input saturates to the
// largest positive value.
//
// Timing: out_valid pulses 1 clock after in_valid.
module abs_mavg #(
  parameter int unsigned DW = 12,   // signed input width
  parameter int unsigned L  = 8     // window length, power of two
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 in_valid,
  input  logic signed [DW-1:0] in_data,
  output logic                 out_valid,
  output logic [DW-2:0]        out_data
);

  localparam int unsigned LW = $clog2(L);

  logic [DW-2:0]      mag;
  logic [DW-2:0]      win [L];
  logic [DW-2+LW:0]   acc;
  logic [DW-2+LW:0]   acc_next;

  logic signed [DW-1:0] neg;
  assign neg = -in_data;

  always_comb begin
    if (in_data == {1'b1, {(DW-1){1'b0}}}) mag = '1;
    else if (in_data < 0)                  mag = neg[DW-2:0];
    else                                   mag = in_data[DW-2:0];
  end

  assign acc_next = acc + (DW-1+LW)'(mag) - (DW-1+LW)'(win[L-1]);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < L; i++) win[i] <= '0;
      acc       <= '0;
      out_valid <= 1'b0;
    end else begin
      out_valid <= in_valid;
      if (in_valid) begin
        win[0] <= mag;
        for (int i = 1; i < L; i++) win[i] <= win[i-1];
        acc <= acc_next;
      end
    end
  end

  assign out_data = acc[DW-2+LW:LW];

endmodule
