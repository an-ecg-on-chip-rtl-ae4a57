// adaptive_threshold: R-peak detector with an adaptive threshold.
//
// A training counter runs over the first TRAIN samples (0..511, i.e. 2 s at
// 256 Hz) while a "find maximum" register tracks the largest input seen.
// The threshold is the maximum times 0.3125, formed as (max*5)/16. Once
// training has ended (trng_end_n low), every sample is compared with the
// threshold and the clock at which the input first rises above it produces
// a one-clock QRS detect pulse. A detection resets the current maximum to
// the present sample, so the maximum, and with it the threshold, then
// follows the newly detected peak. The training count, the 0.3125 factor,
// the maximum tracker and the reset of the maximum on detection follow the
// chip's threshold-detector figure; detecting on the rising crossing (one
// pulse per excursion above the threshold) is this design's choice.
//
// Timing: qrs_pulse is registered, one clock after the in_valid that
// carried the crossing sample.
module adaptive_threshold #(
  parameter int unsigned DW    = 11,
  parameter int unsigned TRAIN = 512     // training samples (counter 0..TRAIN-1)
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          in_valid,
  input  logic [DW-1:0] in_data,
  output logic          qrs_pulse,
  output logic          trng_end_n,     // low once training is over
  output logic [DW-1:0] threshold
);

  localparam int unsigned TW = $clog2(TRAIN + 1);

  logic [TW-1:0] trng_cnt;
  logic [DW-1:0] cur_max;
  logic          above_q;
  logic [DW+2:0] max_x5;
  logic          above;

  assign max_x5    = {3'b000, cur_max} + {1'b0, cur_max, 2'b00};
  assign threshold = {1'b0, max_x5[DW+2:4]};
  assign above     = in_data > threshold;
  assign trng_end_n = (trng_cnt != TW'(TRAIN));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      trng_cnt  <= '0;
      cur_max   <= '0;
      above_q   <= 1'b0;
      qrs_pulse <= 1'b0;
    end else begin
      qrs_pulse <= 1'b0;
      if (in_valid) begin
        if (trng_end_n) begin
          trng_cnt <= trng_cnt + 1'b1;
          if (in_data > cur_max) cur_max <= in_data;
          above_q <= 1'b0;
        end else begin
          above_q <= above;
          if (above && !above_q) begin
            qrs_pulse <= 1'b1;
            cur_max   <= in_data;       // reset current max to the new peak
          end else if (in_data > cur_max) begin
            cur_max   <= in_data;
          end
        end
      end
    end
  end

endmodule
