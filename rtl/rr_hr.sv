// rr_hr: R-R interval and heart-rate measurement.
//
// A binary counter counts sample strobes between two QRS detect pulses;
// at each pulse its value is latched as the R-R interval (in samples, i.e.
// units of 1/256 s) and the counter restarts. The counter saturates at its
// maximum. The heart rate is the number of R peaks in the last 60 s. The
// chip description gives both "updated once every 10 s" and "counting the
// number of R peaks in the last 60 s"; this block does both by keeping six
// 10-second bin_q: every SEG samples the beats of the bin just finished are
// pushed into the history and the rate is recomputed as the sum of the last
// NSEG bin_q (a 60 s window sliding in 10 s steps). Until NSEG bin_q have been
// filled the rate covers only the time elapsed. The bin structure is this
// design's choice.
//
// Timing: rr_valid and hr_valid are one-clock pulses, registered one clock
// after the qrs_pulse / the SEG-th sample strobe.
module rr_hr #(
  parameter int unsigned SEG  = 2560,   // samples per update (10 s at 256 Hz)
  parameter int unsigned NSEG = 6,      // bin_q in the 60 s window
  parameter int unsigned RRW  = 12,     // R-R interval width
  parameter int unsigned HRW  = 12      // heart-rate width
) (
  input  logic           clk,
  input  logic           rst_n,
  input  logic           tick,          // one pulse per sample
  input  logic           qrs_pulse,
  output logic [RRW-1:0] rr_interval,
  output logic           rr_valid,
  output logic [HRW-1:0] heart_rate,
  output logic           hr_valid
);

  localparam int unsigned SW = $clog2(SEG);
  localparam int unsigned BW = 8;

  logic [RRW-1:0] rr_cnt;
  logic [SW-1:0]  seg_cnt;
  logic [BW-1:0]  beats;
  logic [BW-1:0]  bin_q [NSEG-1];   // finished bin_q, newest first
  logic [BW-1:0]  beats_now;
  logic [HRW-1:0] sum;

  // Beats in the current bin, including a pulse arriving this clock.
  assign beats_now = (qrs_pulse && beats != '1) ? beats + 1'b1 : beats;

  always_comb begin
    sum = HRW'(beats_now);
    for (int i = 0; i < NSEG - 1; i++) sum += HRW'(bin_q[i]);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rr_cnt      <= '0;
      rr_interval <= '0;
      rr_valid    <= 1'b0;
      seg_cnt     <= '0;
      beats       <= '0;
      for (int i = 0; i < NSEG - 1; i++) bin_q[i] <= '0;
      heart_rate  <= '0;
      hr_valid    <= 1'b0;
    end else begin
      rr_valid <= 1'b0;
      hr_valid <= 1'b0;
      // R-R interval counter
      if (qrs_pulse) begin
        rr_interval <= rr_cnt;
        rr_valid    <= 1'b1;
        rr_cnt      <= RRW'(tick);
      end else if (tick && rr_cnt != '1) begin
        rr_cnt <= rr_cnt + 1'b1;
      end
      // 10 s bin_q, 60 s sliding window
      if (tick && seg_cnt == SW'(SEG - 1)) begin
        seg_cnt    <= '0;
        bin_q[0]    <= beats_now;
        for (int i = 1; i < NSEG - 1; i++) bin_q[i] <= bin_q[i-1];
        beats      <= '0;
        heart_rate <= sum;
        hr_valid   <= 1'b1;
      end else begin
        if (tick) seg_cnt <= seg_cnt + 1'b1;
        beats <= beats_now;
      end
    end
  end

endmodule
