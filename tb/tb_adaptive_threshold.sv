// tb_adaptive_threshold: drives a train of peaks of varying height through
// the threshold detector and compares every output with a model: no
// detection during the 512 training samples, threshold = floor(5*max/16),
// one pulse at each upward crossing, and the maximum restarting from the
// crossing sample at each detection. Also checks that the detector follows
// a drop in peak height (threshold re-based on the new peak).
module tb_adaptive_threshold;
  localparam int DW = 11, TRAIN = 512;
  logic clk = 0, rst_n = 0, in_valid = 0;
  logic [DW-1:0] in_data = '0;
  logic qrs_pulse, trng_end_n;
  logic [DW-1:0] threshold;
  int checks = 0, failures = 0;

  adaptive_threshold #(.DW(DW), .TRAIN(TRAIN)) dut (.*);
  always #5 clk = ~clk;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL: %s", what); end
  endtask

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int m_max = 0, m_cnt = 0, m_above = 0, pulses = 0, exp_pulses = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 3000; t++) begin
      int v, thr, exp_p, amp, ph;
      amp = (t < 1500) ? 1200 : 500;                 // peaks shrink half way
      ph  = t % 150;
      v   = (ph < 20) ? amp - (amp / 12) * (ph > 10 ? ph - 10 : 10 - ph) : 20 + (t % 7);
      thr = (m_max * 5) / 16;
      check(int'(threshold) == thr, $sformatf("t=%0d threshold %0d exp %0d", t, threshold, thr));
      check(trng_end_n == (m_cnt < TRAIN), "training flag");
      exp_p = 0;
      if (m_cnt < TRAIN) begin
        m_cnt++;
        if (v > m_max) m_max = v;
        m_above = 0;
      end else begin
        if (v > thr && !m_above) begin exp_p = 1; m_max = v; end
        else if (v > m_max) m_max = v;
        m_above = (v > thr);
      end
      exp_pulses += exp_p;
      @(negedge clk) begin in_valid = 1; in_data = DW'(v); end
      @(negedge clk) in_valid = 0;
      check(qrs_pulse == exp_p, $sformatf("t=%0d pulse %0b exp %0d", t, qrs_pulse, exp_p));
      pulses += qrs_pulse;
      @(negedge clk);
      check(!qrs_pulse, "pulse lasts one clock");
    end
    // 20 peaks in 3000 samples, the first ~4 fall in training
    check(exp_pulses == 16 && pulses == 16, $sformatf("pulses %0d model %0d", pulses, exp_pulses));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
