// tb_rr_hr: beats at known intervals; checks each R-R interval, counter
// saturation, and the heart rate as the number of beats in the last NSEG
// bins, updated every SEG samples (reduced sizes: SEG = 50, NSEG = 6).
module tb_rr_hr;
  localparam int SEG = 50, NSEG = 6, RRW = 8, HRW = 12;
  logic clk = 0, rst_n = 0, tick = 0, qrs_pulse = 0;
  logic [RRW-1:0] rr_interval;
  logic rr_valid, hr_valid;
  logic [HRW-1:0] heart_rate;
  int checks = 0, failures = 0;

  rr_hr #(.SEG(SEG), .NSEG(NSEG), .RRW(RRW), .HRW(HRW)) dut (.*);
  always #5 clk = ~clk;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL: %s", what); end
  endtask

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int since = 0, last = -1, n_rr = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 2000; t++) begin
      int period, beat;
      period = (t < 700) ? 17 : (t < 1400) ? 11 : 400;   // last one saturates
      beat = (t % period == 5);
      @(negedge clk) tick = 1;
      @(negedge clk) tick = 0;
      since++;
      if (beat) begin
        @(negedge clk) qrs_pulse = 1;
        @(negedge clk) begin
          qrs_pulse = 0;
          check(rr_valid, "rr_valid");
          if (last >= 0) begin
            check(int'(rr_interval) == ((since > 255) ? 255 : since),
                  $sformatf("t=%0d rr %0d exp %0d", t, rr_interval, since));
            n_rr++;
          end
        end
        last = t; since = 0;
      end
    end
    repeat (4) @(negedge clk);
    check(n_rr > 100, "enough intervals");
    check(n_hr == 2000 / SEG, $sformatf("%0d heart-rate updates", n_hr));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // heart-rate model: count of beats among the last SEG*NSEG ticks, checked
  // at every update
  int tick_no = 0, n_hr = 0;
  int beat_ticks [$];
  always @(posedge clk) begin
    if (rst_n) begin
      if (qrs_pulse) beat_ticks.push_back(tick_no);
      if (tick) tick_no++;
    end
  end
  always @(negedge clk) begin
    if (hr_valid) begin
      automatic int e = 0;
      n_hr++;
      foreach (beat_ticks[i]) if (beat_ticks[i] >= tick_no - SEG * NSEG && beat_ticks[i] < tick_no) e++;
      check(int'(heart_rate) == e, $sformatf("hr %0d exp %0d at tick %0d", heart_rate, e, tick_no));
      check(tick_no % SEG == 0, "update every SEG samples");
    end
  end
endmodule
