// tb_qrs_range: drives the QRS detector, at its default sizes, over the
// whole range of human heart rates. The synthetic ECG steps through
// 60, 30, 250, 180, 120 and 60 beats/min (R-R of 256, 512, 61, 85, 128 and
// 256 samples at 256 Hz). On top of each beat (a Q dip, an R spike, an S
// dip and a T wave) sit the noises a body-worn sensor sees: 50 Hz mains hum
// of 40 codes, a two-tone baseline wander of 600 codes (breathing and
// slow electrode drift), broadband muscle noise of +-30 codes, a motion
// artifact (the baseline jumps by 350 codes for 4000 samples, as when an
// electrode shifts) and beat amplitudes that vary by up to 20 %.
// Checks: each beat after training gives exactly one detection within a
// fixed delay of its R peak and no detection falls between beats; every
// R-R output equals the spacing of the two beats it spans, to within two
// samples; every heart-rate update equals the detections of the last 60 s.
module tb_qrs_range;
  logic clk = 0, rst_n = 1, in_valid = 0;
  logic [11:0] adc_code = '0;
  logic qrs_pulse, rr_valid, hr_valid, trng_end_n;
  logic [11:0] rr_interval, heart_rate;
  logic signed [11:0] ecg_filt;
  logic qspi_sclk = 0, qspi_cs_n = 0, qspi_miso;
  int checks = 0, failures = 0;

  qrs_detector dut (.*);
  always #5 clk = ~clk;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL: %s", what); end
  endtask

  initial begin
    repeat (3000000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // beat schedule: R-R period in samples and number of beats per rhythm
  localparam int NR = 6;
  localparam int PER  [NR] = '{256, 512, 61, 85, 128, 256};
  localparam int BEATS[NR] = '{12, 10, 60, 40, 40, 10};
  localparam real PI = 3.14159265358979;

  int   r_at [$];      // sample index of each R peak
  int   t_end;
  real  amp [$];       // relative amplitude of each beat

  function automatic real wave(int t);
    real v = 2000.0;
    v += 400.0 * $sin(2.0 * PI * 0.3 * t / 256.0);    // breathing
    v += 200.0 * $sin(2.0 * PI * 0.05 * t / 256.0);   // electrode drift
    v += 40.0 * $sin(2.0 * PI * 50.0 * t / 256.0);    // mains hum
    v += real'(int'($urandom_range(0, 60)) - 30);      // muscle noise, +-30 codes
    if (t >= 9000 && t < 13000) v += 350.0;           // electrode moved: baseline step
    foreach (r_at[i]) begin
      automatic int d = t - r_at[i];
      automatic int p = (i + 1 < r_at.size()) ? r_at[i+1] - r_at[i] : 256;
      automatic int tw = (p >= 200) ? 30 : p / 8;      // T half-width
      automatic int td = d - p * 2 / 5;                // T centre
      if (d >= -8 && d <= -5) v -= amp[i] * 100.0;            // Q
      if (d >= -4 && d <= 4)  v += amp[i] * (1000.0 - 200.0 * (d < 0 ? -d : d));  // R
      if (d >= 5 && d <= 8)   v -= amp[i] * 150.0;            // S
      if (td >= -tw && td <= tw) v += amp[i] * 150.0 * (1.0 - real'(td < 0 ? -td : td) / tw);
    end
    return v;
  endfunction

  int tick_no = 0;
  int pulse_ticks [$];
  int rr_seen [$];
  int n_hr = 0;
  always @(negedge clk) if (rr_valid) rr_seen.push_back(int'(rr_interval));
  always @(posedge clk) if (rst_n) begin
    if (qrs_pulse) pulse_ticks.push_back(tick_no);
    if (in_valid) tick_no++;
  end
  always @(negedge clk) if (hr_valid) begin
    automatic int e = 0;
    n_hr++;
    foreach (pulse_ticks[i]) if (pulse_ticks[i] >= tick_no - 15360 && pulse_ticks[i] < tick_no) e++;
    check(int'(heart_rate) == e, $sformatf("hr %0d, %0d detections in 60 s", heart_rate, e));
  end

  initial begin
    automatic int t = 100, lat0 = -1, matched = 0;
    for (int s = 0; s < NR; s++)
      for (int b = 0; b < BEATS[s]; b++) begin
        r_at.push_back(t);
        amp.push_back(0.8 + 0.4 * real'($urandom_range(0, 100)) / 100.0);
        t += PER[s];
      end
    t_end = t + 100;

    #1 begin rst_n = 0; qspi_cs_n = 1; end
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int k = 0; k < t_end; k++) begin
      @(negedge clk) begin in_valid = 1; adc_code = 12'(int'(wave(k))); end
      @(negedge clk) in_valid = 0;
      repeat (2) @(negedge clk);
    end
    repeat (5) @(negedge clk);

    // match detections to beats: the delay from R peak to detection must be
    // the same for every beat, give or take two samples
    foreach (pulse_ticks[j]) begin
      automatic int best = -1;
      foreach (r_at[i]) if (r_at[i] <= pulse_ticks[j]) best = i;
      if (best < 0) begin check(0, $sformatf("detection at %0d before any beat", pulse_ticks[j])); continue; end
      if (lat0 < 0) lat0 = pulse_ticks[j] - r_at[best];
      check(pulse_ticks[j] - r_at[best] >= lat0 - 2 && pulse_ticks[j] - r_at[best] <= lat0 + 2,
            $sformatf("detection at %0d is %0d after beat %0d", pulse_ticks[j], pulse_ticks[j] - r_at[best], best));
      if (j > 0) begin
        automatic int gap = pulse_ticks[j] - pulse_ticks[j-1];
        automatic int want = r_at[best] - ((best > 0) ? r_at[best-1] : 0);
        check(gap >= want - 2 && gap <= want + 2, $sformatf("spacing %0d, beats %0d apart", gap, want));
      end
    end
    check(lat0 > 0 && lat0 < 50, $sformatf("detection delay %0d samples", lat0));
    // every beat whose detection falls after training is found once
    foreach (r_at[i]) if (r_at[i] + lat0 > 512 + 2 && r_at[i] + lat0 + 2 < t_end) matched++;
    check(pulse_ticks.size() == matched, $sformatf("%0d detections for %0d beats", pulse_ticks.size(), matched));
    // R-R outputs after the first detection follow the detection spacing
    check(rr_seen.size() == pulse_ticks.size(), $sformatf("%0d R-R outputs", rr_seen.size()));
    for (int j = 1; j < pulse_ticks.size() && j < rr_seen.size(); j++)
      check(rr_seen[j] == pulse_ticks[j] - pulse_ticks[j-1],
            $sformatf("rr %0d, detections %0d apart", rr_seen[j], pulse_ticks[j] - pulse_ticks[j-1]));
    check(n_hr == t_end / 2560, $sformatf("%0d rate updates", n_hr));
    $display("detections %0d, delay %0d samples, rate updates %0d", pulse_ticks.size(), lat0, n_hr);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
