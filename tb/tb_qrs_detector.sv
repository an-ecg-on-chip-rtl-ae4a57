// tb_qrs_detector: runs a synthetic ECG through the whole QRS detector at
// its default sizes (25-sample window, 512 training samples, 10 s updates,
// 60 s window). The ECG has a baseline that wanders by 300 codes, a QRS
// spike of 10 samples, a broad T wave and small noise; beats come every
// 200 samples (76.8 beats/min) for 12000 samples, then every 150 samples
// (102.4 beats/min). Checks: exactly one detection per beat after training,
// the R-R interval equal to the beat period, every heart-rate update equal
// to the detections of the last 60 s and, for the window inside the first
// rhythm, to the rate implied by the period; the filtered ECG read out over
// the detector's SPI port.
module tb_qrs_detector;
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

  function automatic int ecg(int t);
    int p, ph, v, d;
    p  = (t < 12000) ? 200 : 150;
    ph = (t < 12000) ? t % 200 : (t - 12000) % 150;
    v  = 1500 + ((t % 2000 < 1000) ? (t % 2000) * 3 / 10 : (2000 - t % 2000) * 3 / 10);
    d  = ph - 50;
    if (d >= -5 && d <= 5) v += 1000 - 200 * (d < 0 ? -d : d);       // QRS
    d  = ph - 110;
    if (p == 200 && d >= -30 && d <= 30) v += 150 - 5 * (d < 0 ? -d : d);   // T wave
    v += int'($urandom_range(0, 16)) - 8;
    return v;
  endfunction

  initial begin
    repeat (2000000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int tick_no = 0;
  int pulse_ticks [$];
  int n_hr = 0, n_full = 0, last_rr = 0;
  always @(negedge clk) if (rr_valid) last_rr = rr_interval;
  always @(posedge clk) if (rst_n) begin
    if (qrs_pulse) pulse_ticks.push_back(tick_no);
    if (in_valid) tick_no++;
  end
  always @(negedge clk) if (hr_valid) begin
    automatic int e = 0;
    n_hr++;
    foreach (pulse_ticks[i]) if (pulse_ticks[i] >= tick_no - 15360 && pulse_ticks[i] < tick_no) e++;
    check(int'(heart_rate) == e, $sformatf("hr %0d, %0d detections in 60 s", heart_rate, e));
    check(tick_no % 2560 == 0, "update every 10 s");
    if (tick_no == 12800) begin   // window [-2560, 12800) ~ first rhythm; 12800 ticks minus training
      n_full++;
      check(heart_rate >= 60 && heart_rate <= 62, $sformatf("rate %0d in first rhythm", heart_rate));
    end
  end

  initial begin
    int beats_after = 0;
    logic [47:0] frame;
    // edges, so that the asynchronous clears act in a two-state simulation
    #1 begin rst_n = 0; qspi_cs_n = 1; end
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 20480; t++) begin
      @(negedge clk) begin in_valid = 1; adc_code = 12'(ecg(t)); end
      @(negedge clk) in_valid = 0;
      repeat (2) @(negedge clk);
      if (t == 12000 - 10) check(last_rr == 200, $sformatf("rr %0d exp 200", last_rr));
      if (t == 20000)      check(last_rr == 150, $sformatf("rr %0d exp 150", last_rr));
      if (t == 600) begin
        // read the detector's SPI frame; the ECG field must match ecg_filt
        automatic logic signed [11:0] f = ecg_filt;
        qspi_cs_n = 0;
        for (int i = 0; i < 48; i++) begin
          #3 qspi_sclk = 1; #3 qspi_sclk = 0; frame = {frame[46:0], qspi_miso};
        end
        qspi_cs_n = 1;
        check(frame[15:0] == 16'(f) && frame[47:32] == 16'(heart_rate) && frame[31:16] == 16'(rr_interval),
              $sformatf("spi frame %h", frame));
      end
    end
    repeat (5) @(negedge clk);
    // beats whose spike is past the end of training: 512 + 24 + ~5 samples
    for (int t = 0; t < 20480; t++) begin
      automatic int ph = (t < 12000) ? t % 200 : (t - 12000) % 150;
      if (ph == 50 && t > 560 && t + 27 < 20480) beats_after++;
    end
    check(pulse_ticks.size() == beats_after, $sformatf("%0d detections for %0d beats", pulse_ticks.size(), beats_after));
    for (int i = 1; i < pulse_ticks.size(); i++) begin
      automatic int d = pulse_ticks[i] - pulse_ticks[i-1];
      check(d >= 148 && d <= 202 && (d <= 152 || d >= 198), $sformatf("spacing %0d", d));
    end
    check(n_hr == 8, $sformatf("%0d rate updates", n_hr));
    check(n_full == 1, "rate checked once in steady rhythm");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
