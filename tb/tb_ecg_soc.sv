// tb_ecg_soc: end-to-end test of the ECG-on-Chip digital core at its
// default sizes (128 crystal clocks per 256 Hz sample, 512-word FIFO,
// 25-sample morphology, 512 training samples, 10 s heart-rate updates).
//
// Models around the core: the front end and the ADC's analog half (held
// input, comparator vin >= DAC code), fed with a synthetic ECG with
// baseline wander, a QRS spike every 200 samples (76.8 beats/min) and a
// T wave; and a host that answers the interrupt by draining the FIFO over
// SPI. Checks: the settling switch at startup, a gain write, every ECG word
// read against the sample the ADC model was given, R-peak flags once per
// beat after training, heart-rate words against the flags counted by the
// host and, after 70 s, against the 76.8 beats/min of the input, the QRS SPI frame, then, with the host asleep, the state sequence
// Ready, Critical, Full, the write lock, and soft reset. Every mechanism
// must occur at least once.
module tb_ecg_soc;
  import ecg_pkg::*;
  logic clk = 0, rst_n = 1;
  logic afe_rst, adc_sample, adc_comp, spi_miso, irq, qspi_miso;
  logic [2:0] pga_gain;
  logic [11:0] adc_dac_code;
  logic spi_sclk = 0, spi_cs_n = 0, spi_mosi = 0;
  logic qspi_sclk = 0, qspi_cs_n = 0;
  int checks = 0, failures = 0;

  ecg_soc dut (.*);
  always #31 clk = ~clk;          // crystal clock of 62 time units against an SPI bit of 2:
                                  // a 1 MHz host next to a 32.768 kHz crystal is 30.5 times faster

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 15) $display("FAIL: %s", what); end
  endtask

  function automatic int ecg(int t);
    int ph, v, d;
    ph = t % 200;
    v  = 1500 + ((t % 2000 < 1000) ? (t % 2000) * 3 / 10 : (2000 - t % 2000) * 3 / 10);
    d  = ph - 50;
    if (d >= -5 && d <= 5) v += 1000 - 200 * (d < 0 ? -d : d);
    d  = ph - 110;
    if (d >= -30 && d <= 30) v += 150 - 5 * (d < 0 ? -d : d);
    v += int'($urandom_range(0, 16)) - 8;
    return v;
  endfunction

  // ---- analog model of the ADC: S/H then comparator against the DAC ----
  int n_samp = 0;
  int hist [$];
  int vin = 0;
  int cyc = 0, last_sample = -1, bad_period = 0;
  always @(posedge clk) cyc++;
  always @(posedge clk) if (adc_sample) begin
    // 256 Hz: one sample every 128 crystal clocks
    if (last_sample >= 0 && cyc - last_sample != 128) bad_period++;
    last_sample = cyc;
    vin = ecg(n_samp);
    hist.push_back(vin);
    n_samp++;
  end
  assign adc_comp = (vin >= int'(adc_dac_code));

  // ---- host SPI ----
  task automatic spi_frame(input logic [15:0] cmd, output logic [15:0] rx);
    rx = '0;
    for (int i = 15; i >= 0; i--) begin
      spi_mosi = cmd[i];
      #1 spi_sclk = 1;
      #1 spi_sclk = 0;
      rx = {rx[14:0], spi_miso};
    end
  endtask

  // mechanism counters
  int m_ready = 0, m_critical = 0, m_full = 0, m_lock = 0, m_srst = 0, m_qrs = 0,
      m_hr = 0, m_hr60 = 0, m_empty_rd = 0, m_qspi = 0, m_afe = 0, m_gain = 0, m_irq = 0;
  int next_idx = 0, resync = 0, flags = 0, n_words = 0;
  int flag_idx [$];
  ccu_state_e prev_state = ST_EMPTY;

  always @(posedge clk) begin
    if (dut.state != prev_state) begin
      if (dut.state == ST_READY)    m_ready++;
      if (dut.state == ST_CRITICAL) m_critical++;
      if (dut.state == ST_FULL)     m_full++;
    end
    prev_state = dut.state;
    if (dut.adc_done && dut.u_ccu.wr_lock) m_lock++;
  end

  // process one word read from the FIFO
  task automatic take(input logic [15:0] w);
    n_words++;
    if (w[14:12] == TAG_ECG) begin
      if (resync) begin
        while (next_idx < hist.size() && hist[next_idx] != int'(w[11:0])) next_idx++;
        resync = 0;
      end
      check(next_idx < hist.size() && int'(w[11:0]) == hist[next_idx],
            $sformatf("word %0d: code %0d exp %0d", n_words, w[11:0], hist[next_idx]));
      if (w[15]) begin flags++; flag_idx.push_back(next_idx); end
      next_idx++;
    end else if (w[14:12] == TAG_HR) begin
      // rate = detections of the last 60 s (15360 samples) before the update
      automatic int e = 0;
      foreach (flag_idx[i]) if (flag_idx[i] >= next_idx - 15360) e++;
      m_hr++;
      if (next_idx > 17900) begin
        m_hr60++;
        check(w[11:0] == 12'd76 || w[11:0] == 12'd77, $sformatf("60 s rate %0d, expected 76.8", w[11:0]));
      end
      check(int'(w[11:0]) >= e - 1 && int'(w[11:0]) <= e + 1,
            $sformatf("heart rate %0d, host counted %0d", w[11:0], e));
    end else check(0, $sformatf("bad word %h", w));
  endtask

  task automatic drain();
    logic [15:0] w;
    int first = 1;
    forever begin
      spi_frame({CMD_RDFIFO, 12'h0}, w);
      if (w[15:13] == TAG_STATUS) begin
        if (!first) begin m_empty_rd++; break; end
      end else take(w);
      first = 0;
    end
  endtask

  initial begin
    #400000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [15:0] w;
    logic [47:0] qf;
    // edges, so that asynchronous clears act in a two-state simulation
    #1 begin rst_n = 0; spi_cs_n = 1; qspi_cs_n = 1; end
    #100 rst_n = 1;
    check(afe_rst, "front-end settling switches closed at startup");
    spi_cs_n = 0;
    spi_frame({CMD_WRCTRL, 12'h033}, w);     // gain 3, acquisition and QRS on
    spi_frame({CMD_NOP, 12'h0}, w);
    repeat (4) @(posedge clk);
    check(pga_gain == 3'd3, "gain written");
    m_gain += (pga_gain == 3'd3);
    wait (n_samp == 250);
    check(afe_rst, "settling during the first second");
    wait (n_samp == 260);
    check(!afe_rst, "settling switches open after 256 samples");
    m_afe++;
    // normal operation: the host wakes on the interrupt and drains
    while (n_samp < 18200) begin
      @(posedge clk);
      if (irq) begin m_irq++; drain(); spi_frame({CMD_SRST, 12'h0}, w); m_srst++; end
      if (n_samp == 3000 && !m_qspi) begin
        automatic logic [11:0] hr = dut.heart_rate, rr = dut.rr_interval;
        qspi_cs_n = 0;
        for (int i = 0; i < 48; i++) begin #1 qspi_sclk = 1; #1 qspi_sclk = 0; qf = {qf[46:0], qspi_miso}; end
        qspi_cs_n = 1;
        check(qf[47:32] == 16'(hr) && qf[31:16] == 16'(rr) && rr == 12'd200,
              $sformatf("QRS SPI frame %h (rr %0d)", qf, rr));
        m_qspi++;
      end
    end
    drain();
    check(flags == (next_idx - 560) / 200 + 1 || flags == (next_idx - 560) / 200,
          $sformatf("%0d R-peak flags in %0d samples", flags, next_idx));
    for (int i = 1; i < flag_idx.size(); i++)
      check(flag_idx[i] - flag_idx[i-1] == 200, $sformatf("beat spacing %0d", flag_idx[i] - flag_idx[i-1]));
    m_qrs = flags;
    // host asleep: the FIFO fills up
    wait (dut.state == ST_FULL);
    check(irq, "interrupt while full");
    repeat (30) @(posedge dut.adc_done);
    check(int'(dut.u_ccu.wr_used) == 512, "writes locked while full");
    resync = 1;
    drain();
    repeat (5) @(posedge clk);
    check(dut.state == ST_FULL, "Full holds until soft reset");
    spi_frame({CMD_SRST, 12'h0}, w); m_srst++;
    spi_frame({CMD_NOP, 12'h0}, w);
    repeat (6) @(posedge clk);
    check(dut.state == ST_EMPTY && !irq, "soft reset returns to Empty");
    spi_cs_n = 1;
    $display("mechanisms: ready %0d critical %0d full %0d lock %0d srst %0d qrs %0d hr %0d empty-read %0d qspi %0d afe %0d gain %0d irq %0d",
             m_ready, m_critical, m_full, m_lock, m_srst, m_qrs, m_hr, m_empty_rd, m_qspi, m_afe, m_gain, m_irq);
    check(bad_period == 0 && n_samp > 18000, $sformatf("%0d sample periods not 128 clocks", bad_period));
    check(m_ready > 0, "Ready state reached");
    check(m_critical > 0, "Critical state reached");
    check(m_full > 0, "Full state reached");
    check(m_lock > 0, "write lock dropped samples");
    check(m_srst > 0, "soft reset issued");
    check(m_qrs > 0, "R peaks detected");
    check(m_hr >= 7, "heart-rate words every 10 s");
    check(m_hr60 == 1, "rate over a full 60 s window");
    check(m_empty_rd > 0, "empty FIFO read");
    check(m_qspi > 0, "QRS SPI read");
    check(m_afe > 0 && m_gain > 0 && m_irq > 0, "AFE control and interrupts");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
