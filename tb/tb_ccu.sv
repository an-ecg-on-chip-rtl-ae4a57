// tb_ccu: the central control unit with a model ADC (each start answered
// by a done with the next code of a counter) and the SPI side driven at
// word level (cmd_stb/cmd_word on the SPI clock, tx_word read back). Sizes:
// DIV = 16 clocks per sample, 8 startup samples, 512-word FIFO.
// Checks: sample-strobe period, startup settling switch, control register
// write (gain, acquisition enable), framing of ECG words with the R-peak
// flag and of heart-rate words, status word, reads of an empty FIFO, the
// state sequence Empty, Ready, Critical, Full with interrupt and write
// lock, and soft reset.
module tb_ccu;
  import ecg_pkg::*;
  localparam int DIV = 16, DEPTH = 512, AFE = 8;
  logic clk = 0, rst_n = 1, sclk = 0;
  logic afe_rst, adc_start, adc_done = 0, qrs_valid, qrs_pulse = 0, hr_valid = 0;
  logic [2:0] pga_gain;
  logic [11:0] adc_code = '0, heart_rate = '0;
  logic irq, cmd_stb = 0;
  ccu_state_e state;
  logic [15:0] cmd_word = '0, tx_word;
  int checks = 0, failures = 0;

  ccu #(.DIV(DIV), .DEPTH(DEPTH), .AFE_RST_TICKS(AFE)) dut (.*);
  always #5 clk = ~clk;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 15) $display("FAIL: %s", what); end
  endtask

  // model ADC: done 14 clocks after start, code = running count
  int n_conv = 0, last_start = -1, cyc = 0, n_start = 0;
  always @(posedge clk) cyc++;
  always @(posedge clk) if (rst_n && adc_start) begin
    if (last_start >= 0) check(cyc - last_start == DIV, $sformatf("start period %0d", cyc - last_start));
    last_start = cyc; n_start++;
    fork begin
      repeat (13) @(posedge clk);
      #1 begin adc_done = 1; adc_code = 12'(n_conv); n_conv++; end
      @(posedge clk) #1 adc_done = 0;
    end join_none
  end
  always @(negedge clk) if (adc_done) check(qrs_valid, "QRS detector told of each code");

  // one SPI frame at word level: returns the word shifted out in it
  task automatic frame(input logic [15:0] cmd, output logic [15:0] out);
    #3 sclk = 1; out = tx_word; #3 sclk = 0;         // first edge loads tx_word
    repeat (14) begin #3 sclk = 1; #3 sclk = 0; end
    cmd_word = cmd; cmd_stb = 1;
    #3 sclk = 1; #3 sclk = 0;
    cmd_stb = 0;
  endtask

  function automatic bit is_status(logic [15:0] w);
    return w[15:13] == TAG_STATUS;
  endfunction

  initial begin
    #50000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [15:0] w;
    int expect_code = 0, n_ecg = 0, n_hr = 0, n_flag = 0, n_empty_rd = 0;
    #1 rst_n = 0;
    #30 rst_n = 1;
    // startup: S1/S2 closed for AFE samples
    check(afe_rst, "settling switches closed after reset");
    repeat (AFE * DIV - 4) @(posedge clk);
    check(afe_rst, "still settling");
    repeat (8) @(posedge clk);
    check(!afe_rst, "settling over");
    // control register: gain 5, acquisition and QRS enabled
    frame({CMD_WRCTRL, 12'h035}, w);
    frame({CMD_NOP, 12'h0}, w);
    repeat (4) @(posedge clk);
    check(pga_gain == 3'd5, $sformatf("gain %0d", pga_gain));
    // drain what is there so the model starts from an empty FIFO
    begin
      automatic int guard = 0;
      frame({CMD_RDFIFO, 12'h0}, w);
      do begin frame({CMD_RDFIFO, 12'h0}, w); guard++;
        if (!is_status(w) && w[14:12] == TAG_ECG) expect_code = int'(w[11:0]) + 1;
      end while (!is_status(w) && guard < 600);
    end
    // phase A: R peaks and a heart-rate update while the host keeps up
    for (int s = 0; s < 60; s++) begin
      @(posedge adc_start);
      if (s % 10 == 4) begin @(posedge clk) #1 qrs_pulse = 1; @(posedge clk) #1 qrs_pulse = 0; end
      if (s == 30) begin @(posedge clk) #1 begin hr_valid = 1; heart_rate = 12'd72; end @(posedge clk) #1 hr_valid = 0; end
      repeat (3) begin
        frame({CMD_RDFIFO, 12'h0}, w);
        if (!is_status(w) && w[14:12] == TAG_ECG) begin
          check(int'(w[11:0]) == expect_code, $sformatf("read code %0d exp %0d", w[11:0], expect_code));
          expect_code++;
          n_ecg++;
        end
        if (!is_status(w) && w[14:12] == TAG_HR) begin n_hr++; check(w[11:0] == 12'd72, "hr word"); end
        if (!is_status(w) && w[15]) n_flag++;
      end
    end
    repeat (2) @(posedge adc_start);
    for (int k = 0; k < 300; k++) begin
      frame({CMD_RDFIFO, 12'h0}, w);
      if (is_status(w)) begin n_empty_rd++; if (k > 5) break; end
      else if (w[14:12] == TAG_ECG) begin
        check(int'(w[11:0]) == expect_code, "read code after phase A"); expect_code++; n_ecg++;
        if (w[15]) n_flag++;
      end
    end
    check(n_ecg >= 60 && n_flag == 6 && n_hr == 1, $sformatf("host read %0d ECG, %0d flagged, %0d HR", n_ecg, n_flag, n_hr));
    check(n_empty_rd > 0, "reading an empty FIFO returns the status word");
    // replay of phase A is checked by the monitor below
    check(mon_ecg >= 55 && mon_flag == 6 && mon_hr == 1 && mon_err == 0,
          $sformatf("words: ecg %0d flagged %0d hr %0d errors %0d", mon_ecg, mon_flag, mon_hr, mon_err));
    // status word
    frame({CMD_RDSTAT, 12'h0}, w);
    frame({CMD_NOP, 12'h0}, w);
    check(is_status(w) && w[11] && !w[10] && w[9:0] < 10'd4 && w[12] == (w[9:0] == 0), $sformatf("status %h", w));
    // phase B: host stops reading, FIFO fills
    check(state == ST_EMPTY && !irq, "empty state, no interrupt");
    wait (state == ST_READY);
    check(irq && int'(dut.wr_used) > DEPTH / 4, "ready above 25 %, interrupt");
    wait (state == ST_CRITICAL);
    check(irq && int'(dut.wr_used) > DEPTH * 3 / 4, "critical above 75 %");
    wait (state == ST_FULL);
    check(irq && dut.wr_lock, "full: write lock and interrupt");
    begin
      automatic int n0 = n_conv;
      repeat (20) @(posedge adc_start);
      repeat (20) @(posedge clk);
      check(n_conv > n0 + 15 && int'(dut.wr_used) == DEPTH, "writes locked while full");
    end
    // host reads 200 words; state stays Full until soft reset
    for (int k = 0; k < 200; k++) frame({CMD_RDFIFO, 12'h0}, w);
    repeat (10) @(posedge clk);
    check(state == ST_FULL, "Full holds until soft reset");
    frame({CMD_SRST, 12'h0}, w);
    repeat (6) @(posedge clk);
    check(state == ST_EMPTY || state == ST_READY, $sformatf("soft reset -> %s", state.name()));
    repeat (4) @(posedge clk);
    check(state == ST_READY, "usage above 25 % moves on to Ready");
    // acquisition off: no more conversions
    frame({CMD_WRCTRL, 12'h025}, w);
    frame({CMD_NOP, 12'h0}, w);
    repeat (4 * DIV) @(posedge clk);
    begin
      automatic int n0 = n_start;
      repeat (10 * DIV) @(posedge clk);
      check(n_start == n0, "acquisition disabled");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // word monitor on the FIFO write port: ECG codes in sequence, flags
  // following each R peak, heart-rate words carrying the rate
  int mon_ecg = 0, mon_flag = 0, mon_hr = 0, mon_err = 0, mon_next = -1;
  bit peak_since = 0;
  always @(posedge clk) if (rst_n) begin
    if (qrs_pulse) peak_since = 1;
    if (dut.wr_en && !dut.wr_lock && !dut.u_fifo.wr_full) begin
      if (dut.wr_data[14:12] == TAG_ECG) begin
        mon_ecg++;
        if (mon_next >= 0 && int'(dut.wr_data[11:0]) != mon_next) mon_err++;
        mon_next = int'(dut.wr_data[11:0]) + 1;
        if (dut.wr_data[15] != peak_since) mon_err++;
        if (dut.wr_data[15]) mon_flag++;
        peak_since = 0;
      end else if (dut.wr_data[14:12] == TAG_HR) begin
        mon_hr++;
        if (dut.wr_data[11:0] != 12'd72) mon_err++;
      end else mon_err++;
    end
  end
endmodule
