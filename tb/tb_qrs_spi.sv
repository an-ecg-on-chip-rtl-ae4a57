// tb_qrs_spi: reads the 48-bit frame (heart rate, R-R interval, filtered
// ECG) as an SPI mode-1 master and compares it with the values driven,
// including a negative ECG sample (sign extension) and a read aborted
// early by raising cs_n.
module tb_qrs_spi;
  logic rst_n = 1, sclk = 0, cs_n = 0, miso;
  logic [11:0] heart_rate, rr_interval;
  logic signed [11:0] ecg_filt;
  int checks = 0, failures = 0;

  qrs_spi #(.HRW(12), .RRW(12), .EW(12)) dut (.*);

  task automatic read_bits(input int n, output logic [47:0] got);
    got = '0;
    cs_n = 0; #10;
    for (int i = 0; i < n; i++) begin
      sclk = 1; #10;
      sclk = 0;                       // sample at the falling edge
      got = {got[46:0], miso}; #10;
    end
    cs_n = 1; #20;
  endtask

  initial begin
    #2000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [47:0] got, exp;
    #1 begin rst_n = 0; cs_n = 1; end   // edges for the asynchronous clears
    #20 rst_n = 1;
    for (int t = 0; t < 50; t++) begin
      heart_rate  = 12'($urandom_range(0, 4095));
      rr_interval = 12'($urandom_range(0, 4095));
      ecg_filt    = 12'($urandom_range(0, 4095));
      exp = {4'b0, heart_rate, 4'b0, rr_interval, {4{ecg_filt[11]}}, ecg_filt};
      read_bits(48, got);
      checks++;
      if (got !== exp) begin failures++; $display("FAIL frame %h exp %h", got, exp); end
      read_bits(16, got);              // short read: heart rate only
      checks++;
      if (got[15:0] !== exp[47:32]) begin failures++; $display("FAIL short %h", got[15:0]); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
