// tb_sar_logic: checks the SAR sequencer against an ideal comparator.
// The testbench models the analog side: the held input vin and a comparator
// that answers vin >= dac_code. Each conversion must return vin exactly,
// close the S/H only in the first clock, and finish ADC_W + 2 clocks after
// start. A start during a conversion must be ignored.
module tb_sar_logic;
  localparam int ADC_W = 12;
  logic clk = 0, rst_n = 0, start = 0, comp;
  logic sample, busy, done;
  logic [ADC_W-1:0] dac_code, code;
  int unsigned vin;
  int checks = 0, failures = 0;

  sar_logic #(.ADC_W(ADC_W)) dut (.*);

  always #5 clk = ~clk;
  assign comp = (vin >= dac_code);

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    repeat (2000000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int cyc, nsample;
    vin = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    repeat (2) @(posedge clk);
    for (int t = 0; t < 300; t++) begin
      vin = (t == 0) ? 0 : (t == 1) ? 4095 : (t == 2) ? 2048 : $urandom_range(0, 4095);
      @(negedge clk) start = 1;
      @(negedge clk) start = 0;
      cyc = 1; nsample = sample ? 1 : 0;
      // a stray start mid-conversion must be ignored
      if (t % 7 == 3) begin @(negedge clk) start = 1; @(negedge clk) start = 0; cyc += 2; end
      while (!done) begin
        @(negedge clk);
        if (sample) nsample++;
        cyc++;
        if (cyc > 100) break;
      end
      check(code == ADC_W'(vin), $sformatf("code %0d for vin %0d", code, vin));
      check(cyc == ADC_W + 2, $sformatf("conversion took %0d clocks", cyc));
      check(nsample == 1 || t % 7 == 3, "S/H closed for one clock");
      @(negedge clk);
      check(!busy, "idle after done");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
