// tb_abs_mavg: checks |x| followed by an 8-sample moving average against a
// model, including the most negative input, and the one-clock latency.
module tb_abs_mavg;
  localparam int DW = 12, L = 8;
  logic clk = 0, rst_n = 0, in_valid = 0;
  logic signed [DW-1:0] in_data = '0;
  logic out_valid;
  logic [DW-2:0] out_data;
  int checks = 0, failures = 0;
  int h [L];

  abs_mavg #(.DW(DW), .L(L)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int i = 0; i < L; i++) h[i] = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 1000; t++) begin
      int v, m, s;
      v = (t < 20) ? -2048 : (t < 40) ? 2047 : $urandom_range(0, 4095) - 2048;
      m = (v == -2048) ? 2047 : (v < 0 ? -v : v);
      for (int i = L - 1; i > 0; i--) h[i] = h[i-1];
      h[0] = m;
      s = 0;
      for (int i = 0; i < L; i++) s += h[i];
      @(negedge clk) begin in_valid = 1; in_data = DW'(v); end
      @(negedge clk) in_valid = 0;
      checks++;
      if (!out_valid || int'(out_data) != s / L) begin
        failures++;
        if (failures < 10) $display("FAIL t=%0d got %0d exp %0d", t, out_data, s / L);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
