// tb_morph_filter: checks the opening/closing average and its subtraction
// from the delayed input against a model built from plain max/min over
// sliding windows, on a drifting baseline with narrow peaks. Also checks
// the 3-clock latency and that the drift is removed (output near zero
// away from the peaks).
module tb_morph_filter;
  localparam int DW = 11, N = 25, DLY = 24;
  logic clk = 0, rst_n = 0, in_valid = 0;
  logic [DW-1:0] in_data = '0;
  logic out_valid;
  logic signed [DW:0] out_data;
  int checks = 0, failures = 0;

  morph_filter #(.DW(DW), .N(N)) dut (.*);
  always #5 clk = ~clk;

  int x [$], a1 [$], a2 [$], b1 [$], b2 [$];

  function automatic int wmax(ref int q [$]);
    int m = 0;
    for (int i = 0; i < N; i++) begin
      int v = (q.size() > i) ? q[q.size() - 1 - i] : 0;
      if (i == 0 || v > m) m = v;
    end
    return m;
  endfunction
  function automatic int wmin(ref int q [$]);
    int m = 0;
    for (int i = 0; i < N; i++) begin
      int v = (q.size() > i) ? q[q.size() - 1 - i] : 0;
      if (i == 0 || v < m) m = v;
    end
    return m;
  endfunction

  initial begin
    repeat (500000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int flat_ok = 0, flat_n = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 1500; t++) begin
      int v, exp_o, lat;
      v = 600 + (t % 400) / 2;                       // slow baseline ramp
      if (t % 180 >= 100 && t % 180 < 106) v += 500 - 120 * ((t % 180 >= 103) ? (t % 180 - 103) : (103 - t % 180));
      if (v > 2047) v = 2047;
      @(negedge clk) begin in_valid = 1; in_data = DW'(v); end
      x.push_back(v);
      a1.push_back(wmax(x)); a2.push_back(wmin(a1));
      b1.push_back(wmin(x)); b2.push_back(wmax(b1));
      exp_o = ((x.size() > DLY) ? x[x.size() - 1 - DLY] : 0) - ((a2[$] + b2[$]) >> 1);
      @(negedge clk) in_valid = 0;
      lat = 1;
      while (!out_valid && lat < 10) begin @(negedge clk); lat++; end
      checks++;
      if (lat != 3 || int'(out_data) != exp_o) begin
        failures++;
        if (failures < 10) $display("FAIL t=%0d got %0d exp %0d lat %0d", t, out_data, exp_o, lat);
      end
      // away from the peaks and after start-up, the ramp must be removed
      if (t > 100 && (t - DLY) % 180 < 60 && (t - DLY) % 180 > 10 && (t - DLY) % 400 > 60 && (t - DLY) % 400 < 340) begin
        flat_n++;
        if (out_data > -30 && out_data < 30) flat_ok++;
      end
    end
    checks++;
    if (flat_ok != flat_n || flat_n == 0) begin failures++; $display("FAIL baseline %0d/%0d", flat_ok, flat_n); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
