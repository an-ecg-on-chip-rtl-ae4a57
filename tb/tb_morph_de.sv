// tb_morph_de: checks dilation (max) and erosion (min) over the last N
// samples, with a flat structure element and with g(k) = 3k (add for
// dilation, subtract for erosion, clamped to the 11-bit range), against a
// sliding-window model kept in the testbench.
module tb_morph_de;
  localparam int DW = 11, N = 25;
  localparam int MAXV = (1 << DW) - 1;

  function automatic logic [N*DW-1:0] ramp_g();
    logic [N*DW-1:0] g;
    for (int k = 0; k < N; k++) g[k*DW +: DW] = DW'(3 * k);
    return g;
  endfunction
  localparam logic [N*DW-1:0] GR = ramp_g();

  logic clk = 0, rst_n = 0, in_valid = 0;
  logic [DW-1:0] in_data = '0;
  logic [3:0] ov;
  logic [DW-1:0] od [4];
  int hist [N];
  int checks = 0, failures = 0;

  morph_de #(.DW(DW), .N(N), .DIL(1'b1))           d0 (.clk, .rst_n, .in_valid, .in_data, .out_valid(ov[0]), .out_data(od[0]));
  morph_de #(.DW(DW), .N(N), .DIL(1'b0))           d1 (.clk, .rst_n, .in_valid, .in_data, .out_valid(ov[1]), .out_data(od[1]));
  morph_de #(.DW(DW), .N(N), .DIL(1'b1), .G(GR))   d2 (.clk, .rst_n, .in_valid, .in_data, .out_valid(ov[2]), .out_data(od[2]));
  morph_de #(.DW(DW), .N(N), .DIL(1'b0), .G(GR))   d3 (.clk, .rst_n, .in_valid, .in_data, .out_valid(ov[3]), .out_data(od[3]));

  always #5 clk = ~clk;

  function automatic int clampv(int v);
    return v < 0 ? 0 : (v > MAXV ? MAXV : v);
  endfunction

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int e [4];
    for (int i = 0; i < N; i++) hist[i] = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 600; t++) begin
      int x;
      x = (t < 100) ? $urandom_range(0, MAXV) : (t < 200) ? $urandom_range(MAXV - 40, MAXV)
        : (t < 300) ? $urandom_range(0, 40) : 300 + 200 * ((t / 13) % 3);
      @(negedge clk) begin in_valid = 1; in_data = DW'(x); end
      for (int i = N - 1; i > 0; i--) hist[i] = hist[i-1];
      hist[0] = x;
      @(negedge clk) in_valid = 0;
      e[0] = 0; e[1] = MAXV; e[2] = 0; e[3] = MAXV;
      for (int i = 0; i < N; i++) begin
        if (hist[i] > e[0]) e[0] = hist[i];
        if (hist[i] < e[1]) e[1] = hist[i];
        if (clampv(hist[i] + 3 * i) > e[2]) e[2] = clampv(hist[i] + 3 * i);
        if (clampv(hist[i] - 3 * i) < e[3]) e[3] = clampv(hist[i] - 3 * i);
      end
      for (int k = 0; k < 4; k++) begin
        checks++;
        if (!ov[k] || int'(od[k]) != e[k]) begin
          failures++;
          if (failures < 10) $display("FAIL t=%0d op%0d got %0d exp %0d v=%0b", t, k, od[k], e[k], ov[k]);
        end
      end
      @(negedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
