// morph_de: one dilation or erosion operator of the morphological filter.
//
// Samples are shifted into an N-stage shift register F(1)..F(N). Each stage
// is added to (dilation) or has subtracted from it (erosion) the matching
// structure-element value g(k); a comparator tree then takes the maximum
// (dilation) or the minimum (erosion) of the N results. N = 25 (0.1 s at
// 256 Hz) and the 11-bit result width follow the chip description; the
// comparator-tree polarity follows its Dilation/Erosion figure (MAX for
// dilation, MIN for erosion). The structure element is not published: it
// is a parameter, flat (all zero) by default, and results are clamped to
// the DW-bit unsigned range.
//
// Interface: in_valid/in_data accept one sample per strobe (the sample
// rate enable). out_valid pulses one clock after in_valid; out_data is the
// comparator-tree output over the current register contents, so it is
// valid from that clock until the next sample is shifted in. The output
// belongs to a window whose centre is the sample (N-1)/2 strobes
// older than the newest one. The register starts filled with zeros.
module morph_de #(
  parameter int unsigned DW  = 11,
  parameter int unsigned N   = 25,
  parameter bit          DIL = 1'b1,          // 1: dilation (max), 0: erosion (min)
  parameter logic [N*DW-1:0] G = '0           // structure element, g(k) in bits [k*DW +: DW]
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          in_valid,
  input  logic [DW-1:0] in_data,
  output logic          out_valid,
  output logic [DW-1:0] out_data
);

  localparam int unsigned MAXV = (1 << DW) - 1;

  logic [DW-1:0] sr [N];
  logic [DW-1:0] term [N];
  logic [DW-1:0] best;

  // Shift register F(1)..F(N); F(1) holds the incoming sample.
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < N; i++) sr[i] <= '0;
    end else if (in_valid) begin
      sr[0] <= in_data;
      for (int i = 1; i < N; i++) sr[i] <= sr[i-1];
    end
  end

  // Add / subtract the structure element, clamp to the unsigned range.
  always_comb begin
    for (int i = 0; i < N; i++) begin
      logic signed [DW+1:0] s;
      if (DIL) s = $signed({2'b00, sr[i]}) + $signed({2'b00, G[i*DW +: DW]});
      else     s = $signed({2'b00, sr[i]}) - $signed({2'b00, G[i*DW +: DW]});
      if (s < 0)                       term[i] = '0;
      else if (s > $signed((DW+2)'(MAXV))) term[i] = DW'(MAXV);
      else                             term[i] = s[DW-1:0];
    end
  end

  // Comparator tree (written as a linear reduction; synthesis balances it).
  always_comb begin
    best = term[0];
    for (int i = 1; i < N; i++) begin
      if (DIL ? (term[i] > best) : (term[i] < best)) best = term[i];
    end
  end

  // The result is valid the clock after the shift, and stays until the next.
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) out_valid <= 1'b0;
    else        out_valid <= in_valid;
  end

  assign out_data = best;

endmodule
