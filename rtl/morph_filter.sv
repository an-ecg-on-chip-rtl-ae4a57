// morph_filter: multiscale-morphology baseline and noise removal filter.
//
// Two branches process the same input: the one the chip description labels
// "opening" applies dilation then erosion, the one labelled "closing" applies
// erosion then dilation (its Fig. 6). Each operator works over a 25-sample
// window. The two branch outputs are averaged and the average is subtracted
// from the input, delayed to line up with it, which removes baseline wander
// and leaves the QRS complex. Because the result uses the average of both
// branches, it does not depend on which branch is called opening.
//
// Each operator centres its window (N-1)/2 samples back, so the two in
// series look 2*((N-1)/2) = 24 samples back; the input is delayed by the
// same amount. out_data is signed, one bit wider than the input.
// Timing: out_valid pulses 3 clocks after in_valid and the value belongs to
// the sample 24 strobes older than the one just accepted.
module morph_filter #(
  parameter int unsigned DW = 11,
  parameter int unsigned N  = 25
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 in_valid,
  input  logic [DW-1:0]        in_data,
  output logic                 out_valid,
  output logic signed [DW:0]   out_data
);

  localparam int unsigned DLY = 2 * ((N - 1) / 2);

  logic          a1_v, a2_v, b1_v, b2_v;
  logic [DW-1:0] a1_d, a2_d, b1_d, b2_d;
  logic [DW-1:0] dl [DLY+1];

  // "Opening" branch: dilation then erosion.
  morph_de #(.DW(DW), .N(N), .DIL(1'b1)) u_a_dil (
    .clk, .rst_n, .in_valid, .in_data, .out_valid(a1_v), .out_data(a1_d));
  morph_de #(.DW(DW), .N(N), .DIL(1'b0)) u_a_ero (
    .clk, .rst_n, .in_valid(a1_v), .in_data(a1_d), .out_valid(a2_v), .out_data(a2_d));

  // "Closing" branch: erosion then dilation.
  morph_de #(.DW(DW), .N(N), .DIL(1'b0)) u_b_ero (
    .clk, .rst_n, .in_valid, .in_data, .out_valid(b1_v), .out_data(b1_d));
  morph_de #(.DW(DW), .N(N), .DIL(1'b1)) u_b_dil (
    .clk, .rst_n, .in_valid(b1_v), .in_data(b1_d), .out_valid(b2_v), .out_data(b2_d));

  // Delay line aligning the raw input with the centre of the two windows.
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i <= DLY; i++) dl[i] <= '0;
    end else if (in_valid) begin
      dl[0] <= in_data;
      for (int i = 1; i <= DLY; i++) dl[i] <= dl[i-1];
    end
  end

  logic [DW:0]          sum;
  logic [DW-1:0]        avg;
  assign sum = {1'b0, a2_d} + {1'b0, b2_d};
  assign avg = sum[DW:1];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      out_data  <= '0;
    end else begin
      out_valid <= a2_v;
      if (a2_v) out_data <= $signed({1'b0, dl[DLY]}) - $signed({1'b0, avg});
    end
  end

  // Both branches advance in lock step.
  assert property (@(posedge clk) disable iff (!rst_n) a2_v == b2_v);

endmodule
