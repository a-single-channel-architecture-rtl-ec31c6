// ai_dct1d: 8-point 1-D DCT over the algebraic-integer (AI) basis, i.e. the
// product y = A*x with the integer matrix A of the improved Arai algorithm.
//
// It uses 20 additions/subtractions and no multiplications or shifts,
// arranged as in the source paper's signal-flow graph: 8 butterflies in the
// first column, 4 + 3 adders in the second, 3 + 2 in the third. The paper
// prints A and the adder count; the exact operand of each adder is read from
// its figure only up to which row each adder sits in, so the network below
// is a 20-adder factorisation that reproduces A exactly:
//   a0..a3 = x0+x7, x1+x6, x2+x5, x3+x4     a4..a7 = x3-x4, x2-x5, x1-x6, x0-x7
//   b0 = a0+a3  b1 = a1+a2  b2 = a0-a3  b3 = a1-a2
//   c0 = a4+a5  c1 = a6+a7  c2 = a5+a6
//   y0 = b0+b1  y1 = b0-b1  y2 = b2+b3  y3 = b2
//   y4 = c0+c1  y5 = -c2    y6 = c0-c1  y7 = a7
// (y5 = -c2 is the negation marked on that adder's input; the negation is
// done by wiring the subtractor, so no adder is added.)
//
// Interface: in_valid/x[0..7] (one column or row of IN_W-bit two's-complement
// words per clock); out_valid/y[0..7] one clock later, IN_W+3 bits wide,
// which is overflow free because every row of A has at most eight +-1
// entries. The output register is this design's choice; the paper does not
// state the pipelining.
module ai_dct1d #(
  parameter int IN_W = 8
) (
  input  logic                   clk,
  input  logic                   rst_n,
  input  logic                   in_valid,
  input  logic signed [IN_W-1:0] x [8],
  output logic                   out_valid,
  output logic signed [IN_W+2:0] y [8]
);
  localparam int W = IN_W + 3;

  logic signed [W-1:0] xe [8];
  logic signed [W-1:0] a [8];
  logic signed [W-1:0] b [4];
  logic signed [W-1:0] c [3];
  logic signed [W-1:0] yc [8];

  always_comb begin
    for (int n = 0; n < 8; n++) xe[n] = W'(x[n]);
    // first column: butterflies
    a[0] = xe[0] + xe[7];
    a[1] = xe[1] + xe[6];
    a[2] = xe[2] + xe[5];
    a[3] = xe[3] + xe[4];
    a[4] = xe[3] - xe[4];
    a[5] = xe[2] - xe[5];
    a[6] = xe[1] - xe[6];
    a[7] = xe[0] - xe[7];
    // second column
    b[0] = a[0] + a[3];
    b[1] = a[1] + a[2];
    b[2] = a[0] - a[3];
    b[3] = a[1] - a[2];
    c[0] = a[4] + a[5];
    c[1] = a[6] + a[7];
    c[2] = -a[5] - a[6];
    // third column
    yc[0] = b[0] + b[1];
    yc[1] = b[0] - b[1];
    yc[2] = b[2] + b[3];
    yc[3] = b[2];
    yc[4] = c[0] + c[1];
    yc[5] = c[2];
    yc[6] = c[0] - c[1];
    yc[7] = a[7];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      for (int n = 0; n < 8; n++) y[n] <= '0;
    end else begin
      out_valid <= in_valid;
      if (in_valid) y <= yc;
    end
  end

endmodule
