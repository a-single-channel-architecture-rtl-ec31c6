// aidct2d_top: single-channel row-parallel 8x8 2-D DCT with algebraic-integer
// (AI) arithmetic, X = B*A*x*A^T*B^T.
//
// Data path: column transform (ai_dct1d, A) -> transpose buffer -> row
// transform (ai_dct1d, A) -> B(.)B^T block (buffer, multiplexers,
// cross-wiring, final reconstruction). Everything before the reconstruction
// is exact integer arithmetic on a single integer channel; only the FRS
// rounds. This is the structure of the source paper: two 1-D cores and one
// channel instead of separate per-AI-component channels.
//
// Interface: one column of the input block per clock, in_col[n] = x[n][k]
// for k = 0..7, IN_W-bit two's complement (pixels are expected level
// shifted). in_valid may drop between columns; the block alignment comes
// from counters reset to zero. Output: one row of X per clock, out_idx = i,
// out_x[c] = X[i][c] * 2^OUT_FRAC rounded, and out_ai[c][0..3] = the exact
// AI components of X[i][c]. Throughput: one block per eight clocks.
// Latency: if column 7 of a block is presented in cycle n, row 0 of its X
// is presented in cycle n+9 (1 column core, 2 transpose buffer, 1 row core,
// 2 B(.)B^T block, plus the three further rows of Y that must arrive before
// the first parallel load), whether or not the input had idle cycles. Event outputs ev_tbuf_swap and
// ev_q_load mark the transpose-buffer bank swaps and the Q parallel loads.
module aidct2d_top #(
  parameter int  IN_W     = 8,          // input word length L
  parameter int  M1       = 437,        // expansion-factor integer set
  parameter int  M2       = 181,
  parameter int  M3       = 473,
  parameter real ALPHA    = 167.2309,   // expansion factor
  parameter int  INV_BITS = 36,
  parameter int  OUT_FRAC = 8,
  parameter int  OUT_W    = IN_W + 20
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    in_valid,
  input  logic signed [IN_W-1:0]  in_col [8],
  output logic                    out_valid,
  output logic [2:0]              out_idx,
  output logic signed [OUT_W-1:0] out_x [8],
  output logic signed [IN_W+11:0] out_ai [8][4],
  output logic                    ev_tbuf_swap,
  output logic                    ev_q_load
);
  localparam int W1 = IN_W + 3;   // after the column transform
  localparam int WY = IN_W + 6;   // after the row transform

  logic               v1, v2, v3;
  logic signed [W1-1:0] c1 [8];
  logic signed [W1-1:0] r2 [8];
  logic signed [WY-1:0] y3 [8];

  ai_dct1d #(.IN_W(IN_W)) u_col (
    .clk, .rst_n, .in_valid, .x(in_col), .out_valid(v1), .y(c1)
  );

  transpose_buffer #(.W(W1)) u_tbuf (
    .clk, .rst_n, .in_valid(v1), .in_col(c1),
    .out_valid(v2), .out_idx(), .out_row(r2), .swap_evt(ev_tbuf_swap)
  );

  ai_dct1d #(.IN_W(W1)) u_row (
    .clk, .rst_n, .in_valid(v2), .x(r2), .out_valid(v3), .y(y3)
  );

  bbt_block #(
    .W(WY), .M1(M1), .M2(M2), .M3(M3), .ALPHA(ALPHA),
    .INV_BITS(INV_BITS), .OUT_FRAC(OUT_FRAC), .OUT_W(OUT_W)
  ) u_bbt (
    .clk, .rst_n, .in_valid(v3), .in_row(y3),
    .out_valid, .out_idx, .out_x, .out_ai, .load_evt(ev_q_load)
  );

endmodule
