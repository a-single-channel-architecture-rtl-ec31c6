// bbt_block: the B(.)B^T block. It takes Y = A*x*A^T one row per clock and
// produces X = B*Y*B^T one row per clock, in fixed point, together with the
// exact AI components of every output.
//
// Structure, following the source paper: buffer (shift-register section P
// and parallel-load section Q, bbt_buffer), 32 multiplexers and cross-wiring
// (bbt_crosswire) and the final reconstruction step, one frs per output
// column. The output register after the FRS is this design's choice.
//
// Timing: Q is loaded at the end of the cycle that presents row 3 (or 7) of
// Y; the multiplexers then select output rows 0..3 (4..7) in the next four
// cycles and the output register presents each one cycle later. So if row
// 3 of Y is presented in cycle n, row 0 of X is presented in cycle n+2 and
// rows 1..3 follow in n+3..n+5. With Y arriving
// without gaps, X leaves without gaps, one 8x8 block per eight clocks.
//
// Interface: in_valid/in_row[0..7]; out_valid/out_idx (row i of X)/
// out_x[c] (X[i][c] * 2^OUT_FRAC)/out_ai[c][k] (component k of X[i][c] in
// the basis {1, z1, z2, z1z2}). load_evt pulses on each Q load.
module bbt_block #(
  parameter int  W        = 14,
  parameter int  M1       = 437,
  parameter int  M2       = 181,
  parameter int  M3       = 473,
  parameter real ALPHA    = 167.2309,
  parameter int  INV_BITS = 36,
  parameter int  OUT_FRAC = 8,
  parameter int  OUT_W    = W + 14
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    in_valid,
  input  logic signed [W-1:0]     in_row [8],
  output logic                    out_valid,
  output logic [2:0]              out_idx,
  output logic signed [OUT_W-1:0] out_x [8],
  output logic signed [W+5:0]     out_ai [8][4],
  output logic                    load_evt
);
  logic signed [W-1:0]     q [4][8];
  logic                    sel_valid;
  logic [2:0]              sel_idx;
  logic signed [W:0]       t [4][4][8];
  logic signed [W:0]       tc [8][4][4];
  logic signed [W+5:0]     comp [8][4];
  logic signed [OUT_W-1:0] xf [8];

  bbt_buffer #(.W(W)) u_buf (
    .clk, .rst_n, .in_valid, .in_row,
    .q, .out_valid(sel_valid), .out_idx(sel_idx), .load_evt
  );

  bbt_crosswire #(.W(W)) u_xw (.q, .i(sel_idx), .t);

  for (genvar c = 0; c < 8; c++) begin : g_frs
    always_comb
      for (int p = 0; p < 4; p++)
        for (int qq = 0; qq < 4; qq++) tc[c][p][qq] = t[p][qq][c];

    frs #(
      .TW(W + 1), .COL(c), .M1(M1), .M2(M2), .M3(M3), .ALPHA(ALPHA),
      .INV_BITS(INV_BITS), .OUT_FRAC(OUT_FRAC), .OUT_W(OUT_W)
    ) u_frs (.t(tc[c]), .comp(comp[c]), .x_fix(xf[c]));
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      out_idx   <= '0;
      for (int c = 0; c < 8; c++) begin
        out_x[c] <= '0;
        for (int k = 0; k < 4; k++) out_ai[c][k] <= '0;
      end
    end else begin
      out_valid <= sel_valid;
      if (sel_valid) begin
        out_idx <= sel_idx;
        out_x   <= xf;
        out_ai  <= comp;
      end
    end
  end

endmodule
