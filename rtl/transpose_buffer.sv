// transpose_buffer: 8x8 transposition memory between the column-wise and
// row-wise 1-D transforms.
//
// Eight words arrive per clock (one column of the intermediate matrix) and
// eight words leave per clock (one row), so the stream rate of one 8x8 block
// every eight clocks is kept. The source paper only names this block; its
// structure here is this design's choice: two 8x8 register banks used
// ping-pong. Columns are written into one bank; when its eighth column has
// been written the banks swap and the full bank is read out row by row on
// the next eight clocks while the other bank fills.
//
// Interface: in_valid/in_col[0..7] = column k of a block, columns in order
// 0..7, with any number of idle clocks between them (a column counter,
// reset to 0, gives the block alignment). out_valid/out_row[0..7]/out_idx:
// row out_idx of the block; the eight rows of a block leave on eight
// consecutive clocks. Latency: if column 7 is presented in cycle n, row 0
// is presented in cycle n+2 (the banks swap at the end of cycle n, the row
// register loads at the end of cycle n+1). swap_evt is high in cycle n, the
// cycle whose closing edge swaps the banks.
module transpose_buffer #(
  parameter int W = 11
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                in_valid,
  input  logic signed [W-1:0] in_col [8],
  output logic                out_valid,
  output logic [2:0]          out_idx,
  output logic signed [W-1:0] out_row [8],
  output logic                swap_evt   // banks swap on this clock edge
);
  logic signed [W-1:0] mem [2][8][8];   // [bank][row][col]
  logic       wbank, rbank;
  logic [2:0] wcol, rcnt;
  logic       ractive;

  assign swap_evt = in_valid && (wcol == 3'd7);

  // write side: column wcol of bank wbank
  always_ff @(posedge clk) begin
    if (in_valid)
      for (int r = 0; r < 8; r++) mem[wbank][r][wcol] <= in_col[r];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wbank     <= 1'b0;
      rbank     <= 1'b0;
      wcol      <= '0;
      rcnt      <= '0;
      ractive   <= 1'b0;
      out_valid <= 1'b0;
      out_idx   <= '0;
      for (int c = 0; c < 8; c++) out_row[c] <= '0;
    end else begin
      // read side: one row per clock of the bank filled last
      out_valid <= ractive;
      if (ractive) begin
        out_idx <= rcnt;
        for (int c = 0; c < 8; c++) out_row[c] <= mem[rbank][rcnt][c];
        rcnt <= rcnt + 3'd1;
        if (rcnt == 3'd7) ractive <= 1'b0;
      end
      if (in_valid) begin
        wcol <= wcol + 3'd1;
        if (wcol == 3'd7) begin   // bank full: swap
          wbank   <= ~wbank;
          rbank   <= wbank;
          rcnt    <= '0;
          ractive <= 1'b1;
        end
      end
    end
  end

  // A bank must be fully read before it is written again; with eight
  // columns per block this holds by construction.
  a_no_overrun: assert property (@(posedge clk) disable iff (!rst_n)
    (in_valid && wcol == 3'd7) |-> (!ractive || rcnt == 3'd7));

endmodule
