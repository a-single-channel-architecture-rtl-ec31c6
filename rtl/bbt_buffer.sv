// bbt_buffer: the buffer of the B(.)B^T block, a shift-register section (P)
// followed by a parallel-load section (Q), one slice per column j = 0..7.
//
// Rows of Y = A*x*A^T arrive one per clock. P holds the last three rows
// (Df1 = newest, Df2, Df3), shifting on every valid row. On the clock on
// which the fourth row of a half block arrives (rows 3 and 7), Q is loaded
// in parallel: Ds0 <= incoming row, Ds1 <= Df1, Ds2 <= Df2, Ds3 <= Df3, so
// Q then holds rows 4h+3, 4h+2, 4h+1, 4h of half h. Q holds them for the
// next four clocks, during which the output rows 4h..4h+3 of the block are
// formed from them (half-column independence: output rows 0-3 need only
// rows 0-3 of Y, rows 4-7 only rows 4-7). This follows the paper's figures
// for the buffer: 3x8 registers at the full clock, 4x8 registers loaded
// once every four clocks, with the register contents of its timing diagram.
// The enable of P on in_valid, the row counter that finds rows 3 and 7, and
// the four-clock output sequencer are this design's own.
//
// Interface: in_valid/in_row[0..7] = row of Y, rows 0..7 of a block in order
// (a row counter reset to 0 gives the alignment). q[s][j] = Ds_s of column j.
// out_valid/out_idx: for four consecutive clocks after a load, output row
// out_idx (4h, 4h+1, 4h+2, 4h+3) is to be formed from q.
module bbt_buffer #(
  parameter int W = 14
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                in_valid,
  input  logic signed [W-1:0] in_row [8],
  output logic signed [W-1:0] q [4][8],
  output logic                out_valid,
  output logic [2:0]          out_idx,
  output logic                load_evt   // Q loaded on this clock edge
);
  logic signed [W-1:0] df [1:3][8];   // shift register section (P)
  logic [2:0] rcnt;                   // index of the incoming row
  logic [1:0] ocnt;                   // position in the 4-row output sequence
  logic       load;

  assign load     = in_valid && (rcnt[1:0] == 2'd3);
  assign load_evt = load;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rcnt      <= '0;
      ocnt      <= '0;
      out_valid <= 1'b0;
      out_idx   <= '0;
      for (int j = 0; j < 8; j++) begin
        for (int s = 1; s <= 3; s++) df[s][j] <= '0;
        for (int s = 0; s < 4; s++)  q[s][j]  <= '0;
      end
    end else begin
      if (in_valid) begin
        rcnt <= rcnt + 3'd1;
        df[1] <= in_row;
        df[2] <= df[1];
        df[3] <= df[2];
      end
      // output sequencer: four output rows per load
      if (out_valid) begin
        ocnt    <= ocnt + 2'd1;
        out_idx <= out_idx + 3'd1;
        if (ocnt == 2'd3) out_valid <= 1'b0;
      end
      if (load) begin             // parallel load section (Q)
        q[0] <= in_row;
        q[1] <= df[1];
        q[2] <= df[2];
        q[3] <= df[3];
        out_valid <= 1'b1;
        ocnt      <= '0;
        out_idx   <= {rcnt[2], 2'b00};
      end
    end
  end

  // Q may only be reloaded once the previous four output rows are out.
  a_q_hold: assert property (@(posedge clk) disable iff (!rst_n)
    load |-> (!out_valid || ocnt == 2'd3));

endmodule
