// tb_transpose_buffer: writes random 8x8 blocks column by column, some back
// to back and some with idle clocks between columns, and checks that each
// block leaves transposed (row r = the r-th words of the eight columns), row
// index in order, row 0 presented two cycles after the cycle presenting column 7, the eight rows on
// consecutive clocks, and one bank swap per block.
module tb_transpose_buffer;
  localparam int W = 11;
  localparam int NBLK = 30;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic in_valid;
  logic signed [W-1:0] in_col [8];
  logic out_valid, swap_evt;
  logic [2:0] out_idx;
  logic signed [W-1:0] out_row [8];

  transpose_buffer #(.W(W)) dut (.*);

  int checks = 0, failures = 0, nswap = 0, nbubble = 0;
  int blk [NBLK][8][8];          // [block][row][col]
  longint cycle = 0, col7 [NBLK];
  int oblk = 0, orow = 0;
  logic prev_v = 1'b0;

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL @%0d: %s", cycle, msg); end
  endtask

  always @(posedge clk) begin
    cycle <= cycle + 1;
    if (rst_n && swap_evt) nswap++;
    if (rst_n && out_valid && oblk < NBLK) begin
      if (orow == 0) check(cycle - col7[oblk] == 2, $sformatf("latency %0d", cycle - col7[oblk]));
      else check(prev_v, "rows not on consecutive clocks");
      check(out_idx == 3'(orow), "row index");
      for (int c = 0; c < 8; c++)
        check(int'(out_row[c]) == blk[oblk][orow][c],
              $sformatf("blk %0d row %0d col %0d: %0d want %0d", oblk, orow, c,
                        out_row[c], blk[oblk][orow][c]));
      orow++;
      if (orow == 8) begin orow = 0; oblk++; end
    end
    prev_v <= out_valid;
  end

  initial begin
    in_valid = 1'b0;
    foreach (in_col[n]) in_col[n] = '0;
    for (int b = 0; b < NBLK; b++)
      for (int r = 0; r < 8; r++)
        for (int c = 0; c < 8; c++)
          blk[b][r][c] = int'($urandom_range(0, (1 << W) - 1)) - (1 << (W - 1));
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    for (int b = 0; b < NBLK; b++)
      for (int k = 0; k < 8; k++) begin
        @(negedge clk);
        if (b >= 10 && b < 20 && $urandom_range(0, 2) == 0) begin
          in_valid = 1'b0;
          repeat ($urandom_range(1, 4)) begin nbubble++; @(negedge clk); end
        end
        in_valid = 1'b1;
        for (int n = 0; n < 8; n++) in_col[n] = W'(blk[b][n][k]);
        if (k == 7) col7[b] = cycle;
      end
    @(negedge clk);
    in_valid = 1'b0;
    repeat (12) @(negedge clk);
    check(oblk == NBLK, $sformatf("blocks out %0d", oblk));
    check(nswap == NBLK, $sformatf("swaps %0d", nswap));
    check(nbubble > 0, "no bubbles");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin : watchdog
    repeat (NBLK * 40 + 100) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
