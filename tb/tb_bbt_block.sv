// tb_bbt_block: drives the B(.)B^T block with rows of Y (random values of
// the width the row transform produces, and full-scale rows), eight rows per
// block, some blocks back to back and some with idle clocks, and checks each
// output row of X = B*Y*B^T: exact AI components against the reference
// model, fixed-point value within 0.6 LSB of the expansion-factor value.
// It checks the timing (row 0 of X two cycles after the cycle presenting row
// 3 of Y, row 4 two cycles after row 7) and that gap-free input gives
// gap-free output.
module tb_bbt_block;
  import aidct_ref_pkg::*;
  localparam int W = 14, F = 8, OW = W + 14, NBLK = 24;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic in_valid, out_valid, load_evt;
  logic signed [W-1:0] in_row [8];
  logic [2:0] out_idx;
  logic signed [OW-1:0] out_x [8];
  logic signed [W+5:0] out_ai [8][4];

  bbt_block #(.W(W)) dut (.*);

  int checks = 0, failures = 0, nbubble = 0, ncont = 0;
  longint y [NBLK][8][8];
  longint cycle = 0, rc3 [NBLK], rc7 [NBLK];
  int oblk = 0, orow = 0;
  logic prev_v = 1'b0;
  ai_t xa [8][8];
  real xr [8][8];

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL @%0d: %s", cycle, msg); end
  endtask

  always @(posedge clk) begin
    cycle <= cycle + 1;
    if (rst_n && out_valid && oblk < NBLK) begin
      if (orow == 0) begin
        ref_x(y[oblk], xa, xr);
        check(cycle - rc3[oblk] == 2, $sformatf("row 0 timing %0d", cycle - rc3[oblk]));
      end
      if (orow == 4) check(cycle - rc7[oblk] == 2, "row 4 timing");
      if (orow != 0 && orow != 4) check(prev_v, "gap inside a half");
      if (prev_v) ncont++;
      check(out_idx == 3'(orow), "row index");
      for (int c = 0; c < 8; c++) begin
        ai_t g;
        real ef;
        for (int k = 0; k < 4; k++) g[k] = longint'(out_ai[c][k]);
        check(g == xa[orow][c], $sformatf("blk %0d X[%0d][%0d] components", oblk, orow, c));
        ef = ef_val(xa[orow][c], 437, 181, 473, 167.2309);
        check(rabs(real'(out_x[c]) / 256.0 - ef) <= 0.6 / 256.0,
              $sformatf("blk %0d X[%0d][%0d] fixed %f want %f", oblk, orow, c,
                        real'(out_x[c]) / 256.0, ef));
      end
      orow++;
      if (orow == 8) begin orow = 0; oblk++; end
    end
    prev_v <= out_valid;
  end

  initial begin
    in_valid = 1'b0;
    foreach (in_row[j]) in_row[j] = '0;
    for (int b = 0; b < NBLK; b++)
      for (int r = 0; r < 8; r++)
        for (int j = 0; j < 8; j++)
          y[b][r][j] = (b == 1) ? (1 << (W - 1)) - 1 : (b == 2) ? -(1 << (W - 1)) :
                       longint'(int'($urandom_range(0, (1 << W) - 1)) - (1 << (W - 1)));
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    for (int b = 0; b < NBLK; b++)
      for (int r = 0; r < 8; r++) begin
        @(negedge clk);
        if (b >= 8 && b < 16 && $urandom_range(0, 2) == 0) begin
          in_valid = 1'b0;
          repeat ($urandom_range(1, 4)) begin nbubble++; @(negedge clk); end
        end
        in_valid = 1'b1;
        for (int j = 0; j < 8; j++) in_row[j] = W'(y[b][r][j]);
        if (r == 3) rc3[b] = cycle;
        if (r == 7) rc7[b] = cycle;
      end
    @(negedge clk);
    in_valid = 1'b0;
    repeat (6) @(negedge clk);
    check(oblk == NBLK, $sformatf("blocks out %0d", oblk));
    check(nbubble > 0, "no bubbles");
    // blocks 0..7 and 16..23 stream without gaps: at least 2*8*8 - 2 rows
    // follow another row directly
    check(ncont >= 126, $sformatf("continuous rows %0d", ncont));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin : watchdog
    repeat (NBLK * 50 + 100) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
