// tb_aidct2d_top: end-to-end test of the AI 2-D DCT at its default
// parameters (L = 8, integer set (437,181,473), alpha = 167.2309).
//
// It streams NBLK 8x8 blocks through the design, one column per clock, and
// compares every output row with a reference computed from the matrices
// (aidct_ref_pkg): the AI components exactly, the fixed-point output against
// the expansion-factor value within 0.6 LSB, and the AI components against
// the double-precision DCT value. Block kinds: random, full-scale extremes
// (all +max, all -min, sign patterns that drive every row of A to its
// largest sum) to exercise the overflow-free word widths. Some blocks come
// with idle clocks between columns, others back to back. It checks the
// latency (row 0 of X leaves LAT clocks after column 7 of x entered), the
// row order, and that gap-free input gives gap-free output (one block per
// eight clocks). It counts transpose-bank swaps, Q loads of each half,
// input bubbles, back-to-back blocks and extreme blocks, and fails if any
// never happened.
module tb_aidct2d_top;
  import aidct_ref_pkg::*;

  localparam int  L      = 8;
  localparam int  F      = 8;
  localparam int  M1     = 437, M2 = 181, M3 = 473;
  localparam real ALPHA  = 167.2309;
  localparam int  NBLK   = 48;
  localparam int  LAT    = 9;
  localparam int  OUT_W  = L + 20;

  logic clk = 1'b0, rst_n = 1'b0;
  logic in_valid;
  logic signed [L-1:0] in_col [8];
  logic out_valid;
  logic [2:0] out_idx;
  logic signed [OUT_W-1:0] out_x [8];
  logic signed [L+11:0] out_ai [8][4];
  logic ev_tbuf_swap, ev_q_load;

  aidct2d_top dut (.*);

  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  int n_swap = 0, n_load_top = 0, n_load_bot = 0, n_bubble = 0;
  int n_b2b = 0, n_extreme = 0, n_cont_rows = 0;
  longint cycle = 0;

  int     xin [NBLK][8][8];
  longint col7_cycle [NBLK];
  real    max_err = 0.0;

  always @(posedge clk) cycle <= cycle + 1;

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL @%0d: %s", cycle, msg);
    end
  endtask

  // ---------------- stimulus ----------------
  function automatic int rnd_pix();
    return int'($urandom_range(0, (1 << L) - 1)) - (1 << (L - 1));
  endfunction

  task automatic make_block(input int b);
    int kind = b % 6;
    for (int n = 0; n < 8; n++)
      for (int k = 0; k < 8; k++) begin
        case (kind)
          1: xin[b][n][k] = (1 << (L - 1)) - 1;
          2: xin[b][n][k] = -(1 << (L - 1));
          3: xin[b][n][k] = (((n + k) % 2) == 0) ? -(1 << (L - 1)) : (1 << (L - 1)) - 1;
          4: xin[b][n][k] = (amat(b % 8, n) * amat((b / 8) % 8, k) >= 0) ?
                            -(1 << (L - 1)) : (1 << (L - 1)) - 1;
          default: xin[b][n][k] = rnd_pix();
        endcase
      end
    if (kind >= 1 && kind <= 4) n_extreme++;
  endtask

  initial begin
    in_valid = 1'b0;
    foreach (in_col[n]) in_col[n] = '0;
    for (int b = 0; b < NBLK; b++) make_block(b);
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    // inputs change on the falling edge, away from the sampling edge
    for (int b = 0; b < NBLK; b++) begin
      bit gappy;
      gappy = (b >= 16 && b < 28);          // blocks 16..27 have bubbles
      if (b > 0 && !gappy) n_b2b++;     // column 0 right after column 7
      for (int k = 0; k < 8; k++) begin
        @(negedge clk);
        if (gappy && ($urandom_range(0, 2) == 0)) begin
          in_valid = 1'b0;
          repeat ($urandom_range(1, 3)) begin
            n_bubble++;
            @(negedge clk);
          end
        end
        in_valid = 1'b1;
        for (int n = 0; n < 8; n++) in_col[n] = L'(xin[b][n][k]);
        if (k == 7) col7_cycle[b] = cycle;
      end
    end
    @(negedge clk);
    in_valid = 1'b0;
  end

  // ---------------- checking ----------------
  int     oblk = 0, orow = 0;
  ai_t    xa [8][8];
  real    xr [8][8];
  longint y  [8][8];
  logic   prev_out_valid = 1'b0;

  always @(posedge clk) begin
    if (rst_n) begin
      if (ev_tbuf_swap) n_swap++;
      if (ev_q_load) begin
        if (dut.u_bbt.u_buf.rcnt[2]) n_load_bot++;
        else n_load_top++;
      end
    end
    if (rst_n && out_valid && oblk < NBLK) begin
      if (orow == 0) begin
        ref_y(xin[oblk], y);
        ref_x(y, xa, xr);
        check(cycle - col7_cycle[oblk] == LAT,
              $sformatf("block %0d latency %0d, expected %0d", oblk,
                        cycle - col7_cycle[oblk], LAT));
      end
      // throughput: the rows of a block leave on consecutive clocks, and a
      // block that followed its predecessor without gaps leaves right
      // after it (one block per eight clocks)
      if (orow != 0 || (oblk > 0 && !(oblk >= 16 && oblk < 29))) begin
        check(prev_out_valid, $sformatf("gap before row %0d of block %0d", orow, oblk));
        n_cont_rows++;
      end
      check(out_idx == 3'(orow), $sformatf("row order: got %0d want %0d", out_idx, orow));
      for (int c = 0; c < 8; c++) begin
        ai_t got;
        real ef, fx, err;
        for (int k = 0; k < 4; k++) got[k] = longint'(out_ai[c][k]);
        check(got == xa[orow][c],
              $sformatf("blk %0d X[%0d][%0d] AI (%0d,%0d,%0d,%0d) want (%0d,%0d,%0d,%0d)",
                        oblk, orow, c, got[0], got[1], got[2], got[3],
                        xa[orow][c][0], xa[orow][c][1], xa[orow][c][2], xa[orow][c][3]));
        check(rabs(ai_val(got) - xr[orow][c]) < 1e-6 * (1.0 + rabs(xr[orow][c])),
              $sformatf("blk %0d X[%0d][%0d] AI value %f vs DCT %f", oblk, orow, c,
                        ai_val(got), xr[orow][c]));
        ef = ef_val(xa[orow][c], M1, M2, M3, ALPHA);
        fx = real'(out_x[c]) / real'(1 << F);
        err = rabs(fx - ef);
        if (rabs(fx - xr[orow][c]) > max_err) max_err = rabs(fx - xr[orow][c]);
        check(err <= 0.6 / real'(1 << F),
              $sformatf("blk %0d X[%0d][%0d] fixed %f vs %f", oblk, orow, c, fx, ef));
      end
      orow++;
      if (orow == 8) begin
        orow = 0;
        oblk++;
      end
    end
    prev_out_valid <= out_valid;
  end

  initial begin
    wait (oblk == NBLK);
    repeat (5) @(posedge clk);
    check(n_cont_rows > 0, "no gap-free output stream");
    check(n_swap == NBLK, $sformatf("bank swaps %0d", n_swap));
    check(n_load_top == NBLK && n_load_bot == NBLK,
          $sformatf("Q loads top %0d bottom %0d", n_load_top, n_load_bot));
    check(n_bubble > 0, "no input bubbles");
    check(n_b2b > 0, "no back-to-back blocks");
    check(n_extreme > 0, "no full-scale blocks");
    $display("events: cont_rows=%0d swaps=%0d qload_top=%0d qload_bottom=%0d bubbles=%0d back_to_back=%0d extreme=%0d",
             n_cont_rows, n_swap, n_load_top, n_load_bot, n_bubble, n_b2b, n_extreme);
    $display("max |fixed-point X - exact X| = %g", max_err);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin : watchdog
    repeat (NBLK * 40 + 200) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
