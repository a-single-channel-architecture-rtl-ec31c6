// tb_bbt_crosswire: for random Q contents and every output row i, checks
// the multiplexer/wiring outputs against (B_p * Y * B_q^T)[i][c] computed by
// full matrix products from the matrices B_0..B_3 (the components of B in
// the reference package). The half of Y not held in Q is taken as zero,
// which the block-diagonal form of B_p makes irrelevant.
module tb_bbt_crosswire;
  import aidct_ref_pkg::*;
  localparam int W = 14;

  logic signed [W-1:0] q [4][8];
  logic [2:0] i;
  logic signed [W:0] t [4][4][8];

  bbt_crosswire #(.W(W)) dut (.*);

  int checks = 0, failures = 0;

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL: %s", msg); end
  endtask

  function automatic longint bp(input int p, input int r, input int c);
    ai_t v;
    bmat(r, c, v);
    return v[p];
  endfunction

  initial begin
    longint y [8][8];
    for (int trial = 0; trial < 200; trial++) begin
      for (int s = 0; s < 4; s++)
        for (int j = 0; j < 8; j++)
          q[s][j] = (trial < 4) ? ((trial % 2) ? W'(-(1 << (W - 1))) : W'((1 << (W - 1)) - 1))
                                : W'($urandom);
      for (int ii = 0; ii < 8; ii++) begin
        automatic int h = ii / 4;
        i = 3'(ii);
        for (int r = 0; r < 8; r++)
          for (int j = 0; j < 8; j++)
            y[r][j] = (r / 4 == h) ? longint'(q[3 - r % 4][j]) : 0;
        #1;
        for (int p = 0; p < 4; p++)
          for (int qq = 0; qq < 4; qq++)
            for (int c = 0; c < 8; c++) begin
              automatic longint e = 0, sq = 0, rowp = 0;
              for (int r = 0; r < 8; r++)
                for (int b = 0; b < 8; b++)
                  e += bp(p, ii, r) * y[r][b] * bp(qq, c, b);
              for (int b = 0; b < 8; b++) sq += bp(qq, c, b);
              for (int r = 0; r < 8; r++) rowp += (bp(p, ii, r) != 0);
              if (sq != 0)
                check(longint'(t[p][qq][c]) * sq == e,
                      $sformatf("i=%0d p=%0d q=%0d c=%0d: %0d want %0d", ii, p, qq, c,
                                t[p][qq][c], e));
              if (rowp == 0)
                check(t[p][qq][c] == 0, $sformatf("i=%0d p=%0d: zero row not zero", ii, p));
            end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin : watchdog
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
