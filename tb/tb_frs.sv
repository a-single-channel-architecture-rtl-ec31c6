// tb_frs: checks the final reconstruction step for each output column and
// for both integer sets of the paper, (437,181,473) with alpha = 167.2309
// and (12,5,13) with alpha = 4.5958. Random terms t[p][q] are applied. The
// expected AI components are formed by multiplying out
// sum_pq sign_q(c) * t[p][q] * beta_p * beta_q with the reference AI
// multiplication. The fixed-point output is compared with
// a + (m1 b + m2 c + m3 d)/alpha within 1 LSB (half an LSB of rounding plus
// the error of the 1/alpha constant, on inputs larger than the datapath
// ever produces). For the set (437,181,473) the expansion-factor value must
// lie within 1e-4 per unit of b, c, d of the exact value.
module tb_frs;
  import aidct_ref_pkg::*;
  localparam int TW = 15, F = 8, OW = TW + F + 7;

  logic signed [TW-1:0] t [4][4];
  logic signed [TW+4:0] comp_a [8][4], comp_b [8][4];
  logic signed [OW-1:0] xf_a [8], xf_b [8];

  for (genvar c = 0; c < 8; c++) begin : g
    frs #(.TW(TW), .COL(c)) u_a (.t, .comp(comp_a[c]), .x_fix(xf_a[c]));
    frs #(.TW(TW), .COL(c), .M1(12), .M2(5), .M3(13), .ALPHA(4.5958))
      u_b (.t, .comp(comp_b[c]), .x_fix(xf_b[c]));
  end

  int checks = 0, failures = 0;

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL: %s", msg); end
  endtask

  function automatic void basis(input int p, output ai_t v);
    for (int k = 0; k < 4; k++) v[k] = (k == p) ? 1 : 0;
  endfunction

  initial begin
    ai_t bpv, bqv, m, e, ga, gb;
    for (int trial = 0; trial < 300; trial++) begin
      for (int p = 0; p < 4; p++)
        for (int qq = 0; qq < 4; qq++)
          t[p][qq] = (trial == 0) ? TW'((1 << (TW - 1)) - 1) :
                     (trial == 1) ? TW'(-(1 << (TW - 1)) + 1) : TW'($urandom);
      #1;
      for (int c = 0; c < 8; c++) begin
        real ea, eb;
        for (int k = 0; k < 4; k++) e[k] = 0;
        for (int p = 0; p < 4; p++)
          for (int qq = 0; qq < 4; qq++) begin
            automatic longint sq = 0;
            for (int b = 0; b < 8; b++) begin
              ai_t v;
              bmat(c, b, v);
              sq += v[qq];
            end
            basis(p, bpv);
            basis(qq, bqv);
            ai_mul(bpv, bqv, m);
            for (int k = 0; k < 4; k++) e[k] += sq * longint'(t[p][qq]) * m[k];
          end
        for (int k = 0; k < 4; k++) begin
          ga[k] = longint'(comp_a[c][k]);
          gb[k] = longint'(comp_b[c][k]);
        end
        check(ga == e, $sformatf("col %0d components (%0d,%0d,%0d,%0d) want (%0d,%0d,%0d,%0d)",
                                 c, ga[0], ga[1], ga[2], ga[3], e[0], e[1], e[2], e[3]));
        check(gb == e, $sformatf("col %0d components, second set", c));
        ea = ef_val(e, 437, 181, 473, 167.2309);
        eb = ef_val(e, 12, 5, 13, 4.5958);
        check(rabs(real'(xf_a[c]) / 256.0 - ea) <= 1.0 / 256.0,
              $sformatf("col %0d fixed %f want %f", c, real'(xf_a[c]) / 256.0, ea));
        check(rabs(real'(xf_b[c]) / 256.0 - eb) <= 1.0 / 256.0,
              $sformatf("col %0d fixed (12,5,13) %f want %f", c, real'(xf_b[c]) / 256.0, eb));
        // expansion-factor value close to the true value for the fine set
        check(rabs(ea - ai_val(e)) <= 1e-4 * (rabs(real'(e[1])) + rabs(real'(e[2]))
                                              + rabs(real'(e[3])) + 1.0),
              $sformatf("col %0d expansion-factor error too large", c));
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
