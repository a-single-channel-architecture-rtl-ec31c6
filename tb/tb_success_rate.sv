// tb_success_rate: accuracy workload. Four configurations of the full
// design run side by side: integer sets (437,181,473) / alpha = 167.2309
// and (12,5,13) / alpha = 4.5958, each with input word length L = 8 and
// L = 4. Each is fed NBLK random 8x8 blocks (uniform two's-complement
// inputs) and every fixed-point output is compared with the exact value of
// B*A*x*A^T*B^T computed in double precision. The success rate is the share
// of coefficients whose error is within e% of the exact value, for
// e = 10, 5, 1, 0.1, 0.05, 0.01, 0.005 (an exactly zero coefficient counts
// as a success only if the output is exactly zero). Every AI component is
// also checked exactly. The rates are printed next to the figures the
// source paper reports for its FPGA prototypes; since the paper's test
// images and output word length are not known, only loose properties are
// checked: at least 90% within 10%, rates never rise as the tolerance
// tightens, and the finer integer set is at least as good as the coarse one
// within 0.5 percentage points.
module tb_success_rate;
  import aidct_ref_pkg::*;

  localparam int NBLK = 150;
  localparam int NTOL = 7;
  localparam real TOL [NTOL] = '{10.0, 5.0, 1.0, 0.1, 0.05, 0.01, 0.005};

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  int succ [4][NTOL];
  int total [4];
  int done_cnt = 0;

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL: %s", msg); end
  endtask

  // configuration g: 0 = (437,L=8), 1 = (437,L=4), 2 = (12,L=8), 3 = (12,L=4)
  for (genvar g = 0; g < 4; g++) begin : cfg
    localparam int  L     = (g % 2 == 0) ? 8 : 4;
    localparam int  M1    = (g < 2) ? 437 : 12;
    localparam int  M2    = (g < 2) ? 181 : 5;
    localparam int  M3    = (g < 2) ? 473 : 13;
    localparam real ALPHA = (g < 2) ? 167.2309 : 4.5958;
    localparam int  OW    = L + 20;

    logic in_valid;
    logic signed [L-1:0] in_col [8];
    logic out_valid, ev_s, ev_q;
    logic [2:0] out_idx;
    logic signed [OW-1:0] out_x [8];
    logic signed [L+11:0] out_ai [8][4];

    aidct2d_top #(.IN_W(L), .M1(M1), .M2(M2), .M3(M3), .ALPHA(ALPHA)) dut (
      .clk, .rst_n, .in_valid, .in_col, .out_valid, .out_idx, .out_x, .out_ai,
      .ev_tbuf_swap(ev_s), .ev_q_load(ev_q)
    );

    int xin [NBLK][8][8];
    int oblk = 0, orow = 0;
    ai_t xa [8][8];
    real xr [8][8];
    longint y [8][8];

    initial begin
      in_valid = 1'b0;
      foreach (in_col[n]) in_col[n] = '0;
      for (int b = 0; b < NBLK; b++)
        for (int n = 0; n < 8; n++)
          for (int k = 0; k < 8; k++)
            xin[b][n][k] = int'($urandom_range(0, (1 << L) - 1)) - (1 << (L - 1));
      @(posedge rst_n);
      for (int b = 0; b < NBLK; b++)
        for (int k = 0; k < 8; k++) begin
          @(negedge clk);
          in_valid = 1'b1;
          for (int n = 0; n < 8; n++) in_col[n] = L'(xin[b][n][k]);
        end
      @(negedge clk);
      in_valid = 1'b0;
    end

    always @(posedge clk) begin
      if (rst_n && out_valid && oblk < NBLK) begin
        if (orow == 0) begin
          ref_y(xin[oblk], y);
          ref_x(y, xa, xr);
        end
        for (int c = 0; c < 8; c++) begin
          ai_t gai;
          real fx, err;
          for (int k = 0; k < 4; k++) gai[k] = longint'(out_ai[c][k]);
          check(gai == xa[orow][c], $sformatf("cfg %0d components", g));
          fx  = real'(out_x[c]) / 256.0;
          err = rabs(fx - xr[orow][c]);
          total[g]++;
          for (int e = 0; e < NTOL; e++)
            if ((xr[orow][c] == 0.0) ? (out_x[c] == 0)
                                     : (err <= TOL[e] / 100.0 * rabs(xr[orow][c])))
              succ[g][e]++;
        end
        orow++;
        if (orow == 8) begin
          orow = 0;
          oblk++;
          if (oblk == NBLK) done_cnt++;
        end
      end
    end
  end

  initial begin
    // success rates printed in the source paper (Table 2), same order
    real paper [4][NTOL] = '{
      '{99.99,   99.9744, 99.8856, 98.9044, 97.9,    89.8322, 80.8689},
      '{99.9867, 99.9744, 99.8856, 98.9044, 97.9,    89.8322, 80.8699},
      '{99.0356, 98.0089, 90.4433, 51.9189, 42.7911, 31.4267, 24.3556},
      '{99.0367, 98.1356, 90.4067, 51.7311, 42.5511, 31.4689, 24.5189}};
    string names [4] = '{"(437,181,473) L=8", "(437,181,473) L=4",
                         "(12,5,13)     L=8", "(12,5,13)     L=4"};
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    wait (done_cnt == 4);
    $display("success rate %% at tolerance 10 / 5 / 1 / 0.1 / 0.05 / 0.01 / 0.005 %%");
    for (int g = 0; g < 4; g++) begin
      automatic string s = "";
      automatic string sp = "";
      for (int e = 0; e < NTOL; e++) begin
        s  = {s, $sformatf(" %8.4f", 100.0 * real'(succ[g][e]) / real'(total[g]))};
        sp = {sp, $sformatf(" %8.4f", paper[g][e])};
      end
      $display("%s  here :%s", names[g], s);
      $display("%s  paper:%s", names[g], sp);
      check(100.0 * real'(succ[g][0]) / real'(total[g]) >= 90.0,
            $sformatf("%s: under 90%% within 10%%", names[g]));
      for (int e = 1; e < NTOL; e++)
        check(succ[g][e] <= succ[g][e - 1], "rate rose as the tolerance tightened");
    end
    for (int g = 0; g < 2; g++)
      for (int e = 0; e < NTOL; e++)
        check(100.0 * real'(succ[g][e]) / real'(total[g]) + 0.5 >=
              100.0 * real'(succ[g + 2][e]) / real'(total[g + 2]),
              $sformatf("finer set worse at tolerance %f", TOL[e]));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin : watchdog
    repeat (NBLK * 8 + 200) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
