// tb_ai_dct1d: checks the 1-D AI core against y = A*x computed from the
// matrix A (reference package), for random and full-scale inputs, at the
// input width L = 8 and at the row-transform width L+3 = 11. Checks the
// one-clock latency and that the output holds while in_valid is low.
module tb_ai_dct1d;
  import aidct_ref_pkg::*;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic in_valid;
  logic signed [7:0]  xa [8];
  logic signed [10:0] xb [8];
  logic va, vb;
  logic signed [10:0] ya [8];
  logic signed [13:0] yb [8];

  ai_dct1d #(.IN_W(8))  dut_a (.clk, .rst_n, .in_valid, .x(xa), .out_valid(va), .y(ya));
  ai_dct1d #(.IN_W(11)) dut_b (.clk, .rst_n, .in_valid, .x(xb), .out_valid(vb), .y(yb));

  int checks = 0, failures = 0;
  int ea [8], eb [8];

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL: %s", msg); end
  endtask

  function automatic int pick(input int w, input int mode, input int n, input int r);
    int mx = (1 << (w - 1)) - 1, mn = -(1 << (w - 1));
    case (mode)
      0: return int'($urandom_range(0, (1 << w) - 1)) + mn;
      1: return mx;
      2: return mn;
      default: return (amat(r, n) >= 0) ? mx : mn;   // worst case for row r
    endcase
  endfunction

  initial begin
    in_valid = 1'b0;
    foreach (xa[n]) begin xa[n] = '0; xb[n] = '0; end
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    for (int t = 0; t < 400; t++) begin
      automatic int mode = (t < 300) ? 0 : (t % 4);
      @(negedge clk);
      in_valid = 1'b1;
      for (int n = 0; n < 8; n++) begin
        xa[n] = 8'(pick(8, mode, n, t % 8));
        xb[n] = 11'(pick(11, mode, n, (t + 3) % 8));
      end
      for (int r = 0; r < 8; r++) begin
        ea[r] = 0; eb[r] = 0;
        for (int n = 0; n < 8; n++) begin
          ea[r] += amat(r, n) * int'(xa[n]);
          eb[r] += amat(r, n) * int'(xb[n]);
        end
      end
      @(negedge clk);   // one clock later
      check(va && vb, "out_valid one clock after in_valid");
      for (int r = 0; r < 8; r++) begin
        check(int'(ya[r]) == ea[r], $sformatf("L=8 y[%0d]=%0d want %0d", r, ya[r], ea[r]));
        check(int'(yb[r]) == eb[r], $sformatf("L=11 y[%0d]=%0d want %0d", r, yb[r], eb[r]));
      end
      // idle clock: output must hold
      in_valid = 1'b0;
      for (int n = 0; n < 8; n++) begin xa[n] = 8'(t); xb[n] = 11'(t); end
      @(negedge clk);
      check(!va, "out_valid low after idle clock");
      for (int r = 0; r < 8; r++) check(int'(ya[r]) == ea[r], "output holds when idle");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin : watchdog
    repeat (5000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
