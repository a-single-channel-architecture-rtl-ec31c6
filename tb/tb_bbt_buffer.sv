// tb_bbt_buffer: feeds rows of Y (random, with and without idle clocks) and
// checks the register transfers of the buffer: after the load that the
// fourth row of a half triggers, Ds0..Ds3 hold that row and the three
// before it (newest in Ds0), the shift registers Df1..Df3 hold the last
// three rows at every clock, Q holds for the four output clocks, and the
// sequencer presents output rows 4h..4h+3 on the four cycles after the
// load, with one load per half block.
module tb_bbt_buffer;
  localparam int W = 14;
  localparam int NROW = 8 * 24;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic in_valid;
  logic signed [W-1:0] in_row [8];
  logic signed [W-1:0] q [4][8];
  logic out_valid, load_evt;
  logic [2:0] out_idx;

  bbt_buffer #(.W(W)) dut (.*);

  int checks = 0, failures = 0, nload = 0, nbubble = 0, nout = 0;
  int rows [NROW][8];
  int nin = 0;              // rows taken so far
  int last_load = -1;       // index of the row that triggered the last load
  int seq = 4;              // output rows presented since the last load

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL: %s", msg); end
  endtask

  // reference, updated at each rising edge
  always @(posedge clk) if (rst_n) begin
    // outputs of the previous cycle
    if (out_valid) begin
      check(seq < 4, "more than four output rows per load");
      check(out_idx == 3'((last_load & ~3) % 8 + seq),
            $sformatf("out_idx %0d want %0d", out_idx, (last_load & ~3) % 8 + seq));
      for (int s = 0; s < 4; s++)
        for (int j = 0; j < 8; j++)
          check(int'(q[s][j]) == rows[last_load - s][j],
                $sformatf("Ds%0d[%0d] = %0d want %0d", s, j, q[s][j], rows[last_load - s][j]));
      seq++;
      nout++;
    end else if (last_load >= 0) check(seq == 4, "output sequence cut short");
    // shift register contents seen in this cycle
    for (int s = 1; s <= 3; s++)
      if (nin - s >= 0)
        for (int j = 0; j < 8; j++)
          check(int'(dut.df[s][j]) == rows[nin - s][j], $sformatf("Df%0d[%0d]", s, j));
    if (in_valid) begin
      check(load_evt == (nin % 4 == 3), "load on the fourth row of a half");
      if (nin % 4 == 3) begin
        last_load = nin;
        seq = 0;
        nload++;
      end
      nin++;
    end else check(!load_evt, "load without a row");
  end

  initial begin
    in_valid = 1'b0;
    foreach (in_row[j]) in_row[j] = '0;
    for (int r = 0; r < NROW; r++)
      for (int j = 0; j < 8; j++)
        rows[r][j] = int'($urandom_range(0, (1 << W) - 1)) - (1 << (W - 1));
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    for (int r = 0; r < NROW; r++) begin
      @(negedge clk);
      if (r >= 64 && r < 128 && $urandom_range(0, 2) == 0) begin
        in_valid = 1'b0;
        repeat ($urandom_range(1, 5)) begin nbubble++; @(negedge clk); end
      end
      in_valid = 1'b1;
      for (int j = 0; j < 8; j++) in_row[j] = W'(rows[r][j]);
    end
    @(negedge clk);
    in_valid = 1'b0;
    repeat (8) @(negedge clk);
    check(nload == NROW / 4, $sformatf("loads %0d", nload));
    check(nout == NROW, $sformatf("output rows %0d", nout));
    check(nbubble > 0, "no bubbles");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin : watchdog
    repeat (NROW * 6 + 100) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
