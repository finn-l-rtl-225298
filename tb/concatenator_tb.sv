// concatenator_tb: joins partial sums of two directions arriving in step order.
//
// Partial sums are streamed exactly as the output layer produces them: for
// step s, the left-to-right half of column s, then the right-to-left half of
// column C-1-s. Each column must come out once, on its second half, with the
// sum of both halves, one cycle after the input. Odd and even widths are used,
// and the clear input is exercised between images.
module concatenator_tb;
  import finnl_pkg::*;

  localparam int unsigned TK = 3, TCMAX = 9;
  localparam int unsigned CW = $clog2(TCMAX + 1), KW = $clog2(TK + 1);

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic clear = 0, in_valid = 0, in_last = 0, c_valid, c_last;
  logic [CW-1:0] in_col = '0, c_col;
  logic [KW-1:0] in_k = '0, c_k;
  logic signed [OACC_W-1:0] in_val = '0, c_val;
  int checks = 0, failures = 0;

  concatenator #(.K(TK), .CMAX(TCMAX)) dut (.*);

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL: %s", what);
    end
  endtask

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int im = 0; im < 4; im++) begin
      int n, p[2][TCMAX][TK], nout, outs_before_half;
      n = (im % 2 == 0) ? int'(TCMAX) : int'(TCMAX) - 1;
      for (int d = 0; d < 2; d++) for (int c = 0; c < n; c++) for (int k = 0; k < int'(TK); k++)
        p[d][c][k] = int'($urandom % 200000) - 100000;
      @(negedge clk);
      clear = 1;
      @(negedge clk);
      clear = 0;
      nout = 0;
      outs_before_half = 0;
      for (int s = 0; s < n; s++)
        for (int d = 0; d < 2; d++) begin
          int col;
          col = (d == 0) ? s : n - 1 - s;
          for (int k = 0; k < int'(TK); k++) begin
            bit expect_out;
            expect_out = (d == 0) ? (n - 1 - s < s) : (n - 1 - s <= s);
            in_valid = 1;
            in_col = CW'(col);
            in_k = KW'(k);
            in_last = (k == int'(TK) - 1);
            in_val = OACC_W'(p[d][col][k]);
            @(negedge clk);
            in_valid = 0;
            check(c_valid == expect_out, $sformatf("output presence step %0d dir %0d col %0d", s, d, col));
            if (c_valid) begin
              nout++;
              if (s < (n - 1) / 2) outs_before_half++;
              check(int'(c_col) == col && int'(c_k) == k, "column/unit tag");
              check(c_last == (k == int'(TK) - 1), "last flag");
              check(int'(c_val) == p[0][col][k] + p[1][col][k], $sformatf("sum col %0d k %0d", col, k));
            end
          end
          if (s % 2 == 1) @(negedge clk);
        end
      check(nout == n * int'(TK), $sformatf("outputs %0d", nout));
      check(outs_before_half == 0, "output before the middle column");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
