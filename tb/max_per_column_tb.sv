// max_per_column_tb: arg-max over random columns, including ties and negatives.
//
// Streams columns of K values (random, some columns with equal maxima, some
// all-negative), sometimes with idle cycles in between, and checks the symbol
// and column number of each result, which must come one cycle after in_last.
module max_per_column_tb;
  import finnl_pkg::*;

  localparam int unsigned TK = 7, TCMAX = 20;
  localparam int unsigned CW = $clog2(TCMAX + 1), KW = $clog2(TK + 1);

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic in_valid = 0, in_last = 0, m_valid;
  logic [CW-1:0] in_col = '0, m_col;
  logic [KW-1:0] in_k = '0, m_label;
  logic signed [OACC_W-1:0] in_val = '0;
  int checks = 0, failures = 0;

  max_per_column #(.K(TK), .CMAX(TCMAX)) dut (.*);

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
    int v [TK];
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int c = 0; c < int'(TCMAX); c++) begin
      int best, bk;
      for (int k = 0; k < int'(TK); k++) begin
        case (c % 4)
          0: v[k] = int'($urandom % 2000) - 1000;
          1: v[k] = int'($urandom % 3);            // many ties
          2: v[k] = -int'($urandom % 5000) - 1;    // all negative
          default: v[k] = (k == int'(TK) - 1) ? 100000 : int'($urandom % 100);
        endcase
      end
      best = v[0];
      bk = 0;
      for (int k = 1; k < int'(TK); k++) if (v[k] > best) begin best = v[k]; bk = k; end
      for (int k = 0; k < int'(TK); k++) begin
        in_valid = 1;
        in_col = CW'(c);
        in_k = KW'(k);
        in_last = (k == int'(TK) - 1);
        in_val = OACC_W'(v[k]);
        @(negedge clk);
        if (k < int'(TK) - 1) check(!m_valid, "early result");
      end
      in_valid = 0;
      in_last = 0;
      check(m_valid, "result after in_last");
      check(int'(m_label) == bk, $sformatf("column %0d: %0d vs %0d", c, m_label, bk));
      check(int'(m_col) == c, "column number");
      if (c % 3 == 0) @(negedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
