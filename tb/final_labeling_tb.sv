// final_labeling_tb: greedy CTC decoding of column symbols delivered out of order.
//
// For several images, a symbol sequence with runs of repeated symbols and
// blanks is generated, delivered in the order the network produces columns
// (from the middle outwards: c, C-1-c pairs, and also fully random order), and
// the emitted labels and their count are compared with the collapse-repeats,
// drop-blanks rule computed here. The walk must take one cycle per column.
module final_labeling_tb;
  import finnl_pkg::*;

  localparam int unsigned TK = 6, TCMAX = 24;
  localparam int unsigned CW = $clog2(TCMAX + 1), KW = $clog2(TK + 1);

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic start = 0, in_valid = 0, l_valid, done;
  logic [CW-1:0] num_cols = '0, in_col = '0, count;
  logic [KW-1:0] in_label = '0, l_label;
  int checks = 0, failures = 0;
  int got[$];

  final_labeling #(.K(TK), .CMAX(TCMAX)) dut (.*);

  always @(posedge clk) if (l_valid) got.push_back(int'(l_label));

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
    for (int im = 0; im < 8; im++) begin
      int n, lab[], ord[], exp_l[$], prev, t0, t1;
      n = (im == 0) ? 1 : int'($urandom % TCMAX) + 1;
      lab = new[n];
      ord = new[n];
      foreach (lab[c]) lab[c] = ($urandom % 3 == 0) ? 0 : int'($urandom % 3) + 1;
      prev = 0;
      exp_l.delete();
      foreach (lab[c]) begin
        if (lab[c] != 0 && lab[c] != prev) exp_l.push_back(lab[c]);
        prev = lab[c];
      end
      // delivery order
      if (im % 2 == 0) begin
        int m;
        m = 0;
        for (int s = n / 2; s < n; s++) begin
          ord[m++] = s;
          if (n - 1 - s != s) ord[m++] = n - 1 - s;
        end
      end else begin
        foreach (ord[c]) ord[c] = c;
        ord.shuffle();
      end
      got.delete();
      @(negedge clk);
      start = 1;
      num_cols = CW'(n);
      @(negedge clk);
      start = 0;
      foreach (ord[m]) begin
        in_valid = 1;
        in_col = CW'(ord[m]);
        in_label = KW'(lab[ord[m]]);
        @(negedge clk);
        in_valid = 0;
        if (m % 3 == 1) @(negedge clk);
      end
      t0 = $time / 10;
      while (!done) @(negedge clk);
      t1 = $time / 10;
      @(negedge clk);   // the monitor records the last label one edge later
      check(t1 - t0 <= n + 3 && t1 - t0 >= n, $sformatf("walk took %0d cycles for %0d columns", t1 - t0, n));
      check(int'(count) == exp_l.size(), $sformatf("count %0d vs %0d", count, exp_l.size()));
      check(got.size() == exp_l.size(), $sformatf("number of labels %0d vs %0d (n=%0d)", got.size(), exp_l.size(), n));
      foreach (exp_l[i]) if (i < got.size()) check(got[i] == exp_l[i], $sformatf("label %0d", i));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
