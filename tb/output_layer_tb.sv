// output_layer_tb: per-direction partial sums of the fully connected layer.
//
// Random 8-bit weights and biases are written, then vectors of AQ-bit codes
// for both directions are offered back to back (and with gaps). Every unit's
// partial sum is compared with a sum computed here; the bias must appear only
// on left-to-right halves; the unit order, the last flag, the first result three
// edges after acceptance and one vector per K+1 cycles are checked.
module output_layer_tb;
  import finnl_pkg::*;
  import finnl_ref_pkg::*;

  localparam int unsigned TH = 6, TK = 5, TAQ = 2, TCMAX = 8;
  localparam int unsigned CW = $clog2(TCMAX + 1), KW = $clog2(TK + 1);

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic in_valid = 0, in_ready, wr_en = 0, bwr_en = 0, o_valid, o_last;
  dir_e in_dir = DIR_L2R, o_dir;
  logic [CW-1:0] in_col = '0, o_col;
  logic [TH*TAQ-1:0] in_vec = '0;
  logic [$clog2(2*TK)-1:0] wr_addr = '0;
  logic [TH*OWQ-1:0] wr_data = '0;
  logic [$clog2(TK)-1:0] bwr_addr = '0;
  logic signed [BIAS_W-1:0] bwr_data = '0;
  logic [KW-1:0] o_k;
  logic signed [OACC_W-1:0] o_val;

  output_layer #(.H(TH), .K(TK), .AQ(TAQ), .CMAX(TCMAX)) dut (
    .clk, .rst_n, .in_valid, .in_ready, .in_dir, .in_col, .in_vec,
    .wr_en, .wr_addr, .wr_data, .bwr_en, .bwr_addr, .bwr_data,
    .o_valid, .o_dir, .o_col, .o_k, .o_last, .o_val);

  int checks = 0, failures = 0;
  int w [2*TK][TH];
  int bias [TK];
  int exp_q[$];   // expected values in order
  int exp_tag[$]; // {dir, col, k}
  int accepted = 0, t_acc[$], t_first[$];
  int nvec = 12;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL: %s", what);
    end
  endtask

  always @(posedge clk) if (rst_n) begin
    if (in_valid && in_ready) t_acc.push_back(int'($time / 10));
    if (o_valid) begin
      int e, tag;
      if (o_k == 0) t_first.push_back(int'($time / 10));
      e = exp_q.pop_front();
      tag = exp_tag.pop_front();
      check(int'(o_val) == e, $sformatf("value dir %0d col %0d k %0d: %0d vs %0d", o_dir, o_col, o_k, o_val, e));
      check(((o_dir == DIR_R2L) ? 1 : 0) * 10000 + int'(o_col) * 100 + int'(o_k) == tag, "tag");
      check(o_last == (int'(o_k) == int'(TK) - 1), "last flag");
    end
  end

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
    for (int r = 0; r < int'(2 * TK); r++) begin
      for (int h = 0; h < int'(TH); h++) begin
        w[r][h] = int'($urandom % 256) - 128;
        wr_data[h*OWQ +: OWQ] = OWQ'(w[r][h]);
      end
      wr_en = 1;
      wr_addr = $clog2(2*TK)'(r);
      @(negedge clk);
    end
    wr_en = 0;
    for (int k = 0; k < int'(TK); k++) begin
      bias[k] = int'($urandom % 4000) - 2000;
      bwr_en = 1;
      bwr_addr = $clog2(TK)'(k);
      bwr_data = BIAS_W'(bias[k]);
      @(negedge clk);
    end
    bwr_en = 0;
    for (int v = 0; v < nvec; v++) begin
      int d, col, y [TH];
      d = v % 2;
      col = int'($urandom % TCMAX);
      for (int h = 0; h < int'(TH); h++) begin
        y[h] = int'($urandom % 4);
        in_vec[h*TAQ +: TAQ] = TAQ'(y[h]);
      end
      for (int k = 0; k < int'(TK); k++) begin
        int e;
        e = (d == 0) ? bias[k] : 0;
        for (int h = 0; h < int'(TH); h++) e += w[2*k + d][h] * cv(y[h], TAQ);
        exp_q.push_back(e);
        exp_tag.push_back(d * 10000 + col * 100 + k);
      end
      in_valid = 1;
      in_dir = dir_e'(d);
      in_col = CW'(col);
      @(posedge clk);
      while (!in_ready) @(posedge clk);
      @(negedge clk);
      in_valid = 0;
      if (v == 5) repeat (7) @(negedge clk);
    end
    repeat (TK + 5) @(negedge clk);
    check(exp_q.size() == 0, "all results produced");
    check(t_acc.size() == nvec && t_first.size() == nvec, "vector counts");
    foreach (t_first[i]) if (i < t_acc.size()) check(t_first[i] - t_acc[i] == 3, "first result three edges after acceptance");
    for (int i = 1; i < t_acc.size(); i++) if (i != 6) check(t_acc[i] - t_acc[i-1] == int'(TK) + 1, "one vector per K+1 cycles");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
