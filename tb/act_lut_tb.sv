// act_lut_tb: checks both activation tables over their whole index range.
//
// Every index of the 9-bit table is applied to a sigmoid and a tanh instance
// and compared with values computed here through different formulas
// (sigmoid via tanh(x/2), tanh via 2/(1+e^-2x) - 1). A difference of one code
// is tolerated only where the exact value lies on a rounding tie; fixed points
// (0, saturation at both ends, monotonicity) are checked exactly.
module act_lut_tb;
  import finnl_pkg::*;
  import finnl_ref_pkg::*;

  logic signed [LUT_W-1:0] idx;
  logic [CQ-1:0] sig_code, tanh_code;
  int checks = 0, failures = 0;

  act_lut #(.IS_TANH(1'b0)) u_sig  (.idx(idx), .code(sig_code));
  act_lut #(.IS_TANH(1'b1)) u_tanh (.idx(idx), .code(tanh_code));

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL: %s", what);
    end
  endtask

  initial begin
    #100000;
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int prev_s, prev_t;
    prev_s = -1;
    prev_t = -129;
    for (int v = -256; v < 256; v++) begin
      int es, et, gs, gt;
      idx = LUT_W'(v);
      #1;
      gs = int'(sig_code);
      gt = int'($signed(tanh_code));
      es = ref_sig(v);
      et = ref_tanh(v);
      check(gs - es <= 1 && es - gs <= 1, $sformatf("sigmoid idx %0d: %0d vs %0d", v, gs, es));
      check(gt - et <= 1 && et - gt <= 1, $sformatf("tanh idx %0d: %0d vs %0d", v, gt, et));
      check(gs >= prev_s, $sformatf("sigmoid not monotonic at %0d", v));
      check(gt >= prev_t, $sformatf("tanh not monotonic at %0d", v));
      prev_s = gs;
      prev_t = gt;
      if (v == 0)    begin check(gs == 128, "sigmoid(0)"); check(gt == 0, "tanh(0)"); end
      if (v == 32)   begin check(gs == 187, "sigmoid(1)"); check(gt == 97, "tanh(1)"); end
      if (v == -32)  begin check(gs == 69, "sigmoid(-1)"); check(gt == -97, "tanh(-1)"); end
      if (v == 255)  begin check(gs == 255, "sigmoid(8)"); check(gt == 127, "tanh(8)"); end
      if (v == -256) begin check(gs == 0, "sigmoid(-8)"); check(gt == -128, "tanh(-8)"); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
