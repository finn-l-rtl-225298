// lstm_pe_tb: one processing element against the reference cell model.
//
// The PE is configured with a multi-bit precision different from the default
// (2-bit weights, 4-bit inputs, 3-bit outputs, 1-bit recurrent activations),
// PE = 2 (so it owns two cells per direction) and FS = 2 folds. Random weights
// and biases are written; then cells of both directions are issued back to
// back in rotation, with random pixels and recurrent inputs, the first use of
// each cell with issue_init set and later ones continuing from the stored cell
// state. Every result is compared with the reference model, and must appear
// exactly 5 cycles after the issue of the last fold.
module lstm_pe_tb;
  import finnl_pkg::*;
  import finnl_ref_pkg::*;

  localparam int unsigned TI = 4, TH = 4, TPE = 2, TSI = 2, TSR = 2;
  localparam int unsigned TWQ = 2, TIQ = 4, TAQ = 3, TRQ = 1;
  localparam int unsigned NJ = TH / TPE, FS = TI / TSI, WD = 2 * NJ * FS;
  localparam int unsigned ROW_W = (TSI + TSR) * TWQ;
  localparam int unsigned NTRIAL = 400;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic issue_valid = 0, issue_first = 0, issue_last = 0, issue_init = 0;
  dir_e issue_dir = DIR_L2R, ret_dir;
  logic [$clog2(NJ+1)-1:0] issue_j = '0, ret_j;
  logic [$clog2(FS+1)-1:0] issue_f = '0;
  logic [TSI*TIQ-1:0] x_lanes = '0;
  logic [TSR*TRQ-1:0] r_lanes = '0;
  logic wr_en = 0, bwr_en = 0, ret_valid;
  gate_e wr_gate = G_CELL, bwr_gate = G_CELL;
  logic [$clog2(WD)-1:0] wr_addr = '0;
  logic [ROW_W-1:0] wr_data = '0;
  logic [$clog2(2*NJ)-1:0] bwr_addr = '0;
  logic signed [BIAS_W-1:0] bwr_data = '0;
  logic [TAQ-1:0] ret_y_out;
  logic [TRQ-1:0] ret_y_rec;

  lstm_pe #(.I(TI), .H(TH), .PE(TPE), .SIMD_I(TSI), .SIMD_R(TSR),
            .WQ(TWQ), .IQ(TIQ), .AQ(TAQ), .RQ(TRQ)) dut (.*);

  int checks = 0, failures = 0, cyc = 0;
  bilstm_ref ref_m;
  int exp_q[$];   // packed: due*1000000 + dir*100000 + j*10000 + yo*100 + yr
  int cstate [2][NJ];

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL: %s", what);
    end
  endtask

  always @(posedge clk) begin
    cyc++;
    if (ret_valid) begin
      int e;
      if (exp_q.size() == 0) check(0, "unexpected result");
      else begin
        e = exp_q.pop_front();
        check(cyc == e / 1000000, $sformatf("latency: at %0d, due %0d", cyc, e / 1000000));
        check((ret_dir == DIR_R2L ? 1 : 0) == (e / 100000) % 10 && int'(ret_j) == (e / 10000) % 10, "cell tag");
        check(int'(ret_y_out) == (e / 100) % 100, $sformatf("y_out %0d vs %0d", ret_y_out, (e / 100) % 100));
        check(int'(ret_y_rec) == e % 100, $sformatf("y_rec %0d vs %0d", ret_y_rec, e % 100));
      end
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
    bit used [2][NJ];
    ref_m = new(TI, TH, 1, TWQ, TIQ, TAQ, TRQ);
    ref_m.randomize_weights(60);
    repeat (2) @(negedge clk);
    rst_n = 1;
    // configuration: this PE (p = 0) owns cells h = j * PE
    for (int g = 0; g < 4; g++)
      for (int d = 0; d < 2; d++)
        for (int j = 0; j < int'(NJ); j++) begin
          int h;
          h = j * TPE;
          for (int f = 0; f < int'(FS); f++) begin
            for (int l = 0; l < int'(TSI); l++)
              wr_data[l*TWQ +: TWQ] = TWQ'(ref_m.wx[((d*4+g)*TH + h)*TI + f*TSI + l]);
            for (int l = 0; l < int'(TSR); l++)
              wr_data[(TSI+l)*TWQ +: TWQ] = TWQ'(ref_m.wr[((d*4+g)*TH + h)*TH + f*TSR + l]);
            wr_en = 1;
            wr_gate = gate_e'(g);
            wr_addr = $clog2(WD)'((d*NJ + j)*FS + f);
            @(negedge clk);
          end
          wr_en = 0;
          bwr_en = 1;
          bwr_gate = gate_e'(g);
          bwr_addr = $clog2(2*NJ)'(d*NJ + j);
          bwr_data = BIAS_W'(ref_m.b[(d*4+g)*TH + h]);
          @(negedge clk);
          bwr_en = 0;
        end
    foreach (used[d, j]) used[d][j] = 0;
    for (int t = 0; t < int'(NTRIAL); t++) begin
      int d, j, h, x [TI], r [TH], acc [4], cn, yo, yr;
      bit init;
      d = (t / int'(NJ)) % 2;
      j = t % int'(NJ);
      h = j * TPE;
      init = !used[d][j] || ($urandom % 4 == 0);
      used[d][j] = 1;
      foreach (x[i]) x[i] = int'($urandom % (1 << TIQ));
      foreach (r[i]) r[i] = int'($urandom % (1 << TRQ));
      for (int g = 0; g < 4; g++) begin
        int si, sr;
        si = 0;
        sr = 0;
        for (int i = 0; i < int'(TI); i++) si += cv(x[i], TIQ) * cv(ref_m.wx[((d*4+g)*TH + h)*TI + i], TWQ);
        for (int i = 0; i < int'(TH); i++) sr += cv(r[i], TRQ) * cv(ref_m.wr[((d*4+g)*TH + h)*TH + i], TWQ);
        acc[g] = ref_m.b[(d*4+g)*TH + h] + (si << (ref_m.FA - ref_m.FX)) + (init ? 0 : (sr << (ref_m.FA - ref_m.FR)));
      end
      ref_m.cell_step(acc, init ? 0 : cstate[d][j], cn, yo, yr);
      cstate[d][j] = cn;
      for (int f = 0; f < int'(FS); f++) begin
        issue_valid = 1;
        issue_dir = dir_e'(d);
        issue_j = ($clog2(NJ+1))'(j);
        issue_f = ($clog2(FS+1))'(f);
        issue_first = (f == 0);
        issue_last = (f == int'(FS) - 1);
        issue_init = init;
        for (int l = 0; l < int'(TSI); l++) x_lanes[l*TIQ +: TIQ] = TIQ'(x[f*TSI + l]);
        for (int l = 0; l < int'(TSR); l++) r_lanes[l*TRQ +: TRQ] = TRQ'(r[f*TSR + l]);
        if (f == int'(FS) - 1) exp_q.push_back((cyc + 6) * 1000000 + d * 100000 + j * 10000 + yo * 100 + yr);
        @(negedge clk);
      end
      issue_valid = 0;
      if ($urandom % 5 == 0) @(negedge clk);
    end
    repeat (10) @(negedge clk);
    check(exp_q.size() == 0, "all results returned");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
