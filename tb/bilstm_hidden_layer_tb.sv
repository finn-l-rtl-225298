// bilstm_hidden_layer_tb: the interleaved bidirectional hidden layer against
// the reference model.
//
// Size: I = 4, H = 4, PE = 4 cells in parallel (one cell per PE per direction), SIMD 2 + 2 (FS = 2 folds),
// 3-entry output queue, 1-bit weights, 8-bit pixels, 3-bit outputs and 2-bit
// recurrent values (so the two output quantizers differ). The testbench plays
// the input buffer (a column read returns the column one cycle later) and the
// output layer (out_ready high one cycle in eight in the first images, always 1 in the last).
// Every output vector is compared with the reference, each (direction, column)
// must appear exactly once, and in the order L2R col s, R2L col C-1-s. With
// out_ready held high the busy time must equal 2*(H/PE*FS + 1) cycles per
// column plus only the dependency stalls and the pipeline drain; dependency
// and credit stalls must both have happened.
module bilstm_hidden_layer_tb;
  import finnl_pkg::*;
  import finnl_ref_pkg::*;

  localparam int unsigned TI = 4, TH = 4, TPE = 4, TSI = 2, TSR = 2, TQD = 3, TCMAX = 12;
  localparam int unsigned TWQ = 1, TIQ = 8, TAQ = 3, TRQ = 2;
  localparam int unsigned NJ = TH / TPE, FS = TI / TSI, WD = 2 * NJ * FS;
  localparam int unsigned CW = $clog2(TCMAX + 1);
  localparam int unsigned NIMG = 4;
  localparam int NCOLS [NIMG] = '{5, 12, 1, 10};

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic start = 0, busy, done, col_rd;
  logic [CW-1:0] num_cols = '0, col_addr, out_col;
  logic [TI*TIQ-1:0] col_data = '0;
  logic wr_en = 0, bwr_en = 0;
  logic [$clog2(TPE+1)-1:0] wr_pe = '0, bwr_pe = '0;
  gate_e wr_gate = G_CELL, bwr_gate = G_CELL;
  logic [$clog2(WD)-1:0] wr_addr = '0;
  logic [(TSI+TSR)*TWQ-1:0] wr_data = '0;
  logic [$clog2(2*NJ)-1:0] bwr_addr = '0;
  logic signed [BIAS_W-1:0] bwr_data = '0;
  logic out_valid, out_ready = 1'b1, stall_dep, stall_credit;
  dir_e out_dir;
  logic [TH*TAQ-1:0] out_vec;

  bilstm_hidden_layer #(.I(TI), .H(TH), .PE(TPE), .SIMD_I(TSI), .SIMD_R(TSR),
                        .WQ(TWQ), .IQ(TIQ), .AQ(TAQ), .RQ(TRQ), .CMAX(TCMAX),
                        .QDEPTH(TQD)) dut (.*);

  int checks = 0, failures = 0, cyc = 0;
  int n_dep = 0, n_credit = 0, nvec = 0;
  bilstm_ref ref_m;
  int x[];
  int ncols_cur = 1;
  bit random_ready = 1;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL: %s", what);
    end
  endtask

  // input buffer model
  always @(posedge clk) begin
    cyc++;
    if (col_rd) begin
      int a;
      a = int'(col_addr);
      for (int i = 0; i < int'(TI); i++)
        col_data[i*TIQ +: TIQ] <= (a < ncols_cur) ? TIQ'(x[a*TI + i]) : '0;
    end
  end

  // output layer model and checker
  always @(negedge clk) out_ready = random_ready ? ($urandom % 8 == 0) : 1'b1;

  always @(posedge clk) if (rst_n) begin
    if (stall_dep) n_dep++;
    if (stall_credit) n_credit++;
    if (out_valid && out_ready) begin
      int d, col, s, ecol, edir;
      logic [TH*TAQ-1:0] v;
      d = (out_dir == DIR_R2L) ? 1 : 0;
      col = int'(out_col);
      v = out_vec;
      s = nvec / 2;
      edir = nvec % 2;
      ecol = (edir == 0) ? s : ncols_cur - 1 - s;
      check(d == edir && col == ecol, $sformatf("order: got dir %0d col %0d, want dir %0d col %0d", d, col, edir, ecol));
      for (int h = 0; h < int'(TH); h++) begin
        int got, want;
        got = int'(v[h*TAQ +: TAQ]);
        want = ref_m.yo[(d*ncols_cur + col)*TH + h];
        check(got == want, $sformatf("y dir %0d col %0d h %0d: %0d vs %0d", d, col, h, got, want));
      end
      nvec++;
    end
  end

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    ref_m = new(TI, TH, 1, TWQ, TIQ, TAQ, TRQ);
    ref_m.randomize_weights(300);
    x = new[TI];
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int p = 0; p < int'(TPE); p++)
      for (int g = 0; g < 4; g++)
        for (int d = 0; d < 2; d++)
          for (int j = 0; j < int'(NJ); j++) begin
            int h;
            h = j * TPE + p;
            for (int f = 0; f < int'(FS); f++) begin
              for (int l = 0; l < int'(TSI); l++)
                wr_data[l*TWQ +: TWQ] = TWQ'(ref_m.wx[((d*4+g)*TH + h)*TI + f*TSI + l]);
              for (int l = 0; l < int'(TSR); l++)
                wr_data[(TSI+l)*TWQ +: TWQ] = TWQ'(ref_m.wr[((d*4+g)*TH + h)*TH + f*TSR + l]);
              wr_en = 1;
              wr_pe = ($clog2(TPE+1))'(p);
              wr_gate = gate_e'(g);
              wr_addr = $clog2(WD)'((d*NJ + j)*FS + f);
              @(negedge clk);
            end
            wr_en = 0;
            bwr_en = 1;
            bwr_pe = ($clog2(TPE+1))'(p);
            bwr_gate = gate_e'(g);
            bwr_addr = $clog2(2*NJ)'(d*NJ + j);
            bwr_data = BIAS_W'(ref_m.b[(d*4+g)*TH + h]);
            @(negedge clk);
            bwr_en = 0;
          end
    repeat (3) @(negedge clk);
    for (int im = 0; im < int'(NIMG); im++) begin
      int t0, t1, dep0, nominal;
      random_ready = (im != int'(NIMG) - 1);
      ncols_cur = NCOLS[im];
      x = new[ncols_cur * TI];
      foreach (x[n]) x[n] = $urandom & ((1 << TIQ) - 1);
      ref_m.run(ncols_cur, x);
      nvec = 0;
      dep0 = n_dep;
      start = 1;
      num_cols = CW'(ncols_cur);
      t0 = cyc;
      @(negedge clk);
      start = 0;
      while (!done) @(negedge clk);
      t1 = cyc;
      // done marks the last vector entering the queue; let the queue drain
      while (out_valid) @(negedge clk);
      repeat (3) @(negedge clk);
      check(nvec == 2 * ncols_cur, $sformatf("vectors: %0d of %0d", nvec, 2 * ncols_cur));
      nominal = ncols_cur * 2 * (NJ * FS + 1);
      check(t1 - t0 >= nominal, $sformatf("faster than the issue rate: %0d < %0d", t1 - t0, nominal));
      if (!random_ready) begin
        // only dependency stalls and the final drain may add to the nominal time
        check(t1 - t0 <= nominal + (n_dep - dep0) + 8,
              $sformatf("cycles %0d > nominal %0d + dep stalls %0d + 8", t1 - t0, nominal, n_dep - dep0));
        $display("image %0d: %0d columns, %0d cycles, nominal %0d, dependency stalls %0d",
                 im, ncols_cur, t1 - t0, nominal, n_dep - dep0);
      end
      check(!busy, "idle after done");
    end
    $display("stalls: dependency %0d, credit %0d", n_dep, n_credit);
    check(n_dep > 0, "dependency stall never happened");
    check(n_credit > 0, "credit stall never happened");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
