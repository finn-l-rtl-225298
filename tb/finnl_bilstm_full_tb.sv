// finnl_bilstm_full_tb: one complete inference at the design's default size.
//
// The top is instantiated with no parameter overrides (I = 32, H = 128,
// K = 82, C up to 732, PE = 1, full SIMD width, 1/2/8 precision). A random
// network is loaded through the configuration stream and one random image of
// the maximum width (732 columns) is classified. All intermediate streams and
// the decoded label are compared with the reference model in finnl_ref_pkg.
// At this size the output layer (K + 1 cycles per vector) keeps up with the
// hidden layer (H/PE * FS + 1 = 129 cycles per direction-step), so the hidden
// layer must run without a single stall: 2 * 129 cycles per column plus the
// pipeline latency.
module finnl_bilstm_full_tb;
  import finnl_pkg::*;
  import finnl_ref_pkg::*;

  localparam int unsigned TI = I_PIX, TH = H_CELLS, TK = K_OUT, TCMAX = C_MAX, TPE = 1;
  localparam int unsigned TSI = I_PIX, TSR = H_CELLS;
  localparam int unsigned TWQ = WQ_DEF, TAQ = AQ_DEF, TIQ = IQ_DEF, TRQ = RQ_DEF;
  localparam int unsigned NIMG = 1;
  localparam int          NCOLS [NIMG] = '{732};
  localparam int unsigned WATCHDOG = 400000;

  localparam int unsigned NJ = TH / TPE, FS = TI / TSI;
  localparam int unsigned WDEPTH = 2 * NJ * FS;
  localparam int unsigned ROWS_W = $clog2(TPE * 4 * WDEPTH + 2 * TK + 1);
  localparam int unsigned CW = $clog2(TCMAX + 1), KW = $clog2(TK + 1);

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic              cfg_valid = 1'b0;
  logic [1:0]        cfg_target = '0;
  logic [ROWS_W-1:0] cfg_row = '0;
  logic [31:0]       cfg_data = '0;
  logic              start = 1'b0;
  logic [CW-1:0]     num_cols = '0;
  logic              img_valid = 1'b0, img_ready;
  logic [TI*TIQ-1:0] img_data = '0;
  logic              label_valid, done, busy, stall_dep, stall_credit;
  logic [KW-1:0]     label;
  logic [CW-1:0]     label_count;

  finnl_bilstm_top dut (.*);

  int checks = 0, failures = 0;
  int n_dep = 0, n_credit = 0, n_r2l = 0, n_l2r = 0, n_concat = 0, n_emit = 0, n_cfg = 0;
  bilstm_ref ref_m;
  int x[];
  int ncols_cur;
  int got_labels[$];
  int hv_seen = 0, cs_seen = 0, ms_seen = 0;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL: %s", what);
    end
  endtask

  // TB inputs change on the falling edge, away from the sampling edge
  task automatic send_row(int target, int row, int nbits, logic [4095:0] bits);
    for (int w = 0; w < (nbits + 31) / 32; w++) begin
      @(negedge clk);
      cfg_valid  = 1'b1;
      cfg_target = 2'(target);
      cfg_row    = ROWS_W'(row);
      cfg_data   = bits[w*32 +: 32];
    end
    n_cfg++;
  endtask

  task automatic load_weights();
    logic [4095:0] bits;
    for (int p = 0; p < int'(TPE); p++)
      for (int g = 0; g < 4; g++)
        for (int d = 0; d < 2; d++)
          for (int j = 0; j < int'(NJ); j++) begin
            int h;
            h = j * TPE + p;
            for (int f = 0; f < int'(FS); f++) begin
              bits = '0;
              for (int l = 0; l < int'(TSI); l++)
                bits[l*TWQ +: TWQ] = TWQ'(ref_m.wx[((d*4+g)*TH + h)*TI + f*TSI + l]);
              for (int l = 0; l < int'(TSR); l++)
                bits[(TSI+l)*TWQ +: TWQ] = TWQ'(ref_m.wr[((d*4+g)*TH + h)*TH + f*TSR + l]);
              send_row(0, (p*4+g)*WDEPTH + (d*NJ + j)*FS + f, (TSI+TSR)*TWQ, bits);
            end
            bits = '0;
            bits[15:0] = 16'(ref_m.b[(d*4+g)*TH + h]);
            send_row(1, (p*4+g)*2*NJ + d*NJ + j, 16, bits);
          end
    for (int k = 0; k < int'(TK); k++) begin
      for (int d = 0; d < 2; d++) begin
        bits = '0;
        for (int h = 0; h < int'(TH); h++) bits[h*8 +: 8] = 8'(ref_m.ow[(k*2+d)*TH + h]);
        send_row(2, 2*k + d, TH*8, bits);
      end
      bits = '0;
      bits[15:0] = 16'(ref_m.ob[k]);
      send_row(3, k, 16, bits);
    end
    @(negedge clk);
    cfg_valid = 1'b0;
  endtask

  // ---------------------------------------------------------------- monitors
  always @(posedge clk) if (rst_n) begin
    if (stall_dep) n_dep++;
    if (stall_credit) n_credit++;
    if (label_valid) got_labels.push_back(int'(label));
    // hidden layer vectors
    if (dut.hv_valid && dut.hv_ready) begin
      int col, d;
      logic [TH*TAQ-1:0] vec;
      d = (dut.hv_dir == DIR_R2L) ? 1 : 0;
      col = int'(dut.hv_col);
      if (d == 0) n_l2r++; else n_r2l++;
      vec = dut.hv_vec;
      for (int h = 0; h < int'(TH); h++) begin
        int got, exp_v;
        got = int'(vec[h*TAQ +: TAQ]);
        exp_v = ref_m.yo[(d*ncols_cur + col)*TH + h];
        check(got == exp_v, $sformatf("hidden y dir %0d col %0d h %0d: %0d vs %0d", d, col, h, got, exp_v));
      end
      hv_seen++;
    end
    if (dut.o_valid) begin
      int d, col, k, got, exp_v;
      d = (dut.o_dir == DIR_R2L) ? 1 : 0;
      col = int'(dut.o_col);
      k = int'(dut.o_k);
      got = int'(dut.o_val);
      exp_v = ref_m.part[(d*ncols_cur + col)*TK + k];
      check(got == exp_v, $sformatf("partial dir %0d col %0d k %0d: %0d vs %0d", d, col, k, got, exp_v));
    end
    if (dut.c_valid) begin
      int col, k, got, exp_v;
      col = int'(dut.c_col);
      k = int'(dut.c_k);
      got = int'(dut.c_val);
      exp_v = ref_m.sums[col*TK + k];
      check(got == exp_v, $sformatf("sum col %0d k %0d: %0d vs %0d", col, k, got, exp_v));
      if (dut.c_last) n_concat++;
      cs_seen++;
    end
    if (dut.m_valid) begin
      int col, got, exp_v;
      col = int'(dut.m_col);
      got = int'(dut.m_label);
      exp_v = ref_m.lab[col];
      check(got == exp_v, $sformatf("argmax col %0d: %0d vs %0d", col, got, exp_v));
      ms_seen++;
    end
  end

  initial begin
    repeat (WATCHDOG) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int t0, t1, hl_cycles, nominal;
    ref_m = new(TI, TH, TK, TWQ, TIQ, TAQ, TRQ);
    ref_m.randomize_weights(300);
    repeat (3) @(posedge clk);
    rst_n <= 1'b1;
    @(posedge clk);
    load_weights();
    repeat (3) @(posedge clk);

    for (int im = 0; im < int'(NIMG); im++) begin
      ncols_cur = NCOLS[im];
      x = new[ncols_cur * TI];
      foreach (x[n]) x[n] = $urandom & ((1 << TIQ) - 1);
      ref_m.run(ncols_cur, x);
      got_labels.delete();
      hv_seen = 0; cs_seen = 0; ms_seen = 0;

      @(negedge clk);
      start    = 1'b1;
      num_cols = CW'(ncols_cur);
      @(negedge clk);
      start = 1'b0;
      for (int c = 0; c < ncols_cur; c++) begin
        while (!img_ready) @(negedge clk);
        img_valid = 1'b1;
        for (int i = 0; i < int'(TI); i++) img_data[i*TIQ +: TIQ] = TIQ'(x[c*TI + i]);
        @(negedge clk);
      end
      img_valid = 1'b0;
      while (!dut.u_hidden.busy) @(posedge clk);
      t0 = $time / 10;
      while (dut.u_hidden.busy) @(posedge clk);
      t1 = $time / 10;
      hl_cycles = t1 - t0;
      nominal = ncols_cur * 2 * (NJ * FS + 1);
      check(hl_cycles >= nominal, $sformatf("hidden layer faster than possible: %0d < %0d", hl_cycles, nominal));
      check(hl_cycles <= nominal + 10, $sformatf("hidden layer slower than stall-free: %0d", hl_cycles));
      $display("image %0d: %0d columns, hidden layer %0d cycles (stall-free %0d)", im, ncols_cur, hl_cycles, nominal);
      while (!done) @(posedge clk);
      check(hv_seen == 2 * ncols_cur, "number of hidden vectors");
      check(cs_seen == ncols_cur * int'(TK), "number of column sums");
      check(ms_seen == ncols_cur, "number of column symbols");
      check(int'(label_count) == ref_m.dec.size(), "label count");
      @(posedge clk);
      check(got_labels.size() == ref_m.dec.size(), "labels received");
      n_emit += got_labels.size();
      foreach (got_labels[n])
        if (n < ref_m.dec.size()) check(got_labels[n] == ref_m.dec[n], $sformatf("label %0d", n));
      repeat (5) @(posedge clk);
    end

    $display("mechanisms: cfg_rows=%0d l2r=%0d r2l=%0d dep_stall=%0d credit_stall=%0d concat_cols=%0d labels=%0d",
             n_cfg, n_l2r, n_r2l, n_dep, n_credit, n_concat, n_emit);
    check(n_dep == 0 && n_credit == 0, "stall at full size");
    check(n_l2r > 0 && n_r2l > 0, "both directions processed");
    check(n_emit > 0, "no label was emitted");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
