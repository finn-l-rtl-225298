// finnl_ref_pkg: reference model of the BiLSTM OCR network for the testbenches.
//
// It recomputes, with plain integer arithmetic on unpacked arrays and without
// any of the RTL's pipelining, what the hardware must produce: the quantized
// activation tables, one LSTM cell update, the hidden layer over a whole
// sequence in both directions, the output layer, the arg-max per column and
// the greedy CTC decoding. Number formats are those documented in finnl_pkg.
package finnl_ref_pkg;
  import finnl_pkg::*;

  function automatic int fb(int k);
    return (k == 1) ? 0 : k - 1;
  endfunction

  // k-bit signed code -> integer value (1-bit: 0 -> -1, 1 -> +1)
  function automatic int cv(int code, int k);
    int c;
    if (k == 1) return (code & 1) ? 1 : -1;
    c = code & ((1 << k) - 1);
    return (c >= (1 << (k - 1))) ? c - (1 << k) : c;
  endfunction

  // quantize x (src_f fraction bits) to a k-bit code (masked to k bits)
  function automatic int qs(longint x, int src_f, int k);
    longint r;
    if (k == 1) return (x >= 0) ? 1 : 0;
    r = (x + (longint'(1) << (src_f - k))) >>> (src_f - k + 1);
    if (r > (1 << (k - 1)) - 1) r = (1 << (k - 1)) - 1;
    if (r < -(1 << (k - 1))) r = -(1 << (k - 1));
    return int'(r) & ((1 << k) - 1);
  endfunction

  function automatic longint sat(longint v, int w);
    if (v > (longint'(1) << (w - 1)) - 1) return (longint'(1) << (w - 1)) - 1;
    if (v < -(longint'(1) << (w - 1))) return -(longint'(1) << (w - 1));
    return v;
  endfunction

  function automatic int rnd(real y);
    return (y >= 0.0) ? $rtoi(y + 0.5) : -$rtoi(-y + 0.5);
  endfunction

  // sigmoid table: unsigned 8-bit, 8 fraction bits; written via tanh identity
  function automatic int ref_sig(int idx);
    real x, t;
    int q;
    x = real'(idx) / 32.0;
    t = (1.0 - $exp(-x)) / (1.0 + $exp(-x));      // tanh(x/2)
    q = rnd((0.5 + 0.5 * t) * 256.0);
    return (q > 255) ? 255 : (q < 0 ? 0 : q);
  endfunction

  // tanh table: signed 8-bit, 7 fraction bits
  function automatic int ref_tanh(int idx);
    real x, t;
    int q;
    x = real'(idx) / 32.0;
    t = 2.0 / (1.0 + $exp(-2.0 * x)) - 1.0;
    q = rnd(t * 128.0);
    return (q > 127) ? 127 : (q < -128 ? -128 : q);
  endfunction

  class bilstm_ref;
    int I, H, K, WQ, IQ, AQ, RQ;
    int FA, FX, FR, FW, SH;
    longint SCALE_Q;
    // weight codes (raw k-bit codes) and biases
    int wx[];   // ((d*4+g)*H + h)*I + i
    int wr[];   // ((d*4+g)*H + h)*H + h2
    int b[];    // (d*4+g)*H + h
    int ow[];   // (k*2+d)*H + h, signed 8-bit values
    int ob[];   // k
    // results
    int yo[];   // (d*ncols + col)*H + h : AQ codes
    int part[]; // (d*ncols + col)*K + k : partial sums
    int sums[]; // col*K + k
    int lab[];  // col
    int dec[$]; // decoded labels

    function new(int I_, int H_, int K_, int WQ_, int IQ_, int AQ_, int RQ_);
      I = I_; H = H_; K = K_; WQ = WQ_; IQ = IQ_; AQ = AQ_; RQ = RQ_;
      FX = fb(IQ); FR = fb(RQ); FW = fb(WQ);
      FA = (FX > FR) ? FX : FR;
      SH = 16 + FA + FW - 5;
      SCALE_Q = (WQ == 1) ? longint'($rtoi(65536.0 / $sqrt(real'(H + I)) + 0.5)) : 65536;
      wx = new[8 * H * I];
      wr = new[8 * H * H];
      b  = new[8 * H];
      ow = new[2 * K * H];
      ob = new[K];
    endfunction

    function void randomize_weights(int bias_range);
      foreach (wx[n]) wx[n] = $urandom & ((1 << WQ) - 1);
      foreach (wr[n]) wr[n] = $urandom & ((1 << WQ) - 1);
      foreach (b[n])  b[n]  = int'($urandom % (2 * bias_range + 1)) - bias_range;
      foreach (ow[n]) ow[n] = int'($urandom % 256) - 128;
      foreach (ob[n]) ob[n] = int'($urandom % 512) - 256;
    endfunction

    function int to_idx(longint acc);
      longint p;
      p = (acc * SCALE_Q + (longint'(1) << (SH - 1))) >>> SH;
      return int'(sat(p, 9));
    endfunction

    // one cell update; acc[] holds the four pre-activations in accumulator units
    function void cell_step(int acc[4], int cprev, output int cnew, output int yoc, output int yrc);
      int g, ig, fg, og, h;
      longint fc, icg, cn, ci, y;
      g  = ref_tanh(to_idx(acc[0]));
      ig = ref_sig(to_idx(acc[1]));
      fg = ref_sig(to_idx(acc[2]));
      og = ref_sig(to_idx(acc[3]));
      fc  = (longint'(fg) * cprev + 128) >>> 8;
      icg = (longint'(ig) * g + 64) >>> 7;
      cn  = sat(fc + icg, 16);
      cnew = int'(cn);
      ci  = sat((cn + 4) >>> 3, 9);
      h   = ref_tanh(int'(ci));
      y   = longint'(og) * h;
      yoc = qs(y, 15, AQ);
      yrc = qs(y, 15, RQ);
    endfunction

    // whole network over one image: x[col*I + i] are IQ-bit pixel codes
    function void run(int ncols, int x[]);
      int yprev[], ynew[], c[];
      yo   = new[2 * ncols * H];
      part = new[2 * ncols * K];
      sums = new[ncols * K];
      lab  = new[ncols];
      dec.delete();
      for (int d = 0; d < 2; d++) begin
        yprev = new[H];
        ynew  = new[H];
        c     = new[H];
        for (int s = 0; s < ncols; s++) begin
          int col;
          col = (d == 0) ? s : ncols - 1 - s;
          for (int h = 0; h < H; h++) begin
            int acc[4];
            int cn, yoc, yrc;
            for (int g = 0; g < 4; g++) begin
              longint si, sr;
              si = 0;
              sr = 0;
              for (int i = 0; i < I; i++)
                si += cv(x[col * I + i], IQ) * cv(wx[((d * 4 + g) * H + h) * I + i], WQ);
              if (s != 0)
                for (int h2 = 0; h2 < H; h2++)
                  sr += cv(yprev[h2], RQ) * cv(wr[((d * 4 + g) * H + h) * H + h2], WQ);
              acc[g] = b[(d * 4 + g) * H + h] + int'(si << (FA - FX)) + int'(sr << (FA - FR));
            end
            cell_step(acc, (s == 0) ? 0 : c[h], cn, yoc, yrc);
            c[h] = cn;
            ynew[h] = yrc;
            yo[(d * ncols + col) * H + h] = yoc;
          end
          yprev = ynew;
          ynew  = new[H];
          // output layer partial sums for this half
          for (int k = 0; k < K; k++) begin
            int acc;
            acc = (d == 0) ? ob[k] : 0;
            for (int h = 0; h < H; h++)
              acc += ow[(k * 2 + d) * H + h] * cv(yo[(d * ncols + col) * H + h], AQ);
            part[(d * ncols + col) * K + k] = acc;
          end
        end
      end
      for (int col = 0; col < ncols; col++) begin
        int best, bk;
        for (int k = 0; k < K; k++) begin
          sums[col * K + k] = part[col * K + k] + part[(ncols + col) * K + k];
          if (k == 0 || sums[col * K + k] > best) begin
            best = sums[col * K + k];
            bk = k;
          end
        end
        lab[col] = bk;
      end
      begin
        int prev;
        prev = 0;
        for (int col = 0; col < ncols; col++) begin
          if (lab[col] != 0 && lab[col] != prev) dec.push_back(lab[col]);
          prev = lab[col];
        end
      end
    endfunction
  endclass

endpackage
