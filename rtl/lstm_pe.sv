// lstm_pe: one LSTM processing element (PE) of the BiLSTM hidden layer.
//
// A PE computes the cells h = j*PE + p (j = 0 .. H/PE-1) of both directions.
// It holds four gate units (cell input, input gate, forget gate, output gate),
// each with its own weight array split into a left-to-right half and a
// right-to-left half of H/PE rows each. Every cycle each gate multiplies
// SIMD_I input pixels and SIMD_R recurrent activations with one weight row
// and adds the products to its accumulator, so one dot product over the
// 1 + I + H gate inputs takes FS = I/SIMD_I = H/SIMD_R cycles ("folds").
// After the last fold the four pre-activations go through the activation
// functions and the cell update (no peepholes):
//   g = tanh(a_c), i = sig(a_i), f = sig(a_f), o = sig(a_o)
//   c_t = i*g + f*c_{t-1},  y_t = o * tanh(c_t)
// y_t is quantized twice, to AQ bits for the output layer and to RQ bits for
// the recurrence. This structure (PE replication, SIMD lanes, L2R/R2L weight
// halves, per-PE activation block) follows the LSTM cell figure of the paper.
//
// This design's own choices: the pipeline depth and register placement; the
// bias is stored per gate and cell in accumulator LSBs (BIAS_W bits); 1-bit
// weights mean -1/+1 and their constant scale 1/sqrt(H+I) is applied, as a
// SCALE_F-bit fixed-point factor, together with the conversion to the
// activation-table index; the cell state is CELL_W bits with CELL_F fraction
// bits, saturating; on the first time step (issue_init) the recurrent inputs
// and c_{t-1} are taken as zero.
//
// Interface and timing. The controller issues one (dir, j, fold) per cycle
// with issue_valid; there is no back-pressure. The fold with issue_last set
// completes the cell, and its result appears on ret_* exactly RET_LAT = 5
// cycles after that issue. A cell of a direction must retire before the same
// cell of the same direction is issued again (the controller guarantees it).
// Weights and biases are written through wr_* / bwr_* before inference.
module lstm_pe
  import finnl_pkg::*;
#(
  parameter int unsigned I      = I_PIX,
  parameter int unsigned H      = H_CELLS,
  parameter int unsigned PE     = 1,
  parameter int unsigned SIMD_I = I_PIX,
  parameter int unsigned SIMD_R = H_CELLS,
  parameter int unsigned WQ     = WQ_DEF,
  parameter int unsigned IQ     = IQ_DEF,
  parameter int unsigned AQ     = AQ_DEF,
  parameter int unsigned RQ     = RQ_DEF,
  // derived
  parameter int unsigned NJ     = H / PE,
  parameter int unsigned FS     = I / SIMD_I,
  parameter int unsigned ROW_W  = (SIMD_I + SIMD_R) * WQ,
  parameter int unsigned WDEPTH = 2 * NJ * FS
) (
  input  logic                        clk,
  input  logic                        rst_n,
  // issue
  input  logic                        issue_valid,
  input  dir_e                        issue_dir,
  input  logic [$clog2(NJ+1)-1:0]     issue_j,
  input  logic [$clog2(FS+1)-1:0]     issue_f,
  input  logic                        issue_first,
  input  logic                        issue_last,
  input  logic                        issue_init,
  input  logic [SIMD_I*IQ-1:0]        x_lanes,
  input  logic [SIMD_R*RQ-1:0]        r_lanes,
  // weight rows: address = (dir*NJ + j)*FS + fold; row = {recurrent lanes, input lanes}
  input  logic                        wr_en,
  input  gate_e                       wr_gate,
  input  logic [$clog2(WDEPTH)-1:0]   wr_addr,
  input  logic [ROW_W-1:0]            wr_data,
  // biases: address = dir*NJ + j
  input  logic                        bwr_en,
  input  gate_e                       bwr_gate,
  input  logic [$clog2(2*NJ)-1:0]     bwr_addr,
  input  logic signed [BIAS_W-1:0]    bwr_data,
  // retire
  output logic                        ret_valid,
  output dir_e                        ret_dir,
  output logic [$clog2(NJ+1)-1:0]     ret_j,
  output logic [AQ-1:0]               ret_y_out,
  output logic [RQ-1:0]               ret_y_rec
);

  localparam int unsigned FX = frac_bits(IQ);
  localparam int unsigned FR = frac_bits(RQ);
  localparam int unsigned FW = frac_bits(WQ);
  localparam int unsigned FA = (FX > FR) ? FX : FR;   // common activation fraction
  localparam int unsigned SH = SCALE_F + FA + FW - LUT_F;
  localparam longint SCALE_Q = (WQ == 1)
      ? longint'($rtoi(real'(1 << SCALE_F) / $sqrt(real'(H + I)) + 0.5))
      : longint'(1) << SCALE_F;
  localparam int unsigned JW = $clog2(NJ+1);

  initial begin
    assert (I % SIMD_I == 0 && H % SIMD_R == 0 && I / SIMD_I == H / SIMD_R)
      else $error("lstm_pe: I/SIMD_I must equal H/SIMD_R");
    assert (H % PE == 0) else $error("lstm_pe: PE must divide H");
  end

  // ------------------------------------------------------------------ arrays
  logic [ROW_W-1:0]        wmem [4][WDEPTH];
  logic signed [BIAS_W-1:0] bmem [4][2*NJ];
  logic signed [CELL_W-1:0] cmem [2*NJ];

  always_ff @(posedge clk) begin
    if (wr_en)  wmem[wr_gate][wr_addr]   <= wr_data;
    if (bwr_en) bmem[bwr_gate][bwr_addr] <= bwr_data;
  end

  // ------------------------------------------------------------ stage 1: read
  logic                 s1_v, s1_first, s1_last, s1_init;
  dir_e                 s1_dir;
  logic [JW-1:0]        s1_j;
  logic [ROW_W-1:0]     s1_w [4];
  logic signed [BIAS_W-1:0] s1_b [4];
  logic [SIMD_I*IQ-1:0] s1_x;
  logic [SIMD_R*RQ-1:0] s1_r;

  logic [$clog2(WDEPTH)-1:0] rd_addr;
  logic [$clog2(2*NJ)-1:0]   rd_baddr;
  assign rd_addr  = $clog2(WDEPTH)'((32'(issue_dir) * NJ + 32'(issue_j)) * FS + 32'(issue_f));
  assign rd_baddr = $clog2(2*NJ)'(32'(issue_dir) * NJ + 32'(issue_j));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) s1_v <= 1'b0;
    else        s1_v <= issue_valid;
  end

  always_ff @(posedge clk) begin
    s1_first <= issue_first;
    s1_last  <= issue_last;
    s1_init  <= issue_init;
    s1_dir   <= issue_dir;
    s1_j     <= issue_j;
    s1_x     <= x_lanes;
    s1_r     <= r_lanes;
    for (int g = 0; g < 4; g++) begin
      s1_w[g] <= wmem[g][rd_addr];
      s1_b[g] <= bmem[g][rd_baddr];
    end
  end

  // --------------------------------------------------- stage 1: dot products
  logic signed [31:0] dot   [4];
  logic signed [31:0] acc   [4];
  logic signed [31:0] acc_n [4];

  always_comb begin
    for (int g = 0; g < 4; g++) begin
      logic signed [31:0] sin, srec;
      sin  = '0;
      srec = '0;
      for (int l = 0; l < int'(SIMD_I); l++)
        sin += 32'(code_val(8'(s1_x[l*IQ +: IQ]), IQ)) *
               32'(code_val(8'(s1_w[g][l*WQ +: WQ]), WQ));
      for (int l = 0; l < int'(SIMD_R); l++)
        srec += 32'(code_val(8'(s1_r[l*RQ +: RQ]), RQ)) *
                32'(code_val(8'(s1_w[g][(SIMD_I + l)*WQ +: WQ]), WQ));
      if (s1_init) srec = '0;
      dot[g]   = (sin <<< (FA - FX)) + (srec <<< (FA - FR));
      acc_n[g] = (s1_first ? 32'(s1_b[g]) : acc[g]) + dot[g];
    end
  end

  always_ff @(posedge clk) begin
    if (s1_v)
      for (int g = 0; g < 4; g++) acc[g] <= acc_n[g];
  end

  // ------------------------------------- stage 2: scale, activation functions
  logic                 s2_v, s2_init;
  dir_e                 s2_dir;
  logic [JW-1:0]        s2_j;
  logic signed [31:0]   s2_a [4];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) s2_v <= 1'b0;
    else        s2_v <= s1_v && s1_last;
  end

  always_ff @(posedge clk) begin
    if (s1_v && s1_last) begin
      s2_init <= s1_init;
      s2_dir  <= s1_dir;
      s2_j    <= s1_j;
      for (int g = 0; g < 4; g++) s2_a[g] <= acc_n[g];
    end
  end

  // accumulator -> activation table index: round(acc * scale * 2^LUT_F), saturated
  function automatic logic signed [LUT_W-1:0] to_index(logic signed [31:0] a);
    longint p;
    p = (longint'(a) * SCALE_Q + (longint'(1) <<< (SH - 1))) >>> SH;
    if (p > (longint'(1) <<< (LUT_W - 1)) - 1) p = (longint'(1) <<< (LUT_W - 1)) - 1;
    if (p < -(longint'(1) <<< (LUT_W - 1)))    p = -(longint'(1) <<< (LUT_W - 1));
    return LUT_W'(p);
  endfunction

  logic signed [LUT_W-1:0] idx [4];
  logic [CQ-1:0]           act [4];
  always_comb for (int g = 0; g < 4; g++) idx[g] = to_index(s2_a[g]);

  act_lut #(.IS_TANH(1'b1)) u_tanh_g (.idx(idx[G_CELL]),   .code(act[G_CELL]));
  act_lut #(.IS_TANH(1'b0)) u_sig_i  (.idx(idx[G_IN]),     .code(act[G_IN]));
  act_lut #(.IS_TANH(1'b0)) u_sig_f  (.idx(idx[G_FORGET]), .code(act[G_FORGET]));
  act_lut #(.IS_TANH(1'b0)) u_sig_o  (.idx(idx[G_OUT]),    .code(act[G_OUT]));

  logic                     s3_v;
  dir_e                     s3_dir;
  logic [JW-1:0]            s3_j;
  logic signed [CQ-1:0]     s3_g;
  logic [CQ-1:0]            s3_i, s3_f, s3_o;
  logic signed [CELL_W-1:0] s3_c;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) s3_v <= 1'b0;
    else        s3_v <= s2_v;
  end

  always_ff @(posedge clk) begin
    if (s2_v) begin
      s3_dir <= s2_dir;
      s3_j   <= s2_j;
      s3_g   <= act[G_CELL];
      s3_i   <= act[G_IN];
      s3_f   <= act[G_FORGET];
      s3_o   <= act[G_OUT];
      s3_c   <= s2_init ? '0 : cmem[32'(s2_dir) * NJ + 32'(s2_j)];
    end
  end

  // --------------------------------------------------- stage 3: cell update
  logic signed [31:0]       fc, ig, cn;
  logic signed [CELL_W-1:0] c_new;
  logic signed [LUT_W-1:0]  cidx;
  logic signed [CQ-1:0]     h_code;

  always_comb begin
    fc = (32'($signed({1'b0, s3_f})) * 32'(s3_c) + (32'sd1 <<< (CQ - 1))) >>> CQ;
    ig = (32'($signed({1'b0, s3_i})) * 32'(s3_g) + (32'sd1 <<< (CQ + (CQ - 1) - CELL_F - 1)))
         >>> (CQ + (CQ - 1) - CELL_F);
    cn = fc + ig;
    if (cn > (32'sd1 <<< (CELL_W - 1)) - 1) cn = (32'sd1 <<< (CELL_W - 1)) - 1;
    if (cn < -(32'sd1 <<< (CELL_W - 1)))    cn = -(32'sd1 <<< (CELL_W - 1));
    c_new = CELL_W'(cn);
    cn = (cn + (32'sd1 <<< (CELL_F - LUT_F - 1))) >>> (CELL_F - LUT_F);
    if (cn > (32'sd1 <<< (LUT_W - 1)) - 1) cn = (32'sd1 <<< (LUT_W - 1)) - 1;
    if (cn < -(32'sd1 <<< (LUT_W - 1)))    cn = -(32'sd1 <<< (LUT_W - 1));
    cidx = LUT_W'(cn);
  end

  act_lut #(.IS_TANH(1'b1)) u_tanh_c (.idx(cidx), .code(h_code));

  always_ff @(posedge clk) begin
    if (s3_v) cmem[32'(s3_dir) * NJ + 32'(s3_j)] <= c_new;
  end

  logic                 s4_v;
  dir_e                 s4_dir;
  logic [JW-1:0]        s4_j;
  logic [CQ-1:0]        s4_o;
  logic signed [CQ-1:0] s4_h;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) s4_v <= 1'b0;
    else        s4_v <= s3_v;
  end

  always_ff @(posedge clk) begin
    if (s3_v) begin
      s4_dir <= s3_dir;
      s4_j   <= s3_j;
      s4_o   <= s3_o;
      s4_h   <= h_code;
    end
  end

  // ------------------------------------------ stage 4: output, quantization
  logic signed [31:0] yprod;
  assign yprod = 32'($signed({1'b0, s4_o})) * 32'(s4_h);   // CQ + CQ-1 fraction bits

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) ret_valid <= 1'b0;
    else        ret_valid <= s4_v;
  end

  always_ff @(posedge clk) begin
    if (s4_v) begin
      ret_dir   <= s4_dir;
      ret_j     <= s4_j;
      ret_y_out <= AQ'(quant_signed(yprod, 2 * CQ - 1, AQ));
      ret_y_rec <= RQ'(quant_signed(yprod, 2 * CQ - 1, RQ));
    end
  end

endmodule
