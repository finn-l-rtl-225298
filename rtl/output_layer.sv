// output_layer: the fully connected output layer of the network, with the
// training-time batch normalization already folded into its weights and bias.
//
// Each unit k (K units, one per alphabet symbol including the blank) sees the
// 2H concatenated outputs of the two directions for one column. Because the
// hidden layer delivers the two halves of a column at different times (the
// left-to-right half of column c at step c, the right-to-left half at step
// C-1-c), this layer works on one half at a time and emits per-direction
// partial sums p_dir[k] = sum_h W[k][dir*H + h] * y_dir[h] (+ bias[k] on the
// left-to-right half). The concatenator adds the two halves later.
//
// Datapath: one unit per cycle, all H products of a half in parallel
// (this parallelism is this design's choice; it keeps up with the hidden layer
// at its default full-SIMD setting: K = 82 cycles against H = 128).
// Weights are OWQ = 8-bit signed with 7 fraction bits; y codes are AQ-bit
// signed; partial sums are OACC_W-bit integers with 7 + frac(AQ) fraction bits;
// biases are BIAS_W-bit in the same units.
//
// Interface: in_* valid/ready (one H x AQ vector per transfer; ready is low
// while a vector is being processed). The results leave on o_* two cycles
// after each unit is started, one unit per cycle in order k = 0 .. K-1, with
// o_last on k = K-1; there is no back-pressure on o_*.
// Weights: wr_addr = 2*k + dir, one row of H weights (h = 0 in the least
// significant bits); biases: bwr_addr = k.
module output_layer
  import finnl_pkg::*;
#(
  parameter int unsigned H    = H_CELLS,
  parameter int unsigned K    = K_OUT,
  parameter int unsigned AQ   = AQ_DEF,
  parameter int unsigned CMAX = C_MAX,
  parameter int unsigned CW   = $clog2(CMAX + 1),
  parameter int unsigned KW   = $clog2(K + 1)
) (
  input  logic                        clk,
  input  logic                        rst_n,
  input  logic                        in_valid,
  output logic                        in_ready,
  input  dir_e                        in_dir,
  input  logic [CW-1:0]               in_col,
  input  logic [H*AQ-1:0]             in_vec,
  input  logic                        wr_en,
  input  logic [$clog2(2*K)-1:0]      wr_addr,
  input  logic [H*OWQ-1:0]            wr_data,
  input  logic                        bwr_en,
  input  logic [$clog2(K)-1:0]        bwr_addr,
  input  logic signed [BIAS_W-1:0]    bwr_data,
  output logic                        o_valid,
  output dir_e                        o_dir,
  output logic [CW-1:0]               o_col,
  output logic [KW-1:0]               o_k,
  output logic                        o_last,
  output logic signed [OACC_W-1:0]    o_val
);

  logic [H*OWQ-1:0]         wmem [2*K];
  logic signed [BIAS_W-1:0] bmem [K];

  always_ff @(posedge clk) begin
    if (wr_en)  wmem[wr_addr]  <= wr_data;
    if (bwr_en) bmem[bwr_addr] <= bwr_data;
  end

  // held input vector
  logic            busy;
  dir_e            v_dir;
  logic [CW-1:0]   v_col;
  logic [H*AQ-1:0] v_vec;
  logic [KW-1:0]   k;

  assign in_ready = !busy;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy <= 1'b0;
      k    <= '0;
    end else if (!busy) begin
      if (in_valid) begin
        busy <= 1'b1;
        k    <= '0;
      end
    end else begin
      k <= k + 1'b1;
      if (k == KW'(K - 1)) busy <= 1'b0;
    end
  end

  always_ff @(posedge clk) begin
    if (!busy && in_valid) begin
      v_dir <= in_dir;
      v_col <= in_col;
      v_vec <= in_vec;
    end
  end

  // stage 1: weight row and bias read
  logic                     s1_v, s1_last;
  dir_e                     s1_dir;
  logic [CW-1:0]            s1_col;
  logic [KW-1:0]            s1_k;
  logic [H*OWQ-1:0]         s1_w;
  logic signed [BIAS_W-1:0] s1_b;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) s1_v <= 1'b0;
    else        s1_v <= busy;
  end

  always_ff @(posedge clk) begin
    s1_last <= (k == KW'(K - 1));
    s1_dir  <= v_dir;
    s1_col  <= v_col;
    s1_k    <= k;
    s1_w    <= wmem[$clog2(2*K)'(2 * 32'(k) + 32'(v_dir))];
    s1_b    <= (v_dir == DIR_L2R) ? bmem[$clog2(K)'(k)] : '0;
  end

  // the vector register may be reloaded while the last unit is in stage 1
  logic [H*AQ-1:0] v_vec_q;
  always_ff @(posedge clk) if (busy) v_vec_q <= v_vec;

  // stage 2: dot product over H
  logic signed [31:0] sum;
  always_comb begin
    sum = 32'(s1_b);
    for (int h = 0; h < int'(H); h++)
      sum += 32'($signed(s1_w[h*OWQ +: OWQ])) * 32'(code_val(8'(v_vec_q[h*AQ +: AQ]), AQ));
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) o_valid <= 1'b0;
    else        o_valid <= s1_v;
  end

  always_ff @(posedge clk) begin
    o_dir  <= s1_dir;
    o_col  <= s1_col;
    o_k    <= s1_k;
    o_last <= s1_last;
    o_val  <= OACC_W'(sum);
  end

endmodule
