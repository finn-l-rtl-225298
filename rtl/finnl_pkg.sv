// finnl_pkg: constants and fixed-point helpers shared by the BiLSTM OCR
// accelerator.
//
// The network dimensions follow the OCR setup: I = 32 pixels per image column,
// H = 128 LSTM cells per direction, K = 82 output symbols (blank included),
// images up to C = 732 columns wide. The default precision is the 1/2/8
// configuration (1-bit weights, 2-bit output and recurrent activations, 8-bit
// input pixels), with 8-bit activations inside the cell and 8-bit weights in
// the output layer, which is the accuracy-neutral setting the design is tuned
// for. The default parallelism is one processing element (PE = 1) with full
// SIMD width (SIMD_INPUT = I, SIMD_RECURRENT = H).
//
// Number formats. A k-bit signed activation or weight uses k-1 fraction bits
// and covers [-1, 1 - 2^-(k-1)]; a 1-bit value is a sign bit meaning -1 (0) or
// +1 (1). The logistic sigmoid output uses k fraction bits, unsigned, [0, 1).
// These are the quantizers of the training flow. The remaining formats (bias
// width, cell state width, activation table resolution, rounding) are this
// design's own choices and are listed below.
package finnl_pkg;

  // Network size (OCR dataset)
  localparam int unsigned I_PIX   = 32;   // pixels per column
  localparam int unsigned H_CELLS = 128;  // LSTM cells per direction
  localparam int unsigned K_OUT   = 82;   // output symbols incl. blank
  localparam int unsigned C_MAX   = 732;  // maximum columns per image

  // Precision (WQ/AQ/IQ, RQ = AQ)
  localparam int unsigned WQ_DEF  = 1;    // LSTM weights
  localparam int unsigned AQ_DEF  = 2;    // output activations
  localparam int unsigned IQ_DEF  = 8;    // input pixels
  localparam int unsigned RQ_DEF  = 2;    // recurrent activations
  localparam int unsigned CQ      = 8;    // in-cell activations (sigmoid/tanh)
  localparam int unsigned OWQ     = 8;    // output layer weights

  // Design choices not fixed by the training flow
  localparam int unsigned BIAS_W  = 16;   // bias words, in accumulator LSBs
  localparam int unsigned CELL_W  = 16;   // cell state width
  localparam int unsigned CELL_F  = 8;    // cell state fraction bits
  localparam int unsigned LUT_W   = 9;    // activation table index width
  localparam int unsigned LUT_F   = 5;    // index fraction bits: [-8, 8) step 1/32
  localparam int unsigned SCALE_F = 16;   // fraction bits of the gate scale factor
  localparam int unsigned OACC_W  = 24;   // output layer accumulator width
  localparam int unsigned BLANK   = 0;    // CTC blank symbol index

  // Direction of a time step
  typedef enum logic {DIR_L2R = 1'b0, DIR_R2L = 1'b1} dir_e;

  // Gate order inside a processing element
  typedef enum logic [1:0] {G_CELL = 2'd0, G_IN = 2'd1, G_FORGET = 2'd2, G_OUT = 2'd3} gate_e;

  // Fraction bits of a k-bit signed quantized value (1-bit values are +-1)
  function automatic int frac_bits(int k);
    return (k == 1) ? 0 : k - 1;
  endfunction

  // Value of a k-bit signed quantized code as an integer in units of 2^-frac_bits(k)
  function automatic logic signed [8:0] code_val(logic [7:0] code, int k);
    logic signed [7:0] t;
    if (k == 1) return code[0] ? 9'sd1 : -9'sd1;
    t = $signed(code << (8 - k)) >>> (8 - k);   // sign-extend the low k bits
    return 9'(t);
  endfunction

  // Quantize a signed value with SRC_F fraction bits to a k-bit signed code:
  // round half up, then clip to the k-bit range. k = 1 is the sign function
  // (zero maps to +1).
  function automatic logic [7:0] quant_signed(logic signed [31:0] x, int src_f, int k);
    logic signed [31:0] r;
    int sh;
    if (k == 1) return {7'd0, ~x[31]};
    sh = src_f - (k - 1);
    if (sh > 0) r = (x + (32'sd1 <<< (sh - 1))) >>> sh;
    else r = x <<< (-sh);
    if (r > (32'sd1 <<< (k - 1)) - 1) r = (32'sd1 <<< (k - 1)) - 1;
    if (r < -(32'sd1 <<< (k - 1))) r = -(32'sd1 <<< (k - 1));
    return 8'(r);
  endfunction

endpackage
