// act_lut: quantized activation function (logistic sigmoid or tanh) as a ROM.
//
// The LSTM gates use the logistic sigmoid, the cell input and the cell output
// use tanh, and every activation inside the cell is quantized to CQ = 8 bits
// with the training flow's quantizer: clip(round(x * 2^f) * 2^-f, min, max),
// with f = CQ and range [0, 1) after the sigmoid (unsigned code), and f = CQ-1
// and range [-1, 1) after tanh (two's complement code).
//
// How the argument reaches the table is this design's choice: the argument is
// a signed LUT_W-bit index in units of 2^-LUT_F, so the default 9-bit index
// with 5 fraction bits covers [-8, 8) in steps of 1/32; callers saturate to
// that range. The table contents are computed at elaboration from $exp, so no
// data file is needed: entry v holds round(sigmoid(v / 2^LUT_F) * 2^CQ) or
// round(tanh(v / 2^LUT_F) * 2^(CQ-1)), clipped to the code range.
//
// Interface: combinational, idx -> code. No clock.
module act_lut
  import finnl_pkg::*;
#(
  parameter bit          IS_TANH = 1'b0,
  parameter int unsigned IW      = LUT_W,
  parameter int unsigned IF      = LUT_F,
  parameter int unsigned OQ      = CQ
) (
  input  logic signed [IW-1:0] idx,
  output logic        [OQ-1:0] code
);

  localparam int unsigned N = 1 << IW;
  typedef logic [OQ-1:0] table_t [N];

  function automatic table_t build_table();
    table_t t;
    for (int e = 0; e < int'(N); e++) begin
      int  v;     // signed index value stored at entry e
      real x, y;
      int  q, qmax, qmin;
      v = (e >= int'(N / 2)) ? e - int'(N) : e;
      x = real'(v) / real'(1 << IF);
      if (IS_TANH) begin
        y    = (1.0 - $exp(-2.0 * x)) / (1.0 + $exp(-2.0 * x));
        y    = y * real'(1 << (OQ - 1));
        qmax = (1 << (OQ - 1)) - 1;
        qmin = -(1 << (OQ - 1));
      end else begin
        y    = 1.0 / (1.0 + $exp(-x));
        y    = y * real'(1 << OQ);
        qmax = (1 << OQ) - 1;
        qmin = 0;
      end
      q = $rtoi((y >= 0.0) ? y + 0.5 : y - 0.5);
      if (q > qmax) q = qmax;
      if (q < qmin) q = qmin;
      t[e] = OQ'(q);
    end
    return t;
  endfunction

  localparam table_t TABLE = build_table();

  assign code = TABLE[unsigned'(idx)];

endmodule
