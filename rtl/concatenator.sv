// concatenator: joins the two direction halves of each column.
//
// The output layer emits, for every (direction, column), K partial sums.
// Column c receives its left-to-right half at step c and its right-to-left
// half at step C-1-c, so whichever half comes first has to wait. The first
// half of a column is written to a buffer of CMAX x K partial sums and the
// column is marked as seen; when the second half arrives, each value is added
// to the buffered one and the full sum leaves on c_*. No column is complete
// before step C/2 (the first column whose halves meet is the middle one), so
// for the first half of the image this block only buffers; from then on it
// emits two columns per step, in the order the steps produce them.
//
// Interface: in_* is a stream without back-pressure (one value per cycle,
// in_last on k = K-1). The sum for an input appears on c_* one cycle later.
// clear (pulse, before an image) forgets all seen marks. Buffer organisation
// (indexed by column and unit, one-cycle read) is this design's choice.
module concatenator
  import finnl_pkg::*;
#(
  parameter int unsigned K    = K_OUT,
  parameter int unsigned CMAX = C_MAX,
  parameter int unsigned CW   = $clog2(CMAX + 1),
  parameter int unsigned KW   = $clog2(K + 1)
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     clear,
  input  logic                     in_valid,
  input  logic [CW-1:0]            in_col,
  input  logic [KW-1:0]            in_k,
  input  logic                     in_last,
  input  logic signed [OACC_W-1:0] in_val,
  output logic                     c_valid,
  output logic [CW-1:0]            c_col,
  output logic [KW-1:0]            c_k,
  output logic                     c_last,
  output logic signed [OACC_W-1:0] c_val
);

  localparam int unsigned AW = $clog2(CMAX * K);

  logic signed [OACC_W-1:0] pmem [CMAX * K];
  logic [CMAX-1:0]          seen;
  logic [AW-1:0]            addr;

  assign addr = AW'(32'(in_col) * K + 32'(in_k));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) seen <= '0;
    else if (clear) seen <= '0;
    else if (in_valid && in_last && !seen[in_col]) seen[in_col] <= 1'b1;
  end

  logic                     s_match;
  logic signed [OACC_W-1:0] s_val, s_buf;

  always_ff @(posedge clk) begin
    if (in_valid && !seen[in_col]) pmem[addr] <= in_val;
    s_buf   <= pmem[addr];
    s_val   <= in_val;
    c_col   <= in_col;
    c_k     <= in_k;
    c_last  <= in_last;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) s_match <= 1'b0;
    else        s_match <= in_valid && seen[in_col] && !clear;
  end

  assign c_valid = s_match;
  assign c_val   = s_val + s_buf;

endmodule
