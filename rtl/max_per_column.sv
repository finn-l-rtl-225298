// max_per_column: greedy symbol choice for one column.
//
// Instead of a softmax followed by a CTC layer, inference picks for every
// column the symbol with the largest output value (softmax is monotonic, so
// the arg-max is the same). The K values of a column arrive one per cycle,
// k = 0 first, marked with in_last on the final one; the index of the largest
// is emitted on m_* one cycle after in_last. On a tie the lower index wins
// (this design's choice).
//
// Interface: in_* stream without back-pressure; m_valid pulses once per column
// with the column number and the winning symbol.
module max_per_column
  import finnl_pkg::*;
#(
  parameter int unsigned K    = K_OUT,
  parameter int unsigned CMAX = C_MAX,
  parameter int unsigned CW   = $clog2(CMAX + 1),
  parameter int unsigned KW   = $clog2(K + 1)
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     in_valid,
  input  logic [CW-1:0]            in_col,
  input  logic [KW-1:0]            in_k,
  input  logic                     in_last,
  input  logic signed [OACC_W-1:0] in_val,
  output logic                     m_valid,
  output logic [CW-1:0]            m_col,
  output logic [KW-1:0]            m_label
);

  logic signed [OACC_W-1:0] best_val;
  logic [KW-1:0]            best_k;
  logic                     take;

  // the first value of a column always replaces the running maximum
  assign take = (in_k == '0) || (in_val > best_val);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      m_valid  <= 1'b0;
      best_val <= '0;
      best_k   <= '0;
      m_col    <= '0;
      m_label  <= '0;
    end else begin
      m_valid <= 1'b0;
      if (in_valid) begin
        if (take) begin
          best_val <= in_val;
          best_k   <= in_k;
        end
        if (in_last) begin
          m_valid <= 1'b1;
          m_col   <= in_col;
          m_label <= take ? in_k : best_k;
        end
      end
    end
  end

endmodule
