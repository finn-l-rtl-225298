// final_labeling: turns the per-column symbols of an image into its label.
//
// The columns reach this block out of order (two per step, c and C-1-c, from
// the middle of the image outwards), so each symbol is first stored at its
// column's address. Once all num_cols symbols are in, the block walks the
// columns from left to right and applies the greedy CTC rule: a symbol is
// emitted when it is not the blank and differs from the symbol of the
// previous column (repeats collapse, blanks separate). One column is examined
// per cycle. The walk, the storage and the blank index (BLANK = 0) are this
// design's choices; the network only fixes that the decoder is greedy.
//
// Interface: pulse start with num_cols held before the first in_valid;
// in_* delivers (column, symbol) pairs, any order, each column once. During
// the walk l_valid pulses with each emitted symbol; done pulses one cycle after
// the last column has been examined, with count = number of symbols emitted.
module final_labeling
  import finnl_pkg::*;
#(
  parameter int unsigned K     = K_OUT,
  parameter int unsigned CMAX  = C_MAX,
  parameter int unsigned BLANK_SYM = BLANK,
  parameter int unsigned CW    = $clog2(CMAX + 1),
  parameter int unsigned KW    = $clog2(K + 1)
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          start,
  input  logic [CW-1:0] num_cols,
  input  logic          in_valid,
  input  logic [CW-1:0] in_col,
  input  logic [KW-1:0] in_label,
  output logic          l_valid,
  output logic [KW-1:0] l_label,
  output logic          done,
  output logic [CW-1:0] count
);

  typedef enum logic [1:0] {F_IDLE, F_COLLECT, F_WALK} fstate_e;
  fstate_e state;

  logic [KW-1:0] lmem [CMAX];
  logic [CW-1:0] ncols, nrecv, widx;
  logic [KW-1:0] prev, cur;

  always_ff @(posedge clk) begin
    if (in_valid) lmem[in_col] <= in_label;
  end

  assign cur = lmem[widx];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state   <= F_IDLE;
      ncols   <= '0;
      nrecv   <= '0;
      widx    <= '0;
      prev    <= KW'(BLANK_SYM);
      l_valid <= 1'b0;
      l_label <= '0;
      done    <= 1'b0;
      count   <= '0;
    end else begin
      l_valid <= 1'b0;
      done    <= 1'b0;
      case (state)
        F_IDLE: if (start) begin
          state <= F_COLLECT;
          ncols <= num_cols;
          nrecv <= '0;
        end
        F_COLLECT: begin
          if (in_valid) nrecv <= nrecv + 1'b1;
          if (nrecv == ncols) begin
            state <= F_WALK;
            widx  <= '0;
            prev  <= KW'(BLANK_SYM);
            count <= '0;
          end
        end
        F_WALK: begin
          if (cur != KW'(BLANK_SYM) && cur != prev) begin
            l_valid <= 1'b1;
            l_label <= cur;
            count   <= count + 1'b1;
          end
          prev <= cur;
          widx <= widx + 1'b1;
          if (widx == ncols - 1'b1) begin
            state <= F_IDLE;
            done  <= 1'b1;
          end
        end
        default: state <= F_IDLE;
      endcase
    end
  end

endmodule
