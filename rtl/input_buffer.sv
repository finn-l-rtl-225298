// input_buffer: on-chip store for one text-line image.
//
// The image arrives column by column (I pixels of IQ bits each, pixel 0 in
// the least significant bits) on a valid/ready stream and is written to
// consecutive addresses starting at 0. Because the bidirectional layer reads
// the image from both ends (column s for left-to-right and column C-1-s for
// right-to-left), the whole image must be on chip before inference starts;
// the buffer is sized for the widest image, CMAX columns.
//
// Interface: pulse load_start with num_cols held; the buffer then accepts
// num_cols columns on in_* and pulses loaded after the last one. rd/rd_addr
// read a column; rd_data is valid the cycle after rd and holds its value
// until the next rd. Loading and reading are not meant to overlap.
// The single-image buffer (no double buffering) is this design's choice.
module input_buffer
  import finnl_pkg::*;
#(
  parameter int unsigned I    = I_PIX,
  parameter int unsigned IQ   = IQ_DEF,
  parameter int unsigned CMAX = C_MAX,
  parameter int unsigned CW   = $clog2(CMAX + 1)
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic            load_start,
  input  logic [CW-1:0]   num_cols,
  input  logic            in_valid,
  output logic            in_ready,
  input  logic [I*IQ-1:0] in_data,
  output logic            loaded,
  input  logic            rd,
  input  logic [CW-1:0]   rd_addr,
  output logic [I*IQ-1:0] rd_data
);

  logic [I*IQ-1:0] mem [CMAX];
  logic [CW-1:0]   wptr, nleft;
  logic            loading;

  assign in_ready = loading;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      loading <= 1'b0;
      wptr    <= '0;
      nleft   <= '0;
      loaded  <= 1'b0;
    end else begin
      loaded <= 1'b0;
      if (load_start) begin
        loading <= (num_cols != 0);
        wptr    <= '0;
        nleft   <= num_cols;
      end else if (loading && in_valid) begin
        wptr  <= wptr + 1'b1;
        nleft <= nleft - 1'b1;
        if (nleft == 1) begin
          loading <= 1'b0;
          loaded  <= 1'b1;
        end
      end
    end
  end

  always_ff @(posedge clk) begin
    if (loading && in_valid && !load_start) mem[wptr] <= in_data;
    if (rd) rd_data <= mem[rd_addr];
  end

endmodule
