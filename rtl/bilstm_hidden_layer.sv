// bilstm_hidden_layer: the bidirectional LSTM hidden layer with one shared
// datapath for both directions.
//
// Instead of duplicating the hidden layer for the two directions, one array of
// PE processing elements (lstm_pe) alternates between them: time step s is
// processed as "left-to-right on column s", then "right-to-left on column
// C-1-s", then left-to-right on column s+1, and so on. Work of one direction
// fills the pipeline while the other direction's recurrent result is still
// being produced, which is the point of interleaving. Each direction-step
// issues H/PE cells x FS folds, one (cell, fold) per cycle, after one cycle
// that reads the image column from the input buffer; a column therefore takes
// 2 * (H/PE * FS + 1) cycles when nothing stalls.
//
// Recurrent state: y_{t-1} of each direction is kept as RQ-bit codes in a
// ping-pong buffer (one bank read by step s, the other written by it). The
// AQ-bit outputs of the PEs are gathered ("output multiplexer") into one
// H x AQ vector per direction-step and queued for the output layer.
//
// Stalls (this design's choice of flow control, the paper does not describe
// one): a direction-step starts only when (1) every cell of the previous step
// of the same direction has retired, because its y is read now ("dependency
// stall"), and (2) the output queue has a free slot reserved for its vector
// ("credit stall"). The pipeline itself never stops. On the first step the
// recurrent inputs and the cell state are taken as zero.
//
// Interface: pulse start with num_cols (1 .. CMAX) held; col_rd/col_addr read
// a column, col_data must be valid the next cycle and stay stable until the
// next col_rd. Output vectors leave on out_* with a valid/ready handshake.
// done pulses once the last vector of the image has been produced.
module bilstm_hidden_layer
  import finnl_pkg::*;
#(
  parameter int unsigned I       = I_PIX,
  parameter int unsigned H       = H_CELLS,
  parameter int unsigned PE      = 1,
  parameter int unsigned SIMD_I  = I_PIX,
  parameter int unsigned SIMD_R  = H_CELLS,
  parameter int unsigned WQ      = WQ_DEF,
  parameter int unsigned IQ      = IQ_DEF,
  parameter int unsigned AQ      = AQ_DEF,
  parameter int unsigned RQ      = RQ_DEF,
  parameter int unsigned CMAX    = C_MAX,
  parameter int unsigned QDEPTH  = 2,
  // derived
  parameter int unsigned NJ      = H / PE,
  parameter int unsigned FS      = I / SIMD_I,
  parameter int unsigned ROW_W   = (SIMD_I + SIMD_R) * WQ,
  parameter int unsigned WDEPTH  = 2 * NJ * FS,
  parameter int unsigned CW      = $clog2(CMAX + 1)
) (
  input  logic                      clk,
  input  logic                      rst_n,
  input  logic                      start,
  input  logic [CW-1:0]             num_cols,
  output logic                      busy,
  output logic                      done,
  // column read from the input buffer
  output logic                      col_rd,
  output logic [CW-1:0]             col_addr,
  input  logic [I*IQ-1:0]           col_data,
  // weight and bias configuration
  input  logic                      wr_en,
  input  logic [$clog2(PE+1)-1:0]   wr_pe,
  input  gate_e                     wr_gate,
  input  logic [$clog2(WDEPTH)-1:0] wr_addr,
  input  logic [ROW_W-1:0]          wr_data,
  input  logic                      bwr_en,
  input  logic [$clog2(PE+1)-1:0]   bwr_pe,
  input  gate_e                     bwr_gate,
  input  logic [$clog2(2*NJ)-1:0]   bwr_addr,
  input  logic signed [BIAS_W-1:0]  bwr_data,
  // output vectors
  output logic                      out_valid,
  input  logic                      out_ready,
  output dir_e                      out_dir,
  output logic [CW-1:0]             out_col,
  output logic [H*AQ-1:0]           out_vec,
  // status
  output logic                      stall_dep,
  output logic                      stall_credit
);

  localparam int unsigned JW = $clog2(NJ + 1);
  localparam int unsigned FW = $clog2(FS + 1);

  typedef enum logic [1:0] {S_IDLE, S_WAIT, S_ISSUE, S_DRAIN} state_e;
  state_e state;

  logic [CW-1:0] step, ncols;
  dir_e          dir;
  logic [JW-1:0] j;
  logic [FW-1:0] f;
  logic [1:0]    pending;            // per direction: a step is in flight
  logic [1:0]    wbank;              // per direction: bank written by the step in flight
  logic [CW-1:0] col_of [2];         // per direction: column of the step in flight
  logic [$clog2(QDEPTH+1)-1:0] credits;

  // recurrent state, [direction][bank][cell]
  logic [RQ-1:0] ybuf [2][2][H];

  // ------------------------------------------------------------- controller
  logic can_start, start_step, issue_v, issue_last_all, final_step;
  logic pop;

  assign can_start  = (credits != 0) && !pending[dir];
  assign start_step = (state == S_WAIT) && can_start;
  assign issue_v    = (state == S_ISSUE);
  assign issue_last_all = issue_v && (j == JW'(NJ - 1)) && (f == FW'(FS - 1));
  assign final_step = (dir == DIR_R2L) && (step == ncols - 1'b1);
  assign stall_dep    = (state == S_WAIT) && pending[dir];
  assign stall_credit = (state == S_WAIT) && !pending[dir] && (credits == 0);
  assign busy       = (state != S_IDLE);

  assign col_rd   = start_step;
  assign col_addr = (dir == DIR_L2R) ? step : CW'(ncols - 1'b1 - step);

  logic ret_valid [PE];
  dir_e ret_dir   [PE];
  logic [JW-1:0] ret_j [PE];
  logic [AQ-1:0] ret_yo [PE];
  logic [RQ-1:0] ret_yr [PE];
  logic ret_last;
  assign ret_last = ret_valid[0] && (ret_j[0] == JW'(NJ - 1));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state   <= S_IDLE;
      step    <= '0;
      ncols   <= '0;
      dir     <= DIR_L2R;
      j       <= '0;
      f       <= '0;
      done    <= 1'b0;
    end else begin
      done <= 1'b0;
      case (state)
        S_IDLE: if (start) begin
          state <= S_WAIT;
          step  <= '0;
          ncols <= num_cols;
          dir   <= DIR_L2R;
        end
        S_WAIT: if (can_start) begin
          state <= S_ISSUE;
          j     <= '0;
          f     <= '0;
        end
        S_ISSUE: begin
          if (f == FW'(FS - 1)) begin
            f <= '0;
            j <= j + 1'b1;
          end else f <= f + 1'b1;
          if (issue_last_all) begin
            if (final_step) state <= S_DRAIN;
            else begin
              state <= S_WAIT;
              if (dir == DIR_R2L) step <= step + 1'b1;
              dir <= (dir == DIR_L2R) ? DIR_R2L : DIR_L2R;
            end
          end
        end
        S_DRAIN: if (pending == 2'b00) begin
          state <= S_IDLE;
          done  <= 1'b1;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  // per-direction bookkeeping
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      pending <= 2'b00;
      wbank   <= 2'b00;
      col_of  <= '{default: '0};
    end else begin
      if (ret_last) pending[ret_dir[0]] <= 1'b0;
      if (start_step) begin
        pending[dir] <= 1'b1;
        wbank[dir]   <= ~step[0];
        col_of[dir]  <= col_addr;
      end
    end
  end

  // output queue credits
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) credits <= ($clog2(QDEPTH+1))'(QDEPTH);
    else credits <= credits - ($clog2(QDEPTH+1))'(start_step) + ($clog2(QDEPTH+1))'(pop);
  end

  // -------------------------------------------------------------- PE array
  logic [SIMD_I*IQ-1:0] x_lanes;
  logic [SIMD_R*RQ-1:0] r_lanes;

  always_comb begin
    x_lanes = col_data[32'(f) * SIMD_I * IQ +: SIMD_I * IQ];
    for (int l = 0; l < int'(SIMD_R); l++)
      r_lanes[l*RQ +: RQ] = ybuf[dir][step[0]][32'(f) * SIMD_R + 32'(l)];
  end

  for (genvar p = 0; p < int'(PE); p++) begin : g_pe
    lstm_pe #(
      .I(I), .H(H), .PE(PE), .SIMD_I(SIMD_I), .SIMD_R(SIMD_R),
      .WQ(WQ), .IQ(IQ), .AQ(AQ), .RQ(RQ)
    ) u_pe (
      .clk, .rst_n,
      .issue_valid (issue_v),
      .issue_dir   (dir),
      .issue_j     (j),
      .issue_f     (f),
      .issue_first (f == '0),
      .issue_last  (f == FW'(FS - 1)),
      .issue_init  (step == '0),
      .x_lanes, .r_lanes,
      .wr_en       (wr_en && (32'(wr_pe) == p)),
      .wr_gate, .wr_addr, .wr_data,
      .bwr_en      (bwr_en && (32'(bwr_pe) == p)),
      .bwr_gate, .bwr_addr, .bwr_data,
      .ret_valid   (ret_valid[p]),
      .ret_dir     (ret_dir[p]),
      .ret_j       (ret_j[p]),
      .ret_y_out   (ret_yo[p]),
      .ret_y_rec   (ret_yr[p])
    );
  end

  // ------------------------------------- retire: recurrent state and output mux
  logic [H*AQ-1:0] asm_vec, asm_next;

  always_comb begin
    asm_next = asm_vec;
    for (int p = 0; p < int'(PE); p++)
      asm_next[(32'(ret_j[0]) * PE + 32'(p)) * AQ +: AQ] = ret_yo[p];
  end

  always_ff @(posedge clk) begin
    if (ret_valid[0]) begin
      asm_vec <= asm_next;
      for (int p = 0; p < int'(PE); p++)
        ybuf[ret_dir[0]][wbank[ret_dir[0]]][32'(ret_j[0]) * PE + 32'(p)] <= ret_yr[p];
    end
  end

  // ------------------------------------------------------------ output queue
  typedef struct packed {
    dir_e            dir;
    logic [CW-1:0]   col;
    logic [H*AQ-1:0] vec;
  } outq_t;

  outq_t q [QDEPTH];
  logic [$clog2(QDEPTH)-1:0] q_rd, q_wr;
  logic [$clog2(QDEPTH+1)-1:0] q_cnt;
  logic push;

  assign push = ret_last;
  assign pop  = out_valid && out_ready;
  assign out_valid = (q_cnt != 0);
  assign out_dir   = q[q_rd].dir;
  assign out_col   = q[q_rd].col;
  assign out_vec   = q[q_rd].vec;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      q_rd  <= '0;
      q_wr  <= '0;
      q_cnt <= '0;
    end else begin
      if (push) q_wr <= (32'(q_wr) == QDEPTH - 1) ? '0 : q_wr + 1'b1;
      if (pop)  q_rd <= (32'(q_rd) == QDEPTH - 1) ? '0 : q_rd + 1'b1;
      q_cnt <= q_cnt + ($clog2(QDEPTH+1))'(push) - ($clog2(QDEPTH+1))'(pop);
    end
  end

  always_ff @(posedge clk) begin
    if (push) q[q_wr] <= '{dir: ret_dir[0], col: col_of[ret_dir[0]], vec: asm_next};
  end

  // credits guarantee the queue never overflows
  assert property (@(posedge clk) disable iff (!rst_n) push |-> (q_cnt < ($clog2(QDEPTH+1))'(QDEPTH) || pop))
    else $error("bilstm_hidden_layer: output queue overflow");

endmodule
