// finnl_bilstm_top: one complete BiLSTM OCR inference network.
//
// Dataflow (one text-line image at a time):
//   image columns -> input_buffer -> bilstm_hidden_layer (both directions,
//   interleaved, PE x SIMD datapath) -> output_layer (per-direction partial
//   sums, batch norm folded) -> concatenator (adds the two halves of a column)
//   -> max_per_column (greedy symbol per column) -> final_labeling (CTC greedy
//   collapse) -> label symbols.
// array_config writes all weights and biases beforehand from a 32-bit stream.
// The chain of blocks is the inference topology of the paper; the controller
// below (load the image, then run, then decode) is this design's choice.
//
// Interface:
//   cfg_*   : weight/bias words, see array_config (load before start).
//   start   : pulse with num_cols (1 .. CMAX) held; then send num_cols image
//             columns on img_* (valid/ready, pixel 0 in the low IQ bits).
//   label_* : the decoded symbols, one pulse each, left to right; done pulses
//             with label_count after the last one.
//   busy, stall_dep, stall_credit: status (see bilstm_hidden_layer).
// The output layer's direction tag (o_dir) is not needed downstream: the
// concatenator pairs the halves by column, so it is left unused here.
// Timing: hidden layer 2*(H/PE*FS + 1) cycles per column without stalls, plus
// pipeline latency; loading takes num_cols cycles; decoding num_cols cycles.
module finnl_bilstm_top
  import finnl_pkg::*;
#(
  parameter int unsigned I      = I_PIX,
  parameter int unsigned H      = H_CELLS,
  parameter int unsigned K      = K_OUT,
  parameter int unsigned CMAX   = C_MAX,
  parameter int unsigned PE     = 1,
  parameter int unsigned SIMD_I = I_PIX,
  parameter int unsigned SIMD_R = H_CELLS,
  parameter int unsigned WQ     = WQ_DEF,
  parameter int unsigned AQ     = AQ_DEF,
  parameter int unsigned IQ     = IQ_DEF,
  parameter int unsigned RQ     = RQ_DEF,
  parameter int unsigned QDEPTH = 2,
  // derived
  parameter int unsigned NJ     = H / PE,
  parameter int unsigned FS     = I / SIMD_I,
  parameter int unsigned ROW_W  = (SIMD_I + SIMD_R) * WQ,
  parameter int unsigned WDEPTH = 2 * NJ * FS,
  parameter int unsigned ROWS_W = $clog2(PE * 4 * WDEPTH + 2 * K + 1),
  parameter int unsigned CW     = $clog2(CMAX + 1),
  parameter int unsigned KW     = $clog2(K + 1)
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              cfg_valid,
  input  logic [1:0]        cfg_target,
  input  logic [ROWS_W-1:0] cfg_row,
  input  logic [31:0]       cfg_data,
  input  logic              start,
  input  logic [CW-1:0]     num_cols,
  input  logic              img_valid,
  output logic              img_ready,
  input  logic [I*IQ-1:0]   img_data,
  output logic              label_valid,
  output logic [KW-1:0]     label,
  output logic              done,
  output logic [CW-1:0]     label_count,
  output logic              busy,
  output logic              stall_dep,
  output logic              stall_credit
);

  typedef enum logic [1:0] {T_IDLE, T_LOAD, T_RUN} tstate_e;
  tstate_e state;
  logic [CW-1:0] ncols;
  logic loaded, hl_start, hl_done, hl_busy;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= T_IDLE;
      ncols <= '0;
    end else begin
      case (state)
        T_IDLE: if (start) begin
          state <= T_LOAD;
          ncols <= num_cols;
        end
        T_LOAD: if (loaded) state <= T_RUN;
        T_RUN:  if (done) state <= T_IDLE;
        default: state <= T_IDLE;
      endcase
    end
  end

  logic start_img;
  assign start_img = (state == T_IDLE) && start;
  assign hl_start  = (state == T_LOAD) && loaded;
  assign busy      = (state != T_IDLE);

  // the hidden layer only works between the end of loading and the end of
  // decoding
  assert property (@(posedge clk) disable iff (!rst_n) (hl_busy || hl_done) |-> state == T_RUN)
    else $error("hidden layer active outside T_RUN");

  // -------------------------------------------------------- configuration
  logic                      hw_en, hb_en, ow_en, ob_en;
  logic [$clog2(PE+1)-1:0]   hw_pe, hb_pe;
  gate_e                     hw_gate, hb_gate;
  logic [$clog2(WDEPTH)-1:0] hw_addr;
  logic [ROW_W-1:0]          hw_data;
  logic [$clog2(2*NJ)-1:0]   hb_addr;
  logic signed [BIAS_W-1:0]  hb_data, ob_data;
  logic [$clog2(2*K)-1:0]    ow_addr;
  logic [H*OWQ-1:0]          ow_data;
  logic [$clog2(K)-1:0]      ob_addr;

  array_config #(
    .H(H), .K(K), .PE(PE), .NJ(NJ), .HROW_W(ROW_W), .WDEPTH(WDEPTH), .ROWS_W(ROWS_W)
  ) u_cfg (
    .clk, .rst_n, .cfg_valid, .cfg_target, .cfg_row, .cfg_data,
    .hw_en, .hw_pe, .hw_gate, .hw_addr, .hw_data,
    .hb_en, .hb_pe, .hb_gate, .hb_addr, .hb_data,
    .ow_en, .ow_addr, .ow_data, .ob_en, .ob_addr, .ob_data
  );

  // ---------------------------------------------------------- input buffer
  logic            col_rd;
  logic [CW-1:0]   col_addr;
  logic [I*IQ-1:0] col_data;

  input_buffer #(.I(I), .IQ(IQ), .CMAX(CMAX)) u_inbuf (
    .clk, .rst_n,
    .load_start (start_img),
    .num_cols,
    .in_valid   (img_valid),
    .in_ready   (img_ready),
    .in_data    (img_data),
    .loaded,
    .rd         (col_rd),
    .rd_addr    (col_addr),
    .rd_data    (col_data)
  );

  // ----------------------------------------------------------- hidden layer
  logic            hv_valid, hv_ready;
  dir_e            hv_dir;
  logic [CW-1:0]   hv_col;
  logic [H*AQ-1:0] hv_vec;

  bilstm_hidden_layer #(
    .I(I), .H(H), .PE(PE), .SIMD_I(SIMD_I), .SIMD_R(SIMD_R),
    .WQ(WQ), .IQ(IQ), .AQ(AQ), .RQ(RQ), .CMAX(CMAX), .QDEPTH(QDEPTH)
  ) u_hidden (
    .clk, .rst_n,
    .start     (hl_start),
    .num_cols  (ncols),
    .busy      (hl_busy),
    .done      (hl_done),
    .col_rd, .col_addr, .col_data,
    .wr_en     (hw_en), .wr_pe(hw_pe), .wr_gate(hw_gate), .wr_addr(hw_addr), .wr_data(hw_data),
    .bwr_en    (hb_en), .bwr_pe(hb_pe), .bwr_gate(hb_gate), .bwr_addr(hb_addr), .bwr_data(hb_data),
    .out_valid (hv_valid),
    .out_ready (hv_ready),
    .out_dir   (hv_dir),
    .out_col   (hv_col),
    .out_vec   (hv_vec),
    .stall_dep,
    .stall_credit
  );

  // ----------------------------------------------------------- output layer
  logic                     o_valid, o_last;
  dir_e                     o_dir;
  logic [CW-1:0]            o_col;
  logic [KW-1:0]            o_k;
  logic signed [OACC_W-1:0] o_val;

  output_layer #(.H(H), .K(K), .AQ(AQ), .CMAX(CMAX)) u_out (
    .clk, .rst_n,
    .in_valid (hv_valid),
    .in_ready (hv_ready),
    .in_dir   (hv_dir),
    .in_col   (hv_col),
    .in_vec   (hv_vec),
    .wr_en    (ow_en), .wr_addr(ow_addr), .wr_data(ow_data),
    .bwr_en   (ob_en), .bwr_addr(ob_addr), .bwr_data(ob_data),
    .o_valid, .o_dir, .o_col, .o_k, .o_last, .o_val
  );

  // ----------------------------------------------------------- concatenator
  logic                     c_valid, c_last;
  logic [CW-1:0]            c_col;
  logic [KW-1:0]            c_k;
  logic signed [OACC_W-1:0] c_val;

  concatenator #(.K(K), .CMAX(CMAX)) u_concat (
    .clk, .rst_n,
    .clear    (start_img),
    .in_valid (o_valid),
    .in_col   (o_col),
    .in_k     (o_k),
    .in_last  (o_last),
    .in_val   (o_val),
    .c_valid, .c_col, .c_k, .c_last, .c_val
  );

  // ----------------------------------------------------- max per column
  logic          m_valid;
  logic [CW-1:0] m_col;
  logic [KW-1:0] m_label;

  max_per_column #(.K(K), .CMAX(CMAX)) u_max (
    .clk, .rst_n,
    .in_valid (c_valid),
    .in_col   (c_col),
    .in_k     (c_k),
    .in_last  (c_last),
    .in_val   (c_val),
    .m_valid, .m_col, .m_label
  );

  // ------------------------------------------------------- final labeling
  final_labeling #(.K(K), .CMAX(CMAX)) u_label (
    .clk, .rst_n,
    .start    (start_img),
    .num_cols,
    .in_valid (m_valid),
    .in_col   (m_col),
    .in_label (m_label),
    .l_valid  (label_valid),
    .l_label  (label),
    .done,
    .count    (label_count)
  );

endmodule
