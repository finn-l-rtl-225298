// array_config: loads the weight and bias arrays before inference.
//
// On the FPGA some weight arrays may sit in memories that cannot be
// initialised with the bitstream, so the network carries a block that fills
// them at start-up. Here every array (the four gate weight arrays and bias
// arrays of each PE, and the output layer's weights and biases) is written
// through this block from a 32-bit word stream.
//
// Protocol (this design's own): a row is sent as ceil(row_bits / 32) words,
// least significant word first; cfg_target and cfg_row are sampled with the
// last word of the row, when the row is written. Rows per target:
//   CFG_HID_W: ((pe*4 + gate) * WDEPTH + (dir*NJ + j)*FS + fold), (SIMD_I+SIMD_R)*WQ bits
//   CFG_HID_B: ((pe*4 + gate) * 2*NJ + dir*NJ + j), BIAS_W bits
//   CFG_OUT_W: 2*k + dir, H*OWQ bits
//   CFG_OUT_B: k, BIAS_W bits
// The target must not change in the middle of a row. cfg_ready is always 1.
// Writes leave on the hw_*/hb_*/ow_*/ob_* ports one cycle after the last word.
module array_config
  import finnl_pkg::*;
#(
  parameter int unsigned H      = H_CELLS,
  parameter int unsigned K      = K_OUT,
  parameter int unsigned PE     = 1,
  parameter int unsigned NJ     = H / PE,
  parameter int unsigned HROW_W = (I_PIX + H_CELLS) * WQ_DEF,
  parameter int unsigned WDEPTH = 2 * NJ,
  parameter int unsigned ROWS_W = $clog2(PE * 4 * WDEPTH + 2 * K + 1)
) (
  input  logic                      clk,
  input  logic                      rst_n,
  input  logic                      cfg_valid,
  input  logic [1:0]                cfg_target,
  input  logic [ROWS_W-1:0]         cfg_row,
  input  logic [31:0]               cfg_data,
  // hidden layer weights / biases
  output logic                      hw_en,
  output logic [$clog2(PE+1)-1:0]   hw_pe,
  output gate_e                     hw_gate,
  output logic [$clog2(WDEPTH)-1:0] hw_addr,
  output logic [HROW_W-1:0]         hw_data,
  output logic                      hb_en,
  output logic [$clog2(PE+1)-1:0]   hb_pe,
  output gate_e                     hb_gate,
  output logic [$clog2(2*NJ)-1:0]   hb_addr,
  output logic signed [BIAS_W-1:0]  hb_data,
  // output layer weights / biases
  output logic                      ow_en,
  output logic [$clog2(2*K)-1:0]    ow_addr,
  output logic [H*OWQ-1:0]          ow_data,
  output logic                      ob_en,
  output logic [$clog2(K)-1:0]      ob_addr,
  output logic signed [BIAS_W-1:0]  ob_data
);

  localparam logic [1:0] CFG_HID_W = 2'd0, CFG_HID_B = 2'd1, CFG_OUT_W = 2'd2, CFG_OUT_B = 2'd3;
  localparam int unsigned HW_WORDS = (HROW_W + 31) / 32;
  localparam int unsigned OW_WORDS = (H * OWQ + 31) / 32;
  localparam int unsigned MAXW     = (HW_WORDS > OW_WORDS) ? HW_WORDS : OW_WORDS;
  localparam int unsigned WCW      = $clog2(MAXW + 1);

  logic [MAXW*32-1:0] row;
  logic [WCW-1:0]     widx, nwords;
  logic               row_done;

  always_comb begin
    case (cfg_target)
      CFG_HID_W: nwords = WCW'(HW_WORDS);
      CFG_OUT_W: nwords = WCW'(OW_WORDS);
      default:   nwords = WCW'(1);
    endcase
  end

  assign row_done = cfg_valid && (widx == nwords - 1'b1);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) widx <= '0;
    else if (cfg_valid) widx <= row_done ? '0 : widx + 1'b1;
  end

  logic [MAXW*32-1:0] row_n;
  always_comb begin
    row_n = row;
    row_n[32'(widx) * 32 +: 32] = cfg_data;
  end

  always_ff @(posedge clk) if (cfg_valid) row <= row_n;

  // decode of the flat row number
  int unsigned r;
  assign r = 32'(cfg_row);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      hw_en <= 1'b0;
      hb_en <= 1'b0;
      ow_en <= 1'b0;
      ob_en <= 1'b0;
    end else begin
      hw_en <= row_done && (cfg_target == CFG_HID_W);
      hb_en <= row_done && (cfg_target == CFG_HID_B);
      ow_en <= row_done && (cfg_target == CFG_OUT_W);
      ob_en <= row_done && (cfg_target == CFG_OUT_B);
    end
  end

  always_ff @(posedge clk) begin
    if (row_done) begin
      hw_pe   <= ($clog2(PE+1))'(r / (4 * WDEPTH));
      hw_gate <= gate_e'((r / WDEPTH) % 4);
      hw_addr <= ($clog2(WDEPTH))'(r % WDEPTH);
      hw_data <= row_n[HROW_W-1:0];
      hb_pe   <= ($clog2(PE+1))'(r / (8 * NJ));
      hb_gate <= gate_e'((r / (2 * NJ)) % 4);
      hb_addr <= ($clog2(2*NJ))'(r % (2 * NJ));
      hb_data <= row_n[BIAS_W-1:0];
      ow_addr <= ($clog2(2*K))'(r);
      ow_data <= row_n[H*OWQ-1:0];
      ob_addr <= ($clog2(K))'(r);
      ob_data <= row_n[BIAS_W-1:0];
    end
  end

endmodule
