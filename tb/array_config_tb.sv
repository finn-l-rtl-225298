// array_config_tb: word stream to array-write decoding.
//
// Rows of all four targets are sent as 32-bit words (multi-word rows for the
// weights, single words for biases), in random order, sometimes with idle
// cycles between words. Each write must appear once, one cycle after its
// last word, on the right port with the decoded PE, gate and address and the
// reassembled row.
module array_config_tb;
  import finnl_pkg::*;

  localparam int unsigned TH = 4, TK = 3, TPE = 2, TNJ = 2, THROW = 40, TWD = 8;
  localparam int unsigned ROWS_W = $clog2(TPE * 4 * TWD + 2 * TK + 1);

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic cfg_valid = 0;
  logic [1:0] cfg_target = '0;
  logic [ROWS_W-1:0] cfg_row = '0;
  logic [31:0] cfg_data = '0;
  logic hw_en, hb_en, ow_en, ob_en;
  logic [$clog2(TPE+1)-1:0] hw_pe, hb_pe;
  gate_e hw_gate, hb_gate;
  logic [$clog2(TWD)-1:0] hw_addr;
  logic [THROW-1:0] hw_data;
  logic [$clog2(2*TNJ)-1:0] hb_addr;
  logic signed [BIAS_W-1:0] hb_data, ob_data;
  logic [$clog2(2*TK)-1:0] ow_addr;
  logic [TH*OWQ-1:0] ow_data;
  logic [$clog2(TK)-1:0] ob_addr;

  array_config #(.H(TH), .K(TK), .PE(TPE), .NJ(TNJ), .HROW_W(THROW), .WDEPTH(TWD)) dut (.*);

  int checks = 0, failures = 0;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL: %s", what);
    end
  endtask

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int n = 0; n < 200; n++) begin
      int tg, row, nbits, nw;
      logic [63:0] bits;
      tg = int'($urandom % 4);
      case (tg)
        0: begin row = int'($urandom % (TPE * 4 * TWD)); nbits = THROW; end
        1: begin row = int'($urandom % (TPE * 4 * 2 * TNJ)); nbits = BIAS_W; end
        2: begin row = int'($urandom % (2 * TK)); nbits = TH * OWQ; end
        default: begin row = int'($urandom % TK); nbits = BIAS_W; end
      endcase
      bits = {$urandom, $urandom};
      nw = (nbits + 31) / 32;
      for (int w = 0; w < nw; w++) begin
        cfg_valid = 1;
        cfg_target = 2'(tg);
        cfg_row = ROWS_W'(row);
        cfg_data = bits[w*32 +: 32];
        @(negedge clk);
        cfg_valid = 0;
        if (w < nw - 1) begin
          check(!(hw_en || hb_en || ow_en || ob_en), "write before the last word");
          if ($urandom % 3 == 0) @(negedge clk);
        end
      end
      check(hw_en == (tg == 0) && hb_en == (tg == 1) && ow_en == (tg == 2) && ob_en == (tg == 3),
            $sformatf("write strobe target %0d", tg));
      case (tg)
        0: begin
          check(int'(hw_pe) == row / (4 * TWD) && int'(hw_gate) == (row / TWD) % 4 && int'(hw_addr) == row % TWD,
                $sformatf("hidden weight row %0d decode", row));
          check(hw_data == bits[THROW-1:0], "hidden weight data");
        end
        1: begin
          check(int'(hb_pe) == row / (8 * TNJ) && int'(hb_gate) == (row / (2 * TNJ)) % 4 && int'(hb_addr) == row % (2 * TNJ),
                $sformatf("hidden bias row %0d decode", row));
          check(hb_data == bits[15:0], "hidden bias data");
        end
        2: begin
          check(int'(ow_addr) == row, "output weight row");
          check(ow_data == bits[TH*OWQ-1:0], "output weight data");
        end
        default: begin
          check(int'(ob_addr) == row, "output bias row");
          check(ob_data == bits[15:0], "output bias data");
        end
      endcase
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
