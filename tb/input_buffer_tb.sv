// input_buffer_tb: loads images of several widths and reads the columns back.
//
// Checks the stream handshake (ready only while loading, loaded after exactly
// num_cols columns), the read latency of one cycle, that rd_data holds between
// reads, and random left-to-right and right-to-left read orders.
module input_buffer_tb;
  import finnl_pkg::*;

  localparam int unsigned TI = 4, TIQ = 8, TCMAX = 12;
  localparam int unsigned CW = $clog2(TCMAX + 1);

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic load_start = 0, in_valid = 0, in_ready, loaded, rd = 0;
  logic [CW-1:0] num_cols = '0, rd_addr = '0;
  logic [TI*TIQ-1:0] in_data = '0, rd_data;
  logic [TI*TIQ-1:0] img [TCMAX];
  int checks = 0, failures = 0;

  input_buffer #(.I(TI), .IQ(TIQ), .CMAX(TCMAX)) dut (.*);

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
    foreach (img[c]) img[c] = '0;
    for (int n = 1; n <= int'(TCMAX); n += 5) begin
      int nl;
      @(negedge clk);
      load_start = 1;
      num_cols = CW'(n);
      @(negedge clk);
      load_start = 0;
      nl = 0;
      for (int c = 0; c < n; c++) begin
        check(in_ready, "ready while loading");
        check(!loaded, "loaded too early");
        img[c] = $urandom;
        in_valid = 1;
        in_data = img[c];
        @(negedge clk);
        if (loaded) nl++;
      end
      in_valid = 0;
      check(nl == 1, $sformatf("loaded pulse after last column (%0d)", nl));
      check(!in_ready, "not ready after load");
      for (int r = 0; r < 3 * n; r++) begin
        int a;
        a = (r < n) ? r : ((r < 2 * n) ? n - 1 - (r - n) : int'($urandom % n));
        rd = 1;
        rd_addr = CW'(a);
        @(negedge clk);
        rd = 0;
        rd_addr = '0;
        check(rd_data == img[a], $sformatf("column %0d", a));
        @(negedge clk);
        check(rd_data == img[a], $sformatf("column %0d held", a));
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
