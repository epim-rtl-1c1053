// tb_input_register -- self-checking test of the word-line input register.
// Writes random rows, checks the whole register against a reference after
// every write, and checks that clear returns every word line to zero.
module tb_input_register;
  localparam int unsigned ROWS  = epim_pkg::XB_ROWS;
  localparam int unsigned W     = epim_pkg::A_BITS;
  localparam int unsigned ROW_W = $clog2(ROWS);

  logic clk = 0, rst_n = 0, clr = 0, we = 0;
  logic [ROW_W-1:0] row = '0;
  logic [W-1:0] data = '0;
  logic [ROWS-1:0][W-1:0] wl, ref_wl;
  int checks = 0, failures = 0;

  input_register dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    ref_wl = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int pass = 0; pass < 4; pass++) begin
      for (int i = 0; i < 600; i++) begin
        @(negedge clk);
        we = 1; row = ROW_W'($urandom_range(ROWS - 1)); data = W'($urandom);
        ref_wl[row] = data;
        @(negedge clk); we = 0;
        checks++;
        if (wl !== ref_wl) begin failures++; $display("FAIL after write row %0d", row); end
      end
      @(negedge clk); clr = 1; @(negedge clk); clr = 0;
      ref_wl = '0;
      checks++;
      if (wl !== '0) begin failures++; $display("FAIL clear"); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
