// tb_output_register -- self-checking test of the bit-line output register.
// Captures a full sweep of columns with random values, reads every column
// back in random order, and checks the per-column valid bits and clear.
module tb_output_register;
  localparam int unsigned COLS   = epim_pkg::XB_COLS;
  localparam int unsigned PSUM_W = epim_pkg::PSUM_W;
  localparam int unsigned COL_W  = $clog2(COLS);

  logic clk = 0, rst_n = 0, clr = 0, cap_valid = 0, rd_en = 0;
  logic [COL_W-1:0] cap_col = '0, rd_col = '0;
  logic [PSUM_W-1:0] cap_val = '0, rd_val;
  logic [COLS-1:0] valid_cols;
  logic [PSUM_W-1:0] ref_q [COLS];
  int checks = 0, failures = 0;

  output_register dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int pass = 0; pass < 3; pass++) begin
      @(negedge clk); clr = 1; @(negedge clk); clr = 0;
      checks++;
      if (valid_cols !== '0) begin failures++; $display("FAIL clear"); end
      for (int c = 0; c < int'(COLS); c++) begin
        @(negedge clk);
        cap_valid = 1; cap_col = COL_W'(c); cap_val = PSUM_W'($urandom);
        ref_q[c] = cap_val;
      end
      @(negedge clk); cap_valid = 0;
      checks++;
      if (valid_cols !== '1) begin failures++; $display("FAIL valid bits"); end
      for (int i = 0; i < int'(COLS); i++) begin
        rd_col = COL_W'($urandom_range(COLS - 1));
        #1;
        checks++;
        if (rd_val !== ref_q[rd_col]) begin
          failures++; $display("FAIL col %0d: %h vs %h", rd_col, rd_val, ref_q[rd_col]);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
