// tb_xbar_model -- self-checking test of the crossbar behavioural model at
// its default size.  Programs random signed weights, applies random signed
// word-line vectors (some rows forced to zero, as the IFRT does), and
// checks each bit-line result against a dot product computed here.  It also
// checks that a read-out takes exactly one clock per bit line.
module tb_xbar_model;
  localparam int unsigned ROWS   = epim_pkg::XB_ROWS;
  localparam int unsigned COLS   = epim_pkg::XB_COLS;
  localparam int unsigned A_W    = epim_pkg::A_BITS;
  localparam int unsigned W_W    = epim_pkg::W_BITS;
  localparam int unsigned PSUM_W = epim_pkg::PSUM_W;
  localparam int unsigned ROW_W  = $clog2(ROWS);
  localparam int unsigned COL_W  = $clog2(COLS);

  logic clk = 0, rst_n = 0, w_we = 0, act = 0;
  logic [ROW_W-1:0] w_row = '0;
  logic [COL_W-1:0] w_col = '0;
  logic [W_W-1:0] w_data = '0;
  logic [ROWS-1:0][A_W-1:0] wl = '0;
  logic col_valid, done;
  logic [COL_W-1:0] col_idx;
  logic [PSUM_W-1:0] col_val;
  int checks = 0, failures = 0;
  int wt [ROWS][COLS];

  xbar_model dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (ROWS * COLS + 20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int c = 0; c < int'(COLS); c++)
      for (int r = 0; r < int'(ROWS); r++) begin
        @(negedge clk);
        w_we = 1; w_row = ROW_W'(r); w_col = COL_W'(c); w_data = W_W'($urandom);
        wt[r][c] = int'($signed(w_data));
      end
    @(negedge clk); w_we = 0;
    for (int t = 0; t < 6; t++) begin
      int expc [COLS];
      int seen, cycles;
      for (int r = 0; r < int'(ROWS); r++)
        wl[r] = ($urandom_range(3) == 0) ? '0 : A_W'($urandom);
      if (t == 0) wl = '0;
      for (int c = 0; c < int'(COLS); c++) begin
        expc[c] = 0;
        for (int r = 0; r < int'(ROWS); r++) expc[c] += int'($signed(wl[r])) * wt[r][c];
      end
      @(negedge clk); act = 1;
      @(negedge clk); act = 0;
      seen = 0; cycles = 0;
      while (!done) begin
        if (col_valid) begin
          checks++;
          if (col_idx !== COL_W'(seen) || $signed(col_val) !== PSUM_W'(expc[seen])) begin
            failures++;
            $display("FAIL t%0d col %0d (idx %0d): %0d vs %0d", t, seen, col_idx, $signed(col_val), expc[seen]);
          end
          seen++;
        end
        cycles++;
        @(negedge clk);
      end
      // last column is presented together with done
      checks++;
      if ($signed(col_val) !== PSUM_W'(expc[COLS-1])) begin failures++; $display("FAIL last col"); end
      checks++;
      if (cycles + 1 != int'(COLS)) begin
        failures++; $display("FAIL read-out took %0d clocks, expected %0d", cycles + 1, COLS);
      end
      @(negedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
