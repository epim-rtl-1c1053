// tb_wl_epitome256 -- workload test: a 256 x 256 epitome standing in for a
// convolution with c_in*p*q = 512 and c_out = 512, on the default data path.
//
// The epitome fills the crossbar.  The virtual convolution weight Wv is
// rebuilt from three row patches of the epitome:
//   virtual rows   0..255 <- epitome rows   0..255
//   virtual rows 256..383 <- epitome rows  64..191
//   virtual rows 384..511 <- epitome rows 128..255  (overlaps the previous)
// and its 512 output channels repeat the epitome's 256 bit lines twice
// (r = 2), Wv[i][j] = E[row(i)][j mod 256].  The expected output is
// x . Wv, computed here straight from Wv.
//
// Mode A computes all 512 channels: 3 row patches x 2 channel halves = 6
// activations.  Mode B uses output channel wrapping: 3 activations write
// only channels 0..255, and channels 256..511 are read back wrapped.  Both
// must give x . Wv.  Mode B must use half the activations and half the
// output-buffer writes of mode A (write reduction by r).
module tb_wl_epitome256;
  import epim_pkg::*;
  localparam int unsigned RW    = $clog2(MAX_ROUNDS);
  localparam int unsigned IAW   = $clog2(IN_DEPTH);
  localparam int unsigned OAW   = $clog2(OUT_DEPTH);
  localparam int unsigned ROW_W = $clog2(XB_ROWS);
  localparam int unsigned COL_W = $clog2(XB_COLS);
  localparam int K = 512, N = 512;

  logic clk = 0, rst_n = 0;
  logic buf_we = 0, xb_we = 0, ifat_we = 0, ifrt_we = 0, ofat_we = 0;
  logic [IAW-1:0] buf_waddr = '0, ifat_start = '0, ifat_stop = '0;
  logic [A_BITS-1:0] buf_wdata = '0;
  logic [ROW_W-1:0] xb_row = '0;
  logic [COL_W-1:0] xb_col = '0, ofat_col = '0;
  logic [W_BITS-1:0] xb_wdata = '0;
  logic [RW-1:0] ifat_idx = '0, ifrt_idx = '0, ofat_idx = '0;
  logic [XB_ROWS-1:0] ifrt_mask = '0;
  logic [OAW-1:0] ofat_start = '0, ofat_stop = '0, out_raddr = '0;
  logic start = 0, busy, done, wrap_en = 0, out_re = 0, out_rvalid, ifrt_overflow;
  logic [RW:0] n_rounds = '0;
  logic [OAW:0] wrap_c = '0;
  logic [ACC_W-1:0] out_rdata;
  logic [31:0] n_out_writes, n_out_add, n_out_concat, n_ob_writes;

  epim_top dut (.*);

  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  int x [K];
  int e [XB_ROWS][XB_COLS];
  int rowmap [K];
  int expo [N];
  int wr_a, wr_b, cyc_a, cyc_b;

  initial begin
    repeat (300000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // Program one table entry: inputs [is, is+len-1] onto epitome rows
  // [er, er+len-1]; results of bit lines 0..255 to outputs [os, os+255].
  task automatic entry(input int k, input int is, input int len, input int er, input int os);
    @(negedge clk);
    ifat_we = 1; ifat_idx = RW'(k); ifat_start = IAW'(is); ifat_stop = IAW'(is + len - 1);
    ifrt_we = 1; ifrt_idx = RW'(k); ifrt_mask = '0;
    for (int r = er; r < er + len; r++) ifrt_mask[r] = 1'b1;
    ofat_we = 1; ofat_idx = RW'(k); ofat_start = OAW'(os); ofat_stop = OAW'(os + 255); ofat_col = '0;
    @(negedge clk); ifat_we = 0; ifrt_we = 0; ofat_we = 0;
  endtask

  task automatic run(input int nr, output int cyc);
    @(negedge clk); start = 1; n_rounds = (RW+1)'(nr);
    @(negedge clk); start = 0;
    cyc = 1;
    while (!done && cyc < 100000) begin @(negedge clk); cyc++; end
  endtask

  task automatic check_all(input string mode);
    for (int j = 0; j < N; j++) begin
      @(negedge clk); out_re = 1; out_raddr = OAW'(j);
      @(negedge clk); out_re = 0;
      checks++;
      if (!out_rvalid || out_rdata !== ACC_W'(expo[j])) begin
        failures++;
        if (failures < 20) $display("FAIL %s channel %0d: %0d expected %0d", mode, j, $signed(out_rdata), expo[j]);
      end
    end
  endtask

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int i = 0; i < K; i++) begin
      @(negedge clk);
      buf_we = 1; buf_waddr = IAW'(i); buf_wdata = A_BITS'($urandom);
      x[i] = int'($signed(buf_wdata));
    end
    @(negedge clk); buf_we = 0;
    for (int c = 0; c < int'(XB_COLS); c++)
      for (int r = 0; r < int'(XB_ROWS); r++) begin
        @(negedge clk);
        xb_we = 1; xb_row = ROW_W'(r); xb_col = COL_W'(c); xb_wdata = W_BITS'($urandom);
        e[r][c] = int'($signed(xb_wdata));
      end
    @(negedge clk); xb_we = 0;
    // virtual convolution
    for (int i = 0; i < 256; i++) rowmap[i] = i;
    for (int i = 256; i < 384; i++) rowmap[i] = i - 256 + 64;
    for (int i = 384; i < 512; i++) rowmap[i] = i - 384 + 128;
    for (int j = 0; j < N; j++) begin
      expo[j] = 0;
      for (int i = 0; i < K; i++) expo[j] += x[i] * e[rowmap[i]][j % 256];
    end

    // Mode A: every channel computed
    entry(0, 0,   256, 0,   0);
    entry(1, 256, 128, 64,  0);
    entry(2, 384, 128, 128, 0);
    entry(3, 0,   256, 0,   256);
    entry(4, 256, 128, 64,  256);
    entry(5, 384, 128, 128, 256);
    run(6, cyc_a);
    wr_a = int'(n_ob_writes);
    wrap_en = 0;
    check_all("no-wrap");

    // Mode B: output channel wrapping, c = 256, r = 2
    run(3, cyc_b);
    wr_b = int'(n_ob_writes);
    wrap_en = 1; wrap_c = (OAW+1)'(256);
    check_all("wrap");
    wrap_en = 0;

    $display("no wrapping: 6 activations, %0d output-buffer writes, %0d clocks; wrapping: 3 activations, %0d writes, %0d clocks",
             wr_a, cyc_a, wr_b, cyc_b);
    checks++;
    if (wr_a != 2 * wr_b || wr_b != 768) begin failures++; $display("FAIL write reduction %0d vs %0d", wr_a, wr_b); end
    checks++;
    if (cyc_b * 2 > cyc_a + 2) begin failures++; $display("FAIL wrapping did not halve the time"); end
    checks++;
    if (ifrt_overflow) begin failures++; $display("FAIL IFRT overflow"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
