// tb_ofat -- self-checking test of the Output Feature Address Table.
// Programs random (start, stop, first bit line) entries and checks, for each
// offset of each entry, the destination index start+off, the source bit
// line col_base+off and the "last" flag at the stop index.
module tb_ofat;
  localparam int unsigned MAX_ROUNDS = epim_pkg::MAX_ROUNDS;
  localparam int unsigned DEPTH      = epim_pkg::OUT_DEPTH;
  localparam int unsigned COLS       = epim_pkg::XB_COLS;
  localparam int unsigned RW    = $clog2(MAX_ROUNDS);
  localparam int unsigned AW    = $clog2(DEPTH);
  localparam int unsigned COL_W = $clog2(COLS);

  logic clk = 0, rst_n = 0;
  logic wr_en = 0;
  logic [RW-1:0] wr_idx = '0, round = '0;
  logic [AW-1:0] wr_start = '0, wr_stop = '0, dst;
  logic [COL_W-1:0] wr_col = '0, src_col;
  logic in_valid = 0, out_valid, last;
  logic [15:0] off = '0;
  int checks = 0, failures = 0;
  int st [MAX_ROUNDS], sp [MAX_ROUNDS], cb [MAX_ROUNDS];

  ofat dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int i = 0; i < int'(MAX_ROUNDS); i++) begin
      int len;
      len   = $urandom_range(COLS - 1);
      cb[i] = $urandom_range(COLS - 1 - len);
      st[i] = $urandom_range(DEPTH - 1 - len);
      sp[i] = st[i] + len;
      @(negedge clk);
      wr_en = 1; wr_idx = RW'(i); wr_start = AW'(st[i]); wr_stop = AW'(sp[i]); wr_col = COL_W'(cb[i]);
    end
    @(negedge clk); wr_en = 0;
    for (int i = 0; i < int'(MAX_ROUNDS); i++) begin
      round = RW'(i);
      for (int k = 0; k <= sp[i] - st[i]; k++) begin
        in_valid = 1; off = 16'(k);
        #1;
        checks++;
        if (!out_valid || dst !== AW'(st[i] + k) || src_col !== COL_W'(cb[i] + k)
            || last !== (k == sp[i] - st[i])) begin
          failures++;
          $display("FAIL entry %0d off %0d: dst %0d col %0d last %b", i, k, dst, src_col, last);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
