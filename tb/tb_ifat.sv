// tb_ifat -- self-checking test of the Input Feature Address Table.
// Programs every entry with a random start/stop pair, then for each entry
// walks the continuous offset and checks the buffer address (start + off)
// and that "last" is raised exactly at the stop index.
module tb_ifat;
  localparam int unsigned MAX_ROUNDS = epim_pkg::MAX_ROUNDS;
  localparam int unsigned DEPTH      = epim_pkg::IN_DEPTH;
  localparam int unsigned RW = $clog2(MAX_ROUNDS);
  localparam int unsigned AW = $clog2(DEPTH);

  logic clk = 0, rst_n = 0;
  logic wr_en = 0;
  logic [RW-1:0] wr_idx = '0, round = '0;
  logic [AW-1:0] wr_start = '0, wr_stop = '0, addr;
  logic in_valid = 0, addr_valid, last;
  logic [15:0] off = '0;
  int checks = 0, failures = 0;
  int st [MAX_ROUNDS], sp [MAX_ROUNDS];

  ifat dut (.*);

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
      st[i] = $urandom_range(DEPTH - 300);
      sp[i] = st[i] + ((i == 0) ? 0 : $urandom_range(255));
      @(negedge clk);
      wr_en = 1; wr_idx = RW'(i); wr_start = AW'(st[i]); wr_stop = AW'(sp[i]);
    end
    @(negedge clk); wr_en = 0;
    for (int i = MAX_ROUNDS - 1; i >= 0; i--) begin
      round = RW'(i);
      for (int k = 0; k <= sp[i] - st[i]; k++) begin
        in_valid = 1; off = 16'(k);
        #1;
        checks++;
        if (!addr_valid || addr !== AW'(st[i] + k) || last !== (k == sp[i] - st[i])) begin
          failures++;
          $display("FAIL entry %0d off %0d: addr %0d last %b", i, k, addr, last);
        end
      end
    end
    in_valid = 0; #1;
    checks++;
    if (addr_valid || last) begin failures++; $display("FAIL valid without request"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
