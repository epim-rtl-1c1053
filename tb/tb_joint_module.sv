// tb_joint_module -- self-checking test of the joint module.
// Feeds patch results with overlapping destination ranges (which must be
// added) and adjacent ones (which must be concatenated), checks the rebuilt
// map and the write/add/concatenate counters, then reads with output
// channel wrapping enabled, where channel x must return channel x mod c.
module tb_joint_module;
  localparam int unsigned DEPTH  = epim_pkg::OUT_DEPTH;
  localparam int unsigned PSUM_W = epim_pkg::PSUM_W;
  localparam int unsigned ACC_W  = epim_pkg::ACC_W;
  localparam int unsigned AW     = $clog2(DEPTH);

  logic clk = 0, rst_n = 0, clr = 0, in_valid = 0, wrap_en = 0, rd_en = 0, rd_valid;
  logic [AW-1:0] in_addr = '0, rd_addr = '0;
  logic [PSUM_W-1:0] in_val = '0;
  logic [AW:0] wrap_c = '0;
  logic [ACC_W-1:0] rd_data;
  logic [31:0] n_writes, n_add, n_concat;
  int checks = 0, failures = 0;
  int refm [DEPTH];
  bit wr [DEPTH];
  int nw, na, nc;

  joint_module dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic patch(input int start, input int len);
    for (int k = 0; k < len; k++) begin
      int v;
      v = int'($signed(PSUM_W'($urandom)));
      @(negedge clk);
      in_valid = 1; in_addr = AW'(start + k); in_val = PSUM_W'(v);
      nw++;
      if (wr[start + k]) begin refm[start + k] += v; na++; end
      else begin refm[start + k] = v; wr[start + k] = 1; nc++; end
    end
    @(negedge clk); in_valid = 0;
  endtask

  task automatic rd(input int a, input int expv);
    @(negedge clk); rd_en = 1; rd_addr = AW'(a);
    @(negedge clk); rd_en = 0;
    checks++;
    if (!rd_valid || rd_data !== ACC_W'(expv)) begin
      failures++; $display("FAIL read %0d (wrap %b c %0d): %0d vs %0d", a, wrap_en, wrap_c, $signed(rd_data), expv);
    end
  endtask

  initial begin
    for (int i = 0; i < int'(DEPTH); i++) begin refm[i] = 0; wr[i] = 0; end
    nw = 0; na = 0; nc = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    @(negedge clk); clr = 1; @(negedge clk); clr = 0;
    patch(0, 64);     // patch A
    patch(0, 64);     // same start/stop: added
    patch(64, 32);    // sequential indices: concatenated
    patch(32, 64);    // partly overlapping
    patch(DEPTH - 8, 8);
    checks++;
    if (n_writes != 32'(nw) || n_add != 32'(na) || n_concat != 32'(nc)) begin
      failures++; $display("FAIL counters %0d/%0d/%0d vs %0d/%0d/%0d", n_writes, n_add, n_concat, nw, na, nc);
    end
    for (int a = 0; a < 100; a++) rd(a, refm[a]);
    for (int a = DEPTH - 10; a < int'(DEPTH); a++) rd(a, refm[a]);
    // channel wrapping: c = 96 computed channels reused for 96..383
    wrap_en = 1; wrap_c = (AW+1)'(96);
    for (int a = 0; a < 384; a++) rd(a, refm[a % 96]);
    wrap_en = 0;
    // clear forgets everything
    @(negedge clk); clr = 1; @(negedge clk); clr = 0;
    rd(0, 0);
    rd(70, 0);
    checks++;
    if (n_writes != 0) begin failures++; $display("FAIL counters not cleared"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
