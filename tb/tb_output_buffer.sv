// tb_output_buffer -- self-checking test of the output buffer.
// Pushes the results of several "rounds" of random length, then pops them
// all back and checks order, values, the one-clock read latency and the
// write counter.  Also interleaves pushes and pops, and checks that clear
// restarts the buffer.  Runs at the default depth, filling it once.
module tb_output_buffer;
  localparam int unsigned DEPTH = epim_pkg::OB_DEPTH;
  localparam int unsigned W     = epim_pkg::PSUM_W;

  logic clk = 0, rst_n = 0, clr = 0, push = 0, pop = 0, pop_valid;
  logic [W-1:0] push_data = '0, pop_data;
  logic [31:0] n_writes;
  int checks = 0, failures = 0;
  logic [W-1:0] q [$];

  output_buffer dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic do_pop();
    logic [W-1:0] expv;
    expv = q.pop_front();
    @(negedge clk); pop = 1;
    @(negedge clk); pop = 0;
    checks++;
    if (!pop_valid || pop_data !== expv) begin
      failures++;
      if (failures < 20) $display("FAIL pop: %h valid %b, expected %h", pop_data, pop_valid, expv);
    end
  endtask

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    @(negedge clk); clr = 1; @(negedge clk); clr = 0;
    // fill completely
    for (int i = 0; i < int'(DEPTH); i++) begin
      @(negedge clk); push = 1; push_data = W'($urandom);
      q.push_back(push_data);
    end
    @(negedge clk); push = 0;
    checks++;
    if (n_writes != 32'(DEPTH)) begin failures++; $display("FAIL n_writes %0d", n_writes); end
    for (int i = 0; i < 3000; i++) do_pop();
    // restart
    @(negedge clk); clr = 1; @(negedge clk); clr = 0;
    q.delete();
    checks++;
    if (n_writes != 0) begin failures++; $display("FAIL n_writes not cleared"); end
    for (int r = 0; r < 20; r++) begin
      int len = 1 + $urandom_range(200);
      for (int i = 0; i < len; i++) begin
        @(negedge clk); push = 1; push_data = W'($urandom);
        q.push_back(push_data);
      end
      @(negedge clk); push = 0;
      if (r % 2 == 1) while (q.size() > 0) do_pop();
    end
    while (q.size() > 0) do_pop();
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
