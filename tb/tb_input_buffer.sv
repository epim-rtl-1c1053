// tb_input_buffer -- self-checking test of the input feature buffer.
// Writes random values at random addresses over the whole default depth,
// reads them back and checks value and the one-clock read latency.
module tb_input_buffer;
  localparam int unsigned DEPTH = epim_pkg::IN_DEPTH;
  localparam int unsigned W     = epim_pkg::A_BITS;
  localparam int unsigned AW    = $clog2(DEPTH);

  logic clk = 0, rst_n = 0;
  logic wr_en = 0, rd_en = 0, rd_valid;
  logic [AW-1:0] wr_addr = '0, rd_addr = '0;
  logic [W-1:0]  wr_data = '0, rd_data;
  int checks = 0, failures = 0;
  logic [W-1:0] ref_mem [DEPTH];

  input_buffer dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    // fill every word
    for (int i = 0; i < int'(DEPTH); i++) begin
      @(negedge clk);
      wr_en = 1; wr_addr = AW'(i); wr_data = W'($urandom);
      ref_mem[i] = wr_data;
    end
    // overwrite some
    for (int i = 0; i < 500; i++) begin
      @(negedge clk);
      wr_addr = AW'($urandom_range(DEPTH - 1)); wr_data = W'($urandom);
      ref_mem[wr_addr] = wr_data;
    end
    @(negedge clk); wr_en = 0;
    // read back
    for (int i = 0; i < 2000; i++) begin
      logic [AW-1:0] a;
      a = (i < 16) ? AW'(DEPTH - 1 - i) : AW'($urandom_range(DEPTH - 1));
      @(negedge clk); rd_en = 1; rd_addr = a;
      @(negedge clk); rd_en = 0;
      checks++;
      if (!rd_valid || rd_data !== ref_mem[a]) begin
        failures++;
        $display("FAIL addr %0d: got %h valid %b, expected %h", a, rd_data, rd_valid, ref_mem[a]);
      end
    end
    @(negedge clk);
    checks++;
    if (rd_valid) begin failures++; $display("FAIL rd_valid stuck"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
