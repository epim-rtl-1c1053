// tb_ifrt -- self-checking test of the Input Feature Row Table.
// First the example of the data-path figure: values 6, 2, 4 with word-line
// bits 1,1,0,1 must land on word lines 0, 1 and 3.  Then random masks:
// the k-th value of a round must go to the k-th set bit, and a value beyond
// the last set bit must raise overflow until the next clear.
module tb_ifrt;
  localparam int unsigned MAX_ROUNDS = epim_pkg::MAX_ROUNDS;
  localparam int unsigned ROWS       = epim_pkg::XB_ROWS;
  localparam int unsigned W          = epim_pkg::A_BITS;
  localparam int unsigned RW    = $clog2(MAX_ROUNDS);
  localparam int unsigned ROW_W = $clog2(ROWS);

  logic clk = 0, rst_n = 0;
  logic wr_en = 0, clr = 0, in_valid = 0;
  logic [RW-1:0] wr_idx = '0, round = '0;
  logic [ROWS-1:0] wr_mask = '0;
  logic [W-1:0] in_data = '0, ir_data;
  logic ir_we, overflow;
  logic [ROW_W-1:0] ir_row;
  int checks = 0, failures = 0;
  logic [ROWS-1:0] masks [MAX_ROUNDS];

  ifrt dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic send(input logic [W-1:0] v, input bit exp_we, input int exp_row);
    @(negedge clk);
    in_valid = 1; in_data = v;
    #1;
    checks++;
    if (ir_we !== exp_we || (exp_we && (ir_row !== ROW_W'(exp_row) || ir_data !== v))) begin
      failures++;
      $display("FAIL value %0d: we %b row %0d, expected we %b row %0d", v, ir_we, ir_row, exp_we, exp_row);
    end
    @(posedge clk); #1 in_valid = 0;
  endtask

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int i = 0; i < int'(MAX_ROUNDS); i++) begin
      masks[i] = (i == 0) ? ROWS'(4'b1011) : {$urandom, $urandom, $urandom, $urandom, $urandom, $urandom, $urandom, $urandom};
      @(negedge clk); wr_en = 1; wr_idx = RW'(i); wr_mask = masks[i];
    end
    @(negedge clk); wr_en = 0;
    // figure example: 6,2,4 onto rows 0,1,3
    round = '0;
    @(negedge clk); clr = 1; @(negedge clk); clr = 0;
    send(9'd6, 1, 0);
    send(9'd2, 1, 1);
    send(9'd4, 1, 3);
    send(9'd7, 0, 0);
    checks++;
    if (!overflow) begin failures++; $display("FAIL overflow not raised"); end
    @(negedge clk); clr = 1; @(negedge clk); clr = 0;
    checks++;
    if (overflow) begin failures++; $display("FAIL overflow not cleared"); end
    // random rounds
    for (int i = 1; i < int'(MAX_ROUNDS); i++) begin
      round = RW'(i);
      @(negedge clk); clr = 1; @(negedge clk); clr = 0;
      for (int r = 0; r < int'(ROWS); r++)
        if (masks[i][r]) send(W'($urandom), 1, r);
      send(W'($urandom), 0, 0);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
