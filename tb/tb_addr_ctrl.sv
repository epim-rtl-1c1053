// tb_addr_ctrl -- self-checking test of the address controller.
// Surrounds the controller with stand-ins for IFAT, OFAT and crossbar:
// each round has its own input and output range length and the crossbar
// answers XB_LAT clocks after activation.  Checks that the continuous
// offsets run 0..L-1 for the load, store and join uses of every round, that
// all rounds are activated before the first join, that each round clears
// and activates once, that done pulses once, and the clock count of the
// documented formula: 1 + L_in + 1 + 1 + XB_LAT + L_out + 1 per round in the
// activation phase plus L_out + 1 per round in the join phase.
module tb_addr_ctrl;
  localparam int unsigned MAX_ROUNDS = epim_pkg::MAX_ROUNDS;
  localparam int unsigned RW = $clog2(MAX_ROUNDS);
  localparam int XB_LAT = 7;

  logic clk = 0, rst_n = 0, start = 0;
  logic [RW:0] n_rounds = '0;
  logic busy, done, op_clr, round_clr, ld_valid, xb_act, store_valid, join_valid;
  logic ifat_last, xb_done, ofat_last;
  logic [RW-1:0] round;
  logic [15:0] ld_off, out_off;
  int checks = 0, failures = 0;
  int lin [MAX_ROUNDS], lout [MAX_ROUNDS];
  int xb_cnt;

  addr_ctrl dut (.*);

  always #5 clk = ~clk;

  assign ifat_last = ld_valid && (int'(ld_off) == lin[round] - 1);
  assign ofat_last = (store_valid || join_valid) && (int'(out_off) == lout[round] - 1);
  assign xb_done   = (xb_cnt == 1);

  always_ff @(posedge clk) begin
    if (xb_act)          xb_cnt <= XB_LAT;
    else if (xb_cnt > 0) xb_cnt <= xb_cnt - 1;
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // Observers
  int n_clr, n_act, n_done, n_opclr, exp_off_in, exp_off_out, off_err, n_join, order_err;
  bit in_join;
  always @(posedge clk) if (rst_n) begin
    if (round_clr) begin n_clr++; exp_off_in = 0; exp_off_out = 0; end
    if (ld_valid)  begin if (int'(ld_off) != exp_off_in) off_err++; exp_off_in++; end
    if (store_valid) begin if (int'(out_off) != exp_off_out) off_err++; exp_off_out++; end
    if (join_valid) begin
      if (!in_join) begin in_join = 1; exp_off_out = 0; end
      if (int'(out_off) != exp_off_out) off_err++;
      exp_off_out = ofat_last ? 0 : exp_off_out + 1;
      n_join++;
    end
    if (in_join && (ld_valid || xb_act || store_valid)) order_err++;
    if (done) in_join = 0;
    if (xb_act) n_act++;
    if (done) n_done++;
    if (op_clr) n_opclr++;
  end

  task automatic run(input int nr);
    int cyc, expc;
    int nj;
    n_clr = 0; n_act = 0; n_done = 0; n_opclr = 0; off_err = 0; n_join = 0; order_err = 0; in_join = 0;
    expc = 0; nj = 0;
    for (int i = 0; i < nr; i++) begin
      expc += 1 + lin[i] + 1 + 1 + XB_LAT + lout[i] + 1 + lout[i] + 1;
      nj += lout[i];
    end
    @(negedge clk); start = 1; n_rounds = (RW+1)'(nr);
    @(negedge clk); start = 0;
    cyc = 1;
    while (!done) begin @(negedge clk); cyc++; end
    @(negedge clk);
    checks++;
    if (nr > 0 && cyc != expc + 1) begin failures++; $display("FAIL %0d rounds took %0d clocks, expected %0d", nr, cyc, expc + 1); end
    checks++;
    if (n_clr != nr || n_act != nr || n_done != 1 || n_opclr != 1 || off_err != 0 || n_join != nj || order_err != 0) begin
      failures++; $display("FAIL nr=%0d clr %0d act %0d done %0d opclr %0d offerr %0d join %0d/%0d order %0d",
                           nr, n_clr, n_act, n_done, n_opclr, off_err, n_join, nj, order_err);
    end
    checks++;
    if (busy) begin failures++; $display("FAIL still busy"); end
  endtask

  initial begin
    xb_cnt = 0;
    for (int i = 0; i < int'(MAX_ROUNDS); i++) begin
      lin[i]  = 1 + $urandom_range(40);
      lout[i] = 1 + $urandom_range(20);
    end
    repeat (2) @(posedge clk);
    rst_n = 1;
    run(1);
    run(3);
    run(MAX_ROUNDS);
    run(0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
