// tb_epim_top -- end-to-end test of the EPIM data path at its default size
// (256 x 256 crossbar, 4608-word input buffer, 2048-entry output map,
// 64-entry tables).
//
// It loads a random input vector and random signed weights into every
// crossbar cell.  It then programs five rounds that exercise every mechanism
// of the data path:
//   R0  256 inputs on all word lines, results to outputs 0..63
//   R1  128 inputs on word lines 64..191 only, results again to 0..63
//       (identical OFAT pair: joint module adds)
//   R2  128 inputs on the even word lines, others at zero, to 0..63
//   R3  256 inputs, bit lines 64..95, to outputs 64..95 (concatenation)
//   R4  a random word-line mask, bit lines 200..247, to outputs 2000..2047
// The expected output map is computed here from the same tables.  The map
// is then read directly and with output channel wrapping (c = 96, so
// channels 96..383 reuse channels 0..95).  The test checks the number of
// output-buffer and output-map writes and the clock count of the
// operation (activation phase, then join phase).  A second, single-
// round operation checks that a new operation starts from an empty map.
// Each mechanism is counted, and one that never happened is a failure.
module tb_epim_top;
  import epim_pkg::*;
  localparam int unsigned RW    = $clog2(MAX_ROUNDS);
  localparam int unsigned IAW   = $clog2(IN_DEPTH);
  localparam int unsigned OAW   = $clog2(OUT_DEPTH);
  localparam int unsigned ROW_W = $clog2(XB_ROWS);
  localparam int unsigned COL_W = $clog2(XB_COLS);
  localparam int NR = 5;

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
  int bufm [IN_DEPTH];
  int wt [XB_ROWS][XB_COLS];
  int is_[NR], ip_[NR], os_[NR], op_[NR], oc_[NR];
  logic [XB_ROWS-1:0] mk [NR];
  int refm [OUT_DEPTH];
  // mechanism counters
  int m_zero_rows, m_add, m_concat, m_wrap_reads, m_multi_round;

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic int popc(logic [XB_ROWS-1:0] m);
    int n = 0;
    for (int r = 0; r < int'(XB_ROWS); r++) n += int'(m[r]);
    return n;
  endfunction

  // Reference: rebuild the output map of rounds 0..nr-1.
  task automatic reference(input int nr);
    for (int a = 0; a < int'(OUT_DEPTH); a++) refm[a] = 0;
    for (int k = 0; k < nr; k++) begin
      int wlv [XB_ROWS];
      int p;
      p = is_[k];
      for (int r = 0; r < int'(XB_ROWS); r++) begin
        if (mk[k][r]) begin wlv[r] = bufm[p]; p++; end
        else wlv[r] = 0;
      end
      for (int j = 0; j <= op_[k] - os_[k]; j++) begin
        int s = 0;
        for (int r = 0; r < int'(XB_ROWS); r++) s += wlv[r] * wt[r][oc_[k] + j];
        refm[os_[k] + j] += s;
      end
    end
  endtask

  task automatic rd(input int a, input int expv);
    @(negedge clk); out_re = 1; out_raddr = OAW'(a);
    @(negedge clk); out_re = 0;
    checks++;
    if (!out_rvalid || out_rdata !== ACC_W'(expv)) begin
      failures++;
      if (failures < 20) $display("FAIL out[%0d] wrap=%b: %0d expected %0d", a, wrap_en, $signed(out_rdata), expv);
    end
  endtask

  task automatic run(input int nr, input int expect_cycles);
    int cyc;
    @(negedge clk); start = 1; n_rounds = (RW+1)'(nr);
    @(negedge clk); start = 0;
    cyc = 1;
    while (!done && cyc < 100000) begin @(negedge clk); cyc++; end
    checks++;
    if (cyc != expect_cycles) begin
      failures++; $display("FAIL %0d rounds took %0d clocks, expected %0d", nr, cyc, expect_cycles);
    end
    if (nr > 1) m_multi_round++;
  endtask

  initial begin
    int nw, cyc_exp;
    m_zero_rows = 0; m_add = 0; m_concat = 0; m_wrap_reads = 0; m_multi_round = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    // input features
    for (int i = 0; i < int'(IN_DEPTH); i++) begin
      @(negedge clk);
      buf_we = 1; buf_waddr = IAW'(i); buf_wdata = A_BITS'($urandom);
      bufm[i] = int'($signed(buf_wdata));
    end
    @(negedge clk); buf_we = 0;
    // crossbar cells
    for (int c = 0; c < int'(XB_COLS); c++)
      for (int r = 0; r < int'(XB_ROWS); r++) begin
        @(negedge clk);
        xb_we = 1; xb_row = ROW_W'(r); xb_col = COL_W'(c); xb_wdata = W_BITS'($urandom);
        wt[r][c] = int'($signed(xb_wdata));
      end
    @(negedge clk); xb_we = 0;
    // tables
    mk[0] = '1;                                   is_[0] = 0;   os_[0] = 0;    op_[0] = 63;   oc_[0] = 0;
    mk[1] = '0; for (int r = 64; r < 192; r++) mk[1][r] = 1'b1;
                                                  is_[1] = 256; os_[1] = 0;    op_[1] = 63;   oc_[1] = 0;
    mk[2] = '0; for (int r = 0; r < int'(XB_ROWS); r += 2) mk[2][r] = 1'b1;
                                                  is_[2] = 384; os_[2] = 0;    op_[2] = 63;   oc_[2] = 0;
    mk[3] = '1;                                   is_[3] = 512; os_[3] = 64;   op_[3] = 95;   oc_[3] = 64;
    mk[4] = {$urandom, $urandom, $urandom, $urandom, $urandom, $urandom, $urandom, $urandom};
    is_[4] = IN_DEPTH - popc(mk[4]);              os_[4] = OUT_DEPTH - 48; op_[4] = OUT_DEPTH - 1; oc_[4] = 200;
    for (int k = 0; k < NR; k++) begin
      ip_[k] = is_[k] + popc(mk[k]) - 1;
      if (popc(mk[k]) < int'(XB_ROWS)) m_zero_rows++;
      @(negedge clk);
      ifat_we = 1; ifat_idx = RW'(k); ifat_start = IAW'(is_[k]); ifat_stop = IAW'(ip_[k]);
      ifrt_we = 1; ifrt_idx = RW'(k); ifrt_mask = mk[k];
      ofat_we = 1; ofat_idx = RW'(k); ofat_start = OAW'(os_[k]); ofat_stop = OAW'(op_[k]); ofat_col = COL_W'(oc_[k]);
    end
    @(negedge clk); ifat_we = 0; ifrt_we = 0; ofat_we = 0;

    // operation 1: all five rounds
    reference(NR);
    cyc_exp = 0; nw = 0;
    for (int k = 0; k < NR; k++) begin
      cyc_exp += 1 + (ip_[k] - is_[k] + 1) + 1 + 1 + int'(XB_COLS) + (op_[k] - os_[k] + 1) + 1   // activation phase
               + (op_[k] - os_[k] + 1) + 1;                                                    // join phase
      nw += op_[k] - os_[k] + 1;
    end
    run(NR, cyc_exp + 1);
    checks++;
    if (ifrt_overflow) begin failures++; $display("FAIL IFRT overflow"); end
    checks++;
    if (n_out_writes != 32'(nw) || n_ob_writes != 32'(nw)) begin
      failures++; $display("FAIL output writes %0d / buffer writes %0d, expected %0d", n_out_writes, n_ob_writes, nw);
    end
    m_add = int'(n_out_add); m_concat = int'(n_out_concat);
    checks++;
    if (n_out_add != 32'(128) || n_out_concat != 32'(64 + 32 + 48)) begin
      failures++; $display("FAIL add/concat counts %0d/%0d", n_out_add, n_out_concat);
    end
    for (int a = 0; a < 96; a++) rd(a, refm[a]);
    for (int a = 96; a < 110; a++) rd(a, 0);
    for (int a = OUT_DEPTH - 48; a < int'(OUT_DEPTH); a++) rd(a, refm[a]);
    // output channel wrapping: 96 computed channels serve channels 0..383
    wrap_en = 1; wrap_c = (OAW+1)'(96);
    for (int a = 0; a < 384; a++) begin
      rd(a, refm[a % 96]);
      if (a >= 96) m_wrap_reads++;
    end
    wrap_en = 0;

    // operation 2: round 0 alone, starting from an empty map
    reference(1);
    run(1, 1 + 256 + 1 + 1 + int'(XB_COLS) + 64 + 1 + 64 + 1 + 1);
    for (int a = 0; a < 64; a++) rd(a, refm[a]);
    rd(64, 0);
    rd(OUT_DEPTH - 1, 0);

    // every mechanism must have happened
    $display("mechanisms: zero word lines %0d, joint add %0d, concatenation %0d, wrapped reads %0d, multi-round ops %0d",
             m_zero_rows, m_add, m_concat, m_wrap_reads, m_multi_round);
    checks++; if (m_zero_rows == 0)   begin failures++; $display("FAIL no IFRT zero word line"); end
    checks++; if (m_add == 0)         begin failures++; $display("FAIL no joint addition"); end
    checks++; if (m_concat == 0)      begin failures++; $display("FAIL no concatenation"); end
    checks++; if (m_wrap_reads == 0)  begin failures++; $display("FAIL no channel wrapping"); end
    checks++; if (m_multi_round == 0) begin failures++; $display("FAIL no multi-round operation"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
