// tb_wl_conv_layer -- workload test: a 3x3 convolution layer whose weights
// are sampled from a four-dimensional epitome, run position by position on
// the default data path and compared with a direct convolution.
//
// Epitome E[p][q][c][o]: 4 x 4 spatial, 8 input and 16 output channels.
// It is mapped onto the crossbar with (p, q, c) on word lines,
// row = (p*4 + q)*8 + c, and o on bit lines.  The virtual convolution has
// 16 input channels, 32 output channels and a 3 x 3 kernel.  It is built
// from 2 input-channel groups x 4 output-channel groups of patches
// E[p0:p0+3, q0:q0+3, 0:8, o0:o0+8].  Each patch has its own spatial
// start (p0, q0) and bit-line start o0, so its 72 word lines are scattered
// over the crossbar.
//
// For each output position the unrolled receptive field is written to the
// buffer in (group, kh, kw, c) order, so each patch's inputs are one
// contiguous IFAT range.  Eight rounds then rebuild the 32 output channels:
// the two input groups add, the four output groups concatenate.  The image
// is 5 x 5 x 16 (valid padding, 3 x 3 outputs).
module tb_wl_conv_layer;
  import epim_pkg::*;
  localparam int unsigned RW    = $clog2(MAX_ROUNDS);
  localparam int unsigned IAW   = $clog2(IN_DEPTH);
  localparam int unsigned OAW   = $clog2(OUT_DEPTH);
  localparam int unsigned ROW_W = $clog2(XB_ROWS);
  localparam int unsigned COL_W = $clog2(XB_COLS);
  localparam int EP = 4, EQ = 4, EC = 8, EO = 16;     // epitome
  localparam int CI = 16, CO = 32, KS = 3;            // virtual convolution
  localparam int IH = 5, IW = 5, OH = IH - KS + 1, OW = IW - KS + 1;
  localparam int NG = CI / EC, NH = CO / 8;           // patch groups
  localparam int PLEN = KS * KS * EC;                 // inputs per patch

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
  int e [EP][EQ][EC][EO];
  int img [IH][IW][CI];
  int p0 [NG][NH], q0 [NG][NH], o0 [NG][NH];

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic int xrow(int p, int q, int c);
    return (p * EQ + q) * EC + c;
  endfunction

  // Virtual convolution weight, straight from the sampler definition.
  function automatic int wv(int kh, int kw, int ci, int co);
    int g, h;
    g = ci / EC; h = co / 8;
    return e[p0[g][h] + kh][q0[g][h] + kw][ci % EC][o0[g][h] + co % 8];
  endfunction

  initial begin
    int round;
    repeat (3) @(posedge clk);
    rst_n = 1;
    // epitome into the crossbar; unused cells get random values too
    for (int c = 0; c < int'(XB_COLS); c++)
      for (int r = 0; r < int'(XB_ROWS); r++) begin
        @(negedge clk);
        xb_we = 1; xb_row = ROW_W'(r); xb_col = COL_W'(c); xb_wdata = W_BITS'($urandom);
        if (r < EP * EQ * EC && c < EO)
          e[r / (EQ * EC)][(r / EC) % EQ][r % EC][c] = int'($signed(xb_wdata));
      end
    @(negedge clk); xb_we = 0;
    for (int y = 0; y < IH; y++)
      for (int x = 0; x < IW; x++)
        for (int c = 0; c < CI; c++) img[y][x][c] = int'($signed(A_BITS'($urandom)));
    // sampler: patch starts
    for (int g = 0; g < NG; g++)
      for (int h = 0; h < NH; h++) begin
        p0[g][h] = (g + h) % (EP - KS + 1);
        q0[g][h] = (h / 2 + g) % (EQ - KS + 1);
        o0[g][h] = (h % 2) * 8;
      end
    // tables: round = g * NH + h
    round = 0;
    for (int g = 0; g < NG; g++)
      for (int h = 0; h < NH; h++) begin
        @(negedge clk);
        ifat_we = 1; ifat_idx = RW'(round);
        ifat_start = IAW'(g * PLEN); ifat_stop = IAW'(g * PLEN + PLEN - 1);
        ifrt_we = 1; ifrt_idx = RW'(round); ifrt_mask = '0;
        for (int kh = 0; kh < KS; kh++)
          for (int kw = 0; kw < KS; kw++)
            for (int c = 0; c < EC; c++) ifrt_mask[xrow(p0[g][h] + kh, q0[g][h] + kw, c)] = 1'b1;
        ofat_we = 1; ofat_idx = RW'(round);
        ofat_start = OAW'(h * 8); ofat_stop = OAW'(h * 8 + 7); ofat_col = COL_W'(o0[g][h]);
        round++;
      end
    @(negedge clk); ifat_we = 0; ifrt_we = 0; ofat_we = 0;

    for (int oy = 0; oy < OH; oy++)
      for (int ox = 0; ox < OW; ox++) begin
        // unrolled receptive field, (group, kh, kw, c) order
        for (int g = 0; g < NG; g++)
          for (int kh = 0; kh < KS; kh++)
            for (int kw = 0; kw < KS; kw++)
              for (int c = 0; c < EC; c++) begin
                @(negedge clk);
                buf_we = 1; buf_waddr = IAW'(g * PLEN + (kh * KS + kw) * EC + c);
                buf_wdata = A_BITS'(img[oy + kh][ox + kw][g * EC + c]);
              end
        @(negedge clk); buf_we = 0;
        @(negedge clk); start = 1; n_rounds = (RW+1)'(NG * NH);
        @(negedge clk); start = 0;
        while (!done) @(negedge clk);
        checks++;
        if (ifrt_overflow || n_out_add != 32'((NG - 1) * CO) || n_out_concat != 32'(CO)) begin
          failures++; $display("FAIL position (%0d,%0d): overflow %b add %0d concat %0d", oy, ox, ifrt_overflow, n_out_add, n_out_concat);
        end
        for (int co = 0; co < CO; co++) begin
          int expv;
          expv = 0;
          for (int kh = 0; kh < KS; kh++)
            for (int kw = 0; kw < KS; kw++)
              for (int ci = 0; ci < CI; ci++) expv += img[oy + kh][ox + kw][ci] * wv(kh, kw, ci, co);
          @(negedge clk); out_re = 1; out_raddr = OAW'(co);
          @(negedge clk); out_re = 0;
          checks++;
          if (!out_rvalid || out_rdata !== ACC_W'(expv)) begin
            failures++;
            if (failures < 20) $display("FAIL out(%0d,%0d,%0d): %0d expected %0d", oy, ox, co, $signed(out_rdata), expv);
          end
        end
      end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
