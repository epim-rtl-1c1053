// ofat -- Output Feature Address Table.
//
// One entry per sampled epitome patch: a start/stop index pair giving where
// that patch's results belong in the whole output feature map (paper).  The
// entry also holds col_base, the first bit line of the patch in the
// crossbar.  The paper does not say how the result columns are chosen, so
// col_base is this design's addition.  The address controller supplies a
// continuous offset.  The OFAT turns it into a source column col_base+off
// in the output register and a destination start+off in the output map.
// The offset that reaches stop is flagged as the last one.
//
// Interface: table write (wr_en, wr_idx, wr_start, wr_stop, wr_col);
// lookup (in_valid, round, off) -> (out_valid, src_col, dst, last),
// combinational.
module ofat #(
  parameter int unsigned MAX_ROUNDS = epim_pkg::MAX_ROUNDS,
  parameter int unsigned DEPTH      = epim_pkg::OUT_DEPTH,
  parameter int unsigned COLS       = epim_pkg::XB_COLS,
  localparam int unsigned RW        = $clog2(MAX_ROUNDS),
  localparam int unsigned AW        = $clog2(DEPTH),
  localparam int unsigned COL_W     = $clog2(COLS)
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             wr_en,
  input  logic [RW-1:0]    wr_idx,
  input  logic [AW-1:0]    wr_start,
  input  logic [AW-1:0]    wr_stop,
  input  logic [COL_W-1:0] wr_col,
  input  logic             in_valid,
  input  logic [RW-1:0]    round,
  input  logic [15:0]      off,
  output logic             out_valid,
  output logic [COL_W-1:0] src_col,
  output logic [AW-1:0]    dst,
  output logic             last
);

  logic [AW-1:0]    start_q [MAX_ROUNDS];
  logic [AW-1:0]    stop_q  [MAX_ROUNDS];
  logic [COL_W-1:0] col_q   [MAX_ROUNDS];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < int'(MAX_ROUNDS); i++) begin
        start_q[i] <= '0;
        stop_q[i]  <= '0;
        col_q[i]   <= '0;
      end
    end else if (wr_en) begin
      start_q[wr_idx] <= wr_start;
      stop_q[wr_idx]  <= wr_stop;
      col_q[wr_idx]   <= wr_col;
    end
  end

  logic [16:0] sum;
  always_comb begin
    sum       = 17'(start_q[round]) + 17'(off);
    dst       = sum[AW-1:0];
    src_col   = col_q[round] + off[COL_W-1:0];
    out_valid = in_valid;
    last      = in_valid && (sum >= 17'(stop_q[round]));
  end

  // A patch cannot have more result columns than the crossbar has bit lines.
  assert property (@(posedge clk) disable iff (!rst_n)
    wr_en |-> (wr_stop >= wr_start) && (32'(wr_stop - wr_start) + 32'(wr_col) < COLS));

endmodule
