// output_register -- the "OR" that holds the bit-line results of one
// crossbar activation.
//
// The crossbar read-out delivers one converted bit line per clock.  The OR
// stores them by column index.  During the output phase the OFAT reads the
// columns of the current patch in any order.  The paper names the register;
// the column-indexed store with an asynchronous read port is this design's
// choice.
//
// Interface: cap_valid/cap_col/cap_val write one column per clock;
// rd_col -> rd_val is combinational.  valid_cols has one bit per column.  A
// bit is set when its column is captured and all are cleared by clr; a
// read of a column that was not captured since clr fires an assertion.
module output_register #(
  parameter int unsigned COLS   = epim_pkg::XB_COLS,
  parameter int unsigned PSUM_W = epim_pkg::PSUM_W,
  localparam int unsigned COL_W = $clog2(COLS)
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              clr,
  input  logic              cap_valid,
  input  logic [COL_W-1:0]  cap_col,
  input  logic [PSUM_W-1:0] cap_val,
  input  logic              rd_en,
  input  logic [COL_W-1:0]  rd_col,
  output logic [PSUM_W-1:0] rd_val,
  output logic [COLS-1:0]   valid_cols
);

  logic [PSUM_W-1:0] q [COLS];

  always_ff @(posedge clk) begin
    if (cap_valid) q[cap_col] <= cap_val;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)         valid_cols <= '0;
    else if (clr)       valid_cols <= '0;
    else if (cap_valid) valid_cols[cap_col] <= 1'b1;
  end

  assign rd_val = q[rd_col];

  assert property (@(posedge clk) disable iff (!rst_n) rd_en |-> valid_cols[rd_col]);

endmodule
