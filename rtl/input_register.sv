// input_register -- the "IR" that drives the crossbar word lines.
//
// One register per word line.  At the start of a round it is cleared, so
// every word line that the IFRT does not load stays at zero volts (value 0),
// as the paper requires for word lines whose weights are not part of the
// current patch.  The IFRT then writes one word line per cycle.  The paper
// names the register; its clear-then-write behaviour is this design's way
// of meeting that requirement.
//
// Interface: clr (synchronous clear of all rows), we/row/data (one row per
// clock); wl is the whole register, valid the clock after the write.
module input_register #(
  parameter int unsigned ROWS = epim_pkg::XB_ROWS,
  parameter int unsigned W    = epim_pkg::A_BITS,
  localparam int unsigned ROW_W = $clog2(ROWS)
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     clr,
  input  logic                     we,
  input  logic [ROW_W-1:0]         row,
  input  logic [W-1:0]             data,
  output logic [ROWS-1:0][W-1:0]   wl
);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)   wl <= '0;
    else if (clr) wl <= '0;
    else if (we)  wl[row] <= data;
  end

  assert property (@(posedge clk) disable iff (!rst_n) !(clr && we));

endmodule
