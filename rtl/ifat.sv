// ifat -- Input Feature Address Table.
//
// One entry per crossbar activation ("round"): a start/stop index pair that
// brackets the input features used by the epitome patch of that round.  The
// address controller supplies a continuous offset 0,1,2,...; the IFAT adds
// it to the round's start index to form an input buffer address and flags
// the offset that reaches the stop index as the last one.  Start/stop pairs
// and the entry-per-activation rule follow the paper; the offset-plus-start
// formulation and the write port that loads the table are this design's
// choices.
//
// Interface: table write (wr_en, wr_idx, wr_start, wr_stop); lookup
// (in_valid, round, off) -> (addr_valid, addr, last), purely combinational.
// A pair with stop < start is illegal (assertion on the write port).
module ifat #(
  parameter int unsigned MAX_ROUNDS = epim_pkg::MAX_ROUNDS,
  parameter int unsigned DEPTH      = epim_pkg::IN_DEPTH,
  localparam int unsigned RW        = $clog2(MAX_ROUNDS),
  localparam int unsigned AW        = $clog2(DEPTH)
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          wr_en,
  input  logic [RW-1:0] wr_idx,
  input  logic [AW-1:0] wr_start,
  input  logic [AW-1:0] wr_stop,
  input  logic          in_valid,
  input  logic [RW-1:0] round,
  input  logic [15:0]   off,
  output logic          addr_valid,
  output logic [AW-1:0] addr,
  output logic          last
);

  logic [AW-1:0] start_q [MAX_ROUNDS];
  logic [AW-1:0] stop_q  [MAX_ROUNDS];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < int'(MAX_ROUNDS); i++) begin
        start_q[i] <= '0;
        stop_q[i]  <= '0;
      end
    end else if (wr_en) begin
      start_q[wr_idx] <= wr_start;
      stop_q[wr_idx]  <= wr_stop;
    end
  end

  logic [16:0] sum;
  always_comb begin
    sum        = 17'(start_q[round]) + 17'(off);
    addr       = sum[AW-1:0];
    addr_valid = in_valid;
    last       = in_valid && (sum >= 17'(stop_q[round]));
  end

  assert property (@(posedge clk) disable iff (!rst_n) wr_en |-> wr_stop >= wr_start);

endmodule
