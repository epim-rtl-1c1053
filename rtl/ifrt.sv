// ifrt -- Input Feature Row Table.
//
// One entry per sampled epitome patch: a sequence as long as the crossbar has
// word lines, telling which word lines carry weights of this round's patch.
// It is stored as one bit per word line.  The input values fetched through
// the IFAT arrive in order; the IFRT places the k-th value on the k-th word
// line whose bit is set and leaves every other word line at zero (the
// input register is cleared at the start of each round).  This reproduces
// the example of the paper's data-path figure: buffer values 6,2,4 with row
// bits 1,1,0,1 become word-line values 6,2,0,4.
//
// The one-bit-per-row encoding and the in-order placement rule are this
// design's choices; the paper gives only the sequence's length and purpose.
//
// Interface: table write (wr_en, wr_idx, wr_mask); clr resets the placement
// pointer at round start; in_valid/in_data is the value stream from the
// buffer.  ir_we/ir_row/ir_data go to the input register in the same cycle
// (combinational).  overflow is set when a value arrives with no word line
// left in the mask; it holds until the next clr.
module ifrt #(
  parameter int unsigned MAX_ROUNDS = epim_pkg::MAX_ROUNDS,
  parameter int unsigned ROWS       = epim_pkg::XB_ROWS,
  parameter int unsigned W          = epim_pkg::A_BITS,
  localparam int unsigned RW        = $clog2(MAX_ROUNDS),
  localparam int unsigned ROW_W     = $clog2(ROWS)
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             wr_en,
  input  logic [RW-1:0]    wr_idx,
  input  logic [ROWS-1:0]  wr_mask,
  input  logic             clr,
  input  logic [RW-1:0]    round,
  input  logic             in_valid,
  input  logic [W-1:0]     in_data,
  output logic             ir_we,
  output logic [ROW_W-1:0] ir_row,
  output logic [W-1:0]     ir_data,
  output logic             overflow
);

  logic [ROWS-1:0] mask_q [MAX_ROUNDS];
  logic [ROW_W:0]  ptr_q;      // next word line that may receive a value

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < int'(MAX_ROUNDS); i++) mask_q[i] <= '0;
    end else if (wr_en) begin
      mask_q[wr_idx] <= wr_mask;
    end
  end

  // Lowest set mask bit at or above the pointer.
  logic             found;
  logic [ROW_W-1:0] row_sel;
  always_comb begin
    found   = 1'b0;
    row_sel = '0;
    for (int r = ROWS - 1; r >= 0; r--) begin
      if (mask_q[round][r] && (ROW_W+1)'(r) >= ptr_q) begin
        found   = 1'b1;
        row_sel = ROW_W'(r);
      end
    end
  end

  assign ir_we   = in_valid && found;
  assign ir_row  = row_sel;
  assign ir_data = in_data;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      ptr_q    <= '0;
      overflow <= 1'b0;
    end else if (clr) begin
      ptr_q    <= '0;
      overflow <= 1'b0;
    end else if (in_valid) begin
      if (found) ptr_q <= (ROW_W+1)'(row_sel) + 1'b1;
      else       overflow <= 1'b1;
    end
  end

endmodule
