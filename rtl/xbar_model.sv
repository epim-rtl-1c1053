// xbar_model -- behavioural model of the memristor crossbar with its
// bit-line read-out.
//
// BEHAVIOURAL MODEL: the real part is an analog memristor array, with DACs
// on the word lines and ADCs on the bit lines.  Here each cell holds a signed
// integer weight.  Each bit line's result is the exact dot product of the
// word-line values and that bit line's weights, as if the analog sum and
// its conversion were ideal.  The paper maps c_in x p x q of an epitome onto
// word lines and c_out onto bit lines, and it activates the crossbar once
// per sampled patch.  It simulates 2-bit memristor cells.  This model keeps
// one full-precision weight per cell, so it does not reproduce the bit
// slicing over 2-bit cells or the ADC resolution.
//
// Read-out timing (this design's choice): after act, the bit lines are
// converted one per clock, column 0 first, as if one ADC were shared by all
// columns.  col_valid/col_idx/col_val give one column per clock, and done
// pulses with the last column.  An activation takes COLS clocks.  The word
// lines (wl) must hold still until done.
//
// Programming: w_we/w_row/w_col/w_data write one cell per clock.
module xbar_model #(
  parameter int unsigned ROWS   = epim_pkg::XB_ROWS,
  parameter int unsigned COLS   = epim_pkg::XB_COLS,
  parameter int unsigned A_W    = epim_pkg::A_BITS,
  parameter int unsigned W_W    = epim_pkg::W_BITS,
  parameter int unsigned PSUM_W = epim_pkg::PSUM_W,
  localparam int unsigned ROW_W = $clog2(ROWS),
  localparam int unsigned COL_W = $clog2(COLS)
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     w_we,
  input  logic [ROW_W-1:0]         w_row,
  input  logic [COL_W-1:0]         w_col,
  input  logic [W_W-1:0]           w_data,
  input  logic                     act,
  input  logic [ROWS-1:0][A_W-1:0] wl,
  output logic                     col_valid,
  output logic [COL_W-1:0]         col_idx,
  output logic [PSUM_W-1:0]        col_val,
  output logic                     done
);

  // Conductances, one column (bit line) per word of the array.
  logic [ROWS-1:0][W_W-1:0] g [COLS];

  always_ff @(posedge clk) begin
    if (w_we) g[w_col][w_row] <= w_data;
  end

  logic             busy_q;
  logic [COL_W-1:0] col_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy_q <= 1'b0;
      col_q  <= '0;
    end else if (act && !busy_q) begin
      busy_q <= 1'b1;
      col_q  <= '0;
    end else if (busy_q) begin
      col_q <= col_q + 1'b1;
      if (col_q == COL_W'(COLS - 1)) busy_q <= 1'b0;
    end
  end

  // Bit-line current of the column being converted: sum of products.
  logic signed [PSUM_W-1:0] dot;
  logic [ROWS-1:0][W_W-1:0] gcol;
  always_comb begin
    gcol = g[col_q];
    dot  = '0;
    for (int r = 0; r < int'(ROWS); r++)
      dot += PSUM_W'($signed(wl[r]) * $signed(gcol[r]));
  end

  assign col_valid = busy_q;
  assign col_idx   = col_q;
  assign col_val   = dot;
  assign done      = busy_q && (col_q == COL_W'(COLS - 1));

  // The cells must not be reprogrammed while an activation is in flight.
  assert property (@(posedge clk) disable iff (!rst_n) busy_q |-> !w_we);

endmodule
