// input_buffer -- the "Buffer" at the head of the EPIM data path.
//
// Holds the input feature values of the current layer.  During a round the
// IFAT turns the address controller's continuous offsets into buffer
// addresses, and the buffer returns one value per cycle.  The paper only
// names this buffer; its organisation here (one word per input value, one
// write port for the producer of the features, one synchronous read port for
// the data path) is this design's choice.
//
// Interface: write port wr_en/wr_addr/wr_data; read port rd_en/rd_addr.
// Timing: rd_data/rd_valid appear one clock after rd_en (synchronous read).
// Depth default 4608 = 3 x 3 x 512, the largest unrolled receptive field of
// ResNet-50/101 (a choice of this design, not a number of the paper).
module input_buffer #(
  parameter int unsigned DEPTH = epim_pkg::IN_DEPTH,
  parameter int unsigned W     = epim_pkg::A_BITS,
  localparam int unsigned AW   = $clog2(DEPTH)
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          wr_en,
  input  logic [AW-1:0] wr_addr,
  input  logic [W-1:0]  wr_data,
  input  logic          rd_en,
  input  logic [AW-1:0] rd_addr,
  output logic          rd_valid,
  output logic [W-1:0]  rd_data
);

  logic [W-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (wr_en) mem[wr_addr] <= wr_data;
    if (rd_en) rd_data <= mem[rd_addr];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) rd_valid <= 1'b0;
    else        rd_valid <= rd_en;
  end

  // An address beyond the buffer is a table programming error.
  assert property (@(posedge clk) disable iff (!rst_n) rd_en |-> 32'(rd_addr) < DEPTH);
  assert property (@(posedge clk) disable iff (!rst_n) wr_en |-> 32'(wr_addr) < DEPTH);

endmodule
