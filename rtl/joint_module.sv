// joint_module -- rebuilds the output feature map from the per-patch results.
//
// Once all patches are activated, their results are read back from the
// output buffer, and the OFAT pairs each value with its destination index.
// The joint module receives these (destination index, value) pairs.  A result whose index already holds a value of this operation is
// added to it.  Patches with identical start/stop indices therefore sum
// their partial dot products.  A result at a fresh index is stored as it
// is, so patches with consecutive indices are concatenated.  Both rules are
// the paper's.  This design realises them with one accumulator per output
// index and one "written" bit per index, cleared by clr at the start of an
// operation.
//
// Output channel wrapping (paper): when a patch with c output channels
// stands for a convolution with c x r channels, channel x + c equals channel
// x.  Only the first c channels are computed and written.  With wrap_en set
// and wrap_c = c, a read of channel x returns the stored channel x mod c.
// Doing the reuse on the read side is this design's choice.
//
// Interface: clr; in_valid/in_addr/in_val (one result per clock, value is
// a signed bit-line sum); rd_en/rd_addr -> rd_valid/rd_data one clock later
// (signed, 0 for an index never written).  n_writes, n_add and n_concat
// count buffer writes, additions to a written index and first writes.
module joint_module #(
  parameter int unsigned DEPTH  = epim_pkg::OUT_DEPTH,
  parameter int unsigned PSUM_W = epim_pkg::PSUM_W,
  parameter int unsigned ACC_W  = epim_pkg::ACC_W,
  localparam int unsigned AW    = $clog2(DEPTH)
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              clr,
  input  logic              in_valid,
  input  logic [AW-1:0]     in_addr,
  input  logic [PSUM_W-1:0] in_val,
  input  logic              wrap_en,
  input  logic [AW:0]       wrap_c,
  input  logic              rd_en,
  input  logic [AW-1:0]     rd_addr,
  output logic              rd_valid,
  output logic [ACC_W-1:0]  rd_data,
  output logic [31:0]       n_writes,
  output logic [31:0]       n_add,
  output logic [31:0]       n_concat
);

  logic [ACC_W-1:0] acc [DEPTH];
  logic [DEPTH-1:0] written;

  logic [ACC_W-1:0] in_ext;
  assign in_ext = ACC_W'($signed(in_val));

  always_ff @(posedge clk) begin
    if (in_valid) begin
      if (written[in_addr]) acc[in_addr] <= acc[in_addr] + in_ext;
      else                  acc[in_addr] <= in_ext;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      written  <= '0;
      n_writes <= '0;
      n_add    <= '0;
      n_concat <= '0;
    end else if (clr) begin
      written  <= '0;
      n_writes <= '0;
      n_add    <= '0;
      n_concat <= '0;
    end else if (in_valid) begin
      written[in_addr] <= 1'b1;
      n_writes         <= n_writes + 1;
      if (written[in_addr]) n_add    <= n_add + 1;
      else                  n_concat <= n_concat + 1;
    end
  end

  // Read side with output channel wrapping.
  logic [AW-1:0] phys;
  always_comb begin
    if (wrap_en && wrap_c != '0) phys = AW'(({1'b0, rd_addr}) % wrap_c);
    else                         phys = rd_addr;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rd_valid <= 1'b0;
      rd_data  <= '0;
    end else begin
      rd_valid <= rd_en;
      if (rd_en) rd_data <= written[phys] ? acc[phys] : '0;
    end
  end

  assert property (@(posedge clk) disable iff (!rst_n) in_valid |-> 32'(in_addr) < DEPTH);
  assert property (@(posedge clk) disable iff (!rst_n) !(clr && in_valid));

endmodule
