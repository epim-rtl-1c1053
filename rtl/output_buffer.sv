// output_buffer -- holds the results of every crossbar activation of an
// operation until the joint module rebuilds the output feature map.
//
// EPIM stores a patch's output in the output buffer each time a patch is
// activated.  This is why an epitome writes the output buffer more often
// than a convolution does, and why output channel wrapping, which skips
// repeated channels, cuts these writes by the repetition factor.  Only
// after all patches have been activated does the OFAT, with the joint
// module, rebuild the output map.  Both points are the source design's.
//
// The results are written round by round and read back in the same order,
// so the buffer is organised here as a first-in first-out store: push
// appends at the write pointer and pop reads at the read pointer.  clr
// resets both.  This organisation, the depth and the counter are this
// design's choices.
//
// Interface: clr; push/push_data; pop -> pop_valid/pop_data one clock later
// (synchronous read).  n_writes counts pushes since clr.  Pushing into a
// full buffer or popping an empty one fires an assertion.
module output_buffer #(
  parameter int unsigned DEPTH = epim_pkg::OB_DEPTH,
  parameter int unsigned W     = epim_pkg::PSUM_W,
  localparam int unsigned AW   = $clog2(DEPTH)
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         clr,
  input  logic         push,
  input  logic [W-1:0] push_data,
  input  logic         pop,
  output logic         pop_valid,
  output logic [W-1:0] pop_data,
  output logic [31:0]  n_writes
);

  logic [W-1:0] mem [DEPTH];
  logic [AW:0]  wptr, rptr;

  always_ff @(posedge clk) begin
    if (push) mem[wptr[AW-1:0]] <= push_data;
    if (pop)  pop_data <= mem[rptr[AW-1:0]];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wptr      <= '0;
      rptr      <= '0;
      pop_valid <= 1'b0;
      n_writes  <= '0;
    end else begin
      pop_valid <= pop && !clr;
      if (clr) begin
        wptr     <= '0;
        rptr     <= '0;
        n_writes <= '0;
      end else begin
        if (push) begin
          wptr     <= wptr + 1'b1;
          n_writes <= n_writes + 1;
        end
        if (pop) rptr <= rptr + 1'b1;
      end
    end
  end

  assert property (@(posedge clk) disable iff (!rst_n) push |-> 32'(wptr) < DEPTH);
  assert property (@(posedge clk) disable iff (!rst_n) pop |-> rptr < wptr);

endmodule
