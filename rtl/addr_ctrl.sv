// addr_ctrl -- the EPIM address controller.
//
// In the source design the data path starts with an address controller
// that generates a continuous address.  The IFAT and IFRT turn that address
// into buffer reads and word-line positions.  After all patches have been
// activated, the OFAT and the joint module rebuild the output feature map.
// This controller produces that continuous offset (0,1,2,...) for each use
// of a table and sequences the whole operation.  The operation has two
// phases:
//   activation phase, per round k: clear, load inputs through IFAT k and
//     IFRT k, activate the crossbar, store the patch's bit lines (selected
//     by OFAT k) into the output buffer;
//   join phase, again per round k: read the stored results back and let
//     OFAT k place them through the joint module.
// The states are listed in epim_state_pkg.  The state machine, the offset
// counter and the handshakes are this design's choices.
//
// Interface: start with n_rounds (1..MAX_ROUNDS; 0 finishes at once) begins
// an operation.  busy is high until done pulses.  round indexes all three
// tables.  ld_valid/ld_off go to the IFAT, which answers with ifat_last.
// xb_act starts an activation and xb_done ends it.  store_valid and
// join_valid qualify out_off to the OFAT, which answers with ofat_last.
// op_clr pulses once at the start of an operation (output buffer, joint
// module).  round_clr pulses at the start of each round (IR, IFRT pointer,
// OR).
// Timing: each round takes 1 + L_in + 1 + 1 + COLS + L_out + 1 clocks in
// the activation phase and L_out + 1 in the join phase.  L_in and L_out are
// the lengths of the IFAT and OFAT ranges, and COLS is the crossbar
// read-out time.  done follows one clock after the last state.
module addr_ctrl #(
  parameter int unsigned MAX_ROUNDS = epim_pkg::MAX_ROUNDS,
  localparam int unsigned RW        = $clog2(MAX_ROUNDS)
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          start,
  input  logic [RW:0]   n_rounds,
  output logic          busy,
  output logic          done,
  output logic [RW-1:0] round,
  output logic          op_clr,
  output logic          round_clr,
  output logic          ld_valid,
  output logic [15:0]   ld_off,
  input  logic          ifat_last,
  output logic          xb_act,
  input  logic          xb_done,
  output logic          store_valid,
  output logic          join_valid,
  output logic [15:0]   out_off,
  input  logic          ofat_last
);

  import epim_state_pkg::*;

  ac_state_e     st_q;
  logic [RW:0]   nr_q;
  logic [RW:0]   rnd_q;
  logic [15:0]   off_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st_q  <= ST_IDLE;
      nr_q  <= '0;
      rnd_q <= '0;
      off_q <= '0;
      done  <= 1'b0;
    end else begin
      done <= 1'b0;
      unique case (st_q)
        ST_IDLE: if (start) begin
          nr_q  <= n_rounds;
          rnd_q <= '0;
          if (n_rounds == '0) done <= 1'b1;
          else                st_q <= ST_CLR;
        end
        ST_CLR: begin
          off_q <= '0;
          st_q  <= ST_LOAD;
        end
        ST_LOAD: begin
          off_q <= off_q + 1'b1;
          if (ifat_last) st_q <= ST_DRAIN;
        end
        ST_DRAIN: st_q <= ST_ACT;
        ST_ACT:   st_q <= ST_WAIT;
        ST_WAIT: if (xb_done) begin
          off_q <= '0;
          st_q  <= ST_STORE;
        end
        ST_STORE: begin
          off_q <= off_q + 1'b1;
          if (ofat_last) st_q <= ST_NEXT;
        end
        ST_NEXT: begin
          off_q <= '0;
          if (rnd_q + 1'b1 == nr_q) begin
            rnd_q <= '0;
            st_q  <= ST_JOIN;
          end else begin
            rnd_q <= rnd_q + 1'b1;
            st_q  <= ST_CLR;
          end
        end
        ST_JOIN: begin
          off_q <= off_q + 1'b1;
          if (ofat_last) st_q <= ST_JNEXT;
        end
        ST_JNEXT: begin
          off_q <= '0;
          if (rnd_q + 1'b1 == nr_q) begin
            done <= 1'b1;
            st_q <= ST_IDLE;
          end else begin
            rnd_q <= rnd_q + 1'b1;
            st_q  <= ST_JOIN;
          end
        end
        default: st_q <= ST_IDLE;
      endcase
    end
  end

  assign busy        = (st_q != ST_IDLE);
  assign round       = rnd_q[RW-1:0];
  assign op_clr      = (st_q == ST_IDLE) && start;
  assign round_clr   = (st_q == ST_CLR);
  assign ld_valid    = (st_q == ST_LOAD);
  assign ld_off      = off_q;
  assign xb_act      = (st_q == ST_ACT);
  assign store_valid = (st_q == ST_STORE);
  assign join_valid  = (st_q == ST_JOIN);
  assign out_off     = off_q;

  assert property (@(posedge clk) disable iff (!rst_n) start && !busy |-> n_rounds <= (RW+1)'(MAX_ROUNDS));

endmodule
