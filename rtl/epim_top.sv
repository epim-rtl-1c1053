// epim_top -- EPIM data path: one memristor crossbar executing an epitome
// layer, with the three index tables that steer data into and out of it.
//
// Blocks and connections follow the EPIM data-path figure:
//   input_buffer -> IFAT -> IFRT -> input_register (IR) -> crossbar
//   -> output_register (OR) -> OFAT -> joint_module,
// with the address controller driving IFAT, IFRT and OFAT.  The output
// buffer between OR and joint module is named in the EPIM text, not in the
// figure.
// One operation runs n_rounds crossbar activations, one per sampled epitome
// patch.  In round k the controller first streams a continuous offset
// through IFAT entry k.  That reads the patch's inputs from the buffer, and
// IFRT entry k places them on the patch's word lines; all other word lines
// stay at zero.  The crossbar is then activated and its bit lines are read
// into the OR.  The patch's bit lines (from OFAT entry k) are appended to
// the output buffer.  Once all patches are activated, the join phase reads
// the output buffer back.  OFAT entry k gives each result its index in the
// output feature map.  The joint module adds results that land on the same
// index and concatenates the rest.  Output channel wrapping is selected
// with wrap_en/wrap_c on the read port.
//
// Host interface (this design's choice): write ports for the input buffer,
// the crossbar cells and the three tables; start/n_rounds/busy/done;
// a read port for the rebuilt output map (one clock latency).  Tables,
// cells and buffer must not be written while busy.
//
// Two sub-block outputs are left unread on purpose, and lint reports them
// as unused.  The OFAT's out_valid only repeats the controller's
// store_valid/join_valid, which the top uses directly.  The output
// register's valid_cols mask is checked by the register's own assertion
// whenever a column is read.
module epim_top #(
  parameter int unsigned A_BITS     = epim_pkg::A_BITS,
  parameter int unsigned W_BITS     = epim_pkg::W_BITS,
  parameter int unsigned XB_ROWS    = epim_pkg::XB_ROWS,
  parameter int unsigned XB_COLS    = epim_pkg::XB_COLS,
  parameter int unsigned IN_DEPTH   = epim_pkg::IN_DEPTH,
  parameter int unsigned OUT_DEPTH  = epim_pkg::OUT_DEPTH,
  parameter int unsigned MAX_ROUNDS = epim_pkg::MAX_ROUNDS,
  parameter int unsigned ACC_W      = epim_pkg::ACC_W,
  parameter int unsigned OB_DEPTH   = MAX_ROUNDS * XB_COLS,
  localparam int unsigned PSUM_W    = A_BITS + W_BITS + $clog2(XB_ROWS),
  localparam int unsigned RW        = $clog2(MAX_ROUNDS),
  localparam int unsigned IAW       = $clog2(IN_DEPTH),
  localparam int unsigned OAW       = $clog2(OUT_DEPTH),
  localparam int unsigned ROW_W     = $clog2(XB_ROWS),
  localparam int unsigned COL_W     = $clog2(XB_COLS)
) (
  input  logic               clk,
  input  logic               rst_n,
  // input feature buffer
  input  logic               buf_we,
  input  logic [IAW-1:0]     buf_waddr,
  input  logic [A_BITS-1:0]  buf_wdata,
  // crossbar cells
  input  logic               xb_we,
  input  logic [ROW_W-1:0]   xb_row,
  input  logic [COL_W-1:0]   xb_col,
  input  logic [W_BITS-1:0]  xb_wdata,
  // IFAT
  input  logic               ifat_we,
  input  logic [RW-1:0]      ifat_idx,
  input  logic [IAW-1:0]     ifat_start,
  input  logic [IAW-1:0]     ifat_stop,
  // IFRT
  input  logic               ifrt_we,
  input  logic [RW-1:0]      ifrt_idx,
  input  logic [XB_ROWS-1:0] ifrt_mask,
  // OFAT
  input  logic               ofat_we,
  input  logic [RW-1:0]      ofat_idx,
  input  logic [OAW-1:0]     ofat_start,
  input  logic [OAW-1:0]     ofat_stop,
  input  logic [COL_W-1:0]   ofat_col,
  // control
  input  logic               start,
  input  logic [RW:0]        n_rounds,
  output logic               busy,
  output logic               done,
  // output feature map read port, with channel wrapping
  input  logic               wrap_en,
  input  logic [OAW:0]       wrap_c,
  input  logic               out_re,
  input  logic [OAW-1:0]     out_raddr,
  output logic               out_rvalid,
  output logic [ACC_W-1:0]   out_rdata,
  // status
  output logic               ifrt_overflow,
  output logic [31:0]        n_ob_writes,
  output logic [31:0]        n_out_writes,
  output logic [31:0]        n_out_add,
  output logic [31:0]        n_out_concat
);

  // address controller
  logic          op_clr, round_clr, ld_valid, ifat_last, xb_act, xb_done;
  logic          store_valid, join_valid, ofat_last;
  logic [15:0]   ld_off, out_off;
  logic [RW-1:0] round;

  addr_ctrl #(.MAX_ROUNDS(MAX_ROUNDS)) u_ac (
    .clk, .rst_n, .start, .n_rounds, .busy, .done, .round,
    .op_clr, .round_clr, .ld_valid, .ld_off, .ifat_last,
    .xb_act, .xb_done, .store_valid, .join_valid, .out_off, .ofat_last
  );

  // input side
  logic             ia_valid;
  logic [IAW-1:0]   ia_addr;
  logic             bf_valid;
  logic [A_BITS-1:0] bf_data;

  ifat #(.MAX_ROUNDS(MAX_ROUNDS), .DEPTH(IN_DEPTH)) u_ifat (
    .clk, .rst_n,
    .wr_en(ifat_we), .wr_idx(ifat_idx), .wr_start(ifat_start), .wr_stop(ifat_stop),
    .in_valid(ld_valid), .round, .off(ld_off),
    .addr_valid(ia_valid), .addr(ia_addr), .last(ifat_last)
  );

  input_buffer #(.DEPTH(IN_DEPTH), .W(A_BITS)) u_buf (
    .clk, .rst_n,
    .wr_en(buf_we), .wr_addr(buf_waddr), .wr_data(buf_wdata),
    .rd_en(ia_valid), .rd_addr(ia_addr), .rd_valid(bf_valid), .rd_data(bf_data)
  );

  logic               ir_we;
  logic [ROW_W-1:0]   ir_row;
  logic [A_BITS-1:0]  ir_data;

  ifrt #(.MAX_ROUNDS(MAX_ROUNDS), .ROWS(XB_ROWS), .W(A_BITS)) u_ifrt (
    .clk, .rst_n,
    .wr_en(ifrt_we), .wr_idx(ifrt_idx), .wr_mask(ifrt_mask),
    .clr(round_clr), .round, .in_valid(bf_valid), .in_data(bf_data),
    .ir_we, .ir_row, .ir_data, .overflow(ifrt_overflow)
  );

  logic [XB_ROWS-1:0][A_BITS-1:0] wl;

  input_register #(.ROWS(XB_ROWS), .W(A_BITS)) u_ir (
    .clk, .rst_n, .clr(round_clr), .we(ir_we), .row(ir_row), .data(ir_data), .wl
  );

  // crossbar
  logic              xc_valid;
  logic [COL_W-1:0]  xc_idx;
  logic [PSUM_W-1:0] xc_val;

  xbar_model #(.ROWS(XB_ROWS), .COLS(XB_COLS), .A_W(A_BITS), .W_W(W_BITS), .PSUM_W(PSUM_W)) u_xb (
    .clk, .rst_n,
    .w_we(xb_we), .w_row(xb_row), .w_col(xb_col), .w_data(xb_wdata),
    .act(xb_act), .wl,
    .col_valid(xc_valid), .col_idx(xc_idx), .col_val(xc_val), .done(xb_done)
  );

  // output side
  logic [COL_W-1:0]  src_col;
  logic [OAW-1:0]    dst;
  logic              of_valid;
  logic [PSUM_W-1:0] or_val;
  logic [XB_COLS-1:0] or_cols;

  output_register #(.COLS(XB_COLS), .PSUM_W(PSUM_W)) u_or (
    .clk, .rst_n, .clr(round_clr),
    .cap_valid(xc_valid), .cap_col(xc_idx), .cap_val(xc_val),
    .rd_en(store_valid), .rd_col(src_col), .rd_val(or_val), .valid_cols(or_cols)
  );

  ofat #(.MAX_ROUNDS(MAX_ROUNDS), .DEPTH(OUT_DEPTH), .COLS(XB_COLS)) u_ofat (
    .clk, .rst_n,
    .wr_en(ofat_we), .wr_idx(ofat_idx), .wr_start(ofat_start), .wr_stop(ofat_stop), .wr_col(ofat_col),
    .in_valid(store_valid || join_valid), .round, .off(out_off),
    .out_valid(of_valid), .src_col, .dst, .last(ofat_last)
  );

  // output buffer: written in the activation phase, read in the join phase
  logic              ob_valid;
  logic [PSUM_W-1:0] ob_data;
  logic [OAW-1:0]    dst_q;

  output_buffer #(.DEPTH(OB_DEPTH), .W(PSUM_W)) u_ob (
    .clk, .rst_n, .clr(op_clr),
    .push(store_valid), .push_data(or_val),
    .pop(join_valid), .pop_valid(ob_valid), .pop_data(ob_data),
    .n_writes(n_ob_writes)
  );

  // The output buffer reads in one clock; the OFAT index waits with it.
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)          dst_q <= '0;
    else if (join_valid) dst_q <= dst;
  end

  joint_module #(.DEPTH(OUT_DEPTH), .PSUM_W(PSUM_W), .ACC_W(ACC_W)) u_jm (
    .clk, .rst_n, .clr(op_clr),
    .in_valid(ob_valid), .in_addr(dst_q), .in_val(ob_data),
    .wrap_en, .wrap_c, .rd_en(out_re), .rd_addr(out_raddr),
    .rd_valid(out_rvalid), .rd_data(out_rdata),
    .n_writes(n_out_writes), .n_add(n_out_add), .n_concat(n_out_concat)
  );

endmodule
