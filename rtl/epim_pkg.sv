// epim_pkg -- sizes and types shared by the EPIM epitome data path.
//
// The data path executes one epitome layer on a memristor crossbar by
// activating the crossbar once per sampled epitome patch ("round").  Three
// index tables steer data in and out of the crossbar:
//   IFAT  (input feature address table): per round, a start/stop pair into
//         the input buffer;
//   IFRT  (input feature row table): per round, which crossbar word lines
//         receive those inputs (the others are driven with zero);
//   OFAT  (output feature address table): per round, a start/stop pair into
//         the output feature map where the bit-line results belong.
// Each module takes these numbers as typed parameters whose defaults come
// from here, so a testbench can shrink a single block.
//
// Paper numbers used here: 9-bit activations and up to 9-bit weights (the
// W9A9 ... W3A9 configurations).  Crossbar size, buffer depths and the
// number of table entries are not given by the paper and are choices of this
// design (see README).  Each block uses only the constants it needs, so lint
// built around a single block reports the others as unused.
package epim_pkg;

  // Activation and weight precision (paper: A9, W9 down to W3).
  parameter int unsigned A_BITS     = 9;
  parameter int unsigned W_BITS     = 9;
  // Crossbar: word lines (rows) and bit lines (columns).
  parameter int unsigned XB_ROWS    = 256;
  parameter int unsigned XB_COLS    = 256;
  // Input buffer: largest unrolled receptive field of ResNet-50/101
  // (3 x 3 x 512 = 4608 values).  Output map: largest channel count (2048).
  parameter int unsigned IN_DEPTH   = 4608;
  parameter int unsigned OUT_DEPTH  = 2048;
  // Entries of IFAT, IFRT and OFAT: crossbar activations per operation.
  parameter int unsigned MAX_ROUNDS = 64;
  // Bit-line partial sum: product plus log2(rows) carry bits.
  parameter int unsigned PSUM_W     = A_BITS + W_BITS + $clog2(XB_ROWS);
  // Joint-module accumulator.
  parameter int unsigned ACC_W      = 32;
  // Output buffer: every bit line of every activation of one operation.
  parameter int unsigned OB_DEPTH   = MAX_ROUNDS * XB_COLS;

endpackage
