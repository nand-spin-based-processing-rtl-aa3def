// tb_pim_bank: end-to-end run of the bank at its default size (16 mats of
// 16 subarrays of 256x128 bits).  Two mats compute, in parallel, one row of
// a 2-bit x 2-bit convolutional layer the way the paper maps it: the input
// bit planes I[0], I[1] sit in subarrays 0 and 1, every weight bit plane
// W[m] is loaded into their buffers, two periods (with a slide between) of
// bitwise convolution run in both subarrays at once, the bit-counter
// results are cross-written into subarray 2 at row offsets n+m (the
// 2^(n+m) shift), and subarray 2 adds the 8 partial sums.  Mat 0 column
// 0..3 holds the paper's example (result 5 7 13 7); all other columns and
// mat 3 hold random data.  The sum is then scaled (MUL), compared against a
// threshold vector (CMP, the max-pooling step), a signed vector goes
// through RELU, and bit-counter contents are read out bit by bit
// (BC_READ).  All data enters through the global data buffer and results
// come back through it.  Every result is checked against integer
// arithmetic.  The test counts the mechanisms it exercises and fails if
// one never happened: command-port stall on a busy mat, two mats busy at
// once, two results waiting for the buffer, a data-bus write delaying a
// result, and each mat command type.
module tb_pim_bank;
  import pim_pkg::*;
  localparam int unsigned NC = COLS;
  localparam int unsigned K = 2;          // kernel 2x2
  localparam int unsigned WA = 10;        // partial-sum block: 8 counter bits + shift up to 2
  localparam int unsigned PS = 16;        // first partial-sum row in subarray 2
  localparam int unsigned SUM = 96;       // sum rows (13 bits)
  localparam int unsigned SW = 13;

  localparam int unsigned TB_MATS = MATS;
  `include "pim_bank_tb_body.svh"
  pim_bank dut (.*);
endmodule
