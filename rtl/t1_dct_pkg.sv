// t1_dct_pkg: constants shared by the T1 transform pipelines and their
// testbenches.
//
// T1 is the 8x8 low-complexity DCT approximation whose entries are drawn from
// {0, +-1, +-2}. Row k of T1 gives output coefficient X_k = sum_n T1[k][n] x_n.
// The orthogonal approximation is S1*T1 with
// S1 = diag(1/sqrt8, 1/sqrt18, 1/sqrt20, 1/sqrt18, 1/sqrt8, 1/sqrt18, 1/sqrt20,
// 1/sqrt18); that scaling is left to the quantizer of the codec and is not
// part of the hardware here, so all outputs are the unscaled T1 products.
//
// The matrix and the 16/32-point constructions follow the paper. The pipeline
// latencies are this design's own choice: five register rows in the 8-point
// core (one after each adder row of its architecture drawing) and one
// register row after each JAM input butterfly.
package t1_dct_pkg;

  // Latency, in clock cycles, from a vector on the input to its coefficients
  // on the output.
  localparam int unsigned DCT8_LATENCY      = 5;
  localparam int unsigned BUTTERFLY_LATENCY = 1;
  localparam int unsigned DCT16_LATENCY     = DCT8_LATENCY + BUTTERFLY_LATENCY;
  localparam int unsigned DCT32_LATENCY     = DCT16_LATENCY + BUTTERFLY_LATENCY;

  // Word growth from input to output: the largest absolute row sum of T1 is
  // 10 (< 16), so 4 bits; each JAM doubling adds one more bit.
  localparam int unsigned DCT8_GROWTH  = 4;
  localparam int unsigned DCT16_GROWTH = DCT8_GROWTH + 1;
  localparam int unsigned DCT32_GROWTH = DCT16_GROWTH + 1;

  typedef logic signed [2:0] coef_t;   // an entry of T1: -2 .. 2

  // The low-complexity matrix T1 (row k, column n).
  localparam coef_t T1 [8][8] = '{
    '{ 3'sd1,  3'sd1,  3'sd1,  3'sd1,  3'sd1,  3'sd1,  3'sd1,  3'sd1},
    '{ 3'sd2,  3'sd2,  3'sd1,  3'sd0,  3'sd0, -3'sd1, -3'sd2, -3'sd2},
    '{ 3'sd2,  3'sd1, -3'sd1, -3'sd2, -3'sd2, -3'sd1,  3'sd1,  3'sd2},
    '{ 3'sd1,  3'sd0, -3'sd2, -3'sd2,  3'sd2,  3'sd2,  3'sd0, -3'sd1},
    '{ 3'sd1, -3'sd1, -3'sd1,  3'sd1,  3'sd1, -3'sd1, -3'sd1,  3'sd1},
    '{ 3'sd2, -3'sd2,  3'sd0,  3'sd1, -3'sd1,  3'sd0,  3'sd2, -3'sd2},
    '{ 3'sd1, -3'sd2,  3'sd2, -3'sd1, -3'sd1,  3'sd2, -3'sd2,  3'sd1},
    '{ 3'sd0, -3'sd1,  3'sd2, -3'sd2,  3'sd2, -3'sd2,  3'sd1,  3'sd0}
  };

endpackage
