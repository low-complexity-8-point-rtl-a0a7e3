// dct8_t1: pipelined 8-point low-complexity DCT approximation, X = T1 x.
//
// The datapath is the sparse factorization T1 = D*A4*A3*A2*A1 laid out as five
// adder rows with a register row after each, as in the paper's architecture
// for T1. It uses 24 adders and 6 shift-by-one units and no multipliers.
//
//   row 1 (A1, 8 adders)  a_n     = x_n + x_{7-n}           n = 0..3
//                         a_{7-n} = x_n - x_{7-n}
//   row 2 (A2, 4 adders)  b0 = a0+a3  b1 = a1+a2  b2 = a1-a2  b3 = a0-a3,
//                         b4..b7 = a4..a7
//   row 3 (A3, 2 adders)  w0 = b0+b1  w1 = b0-b1; lanes 2..7 are kept both
//                         as they are and shifted left by one (6 shifters)
//   rows 4 and 5 (D*A4, 6 + 4 adders)
//       X0 = w0                 X4 = w1
//       X2 = w2 + 2 w3          X6 = w3 - 2 w2
//       X1 = (w5 + 2 w6) + 2 w7
//       X3 = (w7 - 2 w4) - 2 w5
//       X5 = (w4 - 2 w6) + 2 w7
//       X7 = (2 w5 - 2 w4) - w6
//
// The adder counts per row (8, 4, 2, 6, 4), the six shifters and the five
// register rows follow the paper's drawing; which partial sums rows 4 and 5
// form is this design's choice (any grouping of D*A4 with one subtraction
// per adder gives the same result). Word widths grow by one bit per row
// through row 3 and are W+4 from row 4 on, enough for the largest output
// magnitude 10*2^(W-1), so no result can overflow.
//
// Interface: x is a signed W-bit vector taken when in_valid is high, one
// vector per clock at full rate. X (signed, W+4 bits, unscaled T1 products)
// and out_valid appear DCT8_LATENCY = 5 cycles later. rst_n is asynchronous
// and active low and clears every pipeline register; the valid bit,
// clock-per-vector throughput and reset are this design's own choices, the
// paper gives no interface.
module dct8_t1
  import t1_dct_pkg::*;
#(
  parameter int unsigned W = 8          // input sample width
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic                  in_valid,
  input  logic signed [W-1:0]   x [8],
  output logic                  out_valid,
  output logic signed [W+DCT8_GROWTH-1:0] X [8]
);

  localparam int unsigned W1 = W + 1;
  localparam int unsigned W2 = W + 2;
  localparam int unsigned W3 = W + 3;
  localparam int unsigned W4 = W + 4;

  // Register rows.
  logic signed [W1-1:0] s1 [8];        // after A1
  logic signed [W2-1:0] s2 [8];        // after A2
  logic signed [W3-1:0] s3w [2];       // after A3: w0, w1
  logic signed [W3-1:0] s3u [2:7];     // lanes 2..7 unshifted
  logic signed [W3-1:0] s3d [2:7];     // lanes 2..7 shifted left by one
  logic signed [W4-1:0] s4 [11];       // after row 4
  logic signed [W4-1:0] s5 [8];        // after row 5 = outputs
  logic [DCT8_LATENCY-1:0] vpipe;

  // Combinational results of each adder row.
  logic signed [W1-1:0] r1 [8];
  logic signed [W2-1:0] r2 [8];
  logic signed [W3-1:0] r3w [2];
  logic signed [W3-1:0] r3u [2:7];
  logic signed [W3-1:0] r3d [2:7];
  logic signed [W4-1:0] r4 [11];
  logic signed [W4-1:0] r5 [8];

  // s4 slots
  localparam int E0 = 0, E1 = 1, X2S = 2, X6S = 3, T1S = 4, T3S = 5, T5S = 6,
                 T7S = 7, P7 = 8, P5 = 9, P6 = 10;

  // Row 1: A1 butterfly.
  always_comb begin
    for (int n = 0; n < 4; n++) begin
      r1[n]     = W1'(x[n]) + W1'(x[7-n]);
      r1[7-n]   = W1'(x[n]) - W1'(x[7-n]);
    end
  end

  // Row 2: A2 on the even half, odd half passes.
  always_comb begin
    r2[0] = W2'(s1[0]) + W2'(s1[3]);
    r2[1] = W2'(s1[1]) + W2'(s1[2]);
    r2[2] = W2'(s1[1]) - W2'(s1[2]);
    r2[3] = W2'(s1[0]) - W2'(s1[3]);
    for (int n = 4; n < 8; n++) r2[n] = W2'(s1[n]);
  end

  // Row 3: A3 on lanes 0 and 1, shift-by-one on lanes 2..7.
  always_comb begin
    r3w[0] = W3'(s2[0]) + W3'(s2[1]);
    r3w[1] = W3'(s2[0]) - W3'(s2[1]);
    for (int n = 2; n < 8; n++) begin
      r3u[n] = W3'(s2[n]);
      r3d[n] = W3'(s2[n]) <<< 1;
    end
  end

  // Row 4: first half of D*A4.
  always_comb begin
    r4[E0]  = W4'(s3w[0]);
    r4[E1]  = W4'(s3w[1]);
    r4[X2S] = W4'(s3u[2]) + W4'(s3d[3]);
    r4[X6S] = W4'(s3u[3]) - W4'(s3d[2]);
    r4[T1S] = W4'(s3u[5]) + W4'(s3d[6]);
    r4[T3S] = W4'(s3u[7]) - W4'(s3d[4]);
    r4[T5S] = W4'(s3u[4]) - W4'(s3d[6]);
    r4[T7S] = W4'(s3d[5]) - W4'(s3d[4]);
    r4[P7]  = W4'(s3d[7]);
    r4[P5]  = W4'(s3d[5]);
    r4[P6]  = W4'(s3u[6]);
  end

  // Row 5: second half of D*A4, results in natural output order.
  always_comb begin
    r5[0] = s4[E0];
    r5[4] = s4[E1];
    r5[2] = s4[X2S];
    r5[6] = s4[X6S];
    r5[1] = s4[T1S] + s4[P7];
    r5[3] = s4[T3S] - s4[P5];
    r5[5] = s4[T5S] + s4[P7];
    r5[7] = s4[T7S] - s4[P6];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      s1    <= '{default: '0};
      s2    <= '{default: '0};
      s3w   <= '{default: '0};
      s3u   <= '{default: '0};
      s3d   <= '{default: '0};
      s4    <= '{default: '0};
      s5    <= '{default: '0};
      vpipe <= '0;
    end else begin
      s1    <= r1;
      s2    <= r2;
      s3w   <= r3w;
      s3u   <= r3u;
      s3d   <= r3d;
      s4    <= r4;
      s5    <= r5;
      vpipe <= {vpipe[DCT8_LATENCY-2:0], in_valid};
    end
  end

  assign X         = s5;
  assign out_valid = vpipe[DCT8_LATENCY-1];

endmodule
