// t1_dct_top: the T1 transform family side by side - the 8-point core the
// paper builds on an FPGA and the 16- and 32-point JAM extensions it uses in
// place of a video codec's 8-, 16- and 32-point transforms.
//
// The three pipelines are independent: each has its own valid input, sample
// vector, valid output and coefficient vector, and each accepts one vector
// per clock. How an encoder shares or schedules them is not described by the
// paper, so they are not merged; that arrangement is this design's choice.
//
// Latencies: 5 cycles (8-point), 6 (16-point), 7 (32-point). Inputs are
// signed W bits; outputs are the unscaled integer products, W+4, W+5 and
// W+6 bits wide. rst_n is asynchronous and active low.
module t1_dct_top #(
  parameter int unsigned W = 8          // input sample width
) (
  input  logic                  clk,
  input  logic                  rst_n,
  // 8-point
  input  logic                  in_valid8,
  input  logic signed [W-1:0]   x8 [8],
  output logic                  out_valid8,
  output logic signed [W+3:0]   X8 [8],
  // 16-point
  input  logic                  in_valid16,
  input  logic signed [W-1:0]   x16 [16],
  output logic                  out_valid16,
  output logic signed [W+4:0]   X16 [16],
  // 32-point
  input  logic                  in_valid32,
  input  logic signed [W-1:0]   x32 [32],
  output logic                  out_valid32,
  output logic signed [W+5:0]   X32 [32]
);

  dct8_t1 #(.W(W)) u_dct8 (
    .clk, .rst_n, .in_valid(in_valid8), .x(x8),
    .out_valid(out_valid8), .X(X8)
  );

  dct16_t1 #(.W(W)) u_dct16 (
    .clk, .rst_n, .in_valid(in_valid16), .x(x16),
    .out_valid(out_valid16), .X(X16)
  );

  dct32_t1 #(.W(W)) u_dct32 (
    .clk, .rst_n, .in_valid(in_valid32), .x(x32),
    .out_valid(out_valid32), .X(X32)
  );

endmodule
