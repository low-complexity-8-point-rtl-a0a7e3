// dct16_t1: 16-point low-complexity transform T_(16) derived from T1 by the
// JAM construction, for the 16x16 transform of a video codec.
//
// A 16-input butterfly (jam_butterfly) forms u_i = x_i + x_{15-i} and
// v_i = x_i - x_{15-i}; two dct8_t1 cores transform u and v; their outputs
// are interleaved, X_{2k} = T1 u (k-th output) and X_{2k+1} = T1 v (k-th
// output). This reproduces the paper's printed T_(16) and its cost of
// 2*24 + 16 = 64 additions and 12 shifts. The 1/sqrt(2) factor and the
// diagonal scaling D_(16) are left to the quantizer and not built.
//
// Interface: x is signed W bits; X is signed W+5 bits. One vector per clock;
// results appear DCT16_LATENCY = 6 cycles after in_valid (one butterfly
// register row, then the five rows of the 8-point core). The register after
// the butterfly, the valid bit and the reset are this design's choices.
module dct16_t1
  import t1_dct_pkg::*;
#(
  parameter int unsigned W = 8          // input sample width
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic                  in_valid,
  input  logic signed [W-1:0]   x [16],
  output logic                  out_valid,
  output logic signed [W+DCT16_GROWTH-1:0] X [16]
);

  logic              bf_valid;
  logic signed [W:0] u [8];
  logic signed [W:0] v [8];
  logic signed [W+4:0] Xu [8];
  logic signed [W+4:0] Xv [8];
  logic              valid_u, valid_v;

  jam_butterfly #(.N(16), .W(W)) u_bf (
    .clk, .rst_n, .in_valid, .x,
    .out_valid(bf_valid), .u, .v
  );

  dct8_t1 #(.W(W+1)) u_core_sum (
    .clk, .rst_n, .in_valid(bf_valid), .x(u),
    .out_valid(valid_u), .X(Xu)
  );

  dct8_t1 #(.W(W+1)) u_core_diff (
    .clk, .rst_n, .in_valid(bf_valid), .x(v),
    .out_valid(valid_v), .X(Xv)
  );

  always_comb begin
    for (int k = 0; k < 8; k++) begin
      X[2*k]   = Xu[k];
      X[2*k+1] = Xv[k];
    end
  end

  assign out_valid = valid_u;

  // Both cores see the same valid stream.
  a_cores_in_step: assert property (@(posedge clk) disable iff (!rst_n)
                                    valid_u == valid_v);

endmodule
