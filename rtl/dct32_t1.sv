// dct32_t1: 32-point low-complexity transform T_(32), the JAM construction
// applied to T_(16), for the 32x32 transform of a video codec.
//
// A 32-input butterfly (jam_butterfly) forms u_i = x_i + x_{31-i} and
// v_i = x_i - x_{31-i}; two dct16_t1 units transform u and v; the outputs
// are interleaved, X_{2k} from the u half and X_{2k+1} from the v half. This
// reproduces the paper's printed T_(32) and its cost of 2*64 + 32 = 160
// additions and 24 shifts. Scaling (1/sqrt(2) and D_(32)) is left to the
// quantizer.
//
// Interface: x is signed W bits; X is signed W+6 bits. One vector per clock;
// results appear DCT32_LATENCY = 7 cycles after in_valid. Register rows,
// valid bit and reset are this design's choices.
module dct32_t1
  import t1_dct_pkg::*;
#(
  parameter int unsigned W = 8          // input sample width
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic                  in_valid,
  input  logic signed [W-1:0]   x [32],
  output logic                  out_valid,
  output logic signed [W+DCT32_GROWTH-1:0] X [32]
);

  logic              bf_valid;
  logic signed [W:0] u [16];
  logic signed [W:0] v [16];
  logic signed [W+5:0] Xu [16];
  logic signed [W+5:0] Xv [16];
  logic              valid_u, valid_v;

  jam_butterfly #(.N(32), .W(W)) u_bf (
    .clk, .rst_n, .in_valid, .x,
    .out_valid(bf_valid), .u, .v
  );

  dct16_t1 #(.W(W+1)) u_half_sum (
    .clk, .rst_n, .in_valid(bf_valid), .x(u),
    .out_valid(valid_u), .X(Xu)
  );

  dct16_t1 #(.W(W+1)) u_half_diff (
    .clk, .rst_n, .in_valid(bf_valid), .x(v),
    .out_valid(valid_v), .X(Xv)
  );

  always_comb begin
    for (int k = 0; k < 16; k++) begin
      X[2*k]   = Xu[k];
      X[2*k+1] = Xv[k];
    end
  end

  assign out_valid = valid_u;

  a_halves_in_step: assert property (@(posedge clk) disable iff (!rst_n)
                                     valid_u == valid_v);

endmodule
