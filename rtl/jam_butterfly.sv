// jam_butterfly: registered input butterfly of the Jridi-Alfalou-Meher (JAM)
// construction that doubles a transform's length.
//
// An N-point vector x is split into a sum half and a difference half, each of
// N/2 points, with N adders:
//     u_i = x_i + x_{N-1-i}        v_i = x_i - x_{N-1-i}        i = 0..N/2-1
// u feeds one N/2-point transform and v the other. The sum half is the
// paper's M_add formula; for the difference half the paper's formula
// (rows [Ibar, -I], i.e. x_{N/2-1-i} - x_{N/2+i}) and its printed 16- and
// 32-point matrices disagree in the signs of some output rows; this block
// follows the printed matrices, which the order above reproduces exactly.
// The output register row is this design's choice (the paper gives only
// the signal flow graph).
//
// Interface: x is signed W bits, taken when in_valid is high; u, v (signed,
// W+1 bits) and out_valid follow one clock later. rst_n is asynchronous,
// active low, and clears the registers.
module jam_butterfly #(
  parameter int unsigned N = 16,        // transform length being built
  parameter int unsigned W = 8          // input sample width
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic                  in_valid,
  input  logic signed [W-1:0]   x [N],
  output logic                  out_valid,
  output logic signed [W:0]     u [N/2],
  output logic signed [W:0]     v [N/2]
);

  logic signed [W:0] u_d [N/2];
  logic signed [W:0] v_d [N/2];

  always_comb begin
    for (int i = 0; i < N/2; i++) begin
      u_d[i] = (W+1)'(x[i]) + (W+1)'(x[N-1-i]);
      v_d[i] = (W+1)'(x[i]) - (W+1)'(x[N-1-i]);
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      u         <= '{default: '0};
      v         <= '{default: '0};
      out_valid <= 1'b0;
    end else begin
      u         <= u_d;
      v         <= v_d;
      out_valid <= in_valid;
    end
  end

endmodule
