// tb_video_residual: 2-D transforms of video-coding residual blocks of size
// 8x8, 16x16 and 32x32, as a workload test of the 8-, 16- and 32-point
// pipelines.
//
// Residuals are the difference between a generated frame and a shifted,
// brightened copy of it (motion-compensated prediction stand-in), so they
// span the 9-bit range -255..255 of 8-bit video; a share of blocks is set to
// the worst case (+-255 with the signs of a basis pattern). Each block is
// transformed in two passes through the hardware, the testbench transposing
// between them: first pass with W = 9, second pass with W = 9 + growth.
// Checks:
//   - the result equals T A T^T exactly, entry by entry;
//   - T T^T is the diagonal matrix D_(N) the construction predicts
//     (diag(8,18,20,18,...) for N = 8, 4*I2 x diag(4,9,10,9) x I2 for
//     N = 16, 2*D_(16) x I2 for N = 32, x = Kronecker product);
//   - with the scaling S = D^(-1/2) the inverse C^T B C gives the residual
//     back (the scaled transform is orthogonal).
module tb_video_residual;
  import t1_dct_pkg::*;
  import tb_ref_pkg::*;

  localparam int WR = 9;                 // residual width
  localparam int NBLK [3] = '{200, 100, 40};
  localparam int SIZES [3] = '{8, 16, 32};

  logic clk = 1'b0;
  logic rst_n = 1'b0;
  always #5 clk = ~clk;

  // 8-point passes
  logic v8a_i = 0, v8b_i = 0, v8a_o, v8b_o;
  logic signed [WR-1:0]               x8a [8];
  logic signed [WR+DCT8_GROWTH-1:0]   X8a [8];
  logic signed [WR+DCT8_GROWTH-1:0]   x8b [8];
  logic signed [WR+2*DCT8_GROWTH-1:0] X8b [8];
  dct8_t1 #(.W(WR))               p1_8 (.clk, .rst_n, .in_valid(v8a_i), .x(x8a), .out_valid(v8a_o), .X(X8a));
  dct8_t1 #(.W(WR + DCT8_GROWTH)) p2_8 (.clk, .rst_n, .in_valid(v8b_i), .x(x8b), .out_valid(v8b_o), .X(X8b));

  // 16-point passes
  logic v16a_i = 0, v16b_i = 0, v16a_o, v16b_o;
  logic signed [WR-1:0]                x16a [16];
  logic signed [WR+DCT16_GROWTH-1:0]   X16a [16];
  logic signed [WR+DCT16_GROWTH-1:0]   x16b [16];
  logic signed [WR+2*DCT16_GROWTH-1:0] X16b [16];
  dct16_t1 #(.W(WR))                p1_16 (.clk, .rst_n, .in_valid(v16a_i), .x(x16a), .out_valid(v16a_o), .X(X16a));
  dct16_t1 #(.W(WR + DCT16_GROWTH)) p2_16 (.clk, .rst_n, .in_valid(v16b_i), .x(x16b), .out_valid(v16b_o), .X(X16b));

  // 32-point passes
  logic v32a_i = 0, v32b_i = 0, v32a_o, v32b_o;
  logic signed [WR-1:0]                x32a [32];
  logic signed [WR+DCT32_GROWTH-1:0]   X32a [32];
  logic signed [WR+DCT32_GROWTH-1:0]   x32b [32];
  logic signed [WR+2*DCT32_GROWTH-1:0] X32b [32];
  dct32_t1 #(.W(WR))                p1_32 (.clk, .rst_n, .in_valid(v32a_i), .x(x32a), .out_valid(v32a_o), .X(X32a));
  dct32_t1 #(.W(WR + DCT32_GROWTH)) p2_32 (.clk, .rst_n, .in_valid(v32b_i), .x(x32b), .out_valid(v32b_o), .X(X32b));

  int checks = 0, failures = 0;
  int M [32][32];                        // current matrix T_(N)
  int n_worst [3], n_blocks [3];

  task automatic fail(string msg);
    failures++;
    if (failures < 20) $display("ERROR: %s", msg);
  endtask

  // Drive one input vector into pipeline (size index p, pass 0 or 1).
  task automatic put(int p, int pass, const ref int vec [32]);
    case ({p[1:0], pass[0]})
      3'b000: begin for (int n = 0; n < 8; n++)  x8a[n]  = WR'(vec[n]);                     v8a_i  = 1; end
      3'b001: begin for (int n = 0; n < 8; n++)  x8b[n]  = (WR+DCT8_GROWTH)'(vec[n]);       v8b_i  = 1; end
      3'b010: begin for (int n = 0; n < 16; n++) x16a[n] = WR'(vec[n]);                     v16a_i = 1; end
      3'b011: begin for (int n = 0; n < 16; n++) x16b[n] = (WR+DCT16_GROWTH)'(vec[n]);      v16b_i = 1; end
      3'b100: begin for (int n = 0; n < 32; n++) x32a[n] = WR'(vec[n]);                     v32a_i = 1; end
      default: begin for (int n = 0; n < 32; n++) x32b[n] = (WR+DCT32_GROWTH)'(vec[n]);     v32b_i = 1; end
    endcase
  endtask

  task automatic clear_valid();
    v8a_i = 0; v8b_i = 0; v16a_i = 0; v16b_i = 0; v32a_i = 0; v32b_i = 0;
  endtask

  // Sample the outputs of pipeline (p, pass) if valid.
  function automatic bit get(int p, int pass, ref int vec [32]);
    case ({p[1:0], pass[0]})
      3'b000: begin if (!v8a_o)  return 0; for (int k = 0; k < 8; k++)  vec[k] = int'(X8a[k]);  end
      3'b001: begin if (!v8b_o)  return 0; for (int k = 0; k < 8; k++)  vec[k] = int'(X8b[k]);  end
      3'b010: begin if (!v16a_o) return 0; for (int k = 0; k < 16; k++) vec[k] = int'(X16a[k]); end
      3'b011: begin if (!v16b_o) return 0; for (int k = 0; k < 16; k++) vec[k] = int'(X16b[k]); end
      3'b100: begin if (!v32a_o) return 0; for (int k = 0; k < 32; k++) vec[k] = int'(X32a[k]); end
      default: begin if (!v32b_o) return 0; for (int k = 0; k < 32; k++) vec[k] = int'(X32b[k]); end
    endcase
    return 1;
  endfunction

  // One pass: the N rows of inp go in back to back; out[r] = transform of inp[r].
  task automatic run_pass(int p, int pass, ref int inp [32][32], ref int outp [32][32]);
    int N = SIZES[p];
    fork
      begin
        for (int r = 0; r < N; r++) begin
          int vec [32];
          vec = inp[r];
          put(p, pass, vec);
          @(posedge clk);
          #1 clear_valid();
        end
      end
      begin
        int got = 0;
        int vec [32];
        while (got < N) begin
          @(posedge clk);
          if (get(p, pass, vec)) begin
            outp[got] = vec;
            got++;
          end
        end
      end
    join
    #1;
  endtask

  initial begin
    for (int n = 0; n < 8; n++)  begin x8a[n] = '0;  x8b[n] = '0;  end
    for (int n = 0; n < 16; n++) begin x16a[n] = '0; x16b[n] = '0; end
    for (int n = 0; n < 32; n++) begin x32a[n] = '0; x32b[n] = '0; end
    repeat (3) @(posedge clk);
    #1 rst_n = 1'b1;

    for (int p = 0; p < 3; p++) begin
      int N;
      int dg [32];
      real s [32];
      N = SIZES[p];
      for (int k = 0; k < N; k++)
        for (int n = 0; n < N; n++) M[k][n] = t_entry(N, k, n);

      // Predicted diagonal D_(N).
      for (int k = 0; k < N; k++) begin
        int base [4] = '{4, 9, 10, 9};
        if (N == 8)       dg[k] = 2 * base[k % 4];
        else if (N == 16) dg[k] = 4 * base[(k / 2) % 4];
        else              dg[k] = 8 * base[(k / 4) % 4];
      end
      for (int k = 0; k < N; k++)
        for (int l = 0; l < N; l++) begin
          int dot;
          dot = 0;
          for (int n = 0; n < N; n++) dot += M[k][n] * M[l][n];
          checks++;
          if (dot != ((k == l) ? dg[k] : 0))
            fail($sformatf("N=%0d: row %0d . row %0d = %0d", N, k, l, dot));
        end
      for (int k = 0; k < N; k++) s[k] = 1.0 / $sqrt(real'(dg[k]));

      for (int b = 0; b < NBLK[p]; b++) begin
        int A [32][32], R [32][32], Rt [32][32], Bt [32][32];
        int worst;
        worst = (b % 8 == 7);
        if (worst) begin
          int k0, l0;
          k0 = int'($urandom_range(N - 1));
          l0 = int'($urandom_range(N - 1));
          for (int i = 0; i < N; i++)
            for (int j = 0; j < N; j++)
              A[i][j] = ((M[k0][i] >= 0) == (M[l0][j] >= 0)) ? 255 : -255;
          n_worst[p]++;
        end else begin
          int ox, oy;
          ox = int'($urandom_range(1000));
          oy = int'($urandom_range(1000));
          for (int i = 0; i < N; i++)
            for (int j = 0; j < N; j++) begin
              real f, g;
              f = 128.0 + 100.0 * $sin((oy + i) / 11.0) * $cos((ox + j) / 7.0)
                        + real'(int'($urandom_range(40)) - 20);
              g = 128.0 + 100.0 * $sin((oy + i + 1) / 11.0) * $cos((ox + j + 2) / 7.0) + 15.0;
              if (f < 0.0) f = 0.0;
              if (f > 255.0) f = 255.0;
              if (g < 0.0) g = 0.0;
              if (g > 255.0) g = 255.0;
              A[i][j] = $rtoi(f) - $rtoi(g);
            end
        end
        n_blocks[p]++;

        // Hardware: rows, transpose, rows again.
        run_pass(p, 0, A, R);              // R[i][k] = (T a_i)_k
        for (int i = 0; i < N; i++)
          for (int k = 0; k < N; k++) Rt[k][i] = R[i][k];
        run_pass(p, 1, Rt, Bt);            // Bt[l][k] = B[k][l]

        // Reference B = T A T^T and exact comparison.
        for (int k = 0; k < N; k++)
          for (int l = 0; l < N; l++) begin
            longint acc;
            acc = 0;
            for (int i = 0; i < N; i++) begin
              longint rowsum;
              rowsum = 0;
              for (int j = 0; j < N; j++) rowsum += longint'(A[i][j]) * M[l][j];
              acc += longint'(M[k][i]) * rowsum;
            end
            checks++;
            if (acc != longint'(Bt[l][k]))
              fail($sformatf("N=%0d block %0d: B[%0d][%0d] = %0d, expected %0d",
                             N, b, k, l, Bt[l][k], acc));
          end

        // Orthogonal inverse with C = S T gives the residual back.
        begin
          real tmp [32][32];
          real maxerr;
          maxerr = 0.0;
          for (int i = 0; i < N; i++)
            for (int l = 0; l < N; l++) begin
              tmp[i][l] = 0.0;
              for (int k = 0; k < N; k++)
                tmp[i][l] += s[k] * M[k][i] * s[k] * s[l] * real'(Bt[l][k]);
            end
          for (int i = 0; i < N; i++)
            for (int j = 0; j < N; j++) begin
              real a, e;
              a = 0.0;
              for (int l = 0; l < N; l++) a += tmp[i][l] * s[l] * M[l][j];
              e = a - real'(A[i][j]);
              if (e < 0.0) e = -e;
              if (e > maxerr) maxerr = e;
            end
          checks++;
          if (maxerr > 1.0e-6) fail($sformatf("N=%0d block %0d: inverse error %f", N, b, maxerr));
        end
      end
      $display("%0d-point: %0d residual blocks (%0d worst case) transformed in 2-D",
               N, n_blocks[p], n_worst[p]);
      checks++;
      if (n_worst[p] == 0) fail("no worst-case block");
    end

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #50000000;
    failures++;
    $display("ERROR: watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
