// tb_image_codec: JPEG-like still-image experiment run through the 8-point
// T1 core, as a workload test.
//
// A 512x512 8-bit grey-scale test image is generated from smooth waves plus
// a little noise (no image files are read). Each 8x8 block A, level-shifted
// by -128, is transformed in two passes: its rows go through one dct8_t1
// with 8-bit inputs, the testbench transposes the result, and the columns go
// through a second dct8_t1 with 12-bit inputs. The result must equal
// B = T1 A T1^T computed directly, entry by entry.
//
// The testbench then applies the scaling S (so that the transform is the
// orthogonal C = S T1), keeps the first r coefficients of each block in
// zig-zag order, inverts with C^T B' C and measures the error against the
// original. It checks that the error never grows as r grows (an orthogonal
// transform loses exactly the energy of the dropped coefficients) and that
// r = 64 gives the image back, and prints the PSNR for several r.
module tb_image_codec;
  import t1_dct_pkg::*;

  localparam int IMG = 512;
  localparam int NB  = IMG / 8;

  logic clk = 1'b0;
  logic rst_n = 1'b0;
  logic v1_in = 1'b0, v2_in = 1'b0;
  logic signed [7:0]  x1 [8];
  logic signed [11:0] x2 [8];
  logic v1_out, v2_out;
  logic signed [11:0] X1 [8];
  logic signed [15:0] X2 [8];

  dct8_t1 #(.W(8))  u_rows (.clk, .rst_n, .in_valid(v1_in), .x(x1),
                           .out_valid(v1_out), .X(X1));
  dct8_t1 #(.W(12)) u_cols (.clk, .rst_n, .in_valid(v2_in), .x(x2),
                           .out_valid(v2_out), .X(X2));

  always #5 clk = ~clk;

  int checks = 0, failures = 0;

  byte unsigned img [IMG][IMG];
  int blk [8][8];                 // level-shifted block
  int rowt [8][8];                // after the row pass: rowt[i][k] = (T a_i)_k
  int B [8][8];                   // after the column pass
  int zz_r [64], zz_c [64];       // zig-zag order
  real s [8];                     // diagonal of S
  real sqerr [65];                // squared error without rounding, per r
  real sqerr_rounded [65];
  int rlist [10] = '{1, 3, 6, 10, 15, 21, 28, 36, 45, 64};

  task automatic build_zigzag();
    int idx = 0;
    for (int d = 0; d < 15; d++) begin
      for (int t = 0; t < 8; t++) begin
        int r = (d % 2 == 0) ? d - t : t;
        int c = d - r;
        if (r >= 0 && r < 8 && c >= 0 && c < 8) begin
          zz_r[idx] = r;
          zz_c[idx] = c;
          idx++;
        end
      end
    end
    checks++;
    if (idx != 64 || zz_r[2] != 1 || zz_c[2] != 0 || zz_r[3] != 2 || zz_c[5] != 2) begin
      failures++;
      $display("ERROR: zig-zag table wrong");
    end
  endtask

  // Two passes through the hardware for one block.
  task automatic transform_block();
    int got;
    // rows
    fork
      begin
        for (int i = 0; i < 8; i++) begin
          for (int n = 0; n < 8; n++) x1[n] = 8'(blk[i][n]);
          v1_in = 1'b1;
          @(posedge clk);
          #1 v1_in = 1'b0;
        end
      end
      begin
        got = 0;
        while (got < 8) begin
          @(posedge clk);
          if (v1_out) begin
            for (int k = 0; k < 8; k++) rowt[got][k] = int'(X1[k]);
            got++;
          end
        end
      end
    join
    #1;
    // columns: column k of rowt is the vector (T a_i)_k over i
    fork
      begin
        for (int k = 0; k < 8; k++) begin
          for (int i = 0; i < 8; i++) x2[i] = 12'(rowt[i][k]);
          v2_in = 1'b1;
          @(posedge clk);
          #1 v2_in = 1'b0;
        end
      end
      begin
        got = 0;
        while (got < 8) begin
          @(posedge clk);
          if (v2_out) begin
            // output index l is the row frequency, got is the column frequency
            for (int l = 0; l < 8; l++) B[l][got] = int'(X2[l]);
            got++;
          end
        end
      end
    join
    #1;
  endtask

  initial begin
    real mse, psnr, prev;
    build_zigzag();
    for (int k = 0; k < 8; k++) begin
      int nrm;
      nrm = 0;
      for (int n = 0; n < 8; n++) nrm += int'(T1[k][n]) * int'(T1[k][n]);
      s[k] = 1.0 / $sqrt(real'(nrm));
    end
    for (int r = 0; r <= 64; r++) begin
      sqerr[r] = 0.0;
      sqerr_rounded[r] = 0.0;
    end

    for (int i = 0; i < IMG; i++)
      for (int j = 0; j < IMG; j++) begin
        real p;
        p = 128.0 + 70.0 * $sin(i / 37.0) * $cos(j / 23.0)
                       + 30.0 * $sin((i + 2 * j) / 9.0)
                       + real'(int'($urandom_range(16)) - 8);
        if (p < 0.0) p = 0.0;
        if (p > 255.0) p = 255.0;
        img[i][j] = 8'($rtoi(p));
      end

    for (int n = 0; n < 8; n++) begin
      x1[n] = '0;
      x2[n] = '0;
    end
    repeat (3) @(posedge clk);
    #1 rst_n = 1'b1;

    for (int bi = 0; bi < NB; bi++)
      for (int bj = 0; bj < NB; bj++) begin
        real C [8][8];
        real Bs [8][8];
        for (int i = 0; i < 8; i++)
          for (int j = 0; j < 8; j++) blk[i][j] = int'(img[8*bi+i][8*bj+j]) - 128;
        transform_block();

        // exact check against T1 A T1^T
        for (int k = 0; k < 8; k++)
          for (int l = 0; l < 8; l++) begin
            int ref_v;
            ref_v = 0;
            for (int i = 0; i < 8; i++)
              for (int j = 0; j < 8; j++)
                ref_v += int'(T1[k][i]) * blk[i][j] * int'(T1[l][j]);
            checks++;
            if (ref_v != B[k][l]) begin
              failures++;
              if (failures < 20) $display("ERROR: block %0d,%0d B[%0d][%0d] = %0d, expected %0d",
                                          bi, bj, k, l, B[k][l], ref_v);
            end
          end

        // scaled coefficients and reconstruction for each r
        for (int k = 0; k < 8; k++)
          for (int n = 0; n < 8; n++) C[k][n] = s[k] * real'(T1[k][n]);
        for (int k = 0; k < 8; k++)
          for (int l = 0; l < 8; l++) Bs[k][l] = s[k] * s[l] * real'(B[k][l]);
        for (int r = 1; r <= 64; r++) begin
          real Bk [8][8];
          real tmp [8][8];
          for (int k = 0; k < 8; k++)
            for (int l = 0; l < 8; l++) Bk[k][l] = 0.0;
          for (int z = 0; z < r; z++) Bk[zz_r[z]][zz_c[z]] = Bs[zz_r[z]][zz_c[z]];
          // tmp = C^T Bk ; A = tmp C
          for (int i = 0; i < 8; i++)
            for (int l = 0; l < 8; l++) begin
              tmp[i][l] = 0.0;
              for (int k = 0; k < 8; k++) tmp[i][l] += C[k][i] * Bk[k][l];
            end
          for (int i = 0; i < 8; i++)
            for (int j = 0; j < 8; j++) begin
              real a, e, q;
              a = 0.0;
              for (int l = 0; l < 8; l++) a += tmp[i][l] * C[l][j];
              e = a - real'(blk[i][j]);
              sqerr[r] += e * e;
              q = real'($rtoi((a + 128.0) + ((a + 128.0) >= 0.0 ? 0.5 : -0.5)));
              if (q < 0.0) q = 0.0;
              if (q > 255.0) q = 255.0;
              e = q - real'(img[8*bi+i][8*bj+j]);
              sqerr_rounded[r] += e * e;
            end
        end
      end

    prev = 1.0e30;
    for (int r = 1; r <= 64; r++) begin
      mse = sqerr[r] / real'(IMG * IMG);
      checks++;
      if (mse > prev * (1.0 + 1.0e-9) + 1.0e-12) begin
        failures++;
        $display("ERROR: error grows from r = %0d to r = %0d", r - 1, r);
      end
      prev = mse;
    end
    checks++;
    if (sqerr[64] / real'(IMG * IMG) > 1.0e-12 || sqerr_rounded[64] != 0.0) begin
      failures++;
      $display("ERROR: r = 64 does not give the image back");
    end
    foreach (rlist[i]) begin
      mse = sqerr_rounded[rlist[i]] / real'(IMG * IMG);
      psnr = (mse > 0.0) ? 10.0 * $log10(255.0 * 255.0 / mse) : 999.0;
      $display("r = %2d  bits/pixel = %5.3f  MSE = %8.3f  PSNR = %6.2f dB",
               rlist[i], real'(rlist[i]) / 8.0, mse, psnr);
    end

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #20000000;
    failures++;
    $display("ERROR: watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
