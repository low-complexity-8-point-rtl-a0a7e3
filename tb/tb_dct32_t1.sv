// tb_dct32_t1: self-checking test of the 32-point JAM transform.
//
// First checks the reference rule against rows copied from the printed
// 16-point matrix. Then streams random and worst-case signed 8-bit vectors,
// with idle gaps, and compares every output vector with the 32x32
// matrix-vector product; the input-to-output delay must be 7 cycles.
module tb_dct32_t1;
  import t1_dct_pkg::*;
  import tb_ref_pkg::*;

  localparam int W = 8;
  localparam int N = 32;
  localparam int GW = W + DCT32_GROWTH;
  localparam int LAT = DCT32_LATENCY;
  localparam int NVEC = 2000;

  // Rows 3, 5 and 31 of the printed 32-point matrix.
  localparam int ROW3 [32]  = '{1, 1, 1, 1, 1, 1, 1, 1, -1, -1, -1, -1, -1, -1, -1, -1,
                                1, 1, 1, 1, 1, 1, 1, 1, -1, -1, -1, -1, -1, -1, -1, -1};
  localparam int ROW5 [32]  = '{2, 2, 1, 0, 0, -1, -2, -2, -2, -2, -1, 0, 0, 1, 2, 2,
                                -2, -2, -1, 0, 0, 1, 2, 2, 2, 2, 1, 0, 0, -1, -2, -2};
  localparam int ROW31 [32] = '{0, -1, 2, -2, 2, -2, 1, 0, 0, -1, 2, -2, 2, -2, 1, 0,
                                0, -1, 2, -2, 2, -2, 1, 0, 0, -1, 2, -2, 2, -2, 1, 0};

  logic clk = 1'b0;
  logic rst_n = 1'b0;
  logic in_valid = 1'b0;
  logic signed [W-1:0] x [N];
  logic out_valid;
  logic signed [GW-1:0] X [N];

  int checks = 0, failures = 0;
  longint cycle = 0;

  typedef struct { int c[N]; longint t; } exp_t;
  exp_t q[$];

  dct32_t1 dut (.*);

  always #5 clk = ~clk;
  always @(posedge clk) cycle <= cycle + 1;

  always @(posedge clk) begin
    if (rst_n && out_valid) begin
      exp_t e;
      checks++;
      if (q.size() == 0) begin
        failures++;
        $display("ERROR: output with no vector pending at cycle %0d", cycle);
      end else begin
        e = q.pop_front();
        if (cycle - e.t != LAT) begin
          failures++;
          if (failures < 5) $display("ERROR: latency %0d, expected %0d", cycle - e.t, LAT);
        end
        for (int k = 0; k < N; k++) begin
          checks++;
          if (int'(X[k]) != e.c[k]) begin
            failures++;
            if (failures < 20) $display("ERROR: X%0d = %0d, expected %0d", k, X[k], e.c[k]);
          end
        end
      end
    end
  end

  task automatic idle(int n);
    repeat (n) begin
      @(posedge clk);
      #1;
    end
  endtask

  task automatic send(int v[32]);
    exp_t e;
    for (int n = 0; n < N; n++) x[n] = W'(v[n]);
    for (int k = 0; k < N; k++) e.c[k] = ref_coef(N, k, v);
    e.t = cycle;
    q.push_back(e);
    in_valid = 1'b1;
    @(posedge clk);
    #1 in_valid = 1'b0;
  endtask

  initial begin
    int v[32];
    for (int n = 0; n < N; n++) begin
      checks += 3;
      if (t_entry(N, 3, n) != ROW3[n])   failures++;
      if (t_entry(N, 5, n) != ROW5[n])   failures++;
      if (t_entry(N, 31, n) != ROW31[n]) failures++;
    end
    for (int n = 0; n < N; n++) x[n] = '0;
    idle(3);
    rst_n = 1'b1;

    for (int k = 0; k < N; k++) begin
      for (int n = 0; n < 32; n++) v[n] = 0;
      for (int n = 0; n < N; n++) v[n] = (t_entry(N, k, n) >= 0) ? 127 : -128;
      send(v);
      for (int n = 0; n < N; n++) v[n] = (t_entry(N, k, n) >= 0) ? -128 : 127;
      send(v);
    end
    for (int i = 0; i < NVEC; i++) begin
      int mode;
      mode = int'($urandom_range(15));
      for (int n = 0; n < 32; n++) v[n] = rand_sample(W, (mode < 2) ? mode : 2);
      send(v);
      if ($urandom_range(3) == 0) idle(int'($urandom_range(3)));
    end
    idle(LAT + 2);
    checks++;
    if (q.size() != 0) begin
      failures++;
      $display("ERROR: %0d vectors never came out", q.size());
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #2000000;
    failures++;
    $display("ERROR: watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
