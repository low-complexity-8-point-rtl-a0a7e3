// tb_dct8_t1: self-checking test of the 8-point pipelined T1 core.
//
// Streams random signed 8-bit vectors, with random idle cycles between
// bursts and a share of worst-case vectors (every sample at the negative or
// positive limit, or the sign pattern of a row of T1 that gives the largest
// magnitude of that coefficient). Every output vector is compared with the
// product T1 x computed from the matrix, and the time from input to output
// is checked against the 5-cycle latency. A reset in mid-stream must empty
// the pipeline.
module tb_dct8_t1;
  import t1_dct_pkg::*;
  import tb_ref_pkg::*;

  localparam int W = 8;
  localparam int NVEC = 4000;

  logic clk = 1'b0;
  logic rst_n = 1'b0;
  logic in_valid = 1'b0;
  logic signed [W-1:0] x [8];
  logic out_valid;
  logic signed [W+3:0] X [8];

  int checks = 0, failures = 0;
  longint cycle = 0;

  typedef struct { int c[8]; longint t; } exp_t;
  exp_t q[$];

  dct8_t1 dut (.*);

  always #5 clk = ~clk;
  always @(posedge clk) cycle <= cycle + 1;

  // Compare outputs with the queue of expected vectors.
  always @(posedge clk) begin
    if (rst_n && out_valid) begin
      exp_t e;
      checks++;
      if (q.size() == 0) begin
        failures++;
        $display("ERROR: output with no vector pending at cycle %0d", cycle);
      end else begin
        e = q.pop_front();
        if (cycle - e.t != DCT8_LATENCY) begin
          failures++;
          if (failures < 5) $display("ERROR: latency %0d, expected %0d (in %0d out %0d t=%0t)", cycle - e.t, DCT8_LATENCY, e.t, cycle, $time);
        end
        for (int k = 0; k < 8; k++) begin
          checks++;
          if (int'(X[k]) != e.c[k]) begin
            failures++;
            if (failures < 20) $display("ERROR: X%0d = %0d, expected %0d", k, X[k], e.c[k]);
          end
        end
      end
    end
  end

  task automatic send(int v[32]);
    exp_t e;
    for (int n = 0; n < 8; n++) x[n] = W'(v[n]);
    for (int k = 0; k < 8; k++) e.c[k] = ref_coef(8, k, v);
    e.t = cycle;
    q.push_back(e);
    in_valid = 1'b1;
    @(posedge clk);
    #1 in_valid = 1'b0;
  endtask

  task automatic idle(int n);
    repeat (n) begin
      @(posedge clk);
      #1;
    end
  endtask

  initial begin
    int v[32];
    for (int n = 0; n < 8; n++) x[n] = '0;
    repeat (3) @(posedge clk);
    #1 rst_n = 1'b1;

    // Worst case per row: each sample at the limit with the row's sign.
    for (int k = 0; k < 8; k++) begin
      for (int n = 0; n < 8; n++) v[n] = (T1[k][n] >= 0) ? 127 : -128;
      send(v);
      for (int n = 0; n < 8; n++) v[n] = (T1[k][n] >= 0) ? -128 : 127;
      send(v);
    end

    for (int i = 0; i < NVEC; i++) begin
      int mode;
      mode = int'($urandom_range(15));
      for (int n = 0; n < 32; n++) v[n] = rand_sample(W, (mode < 2) ? mode : 2);
      send(v);
      if ($urandom_range(3) == 0) idle(int'($urandom_range(3)));
    end
    idle(DCT8_LATENCY + 2);

    // Reset in mid-stream: vectors in flight are dropped, nothing comes out.
    for (int i = 0; i < 3; i++) begin
      for (int n = 0; n < 32; n++) v[n] = rand_sample(W, 2);
      send(v);
    end
    #1 rst_n = 1'b0;
    q.delete();
    @(posedge clk);
    #1 rst_n = 1'b1;
    idle(DCT8_LATENCY + 2);
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
