// tb_t1_dct_top: end-to-end test of the three transform pipelines at their
// default sizes (8-bit signed samples; 8-, 16- and 32-point).
//
// The 8-point pipeline gets 100,000 random vectors, the number used to test
// the FPGA realisation of T1; the 16- and 32-point pipelines run at the same
// time on their own random valid patterns. Every output vector is compared
// with the matrix-vector product of the corresponding low-complexity matrix,
// and the latency of each pipeline (5, 6, 7 cycles) is checked.
//
// Events that must each happen at least once per pipeline, else a failure
// is counted: back-to-back vectors (full rate), an idle cycle between
// vectors, a worst-case vector whose coefficient needs every bit of the
// output word (beyond +-2^(W+2), 2^(W+3), 2^(W+4)), and a reset that drops
// the vectors in flight.
module tb_t1_dct_top;
  import t1_dct_pkg::*;
  import tb_ref_pkg::*;

  localparam int W = 8;
  localparam int NVEC8 = 100000;
  localparam int SIZES [3] = '{8, 16, 32};
  localparam int LATS  [3] = '{DCT8_LATENCY, DCT16_LATENCY, DCT32_LATENCY};
  // A coefficient outside this range needs every bit of the output word.
  localparam int FULLW [3] = '{1 << (W + 2), 1 << (W + 3), 1 << (W + 4)};

  logic clk = 1'b0;
  logic rst_n = 1'b0;
  logic in_valid8 = 1'b0, in_valid16 = 1'b0, in_valid32 = 1'b0;
  logic signed [W-1:0] x8 [8];
  logic signed [W-1:0] x16 [16];
  logic signed [W-1:0] x32 [32];
  logic out_valid8, out_valid16, out_valid32;
  logic signed [W+3:0] X8 [8];
  logic signed [W+4:0] X16 [16];
  logic signed [W+5:0] X32 [32];

  t1_dct_top dut (.*);

  int checks = 0, failures = 0;
  longint cycle = 0;
  int M [3][32][32];                 // reference matrices

  typedef struct { int c[32]; longint t; } exp_t;
  exp_t q8[$], q16[$], q32[$];

  // Event counters, per pipeline.
  int n_sent [3], n_b2b [3], n_bubble [3], n_fullw [3], n_reset_flush [3];
  bit last_valid [3];
  bit seen_valid [3];

  always #5 clk = ~clk;
  always @(posedge clk) cycle <= cycle + 1;

  function automatic void compare(int p, ref exp_t q[$], input int got[32]);
    exp_t e;
    checks++;
    if (q.size() == 0) begin
      failures++;
      $display("ERROR: %0d-point output with no vector pending", SIZES[p]);
      return;
    end
    e = q.pop_front();
    if (cycle - e.t != LATS[p]) begin
      failures++;
      if (failures < 20) $display("ERROR: %0d-point latency %0d", SIZES[p], cycle - e.t);
    end
    for (int k = 0; k < SIZES[p]; k++) begin
      checks++;
      if (got[k] != e.c[k]) begin
        failures++;
        if (failures < 20) $display("ERROR: %0d-point X%0d = %0d, expected %0d",
                                    SIZES[p], k, got[k], e.c[k]);
      end
      if (got[k] >= FULLW[p] || got[k] < -FULLW[p]) n_fullw[p]++;
    end
  endfunction

  always @(posedge clk) begin
    int got[32];
    if (rst_n) begin
      if (out_valid8) begin
        for (int k = 0; k < 8; k++) got[k] = int'(X8[k]);
        compare(0, q8, got);
      end
      if (out_valid16) begin
        for (int k = 0; k < 16; k++) got[k] = int'(X16[k]);
        compare(1, q16, got);
      end
      if (out_valid32) begin
        for (int k = 0; k < 32; k++) got[k] = int'(X32[k]);
        compare(2, q32, got);
      end
    end
  end

  // Make the next input of pipeline p: random, or the worst case for a row.
  function automatic void make_vector(int p, output int v[32], output exp_t e);
    int N = SIZES[p];
    int sel = int'($urandom_range(63));
    int row = int'($urandom_range(N - 1));
    for (int n = 0; n < 32; n++) v[n] = 0;
    for (int n = 0; n < N; n++) begin
      if (sel == 0)      v[n] = (M[p][row][n] >= 0) ? 128 - 1 : -128;
      else if (sel == 1) v[n] = (M[p][row][n] >= 0) ? -128 : 128 - 1;
      else if (sel == 2) v[n] = (M[p][row][n] > 0) ? -128 : ((M[p][row][n] < 0) ? 127 : 0);
      else               v[n] = rand_sample(W, (sel < 6) ? sel - 3 : 2);
    end
    for (int k = 0; k < N; k++) begin
      e.c[k] = 0;
      for (int n = 0; n < N; n++) e.c[k] += M[p][k][n] * v[n];
    end
    e.t = cycle;
  endfunction

  // Decide and drive one cycle of inputs for all three pipelines.
  task automatic drive_cycle(int p_on);
    int v[32];
    exp_t e;
    bit go [3];
    for (int p = 0; p < 3; p++) begin
      go[p] = ($urandom_range(99) < p_on);
      if (go[p]) begin
        make_vector(p, v, e);
        n_sent[p]++;
        if (last_valid[p]) n_b2b[p]++;
        else if (seen_valid[p]) n_bubble[p]++;
        seen_valid[p] = 1'b1;
        case (p)
          0: begin for (int n = 0; n < 8; n++)  x8[n]  = W'(v[n]); q8.push_back(e);  end
          1: begin for (int n = 0; n < 16; n++) x16[n] = W'(v[n]); q16.push_back(e); end
          default: begin for (int n = 0; n < 32; n++) x32[n] = W'(v[n]); q32.push_back(e); end
        endcase
      end
      last_valid[p] = go[p];
    end
    in_valid8  = go[0];
    in_valid16 = go[1];
    in_valid32 = go[2];
    @(posedge clk);
    #1;
    in_valid8 = 1'b0; in_valid16 = 1'b0; in_valid32 = 1'b0;
  endtask

  task automatic idle(int n);
    repeat (n) begin
      @(posedge clk);
      #1;
    end
    for (int p = 0; p < 3; p++) last_valid[p] = 1'b0;
  endtask

  initial begin
    for (int p = 0; p < 3; p++)
      for (int k = 0; k < SIZES[p]; k++)
        for (int n = 0; n < SIZES[p]; n++)
          M[p][k][n] = t_entry(SIZES[p], k, n);
    for (int n = 0; n < 8; n++)  x8[n]  = '0;
    for (int n = 0; n < 16; n++) x16[n] = '0;
    for (int n = 0; n < 32; n++) x32[n] = '0;
    idle(3);
    rst_n = 1'b1;

    // Main stream: mostly full rate, sometimes sparse.
    while (n_sent[0] < NVEC8) begin
      drive_cycle((n_sent[0] % 5000 < 4000) ? 100 : 60);
      if ($urandom_range(999) == 0) idle(int'($urandom_range(1, 4)));
    end
    idle(LATS[2] + 2);

    // Reset with vectors in flight: they must not come out.
    for (int i = 0; i < 3; i++) drive_cycle(100);
    rst_n = 1'b0;
    for (int p = 0; p < 3; p++) n_reset_flush[p] = (p == 0) ? q8.size() : (p == 1) ? q16.size() : q32.size();
    q8.delete(); q16.delete(); q32.delete();
    idle(1);
    rst_n = 1'b1;
    idle(LATS[2] + 2);

    // Sanity after reset: a short stream still works.
    for (int i = 0; i < 50; i++) drive_cycle(100);
    idle(LATS[2] + 2);

    checks++;
    if (q8.size() + q16.size() + q32.size() != 0) begin
      failures++;
      $display("ERROR: vectors never came out");
    end
    for (int p = 0; p < 3; p++) begin
      $display("%0d-point: vectors=%0d back-to-back=%0d after-idle=%0d full-width-outputs=%0d dropped-by-reset=%0d",
               SIZES[p], n_sent[p], n_b2b[p], n_bubble[p], n_fullw[p], n_reset_flush[p]);
      checks += 4;
      if (n_b2b[p] == 0)         begin failures++; $display("ERROR: no back-to-back vectors"); end
      if (n_bubble[p] == 0)      begin failures++; $display("ERROR: no idle gap"); end
      if (n_fullw[p] == 0)      begin failures++; $display("ERROR: output word never used in full"); end
      if (n_reset_flush[p] == 0) begin failures++; $display("ERROR: reset dropped nothing"); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #5000000;
    failures++;
    $display("ERROR: watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
