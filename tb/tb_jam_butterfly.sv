// tb_jam_butterfly: self-checking test of the JAM input butterfly at both
// lengths the design uses, N = 16 and N = 32.
//
// Random signed 8-bit vectors are applied every cycle, with random idle
// cycles; one cycle later u_i must equal x_i + x_{N-1-i} and v_i must equal
// x_i - x_{N-1-i}, and out_valid must repeat in_valid.
module tb_jam_butterfly;
  localparam int W = 8;
  localparam int NVEC = 3000;

  logic clk = 1'b0;
  logic rst_n = 1'b0;
  logic in_valid = 1'b0;
  logic signed [W-1:0] x [32];
  logic signed [W-1:0] x16 [16];
  logic ov16, ov32;
  logic signed [W:0] u16 [8], v16 [8];
  logic signed [W:0] u32 [16], v32 [16];

  int checks = 0, failures = 0;

  always_comb for (int i = 0; i < 16; i++) x16[i] = x[i];

  jam_butterfly #(.N(16), .W(W)) dut16 (
    .clk, .rst_n, .in_valid, .x(x16), .out_valid(ov16), .u(u16), .v(v16)
  );
  jam_butterfly #(.N(32), .W(W)) dut32 (
    .clk, .rst_n, .in_valid, .x, .out_valid(ov32), .u(u32), .v(v32)
  );

  always #5 clk = ~clk;

  task automatic check(bit cond, string what);
    checks++;
    if (!cond) begin
      failures++;
      if (failures < 20) $display("ERROR: %s", what);
    end
  endtask

  initial begin
    int xs [32];
    bit vin;
    for (int n = 0; n < 32; n++) x[n] = '0;
    repeat (3) @(posedge clk);
    #1 rst_n = 1'b1;
    for (int i = 0; i < NVEC; i++) begin
      vin = ($urandom_range(4) != 0);
      for (int n = 0; n < 32; n++) begin
        xs[n] = int'($urandom_range(255)) - 128;
        x[n] = W'(xs[n]);
      end
      in_valid = vin;
      @(posedge clk);
      #1;
      check(ov16 == vin && ov32 == vin, "out_valid does not follow in_valid");
      for (int j = 0; j < 8; j++) begin
        check(int'(u16[j]) == xs[j] + xs[15-j], $sformatf("N=16 u%0d", j));
        check(int'(v16[j]) == xs[j] - xs[15-j], $sformatf("N=16 v%0d", j));
      end
      for (int j = 0; j < 16; j++) begin
        check(int'(u32[j]) == xs[j] + xs[31-j], $sformatf("N=32 u%0d", j));
        check(int'(v32[j]) == xs[j] - xs[31-j], $sformatf("N=32 v%0d", j));
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #1000000;
    failures++;
    $display("ERROR: watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
