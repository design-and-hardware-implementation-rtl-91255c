// tb_mse_core -- checks g0^e0 * g1^e1 mod N (simultaneous and single
// exponentiation) against a reference, with N = n^2 of real 12-bit
// Paillier moduli, and the cycle count (5 + EXP_W + ones(e0|e1)) * (W+3) + 1.
module tb_mse_core;
  import tb_pkg::*;
  localparam int unsigned W = 24, EXP_W = 12;

  logic clk = 0, rst_n = 0, start = 0;
  logic [W-1:0] g0, g1, n, e_2k, a;
  logic [EXP_W-1:0] e0, e1;
  logic done, busy;
  int checks = 0, failures = 0;

  mse_core #(.W(W), .EXP_W(EXP_W)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (2000000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic run(u64 b0, u64 x0, u64 b1, u64 x1, u64 m);
    int cyc;
    u64 expv = mulmod(powmod(b0, x0, m), powmod(b1, x1, m), m);
    int ones = $countones(EXP_W'(x0) | EXP_W'(x1));
    @(negedge clk);
    g0 = W'(b0); g1 = W'(b1); e0 = EXP_W'(x0); e1 = EXP_W'(x1);
    n = W'(m); e_2k = W'((u64'(1) << (2 * W)) % m);
    start = 1;
    @(negedge clk);
    start = 0;
    cyc = 1;
    while (!done) begin @(negedge clk); cyc++; end
    checks += 2;
    if (u64'(a) != expv) begin
      failures++;
      $display("FAIL %0d^%0d * %0d^%0d mod %0d = %0d, expected %0d", b0, x0, b1, x1, m, a, expv);
    end
    if (cyc != (5 + EXP_W + ones) * (W + 3) + 1) begin
      failures++;
      $display("FAIL cycles %0d, expected %0d", cyc, (5 + EXP_W + ones) * (W + 3) + 1);
    end
  endtask

  initial begin
    u64 ns [3] = '{3233, 3599, 2021};
    g0 = 0; g1 = 0; e0 = 0; e1 = 0; n = 1; e_2k = 0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    foreach (ns[i]) begin
      u64 m;
      m = ns[i] * ns[i];
      run(ns[i] + 1, 255, 17, ns[i], m);        // an encryption g^M r^n
      run(ns[i] + 1, 0, 17, ns[i], m);
      run(12345 % m, 4095, 999, 4095, m);
      run(7, 1, 11, 0, m);                      // single exponentiation
      run(m - 1, 2, 1, 0, m);
      for (int t = 0; t < 12; t++)
        run(u64'($urandom) % m, $urandom % 4096, u64'($urandom) % m, $urandom % 4096, m);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
