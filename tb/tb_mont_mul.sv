// tb_mont_mul -- checks the Montgomery multiplier against x*y*R^-1 mod n
// for random operands and several odd moduli, and its latency: done is high W+2 cycles after the start cycle.
module tb_mont_mul;
  import tb_pkg::*;
  localparam int unsigned W = 24;

  logic clk = 0, rst_n = 0, start = 0;
  logic [W-1:0] x, y, n, a;
  logic done, busy;
  int checks = 0, failures = 0;

  mont_mul #(.W(W)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic run(u64 xv, u64 yv, u64 nv);
    int cyc = 0;
    u64 exp_v = montp(xv, yv, nv, W);
    @(negedge clk);
    x = W'(xv); y = W'(yv); n = W'(nv); start = 1;
    @(negedge clk);
    start = 0;
    cyc = 1;
    while (!done) begin @(negedge clk); cyc++; end
    checks += 2;
    if (u64'(a) != exp_v) begin
      failures++;
      $display("FAIL montp(%0d,%0d) mod %0d = %0d, expected %0d", xv, yv, nv, a, exp_v);
    end
    if (cyc != W + 2) begin
      failures++;
      $display("FAIL latency %0d, expected %0d", cyc, W + 2);
    end
  endtask

  initial begin
    u64 mods [4] = '{3233 * 3233, 3599 * 3599, 323 * 323, 4087 * 4087};
    x = 0; y = 0; n = 1;
    repeat (3) @(negedge clk);
    rst_n = 1;
    foreach (mods[i]) begin
      run(mods[i] - 1, mods[i] - 1, mods[i]);
      run(0, 12345 % mods[i], mods[i]);
      run(1, 1, mods[i]);
      for (int t = 0; t < 40; t++)
        run(u64'($urandom) % mods[i], u64'($urandom) % mods[i], mods[i]);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
