// tb_dec_lfunc -- decrypts reference ciphertexts: u = C^lambda mod n^2 is
// computed in the testbench, the block must return m; also checks the
// latency: done is high 2*MOD_W+5 cycles after the start cycle.
module tb_dec_lfunc;
  import tb_pkg::*;
  import stego_pkg::*;

  logic clk = 0, rst_n = 0, start = 0;
  logic [MOD_W-1:0] u;
  logic [NBITS-1:0] n, mu, m;
  logic done;
  int checks = 0, failures = 0;

  dec_lfunc dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (500000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    key_t keys [3];
    keys[0] = make_key(61, 53, 0);
    keys[1] = make_key(59, 61, 3);
    keys[2] = make_key(43, 47, 7);
    u = 1; n = 1; mu = 0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    foreach (keys[i]) begin
      for (int t = 0; t < 60; t++) begin
        u64 msg, c;
        int cyc;
        msg = (t < 4) ? u64'(t) * 85 : u64'($urandom) % keys[i].n;
        c = enc(keys[i], msg, rand_r(keys[i]));
        @(negedge clk);
        u = MOD_W'(powmod(c, keys[i].lambda, keys[i].n2));
        n = NBITS'(keys[i].n); mu = NBITS'(keys[i].mu);
        start = 1;
        @(negedge clk);
        start = 0;
        cyc = 1;
        while (!done) begin @(negedge clk); cyc++; end
        checks += 2;
        if (u64'(m) != msg) begin failures++; $display("FAIL m=%0d expected %0d", m, msg); end
        if (cyc != 2 * MOD_W + 5) begin failures++; $display("FAIL latency %0d", cyc); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
