// tb_stego_workloads -- the image sizes evaluated for this scheme besides
// the full 256 x 256 one (tb_stego_top_full): a 64 x 64 and a 128 x 128
// cover image, each hiding one secret bit per pixel, run end to end on
// stego_top instances of the matching size.  Besides the checks of the
// flow it checks that the secret payload is a full 1 bit per pixel and
// that the measured cycles per pixel stay inside the exponentiation-core
// bounds, and prints the throughput at the 135.2 MHz clock reported for
// an Artix-7 implementation of the published design.
module tb_stego_workloads;
  logic clk = 0;
  always #5 clk = ~clk;

  logic fin64, fin128;
  int c64, f64, c128, f128;
  longint e64, d64, e128, d128;
  int checks = 0, failures = 0;

  stego_e2e_run #(.NPIX(4096),  .SEED(64))  u_64  (.clk, .finished(fin64),  .checks(c64),  .failures(f64),  .enc_cycles(e64),  .dec_cycles(d64));
  stego_e2e_run #(.NPIX(16384), .SEED(128)) u_128 (.clk, .finished(fin128), .checks(c128), .failures(f128), .enc_cycles(e128), .dec_cycles(d128));

  initial begin
    repeat (200000000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic report(string name, int npix, int c, int f, longint e, longint d);
    checks += c + 2;
    failures += f;
    // per pixel: two exponentiations of 460..784 cycles plus 7 control cycles
    if (e < longint'(npix) * (2 * 460 + 7) || e > longint'(npix) * (2 * 784 + 7)) begin
      failures++; $display("FAIL %s encryption cycles %0d", name, e);
    end
    // per pixel: two exponentiations and two L-function steps (53) plus control
    if (d < longint'(npix) * (2 * (460 + 53)) || d > longint'(npix) * (2 * (784 + 53) + 16)) begin
      failures++; $display("FAIL %s decryption cycles %0d", name, d);
    end
    $display("%s: %0d secret bits, %0d / %0d cycles per pixel (enc / dec+ext), %0.1f / %0.1f Kpixel/s at 135.2 MHz",
             name, npix, e / npix, d / npix, 135.2e3 * npix / e, 135.2e3 * npix / d);
  endtask

  initial begin
    wait (fin64 && fin128);
    report("64x64", 4096, c64, f64, e64, d64);
    report("128x128", 16384, c128, f128, e128, d128);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
