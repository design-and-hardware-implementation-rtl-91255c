// tb_enc_embed -- runs the sender engine on a small random image with its
// own memories and entropy source.  For every pixel it checks that the two
// stored ciphertexts decrypt (reference decryption) to halves summing to
// the cover pixel, that their order encodes the secret bit chosen by the
// hiding key, that each ciphertext equals g^M r^n mod n^2 for the r values
// handed out, and the swap counter.  It also checks the per-pixel cycle
// count against the exponentiation-core formula.
module tb_enc_embed;
  import tb_pkg::*;
  import stego_pkg::*;
  localparam int unsigned NPIX = 64;
  localparam int unsigned AW = $clog2(NPIX);

  logic clk = 0, rst_n = 0, start = 0;
  pubkey_t pk;
  logic [AW-1:0] hide_key;
  logic rnd_req;
  logic [NBITS-1:0] rnd_r;
  logic [PIX_W-1:0] rnd_split;
  logic [AW-1:0] img_addr, sec_addr;
  logic img_we, sec_rdata, busy, done;
  stego_word_t img_wdata, img_rdata;
  logic [AW:0] swap_count;
  int checks = 0, failures = 0;

  enc_embed #(.NPIX(NPIX)) dut (.*);
  always #5 clk = ~clk;

  // memories
  logic [2*MOD_W-1:0] img [NPIX];
  logic sec [NPIX];
  always_ff @(posedge clk) begin
    if (img_we) img[img_addr] <= img_wdata;
    img_rdata <= img[img_addr];
    sec_rdata <= sec[sec_addr];
  end

  // entropy source: new values after each request, r values logged
  u64 r_log [$];
  key_t k;
  always @(posedge clk) if (rst_n && rnd_req) begin
    r_log.push_back(u64'(rnd_r));
    rnd_r <= NBITS'(rand_r(k));
    rnd_split <= PIX_W'($urandom);
  end

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [PIX_W-1:0] cov_pix [NPIX];
    logic secret [NPIX];
    int swaps = 0, cyc = 0;
    k = make_key(61, 53, 0);
    pk.n = NBITS'(k.n); pk.n2 = MOD_W'(k.n2); pk.g = MOD_W'(k.g); pk.r2 = MOD_W'(k.r2);
    hide_key = AW'(37);
    rnd_r = NBITS'(rand_r(k)); rnd_split = PIX_W'($urandom);
    for (int i = 0; i < NPIX; i++) begin
      cov_pix[i] = (i == 0) ? 8'd0 : (i == 1) ? 8'd255 : PIX_W'($urandom);
      secret[i] = 1'($urandom);
      img[i] = {40'd0, cov_pix[i]};
      sec[i] = secret[i];
    end
    repeat (3) @(negedge clk);
    rst_n = 1;
    @(negedge clk); start = 1; @(negedge clk); start = 0;
    while (!done) begin @(negedge clk); cyc++; end
    for (int a = 0; a < NPIX; a++) begin
      u64 c1, c2, d1, d2, r1, r2;
      logic b;
      c1 = u64'(img[a][47:24]); c2 = u64'(img[a][23:0]);
      d1 = dec(k, c1); d2 = dec(k, c2);
      b = secret[a ^ int'(hide_key)];
      checks += 3;
      if (d1 + d2 != u64'(cov_pix[a])) begin failures++; $display("FAIL pixel %0d: %0d+%0d != %0d", a, d1, d2, cov_pix[a]); end
      if (c1 != c2 && ((c1 > c2) != b)) begin failures++; $display("FAIL bit order at %0d", a); end
      r1 = r_log[2*a]; r2 = r_log[2*a+1];
      // the pair is {E(M1,r1), E(M2,r2)}, possibly swapped
      begin
        bit kept, swp;
        kept = (c1 == enc(k, d1, r1)) && (c2 == enc(k, d2, r2));
        swp  = (c1 == enc(k, d1, r2)) && (c2 == enc(k, d2, r1));
        if (!kept && !swp) begin failures++; $display("FAIL ciphertext values at %0d", a); end
        if (swp && !kept) swaps++;
      end
    end
    checks++;
    if (int'(swap_count) != swaps) begin failures++; $display("FAIL swap count %0d vs %0d", swap_count, swaps); end
    checks++;
    if (r_log.size() != 2 * NPIX) begin failures++; $display("FAIL %0d random requests", r_log.size()); end
    // cycle budget: two exponentiations with 12 exponent bits, 5 to 29 MontP each
    checks++;
    if (cyc < NPIX * (2 * ((5 + 12) * 27 + 1) + 6) || cyc > NPIX * (2 * ((5 + 24) * 27 + 1) + 6)) begin
      failures++; $display("FAIL cycles %0d", cyc);
    end
    $display("cycles per pixel: %0d, swaps %0d of %0d", cyc / NPIX, swaps, NPIX);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
