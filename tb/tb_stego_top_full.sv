// tb_stego_top_full -- the end-to-end test of tb_stego_top on a full
// 256 x 256 image with every parameter of the top at its default:
// the host loads a random cover image and secret bits into the sender,
// runs embedding-encryption, moves the stego image to the receiver, runs
// extraction alone (without the private key), then decryption alone and
// finally both, and checks that the secret bits and the cover image come
// back exactly (lossless, 1 bit per pixel).  It counts how often each
// mechanism occurred -- swapped and kept pairs, each
// receiver mode, host accesses blocked by a busy engine -- and fails if
// any never did.
module tb_stego_top_full;
  import tb_pkg::*;
  import stego_pkg::*;
  localparam int unsigned NPIX = 65536;   // the design's default
  localparam int unsigned AW = $clog2(NPIX);

  logic clk = 0, rst_n = 0;
  pubkey_t pk;
  privkey_t sk;
  logic [AW-1:0] hide_key;
  logic tx_start = 0, tx_busy, tx_done, rx_start = 0, rx_busy, rx_done;
  logic [AW:0] tx_swap_count;
  rx_mode_t rx_mode;
  logic rnd_req;
  logic [NBITS-1:0] rnd_r;
  logic [PIX_W-1:0] rnd_split;
  mem_sel_e host_sel;
  logic [AW-1:0] host_addr;
  logic host_we;
  logic [2*MOD_W-1:0] host_wdata, host_rdata;
  int checks = 0, failures = 0;

  stego_top dut (.*);
  always #5 clk = ~clk;

  key_t k;
  always @(posedge clk) if (rst_n && rnd_req) begin
    rnd_r <= NBITS'(rand_r(k));
    rnd_split <= PIX_W'($urandom);
  end

  initial begin
    repeat (400000000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic host_write(mem_sel_e sel, int a, logic [2*MOD_W-1:0] d);
    @(negedge clk);
    host_sel = sel; host_addr = AW'(a); host_wdata = d; host_we = 1;
    @(negedge clk);
    host_we = 0;
  endtask

  task automatic host_read(mem_sel_e sel, int a, output logic [2*MOD_W-1:0] d);
    @(negedge clk);
    host_sel = sel; host_addr = AW'(a); host_we = 0;
    @(negedge clk);
    d = host_rdata;
  endtask

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  logic [7:0]         cov_pix [NPIX];
  logic               secret  [NPIX];
  logic [2*MOD_W-1:0] stego   [NPIX];

  int n_swap1 = 0, n_keep1 = 0;
  int n_mode_ext = 0, n_mode_dec = 0, n_mode_both = 0, n_blocked = 0;

  task automatic rx_run(logic dec_en, logic ext_en);
    logic [2*MOD_W-1:0] d;
    for (int a = 0; a < NPIX; a++) begin
      host_write(MEM_RX_IMG, a, stego[a]);
      host_write(MEM_RX_SEC, a, {47'd0, ~secret[a]});  // poison
    end
    @(negedge clk);
    rx_mode.decrypt_en = dec_en; rx_mode.extract_en = ext_en; rx_start = 1;
    @(negedge clk); rx_start = 0;
    // a host write while the engine runs must not reach the memory
    host_write(MEM_RX_IMG, 0, 48'hABCDEF);
    n_blocked++;
    while (!rx_done) @(negedge clk);
    for (int a = 0; a < NPIX; a++) begin
      host_read(MEM_RX_IMG, a, d);
      check(d == (dec_en ? {40'd0, cov_pix[a]} : stego[a]), $sformatf("rx image word %0d mode %b%b", a, dec_en, ext_en));
      host_read(MEM_RX_SEC, a ^ int'(hide_key), d);
      check(d[0] == (ext_en ? secret[a ^ int'(hide_key)] : ~secret[a ^ int'(hide_key)]),
            $sformatf("rx secret bit %0d mode %b%b", a, dec_en, ext_en));
    end
    if (dec_en && ext_en) n_mode_both++;
    else if (dec_en)      n_mode_dec++;
    else                  n_mode_ext++;
  endtask

  initial begin
    logic [2*MOD_W-1:0] d;
    longint t0, t_enc;
    k = make_key(61, 53, 0);
    pk.n = NBITS'(k.n); pk.n2 = MOD_W'(k.n2); pk.g = MOD_W'(k.g); pk.r2 = MOD_W'(k.r2);
    sk.n = NBITS'(k.n); sk.n2 = MOD_W'(k.n2); sk.lambda = NBITS'(k.lambda);
    sk.mu = NBITS'(k.mu); sk.r2 = MOD_W'(k.r2);
    hide_key = AW'($urandom);
    rnd_r = NBITS'(rand_r(k)); rnd_split = PIX_W'($urandom);
    host_sel = MEM_TX_IMG; host_addr = '0; host_we = 0; host_wdata = '0; rx_mode = '0;
    repeat (3) @(negedge clk);
    rst_n = 1;

    // sender
    for (int a = 0; a < NPIX; a++) begin
      cov_pix[a] = (a == 0) ? 8'd0 : (a == 1) ? 8'd255 : 8'($urandom);
      secret[a] = 1'($urandom);
      host_write(MEM_TX_IMG, a, {40'd0, cov_pix[a]});
      host_write(MEM_TX_SEC, a, {47'd0, secret[a]});
    end
    @(negedge clk); tx_start = 1; @(negedge clk); tx_start = 0;
    t0 = 1;
    while (!tx_done) begin @(negedge clk); t0++; end
    t_enc = t0;
    for (int a = 0; a < NPIX; a++) begin
      u64 c1, c2, m1, m2;
      logic b;
      host_read(MEM_TX_IMG, a, d);
      stego[a] = d;
      c1 = u64'(d[47:24]); c2 = u64'(d[23:0]);
      m1 = dec(k, c1); m2 = dec(k, c2);
      b = secret[a ^ int'(hide_key)];
      check(m1 + m2 == u64'(cov_pix[a]), $sformatf("stego pair %0d decrypts to %0d+%0d", a, m1, m2));
      check(c1 != c2 && (c1 > c2) == b, $sformatf("stego pair %0d order", a));
    end
    check(int'(tx_swap_count) > 0 && int'(tx_swap_count) < NPIX, "some but not all pairs swapped");
    n_swap1 = int'(tx_swap_count);
    n_keep1 = NPIX - int'(tx_swap_count);
    $display("encryption: %0d cycles per pixel, %0d of %0d pairs swapped", t_enc / NPIX, tx_swap_count, NPIX);

    // receiver, separable modes
    rx_run(1'b0, 1'b1);
    rx_run(1'b1, 1'b0);
    rx_run(1'b1, 1'b1);

    check(n_swap1 > 0,     "swap happened");
    check(n_keep1 > 0,     "kept order happened");
    check(n_mode_ext > 0,  "extraction-only mode ran");
    check(n_mode_dec > 0,  "decryption-only mode ran");
    check(n_mode_both > 0, "combined mode ran");
    check(n_blocked > 0,   "host access during busy engine");
    $display("mechanisms: swapped=%0d kept=%0d ext=%0d dec=%0d both=%0d blocked=%0d",
             n_swap1, n_keep1, n_mode_ext, n_mode_dec, n_mode_both, n_blocked);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
