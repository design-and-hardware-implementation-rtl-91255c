// stego_e2e_run -- testbench helper: the end-to-end flow of tb_stego_top
// (load, embed-encrypt, check stego pairs, move image, extract only,
// decrypt only, both) on one stego_top of NPIX pixels, driven by an
// outside clock.  The cover image is a synthetic gradient with texture,
// value(a) = (a mod 256) + 3*(a div 256) + noise(0..15), truncated to 8
// bits.  Reports its checks and failures and the cycles spent in
// embedding-encryption.
module stego_e2e_run #(
  parameter int unsigned NPIX = 4096,
  parameter int unsigned SEED = 1
) (
  input  logic clk,
  output logic finished = 1'b0,
  output int   checks,
  output int   failures,
  output longint enc_cycles,
  output longint dec_cycles
);
  import tb_pkg::*;
  import stego_pkg::*;
  localparam int unsigned AW = $clog2(NPIX);

  logic rst_n = 0;
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

  stego_top #(.NPIX(NPIX)) dut (.*);

  key_t k;
  always @(posedge clk) if (rst_n && rnd_req) begin
    rnd_r <= NBITS'(rand_r(k));
    rnd_split <= PIX_W'($urandom);
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

  longint last_rx;

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
    last_rx = 3;
    while (!rx_done) begin @(negedge clk); last_rx++; end
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
    finished = 1'b0; checks = 0; failures = 0;
    void'($urandom(SEED));
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
      cov_pix[a] = (a == 0) ? 8'd0 : (a == 1) ? 8'd255 : 8'((a % 256) + (a / 256) * 3 + ($urandom % 16));
      secret[a] = 1'($urandom);
      host_write(MEM_TX_IMG, a, {40'd0, cov_pix[a]});
      host_write(MEM_TX_SEC, a, {47'd0, secret[a]});
    end
    @(negedge clk); tx_start = 1; @(negedge clk); tx_start = 0;
    t0 = 1;
    while (!tx_done) begin @(negedge clk); t0++; end
    t_enc = t0;
    enc_cycles = t_enc;
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
    dec_cycles = last_rx;

    check(n_swap1 > 0,     "swap happened");
    check(n_keep1 > 0,     "kept order happened");
    check(n_mode_ext > 0,  "extraction-only mode ran");
    check(n_mode_dec > 0,  "decryption-only mode ran");
    check(n_mode_both > 0, "combined mode ran");
    check(n_blocked > 0,   "host access during busy engine");
    $display("mechanisms: swapped=%0d kept=%0d ext=%0d dec=%0d both=%0d blocked=%0d",
             n_swap1, n_keep1, n_mode_ext, n_mode_dec, n_mode_both, n_blocked);
    finished = 1'b1;
  end
endmodule
