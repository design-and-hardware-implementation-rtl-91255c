// tb_dec_extract -- runs the receiver engine on stego images built by the
// reference model, in its three modes: extraction only (image memory must
// stay untouched, 3 cycles per pixel), decryption only (secret memory
// untouched) and both.  Checks every recovered pixel and secret bit.
module tb_dec_extract;
  import tb_pkg::*;
  import stego_pkg::*;
  localparam int unsigned NPIX = 32;
  localparam int unsigned AW = $clog2(NPIX);

  logic clk = 0, rst_n = 0, start = 0;
  rx_mode_t mode;
  privkey_t sk;
  logic [AW-1:0] hide_key;
  logic [AW-1:0] img_addr, sec_addr;
  logic img_we, sec_we, sec_wdata, busy, done;
  stego_word_t img_wdata, img_rdata;
  int checks = 0, failures = 0;

  dec_extract #(.NPIX(NPIX)) dut (.*);
  always #5 clk = ~clk;

  logic [2*MOD_W-1:0] img [NPIX];
  logic sec [NPIX];
  always_ff @(posedge clk) begin
    if (img_we) img[img_addr] <= img_wdata;
    if (sec_we) sec[sec_addr] <= sec_wdata;
    img_rdata <= img[img_addr];
  end

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  key_t k;
  logic [7:0] pix [NPIX];
  logic bits [NPIX];
  logic [2*MOD_W-1:0] stego [NPIX];

  task automatic run(logic dec_en, logic ext_en, output int cyc);
    for (int i = 0; i < NPIX; i++) begin img[i] = stego[i]; sec[i] = 1'b0; end
    @(negedge clk);
    mode.decrypt_en = dec_en; mode.extract_en = ext_en; start = 1;
    @(negedge clk); start = 0; cyc = 1;
    while (!done) begin @(negedge clk); cyc++; end
    for (int a = 0; a < NPIX; a++) begin
      checks += 2;
      if (img[a] != (dec_en ? {40'd0, pix[a]} : stego[a])) begin
        failures++; $display("FAIL image word %0d mode %b%b: %h", a, dec_en, ext_en, img[a]);
      end
      if (sec[int'(a) ^ int'(hide_key)] != (ext_en ? bits[a] : 1'b0)) begin
        failures++; $display("FAIL secret bit for pixel %0d mode %b%b", a, dec_en, ext_en);
      end
    end
  endtask

  initial begin
    int cyc;
    k = make_key(59, 61, 3);
    sk.n = NBITS'(k.n); sk.n2 = MOD_W'(k.n2); sk.lambda = NBITS'(k.lambda);
    sk.mu = NBITS'(k.mu); sk.r2 = MOD_W'(k.r2);
    hide_key = AW'(21);
    mode = '0;
    for (int i = 0; i < NPIX; i++) begin
      u64 m1, e1, e2;
      pix[i] = (i == 0) ? 8'd255 : (i == 1) ? 8'd0 : 8'($urandom);
      bits[i] = 1'($urandom);
      m1 = u64'($urandom) % (u64'(pix[i]) + 1);
      e1 = enc(k, m1, rand_r(k));
      e2 = enc(k, u64'(pix[i]) - m1, rand_r(k));
      if ((e1 > e2) != bits[i]) stego[i] = {24'(e2), 24'(e1)};
      else                      stego[i] = {24'(e1), 24'(e2)};
    end
    repeat (3) @(negedge clk);
    rst_n = 1;
    run(1'b0, 1'b1, cyc);
    checks++;
    if (cyc != 3 * NPIX + 1) begin failures++; $display("FAIL extract-only cycles %0d", cyc); end
    run(1'b1, 1'b0, cyc);
    $display("decryption cycles per pixel: %0d", cyc / NPIX);
    run(1'b1, 1'b1, cyc);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
