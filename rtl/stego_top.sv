// stego_top -- separable public-key image steganography: sender and
// receiver datapaths with their block RAMs.
//
// Sender: the cover image (one 8-bit pixel per word) and the secret bits
// are loaded into tx_img / tx_sec; tx_start runs enc_embed, which replaces
// every word of tx_img by an ordered pair of Paillier ciphertexts carrying
// one secret bit (1 bit per pixel).  Receiver: the stego image is loaded
// into rx_img; rx_start runs dec_extract, which, by rx_mode, writes the
// extracted bits to rx_sec and/or replaces every word of rx_img by the
// recovered cover pixel.  Moving the stego image from sender to receiver,
// and loading/reading the memories, is done by a host through one memory
// port (host_sel chooses the memory), standing for the hex-file transfer of
// a prototype.  The random values needed by encryption come from an
// external entropy source (rnd_req / rnd_r / rnd_split).
//
// Host port timing: host_rdata is the word addressed one cycle earlier
// (synchronous RAM).  The host may touch a side's memories only while that
// side is not busy; while busy the engine owns them.
// Keys: pk (public key with R^2 mod n^2), sk (private key with mu) and the
// shared data-hiding key enter as ports.
module stego_top
  import stego_pkg::*;
#(
  parameter int unsigned NPIX = 65536,     // 256 x 256 cover image
  localparam int unsigned AW  = $clog2(NPIX)
) (
  input  logic              clk,
  input  logic              rst_n,
  // keys
  input  pubkey_t           pk,
  input  privkey_t          sk,
  input  logic [AW-1:0]     hide_key,
  // control
  input  logic              tx_start,
  output logic              tx_busy,
  output logic              tx_done,
  output logic [AW:0]       tx_swap_count,
  input  logic              rx_start,
  input  rx_mode_t          rx_mode,
  output logic              rx_busy,
  output logic              rx_done,
  // entropy source
  output logic              rnd_req,
  input  logic [NBITS-1:0]  rnd_r,
  input  logic [PIX_W-1:0]  rnd_split,
  // host memory port
  input  mem_sel_e          host_sel,
  input  logic [AW-1:0]     host_addr,
  input  logic              host_we,
  input  logic [2*MOD_W-1:0] host_wdata,
  output logic [2*MOD_W-1:0] host_rdata
);

  // sender memories
  logic [AW-1:0] tx_img_addr, txe_img_addr, txe_sec_addr, tx_sec_addr;
  logic          tx_img_we, txe_img_we, tx_sec_we;
  stego_word_t   tx_img_wdata, txe_img_wdata, tx_img_rdata;
  logic          tx_sec_wdata, tx_sec_rdata;
  // receiver memories
  logic [AW-1:0] rx_img_addr, rxe_img_addr, rxe_sec_addr, rx_sec_addr;
  logic          rx_img_we, rxe_img_we, rx_sec_we, rxe_sec_we;
  stego_word_t   rx_img_wdata, rxe_img_wdata, rx_img_rdata;
  logic          rx_sec_wdata, rxe_sec_wdata, rx_sec_rdata;

  mem_sel_e      host_sel_q;

  enc_embed #(.NPIX(NPIX)) u_enc (
    .clk, .rst_n, .start(tx_start), .pk, .hide_key,
    .rnd_req, .rnd_r, .rnd_split,
    .img_addr(txe_img_addr), .img_we(txe_img_we), .img_wdata(txe_img_wdata), .img_rdata(tx_img_rdata),
    .sec_addr(txe_sec_addr), .sec_rdata(tx_sec_rdata),
    .busy(tx_busy), .done(tx_done), .swap_count(tx_swap_count)
  );

  dec_extract #(.NPIX(NPIX)) u_dec (
    .clk, .rst_n, .start(rx_start), .mode(rx_mode), .sk, .hide_key,
    .img_addr(rxe_img_addr), .img_we(rxe_img_we), .img_wdata(rxe_img_wdata), .img_rdata(rx_img_rdata),
    .sec_addr(rxe_sec_addr), .sec_we(rxe_sec_we), .sec_wdata(rxe_sec_wdata),
    .busy(rx_busy), .done(rx_done)
  );

  // host / engine arbitration: the engine owns its memories while busy
  always_comb begin
    tx_img_addr  = tx_busy ? txe_img_addr  : host_addr;
    tx_img_we    = tx_busy ? txe_img_we    : (host_we && host_sel == MEM_TX_IMG);
    tx_img_wdata = tx_busy ? txe_img_wdata : stego_word_t'(host_wdata);
    tx_sec_addr  = tx_busy ? txe_sec_addr  : host_addr;
    tx_sec_we    = !tx_busy && host_we && host_sel == MEM_TX_SEC;
    tx_sec_wdata = host_wdata[0];
    rx_img_addr  = rx_busy ? rxe_img_addr  : host_addr;
    rx_img_we    = rx_busy ? rxe_img_we    : (host_we && host_sel == MEM_RX_IMG);
    rx_img_wdata = rx_busy ? rxe_img_wdata : stego_word_t'(host_wdata);
    rx_sec_addr  = rx_busy ? rxe_sec_addr  : host_addr;
    rx_sec_we    = rx_busy ? rxe_sec_we    : (host_we && host_sel == MEM_RX_SEC);
    rx_sec_wdata = rx_busy ? rxe_sec_wdata : host_wdata[0];
  end

  bram_sp #(.DEPTH(NPIX), .WIDTH(2*MOD_W)) u_tx_img (
    .clk, .we(tx_img_we), .addr(tx_img_addr), .wdata(tx_img_wdata), .rdata(tx_img_rdata));
  bram_sp #(.DEPTH(NPIX), .WIDTH(1)) u_tx_sec (
    .clk, .we(tx_sec_we), .addr(tx_sec_addr), .wdata(tx_sec_wdata), .rdata(tx_sec_rdata));
  bram_sp #(.DEPTH(NPIX), .WIDTH(2*MOD_W)) u_rx_img (
    .clk, .we(rx_img_we), .addr(rx_img_addr), .wdata(rx_img_wdata), .rdata(rx_img_rdata));
  bram_sp #(.DEPTH(NPIX), .WIDTH(1)) u_rx_sec (
    .clk, .we(rx_sec_we), .addr(rx_sec_addr), .wdata(rx_sec_wdata), .rdata(rx_sec_rdata));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) host_sel_q <= MEM_TX_IMG;
    else        host_sel_q <= host_sel;
  end

  always_comb begin
    unique case (host_sel_q)
      MEM_TX_IMG: host_rdata = tx_img_rdata;
      MEM_TX_SEC: host_rdata = {{(2*MOD_W-1){1'b0}}, tx_sec_rdata};
      MEM_RX_IMG: host_rdata = rx_img_rdata;
      default:    host_rdata = {{(2*MOD_W-1){1'b0}}, rx_sec_rdata};
    endcase
  end

endmodule
