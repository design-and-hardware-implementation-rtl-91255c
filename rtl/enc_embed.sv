// enc_embed -- sender side: Paillier encryption of every cover pixel and
// embedding of one secret bit per pixel.
//
// For each address a = 0 .. NPIX-1 the engine
//   1. reads the cover pixel P (bits [7:0] of the image word) and the
//      secret bit at address a XOR hide_key of the secret memory,
//   2. splits P = M1 + M2 with M1 = P AND s, M2 = P - M1 (s random),
//   3. encrypts both halves on one time-shared exponentiation core,
//      E = g^M * r^n mod n^2, each with a fresh random r from the
//      entropy-source port,
//   4. orders the pair by the secret bit (embed_unit) and writes
//      {E1, E2} back to the image word at address a.
// Encrypt-then-embed, the additive split, the comparison rule and the
// simultaneous exponentiation follow the paper.  The split rule, the
// XOR pixel-selection sequence derived from the hiding key and the
// request/response entropy port are this design's choices.
//
// Interfaces: start (pulse) processes the whole image; done pulses at the
// end.  Memories: single-port synchronous RAMs with one-cycle read latency.
// Entropy port: in a cycle with rnd_req high the engine samples rnd_r
// (must lie in Z*_n, 1 <= r < n, gcd(r,n) = 1) and rnd_split; the source
// must present fresh values after each request.
// Timing: per pixel 2 exponentiations (460..784 cycles each, set by the
// bits of M OR n) plus 7 cycles of memory and control; about 1260 cycles
// for n = 3233.
module enc_embed
  import stego_pkg::*;
#(
  parameter int unsigned NPIX = 65536,
  localparam int unsigned AW  = $clog2(NPIX)
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              start,
  input  pubkey_t           pk,
  input  logic [AW-1:0]     hide_key,
  // entropy source
  output logic              rnd_req,
  input  logic [NBITS-1:0]  rnd_r,
  input  logic [PIX_W-1:0]  rnd_split,
  // image memory
  output logic [AW-1:0]     img_addr,
  output logic              img_we,
  output stego_word_t       img_wdata,
  input  stego_word_t       img_rdata,
  // secret-bit memory (read only)
  output logic [AW-1:0]     sec_addr,
  input  logic              sec_rdata,
  // status
  output logic              busy,
  output logic              done,
  output logic [AW:0]       swap_count
);

  typedef enum logic [2:0] {
    S_IDLE, S_READ, S_LATCH, S_ENC1, S_WAIT1, S_ENC2, S_WAIT2, S_WRITE
  } state_e;
  state_e state;

  logic [AW-1:0]    addr;
  logic [PIX_W-1:0] pix, m1, m2;
  logic             sbit;
  logic [MOD_W-1:0] e1;
  logic [NBITS-1:0] r_cur;

  logic             mse_start, mse_done, mse_busy;
  logic [MOD_W-1:0] mse_a;
  logic [MOD_W-1:0] out1, out2;
  logic             swapped;

  assign rnd_req   = (state == S_LATCH) || (state == S_WAIT1 && mse_done);
  assign mse_start = (state == S_ENC1) || (state == S_ENC2);

  mse_core #(.W(MOD_W), .EXP_W(NBITS)) u_mse (
    .clk, .rst_n,
    .start(mse_start),
    .g0(pk.g), .e0(NBITS'(state == S_ENC1 ? m1 : m2)),
    .g1(MOD_W'(r_cur)), .e1(pk.n),
    .n(pk.n2), .e_2k(pk.r2),
    .a(mse_a), .done(mse_done), .busy(mse_busy)
  );

  embed_unit #(.MOD_W(MOD_W)) u_embed (
    .bit_in(sbit), .em1(e1), .em2(mse_a),
    .out1, .out2, .swapped
  );

  assign img_addr  = addr;
  assign sec_addr  = addr ^ hide_key;
  assign img_we    = (state == S_WRITE);
  assign img_wdata = {out1, out2};
  assign busy      = (state != S_IDLE);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state      <= S_IDLE;
      addr       <= '0;
      pix        <= '0;
      m1         <= '0;
      m2         <= '0;
      sbit       <= 1'b0;
      e1         <= '0;
      r_cur      <= '0;
      done       <= 1'b0;
      swap_count <= '0;
    end else begin
      done <= 1'b0;
      unique case (state)
        S_IDLE: if (start) begin
          addr       <= '0;
          swap_count <= '0;
          state      <= S_READ;
        end
        S_READ:  state <= S_LATCH;              // RAM read in flight
        S_LATCH: begin
          pix   <= img_rdata.em2.blue;          // cover pixel, bits [7:0]
          sbit  <= sec_rdata;
          m1    <= img_rdata.em2.blue & rnd_split;
          m2    <= img_rdata.em2.blue & ~rnd_split;
          r_cur <= rnd_r;
          state <= S_ENC1;
        end
        S_ENC1:  state <= S_WAIT1;
        S_WAIT1: if (mse_done) begin
          e1    <= mse_a;
          r_cur <= rnd_r;                       // fresh r for the second half
          state <= S_ENC2;
        end
        S_ENC2:  state <= S_WAIT2;
        S_WAIT2: if (mse_done) state <= S_WRITE;
        S_WRITE: begin
          if (swapped) swap_count <= swap_count + 1'b1;
          if (addr == AW'(NPIX - 1)) begin
            done  <= 1'b1;
            state <= S_IDLE;
          end else begin
            addr  <= addr + 1'b1;
            state <= S_READ;
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  // The additive split never loses the pixel value.
  a_split: assert property (@(posedge clk) disable iff (!rst_n)
                            (state == S_ENC1) |-> (PIX_W'(m1 + m2) == pix));

  // The exponentiation core is started only when idle.
  a_mse_idle: assert property (@(posedge clk) disable iff (!rst_n)
                               mse_start |-> !mse_busy);

endmodule
