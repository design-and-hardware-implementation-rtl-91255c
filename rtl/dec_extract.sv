// dec_extract -- receiver side: separable extraction of the secret bits
// and Paillier decryption of the stego image.
//
// For each address a = 0 .. NPIX-1 the engine reads the stored pair
// {E1, E2}.  With mode.extract_en it writes the bit (E1 > E2) to the
// secret memory at address a XOR hide_key; this needs no private key.
// With mode.decrypt_en it decrypts both ciphertexts, each with one plain
// exponentiation u = E^lambda mod n^2 on the exponentiation core (e1 = 0)
// followed by m = L(u)*mu mod n (dec_lfunc), adds P = m1 + m2 mod n
// (the additive homomorphism) and writes P back into bits of the same
// image word, the other bits cleared.  Either or both modes may be set.
// Decrypting the two halves separately and adding them is this design's
// reading of DEC(E_M1, E_M2) = M1 + M2; the mode input and the memory
// layout are also its own choices.
//
// Interfaces: as enc_embed; start (pulse), done (pulse), single-port RAMs
// with one-cycle read latency.
// Timing: extraction only: 3 cycles per pixel.  Decryption: per pixel two
// exponentiations (460..784 cycles each, set by the bits of lambda)
// and two L-function evaluations (53 cycles each) plus a few control
// cycles; about 1250 cycles for n = 3233, 1360 for n = 3599.
module dec_extract
  import stego_pkg::*;
#(
  parameter int unsigned NPIX = 65536,
  localparam int unsigned AW  = $clog2(NPIX)
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              start,
  input  rx_mode_t          mode,
  input  privkey_t          sk,
  input  logic [AW-1:0]     hide_key,
  // image memory
  output logic [AW-1:0]     img_addr,
  output logic              img_we,
  output stego_word_t       img_wdata,
  input  stego_word_t       img_rdata,
  // secret-bit memory (write only)
  output logic [AW-1:0]     sec_addr,
  output logic              sec_we,
  output logic              sec_wdata,
  // status
  output logic              busy,
  output logic              done
);

  typedef enum logic [3:0] {
    S_IDLE, S_READ, S_LATCH, S_EXP1, S_WEXP1, S_LF1, S_WLF1,
    S_EXP2, S_WEXP2, S_LF2, S_WLF2, S_WRITE, S_NEXT
  } state_e;
  state_e state;

  rx_mode_t         mode_r;
  logic [AW-1:0]    addr;
  logic [MOD_W-1:0] c1, c2;
  logic [NBITS-1:0] m1;
  logic [NBITS:0]   psum;
  logic [NBITS-1:0] pix;

  logic             mse_start, mse_done, mse_busy;
  logic [MOD_W-1:0] mse_a;
  logic             lf_start, lf_done;
  logic [NBITS-1:0] lf_m;
  logic             ext_bit;

  assign mse_start = (state == S_EXP1) || (state == S_EXP2);
  assign lf_start  = (state == S_LF1)  || (state == S_LF2);

  mse_core #(.W(MOD_W), .EXP_W(NBITS)) u_mse (
    .clk, .rst_n,
    .start(mse_start),
    .g0(state == S_EXP1 ? c1 : c2), .e0(sk.lambda),
    .g1(MOD_W'(1)), .e1('0),
    .n(sk.n2), .e_2k(sk.r2),
    .a(mse_a), .done(mse_done), .busy(mse_busy)
  );

  dec_lfunc u_lf (
    .clk, .rst_n,
    .start(lf_start), .u(mse_a), .n(sk.n), .mu(sk.mu),
    .m(lf_m), .done(lf_done)
  );

  extract_unit #(.MOD_W(MOD_W)) u_ext (
    .em1(img_rdata.em1), .em2(img_rdata.em2), .bit_out(ext_bit)
  );

  // m1 + m2 < 2n: one conditional subtraction reduces mod n
  assign psum = {1'b0, m1} + {1'b0, lf_m};
  assign pix  = (psum >= {1'b0, sk.n}) ? NBITS'(psum - {1'b0, sk.n}) : psum[NBITS-1:0];

  assign img_addr  = addr;
  assign sec_addr  = addr ^ hide_key;
  assign sec_we    = (state == S_LATCH) && mode_r.extract_en;
  assign sec_wdata = ext_bit;
  assign busy      = (state != S_IDLE);

  logic [NBITS-1:0] pix_r;
  assign img_we    = (state == S_WRITE);
  assign img_wdata = stego_word_t'({(2*MOD_W-NBITS)'(0), pix_r});

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state  <= S_IDLE;
      mode_r <= '0;
      addr   <= '0;
      c1     <= '0;
      c2     <= '0;
      m1     <= '0;
      pix_r  <= '0;
      done   <= 1'b0;
    end else begin
      done <= 1'b0;
      unique case (state)
        S_IDLE: if (start) begin
          mode_r <= mode;
          addr   <= '0;
          state  <= S_READ;
        end
        S_READ:  state <= S_LATCH;
        S_LATCH: begin                          // extraction writes here
          c1    <= img_rdata.em1;
          c2    <= img_rdata.em2;
          state <= mode_r.decrypt_en ? S_EXP1 : S_NEXT;
        end
        S_EXP1:  state <= S_WEXP1;
        S_WEXP1: if (mse_done) state <= S_LF1;
        S_LF1:   state <= S_WLF1;
        S_WLF1:  if (lf_done) begin
          m1    <= lf_m;
          state <= S_EXP2;
        end
        S_EXP2:  state <= S_WEXP2;
        S_WEXP2: if (mse_done) state <= S_LF2;
        S_LF2:   state <= S_WLF2;
        S_WLF2:  if (lf_done) begin
          pix_r <= pix;
          state <= S_WRITE;
        end
        S_WRITE: state <= S_NEXT;
        S_NEXT: begin
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

  // The exponentiation core is started only when idle.
  a_mse_idle: assert property (@(posedge clk) disable iff (!rst_n)
                               mse_start |-> !mse_busy);

endmodule
