// stego_pkg -- widths, key bundles and memory-word layout shared by the
// Paillier image-steganography datapath.
//
// The Paillier modulus n is NBITS = 12 bits wide, so every ciphertext lies
// below n^2 < 2^24 and fits the three bytes (red, green, blue) of one stego
// pixel; this width follows from the three-byte rendering of an encrypted
// pixel.  All Montgomery arithmetic is done modulo n^2 with MOD_W = 24 bits
// and R = 2^24.  The key bundles carry, besides the keys themselves, the
// constants a host precomputes once per key: R^2 mod n^2 (needed to enter
// the Montgomery domain) and mu = L(g^lambda mod n^2)^-1 mod n (to turn the
// division of the decryption equation into a multiplication).
package stego_pkg;

  localparam int unsigned NBITS = 12;          // width of n, lambda, mu, r
  localparam int unsigned MOD_W = 24;          // width of n^2 and of a ciphertext
  localparam int unsigned PIX_W = 8;           // grey-scale pixel

  // Public key of the receiver, plus the Montgomery constant.
  typedef struct packed {
    logic [NBITS-1:0] n;     // n = p*q (odd)
    logic [MOD_W-1:0] n2;    // n^2
    logic [MOD_W-1:0] g;     // generator in Z*_{n^2}
    logic [MOD_W-1:0] r2;    // R^2 mod n^2, R = 2^MOD_W
  } pubkey_t;

  // Private key of the receiver, plus the precomputed constants.
  typedef struct packed {
    logic [NBITS-1:0] n;
    logic [MOD_W-1:0] n2;
    logic [NBITS-1:0] lambda;  // lcm(p-1, q-1)
    logic [NBITS-1:0] mu;      // L(g^lambda mod n^2)^-1 mod n
    logic [MOD_W-1:0] r2;      // R^2 mod n^2
  } privkey_t;

  // A ciphertext rendered as one RGB stego pixel: red is the most
  // significant byte.
  typedef struct packed {
    logic [7:0] red;
    logic [7:0] green;
    logic [7:0] blue;
  } rgb_t;

  // Image-memory word after embedding: the (possibly swapped) pair of
  // ciphertexts of one cover pixel.  Before encryption the word holds the
  // cover pixel in bits [7:0]; after decryption the recovered pixel.
  typedef struct packed {
    rgb_t em1;
    rgb_t em2;
  } stego_word_t;

  // Which memory the host port of the top addresses.
  typedef enum logic [1:0] {
    MEM_TX_IMG = 2'd0,   // sender: cover image in, stego image out
    MEM_TX_SEC = 2'd1,   // sender: secret bits to embed
    MEM_RX_IMG = 2'd2,   // receiver: stego image in, recovered image out
    MEM_RX_SEC = 2'd3    // receiver: extracted secret bits
  } mem_sel_e;

  // Receiver operating modes (separable scheme).
  typedef struct packed {
    logic decrypt_en;    // recover the cover image (needs the private key)
    logic extract_en;    // recover the secret bits (needs only the hiding key)
  } rx_mode_t;

endpackage
