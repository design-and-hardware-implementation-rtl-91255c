// extract_unit -- reads the secret bit back from a stored ciphertext pair.
//
// The bit is 1 when the first ciphertext is the larger one and 0
// otherwise (the paper's rule; the equal case, which it leaves open, reads
// as 0).  No key is involved, which is what makes extraction separable from
// decryption.  Purely combinational.
module extract_unit #(
  parameter int unsigned MOD_W = 24
) (
  input  logic [MOD_W-1:0] em1,
  input  logic [MOD_W-1:0] em2,
  output logic             bit_out
);

  assign bit_out = (em1 > em2);

endmodule
