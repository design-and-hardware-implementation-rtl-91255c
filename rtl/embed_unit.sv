// embed_unit -- hides one secret bit in the order of a ciphertext pair.
//
// The cover pixel P is split into P = M1 + M2 and both halves are
// encrypted; the bit is carried by which ciphertext is larger, so no pixel
// bit is ever altered and the cover image decrypts exactly.  Rule (from the
// paper): bit 1 and E_M1 < E_M2 -> swap; bit 0 and E_M1 > E_M2 -> swap.
// After this unit, out1 >= out2 for bit 1 and out1 <= out2 for bit 0.  Equal
// ciphertexts are left as they are (this design's choice).
// Purely combinational.
module embed_unit #(
  parameter int unsigned MOD_W = 24
) (
  input  logic             bit_in,
  input  logic [MOD_W-1:0] em1,
  input  logic [MOD_W-1:0] em2,
  output logic [MOD_W-1:0] out1,
  output logic [MOD_W-1:0] out2,
  output logic             swapped
);

  always_comb begin
    swapped = bit_in ? (em1 < em2) : (em1 > em2);
    out1    = swapped ? em2 : em1;
    out2    = swapped ? em1 : em2;
  end

endmodule
