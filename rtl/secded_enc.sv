// secded_enc: SECDED (39,32) encoder, combinational.
//
// Appends six Hamming check bits and one overall parity bit to a 32-bit word, using
// rp_pkg::ecc_encode. The paper states that on-chip BRAM and the shared memories are
// ECC protected with SECDED coding; the exact code (extended Hamming, bit layout
// {parity, check[5:0], data}) is this design's choice.
module secded_enc
  import rp_pkg::*;
(
  input  word_t data_i,
  output code_t code_o
);
  assign code_o = ecc_encode(data_i);
endmodule
