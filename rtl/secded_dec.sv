// secded_dec: SECDED (39,32) decoder, combinational.
//
// Recomputes the Hamming check bits of the stored data and compares them with the
// stored ones (the syndrome) and checks the overall parity:
//   syndrome 0, parity ok      -> no error
//   parity wrong               -> single-bit error, corrected (ce_o); a syndrome that is a
//                                 power of two or zero points at a check or parity bit
//   syndrome non-zero, parity ok -> double-bit error, not correctable (ue_o)
// data_o is the corrected data and code_o the corrected codeword, which a scrubber
// writes back. The code layout is given in rp_pkg. SECDED protection of on-chip memory
// follows the paper; the code itself is this design's choice.
module secded_dec
  import rp_pkg::*;
(
  input  code_t       code_i,
  output word_t       data_o,
  output code_t       code_o,
  output logic        ce_o,     // corrected single-bit error
  output logic        ue_o,     // uncorrectable (double-bit) error
  output logic [5:0]  syndrome_o
);
  logic [5:0] syn;
  logic       par_err;
  code_t      fix;

  always_comb begin
    syn     = code_i[37:32] ^ ecc_check(code_i[31:0]);
    par_err = ^code_i;
    fix     = '0;
    if (par_err) begin
      if (syn == 6'd0) begin
        fix[38] = 1'b1;                         // overall parity bit itself
      end else if ((syn & (syn - 6'd1)) == 6'd0) begin
        for (int unsigned i = 0; i < 6; i++)    // one of the Hamming check bits
          if (syn == 6'(1 << i)) fix[32 + i] = 1'b1;
      end else begin
        for (int unsigned i = 0; i < 32; i++)   // a data bit
          if (HPOS[i] == syn) fix[i] = 1'b1;
      end
    end
    code_o     = code_i ^ fix;
    data_o     = code_o[31:0];
    ce_o       = par_err;
    ue_o       = !par_err && (syn != 6'd0);
    syndrome_o = syn;
  end
endmodule
