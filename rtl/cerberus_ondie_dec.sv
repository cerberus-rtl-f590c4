// cerberus_ondie_dec: Decoder 2, the on-die SEC-DED decoder with bounded faults (O-ECC).
//
// On a read the bank hands over the stored 288-bit codeword. The 16-bit H2 syndrome is compared
// with all 288 columns; a match flips that one bit (single-error correction). Every H2 column has
// odd weight, so a double error gives an even, non-zero syndrome that matches no column and is
// left alone (double-error detection). Larger errors may be miscorrected, but H2 is built so
// that any sum of columns of one 16-bit region never equals a column of another region: a
// miscorrection stays inside the symbol that was already faulty, and the system decoder still
// sees a single-symbol error. The codeword is forwarded with R1/R2 kept, never re-encoded.
//
// Interface: cw_i (288) -> cw_o (288), ce_o (one bit corrected), ue_o (non-zero syndrome that
// matches no column); combinational. ce_o/ue_o stay inside the device (error concealment).
// Paper: SEC-DED with H2, bounded fault per 16-bit symbol, corrected codeword forwarded with
// redundancy. Own choice: H2 itself, and what happens on ue (the data pass unchanged).
module cerberus_ondie_dec
  import cerberus_pkg::*;
(
  input  codeword_t cw_i,
  output codeword_t cw_o,
  output logic      ce_o,
  output logic      ue_o
);

  syn16_t    syn;
  codeword_t flip;

  always_comb begin
    syn = syndrome16(cw_i);
    for (int i = 0; i < N; i++) flip[i] = (syn == HS[i][15:0]);
    cw_o = cw_i ^ flip;
    ce_o = |flip;
    ue_o = (syn != '0) && !ce_o;
  end

endmodule
