// cerberus_link_dec: Decoder 1, the write-link check inside the DRAM.
//
// On a write the DRAM receives the whole 288-bit codeword {R2,R1,D}. This block computes the
// 16-bit syndrome with H2 (the same XOR network the on-die decoder uses) and flags any non-zero
// syndrome as a link error. It never corrects: the flag becomes ALERT, the controller resends,
// and only a clean codeword is written to the cells. Because every H2 column has odd weight
// and any 8 consecutive columns are independent, all single-bit, odd-weight and 8-bit burst
// errors are caught; a random pattern escapes with probability 2^-16.
//
// Interface: cw_i (288) -> syn_o (16), alert_o (1); combinational. The DRAM bank registers alert.
// Paper: detection only with H2, retransmission request via ALERT. Own choice: the exact H2.
module cerberus_link_dec
  import cerberus_pkg::*;
(
  input  codeword_t cw_i,
  output syn16_t    syn_o,
  output logic      alert_o
);

  always_comb begin
    syn_o   = syndrome16(cw_i);
    alert_o = |syn_o;
  end

endmodule
