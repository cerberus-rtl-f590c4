// cerberus_ssc_corr: single-symbol corrector of the system decoder (Decoder 3).
//
// A symbol error e in symbol a gives the syndrome {L_a e, U_a e}, where L_a (lower 16 rows of
// H_S-ECC) is invertible and U_a are the H2 rows. So for every symbol in parallel the only
// candidate pattern is e_a = L_a^-1 * s_low, and symbol a is the culprit exactly when
// U_a e_a equals s_up. This per-symbol trial replaces the Chien search the paper borrows
// from Reed-Solomon decoding; it yields the same answer for this code. The code guarantees
// at most one symbol can match a single-symbol syndrome.
//
// Interface: syn_i (32), data_i (256 data bits of the received codeword) -> data_o (256,
// corrected), hit_o (1: exactly one symbol explains the syndrome), sym_o (its index);
// combinational. data_o together with hit_o is the 257-bit output of the figure.
// Paper: SSC corrector fed by the 32-bit syndrome, run in parallel with the DEC corrector.
// Own choice: the per-symbol trial structure instead of Berlekamp-Massey + Chien search.
module cerberus_ssc_corr
  import cerberus_pkg::*;
(
  input  syn32_t      syn_i,
  input  data_t       data_i,
  output data_t       data_o,
  output logic        hit_o,
  output logic [4:0]  sym_o
);

  logic [NSYM-1:0]           hit;
  logic [NSYM-1:0][SYM_W-1:0] e;

  always_comb begin
    for (int a = 0; a < NSYM; a++) begin
      e[a]   = low_solve(a, syn_i[31:16]);
      hit[a] = (e[a] != '0) && (up_apply(a, e[a]) == syn_i[15:0]);
    end
    hit_o  = (popcount(N'(hit)) == 1);
    sym_o  = '0;
    data_o = data_i;
    for (int a = 0; a < NSYM; a++) begin
      if (hit[a]) begin
        sym_o = 5'(a);
        if (a < K / SYM_W) data_o[a*SYM_W +: SYM_W] = data_i[a*SYM_W +: SYM_W] ^ e[a];
      end
    end
    if (!hit_o) data_o = data_i;
  end

endmodule
