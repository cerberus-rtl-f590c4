// cerberus_encoder: the single shared ECC encoder of the memory controller (encode once).
//
// It turns 256 data bits D into the 288-bit codeword {R2, R1, D}. R1 and R2 (16 bits each) are
// chosen so that the whole codeword has a zero syndrome under H_S-ECC (32 x 288). Since H2 is
// the upper half of H_S-ECC, the same codeword also has a zero H2 syndrome, so the link check
// and the on-die decoder in the DRAM can reuse R1/R2 without a second encoder. This is the
// paper's composite generator G_S-ECC = G1*G2 done in one step: {R2,R1} = RED_INV * (H_D * D),
// where H_D are the 256 data columns and RED_INV the inverse of the 32 redundancy columns.
// Each redundancy bit is one XOR tree over the data bits; the column constants PAR are worked
// out at elaboration from cerberus_pkg.
//
// Interface: data_i (256) -> cw_o (288), purely combinational; the caller registers it.
// Paper: a single encoder, 256 -> 288 bits, R1 and R2 of 16 bits, G_S-ECC = G1*G2, XOR network.
// Own choice: the matrices themselves (see cerberus_pkg) and the bit order {R2,R1,D}.
module cerberus_encoder
  import cerberus_pkg::*;
(
  input  data_t     data_i,
  output codeword_t cw_o
);

  typedef logic [K-1:0][R_SYS-1:0] par_t;

  // PAR[i]: the {R2,R1} contribution of data bit i.
  function automatic par_t gen_par();
    par_t m;
    for (int i = 0; i < K; i++) begin
      m[i] = '0;
      for (int p = 0; p < R_SYS; p++) if (HS[i][p]) m[i] ^= RED_INV[p];
    end
    return m;
  endfunction

  localparam par_t PAR = gen_par();

  logic [R_SYS-1:0] red;

  always_comb begin
    red = '0;
    for (int i = 0; i < K; i++) if (data_i[i]) red ^= PAR[i];
  end

  assign cw_o = {red, data_i};

endmodule
