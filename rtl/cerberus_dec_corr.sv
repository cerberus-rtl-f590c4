// cerberus_dec_corr: double-error corrector of the system decoder (Decoder 3).
//
// It finds two flipped bits i and j that lie in different symbols. For every bit i it asks:
// if bit i were wrong, is the rest of the syndrome, s ^ h_i, exactly one column of another
// symbol m? Using the invertible lower rows L_m the only candidate is e = L_m^-1 (s ^ h_i)_low;
// it must be one-hot and U_m e must equal (s ^ h_i)_up. The test is symmetric, so both bits of a double error
// raise their own hit, and no other bit does: the corrected data are the data XOR the hit
// vector, valid when exactly two hits are seen. A single error or an error pair inside one
// symbol raises no hit (the SSC corrector handles those).
//
// Interface: syn_i (32), data_i (256) -> data_o (256), hit_o (1); combinational.
// Paper: DEC corrector fed by the 32-bit syndrome, in parallel with SSC. Own choice: this
// bit-trial solver in place of the cited block-pair solver.
module cerberus_dec_corr
  import cerberus_pkg::*;
(
  input  syn32_t syn_i,
  input  data_t  data_i,
  output data_t  data_o,
  output logic   hit_o
);

  logic [N-1:0] bit_hit;

  // bit_hit[i]: s ^ h_i equals a single column of some symbol m other than the symbol of bit i.
  // Written as a loop over (i, m); each test is linear in s plus constants, so synthesis
  // folds h_i into the XOR network.
  always_comb begin
    syn32_t t;
    sym_t   e2;
    t  = '0;
    e2 = '0;
    for (int i = 0; i < N; i++) begin
      bit_hit[i] = 1'b0;
      t = syn_i ^ HS[i];
      for (int m = 0; m < NSYM; m++) begin
        if (m != i / SYM_W) begin
          e2 = low_solve(m, t[31:16]);
          if ((popcount(N'(e2)) == 1) && (up_apply(m, e2) == t[15:0])) bit_hit[i] = 1'b1;
        end
      end
    end
  end

  always_comb begin
    hit_o  = (popcount(bit_hit) == 2);
    data_o = hit_o ? (data_i ^ bit_hit[K-1:0]) : data_i;
  end

endmodule
