// cerberus_sys_dec: Decoder 3, the system-level SSC+DEC decoder in the memory controller.
//
// It receives the 288-bit codeword read back from the DRAM (already passed through on-die
// correction), computes the 32-bit H_S-ECC syndrome (R1 and R2 used together) and runs the
// SSC and DEC correctors side by side. The decision stage picks the result:
//   syndrome zero            -> data as received            (DEC_NE)
//   exactly one symbol fits  -> symbol-corrected data       (DEC_SSC)
//   exactly two bits fit     -> double-bit-corrected data   (DEC_DEC)
//   otherwise                -> uncorrectable, due_o = 1    (DEC_DUE)
// Detection and correction both finish in the same cycle; the result is registered, so the
// decoder has a latency of one clock, with a new codeword accepted every clock.
//
// Interface: valid_i, cw_i (288) -> valid_o, data_o (256), due_o (the 1-bit decode result),
// ce_o, kind_o. Reset is active low and clears valid_o.
// Paper: 32-bit syndrome, SSC and DEC correctors in parallel, decision to 256b data + 1b
// result, single-cycle detection and correction. Own choice: the output register and the
// extra ce_o/kind_o status.
module cerberus_sys_dec
  import cerberus_pkg::*;
(
  input  logic      clk,
  input  logic      rst_n,
  input  logic      valid_i,
  input  codeword_t cw_i,
  output logic      valid_o,
  output data_t     data_o,
  output logic      due_o,
  output logic      ce_o,
  output dec_kind_e kind_o
);

  syn32_t     syn;
  data_t      ssc_data, dec_data, data_d;
  logic       ssc_hit, dec_hit;
  logic [4:0] ssc_sym;
  dec_kind_e  kind_d;

  assign syn = syndrome32(cw_i);

  cerberus_ssc_corr u_ssc (
    .syn_i (syn), .data_i (cw_i[K-1:0]), .data_o (ssc_data), .hit_o (ssc_hit), .sym_o (ssc_sym)
  );

  cerberus_dec_corr u_dec (
    .syn_i (syn), .data_i (cw_i[K-1:0]), .data_o (dec_data), .hit_o (dec_hit)
  );

  // Decision
  always_comb begin
    if (syn == '0) begin
      kind_d = DEC_NE;  data_d = cw_i[K-1:0];
    end else if (ssc_hit) begin
      kind_d = DEC_SSC; data_d = ssc_data;
    end else if (dec_hit) begin
      kind_d = DEC_DEC; data_d = dec_data;
    end else begin
      kind_d = DEC_DUE; data_d = cw_i[K-1:0];
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      valid_o <= 1'b0;
      data_o  <= '0;
      kind_o  <= DEC_NE;
    end else begin
      valid_o <= valid_i;
      if (valid_i) begin
        data_o <= data_d;
        kind_o <= kind_d;
      end
    end
  end

  assign due_o = (kind_o == DEC_DUE);
  assign ce_o  = (kind_o == DEC_SSC) || (kind_o == DEC_DEC);

  // The code makes SSC and DEC syndromes disjoint: both correctors may never claim one syndrome.
  always_comb begin
    if (valid_i) assert (!(ssc_hit && dec_hit)) else $error("SSC and DEC both matched");
  end

  logic unused_sym;
  assign unused_sym = ^ssc_sym;

endmodule
