// tb_cerberus_dec_corr: feeds the DEC corrector with reference syndromes of two bit errors in
// different symbols (must hit and correct both data bits), of single-bit and same-symbol
// double errors (must not hit) and the zero syndrome (no hit).
module tb_cerberus_dec_corr;
  import cerberus_pkg::*;
  import cerberus_tb_pkg::*;

  int checks = 0, failures = 0;
  syn32_t    syn;
  data_t     d, o;
  logic      hit;
  codeword_t e;

  cerberus_dec_corr dut (.syn_i (syn), .data_i (d), .data_o (o), .hit_o (hit));

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    #200000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    d = rand256(); syn = '0;
    #1 check(!hit && o == d, "zero syndrome");
    for (int n = 0; n < 300; n++) begin
      d = rand256();
      e = dbl_err();
      syn = ref_syn32(e);
      #1 check(hit, "double error found");
      check(o == (d ^ e[255:0]), "double error corrected");
    end
    for (int i = 0; i < 288; i += 7) begin
      syn = REF_H[i];
      #1 check(!hit, "single error is not a DEC");
      syn = REF_H[i] ^ REF_H[(i / 16) * 16 + ((i + 5) % 16)];
      #1 check(!hit, "same-symbol pair is not a DEC");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
