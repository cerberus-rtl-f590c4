// tb_cerberus_ondie_dec: Decoder 2 must correct every single-bit error (ce), flag and leave
// alone every double-bit error (ue), keep clean codewords, and obey the bounded-fault rule:
// for any multi-bit error inside one 16-bit symbol, the output may differ from the clean
// codeword only inside that symbol.
module tb_cerberus_ondie_dec;
  import cerberus_pkg::*;
  import cerberus_tb_pkg::*;

  int checks = 0, failures = 0;
  data_t     d;
  codeword_t c, y, o, e, diff;
  logic      ce, ue;

  cerberus_encoder   u_enc (.data_i (d), .cw_o (c));
  cerberus_ondie_dec dut (.cw_i (y), .cw_o (o), .ce_o (ce), .ue_o (ue));

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
    for (int n = 0; n < 30; n++) begin
      d = rand256(); #1;
      y = c; #1 check(o == c && !ce && !ue, "clean codeword unchanged");
      for (int i = 0; i < 288; i += 1 + n % 3) begin
        y = c ^ bit_err(i);
        #1 check(o == c && ce && !ue, $sformatf("single error bit %0d corrected", i));
      end
      for (int k = 0; k < 10; k++) begin
        y = c ^ dbl_err();
        #1 check(o == y && ue && !ce, "double error detected, not changed");
      end
      for (int a = 0; a < NSYM; a++) begin
        e = sym_err(a);
        y = c ^ e;
        #1 diff = o ^ c;
        diff[a*16 +: 16] = '0;
        check(diff == '0, $sformatf("bounded fault in symbol %0d", a));
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
