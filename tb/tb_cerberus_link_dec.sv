// tb_cerberus_link_dec: Decoder 1 must pass every clean codeword and raise ALERT on every
// single-bit error, every double-bit error, every odd-weight error and every burst within 8
// consecutive bits; its syndrome must equal the reference H2 syndrome. Codewords are made with
// the encoder.
module tb_cerberus_link_dec;
  import cerberus_pkg::*;
  import cerberus_tb_pkg::*;

  int checks = 0, failures = 0;
  data_t     d;
  codeword_t c, y, e;
  syn16_t    syn;
  logic      alert;

  cerberus_encoder  u_enc (.data_i (d), .cw_o (c));
  cerberus_link_dec dut (.cw_i (y), .syn_o (syn), .alert_o (alert));

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
    for (int n = 0; n < 40; n++) begin
      d = rand256(); #1;
      y = c; #1 check(!alert && syn == '0, "clean codeword passes");
      for (int i = 0; i < 288; i++) begin
        y = c ^ bit_err(i);
        #1 check(alert && syn == REF_H[i][15:0], $sformatf("single error bit %0d", i));
      end
      y = c ^ dbl_err(); #1 check(alert, "double error");
      begin
        int unsigned s;
        s = $urandom_range(0, 280);
        e = '0;
        e[s +: 8] = 8'($urandom_range(1, 255));
        y = c ^ e; #1 check(alert, "burst within 8 bits");
        e = rand288();
        if (($countones(e) % 2) == 0) e[0] = ~e[0];
        y = c ^ e; #1 check(alert, "odd-weight error");
        check(syn == ref_syn32(y)[15:0], "syndrome matches reference");
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
