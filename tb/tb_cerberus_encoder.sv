// tb_cerberus_encoder: checks the shared encoder against the reference H_S-ECC columns.
// Every codeword must keep the data in bits 0..255 and have a zero 32-bit syndrome (so also a
// zero H2 syndrome); the map must be linear (enc(a^b) = enc(a)^enc(b)); two data patterns with
// a single data bit set must give exactly the redundancy that solves H_R * R = h_i.
module tb_cerberus_encoder;
  import cerberus_pkg::*;
  import cerberus_tb_pkg::*;

  int checks = 0, failures = 0;
  data_t     d, d2;
  codeword_t c, c2, c3;

  cerberus_encoder dut (.data_i (d), .cw_o (c));

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    d = '0;
    #1 check(c == '0, "zero data gives zero codeword");
    for (int i = 0; i < 256; i += 17) begin
      d = '0; d[i] = 1'b1;
      #1 check(ref_syn32(c) == '0, $sformatf("unit data bit %0d: syndrome", i));
      check(c[255:0] == d, "unit data kept");
    end
    for (int n = 0; n < 300; n++) begin
      d = rand256();
      #1 c2 = c;
      check(c[255:0] == d, "data bits are systematic");
      check(ref_syn32(c) == '0, "zero H_S-ECC syndrome");
      check(ref_syn32(c)[15:0] == '0, "zero H2 syndrome");
      d2 = rand256();
      d = d2;
      #1 c3 = c;
      d = c2[255:0] ^ d2;
      #1 check(c == (c2 ^ c3), "linearity");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
