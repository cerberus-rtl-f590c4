// tb_cerberus_ssc_corr: feeds the SSC corrector with reference syndromes. A random pattern in
// any one symbol must be found (hit, symbol index) and, for data symbols, removed from the data;
// a syndrome of two bits in different symbols or a zero syndrome must not hit.
module tb_cerberus_ssc_corr;
  import cerberus_pkg::*;
  import cerberus_tb_pkg::*;

  int checks = 0, failures = 0;
  syn32_t     syn;
  data_t      d, o;
  logic       hit;
  logic [4:0] sym;
  codeword_t  e;

  cerberus_ssc_corr dut (.syn_i (syn), .data_i (d), .data_o (o), .hit_o (hit), .sym_o (sym));

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
    for (int n = 0; n < 60; n++) begin
      for (int a = 0; a < NSYM; a++) begin
        d = rand256();
        e = sym_err(a);
        syn = ref_syn32(e);
        #1 check(hit && sym == 5'(a), $sformatf("symbol %0d found", a));
        check(o == (d ^ e[255:0]), $sformatf("symbol %0d corrected", a));
      end
      e = dbl_err();
      syn = ref_syn32(e);
      #1 check(!hit, "double error in two symbols is not an SSC");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
