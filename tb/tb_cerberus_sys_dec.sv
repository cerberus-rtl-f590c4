// tb_cerberus_sys_dec: Decoder 3 end to end on encoded codewords. Clean words, any single
// symbol error (16E in the paper's terms), any two bit errors in distinct symbols (SE+SE, DE)
// must come back with the original data and the right kind; wide random errors must never be
// reported as clean. The result must appear exactly one clock after valid_i.
module tb_cerberus_sys_dec;
  import cerberus_pkg::*;
  import cerberus_tb_pkg::*;

  int checks = 0, failures = 0;
  int n_due = 0, n_sdc = 0;
  logic      clk = 0, rst_n = 0;
  data_t     d, od;
  codeword_t c, y;
  logic      vi = 0, vo, due, ce;
  dec_kind_e kind;

  always #5 clk = ~clk;

  cerberus_encoder u_enc (.data_i (d), .cw_o (c));
  cerberus_sys_dec dut (.clk, .rst_n, .valid_i (vi), .cw_i (y), .valid_o (vo), .data_o (od),
                        .due_o (due), .ce_o (ce), .kind_o (kind));

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  // present y for one cycle, check valid_o one cycle later
  task automatic run(input codeword_t cw);
    @(negedge clk); y = cw; vi = 1'b1;
    @(negedge clk); vi = 1'b0;
    check(vo, "result one cycle after valid_i");
    @(negedge clk);
    check(!vo, "valid_o is a single pulse");
  endtask

  initial begin
    #5000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    y = '0; d = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int n = 0; n < 200; n++) begin
      d = rand256(); #1;
      run(c);
      check(od == d && kind == DEC_NE && !due && !ce, "clean");
      run(c ^ sym_err($urandom_range(0, NSYM - 1)));
      check(od == d && kind == DEC_SSC && ce && !due, "single symbol corrected");
      run(c ^ dbl_err());
      check(od == d && kind == DEC_DEC && ce && !due, "double bit corrected");
      run(c ^ bit_err($urandom_range(0, 287)));
      check(od == d && ce, "single bit corrected");
      run(c ^ (sym_err($urandom_range(0, 8)) | sym_err($urandom_range(9, 17))));
      check(kind != DEC_NE, "two-symbol error never reported clean");
      if (due) n_due++; else if (od != d) n_sdc++;
    end
    $display("two-symbol errors: %0d DUE, %0d miscorrected of 200", n_due, n_sdc);
    check(n_due >= 190, "two-symbol errors are detected");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
