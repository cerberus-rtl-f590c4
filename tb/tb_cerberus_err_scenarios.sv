// tb_cerberus_err_scenarios: the read-path error scenarios of the reliability evaluation, run
// through the real decoder chain. A random 32-byte block is encoded; an "in-bank" error is
// added before the on-die decoder (Decoder 2) and an "out-of-bank" error after it, and Decoder 3
// then decodes the result (one clock).
//
// Scenarios (SE = one bit, DE = two bits, 16E = random bits of one aligned 16-bit region,
// 32E = random bits of two adjacent regions; every bit of a region flips with probability 1/2):
//   guaranteed correctable by the code and checked on every trial:
//     in SE, in 16E, in SE+SE, out SE, out DE, out 16E, in SE + out SE, in SE + out DE
//   not guaranteed, outcome counted (corrected / detected / silent) and printed:
//     in 32E
// For the counted scenario only a loose bound is checked: at most 5 % silent corruption,
// the share that a 32-bit syndrome leaves for errors beyond the code's guarantee. The outcome
// rates printed are those of this design's matrices, not reference figures.
module tb_cerberus_err_scenarios;
  import cerberus_pkg::*;
  import cerberus_tb_pkg::*;

  localparam int TRIALS = 60;

  int checks = 0, failures = 0;
  logic      clk = 0, rst_n = 0;
  data_t     d, od;
  codeword_t c, cin, cmid, y;
  logic      vi = 0, vo, due, ce, dce, due2;
  dec_kind_e kind;

  always #5 clk = ~clk;

  cerberus_encoder   u_enc (.data_i (d), .cw_o (c));
  cerberus_ondie_dec u_d2  (.cw_i (cin), .cw_o (cmid), .ce_o (dce), .ue_o (due2));
  cerberus_sys_dec   u_d3  (.clk, .rst_n, .valid_i (vi), .cw_i (y), .valid_o (vo), .data_o (od),
                            .due_o (due), .ce_o (ce), .kind_o (kind));

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  // Random non-zero pattern over w aligned regions starting at region a, each bit with p = 1/2.
  function automatic codeword_t region_err(input int unsigned a, input int unsigned w);
    codeword_t e;
    do begin
      e = '0;
      for (int b = 0; b < w * SYM_W; b++) e[a*SYM_W + b] = 1'($urandom_range(0, 1));
    end while (e == '0);
    return e;
  endfunction

  // One trial: in-bank error ein, out-of-bank error eout. Returns 0 corrected, 1 DUE, 2 SDC.
  task automatic trial(input codeword_t ein, input codeword_t eout, output int outcome);
    d = rand256();
    #1 cin = c ^ ein;
    #1;
    @(negedge clk); y = cmid ^ eout; vi = 1'b1;
    @(negedge clk); vi = 1'b0;
    check(vo, "Decoder 3 result one cycle after its input");
    if (due) outcome = 1;
    else if (od == d) outcome = 0;
    else outcome = 2;
  endtask

  task automatic guaranteed(input string name, input int sc);
    codeword_t ein, eout;
    int o, ok;
    ok = 0;
    for (int n = 0; n < TRIALS; n++) begin
      ein = '0; eout = '0;
      case (sc)
        0: ein  = bit_err($urandom_range(0, N - 1));
        1: ein  = region_err($urandom_range(0, NSYM - 1), 1);
        2: eout = bit_err($urandom_range(0, N - 1));
        3: begin
             int unsigned i, j;
             i = $urandom_range(0, N - 1);
             do j = $urandom_range(0, N - 1); while (j == i);
             eout = bit_err(i) | bit_err(j);
           end
        4: eout = region_err($urandom_range(0, NSYM - 1), 1);
        5: begin ein = bit_err($urandom_range(0, N - 1)); eout = bit_err($urandom_range(0, N - 1)); end
        6: begin ein = bit_err($urandom_range(0, N - 1)); eout = dbl_err(); end
        default: begin
             int unsigned i, j;
             i = $urandom_range(0, N - 1);
             do j = $urandom_range(0, N - 1); while (j == i);
             ein = bit_err(i) | bit_err(j);
           end
      endcase
      trial(ein, eout, o);
      check(o == 0, {name, ": corrected"});
      if (o == 0) ok++;
    end
    $display("%-20s trials=%0d corrected=%0d", name, TRIALS, ok);
  endtask

  task automatic counted(input string name);
    codeword_t ein, eout;
    int o;
    int cnt[3];
    cnt = '{0, 0, 0};
    for (int n = 0; n < TRIALS; n++) begin
      eout = '0;
      ein  = region_err($urandom_range(0, NSYM - 2), 2);
      trial(ein, eout, o);
      cnt[o]++;
    end
    check(cnt[2] * 20 <= TRIALS, {name, ": silent corruption within 5 %"});
    $display("%-20s trials=%0d corrected=%0d detected=%0d silent=%0d",
             name, TRIALS, cnt[0], cnt[1], cnt[2]);
  endtask

  initial begin
    #20000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    cin = '0; y = '0; d = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    guaranteed("in SE",           0);
    guaranteed("in 16E",          1);
    guaranteed("in SE+SE",        7);
    guaranteed("out SE",          2);
    guaranteed("out DE",          3);
    guaranteed("out 16E",         4);
    guaranteed("in SE + out SE",  5);
    guaranteed("in SE + out DE",  6);
    counted   ("in 32E");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
