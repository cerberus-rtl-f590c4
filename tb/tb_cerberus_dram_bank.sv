// tb_cerberus_dram_bank: the DRAM side alone. A clean write is acknowledged one cycle later
// without ALERT and stored; a write hit by a link error raises ALERT and leaves the cells as they
// were; a read returns the stored codeword two cycles later, with single-bit cell faults
// corrected on die and the redundancy still attached.
module tb_cerberus_dram_bank;
  import cerberus_pkg::*;
  import cerberus_tb_pkg::*;

  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  logic wv = 0, rv = 0, ack, alert, rvo, dce, due;
  logic [3:0] wa = '0, ra = '0;
  codeword_t wcw = '0, rcw, cf = '0, c;
  data_t d;
  codeword_t model [16];

  always #5 clk = ~clk;

  cerberus_encoder u_enc (.data_i (d), .cw_o (c));
  cerberus_dram_bank #(.DEPTH(16)) dut (
    .clk, .rst_n, .wr_valid_i (wv), .wr_addr_i (wa), .wr_cw_i (wcw), .wr_ack_o (ack),
    .alert_o (alert), .rd_valid_i (rv), .rd_addr_i (ra), .rd_valid_o (rvo), .rd_cw_o (rcw),
    .cell_fault_i (cf), .dev_ce_o (dce), .dev_ue_o (due));

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  task automatic wr(input int a, input codeword_t cw, input bit expect_alert);
    @(negedge clk); wv = 1; wa = 4'(a); wcw = cw;
    @(negedge clk); wv = 0;
    check(ack && (alert == expect_alert), "write acknowledge and ALERT one cycle later");
  endtask

  task automatic rd(input int a, output codeword_t q);
    @(negedge clk); rv = 1; ra = 4'(a);
    @(negedge clk); rv = 0;
    check(!rvo, "no read data after one cycle");
    @(negedge clk);
    check(rvo, "read data two cycles after the command");
    q = rcw;
  endtask

  initial begin
    #1000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    codeword_t q;
    d = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int a = 0; a < 16; a++) begin
      d = rand256(); #1 model[a] = c;
      wr(a, c, 1'b0);
    end
    for (int n = 0; n < 60; n++) begin
      int a;
      a = $urandom_range(0, 15);
      d = rand256(); #1;
      wr(a, c ^ bit_err($urandom_range(0, 287)), 1'b1);   // link error: dropped
      rd(a, q);
      check(q == model[a] && !dce, "alerted write did not reach the cells");
      cf = bit_err($urandom_range(0, 287));
      rd(a, q);
      check(q == model[a] && dce, "single cell fault corrected on die");
      cf = '0;
      wr(a, c, 1'b0);
      model[a] = c;
      rd(a, q);
      check(q == c, "clean write stored with its redundancy");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
