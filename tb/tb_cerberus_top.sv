// tb_cerberus_top: end-to-end test of the whole Cerberus channel at its default parameters.
//
// Writes and reads random 256-bit data through controller, link and DRAM while injecting faults
// at the three places the design distinguishes: the write link, the cells (in bank) and the read
// path (out of bank). Every mechanism of the design must be seen at least once and is counted:
// write retransmission after ALERT, write failure after the retry, on-die single-bit correction
// (hidden from the host), system single-symbol correction, system double-bit correction,
// successful read retry after a transient uncorrectable error, and a DUE after a failed retry.
// Latencies of clean accesses are checked in cycles. A reference array holds the expected data.
module tb_cerberus_top;
  import cerberus_pkg::*;
  import cerberus_tb_pkg::*;

  localparam int DEPTH  = 64;
  localparam int WR_LAT = 3;   // accepting edge -> resp_valid, clean write
  localparam int RD_LAT = 5;   // accepting edge -> resp_valid, clean read

  int checks = 0, failures = 0;
  int n_wr_retry = 0, n_wr_fail = 0, n_ondie = 0, n_ssc = 0, n_dec = 0, n_rd_retry = 0, n_due = 0;

  logic clk = 0, rst_n = 0;
  logic req_valid = 0, req_ready, req_we = 0;
  logic [$clog2(DEPTH)-1:0] req_addr = '0;
  data_t req_wdata = '0, resp_rdata;
  logic resp_valid, resp_we, resp_due, resp_ce, resp_wr_fail, resp_retried, dev_ce, dev_ue;
  codeword_t wr_f = '0, rd_f = '0, cell_f = '0;
  bit wr_f_once = 0, rd_f_once = 0;
  data_t model [DEPTH];
  bit    valid_m [DEPTH];

  always #5 clk = ~clk;

  cerberus_top dut (
    .clk, .rst_n, .req_valid_i (req_valid), .req_ready_o (req_ready), .req_we_i (req_we),
    .req_addr_i (req_addr), .req_wdata_i (req_wdata), .resp_valid_o (resp_valid),
    .resp_we_o (resp_we), .resp_rdata_o (resp_rdata), .resp_due_o (resp_due),
    .resp_ce_o (resp_ce), .resp_wr_fail_o (resp_wr_fail), .resp_retried_o (resp_retried),
    .wr_link_fault_i (wr_f), .rd_link_fault_i (rd_f), .cell_fault_i (cell_f),
    .dev_ce_o (dev_ce), .dev_ue_o (dev_ue));

  // Transient link faults disappear after the first transfer they hit.
  always @(posedge clk) begin
    if (wr_f_once && dut.wr_valid) begin wr_f <= '0; wr_f_once <= 0; end
    if (rd_f_once && dut.rd_valid) begin rd_f <= '0; rd_f_once <= 0; end
  end

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  int lat;
  task automatic access(input bit we, input int a, input data_t wd);
    @(negedge clk);
    req_valid = 1; req_we = we; req_addr = 6'(a); req_wdata = wd;
    check(req_ready, "controller idle");
    @(negedge clk);
    req_valid = 0;
    lat = 1;
    while (!resp_valid) begin @(negedge clk); lat++; end
    check(resp_we == we, "response type");
  endtask

  task automatic write(input int a, input data_t wd);
    access(1, a, wd);
    if (!resp_wr_fail) begin model[a] = wd; valid_m[a] = 1; end
  endtask

  initial begin
    #20000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1;
    // fill the memory cleanly
    for (int a = 0; a < DEPTH; a++) begin
      write(a, rand256());
      check(!resp_wr_fail && !resp_retried && lat == WR_LAT, "clean write");
    end
    for (int n = 0; n < 40; n++) begin
      int a;
      a = $urandom_range(0, DEPTH - 1);
      // clean read
      access(0, a, '0);
      check(resp_rdata == model[a] && !resp_due && !resp_ce && lat == RD_LAT, "clean read");
      // write with a transient link error: ALERT, one retransmission, success
      wr_f = dbl_err(); wr_f_once = 1;
      write(a, rand256());
      check(resp_retried && !resp_wr_fail, "write retransmitted after ALERT");
      if (resp_retried && !resp_wr_fail) n_wr_retry++;
      access(0, a, '0);
      check(resp_rdata == model[a] && !resp_due, "retransmitted data stored");
      // write with a persistent link error: reported as failed, old data kept
      if (n % 4 == 0) begin
        wr_f = bit_err($urandom_range(0, 287));
        access(1, a, rand256());
        wr_f = '0;
        check(resp_wr_fail && resp_retried, "persistent link error fails the write");
        if (resp_wr_fail) n_wr_fail++;
        access(0, a, '0);
        check(resp_rdata == model[a], "failed write left the old data");
      end
      // in-bank single-bit fault: corrected on die, invisible to the host
      cell_f = bit_err($urandom_range(0, 287));
      access(0, a, '0);
      check(resp_rdata == model[a] && !resp_ce && !resp_due, "on-die SEC hides a cell error");
      if (dev_ce) n_ondie++;
      // in-bank 16-bit fault (e.g. subwordline): corrected by SSC in the controller
      cell_f = sym_err($urandom_range(0, NSYM - 1));
      if ($countones(cell_f) == 1) cell_f = bit_err(0) | bit_err(1);
      access(0, a, '0);
      check(resp_rdata == model[a] && resp_ce && !resp_due, "16-bit in-bank error corrected");
      if (dut.u_host.u_dec3.kind_o == DEC_SSC) n_ssc++;
      // in-bank SE + out-of-bank DE: on-die fixes the SE, controller DEC fixes the DE
      cell_f = bit_err($urandom_range(0, 287));
      rd_f = dbl_err();
      access(0, a, '0);
      check(resp_rdata == model[a] && resp_ce && !resp_due, "SE + DE corrected");
      if (dut.u_host.u_dec3.kind_o == DEC_DEC) n_dec++;
      cell_f = '0;
      // transient wide read-link error: DUE, single retry, correct data
      rd_f = sym_err(2) | sym_err(9) | sym_err(15); rd_f_once = 1;
      access(0, a, '0);
      check(resp_retried && !resp_due && resp_rdata == model[a], "read retry recovers");
      if (resp_retried && !resp_due) n_rd_retry++;
      rd_f = '0; rd_f_once = 0;
      // persistent wide error: retry fails too, DUE reported
      if (n % 4 == 1) begin
        rd_f = sym_err(1) | sym_err(7) | sym_err(12);
        access(0, a, '0);
        rd_f = '0;
        check(resp_retried && resp_due, "persistent error reported as DUE after retry");
        if (resp_due) n_due++;
      end
    end
    $display("mechanisms: wr_retry=%0d wr_fail=%0d ondie_sec=%0d ssc=%0d dec=%0d rd_retry=%0d due=%0d",
             n_wr_retry, n_wr_fail, n_ondie, n_ssc, n_dec, n_rd_retry, n_due);
    check(n_wr_retry > 0, "write retransmission seen");
    check(n_wr_fail > 0, "write failure seen");
    check(n_ondie > 0, "on-die correction seen");
    check(n_ssc > 0, "SSC correction seen");
    check(n_dec > 0, "DEC correction seen");
    check(n_rd_retry > 0, "read retry seen");
    check(n_due > 0, "DUE seen");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
