// tb_cerberus_cells: write/read of the cell array with a one-cycle read latency and XOR fault
// injection on the read data.
module tb_cerberus_cells;
  import cerberus_pkg::*;
  import cerberus_tb_pkg::*;

  int checks = 0, failures = 0;
  logic clk = 0;
  logic we = 0, re = 0;
  logic [3:0] wa = '0, ra = '0;
  codeword_t wd = '0, f = '0, q;
  codeword_t model [16];

  always #5 clk = ~clk;

  cerberus_cells #(.DEPTH(16)) dut (.clk, .we_i (we), .waddr_i (wa), .wdata_i (wd), .re_i (re),
                                    .raddr_i (ra), .fault_i (f), .rdata_o (q));

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int a = 0; a < 16; a++) begin
      @(negedge clk); we = 1; wa = 4'(a); wd = rand288(); model[a] = wd;
    end
    @(negedge clk); we = 0;
    for (int n = 0; n < 100; n++) begin
      @(negedge clk);
      re = 1; ra = 4'($urandom_range(0, 15));
      f = (n % 3 == 0) ? rand288() : '0;
      @(negedge clk);
      re = 0;
      check(q == (model[ra] ^ f), "read data one cycle after re");
      if (n % 5 == 0) begin
        we = 1; wa = 4'($urandom_range(0, 15)); wd = rand288(); model[wa] = wd;
        @(negedge clk); we = 0;
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
