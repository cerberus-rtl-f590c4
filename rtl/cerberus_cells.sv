// cerberus_cells: the DRAM cell array of one bank, holding whole 288-bit codewords.
//
// Data, R1 and R2 are stored side by side, so the on-die decoder reads back exactly what the
// controller encoded. A write stores a codeword in one cycle; a read returns the addressed
// codeword one cycle later (registered output). An in-bank fault can be injected with
// fault_i, which is XORed into the codeword as it leaves the array (a cell, sense-amplifier or
// subwordline fault seen by every read while it is applied).
//
// Interface: we_i/waddr_i/wdata_i, re_i/raddr_i -> rdata_o (valid the cycle after re_i).
// Paper: only the name "Cells" and that the codeword with its redundancy is stored.
// Own choice: depth (DEPTH), one read and one write port, the fault-injection input.
module cerberus_cells
  import cerberus_pkg::*;
#(
  parameter int unsigned DEPTH = 64
) (
  input  logic                     clk,
  input  logic                     we_i,
  input  logic [$clog2(DEPTH)-1:0] waddr_i,
  input  codeword_t                wdata_i,
  input  logic                     re_i,
  input  logic [$clog2(DEPTH)-1:0] raddr_i,
  input  codeword_t                fault_i,
  output codeword_t                rdata_o
);

  codeword_t mem [DEPTH];

  always_ff @(posedge clk) begin
    if (we_i) mem[waddr_i] <= wdata_i;
  end

  always_ff @(posedge clk) begin
    if (re_i) rdata_o <= mem[raddr_i] ^ fault_i;
  end

endmodule
