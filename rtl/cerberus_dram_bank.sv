// cerberus_dram_bank: the DRAM side of the Cerberus data path (one bank group).
//
// Write: the codeword arriving from the link is checked by Decoder 1 (cerberus_link_dec) in the
// cycle it arrives. A clean codeword is written to the cells; a codeword with a non-zero H2
// syndrome is dropped and ALERT is raised for the controller, which resends it. The outcome
// (wr_ack_o with alert_o) is reported one cycle after wr_valid_i.
// Read: rd_valid_i reads the cells (one cycle), then Decoder 2 (cerberus_ondie_dec) corrects a
// single-bit error and the corrected 288-bit codeword, R1/R2 included, is registered and
// driven out: rd_valid_o comes two cycles after rd_valid_i. Nothing is re-encoded on the way
// out. The on-die outcome (dev_ce_o/dev_ue_o) is a device-internal status; it is not sent to
// the controller, which keeps the device's internal errors hidden.
//
// Paper: Dec1 on the write path with ALERT, cells, Dec2 on the read path, codeword forwarded
// with redundancy. Own choice: the cycle timing, dropping an alerted write, the status outputs.
module cerberus_dram_bank
  import cerberus_pkg::*;
#(
  parameter int unsigned DEPTH = 64
) (
  input  logic                     clk,
  input  logic                     rst_n,
  // write command and codeword from the link
  input  logic                     wr_valid_i,
  input  logic [$clog2(DEPTH)-1:0] wr_addr_i,
  input  codeword_t                wr_cw_i,
  output logic                     wr_ack_o,
  output logic                     alert_o,
  // read command and codeword to the link
  input  logic                     rd_valid_i,
  input  logic [$clog2(DEPTH)-1:0] rd_addr_i,
  output logic                     rd_valid_o,
  output codeword_t                rd_cw_o,
  // in-bank fault injection and device-internal status
  input  codeword_t                cell_fault_i,
  output logic                     dev_ce_o,
  output logic                     dev_ue_o
);

  syn16_t    link_syn;
  logic      link_err;
  codeword_t cell_q, cw_corr;
  logic      rd_p1, ce, ue;

  cerberus_link_dec u_dec1 (.cw_i (wr_cw_i), .syn_o (link_syn), .alert_o (link_err));

  cerberus_cells #(.DEPTH(DEPTH)) u_cells (
    .clk     (clk),
    .we_i    (wr_valid_i && !link_err),
    .waddr_i (wr_addr_i),
    .wdata_i (wr_cw_i),
    .re_i    (rd_valid_i),
    .raddr_i (rd_addr_i),
    .fault_i (cell_fault_i),
    .rdata_o (cell_q)
  );

  cerberus_ondie_dec u_dec2 (.cw_i (cell_q), .cw_o (cw_corr), .ce_o (ce), .ue_o (ue));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wr_ack_o   <= 1'b0;
      alert_o    <= 1'b0;
      rd_p1      <= 1'b0;
      rd_valid_o <= 1'b0;
      rd_cw_o    <= '0;
      dev_ce_o   <= 1'b0;
      dev_ue_o   <= 1'b0;
    end else begin
      wr_ack_o   <= wr_valid_i;
      alert_o    <= wr_valid_i && link_err;
      rd_p1      <= rd_valid_i;
      rd_valid_o <= rd_p1;
      if (rd_p1) begin
        rd_cw_o  <= cw_corr;
        dev_ce_o <= ce;
        dev_ue_o <= ue;
      end
    end
  end

  logic unused_syn;
  assign unused_syn = ^link_syn;

endmodule
