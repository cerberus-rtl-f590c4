// cerberus_top: the complete Cerberus Encode-Once, Decode-Many data path for one channel.
//
// Processor side: cerberus_host_ctrl (encoder + Decoder 3 + retry rules). DRAM side:
// cerberus_dram_bank (Decoder 1 on writes with ALERT, cells, Decoder 2 on reads). Between them
// the channel carries the full 288-bit codeword in both directions; the physical link (I/O,
// TSVs) is not modelled, but its faults are: wr_link_fault_i is XORed into every write
// codeword on its way to the DRAM, rd_link_fault_i into every read codeword on its way back
// (out-of-bank errors in the read periphery or link), and cell_fault_i into codewords leaving
// the cell array (in-bank errors).
//
// Host interface as in cerberus_host_ctrl. dev_ce_o/dev_ue_o expose the device-internal on-die
// outcome for observation only. DEPTH is the number of codewords stored (own choice).
module cerberus_top
  import cerberus_pkg::*;
#(
  parameter int unsigned DEPTH        = 64,
  parameter int unsigned WR_RETRY_MAX = 1
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     req_valid_i,
  output logic                     req_ready_o,
  input  logic                     req_we_i,
  input  logic [$clog2(DEPTH)-1:0] req_addr_i,
  input  data_t                    req_wdata_i,
  output logic                     resp_valid_o,
  output logic                     resp_we_o,
  output data_t                    resp_rdata_o,
  output logic                     resp_due_o,
  output logic                     resp_ce_o,
  output logic                     resp_wr_fail_o,
  output logic                     resp_retried_o,
  input  codeword_t                wr_link_fault_i,
  input  codeword_t                rd_link_fault_i,
  input  codeword_t                cell_fault_i,
  output logic                     dev_ce_o,
  output logic                     dev_ue_o
);

  logic                     wr_valid, wr_ack, alert, rd_cmd, rd_valid;
  logic [$clog2(DEPTH)-1:0] wr_addr, rd_addr;
  codeword_t                wr_cw_host, rd_cw_dram;

  cerberus_host_ctrl #(.DEPTH(DEPTH), .WR_RETRY_MAX(WR_RETRY_MAX)) u_host (
    .clk, .rst_n,
    .req_valid_i, .req_ready_o, .req_we_i, .req_addr_i, .req_wdata_i,
    .resp_valid_o, .resp_we_o, .resp_rdata_o, .resp_due_o, .resp_ce_o, .resp_wr_fail_o,
    .resp_retried_o,
    .wr_valid_o (wr_valid), .wr_addr_o (wr_addr), .wr_cw_o (wr_cw_host),
    .wr_ack_i (wr_ack), .alert_i (alert),
    .rd_valid_o (rd_cmd), .rd_addr_o (rd_addr),
    .rd_valid_i (rd_valid), .rd_cw_i (rd_cw_dram ^ rd_link_fault_i)
  );

  cerberus_dram_bank #(.DEPTH(DEPTH)) u_dram (
    .clk, .rst_n,
    .wr_valid_i (wr_valid), .wr_addr_i (wr_addr), .wr_cw_i (wr_cw_host ^ wr_link_fault_i),
    .wr_ack_o (wr_ack), .alert_o (alert),
    .rd_valid_i (rd_cmd), .rd_addr_i (rd_addr),
    .rd_valid_o (rd_valid), .rd_cw_o (rd_cw_dram),
    .cell_fault_i, .dev_ce_o, .dev_ue_o
  );

endmodule
