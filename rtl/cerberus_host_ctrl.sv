// cerberus_host_ctrl: the ECC part of the memory controller ("DRAM Ctrl" on the processor side).
//
// It holds the one encoder and Decoder 3 and runs the two retry rules of Cerberus:
//  * Write: the 256-bit data are encoded once into {R2,R1,D} and sent to the DRAM unchanged
//    (no separate link-ECC encoder). If the DRAM answers with ALERT, the same codeword is sent
//    again, up to WR_RETRY_MAX times; if ALERT persists the write is reported as failed.
//  * Read: the returned 288-bit codeword goes through Decoder 3 (SSC+DEC). On an uncorrectable
//    result the read is issued once more. If the retry decodes, its result is returned (the
//    first failure is taken as a transient read-link or periphery error); if it fails again a
//    DUE is reported.
// One request is handled at a time. Host handshake: a request is taken when req_valid_i and
// req_ready_o are both high; one cycle-wide resp_valid_o answers every request.
// Timing with cerberus_dram_bank: a clean write's response is valid 3 cycles after the edge that
// accepts the request; a clean read's 5 cycles after it (send, 2 DRAM cycles, 1 decoder cycle).
//
// Paper: single encoder, ALERT-driven retransmission, Decoder 3, exactly one read retry, DUE
// when the retry also fails. Own choice: the FSM, its handshakes and WR_RETRY_MAX.
module cerberus_host_ctrl
  import cerberus_pkg::*;
#(
  parameter int unsigned DEPTH        = 64,
  parameter int unsigned WR_RETRY_MAX = 1
) (
  input  logic                     clk,
  input  logic                     rst_n,
  // host requests
  input  logic                     req_valid_i,
  output logic                     req_ready_o,
  input  logic                     req_we_i,
  input  logic [$clog2(DEPTH)-1:0] req_addr_i,
  input  data_t                    req_wdata_i,
  // host responses
  output logic                     resp_valid_o,
  output logic                     resp_we_o,
  output data_t                    resp_rdata_o,
  output logic                     resp_due_o,
  output logic                     resp_ce_o,
  output logic                     resp_wr_fail_o,
  output logic                     resp_retried_o,
  // write link
  output logic                     wr_valid_o,
  output logic [$clog2(DEPTH)-1:0] wr_addr_o,
  output codeword_t                wr_cw_o,
  input  logic                     wr_ack_i,
  input  logic                     alert_i,
  // read link
  output logic                     rd_valid_o,
  output logic [$clog2(DEPTH)-1:0] rd_addr_o,
  input  logic                     rd_valid_i,
  input  codeword_t                rd_cw_i
);

  typedef enum logic [2:0] {S_IDLE, S_WR_SEND, S_WR_WAIT, S_RD_SEND, S_RD_WAIT} state_e;

  state_e                   state;
  logic [$clog2(DEPTH)-1:0] addr_q;
  codeword_t                cw_q, cw_enc;
  logic [7:0]               tries_q;

  logic      d3_valid, d3_due, d3_ce;
  data_t     d3_data;
  dec_kind_e d3_kind;

  cerberus_encoder u_enc (.data_i (req_wdata_i), .cw_o (cw_enc));

  cerberus_sys_dec u_dec3 (
    .clk (clk), .rst_n (rst_n), .valid_i (rd_valid_i), .cw_i (rd_cw_i),
    .valid_o (d3_valid), .data_o (d3_data), .due_o (d3_due), .ce_o (d3_ce), .kind_o (d3_kind)
  );

  assign req_ready_o = (state == S_IDLE);
  assign wr_valid_o  = (state == S_WR_SEND);
  assign wr_addr_o   = addr_q;
  assign wr_cw_o     = cw_q;
  assign rd_valid_o  = (state == S_RD_SEND);
  assign rd_addr_o   = addr_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state          <= S_IDLE;
      addr_q         <= '0;
      cw_q           <= '0;
      tries_q        <= '0;
      resp_valid_o   <= 1'b0;
      resp_we_o      <= 1'b0;
      resp_rdata_o   <= '0;
      resp_due_o     <= 1'b0;
      resp_ce_o      <= 1'b0;
      resp_wr_fail_o <= 1'b0;
      resp_retried_o <= 1'b0;
    end else begin
      resp_valid_o <= 1'b0;
      unique case (state)
        S_IDLE: if (req_valid_i) begin
          addr_q  <= req_addr_i;
          tries_q <= '0;
          if (req_we_i) begin
            cw_q  <= cw_enc;
            state <= S_WR_SEND;
          end else begin
            state <= S_RD_SEND;
          end
        end
        S_WR_SEND: state <= S_WR_WAIT;
        S_WR_WAIT: if (wr_ack_i) begin
          if (alert_i && tries_q < 8'(WR_RETRY_MAX)) begin
            tries_q <= tries_q + 8'd1;
            state   <= S_WR_SEND;
          end else begin
            resp_valid_o   <= 1'b1;
            resp_we_o      <= 1'b1;
            resp_due_o     <= 1'b0;
            resp_ce_o      <= 1'b0;
            resp_wr_fail_o <= alert_i;
            resp_retried_o <= (tries_q != '0);
            state          <= S_IDLE;
          end
        end
        S_RD_SEND: state <= S_RD_WAIT;
        S_RD_WAIT: if (d3_valid) begin
          if (d3_due && tries_q == '0) begin
            tries_q <= 8'd1;          // the single read retry
            state   <= S_RD_SEND;
          end else begin
            resp_valid_o   <= 1'b1;
            resp_we_o      <= 1'b0;
            resp_rdata_o   <= d3_data;
            resp_due_o     <= d3_due;
            resp_ce_o      <= d3_ce;
            resp_wr_fail_o <= 1'b0;
            resp_retried_o <= (tries_q != '0);
            state          <= S_IDLE;
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  // Link rules (checked in simulation; rst_n is used synchronously only by these assertions'
  // disable condition, which is why a linter may flag rst_n as both synchronous and async): ALERT only accompanies a write acknowledge; DRAM answers only what was asked.
  assert property (@(posedge clk) disable iff (!rst_n) alert_i |-> wr_ack_i)
    else $error("ALERT without write acknowledge");
  assert property (@(posedge clk) disable iff (!rst_n) wr_ack_i |-> state == S_WR_WAIT)
    else $error("unexpected write acknowledge");
  assert property (@(posedge clk) disable iff (!rst_n) rd_valid_i |-> state == S_RD_WAIT)
    else $error("unexpected read data");

  dec_kind_e unused_kind;
  assign unused_kind = d3_kind;

endmodule
