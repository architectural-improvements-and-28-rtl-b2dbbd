// apelink_channel: one bidirectional off-board link channel.
// Joins a transmit buffer, the transmit control logic, the receive control
// logic and a receive buffer, and closes the credit loop between them: words
// read out of the receive buffer are returned as credits to the far end, and
// credits decoded by the receiver are added to the local transmitter. With
// the default buffers (256 + 1024 words of 32 bytes) the channel holds 40 KB,
// the memory budget per channel given for the published design; the split
// between TX and RX is this implementation's choice. The far receive buffer
// is assumed to be RX_DEPTH deep, the same as this one.
// Interface: tx_* packet stream in, rx_* packet stream out, link_tx_*/
// link_rx_* toward the transceiver, diag_tx_*/diag_rx_* for the fault
// monitor. overflow is set (sticky) if the far end ever sends more words than
// the receive buffer can hold, which the credit scheme should prevent; err
// pulses on a framing error.
module apelink_channel
  import apenet_pkg::*;
#(
  parameter int TX_DEPTH = 256,
  parameter int RX_DEPTH = 1024
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        tx_valid,
  output logic        tx_ready,
  input  word_t       tx_data,
  input  logic        tx_last,
  output logic        rx_valid,
  input  logic        rx_ready,
  output word_t       rx_data,
  output logic        rx_last,
  output logic        link_tx_valid,
  input  logic        link_tx_ready,
  output word_t       link_tx_data,
  input  logic        link_rx_valid,
  input  word_t       link_rx_data,
  input  logic        diag_tx_valid,
  output logic        diag_tx_ready,
  input  logic [31:0] diag_tx_data,
  output logic        diag_rx_valid,
  output logic [31:0] diag_rx_data,
  output logic        overflow,
  output logic        err
);
  logic        tq_valid, tq_ready, tq_last;
  word_t       tq_data;
  logic        r_valid, r_last, r_ready;
  word_t       r_data;
  logic        cr_valid;
  logic [15:0] cr_cnt;
  logic [15:0] credits;

  sync_fifo #(.W(DATA_W+1), .DEPTH(TX_DEPTH)) u_txq (
    .clk, .rst_n,
    .in_valid(tx_valid), .in_ready(tx_ready), .in_data({tx_last, tx_data}),
    .out_valid(tq_valid), .out_ready(tq_ready), .out_data({tq_last, tq_data}),
    .count());

  apelink_tx #(.CREDITS(RX_DEPTH)) u_tx (
    .clk, .rst_n,
    .in_valid(tq_valid), .in_ready(tq_ready), .in_data(tq_data), .in_last(tq_last),
    .credit_add_valid(cr_valid), .credit_add(cr_cnt),
    .ret_inc(rx_valid && rx_ready),
    .diag_valid(diag_tx_valid), .diag_ready(diag_tx_ready), .diag_data(diag_tx_data),
    .link_valid(link_tx_valid), .link_ready(link_tx_ready), .link_data(link_tx_data),
    .credits);

  apelink_rx u_rx (
    .clk, .rst_n,
    .link_valid(link_rx_valid), .link_data(link_rx_data),
    .out_valid(r_valid), .out_data(r_data), .out_last(r_last),
    .credit_valid(cr_valid), .credit_cnt(cr_cnt),
    .diag_valid(diag_rx_valid), .diag_data(diag_rx_data),
    .err);

  sync_fifo #(.W(DATA_W+1), .DEPTH(RX_DEPTH)) u_rxq (
    .clk, .rst_n,
    .in_valid(r_valid), .in_ready(r_ready), .in_data({r_last, r_data}),
    .out_valid(rx_valid), .out_ready(rx_ready), .out_data({rx_last, rx_data}),
    .count());

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) overflow <= 1'b0;
    else if (r_valid && !r_ready) overflow <= 1'b1;
  end
endmodule
