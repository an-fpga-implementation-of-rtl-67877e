// uart_interface: the serial test interface placed around the network on the
// FPGA: receiver, test vector driver, result monitor and transmitter.
//
// Bytes from the host are decoded by the test vector driver into AER events,
// collect requests and resets (see test_vector_driver). Output spikes of the
// network are counted per class by the result monitor, which returns the
// counts through the transmitter when asked. A reset vector drives
// core_rst_n low for one cycle and clears the counts; the board reset rst_n
// does both as well. core_rst_n is a registered signal, free of glitches.
module uart_interface
  import csnn_pkg::*;
#(
  parameter int unsigned CLKS_PER_BIT = 868
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                uart_rxd,
  output logic                uart_txd,
  output logic                aer_req,
  output logic [AER_IN_W-1:0] aer_addr,
  input  logic                aer_ack,
  input  logic                out_req,
  input  logic [OUT_W-1:0]    out_addr,
  input  logic                core_idle,
  output logic                core_rst_n
);
  logic       rx_valid, tx_start, tx_busy, collect, soft_rst, mon_busy;
  logic [7:0] rx_data, tx_data;

  uart_rx #(.CLKS_PER_BIT (CLKS_PER_BIT)) u_rx (
    .clk, .rst_n, .rxd (uart_rxd), .valid (rx_valid), .data (rx_data)
  );

  test_vector_driver u_drv (
    .clk, .rst_n, .rx_valid, .rx_data, .aer_req, .aer_addr, .aer_ack,
    .core_idle, .mon_busy, .collect, .soft_rst
  );

  result_monitor #(.CNT_W (16)) u_mon (
    .clk, .rst_n, .out_req, .out_addr, .collect, .clear (soft_rst),
    .tx_start, .tx_data, .tx_busy, .busy (mon_busy)
  );

  uart_tx #(.CLKS_PER_BIT (CLKS_PER_BIT)) u_tx (
    .clk, .rst_n, .start (tx_start), .data (tx_data), .busy (tx_busy),
    .txd (uart_txd)
  );

  // soft_rst is already a register output; core_rst_n is a plain AND of the
  // board reset and that register.
  assign core_rst_n = rst_n && !soft_rst;
endmodule
