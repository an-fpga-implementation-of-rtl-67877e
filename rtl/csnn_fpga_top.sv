// csnn_fpga_top: the FPGA design: a convolutional spiking neural network for
// radioisotope identification behind a serial (UART) test interface.
//
// The host sends one test vector per detected photon (its energy channel,
// 0..1023) plus control vectors to collect the result or reset the network;
// the FPGA returns the number of output spikes of each of the 8 isotope
// classes. See uart_interface for the serial protocol and csnn_core for the
// network. Clock: 100 MHz, the rate the design was reported to run at;
// CLKS_PER_BIT = 868 gives 115200 baud at that clock.
module csnn_fpga_top
  import csnn_pkg::*;
#(
  parameter int unsigned CLKS_PER_BIT     = 868,
  parameter int signed   CONV_V_THR       = 64,
  parameter int signed   CONV_V_MIN       = -64,
  parameter int signed   FC_V_THR         = 64,
  parameter int signed   FC_V_MIN         = -64,
  parameter string       CONV_WEIGHT_FILE = "",
  parameter string       FC_WEIGHT_FILE   = "",
  parameter int unsigned CONV_FIFO_DEPTH  = 16,
  parameter int unsigned FC_FIFO_DEPTH    = 16
) (
  input  logic clk,
  input  logic rst_n,
  input  logic uart_rxd,
  output logic uart_txd
);
  logic                aer_req, aer_ack, out_req, core_idle, core_rst_n;
  logic [AER_IN_W-1:0] aer_addr;
  logic [OUT_W-1:0]    out_addr;

  uart_interface #(.CLKS_PER_BIT (CLKS_PER_BIT)) u_if (
    .clk, .rst_n, .uart_rxd, .uart_txd,
    .aer_req, .aer_addr, .aer_ack, .out_req, .out_addr, .core_idle,
    .core_rst_n
  );

  csnn_core #(
    .CONV_V_THR (CONV_V_THR), .CONV_V_MIN (CONV_V_MIN),
    .FC_V_THR (FC_V_THR), .FC_V_MIN (FC_V_MIN),
    .CONV_WEIGHT_FILE (CONV_WEIGHT_FILE), .FC_WEIGHT_FILE (FC_WEIGHT_FILE),
    .CONV_FIFO_DEPTH (CONV_FIFO_DEPTH), .FC_FIFO_DEPTH (FC_FIFO_DEPTH)
  ) u_core (
    .clk, .rst_n (core_rst_n), .req_in (aer_req), .aer_in (aer_addr),
    .ack (aer_ack), .out_req, .out_addr, .idle (core_idle)
  );
endmodule
