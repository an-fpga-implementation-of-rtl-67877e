// csnn_core: the convolutional spiking neural network, from energy-channel
// events in to isotope-class spikes out.
//
//   AER_in (channel, 10 b) -> conv_layer (4 filters x 5 taps, 4080 neurons)
//     -> {filter, position} -> pool_layer (256 neurons, size 16)
//     -> {filter, window}   -> fc_layer (8 neurons) -> class (3 b)
//
// Each detected gamma photon is one input event on the channel of its
// energy. The network is rate coded: over a measurement, the output neuron
// of the true isotope fires most often, and a result monitor counts the
// output spikes per class.
//
// Interface: req_in/aer_in with ack as ready (a word moves when both are
// high). out_req pulses for one cycle with the class on out_addr. idle is
// high when no event or spike is queued or in progress anywhere, so the
// counts are final. After reset the conv layer spends 4096 cycles clearing
// its membrane RAM; events arriving then wait in its FIFO.
// The conv layer starts an event only while the output layer's FIFO has room
// for every spike that event can cause, so no spike is ever lost.
module csnn_core
  import csnn_pkg::*;
#(
  parameter int signed CONV_V_THR       = 64,
  parameter int signed CONV_V_MIN       = -64,
  parameter int signed FC_V_THR         = 64,
  parameter int signed FC_V_MIN         = -64,
  parameter string     CONV_WEIGHT_FILE = "",
  parameter string     FC_WEIGHT_FILE   = "",
  parameter int unsigned CONV_FIFO_DEPTH = 16,
  parameter int unsigned FC_FIFO_DEPTH   = 16
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 req_in,
  input  logic [AER_IN_W-1:0]  aer_in,
  output logic                 ack,
  output logic                 out_req,
  output logic [OUT_W-1:0]     out_addr,
  output logic                 idle
);
  logic               conv_req, pool_req, fc_ready, conv_idle, fc_idle, fc_discard;
  logic [CONV_AW-1:0] conv_addr;
  logic [POOL_AW-1:0] pool_addr;

  conv_layer #(
    .NF (N_FILT), .KS (K), .NIN (N_IN), .VW (9),
    .V_THR (CONV_V_THR), .V_MIN (CONV_V_MIN), .FIFO_DEPTH (CONV_FIFO_DEPTH),
    .WEIGHT_FILE (CONV_WEIGHT_FILE)
  ) u_conv (
    .clk, .rst_n, .req_in, .aer_in, .ack,
    .req_out (conv_req), .aer_out (conv_addr),
    .ds_ready (fc_ready), .idle (conv_idle)
  );

  pool_layer #(.NF (N_FILT), .NC (N_CONV), .PS (POOL)) u_pool (
    .clk, .rst_n, .req_in (conv_req), .aer_in (conv_addr),
    .req_out (pool_req), .aer_out (pool_addr)
  );

  fc_layer #(
    .NF (N_FILT), .NP (N_POOL), .NPF (N_POOL_FULL), .NO (N_OUT), .VW (16),
    .V_THR (FC_V_THR), .V_MIN (FC_V_MIN), .FIFO_DEPTH (FC_FIFO_DEPTH),
    .WEIGHT_FILE (FC_WEIGHT_FILE)
  ) u_fc (
    .clk, .rst_n, .req_in (pool_req), .aer_in (pool_addr), .ready (fc_ready),
    .req_out (out_req), .aer_out (out_addr), .discard (fc_discard),
    .idle (fc_idle)
  );

  assign idle = conv_idle && !pool_req && fc_idle;
endmodule
