// conv_layer: event-driven 1-D convolutional spiking layer, processed in
// time-division multiplex (TDM).
//
// An input spike on energy channel i (AER_in, REQ_in) touches the K = 5
// positions i-4..i of each of the 4 filters, 20 neurons in all. They share
// one Neuron ALU and are updated one after another: the Control Logic reads
// a neuron's membrane voltage from the Neuron RAM and its weight from the
// Weight ROM, the ALU adds them and compares with V_thr, and a multiplexer
// controlled by the fire signal writes back either the post-fire voltage
// (V+w-V_thr) or the integration result (V+w, floored at V_min). A neuron
// that fires sends its address {filter, position} on AER_out with a one-cycle
// REQ_out pulse, one cycle after its PROCESS state.
//
// Interface: REQ_in/AER_in is a valid/ready pair whose ready is ACK (the
// input FIFO is not full); a word moves on a clock edge with REQ_in and ACK
// both high. The output has no acknowledge; ds_ready must be high before the
// layer starts an event, guaranteeing room downstream for its spikes.
// Timing: 42 cycles per event at the default sizes; after reset the Neuron
// RAM is cleared for 4096 cycles before the first event is processed.
// The block structure, the read/process schedule and the neuron model follow
// the published microarchitecture; widths, V_thr, V_min, FIFO depth and the
// RAM address layout are this design's choices.
module conv_layer
  import csnn_pkg::*;
#(
  parameter int unsigned NF         = N_FILT,
  parameter int unsigned KS         = K,
  parameter int unsigned NIN        = N_IN,
  parameter int unsigned VW         = 9,
  parameter int signed   V_THR      = 64,
  parameter int signed   V_MIN      = -64,
  parameter int unsigned FIFO_DEPTH = 16,
  parameter string       WEIGHT_FILE = "",
  localparam int unsigned NC  = NIN - KS + 1,
  localparam int unsigned IW  = $clog2(NIN),
  localparam int unsigned FW  = (NF > 1) ? $clog2(NF) : 1,
  localparam int unsigned PW  = $clog2(NC),
  localparam int unsigned RAW = FW + PW
) (
  input  logic           clk,
  input  logic           rst_n,
  input  logic           req_in,
  input  logic [IW-1:0]  aer_in,
  output logic           ack,
  output logic           req_out,
  output logic [RAW-1:0] aer_out,
  input  logic           ds_ready,
  output logic           idle
);
  localparam int unsigned CW = (NF*KS > 1) ? $clog2(NF*KS) : 1;

  logic                 fifo_full, fifo_empty, fifo_rd_en;
  logic [IW-1:0]        fifo_dout;
  logic [$clog2(FIFO_DEPTH):0] fifo_count;
  logic [CW-1:0]        rom_addr;
  logic [RAW-1:0]       ram_addr;
  logic                 ram_en, ram_we, clearing, processing, busy;
  tdm_state_e           state;
  weight_t              weight;
  logic signed [VW-1:0] membrane, ram_din, integ, post_fire;
  logic                 fire;

  assign ack = !fifo_full;

  aer_fifo #(.W(IW), .DEPTH(FIFO_DEPTH)) u_fifo (
    .clk, .rst_n,
    .wr_en (req_in), .din (aer_in), .full (fifo_full),
    .rd_en (fifo_rd_en), .dout (fifo_dout), .empty (fifo_empty),
    .count (fifo_count)
  );

  conv_control #(.NF(NF), .KS(KS), .NIN(NIN)) u_ctrl (
    .clk, .rst_n, .fifo_empty, .fifo_dout, .ds_ready, .fifo_rd_en,
    .rom_addr, .ram_addr, .ram_en, .ram_we, .clearing, .processing,
    .state, .busy
  );

  weight_rom #(.DEPTH(NF*KS), .KIND(ROM_CONV), .INIT_FILE(WEIGHT_FILE)) u_rom (
    .clk, .addr (rom_addr), .data_out (weight)
  );

  neuron_ram #(.DEPTH(2**RAW), .VW(VW)) u_ram (
    .clk, .address (ram_addr), .chip_en (ram_en), .read_write (ram_we),
    .data_in (ram_din), .data_out (membrane)
  );

  neuron_alu #(.VW(VW), .WW(WW)) u_alu (
    .v_in (membrane), .weight, .v_thr (VW'(V_THR)), .v_min (VW'(V_MIN)),
    .fire, .integration_result (integ), .post_fire_result (post_fire)
  );

  // Write-back multiplexer: 1 = post-fire result, 0 = integration result.
  always_comb begin
    if (clearing)  ram_din = '0;
    else if (fire) ram_din = post_fire;
    else           ram_din = integ;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      req_out <= 1'b0;
      aer_out <= '0;
    end else begin
      req_out <= processing && fire;
      if (processing && fire) aer_out <= ram_addr;
    end
  end

  assign idle = !busy && fifo_empty && !req_out;
endmodule
