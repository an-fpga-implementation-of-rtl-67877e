// pool_layer: average pooling (size 16, stride 16) as a layer of spiking
// neurons.
//
// In a rate-coded network an average over 16 inputs is a neuron that adds
// 1/16 per input spike and fires at 1. Scaled by 16, each pool neuron is an
// integrate-and-fire neuron with weight 1 and threshold POOL, reset by
// subtraction: a counter that fires on every POOL-th spike from its window.
// A conv spike {filter f, position p} goes to pool neuron {f, p / POOL}. With
// 1020 positions per filter there are 64 windows per filter, the last one
// only 12 wide; 4 x 64 = 256 pool neurons in all.
//
// Each input spike is handled in the cycle it arrives, so the layer needs no
// buffer and never refuses a spike. An output spike leaves on aer_out with a
// one-cycle req_out pulse in the cycle after the input spike that caused it.
// The counters sit in flip-flops and are cleared by reset.
// The pooling size and neuron count follow the published network; the counter
// form of the average-pooling neuron is this design's implementation.
module pool_layer
  import csnn_pkg::*;
#(
  parameter int unsigned NF   = N_FILT,
  parameter int unsigned NC   = N_CONV,
  parameter int unsigned PS   = POOL,
  localparam int unsigned NP  = (NC + PS - 1) / PS,       // windows per filter
  localparam int unsigned FW  = (NF > 1) ? $clog2(NF) : 1,
  localparam int unsigned PW  = $clog2(NC),
  localparam int unsigned QW  = (NP > 1) ? $clog2(NP) : 1,
  localparam int unsigned SW  = $clog2(PS),
  localparam int unsigned CW  = (PS > 1) ? $clog2(PS) : 1
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              req_in,
  input  logic [FW+PW-1:0]  aer_in,     // {filter, position}
  output logic              req_out,
  output logic [FW+QW-1:0]  aer_out     // {filter, window}
);
  logic [CW-1:0]    cnt [NF * (2**QW)];
  logic [FW-1:0]    f_in;
  logic [QW-1:0]    q_in;
  logic [FW+QW-1:0] idx;
  logic             hit_thr;

  always_comb begin
    f_in    = aer_in[FW+PW-1 -: FW];
    q_in    = QW'(aer_in[PW-1:0] >> SW);
    idx     = {f_in, q_in};
    hit_thr = (32'(cnt[idx]) == PS - 1);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < NF * (2**QW); i++) cnt[i] <= '0;
      req_out <= 1'b0;
      aer_out <= '0;
    end else begin
      req_out <= req_in && hit_thr;
      if (req_in) begin
        cnt[idx] <= hit_thr ? '0 : cnt[idx] + 1'b1;
        if (hit_thr) aer_out <= idx;
      end
    end
  end
endmodule
