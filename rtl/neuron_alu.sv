// neuron_alu: combinational integrate-and-fire update of one neuron, the
// "Neuron ALU" (adder and comparator) shared in time by all neurons of a layer.
//
// Model, with the leak fixed at zero and one input spike per step:
//   V' = V + w                                   (integration)
//   if V' >= V_thr : fire, V' = V' - V_thr       (reset by subtraction)
//   if V' <  V_min : V' = V_min                  (floor against wrap-around)
// Outputs follow the block diagram: fire, integration_result (V+w after the
// V_min floor, written when the neuron does not fire) and post_fire_result
// (V+w-V_thr, written when it fires). The write-back multiplexer that picks
// between them with fire sits in the layer.
//
// The sum is formed one bit wider than VW so it cannot wrap. If every weight
// is below V_thr, a stored voltage stays below V_thr, and with
// V_thr <= 2^(VW-1) - 2^(WW-1) and V_min >= -2^(VW-1) every result fits VW
// bits. Choosing V_thr and the weights to meet this is up to the user; the
// defaults (V_thr 64, weights up to 48, 9 bits) do.
module neuron_alu #(
  parameter int unsigned VW = 9,
  parameter int unsigned WW = 8
) (
  input  logic signed [VW-1:0] v_in,
  input  logic signed [WW-1:0] weight,
  input  logic signed [VW-1:0] v_thr,
  input  logic signed [VW-1:0] v_min,
  output logic                 fire,
  output logic signed [VW-1:0] integration_result,
  output logic signed [VW-1:0] post_fire_result
);
  logic signed [VW:0] sum, sub;

  always_comb begin
    sum  = (VW+1)'(v_in) + (VW+1)'(weight);
    sub  = sum - (VW+1)'(v_thr);
    fire = (sum >= (VW+1)'(v_thr));
    integration_result = (sum < (VW+1)'(v_min)) ? v_min : VW'(sum);
    post_fire_result   = VW'(sub);
  end
endmodule
