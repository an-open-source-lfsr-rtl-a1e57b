// stoch_activation: activation table lookup and stochastic-event comparator.
//
// The top three LFSR bits s[15:13] pick one of the eight programmable
// activation entries, a = lut[s[15:13]]; the low byte c = s[7:0] is the
// comparison value. The stochastic event is asserted when c < a (strictly),
// so over a maximal-length period an entry a fires with probability a/256.
//
// Interface: purely combinational; `activation` and `stoch_fire` are valid in
// the same cycle as `lfsr_state`; state bits [12:8] are not used here (lint
// reports them as unused). All of this follows the published design.
module stoch_activation
  import stoch_neuron_pkg::*;
(
  input  logic [LFSR_W-1:0]     lfsr_state,
  input  logic [LUT_N-1:0][7:0] lut,
  output logic [7:0]            activation,
  output logic                  stoch_fire
);

  logic [2:0] index;
  logic [7:0] compare_value;

  always_comb begin
    index         = lfsr_state[LFSR_W-1 -: 3];
    compare_value = lfsr_state[7:0];
    activation    = lut[index];
    stoch_fire    = compare_value < activation;
  end

endmodule
