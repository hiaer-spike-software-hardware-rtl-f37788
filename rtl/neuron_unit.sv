// neuron_unit: the per-time-step update of one neuron (combinational).
//
// Order, as the paper specifies: add noise, compare V > theta (strictly
// greater), reset V to zero on a spike, then apply the model: a LIF neuron
// leaks V = V - (V >>> lambda), a binary (ANN) neuron clears V. Synaptic
// inputs are added afterwards by the lane, once the spikes of this step
// have been routed. The arithmetic shift floors like the integer division
// of the reference software model, so lambda = 63 leaves a negative V one
// step closer to zero. Arithmetic wraps at V_W bits (a choice of this
// design; the paper does not state overflow behaviour).
module neuron_unit
  import hs_pkg::*;
(
  input  vmem_t   v_in,
  input  vmem_t   noise,
  input  model_t  model,
  output vmem_t   v_out,
  output logic    spike
);

  vmem_t v_noisy, v_reset;

  always_comb begin
    v_noisy = v_in + noise;
    spike   = (v_noisy > model.theta);
    v_reset = spike ? '0 : v_noisy;
    if (model.is_lif) v_out = v_reset - (v_reset >>> model.lambda);
    else              v_out = '0;
  end

endmodule
