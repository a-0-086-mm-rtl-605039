// sdsp_update: weight update of one 3-bit plastic synapse.
//
// Implements the spike-driven synaptic plasticity (SDSP) step: on a
// pre-synaptic spike (spk_pre) the weight moves by +1 if the post-synaptic
// neuron raised 'up', by -1 if it raised 'down', and stays otherwise. On a
// bistability time reference (bistability) the weight drifts by one step
// toward the nearer end of its range: up if it lies above half the range
// (w >= 4), down if below (w <= 3). Both steps saturate at 0 and 7 (the
// overflow detection). Purely combinational; the caller gates spk_pre and
// bistability with the synapse's mapping-table bit. Structure (a -1/0/+1
// generator followed by an adder) follows the paper; the saturation and the
// w >= 4 split of the 0..7 range are this design's reading of "above half
// its dynamic".
module sdsp_update (
  input  logic       up,
  input  logic       down,
  input  logic       spk_pre,
  input  logic       bistability,
  input  logic [2:0] w,
  output logic [2:0] w_next
);
  logic signed [1:0] delta;

  always_comb begin
    delta = 2'sd0;
    if (spk_pre) begin
      if (up)        delta = (w != 3'd7) ? 2'sd1 : 2'sd0;
      else if (down) delta = (w != 3'd0) ? -2'sd1 : 2'sd0;
    end else if (bistability) begin
      if (w[2] && w != 3'd7)         delta = 2'sd1;
      else if (!w[2] && w != 3'd0)   delta = -2'sd1;
    end
    w_next = w + {delta[1], delta};
  end
endmodule
