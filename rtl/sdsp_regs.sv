// sdsp_regs: SDSP up/down registers for one synapse-SRAM word.
//
// A synapse-SRAM word holds the synapses from one source neuron to eight
// consecutive destination neurons j = 8k..8k+7. The controller updates
// those eight neurons one after the other (one neuron per two-cycle SOP);
// each neuron's SDSP conditions 'up' and 'down', derived from its state at
// the time of the pre-synaptic spike, are stored here in slot j mod 8 when
// 'capture' is high. The outputs present all eight slots; the slot being
// captured in the current cycle is bypassed from the inputs, so the eighth
// neuron's conditions reach the SDSP update logic in the same cycle as the
// word is written back (paper Fig. 3: eight values buffered before write).
// 'clear' empties all slots (used at the start of an event).
module sdsp_regs (
  input  logic       clk,
  input  logic       rst_n,
  input  logic       clear,
  input  logic       capture,
  input  logic [2:0] slot,
  input  logic       up,
  input  logic       down,
  output logic [7:0] up_vec,
  output logic [7:0] down_vec
);
  logic [7:0] up_q, down_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      up_q   <= '0;
      down_q <= '0;
    end else if (clear) begin
      up_q   <= '0;
      down_q <= '0;
    end else if (capture) begin
      up_q[slot]   <= up;
      down_q[slot] <= down;
    end
  end

  always_comb begin
    up_vec   = up_q;
    down_vec = down_q;
    if (capture) begin
      up_vec[slot]   = up;
      down_vec[slot] = down;
    end
  end
endmodule
