// neuron_update: per-neuron choice between the LIF and the phenomenological
// update logic.
//
// Both update circuits see the same neuron SRAM word; bit MODEL_BIT of the
// word (0: LIF, 1: phenomenological) selects whose new state, spike, event
// packet and SDSP up/down conditions are used, as the multiplexer of the
// paper's block diagram does. Parameter bits and the model bit pass through
// unchanged; only the 55 state bits are replaced. Combinational: the
// controller presents the word read in the first cycle of an SOP and writes
// word_next back in the second.
module neuron_update
  import odin_pkg::*;
(
  input  logic [NWORD_W-1:0] word,
  input  logic [NW-1:0]      addr,
  input  logic               syn_ev,
  input  logic [2:0]         weight,
  input  logic               syn_sign,
  input  logic               time_ref,
  input  logic               burst_end,
  output logic [NWORD_W-1:0] word_next,
  output logic               spike,
  output pkt_t               pkt,
  output logic               up,
  output logic               down
);
  logic [STATE_W-1:0] lif_st, izh_st;
  logic               lif_spk, izh_spk, lif_up, izh_up, lif_dn, izh_dn;
  pkt_t               lif_pkt, izh_pkt;
  logic               is_izh;

  assign is_izh = word[MODEL_BIT];

  lif_neuron u_lif (
    .param(word[PARAM_LSB +: PARAM_W]), .state(word[STATE_LSB +: STATE_W]),
    .addr, .syn_ev, .weight, .syn_sign, .time_ref,
    .state_next(lif_st), .spike(lif_spk), .pkt(lif_pkt), .up(lif_up), .down(lif_dn)
  );

  izh_neuron u_izh (
    .param(word[PARAM_LSB +: PARAM_W]), .state(word[STATE_LSB +: STATE_W]),
    .addr, .syn_ev, .weight, .syn_sign, .time_ref, .burst_end,
    .state_next(izh_st), .spike(izh_spk), .pkt(izh_pkt), .up(izh_up), .down(izh_dn)
  );

  always_comb begin
    word_next = word;
    word_next[STATE_LSB +: STATE_W] = is_izh ? izh_st : lif_st;
    spike = is_izh ? izh_spk : lif_spk;
    pkt   = is_izh ? izh_pkt : lif_pkt;
    up    = is_izh ? izh_up  : lif_up;
    down  = is_izh ? izh_dn  : lif_dn;
  end
endmodule
