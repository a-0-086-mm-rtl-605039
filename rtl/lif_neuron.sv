// lif_neuron: combinational update of one 8-bit leaky integrate-and-fire
// neuron, extended with a 3-bit Calcium variable for SDSP learning.
//
// The neuron record is read from the neuron SRAM, updated here and written
// back by the controller within one two-cycle synaptic operation (SOP).
//   syn_ev   : a synaptic event; the membrane rises (syn_sign = 0) or falls
//              (syn_sign = 1) by the 3-bit weight, saturating at 255 and 0.
//   time_ref : a neuron time reference; the membrane leaks by 'leak'
//              (floor 0) and the Calcium leak counter advances: every
//              'ca_leak' time references the Calcium value drops by one
//              ('ca_leak' = 0 disables the Calcium leak).
//   A membrane at or above 'thr' after the update fires: the membrane is
//   reset to 0, Calcium increments (saturating at 7) and a single-spike
//   packet {addr, 0, 0} is emitted.
// The SDSP conditions of paper Eq. 1 are computed from the record as read,
// i.e. the state at the time of the pre-synaptic spike:
//   up   = Vmem >= theta_m and theta_1 <= Ca < theta_3
//   down = Vmem <  theta_m and theta_1 <= Ca < theta_2
// The model follows the paper (8-bit LIF, Calcium incremented on each spike,
// Calcium leak paced by time references, per-neuron thresholds); the
// field layout, saturation and reset-to-zero are this design's choices.
module lif_neuron
  import odin_pkg::*;
(
  input  logic [PARAM_W-1:0] param,
  input  logic [STATE_W-1:0] state,
  input  logic [NW-1:0]      addr,
  input  logic               syn_ev,
  input  logic [2:0]         weight,
  input  logic               syn_sign,
  input  logic               time_ref,
  output logic [STATE_W-1:0] state_next,
  output logic               spike,
  output pkt_t               pkt,
  output logic               up,
  output logic               down
);
  lif_param_t p;
  lif_state_t s, n;
  logic [8:0] sum;

  always_comb begin
    p     = lif_param_t'(param);
    s     = lif_state_t'(state);
    n     = s;
    spike = 1'b0;
    sum   = '0;

    up   = (s.vmem >= p.thr_mem) && (s.ca >= p.ca_th1) && (s.ca < p.ca_th3);
    down = (s.vmem <  p.thr_mem) && (s.ca >= p.ca_th1) && (s.ca < p.ca_th2);

    if (syn_ev) begin
      if (!syn_sign) begin
        sum    = {1'b0, s.vmem} + {6'd0, weight};
        n.vmem = sum[8] ? 8'hFF : sum[7:0];
      end else begin
        n.vmem = (s.vmem > {5'd0, weight}) ? s.vmem - {5'd0, weight} : 8'd0;
      end
    end else if (time_ref) begin
      n.vmem = (s.vmem > {1'b0, p.leak}) ? s.vmem - {1'b0, p.leak} : 8'd0;
      if (p.ca_leak != 3'd0) begin
        if ({1'b0, s.ca_cnt} + 4'd1 >= {1'b0, p.ca_leak}) begin
          n.ca_cnt = 3'd0;
          if (s.ca != 3'd0) n.ca = s.ca - 3'd1;
        end else begin
          n.ca_cnt = s.ca_cnt + 3'd1;
        end
      end
    end

    if ((syn_ev || time_ref) && n.vmem >= p.thr) begin
      spike  = 1'b1;
      n.vmem = 8'd0;
      if (n.ca != 3'd7) n.ca = n.ca + 3'd1;
    end

    state_next = STATE_W'(n);
    pkt        = '{addr: addr, num: 3'd0, isi: 3'd0};
  end
endmodule
