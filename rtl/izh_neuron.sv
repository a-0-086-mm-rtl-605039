// izh_neuron: combinational update of one phenomenological neuron that
// reproduces Izhikevich firing behaviours without solving the Izhikevich
// equations. The record is read from the neuron SRAM, updated here and
// written back by the controller in the same two-cycle SOP.
//
// Three stages, as in the paper's Fig. 6:
//  * Input stage (dendrites): an 11-bit signed accumulator collects
//    synaptic weights (syn_sign = 1 subtracts). Crossing +2^acc_depth or
//    -2^acc_depth produces one positive or negative "accumulated event"
//    and removes 2^acc_depth; acc_depth thus sets the effective fan-in.
//    Each time reference leaks the accumulator toward 0 by acc_leak.
//  * Neuron core (soma): a 4-bit signed membrane rises by one per positive
//    and falls by one per negative accumulated event. Four blocks shape it:
//     1) stimulation strength / sequence: events per time step are counted;
//        a positive event only integrates once the count reaches str_min
//        (class-2 / accommodation style); with 'phasic' the neuron fires once
//        per stimulation episode; with 'rebound' a membrane left negative
//        when an episode ends is lifted to the threshold (rebound spike).
//     2) dynamic threshold: the threshold offset grows by thr_adapt per
//        spike (spike-frequency adaptation), falls by one per inhibitory
//        event if thr_var is set (threshold variability), and relaxes
//        toward 0 by one per time reference.
//     3) time windows: a threshold crossing fires after 'latency' time
//        references (spike latency); after a spike the membrane is held just
//        below threshold for 'dap' time references (depolarising
//        after-potential), then inputs are ignored for 'refrac' time
//        references (refractory period).
//     4) sign rotation: every rot_per time references the membrane changes
//        sign (sub-threshold oscillation, resonance).
//    The membrane also leaks by one step every mem_leak time references.
//  * Output stage (axon): a spike emits the packet {addr, burst_num,
//    burst_isi}. For a burst (burst_num > 0) the membrane is reset and the
//    neuron is locked (state bit 'lock') until the scheduler signals
//    burst_end; while locked only the Calcium leak runs.
// Calcium increments on each spike and leaks every ca_leak time
// references; SDSP up/down follow paper Eq. 1 on the state as read.
//
// The paper gives the stages, the four soma blocks and their purpose, the
// widths (11-bit accumulator, 4-bit membrane, 36 phenomenological bits,
// 3-bit Calcium, 1 burst bit, 70 parameter bits) and the burst lock. It
// does not give the logic inside the blocks: the rules above are this
// design's simplest reading of each block's function.
module izh_neuron
  import odin_pkg::*;
(
  input  logic [PARAM_W-1:0] param,
  input  logic [STATE_W-1:0] state,
  input  logic [NW-1:0]      addr,
  input  logic               syn_ev,
  input  logic [2:0]         weight,
  input  logic               syn_sign,
  input  logic               time_ref,
  input  logic               burst_end,
  output logic [STATE_W-1:0] state_next,
  output logic               spike,
  output pkt_t               pkt,
  output logic               up,
  output logic               down
);
  izh_param_t p;
  izh_state_t s, n;

  logic signed [11:0] acc_sum, ovf_th;
  logic signed [5:0]  thr_eff;
  logic               pos_ev, neg_ev, fire, check;

  function automatic logic signed [3:0] sat4(input logic signed [5:0] v);
    if (v > 6'sd7)       return 4'sd7;
    else if (v < -6'sd8) return -4'sd8;
    else                 return v[3:0];
  endfunction

  always_comb begin
    p       = izh_param_t'(param);
    s       = izh_state_t'(state);
    n       = s;
    spike   = 1'b0;
    fire    = 1'b0;
    check   = 1'b0;
    pos_ev  = 1'b0;
    neg_ev  = 1'b0;
    acc_sum = '0;
    ovf_th  = 12'sd1 <<< ((p.acc_depth > 4'd10) ? 4'd10 : p.acc_depth);

    thr_eff = $signed({3'b000, p.thr}) + 6'(s.phen.thr_off);
    if (thr_eff < 6'sd1) thr_eff = 6'sd1;
    if (thr_eff > 6'sd7) thr_eff = 6'sd7;

    up   = (s.vmem >= p.thr_mem) && (s.ca >= p.ca_th1) && (s.ca < p.ca_th3);
    down = (s.vmem <  p.thr_mem) && (s.ca >= p.ca_th1) && (s.ca < p.ca_th2);

    if (burst_end) begin
      n.lock = 1'b0;
    end else if (s.lock) begin
      // Locked during a burst: inputs are discarded, only Calcium leaks.
      if (time_ref && p.ca_leak != 3'd0) begin
        if ({1'b0, s.phen.ca_cnt} + 4'd1 >= {1'b0, p.ca_leak}) begin
          n.phen.ca_cnt = 3'd0;
          if (s.ca != 3'd0) n.ca = s.ca - 3'd1;
        end else n.phen.ca_cnt = s.phen.ca_cnt + 3'd1;
      end
    end else if (syn_ev) begin
      if (s.phen.tw_mode != 2'd3) begin
        // Input stage.
        acc_sum = 12'(s.acc) + (syn_sign ? -$signed({9'd0, weight}) : $signed({9'd0, weight}));
        if (acc_sum >= ovf_th) begin
          pos_ev  = 1'b1;
          acc_sum = acc_sum - ovf_th;
        end else if (acc_sum <= -ovf_th) begin
          neg_ev  = 1'b1;
          acc_sum = acc_sum + ovf_th;
        end
        if (acc_sum > 12'sd1023)  acc_sum = 12'sd1023;
        if (acc_sum < -12'sd1024) acc_sum = -12'sd1024;
        n.acc = acc_sum[10:0];
        // Block 1: stimulation strength.
        if ((pos_ev || neg_ev) && s.phen.stim_cnt != 4'd15)
          n.phen.stim_cnt = s.phen.stim_cnt + 4'd1;
        if (pos_ev && !(p.phasic && s.phen.phasic_done) &&
            n.phen.stim_cnt >= {1'b0, p.str_min})
          n.vmem = sat4(6'(s.vmem) + 6'sd1);
        if (neg_ev) begin
          n.vmem = sat4(6'(s.vmem) - 6'sd1);
          // Block 2: threshold variability.
          if (p.thr_var) n.phen.thr_off = sat4(6'(s.phen.thr_off) - 6'sd1);
        end
        check = (pos_ev || neg_ev);
      end
    end else if (time_ref) begin
      // Input stage leak.
      if (s.acc > $signed({7'd0, p.acc_leak}))       n.acc = s.acc - $signed({7'd0, p.acc_leak});
      else if (s.acc < -$signed({7'd0, p.acc_leak})) n.acc = s.acc + $signed({7'd0, p.acc_leak});
      else                                           n.acc = '0;
      // Block 1: end of a stimulation episode.
      if (s.phen.stim_on && s.phen.stim_cnt == 4'd0) begin
        n.phen.phasic_done = 1'b0;
        if (p.rebound && s.vmem < 4'sd0) n.vmem = thr_eff[3:0];
      end
      n.phen.stim_on  = (s.phen.stim_cnt != 4'd0);
      n.phen.stim_cnt = 4'd0;
      // Block 2: threshold relaxation.
      if (s.phen.thr_off > 4'sd0)      n.phen.thr_off = s.phen.thr_off - 4'sd1;
      else if (s.phen.thr_off < 4'sd0) n.phen.thr_off = s.phen.thr_off + 4'sd1;
      // Membrane leak.
      if (p.mem_leak != 3'd0) begin
        if ({1'b0, s.phen.leak_cnt} + 4'd1 >= {1'b0, p.mem_leak}) begin
          n.phen.leak_cnt = 3'd0;
          if (n.vmem > 4'sd0)      n.vmem = n.vmem - 4'sd1;
          else if (n.vmem < 4'sd0) n.vmem = n.vmem + 4'sd1;
        end else n.phen.leak_cnt = s.phen.leak_cnt + 3'd1;
      end
      // Block 4: sign rotation.
      if (p.rot_per != 3'd0) begin
        if ({1'b0, s.phen.rot_cnt} + 4'd1 >= {1'b0, p.rot_per}) begin
          n.phen.rot_cnt = 3'd0;
          n.vmem         = sat4(-6'(n.vmem));
        end else n.phen.rot_cnt = s.phen.rot_cnt + 3'd1;
      end
      // Block 3: time windows.
      if (s.phen.tw_mode != 2'd0) begin
        if (s.phen.tw_cnt <= 3'd1) begin
          n.phen.tw_cnt = 3'd0;
          unique case (s.phen.tw_mode)
            2'd1: begin n.phen.tw_mode = 2'd0; fire = 1'b1; end
            2'd2: begin
              n.vmem = 4'sd0;
              if (p.refrac != 3'd0) begin
                n.phen.tw_mode = 2'd3;
                n.phen.tw_cnt  = p.refrac;
              end else n.phen.tw_mode = 2'd0;
            end
            default: n.phen.tw_mode = 2'd0;
          endcase
        end else n.phen.tw_cnt = s.phen.tw_cnt - 3'd1;
      end
      check = 1'b1;
      // Calcium leak.
      if (p.ca_leak != 3'd0) begin
        if ({1'b0, s.phen.ca_cnt} + 4'd1 >= {1'b0, p.ca_leak}) begin
          n.phen.ca_cnt = 3'd0;
          if (s.ca != 3'd0) n.ca = s.ca - 3'd1;
        end else n.phen.ca_cnt = s.phen.ca_cnt + 3'd1;
      end
    end

    // Threshold crossing: fire now or open the latency window.
    if (check && !fire && n.phen.tw_mode == 2'd0 && 6'(n.vmem) >= thr_eff) begin
      if (p.latency != 3'd0) begin
        n.phen.tw_mode = 2'd1;
        n.phen.tw_cnt  = p.latency;
      end else fire = 1'b1;
    end

    // Output stage.
    if (fire) begin
      spike = 1'b1;
      if (n.ca != 3'd7) n.ca = n.ca + 3'd1;
      n.phen.thr_off = sat4(6'(n.phen.thr_off) + $signed({4'd0, p.thr_adapt}));
      if (p.phasic) n.phen.phasic_done = 1'b1;
      if (p.burst_num != 3'd0) begin
        n.lock         = 1'b1;
        n.vmem         = 4'sd0;
        n.phen.tw_mode = 2'd0;
      end else if (p.dap != 3'd0) begin
        n.phen.tw_mode = 2'd2;
        n.phen.tw_cnt  = p.dap;
        n.vmem         = thr_eff[3:0] - 4'sd1;
      end else begin
        n.vmem = 4'sd0;
        if (p.refrac != 3'd0) begin
          n.phen.tw_mode = 2'd3;
          n.phen.tw_cnt  = p.refrac;
        end
      end
    end

    state_next = STATE_W'(n);
    pkt        = '{addr: addr, num: p.burst_num, isi: p.burst_isi};
  end
endmodule
