// tb_izh_neuron: directed scenarios on the phenomenological neuron update
// logic. The record is fed back from state_next after each event, as the
// neuron SRAM would do, and the expected values are worked out by hand from
// the rules in the module's header: accumulator overflow and leak, membrane
// integration and firing, Calcium, spike latency, refractory period, burst
// lock and release, sign rotation, threshold variability and adaptation,
// phasic firing, rebound after inhibition, and the SDSP up/down outputs.
module tb_izh_neuron;
  import odin_pkg::*;
  logic [PARAM_W-1:0] param;
  logic [STATE_W-1:0] state, state_next;
  logic [NW-1:0] addr;
  logic syn_ev, syn_sign, time_ref, burst_end, spike, up, down;
  logic [2:0] weight;
  pkt_t pkt;
  izh_param_t p;
  izh_state_t s;
  int checks = 0, failures = 0;

  izh_neuron dut (.*);

  task automatic check(input string what, input logic ok);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL %s: acc=%0d v=%0d ca=%0d tw=%0d/%0d lock=%0d thr_off=%0d spike=%0d",
               what, s.acc, s.vmem, s.ca, s.phen.tw_mode, s.phen.tw_cnt, s.lock, s.phen.thr_off, spike);
    end
  endtask

  // Apply one event and take the new record.
  task automatic apply(input int kind, input int w = 0, input bit inh = 0);
    param = PARAM_W'(p);
    state = STATE_W'(s);
    syn_ev = (kind == 1); time_ref = (kind == 2); burst_end = (kind == 3);
    weight = 3'(w); syn_sign = inh;
    #1;
    s = izh_state_t'(state_next);
  endtask

  task automatic reset_neuron();
    p = '0; s = '0;
    p.acc_depth = 4'd2;   // overflow at +/-4
    p.thr = 3'd2;
    p.ca_th1 = 3'd0; p.ca_th2 = 3'd3; p.ca_th3 = 3'd6;
    p.thr_mem = 4'sd1;
  endtask

  initial begin
    addr = 8'd77;
    // 1. Accumulation and overflow.
    reset_neuron();
    apply(1, 3);  check("acc 3", s.acc == 3 && s.vmem == 0 && !spike);
    apply(1, 3);  check("overflow", s.acc == 2 && s.vmem == 1 && !spike);
    apply(1, 2, 1); check("inh acc", s.acc == 0 && s.vmem == 1);
    // SDSP outputs on the record as read: v=1 >= theta_m=1, Ca 0 in [0,6) -> up.
    param = PARAM_W'(p); state = STATE_W'(s); syn_ev = 0; time_ref = 0; burst_end = 0; #1;
    check("sdsp up", up && !down);
    // 2. Firing at threshold 2.
    apply(1, 5);  check("fire", spike && s.vmem == 0 && s.ca == 1 && s.acc == 1);
    check("packet", pkt.addr == 8'd77 && pkt.num == 0 && pkt.isi == 0);
    // accumulator leak
    p.acc_leak = 4'd1;
    apply(2);     check("acc leak", s.acc == 0 && !spike);
    // SDSP down: v=0 < 1, Ca=1 in [0,3)
    param = PARAM_W'(p); state = STATE_W'(s); syn_ev = 0; time_ref = 0; #1;
    check("sdsp down", !up && down);

    // 3. Spike latency of 2 time references.
    reset_neuron(); p.latency = 3'd2; s.vmem = 4'sd1;
    apply(1, 4);  check("latency armed", !spike && s.phen.tw_mode == 1 && s.phen.tw_cnt == 2);
    apply(2);     check("latency 1", !spike && s.phen.tw_cnt == 1);
    apply(2);     check("latency fire", spike && s.vmem == 0);

    // 4. Refractory period: inputs ignored for 2 time references.
    reset_neuron(); p.refrac = 3'd2; s.vmem = 4'sd1;
    apply(1, 4);  check("refr fire", spike && s.phen.tw_mode == 3);
    apply(1, 4);  check("refr ignore", !spike && s.acc == 0 && s.vmem == 0);
    apply(2); apply(2);
    apply(1, 4);  check("refr over", s.vmem == 1);

    // 5. Burst: lock until burst_end.
    reset_neuron(); p.burst_num = 3'd2; p.burst_isi = 3'd1; s.vmem = 4'sd1;
    apply(1, 4);  check("burst fire", spike && s.lock && pkt.num == 2 && pkt.isi == 1);
    apply(1, 4);  check("locked", !spike && s.acc == 0 && s.vmem == 0);
    apply(3);     check("unlock", !s.lock);
    apply(1, 4);  check("after unlock", s.vmem == 1);

    // 6. Sign rotation every time reference.
    reset_neuron(); p.thr = 3'd7; p.rot_per = 3'd1; s.vmem = 4'sd3;
    apply(2);     check("rotate -", s.vmem == -3);
    apply(2);     check("rotate +", s.vmem == 3);

    // 7. Threshold variability and adaptation.
    reset_neuron(); p.thr = 3'd3; p.thr_var = 1'b1; p.thr_adapt = 2'd2;
    apply(1, 4, 1); check("thr var", s.phen.thr_off == -1 && s.vmem == -1);
    s.vmem = 4'sd1;
    apply(1, 4);  check("lowered thr fires", spike && s.phen.thr_off == 1);
    apply(2);     check("thr relax", s.phen.thr_off == 0);

    // 8. Phasic: one spike per stimulation episode.
    reset_neuron(); p.phasic = 1'b1; p.thr = 3'd1;
    apply(1, 4);  check("phasic first", spike);
    apply(1, 4);  check("phasic blocked", !spike && s.vmem == 0);
    apply(2);     // episode still on (events in this step)
    apply(2);     check("episode end", !s.phen.phasic_done);
    apply(1, 4);  check("phasic again", spike);

    // 9. Rebound after inhibition.
    reset_neuron(); p.rebound = 1'b1;
    apply(1, 4, 1); check("inhibited", s.vmem == -1);
    apply(2);     check("still on", !spike);
    apply(2);     check("rebound spike", spike);

    // 10. Calcium leak every 2 time references and saturation.
    reset_neuron(); p.ca_leak = 3'd2; s.ca = 3'd2; p.thr = 3'd7;
    apply(2); check("ca hold", s.ca == 2);
    apply(2); check("ca leak", s.ca == 1);

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
