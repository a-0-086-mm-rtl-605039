// tb_lif_neuron: random records and inputs applied to the LIF update logic
// and compared with an independently written reference model (integer
// arithmetic): saturating integration of signed weights, leak and Calcium
// leak on time references, firing at threshold with reset and Calcium
// increment, and the SDSP up/down conditions of the record as read.
module tb_lif_neuron;
  import odin_pkg::*;
  logic [PARAM_W-1:0] param;
  logic [STATE_W-1:0] state, state_next;
  logic [NW-1:0] addr;
  logic syn_ev, syn_sign, time_ref, spike, up, down;
  logic [2:0] weight;
  pkt_t pkt;
  int checks = 0, failures = 0;
  int n_spikes = 0;

  lif_neuron dut (.*);

  initial begin
    for (int c = 0; c < 20000; c++) begin
      int thr, leak, th1, th2, th3, cal, thm, v, ca, cc;
      int ev, ex_v, ex_ca, ex_cc, ex_spk, ex_up, ex_dn;
      param = {$urandom, $urandom, $urandom};
      state = {$urandom, $urandom};
      addr = NW'($urandom);
      ev = $urandom_range(0, 2);
      syn_ev = (ev == 1); time_ref = (ev == 2);
      weight = 3'($urandom); syn_sign = $urandom_range(0, 1);
      // reference decoding of the record
      thr  = int'(param[7:0]);   leak = int'(param[14:8]);
      th1  = int'(param[17:15]); th2 = int'(param[20:18]); th3 = int'(param[23:21]);
      cal  = int'(param[26:24]); thm = int'(param[34:27]);
      v    = int'(state[7:0]);   ca = int'(state[10:8]); cc = int'(state[13:11]);
      if (c % 4 == 0) thr = v + (syn_sign ? 0 : int'(weight)); // provoke firing
      param[7:0] = 8'(thr);
      #1;
      ex_up = (v >= thm) && (ca >= th1) && (ca < th3);
      ex_dn = (v <  thm) && (ca >= th1) && (ca < th2);
      ex_v = v; ex_ca = ca; ex_cc = cc; ex_spk = 0;
      if (syn_ev) ex_v = syn_sign ? ((v - int'(weight) < 0) ? 0 : v - int'(weight))
                                  : ((v + int'(weight) > 255) ? 255 : v + int'(weight));
      if (time_ref) begin
        ex_v = (v - leak < 0) ? 0 : v - leak;
        if (cal != 0) begin
          if (cc + 1 >= cal) begin ex_cc = 0; if (ca > 0) ex_ca = ca - 1; end
          else ex_cc = cc + 1;
        end
      end
      if (ev != 0 && ex_v >= (thr & 255)) begin
        ex_spk = 1; ex_v = 0; if (ex_ca < 7) ex_ca++;
      end
      n_spikes += ex_spk;
      checks++;
      if (up !== 1'(ex_up) || down !== 1'(ex_dn) || spike !== 1'(ex_spk) ||
          int'(state_next[7:0]) != ex_v || int'(state_next[10:8]) != ex_ca ||
          int'(state_next[13:11]) != ex_cc || state_next[54:14] !== state[54:14] ||
          (spike && (pkt.addr !== addr || pkt.num !== 3'd0 || pkt.isi !== 3'd0))) begin
        failures++;
        if (failures < 10)
          $display("FAIL %0d ev=%0d v=%0d->%0d (exp %0d) ca=%0d->%0d (exp %0d) spk=%0d exp %0d",
                   c, ev, v, state_next[7:0], ex_v, ca, state_next[10:8], ex_ca, spike, ex_spk);
      end
    end
    checks++;
    if (n_spikes < 100) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
