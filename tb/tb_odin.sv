// tb_odin: end-to-end test of the full-size core (no parameter overrides:
// 256 neurons, 256x256 synapses, 32-entry spike FIFO, 57 rotating FIFOs).
//
// The whole core is configured over SPI only: all 256 neuron records
// (4096 byte writes) and the synapse rows that the test uses. A four-phase
// AER sender and receiver model the outside world; the receiver's ACK
// delay can be raised to make the output port slow.
//
// Network used:
//   neuron 1   LIF, threshold 10, leak 2, SDSP theta_m 5, Ca window [0,7)
//   neuron 2   phenomenological, threshold 2, accumulator depth 0 (every
//              unit of input is an event), bursts of 3 spikes, ISI 1
//   neuron 5   LIF, quiet (threshold 255), used for virtual synapses
//   64..103    LIF, threshold 1, reached from source 3 with weight 1
//   others     LIF, quiet, no learning
//   row 0      0 -> 1 weight 7 plastic, 0 -> 9 weight 2 plastic
//   row 3      3 -> 64..103 weight 1; all other used rows are empty
//
// Every mechanism is counted and each must occur at least once: AER neuron
// spike, single-synapse, virtual (excitatory and inhibitory), neuron time
// reference and bistability events; SDSP potentiation and depression;
// bistability drift up and down; neuron spikes; recurrent events from the
// scheduler; a burst packet, burst rotations and burst end (unlock);
// AER output events; monitoring output; output stall; scheduler overflow;
// activity gating; SPI read-back of neurons, synapses and registers.
// Checked values: neuron states and synapse weights after each step (by SPI
// read-back), AER output addresses, event durations (512 cycles for
// spike and time-reference events, 2 for single and virtual, 16384 for
// bistability) and the spacing of the burst's spikes.
module tb_odin;
  import odin_pkg::*;
  logic clk = 0, rst_n = 0;
  logic sck, mosi, miso;
  logic [AER_IN_W-1:0] aer_in_addr;
  logic aer_in_req, aer_in_ack;
  logic [NW-1:0] aer_out_addr;
  logic aer_out_req, aer_out_ack;
  logic sched_overflow;
  int checks = 0, failures = 0;

  odin dut (.*);
  always #5 clk = ~clk;

  task automatic check(input string what, input logic ok);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s (t=%0t)", what, $time); end
  endtask

  // ---------------- SPI master ----------------
  logic [7:0] spi_last;
  task automatic frame(input logic [31:0] f);
    logic [31:0] got;
    for (int b = 31; b >= 0; b--) begin
      mosi = f[b];
      repeat (3) @(posedge clk);
      sck = 1; got[b] = miso;
      repeat (3) @(posedge clk);
      sck = 0;
    end
    repeat (6) @(posedge clk);
    spi_last = got[7:0];
  endtask
  task automatic spi_wr(input spi_tgt_e t, input int a, input int d);
    frame({1'b1, t, 5'd0, 16'(a), 8'(d)});
  endtask
  task automatic spi_rd(input spi_tgt_e t, input int a, output logic [7:0] d);
    frame({1'b0, t, 5'd0, 16'(a), 8'd0});
    frame({1'b0, SPI_NONE, 5'd0, 16'd0, 8'd0});
    d = spi_last;
  endtask
  task automatic wr_neuron(input int n, input logic [NWORD_W-1:0] w);
    for (int b = 0; b < 16; b++) spi_wr(SPI_NEUR, (n << 4) | b, w[8*b +: 8]);
  endtask
  task automatic rd_neuron(input int n, output logic [NWORD_W-1:0] w);
    frame({1'b0, SPI_NEUR, 5'd0, 16'(n << 4), 8'd0});
    for (int b = 1; b <= 16; b++) begin
      frame({1'b0, (b < 16) ? SPI_NEUR : SPI_NONE, 5'd0, 16'((n << 4) | (b % 16)), 8'd0});
      w[8*(b-1) +: 8] = spi_last;
    end
  endtask
  task automatic wr_syn_word(input int a, input logic [31:0] w);
    for (int b = 0; b < 4; b++) spi_wr(SPI_SYN, (a << 2) | b, w[8*b +: 8]);
  endtask

  // ---------------- AER sender / receiver ----------------
  task automatic aer_send(input logic [16:0] a);
    @(negedge clk);
    aer_in_addr = a; aer_in_req = 1;
    while (!aer_in_ack) @(negedge clk);
    aer_in_req = 0;
    while (aer_in_ack) @(negedge clk);
  endtask
  function automatic logic [16:0] a_spike(input int i);  return {1'b0, 8'(i), 8'h00}; endfunction
  function automatic logic [16:0] a_single(input int i, input int j); return {1'b1, 8'(i), 8'(j)}; endfunction
  function automatic logic [16:0] a_virt(input int j, input int w, input logic s);
    return {1'b0, 8'(j), 4'h8, s, 3'(w)};
  endfunction
  localparam logic [16:0] A_TREF = {1'b0, 8'd0, 8'h01};
  localparam logic [16:0] A_BIST = {1'b0, 8'd0, 8'h02};

  int ack_delay = 2;
  logic [7:0] out_q[$];
  longint out_t[$];
  longint cyc = 0;
  always @(posedge clk) cyc++;
  initial begin
    aer_out_ack = 0;
    forever begin
      @(posedge clk);
      if (aer_out_req && !aer_out_ack) begin
        out_q.push_back(aer_out_addr); out_t.push_back(cyc);
        repeat (ack_delay) @(posedge clk);
        aer_out_ack <= 1;
        while (aer_out_req) @(posedge clk);
        aer_out_ack <= 0;
      end
    end
  end

  // wait until the core, scheduler and output port have been quiet a while
  task automatic settle();
    int q = 0;
    while (q < 3000) begin
      @(posedge clk);
      if (dut.busy || dut.sch_valid || aer_out_req || aer_out_ack) q = 0; else q++;
    end
  endtask

  // ---------------- mechanism counters ----------------
  int c_ev[8];
  int c_up, c_down, c_drift_up, c_drift_dn, c_spike, c_rec, c_burst, c_rot, c_bend;
  int c_stall, c_ovf, c_mon_out;
  int bad_len;
  int cur_kind = -1, cur_len;
  always @(posedge clk) if (rst_n) begin
    if (dut.u_ctrl.take_ev) c_ev[dut.ev.kind]++;
    if (dut.s_cs && dut.s_we && dut.syn_spk_mask != 0)
      for (int k = 0; k < 8; k++) if (dut.s_wmask[4*k]) begin
        if (dut.syn_word_next[4*k +: 3] > dut.s_rdata[4*k +: 3]) c_up++;
        if (dut.syn_word_next[4*k +: 3] < dut.s_rdata[4*k +: 3]) c_down++;
      end
    if (dut.s_cs && dut.s_we && dut.syn_bistab)
      for (int k = 0; k < 8; k++) begin
        if (dut.syn_word_next[4*k +: 3] > dut.s_rdata[4*k +: 3]) c_drift_up++;
        if (dut.syn_word_next[4*k +: 3] < dut.s_rdata[4*k +: 3]) c_drift_dn++;
      end
    if (dut.pkt_valid) c_spike++;
    if (dut.pkt_valid && dut.pkt.num != 0) c_burst++;
    if (dut.sch_pop) c_rec++;
    if (dut.sch_rotate) c_rot++;
    if (dut.nu_burst_end) c_bend++;
    if (dut.sch_valid && !dut.out_ready && !dut.busy) c_stall++;
    if (sched_overflow) c_ovf++;
    if (dut.out_valid && dut.u_ctrl.mon_en) c_mon_out++;
    // event durations
    if (dut.u_ctrl.take_ev || dut.u_ctrl.take_sch) begin
      cur_kind = dut.u_ctrl.take_sch ? int'(EV_SPIKE) : int'(dut.ev.kind);
      cur_len  = 0;
    end else if (dut.u_ctrl.take_spi) cur_kind = -1;
    if (dut.busy) cur_len++;
    else if (cur_kind >= 0 && cur_len > 0) begin
      case (cur_kind)
        EV_SPIKE, EV_TREF:     if (cur_len != 512)   bad_len++;
        EV_SINGLE, EV_VIRTUAL: if (cur_len != 2)     bad_len++;
        EV_BISTAB:             if (cur_len != 16384) bad_len++;
        default: ;
      endcase
      cur_kind = -1;
    end
  end

  function automatic logic [NWORD_W-1:0] lif_word(input int thr, input int leak, input int thm,
                                                  input int th1, input int th2, input int th3);
    lif_param_t p;
    p = '0;
    p.thr = 8'(thr); p.leak = 7'(leak); p.thr_mem = 8'(thm);
    p.ca_th1 = 3'(th1); p.ca_th2 = 3'(th2); p.ca_th3 = 3'(th3);
    return NWORD_W'(p);
  endfunction
  function automatic lif_state_t lif_st(input logic [NWORD_W-1:0] w);
    return lif_state_t'(w[STATE_LSB +: STATE_W]);
  endfunction

  initial begin
    logic [NWORD_W-1:0] w;
    logic [7:0] d;
    izh_param_t ip;
    int n_out0;
    sck = 0; mosi = 0; aer_in_req = 0; aer_in_addr = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    repeat (5) @(posedge clk);

    // ---- configuration ----
    for (int n = 0; n < N; n++) begin
      if (n == 1)                  w = lif_word(10, 2, 5, 0, 7, 7);
      else if (n >= 64 && n < 104) w = lif_word(1, 0, 0, 0, 0, 0);
      else if (n == 2) begin
        ip = '0; ip.thr = 3'd2; ip.burst_num = 3'd2; ip.burst_isi = 3'd1;
        w = NWORD_W'(ip); w[MODEL_BIT] = 1'b1;
      end else                     w = lif_word(255, 0, 0, 0, 0, 0);
      wr_neuron(n, w);
    end
    for (int r = 0; r < 4; r++)
      for (int k = 0; k < 32; k++) begin
        logic [31:0] sw;
        sw = '0;
        if (r == 0 && k == 0) sw = 32'h0000_00F0;
        if (r == 0 && k == 1) sw = 32'h0000_00A0;
        if (r == 3 && k >= 8 && k < 13) sw = 32'h1111_1111;
        wr_syn_word(r * 32 + k, sw);
      end
    for (int r = 64; r < 104; r++)
      for (int k = 0; k < 32; k++) wr_syn_word(r * 32 + k, 32'h0);

    // ---- SPI read-back ----
    rd_neuron(1, w);
    check("neuron 1 read-back", w == lif_word(10, 2, 5, 0, 7, 7));
    spi_rd(SPI_SYN, 4, d);
    check("synapse read-back", d == 8'hA0);
    spi_wr(SPI_REG, REG_ISI_0 + 1, 1);   // ISI period 256 + 144 = 400
    spi_wr(SPI_REG, REG_ISI_0, 144);
    spi_rd(SPI_REG, REG_ISI_0 + 1, d);
    check("register read-back", d == 8'd1);

    // ---- spike, time reference, spike: depression, leak, potentiation, fire ----
    aer_send(a_spike(0)); settle();
    rd_neuron(1, w);
    check("after spike 1: vmem 7", lif_st(w).vmem == 8'd7);
    spi_rd(SPI_SYN, 0, d);
    check("depression 7->6", d == 8'hE0);
    aer_send(A_TREF); settle();
    rd_neuron(1, w);
    check("leak 7->5", lif_st(w).vmem == 8'd5);
    n_out0 = out_q.size();
    aer_send(a_spike(0)); settle();
    rd_neuron(1, w);
    check("fired: vmem 0, Ca 1", lif_st(w).vmem == 8'd0 && lif_st(w).ca == 3'd1);
    spi_rd(SPI_SYN, 0, d);
    check("potentiation 6->7", d == 8'hF0);
    check("AER out neuron 1", out_q.size() == n_out0 + 1 && out_q[n_out0] == 8'd1);

    // ---- single-synapse event 0 -> 1 ----
    aer_send(a_single(0, 1)); settle();
    rd_neuron(1, w);
    check("single: vmem 7", lif_st(w).vmem == 8'd7);
    spi_rd(SPI_SYN, 0, d);
    check("single: depression 7->6", d == 8'hE0);

    // ---- bistability ----
    aer_send(A_BIST); settle();
    spi_rd(SPI_SYN, 0, d);
    check("bistability up 6->7", d == 8'hF0);
    spi_rd(SPI_SYN, 4, d);
    check("bistability down 2->1", d == 8'h90);

    // ---- virtual synapses, excitatory then inhibitory ----
    aer_send(a_virt(5, 3, 0)); aer_send(a_virt(5, 2, 1)); settle();
    rd_neuron(5, w);
    check("virtual: vmem 3-2=1", lif_st(w).vmem == 8'd1);

    // ---- gating ----
    spi_wr(SPI_REG, REG_CTRL, 8'h01);
    fork
      aer_send(a_virt(5, 4, 0));
      begin
        repeat (300) @(posedge clk);
        check("gated: no acknowledge", aer_in_req && !dut.busy);
        spi_wr(SPI_REG, REG_CTRL, 8'h00);
      end
    join
    settle();
    rd_neuron(5, w);
    check("after gate: vmem 5", lif_st(w).vmem == 8'd5);

    // ---- monitoring ----
    spi_wr(SPI_REG, REG_MON_NEUR, 5);
    spi_wr(SPI_REG, REG_CTRL, 8'h02);
    n_out0 = out_q.size();
    aer_send(a_virt(5, 1, 0)); settle();
    check("monitor byte = vmem 6", out_q.size() == n_out0 + 1 && out_q[n_out0] == 8'd6);
    spi_wr(SPI_REG, REG_CTRL, 8'h00);

    // ---- burst from the phenomenological neuron 2 ----
    n_out0 = out_q.size();
    aer_send(a_virt(2, 1, 0)); aer_send(a_virt(2, 1, 0)); settle();
    check("burst: 3 output spikes of neuron 2", out_q.size() == n_out0 + 3 &&
          out_q[n_out0] == 2 && out_q[n_out0+1] == 2 && out_q[n_out0+2] == 2);
    if (out_q.size() == n_out0 + 3) begin
      $display("burst output gaps: %0d %0d", out_t[n_out0+1] - out_t[n_out0], out_t[n_out0+2] - out_t[n_out0+1]);
      // Spike m leaves the scheduler on the (2m)-th timestep tick after the
      // packet (ISI field 1); ticks come every isi_period+1 = 401 cycles
      // from a free-running counter, so the third spike follows the first
      // by 3..4 timesteps; no two spikes are less than one timestep apart.
      check("burst spacing", out_t[n_out0+2] - out_t[n_out0] >= 3*401 &&
                             out_t[n_out0+2] - out_t[n_out0] <= 4*401 + 10 &&
                             out_t[n_out0+1] - out_t[n_out0] > 401 &&
                             out_t[n_out0+2] - out_t[n_out0+1] > 401);
    end
    rd_neuron(2, w);
    check("burst: neuron unlocked", w[STATE_LSB + STATE_W - 1] == 1'b0);

    // ---- many spikes at once: overflow and a slow output port ----
    ack_delay = 700;   // slower than a 512-cycle event: the scheduler must wait
    n_out0 = out_q.size();
    aer_send(a_spike(3)); settle();
    check("32 of 40 spikes kept", out_q.size() == n_out0 + 32);
    begin
      int okc = 1;
      for (int k = n_out0; k < out_q.size(); k++)
        if (out_q[k] < 64 || out_q[k] >= 104) okc = 0;
      check("output addresses 64..103", okc == 1);
    end

    // ---- every mechanism happened ----
    check("AER spike events",   c_ev[EV_SPIKE] >= 1);
    check("single events",      c_ev[EV_SINGLE] >= 1);
    check("virtual events",     c_ev[EV_VIRTUAL] >= 1);
    check("time ref events",    c_ev[EV_TREF] >= 1);
    check("bistability events", c_ev[EV_BISTAB] >= 1);
    check("SDSP up",            c_up >= 1);
    check("SDSP down",          c_down >= 1);
    check("drift up",           c_drift_up >= 1);
    check("drift down",         c_drift_dn >= 1);
    check("neuron spikes",      c_spike >= 1);
    check("recurrent events",   c_rec >= 1);
    check("burst packets",      c_burst >= 1);
    check("burst rotations",    c_rot >= 1);
    check("burst end",          c_bend >= 1);
    check("output stall",       c_stall >= 1);
    check("overflow",           c_ovf == 8);
    check("monitor output",     c_mon_out >= 1);
    check("event durations",    bad_len == 0);
    $display("counts: spike=%0d single=%0d virtual=%0d tref=%0d bistab=%0d up=%0d down=%0d drift+=%0d drift-=%0d",
             c_ev[EV_SPIKE], c_ev[EV_SINGLE], c_ev[EV_VIRTUAL], c_ev[EV_TREF], c_ev[EV_BISTAB],
             c_up, c_down, c_drift_up, c_drift_dn);
    $display("counts: neuron_spikes=%0d recurrent=%0d bursts=%0d rotations=%0d burst_end=%0d stall=%0d overflow=%0d monitor=%0d aer_out=%0d cycles=%0d",
             c_spike, c_rec, c_burst, c_rot, c_bend, c_stall, c_ovf, c_mon_out, out_q.size(), cyc);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (6000000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
