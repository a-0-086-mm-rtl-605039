// tb_sdsp_learning: on-line learning workload on the full-size core. One
// LIF neuron (1) has one plastic synapse from source 0. Source 0 spikes
// (AER neuron spike events), while a teacher drives the neuron through
// virtual synapse events. Time reference and bistability events come over
// AER as well. Four regimes of post-synaptic activity are run in turn, and
// each shows one part of the SDSP rule and its Calcium-based stop-learning:
//   silent     no post-synaptic spikes, Ca = 0 < theta_1: no SDSP change;
//              bistability pulls the weight (3) down to 0
//   LTP        one teacher spike per step, then the membrane is raised to
//              14 >= theta_m before the pre-synaptic spike, Ca = 1:
//              potentiation only, the weight climbs to 7 and stays there
//              through the bistability events (each pre-synaptic spike
//              then also fires the neuron, so Ca climbs and the change stops
//              at theta_3); ten time references without input follow to let Ca decay
//   LTD        one teacher spike per step, membrane 0 < theta_m at the
//              pre-synaptic spike, Ca = 1: depression only, weight to 0
//   saturated  three teacher spikes per step drive Ca to 7 >= theta_3:
//              no SDSP change once Ca has risen (after the first steps)
// Neuron 1: threshold 20, leak 127 per time reference (so every step
// starts from rest), theta_m 10, Ca window theta_1 = 1, theta_2 = 3,
// theta_3 = 6, Ca leak 1 per time reference. Each step: teacher events,
// then the pre-synaptic spike, then a time reference; a bistability event
// every 10 steps. The weight changes are counted at the synapse-memory
// write of word {0, 0}; weights are checked by SPI read-back.
module tb_sdsp_learning;
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
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

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
    repeat (4) @(posedge clk);
    spi_last = got[7:0];
  endtask
  task automatic spi_wr(input spi_tgt_e t, input int a, input int d);
    frame({1'b1, t, 5'd0, 16'(a), 8'(d)});
  endtask
  task automatic syn_weight(output logic [3:0] nib);
    frame({1'b0, SPI_SYN, 5'd0, 16'd0, 8'd0});
    frame({1'b0, SPI_NONE, 5'd0, 16'd0, 8'd0});
    nib = spi_last[7:4];
  endtask

  initial begin
    aer_out_ack = 0;
    forever begin
      @(posedge clk);
      if (aer_out_req) begin
        aer_out_ack <= 1;
        while (aer_out_req) @(posedge clk);
        aer_out_ack <= 0;
      end
    end
  end

  task automatic aer_send(input logic [16:0] a);
    @(negedge clk);
    aer_in_addr = a; aer_in_req = 1;
    while (!aer_in_ack) @(negedge clk);
    aer_in_req = 0;
    while (aer_in_ack) @(negedge clk);
    while (dut.busy || dut.sch_valid) @(negedge clk);
  endtask
  localparam logic [16:0] A_PRE  = {1'b0, 8'd0, 8'h00};
  localparam logic [16:0] A_TREF = {1'b0, 8'd0, 8'h01};
  localparam logic [16:0] A_BIST = {1'b0, 8'd0, 8'h02};
  localparam logic [16:0] A_TEACH = {1'b0, 8'd1, 4'h8, 1'b0, 3'd7};

  // SDSP changes of synapse 0 -> 1 (word 0, nibble 1)
  int n_up = 0, n_down = 0;
  always @(posedge clk)
    if (dut.s_cs && dut.s_we && dut.syn_spk_mask != 0 && dut.s_addr == '0) begin
      if (dut.syn_word_next[6:4] > dut.s_rdata[6:4]) n_up++;
      if (dut.syn_word_next[6:4] < dut.s_rdata[6:4]) n_down++;
    end

  function automatic logic [NWORD_W-1:0] lif_word(input int thr, input int leak, input int thm,
                                                  input int th1, input int th2, input int th3,
                                                  input int cal);
    lif_param_t p;
    p = '0;
    p.thr = 8'(thr); p.leak = 7'(leak); p.thr_mem = 8'(thm);
    p.ca_th1 = 3'(th1); p.ca_th2 = 3'(th2); p.ca_th3 = 3'(th3); p.ca_leak = 3'(cal);
    return NWORD_W'(p);
  endfunction

  task automatic run(input int steps, input int fires, input logic raise, input int skip,
                     output int ups, output int downs);
    int u0, d0;
    u0 = n_up; d0 = n_down;
    for (int s = 0; s < steps; s++) begin
      if (s == skip) begin u0 = n_up; d0 = n_down; end
      for (int f = 0; f < fires; f++) repeat (3) aer_send(A_TEACH);
      if (raise) repeat (2) aer_send(A_TEACH);
      aer_send(A_PRE);
      aer_send(A_TREF);
      if (s % 10 == 9) aer_send(A_BIST);
    end
    ups = n_up - u0; downs = n_down - d0;
  endtask

  initial begin
    int u, d;
    logic [3:0] nib;
    sck = 0; mosi = 0; aer_in_req = 0; aer_in_addr = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    repeat (5) @(posedge clk);
    for (int n = 0; n < N; n++) begin
      logic [NWORD_W-1:0] w;
      w = (n == 1) ? lif_word(20, 127, 10, 1, 3, 6, 1) : lif_word(255, 0, 0, 0, 0, 0, 0);
      for (int b = 0; b < 16; b++) spi_wr(SPI_NEUR, (n << 4) | b, w[8*b +: 8]);
    end
    for (int a = 0; a < 64; a++)          // rows 0 and 1
      for (int b = 0; b < 4; b++) spi_wr(SPI_SYN, (a << 2) | b, (a == 0 && b == 0) ? 8'hB0 : 8'h00);

    run(40, 0, 0, 0, u, d);
    syn_weight(nib);
    check("silent: no SDSP change", u == 0 && d == 0);
    check("silent: bistability drove 3 -> 0", nib == 4'h8);
    $display("silent    up=%0d down=%0d weight=%0d", u, d, nib[2:0]);

    run(40, 1, 1, 0, u, d);
    syn_weight(nib);
    check("LTP: potentiation only", u >= 7 && d == 0);
    check("LTP: weight 7", nib == 4'hF);
    $display("LTP       up=%0d down=%0d weight=%0d", u, d, nib[2:0]);

    repeat (10) aer_send(A_TREF);         // rest, no input: Calcium decays to 0
    run(40, 1, 0, 0, u, d);
    syn_weight(nib);
    check("LTD: depression only", d >= 7 && u == 0);
    check("LTD: weight 0", nib == 4'h8);
    $display("LTD       up=%0d down=%0d weight=%0d", u, d, nib[2:0]);

    spi_wr(SPI_SYN, 0, 8'hB0);            // weight back to 3
    run(40, 3, 1, 4, u, d);
    check("saturated Ca: learning stopped", u == 0 && d == 0);
    $display("saturated up=%0d down=%0d (after 4 steps)", u, d);

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
