// tb_izh_behaviours: runs several Izhikevich-type firing behaviours on the
// full-size core, one phenomenological neuron per behaviour, all driven by
// the same stimulus over AER and observed on the AER output:
//   neuron 10  tonic spiking      threshold 3: one spike every 3 steps
//   neuron 11  phasic spiking     'phasic': one spike per stimulation episode
//   neuron 12  tonic bursting     bursts of 3 spikes (burst_num 2)
//   neuron 13  spike latency      'latency' 3: each spike comes after a delay
//   neuron 14  rebound spike      inhibitory input, then a spike when it ends
// Every neuron uses accumulator depth 0, so each unit of input is one
// membrane step. The stimulus is 24 steps of one virtual synapse event
// (weight 1; inhibitory for neuron 14) per neuron followed by a neuron
// time reference, then 6 steps with time references only. The rows of the
// neurons used are cleared so their own spikes have no effect.
// Checked: spike counts (tonic 8, phasic 1, bursting whole bursts of 3,
// latency fewer than tonic, rebound exactly
// 1 and only after the inhibition stops) and that the latency neuron's
// first spike comes 2 to 3 steps after the tonic neuron's.
module tb_izh_behaviours;
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

  task automatic frame(input logic [31:0] f);
    for (int b = 31; b >= 0; b--) begin
      mosi = f[b];
      repeat (3) @(posedge clk);
      sck = 1;
      repeat (3) @(posedge clk);
      sck = 0;
    end
    repeat (4) @(posedge clk);
  endtask
  task automatic spi_wr(input spi_tgt_e t, input int a, input int d);
    frame({1'b1, t, 5'd0, 16'(a), 8'(d)});
  endtask

  int step = 0;
  int cnt [N];
  int first [N];
  int last_step [N];
  initial begin
    aer_out_ack = 0;
    forever begin
      @(posedge clk);
      if (aer_out_req) begin
        if (cnt[aer_out_addr] == 0) first[aer_out_addr] = step;
        cnt[aer_out_addr]++;
        last_step[aer_out_addr] = step;
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
    while (dut.busy || dut.sch_valid || aer_out_req || aer_out_ack) @(negedge clk);
  endtask

  function automatic logic [NWORD_W-1:0] izh(input int kind);
    izh_param_t p;
    logic [NWORD_W-1:0] w;
    p = '0;
    p.thr = 3'd3;
    case (kind)
      11: p.phasic = 1'b1;
      12: begin p.burst_num = 3'd2; p.burst_isi = 3'd0; end
      13: p.latency = 3'd3;
      14: p.rebound = 1'b1;
      default: ;
    endcase
    w = NWORD_W'(p);
    w[MODEL_BIT] = 1'b1;
    return w;
  endfunction

  initial begin
    sck = 0; mosi = 0; aer_in_req = 0; aer_in_addr = '0;
    foreach (cnt[k]) begin cnt[k] = 0; first[k] = -1; last_step[k] = -1; end
    repeat (3) @(posedge clk);
    rst_n = 1;
    repeat (5) @(posedge clk);
    for (int n = 0; n < N; n++) begin
      logic [NWORD_W-1:0] w;
      lif_param_t q;
      q = '0; q.thr = 8'd255;
      w = (n >= 10 && n <= 14) ? izh(n) : NWORD_W'(q);
      for (int b = 0; b < 16; b++) spi_wr(SPI_NEUR, (n << 4) | b, w[8*b +: 8]);
    end
    for (int r = 10; r <= 14; r++)
      for (int a = 0; a < 32; a++)
        for (int b = 0; b < 4; b++) spi_wr(SPI_SYN, (((r << 5) | a) << 2) | b, 0);

    for (step = 0; step < 30; step++) begin
      if (step < 24)
        for (int n = 10; n <= 14; n++)
          aer_send({1'b0, 8'(n), 4'h8, (n == 14), 3'd1});
      aer_send({1'b0, 8'd0, 8'h01});
    end

    $display("spikes: tonic %0d phasic %0d bursting %0d latency %0d rebound %0d",
             cnt[10], cnt[11], cnt[12], cnt[13], cnt[14]);
    $display("first spike steps: tonic %0d latency %0d rebound %0d", first[10], first[13], first[14]);
    check("tonic spiking: 8 spikes", cnt[10] == 8);
    check("phasic spiking: 1 spike", cnt[11] == 1);
    check("tonic bursting: whole bursts", cnt[12] >= 6 && cnt[12] % 3 == 0);
    check("latency: delayed spikes", cnt[13] >= 1 && cnt[13] < cnt[10]);
    check("latency: first spike 2..3 steps late", first[13] - first[10] >= 2 && first[13] - first[10] <= 3);
    check("rebound: one spike after the inhibition", cnt[14] == 1 && first[14] >= 24);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (5000000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
