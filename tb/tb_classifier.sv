// tb_classifier: the 10-neuron, 256-input single-layer classifier workload
// (a 16x16-pixel image, one input per pixel, one LIF output neuron per
// class) run on the full-size core with a rank-order style readout: the
// first output neuron to fire gives the class.
//
// No image data set is read: ten random 16x16 class templates are drawn
// with $urandom (pixel on with probability 3/8, the top image row always
// off, as in a blank border). The weight from pixel p to output neuron c
// is 3 where template c has p on, else 0 (3-bit weights, learning off).
// Outputs are neurons 0..9, so their own spikes re-enter through rows
// 0..9, which are top-row pixels and carry no weight. Every other synapse
// word is cleared over SPI, so the whole 32 kB synapse memory is written
// (32768 SPI frames), as is every neuron record.
//
// Each test image is a template with 8% of its pixels flipped. Its on
// pixels are sent as AER neuron spike events in random order until an
// output spike appears on the AER output; the output neurons are then
// reset over SPI. Checked: the synapse memory holds the intended weights
// (read hierarchically), at least 18 of 20 images are classified as
// their template, every presented event takes 512 cycles, and no image
// ends without a decision.
module tb_classifier;
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
  task automatic wr_neuron(input int n, input logic [NWORD_W-1:0] w);
    for (int b = 0; b < 16; b++) spi_wr(SPI_NEUR, (n << 4) | b, w[8*b +: 8]);
  endtask

  // AER output: record the first address seen since the last clear
  int first_out = -1;
  initial begin
    aer_out_ack = 0;
    forever begin
      @(posedge clk);
      if (aer_out_req && !aer_out_ack) begin
        if (first_out < 0) first_out = aer_out_addr;
        aer_out_ack <= 1;
        while (aer_out_req) @(posedge clk);
        aer_out_ack <= 0;
      end
    end
  end

  int bad_len = 0, cur_len = 0;
  logic counting = 0;
  always @(posedge clk) begin
    if (dut.u_ctrl.take_ev) begin counting <= 1; cur_len <= 0; end
    else if (dut.busy && counting) cur_len <= cur_len + 1;
    else if (counting && !dut.busy) begin
      counting <= 0;
      if (cur_len != 512) bad_len++;
    end
  end

  task automatic aer_send(input logic [16:0] a);
    @(negedge clk);
    aer_in_addr = a; aer_in_req = 1;
    while (!aer_in_ack) @(negedge clk);
    aer_in_req = 0;
    while (aer_in_ack) @(negedge clk);
  endtask

  function automatic logic [NWORD_W-1:0] lif_word(input int thr);
    lif_param_t p;
    p = '0; p.thr = 8'(thr);
    return NWORD_W'(p);
  endfunction

  logic [255:0] tmpl [10];

  initial begin
    int correct = 0, undecided = 0;
    sck = 0; mosi = 0; aer_in_req = 0; aer_in_addr = '0;
    for (int c = 0; c < 10; c++)
      for (int p = 0; p < 256; p++) tmpl[c][p] = (p >= 16) && ($urandom_range(0, 7) < 3);
    repeat (3) @(posedge clk);
    rst_n = 1;
    repeat (5) @(posedge clk);

    for (int n = 0; n < N; n++) wr_neuron(n, lif_word(n < 10 ? 120 : 255));
    for (int i = 0; i < N; i++)
      for (int k = 0; k < 32; k++)
        for (int b = 0; b < 4; b++) begin
          logic [7:0] v;
          v = '0;
          for (int h = 0; h < 2; h++) begin
            int j;
            j = 8*k + 2*b + h;
            if (j < 10 && tmpl[j][i]) v[4*h +: 4] = 4'd3;
          end
          spi_wr(SPI_SYN, (((i << 5) | k) << 2) | b, v);
        end

    begin
      int bad = 0;
      for (int i = 0; i < N; i++)
        for (int j = 0; j < 10; j++)
          if (dut.u_smem.mem[{8'(i), 5'(j/8)}][4*(j%8) +: 4] != (tmpl[j][i] ? 4'd3 : 4'd0)) bad++;
      check("synapse memory loaded", bad == 0);
    end
    for (int t = 0; t < 20; t++) begin
      automatic int cls;
      automatic int order[$] = {};
      automatic logic [255:0] img;
      cls = t % 10;
      img = tmpl[cls];
      for (int p = 16; p < 256; p++) if ($urandom_range(0, 99) < 8) img[p] = ~img[p];
      for (int p = 0; p < 256; p++) if (img[p]) order.push_back(p);
      order.shuffle();
      first_out = -1;
      foreach (order[k]) begin
        aer_send({1'b0, 8'(order[k]), 8'h00});
        while (dut.busy || dut.sch_valid) @(posedge clk);
        repeat (20) @(posedge clk);
        if (first_out >= 0) break;
      end
      if (first_out < 0) undecided++;
      else if (first_out == cls) correct++;
      $display("image %0d class %0d -> %0d", t, cls, first_out);
      for (int n = 0; n < 10; n++) wr_neuron(n, lif_word(120));
    end
    check("accuracy >= 18/20", correct >= 18);
    check("every image decided", undecided == 0);
    check("events take 512 cycles", bad_len == 0);
    $display("correct %0d of 20", correct);
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
