// tb_controller: checks the controller's sequencing with simple memory
// models and a stand-in neuron update (new record = old record + 1; spike
// when the low byte of the record read is 8'h10). Checked:
//  * a neuron spike event takes 512 cycles: 256 neuron reads and writes in
//    address order, 32 synapse reads {i, k} on the first SOP of each group
//    of eight and 32 synapse writes on the eighth (paper Fig. 3);
//  * time reference events sweep all neurons with time_ref; bistability
//    events read and write all 8192 synapse words in 16384 cycles;
//  * single-synapse and virtual synapse events take one SOP; the former
//    writes only its synapse's nibble, the latter uses the event's weight
//    and touches no synapse;
//  * scheduler events win over AER events, are forwarded to the AER
//    output, and wait while that port is busy (AER events pass meanwhile);
//  * burst_end is raised on the source neuron's SOP of a last-spike event;
//  * neuron spikes become scheduler packets;
//  * SPI register, neuron byte and synapse byte writes and reads.
module tb_controller;
  import odin_pkg::*;
  logic clk = 0, rst_n = 0;
  logic ev_valid, ev_ready, sch_valid, sch_last, sch_pop, pkt_valid;
  aer_ev_t ev;
  logic [NW-1:0] sch_addr, nu_addr;
  logic [23:0] isi_period;
  pkt_t pkt, nu_pkt;
  logic nu_syn_ev, nu_sign, nu_time_ref, nu_burst_end, nu_spike, nu_up, nu_down;
  logic [2:0] nu_weight;
  logic [NWORD_W-1:0] nu_word_next;
  logic regs_clear, regs_capture, sdsp_up, sdsp_down, syn_bistab;
  logic [2:0] regs_slot;
  logic [7:0] syn_spk_mask;
  logic [31:0] syn_word_next;
  logic n_cs, n_we, s_cs, s_we;
  logic [NW-1:0] n_addr;
  logic [NWORD_W-1:0] n_wdata, n_wmask, n_rdata;
  logic [SADDR_W-1:0] s_addr;
  logic [31:0] s_wdata, s_wmask, s_rdata;
  logic out_valid, out_ready, spi_req_valid, spi_req_ready, spi_rd_valid, busy;
  logic [NW-1:0] out_data;
  spi_req_t spi_req;
  logic [7:0] spi_rd_data;
  int checks = 0, failures = 0;

  controller dut (.*);
  always #5 clk = ~clk;

  // memory models
  logic [NWORD_W-1:0] nmem [N];
  logic [31:0] smem [8192];
  always_ff @(posedge clk) begin
    if (n_cs) begin
      if (n_we) nmem[n_addr] <= (nmem[n_addr] & ~n_wmask) | (n_wdata & n_wmask);
      else n_rdata <= nmem[n_addr];
    end
    if (s_cs) begin
      if (s_we) smem[s_addr] <= (smem[s_addr] & ~s_wmask) | (s_wdata & s_wmask);
      else s_rdata <= smem[s_addr];
    end
  end
  assign nu_word_next  = n_rdata + 1'b1;
  assign nu_spike      = (n_rdata[7:0] == 8'h10);
  assign nu_pkt        = '{addr: nu_addr, num: 3'd0, isi: 3'd0};
  assign nu_up         = n_rdata[0];
  assign nu_down       = n_rdata[1];
  assign syn_word_next = ~s_rdata;

  // activity monitor
  int n_rd, n_wr, s_rd, s_wr, n_pkt, n_tref, n_bend, cyc_busy, n_out, bad_order;
  int exp_j;
  logic [7:0] last_bend;
  always @(posedge clk) if (rst_n) begin
    if (busy) cyc_busy++;
    if (n_cs && !n_we && busy) begin
      n_rd++;
      if (n_addr != 8'(exp_j)) bad_order++;
      exp_j++;
    end
    if (n_cs && n_we && busy) n_wr++;
    if (s_cs && !s_we) s_rd++;
    if (s_cs && s_we) s_wr++;
    if (pkt_valid) n_pkt++;
    if (nu_time_ref) n_tref++;
    if (nu_burst_end) begin n_bend++; last_bend = nu_addr; end
    if (out_valid) n_out++;
  end

  task automatic clear_mon(input int j0 = 0);
    n_rd = 0; n_wr = 0; s_rd = 0; s_wr = 0; n_pkt = 0; n_tref = 0; n_bend = 0;
    cyc_busy = 0; n_out = 0; bad_order = 0; exp_j = j0;
  endtask

  task automatic check(input string what, input logic ok);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL %s: nrd=%0d nwr=%0d srd=%0d swr=%0d pkt=%0d tref=%0d bend=%0d busy=%0d out=%0d order=%0d",
               what, n_rd, n_wr, s_rd, s_wr, n_pkt, n_tref, n_bend, cyc_busy, n_out, bad_order);
    end
  endtask

  task automatic aer_event(input aer_ev_t e);
    @(negedge clk);
    ev = e; ev_valid = 1; #1;
    while (!ev_ready) @(negedge clk);
    @(negedge clk);
    ev_valid = 0;
    while (busy) @(negedge clk);
    @(negedge clk);
  endtask

  task automatic spi(input logic wr, input spi_tgt_e tgt, input int addr, input int data,
                     output logic [7:0] rd);
    @(negedge clk);
    spi_req = '{write: wr, target: tgt, addr: 16'(addr), wdata: 8'(data)};
    spi_req_valid = 1; #1;
    while (!spi_req_ready) @(negedge clk);
    if (spi_rd_valid) rd = spi_rd_data;
    @(negedge clk);
    spi_req_valid = 0;
    if (spi_rd_valid) rd = spi_rd_data;
  endtask

  initial begin
    logic [7:0] rd;
    logic [NWORD_W-1:0] snap5;
    ev_valid = 0; ev = '0; sch_valid = 0; sch_addr = '0; sch_last = 0; out_ready = 1;
    spi_req_valid = 0; spi_req = '0;
    for (int a = 0; a < N; a++) nmem[a] = NWORD_W'(a);     // neuron 16 fires once
    for (int a = 0; a < 8192; a++) smem[a] = 32'(a * 7);
    repeat (3) @(posedge clk);
    rst_n = 1;

    // SPI accesses
    spi(1, SPI_REG, 3, 8'h2A, rd); spi(0, SPI_REG, 3, 0, rd);
    check("reg readback", rd == 8'h2A && isi_period == 24'h2A);
    spi(1, SPI_NEUR, 16'h0523, 8'hC3, rd);
    check("neuron byte write", nmem[8'h52][31:24] == 8'hC3 && nmem[8'h52][23:0] == 24'h52);
    spi(0, SPI_NEUR, 16'h0523, 0, rd);
    check("neuron byte read", rd == 8'hC3);
    spi(1, SPI_SYN, 16'h0013, 8'h5A, rd);
    spi(0, SPI_SYN, 16'h0013, 0, rd);
    check("synapse byte", rd == 8'h5A && smem[4][31:24] == 8'h5A);
    spi(1, SPI_REG, REG_SIGN_0, 8'h20, rd);   // source 5 inhibitory

    // neuron spike event from AER, source 5
    clear_mon();
    snap5 = nmem[5];
    aer_event('{kind: EV_SPIKE, pre: 8'd5, post: 8'd0, weight: 3'd0, sign: 1'b0});
    check("spike 512 cycles", cyc_busy == 512);
    check("spike neuron accesses", n_rd == 256 && n_wr == 256 && bad_order == 0);
    check("spike synapse accesses", s_rd == 32 && s_wr == 32);
    check("spike packet", n_pkt == 1);
    check("neuron written", nmem[5] == snap5 + 1 && nmem[200] == NWORD_W'(201));
    check("synapse word written", smem[{8'd5, 5'd3}] == ~(32'({8'd5, 5'd3}) * 7));

    // time reference
    clear_mon();
    aer_event('{kind: EV_TREF, pre: 8'd0, post: 8'd0, weight: 3'd0, sign: 1'b0});
    check("tref", cyc_busy == 512 && n_tref == 256 && s_rd == 0 && s_wr == 0);

    // single synapse 9 -> 13
    clear_mon(13);
    begin
      logic [31:0] w_before;
      w_before = smem[{8'd9, 5'd1}];
      aer_event('{kind: EV_SINGLE, pre: 8'd9, post: 8'd13, weight: 3'd0, sign: 1'b0});
      check("single", cyc_busy == 2 && n_rd == 1 && n_wr == 1 && s_rd == 1 && s_wr == 1);
      check("single nibble", smem[{8'd9, 5'd1}] == ((w_before & ~32'h00F0_0000) | (~w_before & 32'h00F0_0000)));
    end

    // virtual synapse
    clear_mon(40);
    aer_event('{kind: EV_VIRTUAL, pre: 8'd0, post: 8'd40, weight: 3'd6, sign: 1'b1});
    check("virtual", cyc_busy == 2 && n_rd == 1 && n_wr == 1 && s_rd == 0 && s_wr == 0);

    // bistability
    clear_mon();
    aer_event('{kind: EV_BISTAB, pre: 8'd0, post: 8'd0, weight: 3'd0, sign: 1'b0});
    check("bistab", cyc_busy == 16384 && s_rd == 8192 && s_wr == 8192 && n_rd == 0);

    // scheduler priority and forwarding, burst end on source 7
    clear_mon();
    @(negedge clk);
    sch_valid = 1; sch_addr = 8'd7; sch_last = 1;
    ev = '{kind: EV_TREF, pre: 8'd0, post: 8'd0, weight: 3'd0, sign: 1'b0}; ev_valid = 1;
    #1 check("scheduler first", sch_pop && !ev_ready && out_valid && out_data == 8'd7);
    @(negedge clk); sch_valid = 0;
    while (busy) @(negedge clk);
    check("burst end", n_bend == 1 && last_bend == 8'd7);
    while (!ev_ready) @(negedge clk);
    @(negedge clk); ev_valid = 0;
    while (busy) @(negedge clk);

    // output port busy: the scheduler event stalls, an AER event passes
    clear_mon();
    out_ready = 0; sch_valid = 1; sch_addr = 8'd3; sch_last = 0;
    ev = '{kind: EV_VIRTUAL, pre: 8'd0, post: 8'd1, weight: 3'd1, sign: 1'b0}; ev_valid = 1;
    #1 check("stall", !sch_pop && ev_ready);
    @(negedge clk); ev_valid = 0;
    repeat (10) @(negedge clk);
    check("still stalled", !sch_pop && n_out == 0);
    out_ready = 1; #1;
    check("resume", sch_pop);
    @(negedge clk); sch_valid = 0;
    while (busy) @(negedge clk);

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
