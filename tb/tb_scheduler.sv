// tb_scheduler: checks the event scheduler.
//  * single-spike packets come out in order, without the last flag;
//  * the burst ISI counter ticks every isi_period+1 cycles;
//  * a 3-spike burst with ISI field 1 yields spikes at timesteps 0, 2, 4
//    (counted in FIFO rotations), the last one flagged;
//  * an 8-spike burst with ISI field 7 spans 56 rotations (57 FIFOs);
//  * single spikes take priority over pending burst spikes;
//  * the 33rd single spike without pops overflows the 32-stage FIFO.
// A concurrent assertion checks that pops only happen on valid output.
module tb_scheduler;
  import odin_pkg::*;
  logic clk = 0, rst_n = 0;
  logic [23:0] isi_period;
  logic push_valid, out_valid, out_last, out_pop, overflow, tick, rotate;
  pkt_t push_pkt;
  logic [NW-1:0] out_addr;
  int checks = 0, failures = 0;
  int rot_count = 0, cyc = 0, last_tick = -1;

  scheduler dut (.*);
  always #5 clk = ~clk;

  a_pop_valid: assert property (@(posedge clk) disable iff (!rst_n) out_pop |-> out_valid);

  always @(posedge clk) begin
    cyc++;
    if (rst_n && rotate) rot_count++;
    if (rst_n && tick) begin
      if (last_tick >= 0) begin
        checks++;
        if (cyc - last_tick != int'(isi_period) + 1) begin
          failures++; $display("FAIL tick spacing %0d", cyc - last_tick);
        end
      end
      last_tick = cyc;
    end
  end

  task automatic check(input string what, input logic ok);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s (t=%0t)", what, $time); end
  endtask

  task automatic push(input int a, input int num, input int isi);
    @(negedge clk);
    push_valid = 1; push_pkt = '{addr: 8'(a), num: 3'(num), isi: 3'(isi)};
    @(negedge clk);
    push_valid = 0;
  endtask

  // Wait for an output event, pop it and return address, last flag and the
  // rotation count at which it was taken.
  task automatic pop(output int a, output bit l, output int r);
    int guard = 0;
    @(negedge clk);
    while (!out_valid && guard < 5000) begin @(negedge clk); guard++; end
    a = int'(out_addr); l = out_last; r = rot_count;
    out_pop = 1;
    @(negedge clk);
    out_pop = 0;
  endtask

  initial begin
    int a, r0, r;
    bit l;
    push_valid = 0; push_pkt = '0; out_pop = 0; isi_period = 24'd9;
    repeat (3) @(posedge clk);
    rst_n = 1;
    // single spikes
    push(5, 0, 0); push(6, 0, 0); push(7, 0, 0);
    for (int k = 0; k < 3; k++) begin
      pop(a, l, r);
      check("single order", a == 5 + k && !l);
    end
    // 3-spike burst, ISI field 1
    push(8'h42, 2, 1);
    pop(a, l, r0);
    check("burst first", a == 8'h42 && !l);
    pop(a, l, r);
    check("burst second", a == 8'h42 && !l && r - r0 == 2);
    pop(a, l, r);
    check("burst last", a == 8'h42 && l && r - r0 == 4);
    // 8-spike burst, ISI field 7, with a single spike pushed meanwhile
    push(8'h11, 7, 7);
    pop(a, l, r0);
    check("long burst first", a == 8'h11 && !l);
    push(8'h99, 0, 0);
    pop(a, l, r);
    check("single priority", a == 8'h99 && r == r0);
    for (int k = 1; k < 8; k++) begin
      pop(a, l, r);
      check("long burst spacing", a == 8'h11 && r - r0 == 8 * k && (l == (k == 7)));
    end
    // overflow of the single-spike FIFO
    for (int k = 0; k < 32; k++) begin
      @(negedge clk); push_valid = 1; push_pkt = '{addr: 8'(k), num: 3'd0, isi: 3'd0};
      #1; check("no overflow", !overflow);
    end
    @(negedge clk); push_pkt.addr = 8'hEE; #1;
    check("overflow", overflow);
    @(negedge clk); push_valid = 0;
    for (int k = 0; k < 32; k++) begin
      pop(a, l, r);
      check("drain", a == k);
    end
    @(negedge clk);
    check("empty", !out_valid);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
