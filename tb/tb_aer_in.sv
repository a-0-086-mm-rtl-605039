// tb_aer_in: drives four-phase handshakes on the input AER port with
// random addresses of every event kind and checks the decoded event, that
// ACK waits for the controller's ev_ready, that the handshake completes,
// and that unused codes are acknowledged without producing an event.
module tb_aer_in;
  import odin_pkg::*;
  logic clk = 0, rst_n = 0;
  logic aer_req, aer_ack, ev_valid, ev_ready;
  logic [AER_IN_W-1:0] aer_addr;
  aer_ev_t ev;
  int checks = 0, failures = 0;

  aer_in dut (.*);
  always #5 clk = ~clk;

  task automatic check(input string what, input logic ok);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s addr=%h kind=%0d", what, aer_addr, ev.kind); end
  endtask

  initial begin
    aer_req = 0; aer_addr = '0; ev_ready = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 300; t++) begin
      automatic int k = t % 6;
      ev_kind_e exp_kind;
      automatic logic [7:0] hi = 8'($urandom), lo = 8'($urandom);
      unique case (k)
        0: begin aer_addr = {1'b1, hi, lo}; exp_kind = EV_SINGLE; end
        1: begin aer_addr = {1'b0, hi, 8'h00}; exp_kind = EV_SPIKE; end
        2: begin aer_addr = {1'b0, hi, 8'h01}; exp_kind = EV_TREF; end
        3: begin aer_addr = {1'b0, hi, 8'h02}; exp_kind = EV_BISTAB; end
        4: begin aer_addr = {1'b0, hi, 1'b1, lo[6:0]}; exp_kind = EV_VIRTUAL; end
        default: begin aer_addr = {1'b0, hi, 8'h05}; exp_kind = EV_NONE; end
      endcase
      #2 aer_req = 1;
      if (exp_kind != EV_NONE) begin
        automatic int g = 0;
        while (!ev_valid && g < 20) begin @(posedge clk); g++; end
        check("valid", ev_valid);
        check("kind", ev.kind == exp_kind);
        if (exp_kind == EV_SINGLE) check("single fields", ev.pre == hi && ev.post == lo);
        if (exp_kind == EV_SPIKE)  check("spike field", ev.pre == hi);
        if (exp_kind == EV_VIRTUAL) check("virtual fields", ev.post == hi && ev.weight == lo[2:0] && ev.sign == lo[3]);
        repeat ($urandom_range(0, 5)) @(posedge clk);
        check("ack waits", !aer_ack);
        @(negedge clk); ev_ready = 1; @(negedge clk); ev_ready = 0;
      end
      begin
        automatic int g = 0;
        while (!aer_ack && g < 20) begin @(posedge clk); g++; end
        check("ack", aer_ack);
      end
      #2 aer_req = 0;
      begin
        automatic int g = 0;
        while (aer_ack && g < 20) begin @(posedge clk); g++; end
        check("ack low", !aer_ack && !ev_valid);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
