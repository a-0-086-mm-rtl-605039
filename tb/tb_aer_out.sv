// tb_aer_out: offers random bytes to the output AER port and plays the
// receiver with random ACK delays; checks that each byte appears on ADDR
// with REQ, that REQ falls only after ACK, that the port stays busy until
// ACK has fallen, and that no byte is lost or repeated.
module tb_aer_out;
  import odin_pkg::*;
  logic clk = 0, rst_n = 0;
  logic out_valid, out_ready, aer_req, aer_ack;
  logic [NW-1:0] out_data, aer_addr;
  int checks = 0, failures = 0;
  logic [7:0] sent [$];

  aer_out dut (.*);
  always #5 clk = ~clk;

  task automatic check(input string what, input logic ok);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  // receiver
  initial begin
    aer_ack = 0;
    forever begin
      @(posedge aer_req);
      repeat ($urandom_range(1, 6)) @(posedge clk);
      check("data", sent.size() > 0 && aer_addr == sent[0]);
      if (sent.size() > 0) void'(sent.pop_front());
      aer_ack = 1;
      @(negedge aer_req);
      check("busy during ack", !out_ready);
      repeat ($urandom_range(1, 6)) @(posedge clk);
      aer_ack = 0;
    end
  end

  initial begin
    out_valid = 0; out_data = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 200; t++) begin
      @(negedge clk);
      out_valid = 1; out_data = 8'($urandom);
      while (!out_ready) @(negedge clk);
      sent.push_back(out_data);
      @(negedge clk);
      out_valid = 0;
      check("req raised", aer_req);
    end
    repeat (40) @(posedge clk);
    check("all delivered", sent.size() == 0 && !aer_req);
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
