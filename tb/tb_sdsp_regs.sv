// tb_sdsp_regs: random capture/clear sequences on the SDSP up/down
// registers, compared each cycle with a reference register file, including
// the same-cycle bypass of the slot being captured.
module tb_sdsp_regs;
  logic clk = 0, rst_n = 0;
  logic clear, capture, up, down;
  logic [2:0] slot;
  logic [7:0] up_vec, down_vec;
  logic [7:0] ru, rd, eu, ed;
  int checks = 0, failures = 0;

  sdsp_regs dut (.*);
  always #5 clk = ~clk;

  initial begin
    {clear, capture, up, down, slot} = '0;
    ru = '0; rd = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int c = 0; c < 2000; c++) begin
      @(negedge clk);
      clear   = ($urandom_range(0, 31) == 0);
      capture = $urandom_range(0, 1);
      slot    = 3'($urandom);
      up      = $urandom_range(0, 1);
      down    = $urandom_range(0, 1);
      #1;
      eu = ru; ed = rd;
      if (capture) begin eu[slot] = up; ed[slot] = down; end
      checks++;
      if (up_vec !== eu || down_vec !== ed) begin
        failures++;
        $display("FAIL cycle %0d: got %h/%h expected %h/%h", c, up_vec, down_vec, eu, ed);
      end
      @(posedge clk);
      if (clear) begin ru = '0; rd = '0; end
      else if (capture) begin ru[slot] = up; rd[slot] = down; end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
