// tb_spi_slave: bit-bangs 32-bit SPI frames (mode 0, SCK at 1/8 of the
// core clock) and checks the decoded requests; plays the controller by
// answering each read with a known byte and checks that the byte is shifted
// out on MISO as bits [7:0] of the next frame.
module tb_spi_slave;
  import odin_pkg::*;
  logic clk = 0, rst_n = 0;
  logic sck, mosi, miso, req_valid, req_ready, rd_valid;
  logic [7:0] rd_data;
  spi_req_t req;
  int checks = 0, failures = 0;

  spi_slave dut (.*);
  always #5 clk = ~clk;

  task automatic check(input string what, input logic ok);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  task automatic frame(input logic [31:0] f, output logic [31:0] got);
    for (int b = 31; b >= 0; b--) begin
      mosi = f[b];
      repeat (4) @(posedge clk);
      sck = 1; got[b] = miso;
      repeat (4) @(posedge clk);
      sck = 0;
    end
    repeat (6) @(posedge clk);
  endtask

  initial begin
    logic [31:0] f, got;
    logic [7:0] prev;
    sck = 0; mosi = 0; req_ready = 0; rd_valid = 0; rd_data = '0;
    prev = 8'h00;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 40; t++) begin
      f = {1'($urandom), 2'($urandom_range(0, 2)), 5'd0, 16'($urandom), 8'($urandom)};
      frame(f, got);
      check("miso data", got == {24'd0, prev});
      check("req valid", req_valid);
      check("req fields", req.write == f[31] && req.target == spi_tgt_e'(f[30:29]) &&
                          req.addr == f[23:8] && req.wdata == f[7:0]);
      @(negedge clk); req_ready = 1; @(negedge clk); req_ready = 0;
      check("req taken", !req_valid);
      if (!f[31]) begin
        rd_valid = 1; rd_data = 8'($urandom); prev = rd_data;
        @(negedge clk); rd_valid = 0;
      end
    end
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
