// tb_synapse_sram: fills the 8192 x 32-bit synapse memory, then runs random
// masked writes and reads against a reference array; also checks that the
// read data is held while no read is issued (writes and idle cycles).
module tb_synapse_sram;
  localparam int WORDS = 8192, WIDTH = 32;
  logic clk = 0;
  logic cs, we;
  logic [$clog2(WORDS)-1:0] addr;
  logic [WIDTH-1:0] wdata, wmask, rdata, last_rd;
  logic [WIDTH-1:0] ref_mem [WORDS];
  int checks = 0, failures = 0;

  synapse_sram dut (.*);
  always #5 clk = ~clk;

  function automatic logic [WIDTH-1:0] rnd();
    logic [WIDTH-1:0] r;
    for (int k = 0; k < WIDTH / 32; k++) r[32*k +: 32] = $urandom;
    return r;
  endfunction

  initial begin
    cs = 0; we = 0; addr = '0; wdata = '0; wmask = '1;
    for (int a = 0; a < WORDS; a++) begin
      @(negedge clk);
      cs = 1; we = 1; addr = a[$clog2(WORDS)-1:0]; wdata = rnd(); wmask = '1;
      ref_mem[a] = wdata;
    end
    for (int c = 0; c < 4000; c++) begin
      @(negedge clk);
      cs = ($urandom_range(0, 7) != 0); we = $urandom_range(0, 1);
      addr = $clog2(WORDS)'($urandom); wdata = rnd(); wmask = rnd();
      @(posedge clk); #1;
      if (cs && we) ref_mem[addr] = (ref_mem[addr] & ~wmask) | (wdata & wmask);
      if (cs && !we) last_rd = ref_mem[addr];
      if (c > 0 || (cs && !we)) begin
        checks++;
        if (rdata !== last_rd) begin
          failures++;
          $display("FAIL cycle %0d addr %0d", c, addr);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (40000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
