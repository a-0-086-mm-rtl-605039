// neuron_sram: neuron state and parameter memory, 256 words of 128 bits
// (4 kB), single port.
//
// Stands for the single-port foundry SRAM macro of the chip, written as an
// array so that it simulates and synthesises anywhere. One access per
// cycle: with cs high and we low the word at addr appears on rdata after
// the clock edge; with cs and we high the bits of wdata selected by wmask
// are written. rdata keeps the last read word until the next read, as the
// output latch of a foundry SRAM does. Contents are not reset.
module neuron_sram #(
  parameter int WORDS = 256,
  parameter int WIDTH = 128
) (
  input  logic                     clk,
  input  logic                     cs,
  input  logic                     we,
  input  logic [$clog2(WORDS)-1:0] addr,
  input  logic [WIDTH-1:0]         wdata,
  input  logic [WIDTH-1:0]         wmask,
  output logic [WIDTH-1:0]         rdata
);
  logic [WIDTH-1:0] mem [WORDS];

  always_ff @(posedge clk) begin
    if (cs) begin
      if (we) mem[addr] <= (mem[addr] & ~wmask) | (wdata & wmask);
      else    rdata     <= mem[addr];
    end
  end
endmodule
