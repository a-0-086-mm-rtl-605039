// spi_slave: three-wire SPI slave (SCK, MOSI, MISO) giving access to the
// global parameter registers, the neuron memory and the synapse memory.
//
// SCK and MOSI are sampled by the core clock through two-flip-flop
// synchronisers, so SCK must be much slower than the core clock (each SCK
// level must last at least three core cycles). SPI mode 0: the slave reads
// MOSI on rising SCK edges and changes MISO on falling edges, MSB first.
// There is no chip-select pin in the paper's pinout, so frames are counted
// from reset: every 32 SCK cycles form one frame
//     [31] 1: write, 0: read
//     [30:29] target: 0 global registers, 1 neuron memory, 2 synapse memory
//     [28:24] unused
//     [23:8] byte address: register index; {neuron, byte 0..15};
//            {synapse word (13 bits), byte 0..3}
//     [7:0]  write data
// A complete frame becomes one request to the controller (req_valid held
// until req_ready). Read data returns through rd_valid/rd_data into a
// register that MISO shifts out as bits [7:0] of every following frame
// (bits [31:8] are zero), so a read is answered one frame later.
// Only the pin list comes from the paper; the frame format is this
// design's choice.
module spi_slave
  import odin_pkg::*;
(
  input  logic     clk,
  input  logic     rst_n,
  input  logic     sck,
  input  logic     mosi,
  output logic     miso,
  output logic     req_valid,
  output spi_req_t req,
  input  logic     req_ready,
  input  logic     rd_valid,
  input  logic [7:0] rd_data
);
  logic [2:0]  sck_s;
  logic [1:0]  mosi_s;
  logic [4:0]  bit_cnt;
  logic [31:0] sr;
  logic [7:0]  rdata_q;
  logic        rise, fall;
  logic [31:0] frame;

  assign rise  = sck_s[1] && !sck_s[2];
  assign fall  = !sck_s[1] && sck_s[2];
  assign frame = {sr[30:0], mosi_s[1]};

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      sck_s     <= '0;
      mosi_s    <= '0;
      bit_cnt   <= '0;
      sr        <= '0;
      rdata_q   <= '0;
      miso      <= 1'b0;
      req_valid <= 1'b0;
      req       <= '0;
    end else begin
      sck_s  <= {sck_s[1:0], sck};
      mosi_s <= {mosi_s[0], mosi};
      if (rd_valid) rdata_q <= rd_data;
      if (req_valid && req_ready) req_valid <= 1'b0;
      if (rise) begin
        sr      <= frame;
        bit_cnt <= bit_cnt + 1'b1;
        if (bit_cnt == 5'd31) begin
          req_valid  <= 1'b1;
          req.write  <= frame[31];
          req.target <= spi_tgt_e'(frame[30:29]);
          req.addr   <= frame[23:8];
          req.wdata  <= frame[7:0];
        end
      end
      if (fall) miso <= (bit_cnt >= 5'd24) ? rdata_q[3'd7 - bit_cnt[2:0]] : 1'b0;
    end
  end
endmodule
