// odin: top level of the 256-neuron, 64k-synapse online-learning spiking
// neural network core.
//
// Blocks and their connections follow the paper's block diagram: AER input
// and output ports, an SPI slave for configuration, the controller with the
// global parameter bank, the neuron SRAM (256 x 128 bits) with the LIF and
// phenomenological update logic behind a per-neuron model multiplexer, the
// synapse SRAM (8192 x 32 bits) with the SDSP up/down registers and eight
// SDSP update circuits (one per synapse of a word), and the scheduler with
// its rotating FIFOs. Spikes produced by the neurons go to the scheduler,
// which feeds them back to the controller as neuron spike events (the
// crossbar's recurrent path) and, in standard mode, to the AER output.
//
// A synapse's mapping-table bit (bit 3 of its nibble) enables learning: it
// gates both the pre-synaptic SDSP update and the bistability drift.
//
// Clocking: one clock, clk, which stands for CLK_EXT; the chip's on-chip
// clock generator and the clock multiplexer in front of the core are not
// part of this RTL. rst_n is the active-low asynchronous reset (RST).
// Timing: a neuron spike event takes 512 cycles (256 SOPs of 2 cycles),
// so the peak rate is one SOP every two cycles.
module odin
  import odin_pkg::*;
(
  input  logic                clk,
  input  logic                rst_n,
  // SPI
  input  logic                sck,
  input  logic                mosi,
  output logic                miso,
  // AER input
  input  logic [AER_IN_W-1:0] aer_in_addr,
  input  logic                aer_in_req,
  output logic                aer_in_ack,
  // AER output
  output logic [NW-1:0]       aer_out_addr,
  output logic                aer_out_req,
  input  logic                aer_out_ack,
  // status
  output logic                sched_overflow
);
  aer_ev_t ev;
  logic    ev_valid, ev_ready;

  logic          sch_valid, sch_last, sch_pop, pkt_valid, sch_tick, sch_rotate;
  logic [NW-1:0] sch_addr;
  logic [23:0]   isi_period;
  pkt_t          pkt;

  logic [NW-1:0]      nu_addr;
  logic               nu_syn_ev, nu_sign, nu_time_ref, nu_burst_end, nu_spike, nu_up, nu_down;
  logic [2:0]         nu_weight;
  logic [NWORD_W-1:0] nu_word_next;
  pkt_t               nu_pkt;

  logic        regs_clear, regs_capture, sdsp_up, sdsp_down, syn_bistab;
  logic [2:0]  regs_slot;
  logic [7:0]  syn_spk_mask, up_vec, down_vec;
  logic [31:0] syn_word_next;

  logic                n_cs, n_we, s_cs, s_we;
  logic [NW-1:0]       n_addr;
  logic [NWORD_W-1:0]  n_wdata, n_wmask, n_rdata;
  logic [SADDR_W-1:0]  s_addr;
  logic [31:0]         s_wdata, s_wmask, s_rdata;

  logic          out_valid, out_ready;
  logic [NW-1:0] out_data;

  logic       spi_req_valid, spi_req_ready, spi_rd_valid;
  spi_req_t   spi_req;
  logic [7:0] spi_rd_data;
  logic       busy;

  aer_in u_aer_in (
    .clk, .rst_n, .aer_req(aer_in_req), .aer_addr(aer_in_addr), .aer_ack(aer_in_ack),
    .ev_valid, .ev, .ev_ready
  );

  aer_out u_aer_out (
    .clk, .rst_n, .out_valid, .out_data, .out_ready,
    .aer_req(aer_out_req), .aer_addr(aer_out_addr), .aer_ack(aer_out_ack)
  );

  spi_slave u_spi (
    .clk, .rst_n, .sck, .mosi, .miso,
    .req_valid(spi_req_valid), .req(spi_req), .req_ready(spi_req_ready),
    .rd_valid(spi_rd_valid), .rd_data(spi_rd_data)
  );

  controller u_ctrl (
    .clk, .rst_n,
    .ev_valid, .ev, .ev_ready,
    .sch_valid, .sch_addr, .sch_last, .sch_pop, .isi_period, .pkt_valid, .pkt,
    .nu_addr, .nu_syn_ev, .nu_weight, .nu_sign, .nu_time_ref, .nu_burst_end,
    .nu_word_next, .nu_spike, .nu_pkt, .nu_up, .nu_down,
    .regs_clear, .regs_capture, .regs_slot, .sdsp_up, .sdsp_down,
    .syn_spk_mask, .syn_bistab, .syn_word_next,
    .n_cs, .n_we, .n_addr, .n_wdata, .n_wmask, .n_rdata,
    .s_cs, .s_we, .s_addr, .s_wdata, .s_wmask, .s_rdata,
    .out_valid, .out_data, .out_ready,
    .spi_req_valid, .spi_req, .spi_req_ready, .spi_rd_valid, .spi_rd_data,
    .busy
  );

  scheduler u_sched (
    .clk, .rst_n, .isi_period,
    .push_valid(pkt_valid), .push_pkt(pkt),
    .out_valid(sch_valid), .out_addr(sch_addr), .out_last(sch_last), .out_pop(sch_pop),
    .overflow(sched_overflow), .tick(sch_tick), .rotate(sch_rotate)
  );

  neuron_sram u_nmem (
    .clk, .cs(n_cs), .we(n_we), .addr(n_addr), .wdata(n_wdata), .wmask(n_wmask), .rdata(n_rdata)
  );

  synapse_sram u_smem (
    .clk, .cs(s_cs), .we(s_we), .addr(s_addr), .wdata(s_wdata), .wmask(s_wmask), .rdata(s_rdata)
  );

  neuron_update u_nu (
    .word(n_rdata), .addr(nu_addr), .syn_ev(nu_syn_ev), .weight(nu_weight),
    .syn_sign(nu_sign), .time_ref(nu_time_ref), .burst_end(nu_burst_end),
    .word_next(nu_word_next), .spike(nu_spike), .pkt(nu_pkt), .up(nu_up), .down(nu_down)
  );

  sdsp_regs u_sdsp_regs (
    .clk, .rst_n, .clear(regs_clear), .capture(regs_capture), .slot(regs_slot),
    .up(sdsp_up), .down(sdsp_down), .up_vec, .down_vec
  );

  for (genvar k = 0; k < SYN_PER_W; k++) begin : g_syn
    logic [3:0] nib;
    logic [2:0] w_next;
    assign nib = s_rdata[4*k +: 4];
    sdsp_update u_sdsp (
      .up(up_vec[k]), .down(down_vec[k]),
      .spk_pre(syn_spk_mask[k] & nib[3]), .bistability(syn_bistab & nib[3]),
      .w(nib[2:0]), .w_next(w_next)
    );
    assign syn_word_next[4*k +: 4] = {nib[3], w_next};
  end
endmodule
