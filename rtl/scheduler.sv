// scheduler: priority-ordered event queue between the neurons and the
// controller, built from rotating FIFOs so that bursts keep their
// inter-spike interval (ISI).
//
// A firing neuron pushes a 14-bit packet {addr, num, isi}. A single-spike
// packet (num = 0) goes to a 32-stage FIFO of 8-bit addresses. A burst
// packet (num > 0) is split by the burst packet decoder into num+1 spikes
// placed in the rotating 4-stage FIFOs of timesteps +0, +(isi+1),
// +2(isi+1), ...; a stage holds 9 bits, the address plus a flag on the
// last spike of the burst. 57 = 7*8+1 rotating FIFOs cover an 8-spike burst
// with the largest ISI. A local burst ISI counter produces a timestep tick
// every isi_period+1 clock cycles; on a tick the FIFO priorities rotate, so
// the FIFO of timestep +1 becomes the FIFO of timestep +0.
//
// Output: the single-spike FIFO always has priority; otherwise the head of
// the timestep +0 FIFO is offered. out_valid/out_addr/out_last are
// combinational from the queue heads; out_pop removes the head. Packets
// are accepted every cycle (push_valid has no back-pressure).
//
// From the paper: the packet format, the 32x8-bit single-spike FIFO, the
// 57 rotating 4x9-bit FIFOs, the burst decoder, the ISI counter, the
// priority of single spikes and the last-spike flag. This design's own
// choices: a tick is held pending while the timestep +0 FIFO still holds
// spikes (so no spike is rotated to the back), a packet that does not fit
// (single-spike FIFO full, or any target rotating FIFO full) is dropped
// whole and reported by a one-cycle 'overflow' pulse, and the ISI period is
// a 24-bit register value.
module scheduler
  import odin_pkg::*;
#(
  parameter int SPIKE_DEPTH = 32,
  parameter int NROT        = 57,
  parameter int ROT_DEPTH   = 4,
  parameter int ISI_W       = 24
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic [ISI_W-1:0] isi_period,
  input  logic             push_valid,
  input  pkt_t             push_pkt,
  output logic             out_valid,
  output logic [NW-1:0]    out_addr,
  output logic             out_last,
  input  logic             out_pop,
  output logic             overflow,
  output logic             tick,
  output logic             rotate
);
  localparam int SPW = $clog2(SPIKE_DEPTH);
  localparam int RW  = $clog2(ROT_DEPTH);
  localparam int BW  = $clog2(NROT);

  // Single-spike FIFO.
  logic [NW-1:0]  sp_mem [SPIKE_DEPTH];
  logic [SPW-1:0] sp_wp, sp_rp;
  logic [SPW:0]   sp_cnt;

  // Rotating FIFOs: {last, addr}.
  logic [NW:0]    rot_mem [NROT][ROT_DEPTH];
  logic [RW-1:0]  rot_wp  [NROT];
  logic [RW-1:0]  rot_rp  [NROT];
  logic [RW:0]    rot_cnt [NROT];
  logic [BW-1:0]  base, base_eff;

  logic [ISI_W-1:0] isi_cnt;
  logic             tick_pend;

  // Burst decoder outputs.
  logic [BW-1:0] tgt [8];
  logic [7:0]    tgt_en;
  logic          is_burst, fits, push_ok, pop_sp, pop_rot;
  logic [NROT-1:0] rot_wr, rot_rd;
  logic [NW:0]     rot_wdata [NROT];

  always_comb begin
    tick = (isi_cnt >= isi_period);
  end

  assign rotate   = (tick_pend || tick) && (rot_cnt[base] == '0);
  assign base_eff = rotate ? ((base == BW'(NROT-1)) ? '0 : base + 1'b1) : base;

  // Burst packet decoder: spike m of the burst goes to timestep m*(isi+1).
  always_comb begin
    is_burst = (push_pkt.num != 3'd0);
    fits     = 1'b1;
    for (int m = 0; m < 8; m++) begin
      int unsigned off;
      off       = m * (int'(push_pkt.isi) + 1) + int'(base_eff);
      if (off >= NROT) off = off - NROT;
      tgt[m]    = BW'(off);
      tgt_en[m] = is_burst && (m <= int'(push_pkt.num));
      if (tgt_en[m] && rot_cnt[tgt[m]] == (RW+1)'(ROT_DEPTH)) fits = 1'b0;
    end
    if (!is_burst) fits = (sp_cnt != (SPW+1)'(SPIKE_DEPTH));
    push_ok  = push_valid && fits;
    overflow = push_valid && !fits;
  end

  // Output selection: single spikes first, then timestep +0.
  always_comb begin
    pop_sp  = 1'b0;
    pop_rot = 1'b0;
    if (sp_cnt != '0) begin
      out_valid = 1'b1;
      out_addr  = sp_mem[sp_rp];
      out_last  = 1'b0;
      pop_sp    = out_pop;
    end else begin
      out_valid = (rot_cnt[base] != '0);
      out_addr  = rot_mem[base][rot_rp[base]][NW-1:0];
      out_last  = rot_mem[base][rot_rp[base]][NW];
      pop_rot   = out_pop && out_valid;
    end
  end

  // Per-FIFO write and read strobes of this cycle.
  always_comb begin
    for (int f = 0; f < NROT; f++) begin
      rot_wr[f]    = 1'b0;
      rot_wdata[f] = '0;
      for (int m = 0; m < 8; m++)
        if (push_ok && tgt_en[m] && tgt[m] == BW'(f)) begin
          rot_wr[f]    = 1'b1;
          rot_wdata[f] = {m == int'(push_pkt.num), push_pkt.addr};
        end
      rot_rd[f] = pop_rot && (base == BW'(f));
    end
  end

  // Queue storage (not reset).
  always_ff @(posedge clk) begin
    if (push_ok && !is_burst) sp_mem[sp_wp] <= push_pkt.addr;
    for (int f = 0; f < NROT; f++)
      if (rot_wr[f]) rot_mem[f][rot_wp[f]] <= rot_wdata[f];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      sp_wp     <= '0;
      sp_rp     <= '0;
      sp_cnt    <= '0;
      base      <= '0;
      isi_cnt   <= '0;
      tick_pend <= 1'b0;
      for (int f = 0; f < NROT; f++) begin
        rot_wp[f]  <= '0;
        rot_rp[f]  <= '0;
        rot_cnt[f] <= '0;
      end
    end else begin
      // Burst ISI counter.
      isi_cnt   <= tick ? '0 : isi_cnt + 1'b1;
      tick_pend <= (tick_pend || tick) && !rotate;
      base      <= base_eff;

      // Single-spike FIFO.
      if (push_ok && !is_burst) sp_wp <= sp_wp + 1'b1;
      if (pop_sp) sp_rp <= sp_rp + 1'b1;
      sp_cnt <= sp_cnt + (SPW+1)'(push_ok && !is_burst) - (SPW+1)'(pop_sp);

      // Rotating FIFOs.
      for (int f = 0; f < NROT; f++) begin
        if (rot_wr[f]) rot_wp[f] <= rot_wp[f] + 1'b1;
        if (rot_rd[f]) rot_rp[f] <= rot_rp[f] + 1'b1;
        rot_cnt[f] <= rot_cnt[f] + (RW+1)'(rot_wr[f]) - (RW+1)'(rot_rd[f]);
      end
    end
  end
endmodule
