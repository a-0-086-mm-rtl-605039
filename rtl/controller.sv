// controller: event controller and global parameter bank.
//
// Emulates the 256x256 crossbar by time multiplexing: each event is turned
// into a sequence of synaptic operations (SOPs), two clock cycles each:
//   cycle R  the record of destination neuron j is read from the neuron
//            SRAM; when j is the first of a group of eight, the synapse
//            SRAM word {i, j/8} (synapses i->j..j+7) is read as well;
//   cycle W  the neuron update logic turns the record, the 3-bit weight of
//            synapse i->j and the sign of source i into the new record,
//            which is written back; the neuron's SDSP up/down conditions
//            are captured; after the eighth neuron of a group the eight
//            updated synapses are written back in one word.
// Events and their SOPs:
//   neuron spike (from the scheduler or AER): j = 0..255, 512 cycles;
//   single synapse i->j: one SOP, only synapse i->j is updated;
//   virtual synapse: one SOP with the event's weight, no synapse access;
//   neuron time reference: j = 0..255 with time_ref, 512 cycles;
//   bistability time reference: all 8192 synapse words are read and
//   written back through the bistability logic, 16384 cycles.
// A firing neuron's packet is pushed to the scheduler in cycle W. While a
// spike event taken from the scheduler carries the last-spike flag of a
// burst, the SOP on the source neuron itself asserts burst_end to unlock it.
//
// Arbitration in the idle state: SPI memory requests first, then the
// scheduler (internal events; in standard mode the event's address is also
// sent to the AER output, and the controller waits while that port is
// busy), then the AER input. Register accesses over SPI are served at once
// in any state. Setting CTRL[0] (gate) stops event processing so that the
// memories can be configured.
// Monitoring mode (CTRL[1]): no spike addresses are sent; instead, each
// time neuron MON_NEUR is updated, the low byte of its state is sent
// (CTRL[2] = 0), or the new value of synapse MON_PRE -> MON_NEUR whenever
// that synapse is processed (CTRL[2] = 1). Monitoring bytes are dropped
// while the output port is busy.
//
// From the paper: the two-cycle SOP, one neuron per neuron-SRAM access,
// eight synapses per synapse-SRAM access, the event kinds, the per-source
// excitatory/inhibitory sign held in the global parameters, the two output
// modes. This design's choices: the register map, the arbitration order,
// the gate bit, the monitoring byte format.
module controller
  import odin_pkg::*;
#(
  parameter int ISI_W = 24
) (
  input  logic                clk,
  input  logic                rst_n,
  // AER input
  input  logic                ev_valid,
  input  aer_ev_t             ev,
  output logic                ev_ready,
  // scheduler
  input  logic                sch_valid,
  input  logic [NW-1:0]       sch_addr,
  input  logic                sch_last,
  output logic                sch_pop,
  output logic [ISI_W-1:0]    isi_period,
  output logic                pkt_valid,
  output pkt_t                pkt,
  // neuron update logic
  output logic [NW-1:0]       nu_addr,
  output logic                nu_syn_ev,
  output logic [2:0]          nu_weight,
  output logic                nu_sign,
  output logic                nu_time_ref,
  output logic                nu_burst_end,
  input  logic [NWORD_W-1:0]  nu_word_next,
  input  logic                nu_spike,
  input  pkt_t                nu_pkt,
  input  logic                nu_up,
  input  logic                nu_down,
  // SDSP registers and update logic
  output logic                regs_clear,
  output logic                regs_capture,
  output logic [2:0]          regs_slot,
  output logic                sdsp_up,
  output logic                sdsp_down,
  output logic [7:0]          syn_spk_mask,
  output logic                syn_bistab,
  input  logic [31:0]         syn_word_next,
  // neuron SRAM
  output logic                n_cs,
  output logic                n_we,
  output logic [NW-1:0]       n_addr,
  output logic [NWORD_W-1:0]  n_wdata,
  output logic [NWORD_W-1:0]  n_wmask,
  input  logic [NWORD_W-1:0]  n_rdata,
  // synapse SRAM
  output logic                s_cs,
  output logic                s_we,
  output logic [SADDR_W-1:0]  s_addr,
  output logic [31:0]         s_wdata,
  output logic [31:0]         s_wmask,
  input  logic [31:0]         s_rdata,
  // AER output
  output logic                out_valid,
  output logic [NW-1:0]       out_data,
  input  logic                out_ready,
  // SPI
  input  logic                spi_req_valid,
  input  spi_req_t            spi_req,
  output logic                spi_req_ready,
  output logic                spi_rd_valid,
  output logic [7:0]          spi_rd_data,
  // status
  output logic                busy
);
  typedef enum logic [1:0] {S_IDLE, S_RD, S_WR, S_SPI_RD} state_e;

  state_e            st;
  ev_kind_e          op;
  logic [NW-1:0]     pre, j;
  logic [SADDR_W-1:0] cnt;
  logic [2:0]        v_weight;
  logic              v_sign, last;
  spi_tgt_e          spi_tgt_q;
  logic [3:0]        spi_byte_q;

  // Global parameter bank.
  logic [7:0]        ctrl_q, mon_neur_q, mon_pre_q;
  logic [N-1:0]      sign_q;

  logic gate, mon_en, mon_syn;
  logic take_spi, take_sch, take_ev, reg_acc, last_sop;
  logic [2:0] slot;

  assign gate    = ctrl_q[0];
  assign mon_en  = ctrl_q[1];
  assign mon_syn = ctrl_q[2];
  assign busy    = (st != S_IDLE);
  assign slot    = j[2:0];

  assign reg_acc  = spi_req_valid && spi_req.target == SPI_REG;
  assign take_spi = (st == S_IDLE) && spi_req_valid && !reg_acc &&
                    (spi_req.target == SPI_NEUR || spi_req.target == SPI_SYN);
  assign take_sch = (st == S_IDLE) && !take_spi && !gate && sch_valid && (mon_en || out_ready);
  assign take_ev  = (st == S_IDLE) && !take_spi && !take_sch && !gate && ev_valid;
  assign last_sop = (op == EV_BISTAB) ? (cnt == '1) :
                    (op == EV_SPIKE || op == EV_TREF) ? (j == '1) : 1'b1;

  assign ev_ready      = take_ev;
  assign sch_pop       = take_sch;
  assign spi_req_ready = reg_acc || take_spi ||
                         (spi_req_valid && spi_req.target == SPI_NONE);

  // Register bank.
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      ctrl_q     <= '0;
      mon_neur_q <= '0;
      mon_pre_q  <= '0;
      isi_period <= '0;
      sign_q     <= '0;
    end else if (reg_acc && spi_req.write) begin
      if (spi_req.addr == REG_CTRL)     ctrl_q     <= spi_req.wdata;
      if (spi_req.addr == REG_MON_NEUR) mon_neur_q <= spi_req.wdata;
      if (spi_req.addr == REG_MON_PRE)  mon_pre_q  <= spi_req.wdata;
      for (int b = 0; b < (ISI_W+7)/8; b++)
        if (spi_req.addr == REG_ISI_0 + 16'(b))
          for (int k = 0; k < 8; k++)
            if (8*b+k < ISI_W) isi_period[8*b+k] <= spi_req.wdata[k];
      for (int b = 0; b < N/8; b++)
        if (spi_req.addr == REG_SIGN_0 + 16'(b)) sign_q[8*b +: 8] <= spi_req.wdata;
    end
  end

  // Register read data.
  function automatic logic [7:0] reg_read(input logic [15:0] a);
    logic [31:0] isi_ext;
    isi_ext = 32'(isi_period);
    reg_read = 8'h00;
    if (a == REG_CTRL)     reg_read = ctrl_q;
    if (a == REG_MON_NEUR) reg_read = mon_neur_q;
    if (a == REG_MON_PRE)  reg_read = mon_pre_q;
    for (int b = 0; b < (ISI_W+7)/8; b++)
      if (a == REG_ISI_0 + 16'(b)) reg_read = isi_ext[8*b +: 8];
    for (int b = 0; b < N/8; b++)
      if (a == REG_SIGN_0 + 16'(b)) reg_read = sign_q[8*b +: 8];
  endfunction

  // Sequencer.
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st         <= S_IDLE;
      op         <= EV_NONE;
      pre        <= '0;
      j          <= '0;
      cnt        <= '0;
      v_weight   <= '0;
      v_sign     <= 1'b0;
      last       <= 1'b0;
      spi_tgt_q  <= SPI_NONE;
      spi_byte_q <= '0;
    end else begin
      unique case (st)
        S_IDLE: begin
          if (take_spi) begin
            spi_tgt_q  <= spi_req.target;
            spi_byte_q <= (spi_req.target == SPI_NEUR) ? spi_req.addr[3:0] : {2'b00, spi_req.addr[1:0]};
            if (!spi_req.write) st <= S_SPI_RD;
          end else if (take_sch) begin
            op   <= EV_SPIKE;
            pre  <= sch_addr;
            last <= sch_last;
            j    <= '0;
            st   <= S_RD;
          end else if (take_ev) begin
            op       <= ev.kind;
            pre      <= ev.pre;
            last     <= 1'b0;
            j        <= (ev.kind == EV_SINGLE || ev.kind == EV_VIRTUAL) ? ev.post : '0;
            cnt      <= '0;
            v_weight <= ev.weight;
            v_sign   <= ev.sign;
            st       <= S_RD;
          end
        end
        S_RD: st <= S_WR;
        S_WR: begin
          if (last_sop) st <= S_IDLE;
          else begin
            st <= S_RD;
            if (op == EV_BISTAB) cnt <= cnt + 1'b1;
            else                 j   <= j + 1'b1;
          end
        end
        S_SPI_RD: st <= S_IDLE;
        default:  st <= S_IDLE;
      endcase
    end
  end

  // Datapath control.
  always_comb begin
    n_cs = 1'b0; n_we = 1'b0; n_addr = j; n_wdata = nu_word_next; n_wmask = '1;
    s_cs = 1'b0; s_we = 1'b0; s_addr = {pre, j[7:3]}; s_wdata = syn_word_next; s_wmask = '1;
    nu_addr      = j;
    nu_syn_ev    = 1'b0;
    nu_time_ref  = 1'b0;
    nu_burst_end = 1'b0;
    nu_weight    = s_rdata[4*slot +: 3];
    nu_sign      = sign_q[pre];
    regs_clear   = take_sch || take_ev;
    regs_capture = 1'b0;
    regs_slot    = slot;
    sdsp_up      = nu_up;
    sdsp_down    = nu_down;
    syn_spk_mask = '0;
    syn_bistab   = 1'b0;
    pkt_valid    = 1'b0;
    pkt          = nu_pkt;
    out_valid    = 1'b0;
    out_data     = sch_addr;
    spi_rd_valid = 1'b0;
    spi_rd_data  = reg_read(spi_req.addr);

    if (reg_acc && !spi_req.write) spi_rd_valid = 1'b1;

    if (take_spi) begin
      if (spi_req.target == SPI_NEUR) begin
        n_cs    = 1'b1;
        n_we    = spi_req.write;
        n_addr  = spi_req.addr[11:4];
        n_wdata = {16{spi_req.wdata}};
        n_wmask = NWORD_W'(8'hFF) << (8*spi_req.addr[3:0]);
      end else begin
        s_cs    = 1'b1;
        s_we    = spi_req.write;
        s_addr  = spi_req.addr[14:2];
        s_wdata = {4{spi_req.wdata}};
        s_wmask = 32'h0000_00FF << (8*spi_req.addr[1:0]);
      end
    end

    if (take_sch && !mon_en) out_valid = 1'b1;

    if (st == S_SPI_RD) begin
      spi_rd_valid = 1'b1;
      spi_rd_data  = (spi_tgt_q == SPI_NEUR) ? n_rdata[8*spi_byte_q +: 8]
                                             : s_rdata[8*spi_byte_q[1:0] +: 8];
    end

    if (st == S_RD) begin
      if (op == EV_BISTAB) begin
        s_cs   = 1'b1;
        s_addr = cnt;
      end else begin
        n_cs = 1'b1;
        if ((op == EV_SPIKE && slot == 3'd0) || op == EV_SINGLE) s_cs = 1'b1;
      end
    end

    if (st == S_WR) begin
      if (op == EV_BISTAB) begin
        syn_bistab = 1'b1;
        s_cs       = 1'b1;
        s_we       = 1'b1;
        s_addr     = cnt;
      end else begin
        n_cs         = 1'b1;
        n_we         = 1'b1;
        nu_syn_ev    = (op == EV_SPIKE || op == EV_SINGLE || op == EV_VIRTUAL);
        nu_time_ref  = (op == EV_TREF);
        nu_burst_end = (op == EV_SPIKE) && last && (j == pre);
        if (op == EV_VIRTUAL) begin
          nu_weight = v_weight;
          nu_sign   = v_sign;
        end
        pkt_valid = nu_spike;
        if (op == EV_SPIKE || op == EV_SINGLE) begin
          regs_capture = 1'b1;
          syn_spk_mask = (op == EV_SPIKE) ? 8'hFF : (8'h01 << slot);
          if (op == EV_SINGLE || slot == 3'd7) begin
            s_cs    = 1'b1;
            s_we    = 1'b1;
            s_wmask = (op == EV_SPIKE) ? '1 : (32'h0000_000F << (4*slot));
          end
        end
        // Monitoring mode.
        if (mon_en && j == mon_neur_q && out_ready) begin
          if (!mon_syn) begin
            out_valid = 1'b1;
            out_data  = nu_word_next[STATE_LSB +: 8];
          end else if ((op == EV_SPIKE || op == EV_SINGLE) && pre == mon_pre_q) begin
            out_valid = 1'b1;
            out_data  = {4'h0, syn_word_next[4*slot +: 4]};
          end
        end
      end
    end
  end
endmodule
