// aer_in: input address-event representation (AER) port.
//
// A sender drives the 17-bit ADDR and raises REQ; the four-phase handshake
// is REQ up, ACK up, REQ down, ACK down. REQ is asynchronous to the core
// clock and passes a two-flip-flop synchroniser (the paper's double-latching
// barrier) before use; ADDR is captured once the synchronised REQ is seen
// high (bundled data: ADDR must be stable while REQ is high). The decoded
// event is offered to the controller with ev_valid until ev_ready; only
// then is ACK raised, so a busy core throttles the sender.
//
// ADDR encoding (the paper gives the five event kinds and the 1+2log2N
// width; the bit assignment is this design's choice):
//   ADDR[16]=1                        single-synapse event, i=ADDR[15:8], j=ADDR[7:0]
//   ADDR[16]=0, ADDR[7:0]=8'h00       neuron spike event, i=ADDR[15:8]
//   ADDR[16]=0, ADDR[7:0]=8'h01       neuron time reference event
//   ADDR[16]=0, ADDR[7:0]=8'h02       bistability time reference event
//   ADDR[16]=0, ADDR[7]=1             virtual synapse event, j=ADDR[15:8],
//                                     weight=ADDR[2:0], inhibitory if ADDR[3]
//   any other code                    acknowledged and ignored
module aer_in
  import odin_pkg::*;
(
  input  logic                clk,
  input  logic                rst_n,
  input  logic                aer_req,
  input  logic [AER_IN_W-1:0] aer_addr,
  output logic                aer_ack,
  output logic                ev_valid,
  output aer_ev_t             ev,
  input  logic                ev_ready
);
  typedef enum logic [1:0] {S_IDLE, S_OFFER, S_ACK} state_e;

  state_e              st;
  logic [1:0]          req_sync;
  logic [AER_IN_W-1:0] addr_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      req_sync <= '0;
      st       <= S_IDLE;
      addr_q   <= '0;
      aer_ack  <= 1'b0;
    end else begin
      req_sync <= {req_sync[0], aer_req};
      unique case (st)
        S_IDLE:  if (req_sync[1]) begin
                   addr_q <= aer_addr;
                   st     <= S_OFFER;
                 end
        S_OFFER: if (ev_ready || ev.kind == EV_NONE) begin
                   aer_ack <= 1'b1;
                   st      <= S_ACK;
                 end
        S_ACK:   if (!req_sync[1]) begin
                   aer_ack <= 1'b0;
                   st      <= S_IDLE;
                 end
        default: st <= S_IDLE;
      endcase
    end
  end

  always_comb begin
    ev        = '0;
    ev.kind   = EV_NONE;
    ev.pre    = addr_q[15:8];
    ev.post   = addr_q[7:0];
    if (addr_q[16]) begin
      ev.kind = EV_SINGLE;
    end else if (addr_q[7]) begin
      ev.kind   = EV_VIRTUAL;
      ev.post   = addr_q[15:8];
      ev.weight = addr_q[2:0];
      ev.sign   = addr_q[3];
    end else begin
      unique case (addr_q[6:0])
        7'h00:   ev.kind = EV_SPIKE;
        7'h01:   ev.kind = EV_TREF;
        7'h02:   ev.kind = EV_BISTAB;
        default: ev.kind = EV_NONE;
      endcase
    end
    ev_valid = (st == S_OFFER) && (ev.kind != EV_NONE);
  end
endmodule
