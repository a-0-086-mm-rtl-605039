// aer_out: output address-event representation (AER) port.
//
// The core offers an 8-bit word with out_valid; when the port is idle
// (out_ready high) the word is latched onto ADDR and REQ is raised. The
// receiver's ACK is asynchronous and passes a two-flip-flop synchroniser
// (the paper's double-latching barrier). The four-phase handshake is REQ
// up, ACK up, REQ down, ACK down; only after ACK has fallen is the port
// ready again. The word is either the address of a spiking neuron
// (standard mode) or a byte of monitored state (monitoring mode); which one
// is the controller's decision. The paper gives the two modes, the 8-bit
// ADDR and the handshake; the one-word buffering is this design's choice.
module aer_out
  import odin_pkg::*;
(
  input  logic          clk,
  input  logic          rst_n,
  input  logic          out_valid,
  input  logic [NW-1:0] out_data,
  output logic          out_ready,
  output logic          aer_req,
  output logic [NW-1:0] aer_addr,
  input  logic          aer_ack
);
  typedef enum logic [1:0] {S_IDLE, S_REQ, S_WAIT_LOW} state_e;

  state_e     st;
  logic [1:0] ack_sync;

  assign out_ready = (st == S_IDLE);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st       <= S_IDLE;
      ack_sync <= '0;
      aer_req  <= 1'b0;
      aer_addr <= '0;
    end else begin
      ack_sync <= {ack_sync[0], aer_ack};
      unique case (st)
        S_IDLE:     if (out_valid) begin
                      aer_addr <= out_data;
                      aer_req  <= 1'b1;
                      st       <= S_REQ;
                    end
        S_REQ:      if (ack_sync[1]) begin
                      aer_req <= 1'b0;
                      st      <= S_WAIT_LOW;
                    end
        S_WAIT_LOW: if (!ack_sync[1]) st <= S_IDLE;
        default:    st <= S_IDLE;
      endcase
    end
  end
endmodule
