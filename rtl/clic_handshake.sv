// clic_handshake -- handshake FSM between the vCLIC and the core (valid / ready
// / kill), with the claim sent back to the gateway.
//
// States:
//   IDLE  nothing offered. If the arbitration tree reports a winner, its fields
//         are registered and the FSM moves to REQ.
//   REQ   valid_o is high and the registered request (id, level, priv, v,
//         vsid, shv) is stable. When the core raises ready_i (only while
//         valid_o is high) the interrupt is taken: claim_o pulses for that cycle with claim_id_o = id (this
//         clears an edge-triggered pending bit) and the FSM returns to IDLE.
//         If, before ready_i, the tree's winner is no longer the offered line
//         (it was cleared or disabled, or another line now ranks higher), the
//         FSM withdraws the offer in that same cycle: valid_o is low and
//         kill_o pulses for one cycle
//         so that the core can drop any work it started on it; back to IDLE.
// Timing: one cycle from a winner appearing to valid_o; after a claim or a
// kill, at least one cycle in IDLE before the next offer, so that the gateway's
// cleared pending bit is seen by the tree.
//
// The signal names valid, ready, kill, id, level, priv, v and vsid are those
// of the paper's figure of the vCLIC-CVA6 interface; the states, the kill
// condition and the cycle timing are this design's choices.
module clic_handshake
  import vclic_pkg::*;
(
  input  logic     clk_i,
  input  logic     rst_ni,
  // from the arbitration tree
  input  logic     best_valid_i,
  input  irq_req_t best_i,
  // to/from the core
  output logic     valid_o,
  output irq_req_t req_o,
  input  logic     ready_i,
  output logic     kill_o,
  // to the gateway
  output logic     claim_o,
  output logic [9:0] claim_id_o
);

  typedef enum logic [0:0] { IDLE, REQ } state_e;

  state_e   state_q, state_d;
  irq_req_t req_q, req_d;
  logic     lost;

  assign lost = !best_valid_i || (best_i.id != req_q.id);

  always_comb begin
    state_d = state_q;
    req_d   = req_q;
    kill_o  = 1'b0;
    claim_o = 1'b0;
    unique case (state_q)
      IDLE: begin
        if (best_valid_i) begin
          req_d   = best_i;
          state_d = REQ;
        end
      end
      REQ: begin
        if (lost) begin
          kill_o  = 1'b1;
          state_d = IDLE;
        end else if (ready_i) begin
          claim_o = 1'b1;
          state_d = IDLE;
        end
      end
      default: state_d = IDLE;
    endcase
  end

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      state_q <= IDLE;
      req_q   <= '0;
    end else begin
      state_q <= state_d;
      req_q   <= req_d;
    end
  end

  assign valid_o    = (state_q == REQ) && !lost;
  assign req_o      = req_q;
  assign claim_id_o = req_q.id;

  // The core may only accept an offered interrupt.
  a_ready_needs_valid: assert property (@(posedge clk_i) disable iff (!rst_ni)
    ready_i |-> valid_o);
  // The offer is stable until it is taken or killed.
  a_stable: assert property (@(posedge clk_i) disable iff (!rst_ni)
    (valid_o && !ready_i) |=> (kill_o || (req_o == $past(req_o))));

endmodule
