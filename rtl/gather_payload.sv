// gather_payload -- the Gather Payload unit of a router.
//
// It holds the one result (a 32-bit partial sum) that the local PE wants to
// send to the global buffer, offers it to passing gather packets, and tells
// the PE how that ended. States:
//   EMPTY   -- nothing held; the PE may write (pe_ready = 1).
//   WAIT    -- payload held and offered (pl_valid = 1); a delta timer runs.
//   CLAIMED -- a gather header has reserved a slot for it (claim = 1); the
//              payload waits for the body/tail flit that carries the slot.
// When that flit has taken the payload (uploaded = 1) the unit pulses ack.
// If no gather packet claims the payload for delta cycles after it was
// written, the unit pulses nack and hands the payload back on nack_data /
// nack_dst: the PE then starts a gather packet of its own. A claim in the
// same cycle as the timeout wins, so a packet that arrives just in time is
// used. delta is a run-time input because the paper lets it be set per
// router; the paper evaluates delta = 5 cycles.
//
// The states and the exact timeout instant (nack in the cycle in which the
// timer reaches delta) are this design's choice; the paper gives the ack /
// nack behaviour only in words.
module gather_payload
  import noc_pkg::*;
#(
  parameter int unsigned DELTA_W = 8
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic [DELTA_W-1:0]   delta,
  // PE side
  input  logic                 pe_wr,
  input  logic [PAYLOAD_W-1:0] pe_data,
  input  coord_t               pe_dst,
  output logic                 pe_ready,
  output logic                 ack,
  output logic                 nack,
  output logic [PAYLOAD_W-1:0] nack_data,
  output coord_t               nack_dst,
  // router side
  output logic                 pl_valid,  // offered to gather headers
  output logic [PAYLOAD_W-1:0] pl_data,
  output coord_t               pl_dst,
  input  logic                 claim,     // a gather header reserved a slot
  input  logic                 uploaded   // the payload was written into the packet
);

  typedef enum logic [1:0] {S_EMPTY, S_WAIT, S_CLAIMED} state_e;

  state_e               state_q;
  logic [DELTA_W-1:0]   timer_q;
  logic [PAYLOAD_W-1:0] data_q;
  coord_t               dst_q;
  logic                 timeout;

  assign pe_ready  = (state_q == S_EMPTY);
  assign pl_valid  = (state_q == S_WAIT);
  assign pl_data   = data_q;
  assign pl_dst    = dst_q;
  assign timeout   = (state_q == S_WAIT) && !claim && (timer_q >= delta);
  assign nack      = timeout;
  assign nack_data = data_q;
  assign nack_dst  = dst_q;
  assign ack       = (state_q == S_CLAIMED) && uploaded;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state_q <= S_EMPTY;
      timer_q <= '0;
      data_q  <= '0;
      dst_q   <= '0;
    end else begin
      unique case (state_q)
        S_EMPTY: if (pe_wr) begin
          state_q <= S_WAIT;
          timer_q <= '0;
          data_q  <= pe_data;
          dst_q   <= pe_dst;
        end
        S_WAIT: begin
          if (claim)        state_q <= S_CLAIMED;
          else if (timeout) state_q <= S_EMPTY;
          else              timer_q <= timer_q + 1'b1;
        end
        S_CLAIMED: if (uploaded) state_q <= S_EMPTY;
        default: state_q <= S_EMPTY;
      endcase
    end
  end

  // The PE only writes when the unit is empty.
  assert property (@(posedge clk) disable iff (!rst_n) pe_wr |-> pe_ready);
  // Only an offered payload can be claimed, only a claimed one uploaded.
  assert property (@(posedge clk) disable iff (!rst_n) claim |-> pl_valid);
  assert property (@(posedge clk) disable iff (!rst_n) uploaded |-> state_q == S_CLAIMED);

endmodule
