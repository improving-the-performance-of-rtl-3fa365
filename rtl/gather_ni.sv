// gather_ni -- network interface between a PE and the local router port.
//
// Injection: when the router's Gather Payload unit gives up waiting (nack,
// delta cycles without a passing gather packet, or none with free space),
// the PE starts a gather packet of its own. This unit builds it: a header
// with PT = G, ASpace = GATHER_SLOTS - 1 (the PE's own payload already fills
// slot 0), Src = this node, Dst = the payload's destination, then two body
// flits and a tail flit, the first holding the payload. The flits are sent
// one per cycle into the router's local input port on one VC, as credits for
// that VC allow. Each new packet uses the next VC in turn.
// Ejection: flits the router delivers on its local output port are passed
// out unchanged and their credits are returned in the next cycle.
// The paper says only that the PE initiates the packet; this packet layout
// and injection order are this design's.
module gather_ni
  import noc_pkg::*;
(
  input  logic                 clk,
  input  logic                 rst_n,
  input  coord_t               my_pos,
  // request from the Gather Payload unit
  input  logic                 init_req,
  input  logic [PAYLOAD_W-1:0] init_data,
  input  coord_t               init_dst,
  output logic                 busy,
  // local input port of the router
  output link_t                inj_link,
  input  credit_t              inj_credit,
  // local output port of the router
  input  link_t                ej_link,
  output credit_t              ej_credit,
  output logic                 ej_valid,
  output flit_t                ej_flit
);
  localparam int unsigned CRED_W = $clog2(BUF_DEPTH + 1);
  localparam int unsigned IDX_W  = $clog2(GATHER_FLITS);

  logic [CRED_W-1:0]    cred [NUM_VC];
  logic                 active_q;
  logic [IDX_W-1:0]     idx_q;
  logic [VC_W-1:0]      vc_q;
  logic [PAYLOAD_W-1:0] data_q;
  coord_t               dst_q;
  flit_t                flit;
  logic                 send;

  assign busy = active_q;
  assign send = active_q && (cred[vc_q] != '0);

  always_comb begin
    header_t    h;
    data_flit_t d;
    h        = '0;
    h.ft     = FT_HEAD;
    h.pt     = PT_GATHER;
    h.aspace = ASPACE_W'(GATHER_SLOTS - 1);
    h.src    = my_pos;
    h.dst    = dst_q;
    d        = '0;
    d.ft     = (idx_q == IDX_W'(GATHER_FLITS - 1)) ? FT_TAIL : FT_BODY;
    if (idx_q == IDX_W'(1)) d.data[PAYLOAD_W-1:0] = data_q;
    flit = (idx_q == '0) ? flit_t'(h) : flit_t'(d);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int v = 0; v < NUM_VC; v++) cred[v] <= CRED_W'(BUF_DEPTH);
      active_q  <= 1'b0;
      idx_q     <= '0;
      vc_q      <= '0;
      data_q    <= '0;
      dst_q     <= '0;
      inj_link  <= '0;
      ej_credit <= '0;
    end else begin
      for (int v = 0; v < NUM_VC; v++)
        cred[v] <= cred[v] + CRED_W'(inj_credit.valid && inj_credit.vc == VC_W'(v))
                           - CRED_W'(send && vc_q == VC_W'(v));
      inj_link.valid <= send;
      inj_link.vc    <= vc_q;
      inj_link.flit  <= flit;
      if (!active_q && init_req) begin
        active_q <= 1'b1;
        idx_q    <= '0;
        data_q   <= init_data;
        dst_q    <= init_dst;
      end else if (send) begin
        idx_q <= idx_q + 1'b1;
        if (idx_q == IDX_W'(GATHER_FLITS - 1)) begin
          active_q <= 1'b0;
          vc_q     <= vc_q + 1'b1;
        end
      end
      ej_credit.valid <= ej_link.valid;
      ej_credit.vc    <= ej_link.vc;
    end
  end

  assign ej_valid = ej_link.valid;
  assign ej_flit  = ej_link.flit;

  // A request never arrives while a packet is still being sent.
  assert property (@(posedge clk) disable iff (!rst_n) init_req |-> !active_q);

endmodule
