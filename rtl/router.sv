// router -- gather-capable virtual-channel wormhole router of one mesh node.
//
// Five ports (local, north, east, south, west), NUM_VC virtual channels of
// BUF_DEPTH flits per input port, credit-based flow control, XY routing.
// A header flit goes through four router stages, one cycle each:
//   RC  route computation; the Gather Load Generator decides whether the
//       local payload is loaded into this (gather) packet,
//   VA  output VC allocation; a loaded header gets its ASpace decremented,
//   SA  switch allocation; the flit is read from its buffer,
//   ST  crossbar traversal into the output register,
// and then spends one cycle on the link, so a header advances one hop every
// five cycles. Body and tail flits skip RC and VA; the one that holds the
// reserved slot takes the payload as it is read for switch traversal.
//
// The Gather Payload unit holds the PE's result. When several gather headers
// could take it in the same cycle, the one on the lowest-numbered port and
// VC wins (fixed priority, this design's choice). Gather packets need no
// other routing support: they travel like unicast packets towards the global
// buffer of their row.
//
// The paper gives the pipeline (Fig. 5), the block diagram (Fig. 6) and the
// Table I sizes. It describes a four-stage router in the text and figure but
// lists a five-stage router pipeline in its table; this design reads the
// fifth stage as link traversal, which reproduces the paper's Table II
// estimates (kappa = 5). Multicast (PT = M, MDst) is carried in the header
// but not routed: a multicast header is routed like a unicast to its Dst.
module router
  import noc_pkg::*;
#(
  parameter int unsigned DELTA_W = 8
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  coord_t               my_pos,
  input  logic [DELTA_W-1:0]   delta,
  input  link_t                in_link   [NUM_PORTS],
  output credit_t              credit_out[NUM_PORTS],   // to upstream routers
  output link_t                out_link  [NUM_PORTS],
  input  credit_t              credit_in [NUM_PORTS],   // from downstream routers
  // PE side of the Gather Payload unit
  input  logic                 pe_wr,
  input  logic [PAYLOAD_W-1:0] pe_data,
  input  coord_t               pe_dst,
  output logic                 pe_ready,
  output logic                 ack,
  output logic                 nack,
  output logic [PAYLOAD_W-1:0] nack_data,
  output coord_t               nack_dst
);
  localparam int unsigned CRED_W = $clog2(BUF_DEPTH + 1);

  // input units
  logic [NUM_VC-1:0]    va_req   [NUM_PORTS];
  port_e                route    [NUM_PORTS][NUM_VC];
  logic [NUM_VC-1:0]    va_gnt   [NUM_PORTS];
  logic [VC_W-1:0]      va_outvc [NUM_PORTS][NUM_VC];
  logic [NUM_VC-1:0]    sa_rdy   [NUM_PORTS];
  logic [VC_W-1:0]      outvc    [NUM_PORTS][NUM_VC];
  logic [NUM_PORTS-1:0] sa_gnt;
  logic [VC_W-1:0]      sa_gnt_vc[NUM_PORTS];
  port_e                sa_gnt_port[NUM_PORTS];
  flit_t                sa_flit  [NUM_PORTS];
  logic                 sa_tail  [NUM_PORTS];
  logic [NUM_VC-1:0]    load_req [NUM_PORTS];
  logic [NUM_VC-1:0]    load_gnt [NUM_PORTS];
  logic [NUM_PORTS-1:0] uploaded_p;

  // gather payload
  logic                 pl_valid;
  logic [PAYLOAD_W-1:0] pl_data;
  coord_t               pl_dst;
  logic                 claim, uploaded;

  for (genvar p = 0; p < NUM_PORTS; p++) begin : g_in
    input_unit #(.LOAD_EN(p != int'(PORT_LOCAL))) u_in (
      .clk, .rst_n, .my_pos,
      .in_link   (in_link[p]),
      .credit_out(credit_out[p]),
      .va_req    (va_req[p]),
      .route     (route[p]),
      .va_gnt    (va_gnt[p]),
      .va_outvc  (va_outvc[p]),
      .sa_req_vc (sa_rdy[p]),
      .outvc     (outvc[p]),
      .sa_gnt    (sa_gnt[p]),
      .sa_gnt_vc (sa_gnt_vc[p]),
      .sa_flit   (sa_flit[p]),
      .sa_tail   (sa_tail[p]),
      .pl_valid, .pl_data, .pl_dst,
      .load_req  (load_req[p]),
      .load_gnt  (load_gnt[p]),
      .uploaded  (uploaded_p[p])
    );
  end

  // Gather load arbitration: fixed priority over (port, VC).
  always_comb begin
    claim = 1'b0;
    for (int p = 0; p < NUM_PORTS; p++)
      for (int v = 0; v < NUM_VC; v++) begin
        load_gnt[p][v] = 1'b0;
        if (load_req[p][v] && !claim) begin
          load_gnt[p][v] = 1'b1;
          claim          = 1'b1;
        end
      end
  end
  assign uploaded = |uploaded_p;

  gather_payload #(.DELTA_W(DELTA_W)) u_gp (
    .clk, .rst_n, .delta,
    .pe_wr, .pe_data, .pe_dst, .pe_ready, .ack, .nack, .nack_data, .nack_dst,
    .pl_valid, .pl_data, .pl_dst, .claim, .uploaded
  );

  // Credit counters per output VC.
  logic [CRED_W-1:0] cred [NUM_PORTS][NUM_VC];
  logic [NUM_VC-1:0] sa_req [NUM_PORTS];

  always_comb
    for (int p = 0; p < NUM_PORTS; p++)
      for (int v = 0; v < NUM_VC; v++)
        sa_req[p][v] = sa_rdy[p][v] && (cred[route[p][v]][outvc[p][v]] != '0);

  // VC allocation
  logic [NUM_PORTS-1:0] tail_sent;
  logic [VC_W-1:0]      tail_vc [NUM_PORTS];
  logic [NUM_VC-1:0]    ovc_busy[NUM_PORTS];

  always_comb begin
    for (int o = 0; o < NUM_PORTS; o++) begin
      tail_sent[o] = 1'b0;
      tail_vc[o]   = '0;
    end
    for (int p = 0; p < NUM_PORTS; p++)
      if (sa_gnt[p] && sa_tail[p]) begin
        tail_sent[sa_gnt_port[p]] = 1'b1;
        tail_vc[sa_gnt_port[p]]   = outvc[p][sa_gnt_vc[p]];
      end
  end

  vc_allocator u_va (
    .clk, .rst_n,
    .req(va_req), .route(route), .gnt(va_gnt), .gnt_vc(va_outvc),
    .tail_sent(tail_sent), .tail_vc(tail_vc), .busy(ovc_busy)
  );

  switch_allocator u_sa (
    .clk, .rst_n,
    .req(sa_req), .route(route),
    .in_gnt(sa_gnt), .in_gnt_vc(sa_gnt_vc), .in_gnt_port(sa_gnt_port)
  );

  logic [NUM_VC-1:0] cred_dec [NUM_PORTS];
  logic [NUM_VC-1:0] cred_inc [NUM_PORTS];

  always_comb
    for (int o = 0; o < NUM_PORTS; o++)
      for (int v = 0; v < NUM_VC; v++) begin
        cred_dec[o][v] = 1'b0;
        for (int p = 0; p < NUM_PORTS; p++)
          if (sa_gnt[p] && sa_gnt_port[p] == port_e'(o)
              && outvc[p][sa_gnt_vc[p]] == VC_W'(v)) cred_dec[o][v] = 1'b1;
        cred_inc[o][v] = credit_in[o].valid && credit_in[o].vc == VC_W'(v);
      end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int o = 0; o < NUM_PORTS; o++)
        for (int v = 0; v < NUM_VC; v++) cred[o][v] <= CRED_W'(BUF_DEPTH);
    end else begin
      for (int o = 0; o < NUM_PORTS; o++)
        for (int v = 0; v < NUM_VC; v++)
          cred[o][v] <= cred[o][v] + CRED_W'(cred_inc[o][v]) - CRED_W'(cred_dec[o][v]);
    end
  end

  // ST pipeline register (end of SA), then the registered crossbar.
  logic              st_valid[NUM_PORTS];
  port_e             st_port [NUM_PORTS];
  logic [VC_W-1:0]   st_vc   [NUM_PORTS];
  flit_t             st_flit [NUM_PORTS];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int p = 0; p < NUM_PORTS; p++) begin
        st_valid[p] <= 1'b0;
        st_port[p]  <= PORT_LOCAL;
        st_vc[p]    <= '0;
        st_flit[p]  <= '0;
      end
    end else begin
      for (int p = 0; p < NUM_PORTS; p++) begin
        st_valid[p] <= sa_gnt[p];
        st_port[p]  <= sa_gnt_port[p];
        st_vc[p]    <= outvc[p][sa_gnt_vc[p]];
        st_flit[p]  <= sa_flit[p];
      end
    end
  end

  crossbar u_xbar (
    .clk, .rst_n,
    .in_valid(st_valid), .in_port(st_port), .in_vc(st_vc), .in_flit(st_flit),
    .out_link(out_link)
  );

  // A credit counter never goes past the buffer depth.
  for (genvar o = 0; o < NUM_PORTS; o++) begin : g_chk
    for (genvar v = 0; v < NUM_VC; v++) begin : g_vc
      assert property (@(posedge clk) disable iff (!rst_n) cred[o][v] <= CRED_W'(BUF_DEPTH));
    end
  end

endmodule
