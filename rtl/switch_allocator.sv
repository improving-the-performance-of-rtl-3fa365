// switch_allocator -- separable input-first switch allocation (SA stage).
//
// Stage 1: at each input port a round-robin arbiter picks one of the VCs
// that have a flit ready and a credit for their output VC. Stage 2: at each
// output port a round-robin arbiter picks one of the input ports whose
// stage-1 winner wants that output. An input port gets at most one grant and
// an output port is given to at most one input per cycle, which is what the
// crossbar needs. Arbiter pointers advance only for grants actually made.
// The paper names the switch allocator; this organisation is this design's.
module switch_allocator
  import noc_pkg::*;
(
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic [NUM_VC-1:0]    req    [NUM_PORTS],   // ready VCs, credit already checked
  input  port_e                route  [NUM_PORTS][NUM_VC],
  output logic [NUM_PORTS-1:0] in_gnt,               // per input port
  output logic [VC_W-1:0]      in_gnt_vc[NUM_PORTS],
  output port_e                in_gnt_port[NUM_PORTS]
);

  logic [NUM_VC-1:0]    s1_gnt  [NUM_PORTS];
  logic [VC_W-1:0]      s1_idx  [NUM_PORTS];
  logic                 s1_v    [NUM_PORTS];
  logic [NUM_PORTS-1:0] s2_req  [NUM_PORTS];
  logic [NUM_PORTS-1:0] s2_gnt  [NUM_PORTS];
  logic                 s2_v    [NUM_PORTS];

  for (genvar p = 0; p < NUM_PORTS; p++) begin : g_in
    rr_arbiter #(.N(NUM_VC)) u_arb (
      .clk(clk), .rst_n(rst_n), .req(req[p]), .upd(in_gnt[p]),
      .gnt(s1_gnt[p]), .gnt_idx(s1_idx[p]), .gnt_valid(s1_v[p])
    );
  end

  for (genvar o = 0; o < NUM_PORTS; o++) begin : g_out
    always_comb
      for (int p = 0; p < NUM_PORTS; p++)
        s2_req[o][p] = s1_v[p] && (route[p][s1_idx[p]] == port_e'(o));

    rr_arbiter #(.N(NUM_PORTS)) u_arb (
      .clk(clk), .rst_n(rst_n), .req(s2_req[o]), .upd(1'b1),
      .gnt(s2_gnt[o]), .gnt_idx(), .gnt_valid(s2_v[o])
    );
  end

  always_comb begin
    for (int p = 0; p < NUM_PORTS; p++) begin
      in_gnt[p]      = 1'b0;
      in_gnt_vc[p]   = s1_idx[p];
      in_gnt_port[p] = route[p][s1_idx[p]];
      for (int o = 0; o < NUM_PORTS; o++)
        if (s2_gnt[o][p]) in_gnt[p] = 1'b1;
    end
  end

endmodule
