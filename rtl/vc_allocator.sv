// vc_allocator -- output virtual channel allocation (the VA stage).
//
// Every input VC in the VA state asks for a VC on the output port its route
// computation chose. For each output port a round-robin arbiter picks one of
// the NUM_PORTS*NUM_VC requesters in that cycle, and the lowest-numbered free
// VC of that port is assigned to it. An output VC stays busy from allocation
// until the tail flit of its packet wins switch allocation (wormhole: one
// packet per VC at a time). At most one allocation per output port per
// cycle; requesters that lose simply retry, which is the VA stall.
// The paper names the VC allocator; this organisation is this design's.
module vc_allocator
  import noc_pkg::*;
(
  input  logic              clk,
  input  logic              rst_n,
  input  logic [NUM_VC-1:0] req   [NUM_PORTS],
  input  port_e             route [NUM_PORTS][NUM_VC],
  output logic [NUM_VC-1:0] gnt   [NUM_PORTS],
  output logic [VC_W-1:0]   gnt_vc[NUM_PORTS][NUM_VC],
  // release of an output VC when its tail leaves
  input  logic [NUM_PORTS-1:0] tail_sent,
  input  logic [VC_W-1:0]      tail_vc [NUM_PORTS],
  output logic [NUM_VC-1:0]    busy    [NUM_PORTS]
);
  localparam int unsigned NR = NUM_PORTS * NUM_VC;

  logic [NUM_VC-1:0] busy_q [NUM_PORTS];
  logic [NR-1:0]     oreq   [NUM_PORTS];
  logic [NR-1:0]     ognt   [NUM_PORTS];
  logic              ogv    [NUM_PORTS];
  logic              has_free[NUM_PORTS];
  logic [VC_W-1:0]   free_vc[NUM_PORTS];

  assign busy = busy_q;

  for (genvar o = 0; o < NUM_PORTS; o++) begin : g_out
    always_comb begin
      has_free[o] = 1'b0;
      free_vc[o]  = '0;
      for (int k = NUM_VC - 1; k >= 0; k--)
        if (!busy_q[o][k]) begin
          has_free[o] = 1'b1;
          free_vc[o]  = VC_W'(k);
        end
      for (int p = 0; p < NUM_PORTS; p++)
        for (int v = 0; v < NUM_VC; v++)
          oreq[o][p*NUM_VC + v] = has_free[o] && req[p][v] && (route[p][v] == port_e'(o));
    end

    rr_arbiter #(.N(NR)) u_arb (
      .clk(clk), .rst_n(rst_n), .req(oreq[o]), .upd(1'b1),
      .gnt(ognt[o]), .gnt_idx(), .gnt_valid(ogv[o])
    );
  end

  always_comb begin
    for (int p = 0; p < NUM_PORTS; p++)
      for (int v = 0; v < NUM_VC; v++) begin
        gnt[p][v]    = 1'b0;
        gnt_vc[p][v] = '0;
        for (int o = 0; o < NUM_PORTS; o++)
          if (ognt[o][p*NUM_VC + v]) begin
            gnt[p][v]    = 1'b1;
            gnt_vc[p][v] = free_vc[o];
          end
      end
  end

  logic [NUM_VC-1:0] busy_nxt [NUM_PORTS];

  always_comb
    for (int o = 0; o < NUM_PORTS; o++) begin
      busy_nxt[o] = busy_q[o];
      if (tail_sent[o]) busy_nxt[o][tail_vc[o]] = 1'b0;
      if (ogv[o])       busy_nxt[o][free_vc[o]] = 1'b1;
    end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) for (int o = 0; o < NUM_PORTS; o++) busy_q[o] <= '0;
    else        for (int o = 0; o < NUM_PORTS; o++) busy_q[o] <= busy_nxt[o];
  end

endmodule
