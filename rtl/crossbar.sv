// crossbar -- the router's NUM_PORTS x NUM_PORTS switch (ST stage).
//
// Each input carries a flit, the output port it goes to and the output VC it
// holds. Every output selects the input that targets it; the switch
// allocator guarantees at most one input per output. The result is
// registered, so a flit spends one cycle in switch traversal and drives the
// outgoing link in the next cycle. Plain multiplexers; the paper only names
// the crossbar.
module crossbar
  import noc_pkg::*;
(
  input  logic  clk,
  input  logic  rst_n,
  input  logic  in_valid[NUM_PORTS],
  input  port_e in_port [NUM_PORTS],
  input  logic [VC_W-1:0] in_vc[NUM_PORTS],
  input  flit_t in_flit [NUM_PORTS],
  output link_t out_link[NUM_PORTS]
);

  link_t sel [NUM_PORTS];

  always_comb begin
    for (int o = 0; o < NUM_PORTS; o++) begin
      sel[o] = '0;
      for (int i = 0; i < NUM_PORTS; i++)
        if (in_valid[i] && in_port[i] == port_e'(o)) begin
          sel[o].valid = 1'b1;
          sel[o].vc    = in_vc[i];
          sel[o].flit  = in_flit[i];
        end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) for (int o = 0; o < NUM_PORTS; o++) out_link[o] <= '0;
    else        for (int o = 0; o < NUM_PORTS; o++) out_link[o] <= sel[o];
  end

endmodule
