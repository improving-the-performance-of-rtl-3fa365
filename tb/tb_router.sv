// tb_router -- one router at position (1,3) of an 8x8 mesh, with the
// testbench acting as all four neighbours, the local network interface and
// the PE.
//  1. A gather packet (ASpace 5) arrives from the West while the PE's payload
//     waits: the header must leave East exactly KAPPA = 5 cycles after it
//     entered (4 router stages + link), with ASpace 4, the payload in slot 4
//     of the second data flit, the other flits unchanged, and the PE acked.
//  2. A full gather packet (ASpace 0) passes unchanged and the PE's payload
//     is nacked delta cycles after it was written (ASpace-zero case).
//  3. 200 random unicast and gather packets enter on all five inputs and
//     VCs; each must leave on its XY output port intact, flits of a packet
//     in order on one VC, with credits never exceeded (downstream credits
//     are returned with random delay).
module tb_router;
  import noc_pkg::*;
  localparam int KAPPA = 5;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  coord_t               my_pos, pe_dst, nack_dst;
  logic [7:0]           delta;
  link_t                in_link   [NUM_PORTS];
  credit_t              credit_out[NUM_PORTS];
  link_t                out_link  [NUM_PORTS];
  credit_t              credit_in [NUM_PORTS];
  logic                 pe_wr, pe_ready, ack, nack;
  logic [PAYLOAD_W-1:0] pe_data, nack_data;

  router dut (.*);

  int checks = 0, failures = 0, acks = 0, nacks = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 15) $display("FAIL: %s", what); end
  endtask

  // upstream credit bookkeeping: what the testbench may still send per input VC
  int up_cred [NUM_PORTS][NUM_VC];
  // downstream: flits held per output VC, returned later
  int dn_held [NUM_PORTS][NUM_VC];
  credit_t ret_q [NUM_PORTS][$];
  // received flits per output port and VC
  flit_t rx [NUM_PORTS][NUM_VC][$];
  int    rx_time [NUM_PORTS][NUM_VC][$];
  int    cyc = 0;

  always @(posedge clk) begin
    cyc++;
    if (rst_n) begin
      if (ack) acks++;
      if (nack) nacks++;
      for (int p = 0; p < NUM_PORTS; p++) begin
        if (credit_out[p].valid) up_cred[p][credit_out[p].vc]++;
        if (out_link[p].valid) begin
          rx[p][out_link[p].vc].push_back(out_link[p].flit);
          rx_time[p][out_link[p].vc].push_back(cyc);
          dn_held[p][out_link[p].vc]++;
          if (dn_held[p][out_link[p].vc] > BUF_DEPTH) begin
            failures++; $display("FAIL: credit overrun at port %0d", p);
          end
          ret_q[p].push_back('{valid: 1'b1, vc: out_link[p].vc});
        end
        credit_in[p] <= '0;
        if (ret_q[p].size() > 0 && $urandom_range(0, 2) != 0) begin
          credit_t c;
          c = ret_q[p].pop_front();
          credit_in[p] <= c;
          dn_held[p][c.vc]--;
        end
      end
    end
  end

  function automatic flit_t mk_head(pkt_type_e pt, int asp, coord_t d, coord_t s);
    header_t h;
    h = '0; h.ft = FT_HEAD; h.pt = pt; h.aspace = ASPACE_W'(asp); h.dst = d; h.src = s;
    h.mdst = {$urandom, $urandom};
    return flit_t'(h);
  endfunction

  function automatic flit_t mk_data(flit_type_e ft);
    data_flit_t f;
    f.ft = ft; f.data = {$urandom, $urandom, $urandom};
    return flit_t'(f);
  endfunction

  // packet queues per input port and VC, sent by the driver below
  flit_t tx [NUM_PORTS][NUM_VC][$];

  task automatic drive_all();
    // one flit per input port per cycle, VC chosen round robin among ready ones
    int start_v [NUM_PORTS];
    for (int p = 0; p < NUM_PORTS; p++) start_v[p] = 0;
    forever begin
      @(negedge clk);
      for (int p = 0; p < NUM_PORTS; p++) begin
        in_link[p] = '0;
        for (int k = 0; k < NUM_VC; k++) begin
          int v;
          v = (start_v[p] + k) % NUM_VC;
          if (in_link[p].valid == 0 && tx[p][v].size() > 0 && up_cred[p][v] > 0
              && $urandom_range(0, 3) != 0) begin
            in_link[p] = '{valid: 1'b1, vc: VC_W'(v), flit: tx[p][v].pop_front()};
            up_cred[p][v]--;
            start_v[p] = v + 1;
          end
        end
      end
    end
  endtask

  function automatic port_e xy(coord_t d);
    if (d.col > my_pos.col) return PORT_EAST;
    if (d.col < my_pos.col) return PORT_WEST;
    if (d.row > my_pos.row) return PORT_SOUTH;
    if (d.row < my_pos.row) return PORT_NORTH;
    return PORT_LOCAL;
  endfunction

  initial begin
    coord_t gb;
    flit_t p0 [GATHER_FLITS];
    int t_in;
    my_pos = '{row: 3'd1, col: 4'd3};
    gb = '{row: 3'd1, col: 4'd8};
    delta = 8'd30;
    pe_wr = 0; pe_data = '0; pe_dst = gb;
    for (int p = 0; p < NUM_PORTS; p++) begin
      in_link[p] = '0; credit_in[p] = '0;
      for (int v = 0; v < NUM_VC; v++) begin up_cred[p][v] = BUF_DEPTH; dn_held[p][v] = 0; end
    end
    repeat (2) @(negedge clk);
    rst_n = 1;

    // 1. gather packet picks up the payload
    @(negedge clk);
    pe_wr = 1; pe_data = 32'hDEAD_BEEF;
    @(negedge clk);
    pe_wr = 0;
    p0[0] = mk_head(PT_GATHER, 5, gb, '{row: 3'd1, col: 4'd0});
    for (int i = 1; i < GATHER_FLITS; i++) p0[i] = mk_data(i == GATHER_FLITS - 1 ? FT_TAIL : FT_BODY);
    for (int i = 0; i < GATHER_FLITS; i++) begin
      in_link[PORT_WEST] = '{valid: 1'b1, vc: 2'd1, flit: p0[i]};
      up_cred[PORT_WEST][1]--;
      if (i == 0) t_in = cyc + 1;   // sampled at the coming edge
      @(negedge clk);
    end
    in_link[PORT_WEST] = '0;
    repeat (15) @(negedge clk);
    check(rx[PORT_EAST][0].size() == GATHER_FLITS, "gather packet left East on VC 0");
    if (rx[PORT_EAST][0].size() == GATHER_FLITS) begin
      header_t h;
      data_flit_t b;
      h = header_t'(rx[PORT_EAST][0][0]);
      check(rx_time[PORT_EAST][0][0] - t_in == KAPPA, $sformatf("header hop latency %0d", rx_time[PORT_EAST][0][0] - t_in));
      check(h.aspace == 4'd4 && h.dst == gb && h.pt == PT_GATHER, "ASpace decremented");
      check(rx[PORT_EAST][0][1] == p0[1], "data flit 0 unchanged");
      b = data_flit_t'(p0[2]);
      b.data[63:32] = 32'hDEAD_BEEF;
      check(rx[PORT_EAST][0][2] == flit_t'(b), "payload in slot 4");
      check(rx[PORT_EAST][0][3] == p0[3], "tail unchanged");
    end
    check(acks == 1 && nacks == 0, "PE acked");
    rx[PORT_EAST][0] = {}; rx_time[PORT_EAST][0] = {};

    // 2. full packet: no load, payload nacked after delta
    delta = 8'd12;
    @(negedge clk);
    pe_wr = 1; pe_data = 32'h0000_0077;
    @(negedge clk);
    pe_wr = 0;
    for (int i = 0; i < GATHER_FLITS; i++) begin
      p0[i] = (i == 0) ? mk_head(PT_GATHER, 0, gb, '{row: 3'd1, col: 4'd0})
                       : mk_data(i == GATHER_FLITS - 1 ? FT_TAIL : FT_BODY);
      in_link[PORT_WEST] = '{valid: 1'b1, vc: 2'd2, flit: p0[i]};
      up_cred[PORT_WEST][2]--;
      @(negedge clk);
    end
    in_link[PORT_WEST] = '0;
    repeat (20) @(negedge clk);
    check(nacks == 1 && acks == 1, "full packet: payload nacked");
    check(nack_dst == gb, "nack destination");
    begin
      bit same;
      same = 0;
      for (int v = 0; v < NUM_VC; v++)
        if (rx[PORT_EAST][v].size() == GATHER_FLITS) begin
          same = 1;
          for (int i = 0; i < GATHER_FLITS; i++) if (rx[PORT_EAST][v][i] != p0[i]) same = 0;
          rx[PORT_EAST][v] = {}; rx_time[PORT_EAST][v] = {};
        end
      check(same, "full packet passes unchanged");
    end

    // 3. random traffic on all inputs
    begin
      flit_t expq [NUM_PORTS][$][$];   // expected packets per output port
      int npkts;
      npkts = 0;
      for (int n = 0; n < 200; n++) begin
        int p, v, np;
        coord_t d;
        pkt_type_e pt;
        flit_t pk [$];
        pk = {};
        p = $urandom_range(0, NUM_PORTS - 1);
        v = $urandom_range(0, NUM_VC - 1);
        do d = '{row: 3'($urandom_range(0, 7)), col: 4'($urandom_range(0, 8))};
        while ((p == int'(PORT_LOCAL) && d == my_pos) || (xy(d) == port_e'(p)));
        pt = ($urandom_range(0, 1) != 0) ? PT_GATHER : PT_UNICAST;
        if (d == my_pos) pt = PT_UNICAST;
        np = (pt == PT_GATHER) ? GATHER_FLITS : UNICAST_FLITS;
        pk.push_back(mk_head(pt, (pt == PT_GATHER) ? $urandom_range(0, 9) : 0, d, '{row: 3'd0, col: 4'd0}));
        for (int i = 1; i < np; i++) pk.push_back(mk_data(i == np - 1 ? FT_TAIL : FT_BODY));
        foreach (pk[i]) tx[p][v].push_back(pk[i]);
        expq[xy(d)].push_back(pk);
        npkts++;
      end
      fork
        drive_all();
      join_none
      repeat (3000) @(negedge clk);
      // reassemble received packets per output and VC and match them
      for (int o = 0; o < NUM_PORTS; o++) begin
        int matched;
        matched = 0;
        for (int v = 0; v < NUM_VC; v++) begin
          while (rx[o][v].size() > 0) begin
            flit_t pk [$];
            bit found;
            pk = {};
            do pk.push_back(rx[o][v].pop_front());
            while (rx[o][v].size() > 0 && flit_ft(pk[$]) != FT_TAIL);
            check(flit_ft(pk[0]) == FT_HEAD && flit_ft(pk[$]) == FT_TAIL, "packet framing on one VC");
            found = 0;
            foreach (expq[o][i])
              if (!found && expq[o][i] == pk) begin
                found = 1;
                expq[o].delete(i);
              end
            check(found, $sformatf("packet at port %0d intact and correctly routed", o));
            matched++;
          end
        end
        check(expq[o].size() == 0, $sformatf("all packets for port %0d delivered", o));
      end
    end
    check(acks == 1 && nacks == 1, "no gather events without a payload");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (8000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
