// tb_gather_ni -- asks the network interface for gather packets and checks
// the four flits it injects (header fields, payload in slot 0, FT sequence),
// that it never sends on a VC without credit (credits are withheld for a
// while), that successive packets use successive VCs, and that ejected flits
// are passed out with a credit returned one cycle later.
module tb_gather_ni;
  import noc_pkg::*;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  coord_t               my_pos, init_dst;
  logic                 init_req, busy, ej_valid;
  logic [PAYLOAD_W-1:0] init_data;
  link_t                inj_link, ej_link;
  credit_t              inj_credit, ej_credit;
  flit_t                ej_flit;

  gather_ni dut (.*);

  int checks = 0, failures = 0;
  int outstanding [NUM_VC];
  bit hold_credits = 0;
  credit_t pending [$];

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL: %s", what); end
  endtask

  // the router side: returns a credit two cycles after each flit unless held
  always @(posedge clk) begin
    inj_credit <= '0;
    if (rst_n && inj_link.valid) begin
      outstanding[inj_link.vc]++;
      check(outstanding[inj_link.vc] <= BUF_DEPTH, "never more flits than credits");
      pending.push_back('{valid: 1'b1, vc: inj_link.vc});
    end
    if (!hold_credits && pending.size() > 0) begin
      credit_t c;
      c = pending.pop_front();
      inj_credit <= c;
      outstanding[c.vc]--;
    end
  end

  initial begin
    my_pos = '{row: 3'd5, col: 4'd2};
    init_req = 0; init_data = '0; init_dst = '0; ej_link = '0;
    for (int v = 0; v < NUM_VC; v++) outstanding[v] = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int pk = 0; pk < 6; pk++) begin
      flit_t got [GATHER_FLITS];
      logic [VC_W-1:0] vcs [GATHER_FLITS];
      int n;
      logic [31:0] d;
      d = $urandom;
      hold_credits = (pk == 1);
      @(negedge clk);
      init_req = 1; init_data = d; init_dst = '{row: 3'd5, col: 4'd8};
      @(negedge clk);
      init_req = 0;
      n = 0;
      for (int t = 0; t < 60 && n < GATHER_FLITS; t++) begin
        if (t == 20) hold_credits = 0;
        @(posedge clk); #1;
        if (inj_link.valid) begin got[n] = inj_link.flit; vcs[n] = inj_link.vc; n++; end
      end
      check(n == GATHER_FLITS, "four flits sent");
      begin
        header_t h;
        data_flit_t b;
        h = header_t'(got[0]);
        check(h.ft == FT_HEAD && h.pt == PT_GATHER && h.aspace == ASPACE_W'(GATHER_SLOTS - 1)
              && h.src == my_pos && h.dst == init_dst, "header fields");
        b = data_flit_t'(got[1]);
        check(b.ft == FT_BODY && b.data[31:0] == d && b.data[95:32] == '0, "payload in slot 0");
        check(flit_ft(got[2]) == FT_BODY && flit_ft(got[3]) == FT_TAIL, "body then tail");
        for (int i = 0; i < GATHER_FLITS; i++)
          check(vcs[i] == VC_W'(pk % NUM_VC), "one VC per packet, next VC for the next packet");
      end
      repeat (6) @(negedge clk);
    end
    // ejection
    @(negedge clk);
    ej_link = '{valid: 1'b1, vc: 2'd3, flit: flit_t'(98'h1234)};
    #1 check(ej_valid && ej_flit == flit_t'(98'h1234), "ejected flit passed out");
    @(negedge clk);
    ej_link = '0;
    check(ej_credit.valid && ej_credit.vc == 2'd3, "ejection credit returned");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (3000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
