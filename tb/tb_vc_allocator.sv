// tb_vc_allocator -- random request streams against the VC allocator with a
// reference model of the output-VC busy bits. Each cycle it checks that only
// requesters are granted, that at most one requester per output port is
// granted and receives the lowest free VC of that port, that a port with a
// free VC and a requester grants someone, and that a VC is released by its
// tail. All four VCs of a port being busy must stall requests.
module tb_vc_allocator;
  import noc_pkg::*;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic [NUM_VC-1:0]    req   [NUM_PORTS];
  port_e                route [NUM_PORTS][NUM_VC];
  logic [NUM_VC-1:0]    gnt   [NUM_PORTS];
  logic [VC_W-1:0]      gnt_vc[NUM_PORTS][NUM_VC];
  logic [NUM_PORTS-1:0] tail_sent;
  logic [VC_W-1:0]      tail_vc [NUM_PORTS];
  logic [NUM_VC-1:0]    busy    [NUM_PORTS];

  vc_allocator dut (.*);

  int checks = 0, failures = 0, full_stalls = 0;
  logic [NUM_VC-1:0] model [NUM_PORTS];

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL: %s", what); end
  endtask

  initial begin
    for (int o = 0; o < NUM_PORTS; o++) begin
      model[o] = '0; req[o] = '0; tail_sent[o] = 0; tail_vc[o] = '0;
      for (int v = 0; v < NUM_VC; v++) route[o][v] = PORT_LOCAL;
    end
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int cyc = 0; cyc < 3000; cyc++) begin
      @(negedge clk);
      for (int p = 0; p < NUM_PORTS; p++)
        for (int v = 0; v < NUM_VC; v++) begin
          req[p][v]   = ($urandom_range(0, 3) == 0);
          route[p][v] = port_e'($urandom_range(0, (cyc % 500 < 250) ? 4 : 1));
        end
      for (int o = 0; o < NUM_PORTS; o++) begin
        tail_sent[o] = 0;
        if (model[o] != '0 && $urandom_range(0, 3) == 0) begin
          int k;
          do k = $urandom_range(0, NUM_VC - 1); while (!model[o][k]);
          tail_sent[o] = 1; tail_vc[o] = VC_W'(k);
        end
      end
      #1;
      for (int o = 0; o < NUM_PORTS; o++) begin
        int n, lowest;
        bit any;
        n = 0; any = 0; lowest = -1;
        for (int k = NUM_VC - 1; k >= 0; k--) if (!model[o][k]) lowest = k;
        check(busy[o] == model[o], "busy bits match the model");
        for (int p = 0; p < NUM_PORTS; p++)
          for (int v = 0; v < NUM_VC; v++) begin
            if (req[p][v] && route[p][v] == port_e'(o)) any = 1;
            if (gnt[p][v] && route[p][v] == port_e'(o)) begin
              n++;
              check(req[p][v], "grant only to a requester");
              check(int'(gnt_vc[p][v]) == lowest, "lowest free VC assigned");
            end
          end
        check(n <= 1, "one grant per output port");
        if (any && lowest >= 0) check(n == 1, "free VC and a requester: grant");
        if (any && lowest < 0) full_stalls++;
        if (tail_sent[o]) model[o][tail_vc[o]] = 1'b0;
        if (n == 1) model[o][lowest] = 1'b1;
      end
    end
    check(full_stalls > 0, "all-VCs-busy stall seen");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
