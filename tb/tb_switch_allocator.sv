// tb_switch_allocator -- random requests against the separable switch
// allocator. Each cycle: every grant goes to a requesting VC, each input
// port gets at most one grant and each output port is given at most once,
// and the granted port is the route of the granted VC; if any VC requests,
// something is granted. Under persistent all-to-one-output load every input
// port must be served (round-robin fairness).
module tb_switch_allocator;
  import noc_pkg::*;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic [NUM_VC-1:0]    req  [NUM_PORTS];
  port_e                route[NUM_PORTS][NUM_VC];
  logic [NUM_PORTS-1:0] in_gnt;
  logic [VC_W-1:0]      in_gnt_vc[NUM_PORTS];
  port_e                in_gnt_port[NUM_PORTS];

  switch_allocator dut (.*);

  int checks = 0, failures = 0;
  int served [NUM_PORTS];

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL: %s", what); end
  endtask

  initial begin
    for (int p = 0; p < NUM_PORTS; p++) begin
      req[p] = '0; served[p] = 0;
      for (int v = 0; v < NUM_VC; v++) route[p][v] = PORT_LOCAL;
    end
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int cyc = 0; cyc < 2000; cyc++) begin
      bit hot, any;
      logic [NUM_PORTS-1:0] used;
      hot = (cyc >= 1500);
      @(negedge clk);
      for (int p = 0; p < NUM_PORTS; p++)
        for (int v = 0; v < NUM_VC; v++) begin
          req[p][v]   = hot ? 1'b1 : ($urandom_range(0, 2) == 0);
          route[p][v] = hot ? PORT_EAST : port_e'($urandom_range(0, 4));
        end
      #1;
      used = '0; any = 0;
      for (int p = 0; p < NUM_PORTS; p++) begin
        if (req[p] != '0) any = 1;
        if (in_gnt[p]) begin
          check(req[p][in_gnt_vc[p]], "grant to a requesting VC");
          check(in_gnt_port[p] == route[p][in_gnt_vc[p]], "granted port is the VC's route");
          check(!used[in_gnt_port[p]], "output given once");
          used[in_gnt_port[p]] = 1'b1;
          if (hot) served[p]++;
        end
      end
      if (any) check(in_gnt != '0, "work conserving");
    end
    for (int p = 0; p < NUM_PORTS; p++)
      check(served[p] >= 90, $sformatf("input %0d served %0d of 500 hot cycles", p, served[p]));
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
