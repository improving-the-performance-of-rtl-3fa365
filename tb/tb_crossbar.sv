// tb_crossbar -- random permutations through the crossbar: each output must
// carry, one cycle later, the flit and VC of the input that targeted it, and
// outputs no input targets must be idle.
module tb_crossbar;
  import noc_pkg::*;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic            in_valid[NUM_PORTS];
  port_e           in_port [NUM_PORTS];
  logic [VC_W-1:0] in_vc   [NUM_PORTS];
  flit_t           in_flit [NUM_PORTS];
  link_t           out_link[NUM_PORTS];

  crossbar dut (.*);

  int checks = 0, failures = 0;
  link_t expct [NUM_PORTS];

  initial begin
    for (int i = 0; i < NUM_PORTS; i++) begin
      in_valid[i] = 0; in_port[i] = PORT_LOCAL; in_vc[i] = '0; in_flit[i] = '0;
    end
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int cyc = 0; cyc < 1000; cyc++) begin
      int perm [NUM_PORTS];
      @(negedge clk);
      for (int i = 0; i < NUM_PORTS; i++) perm[i] = i;
      perm.shuffle();
      for (int o = 0; o < NUM_PORTS; o++) expct[o] = '0;
      for (int i = 0; i < NUM_PORTS; i++) begin
        in_valid[i] = ($urandom_range(0, 2) != 0);
        in_port[i]  = port_e'(perm[i]);
        in_vc[i]    = VC_W'($urandom);
        in_flit[i]  = {$urandom, $urandom, $urandom, $urandom};
        if (in_valid[i]) begin
          expct[perm[i]].valid = 1'b1;
          expct[perm[i]].vc    = in_vc[i];
          expct[perm[i]].flit  = in_flit[i];
        end
      end
      @(posedge clk); #1;
      for (int o = 0; o < NUM_PORTS; o++) begin
        checks++;
        if (out_link[o] != expct[o]) begin
          failures++;
          if (failures < 10) $display("FAIL output %0d", o);
        end
      end
    end
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
