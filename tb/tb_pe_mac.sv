// tb_pe_mac -- streams several rounds of random operand vectors (lengths 1
// to 40) into one PE and checks each partial sum against a reference, that
// the result appears exactly T_MAC cycles after the last operand pair is
// registered, that the operands are forwarded right and down one cycle
// later, and that a result is held until it is accepted.
module tb_pe_mac;
  import noc_pkg::*;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic signed [15:0] a_in, w_in, a_out, w_out;
  logic a_valid_in, a_last_in, w_valid_in, w_last_in;
  logic a_valid_out, a_last_out, w_valid_out, w_last_out;
  logic result_valid, result_ready;
  logic [31:0] result;

  pe_mac dut (.*);

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL: %s", what); end
  endtask

  initial begin
    a_in = '0; w_in = '0; a_valid_in = 0; a_last_in = 0; w_valid_in = 0; w_last_in = 0;
    result_ready = 1;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int round = 0; round < 20; round++) begin
      int n, lat;
      logic signed [31:0] s;
      n = (round == 0) ? 1 : $urandom_range(1, 40);
      s = 0;
      for (int k = 0; k < n; k++) begin
        logic signed [15:0] a, w;
        a = 16'($urandom); w = 16'($urandom);
        s += 32'(a) * 32'(w);
        a_in = a; w_in = w; a_valid_in = 1; w_valid_in = 1;
        a_last_in = (k == n - 1); w_last_in = (k == n - 1);
        @(negedge clk);
        check(a_out == a && w_out == w && a_valid_out && w_valid_out, "operands forwarded");
      end
      a_valid_in = 0; w_valid_in = 0; a_last_in = 0; w_last_in = 0;
      // the last pair is registered at the edge just passed: count cycles
      lat = 0;
      while (!result_valid && lat < 50) begin @(negedge clk); lat++; end
      check(lat == T_MAC, $sformatf("T_MAC latency %0d", lat));
      check(result == s, $sformatf("round %0d sum %h exp %h", round, result, s));
      if (round == 5) begin
        // hold the result for a while
        result_ready = 0;
        repeat (7) @(negedge clk);
        check(result_valid && result == s, "result held while not accepted");
        result_ready = 1;
      end
      @(negedge clk);
      check(!result_valid, "result dropped after acceptance");
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
