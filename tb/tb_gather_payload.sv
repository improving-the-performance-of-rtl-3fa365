// tb_gather_payload -- checks the Gather Payload unit: a payload nobody
// claims is nacked exactly delta cycles after it was written (for several
// delta values) and returned with its destination; a claimed payload is
// acked when it is uploaded and never nacked; a claim in the timeout cycle
// wins over the timeout; the PE may write again only when the unit is empty.
module tb_gather_payload;
  import noc_pkg::*;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic [7:0]           delta;
  logic                 pe_wr, pe_ready, ack, nack, pl_valid, claim, uploaded;
  logic [PAYLOAD_W-1:0] pe_data, nack_data, pl_data;
  coord_t               pe_dst, nack_dst, pl_dst;

  gather_payload dut (.*);

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  task automatic write(input logic [31:0] d, input coord_t dst);
    @(negedge clk);
    check(pe_ready, "ready before write");
    pe_wr = 1; pe_data = d; pe_dst = dst;
    @(negedge clk);
    pe_wr = 0;
  endtask

  initial begin
    pe_wr = 0; claim = 0; uploaded = 0; pe_data = '0; pe_dst = '0; delta = 8'd5;
    repeat (2) @(negedge clk);
    rst_n = 1;
    // timeouts for several delta values
    for (int d = 0; d <= 12; d += 3) begin
      int waited;
      coord_t dst;
      delta = 8'(d);
      dst = '{row: 3'(d), col: 4'd8};
      write(32'hA000_0000 + 32'(d), dst);
      waited = 0;
      check(pl_valid && pl_data == 32'hA000_0000 + 32'(d) && pl_dst == dst, "payload offered");
      while (!nack && waited < 50) begin @(negedge clk); waited++; end
      check(waited == d, $sformatf("delta %0d: nack after %0d cycles", d, waited));
      check(nack_data == 32'hA000_0000 + 32'(d) && nack_dst == dst, "nack returns payload");
      @(negedge clk);
      check(pe_ready && !pl_valid && !nack, "empty after nack");
    end
    // claim, then upload three cycles later -> ack, no nack
    delta = 8'd5;
    write(32'h1234_5678, '{row: 3'd1, col: 4'd8});
    @(negedge clk);
    claim = 1;
    @(negedge clk);
    claim = 0;
    check(!pl_valid && !pe_ready, "claimed payload is no longer offered");
    repeat (8) begin
      @(negedge clk);
      check(!nack && !ack, "no nack once claimed");
    end
    uploaded = 1;
    #1 check(ack, "ack on upload");
    @(negedge clk);
    uploaded = 0;
    check(pe_ready && !ack, "empty after ack");
    // claim in the timeout cycle wins
    delta = 8'd4;
    write(32'h0BAD_CAFE, '{row: 3'd0, col: 4'd8});
    repeat (4) @(negedge clk);
    claim = 1;
    #1 check(!nack, "claim beats the timeout");
    @(negedge clk);
    claim = 0;
    uploaded = 1;
    #1 check(ack, "ack after late claim");
    @(negedge clk);
    uploaded = 0;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
