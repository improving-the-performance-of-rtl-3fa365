// tb_stream_buffer -- fills a 4-lane, 64-word stream buffer with random
// data, streams lengths 1, 5 and 37, and checks that lane k starts exactly
// k cycles after lane 0, that lane 0 starts three cycles after the start
// edge, that each lane delivers addresses 0..len-1 in order with last on the
// final one, and that busy covers the whole stream.
module tb_stream_buffer;
  localparam int unsigned LANES = 4, DEPTH = 64, DW = 16;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic                     wr_en, start, busy;
  logic [$clog2(LANES)-1:0] wr_lane;
  logic [$clog2(DEPTH)-1:0] wr_addr;
  logic [DW-1:0]            wr_data;
  logic [$clog2(DEPTH+1)-1:0] len;
  logic [DW-1:0]            out_data [LANES];
  logic                     out_valid[LANES];
  logic                     out_last [LANES];

  stream_buffer #(.LANES(LANES), .DEPTH(DEPTH), .DW(DW)) dut (.*);

  int checks = 0, failures = 0;
  logic [DW-1:0] ref_mem [LANES][DEPTH];

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL: %s", what); end
  endtask

  initial begin
    wr_en = 0; start = 0; len = '0; wr_lane = '0; wr_addr = '0; wr_data = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int l = 0; l < LANES; l++)
      for (int a = 0; a < DEPTH; a++) begin
        ref_mem[l][a] = DW'($urandom);
        @(negedge clk);
        wr_en = 1; wr_lane = l[1:0]; wr_addr = a[5:0]; wr_data = ref_mem[l][a];
      end
    @(negedge clk);
    wr_en = 0;
    for (int t = 0; t < 3; t++) begin
      int n, seen [LANES];
      n = (t == 0) ? 1 : (t == 1) ? 5 : 37;
      for (int l = 0; l < LANES; l++) seen[l] = 0;
      @(negedge clk);
      start = 1; len = 7'(n);
      @(negedge clk);
      start = 0;
      // cycle index c counts edges after the start edge
      for (int c = 1; c < n + LANES + 8; c++) begin
        for (int l = 0; l < LANES; l++) begin
          bit exp_v;
          int idx;
          idx = c - 3 - l;
          exp_v = (idx >= 0) && (idx < n);
          check(out_valid[l] == exp_v, $sformatf("n=%0d c=%0d lane %0d valid", n, c, l));
          if (exp_v) begin
            check(out_data[l] == ref_mem[l][idx], "lane data");
            check(out_last[l] == (idx == n - 1), "last flag");
            seen[l]++;
          end
        end
        if (c < n + LANES + 2) check(busy, "busy during the stream");
        @(negedge clk);
      end
      check(!busy, "idle after the stream");
      for (int l = 0; l < LANES; l++) check(seen[l] == n, "every value once");
    end
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
