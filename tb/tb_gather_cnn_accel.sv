// tb_gather_cnn_accel -- end-to-end test of the accelerator at its default
// size (8x8 mesh, Table I router).
//
// Round 1 streams an AlexNet Conv1-sized vector (C*R*R = 3*11*11 = 363) into
// every row and column, with the per-router delta timeouts set long enough
// (5 + 8c at column c) for one gather packet per row to collect all eight
// results. Round 2 (C*R*R = 27) keeps those timeouts in the left half of a
// row only and uses 5 in the right half, so some PEs piggyback
// and others time out and start their own packets: a row's results reach
// the global buffer in several packets. Round 3 (C*R*R = 9) uses the paper's
// delta = 5 at every router: every PE times out and sends its own packet.
// Rounds 4 to 8 (C*R*R = 9) give column c a timeout of off + 4c
// (off = 1..5), so each PE starts its packet just as its left neighbour's
// packet reaches its router and the two compete for the East output.
// For every round the testbench computes
// every partial sum itself and compares it with what the global buffer
// received (round 1: also the order, column 0 first). It checks the
// round-1 latency against the gather latency equation and counts the
// mechanisms the design relies on: header loads, payload uploads, acks,
// delta timeouts (nacks), self-started packets, rows served by more than one
// packet, output-VC allocation stalls and switch-allocation conflicts
// (congestion). A mechanism that never happens counts as a failure.
module tb_gather_cnn_accel;
  import noc_pkg::*;

  localparam int unsigned ROWS = 8, COLS = 8, DW = 16, SB_DEPTH = 4608, GB_DEPTH = 64;
  localparam int unsigned KAPPA = 5;   // cycles per hop (4 router stages + link)

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic                          in_wr_en, w_wr_en, start;
  logic [$clog2(ROWS)-1:0]       in_wr_lane;
  logic [$clog2(COLS)-1:0]       w_wr_lane;
  logic [$clog2(SB_DEPTH)-1:0]   in_wr_addr, w_wr_addr;
  logic [DW-1:0]                 in_wr_data, w_wr_data;
  logic [$clog2(SB_DEPTH+1)-1:0] len;
  logic                          stream_busy;
  logic [7:0]                    delta_cfg [ROWS][COLS];
  logic [$clog2(ROWS)-1:0]       gb_rd_row;
  logic [$clog2(GB_DEPTH)-1:0]   gb_rd_addr;
  logic [PAYLOAD_W-1:0]          gb_rd_data;
  logic [15:0]                   gb_wr_count [ROWS];
  logic [15:0]                   gb_pkt_count[ROWS];
  logic                          eject_valid [ROWS][COLS];
  flit_t                         eject_flit  [ROWS][COLS];

  gather_cnn_accel dut (.*);

  int checks = 0, failures = 0;
  int loads = 0, uploads = 0, acks = 0, nacks = 0, self_pkts = 0, va_stalls = 0, sa_conflicts = 0;
  int multi_pkt_rows = 0, ejects = 0;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  // mechanism counters
  for (genvar r = 0; r < ROWS; r++) begin : g_r
    for (genvar c = 0; c < COLS; c++) begin : g_c
      always @(posedge clk) if (rst_n) begin
        if (dut.g_row[r].g_col[c].u_router.claim)    loads++;
        if (dut.g_row[r].g_col[c].u_router.uploaded) uploads++;
        if (dut.g_row[r].g_col[c].ack)  acks++;
        if (dut.g_row[r].g_col[c].nack) nacks++;
        if (dut.g_row[r].g_col[c].inj.valid
            && flit_ft(dut.g_row[r].g_col[c].inj.flit) == FT_HEAD) self_pkts++;
        for (int p = 0; p < NUM_PORTS; p++) begin
          if (dut.g_row[r].g_col[c].u_router.va_req[p] != '0
              && (dut.g_row[r].g_col[c].u_router.va_req[p]
                  & ~dut.g_row[r].g_col[c].u_router.va_gnt[p]) != '0) va_stalls++;
          if (dut.g_row[r].g_col[c].u_router.sa_req[p] != '0
              && !dut.g_row[r].g_col[c].u_router.sa_gnt[p]) sa_conflicts++;
        end
        if (eject_valid[r][c]) ejects++;
      end
    end
  end

  // operands and golden sums
  logic signed [DW-1:0] I [ROWS][SB_DEPTH];
  logic signed [DW-1:0] F [COLS][SB_DEPTH];
  logic [31:0]          gold [ROWS][COLS];

  task automatic load_round(input int n);
    for (int r = 0; r < ROWS; r++)
      for (int k = 0; k < n; k++) begin
        I[r][k] = DW'($signed($urandom_range(0, 255)) - 128);
        @(negedge clk);
        in_wr_en = 1; in_wr_lane = r[$clog2(ROWS)-1:0]; in_wr_addr = k[$clog2(SB_DEPTH)-1:0];
        in_wr_data = I[r][k];
      end
    for (int c = 0; c < COLS; c++)
      for (int k = 0; k < n; k++) begin
        F[c][k] = DW'($signed($urandom_range(0, 255)) - 128);
        @(negedge clk);
        in_wr_en = 0;
        w_wr_en = 1; w_wr_lane = c[$clog2(COLS)-1:0]; w_wr_addr = k[$clog2(SB_DEPTH)-1:0];
        w_wr_data = F[c][k];
      end
    @(negedge clk);
    in_wr_en = 0; w_wr_en = 0;
    for (int r = 0; r < ROWS; r++)
      for (int c = 0; c < COLS; c++) begin
        logic signed [31:0] s;
        s = 0;
        for (int k = 0; k < n; k++) s += 32'(I[r][k]) * 32'(F[c][k]);
        gold[r][c] = s;
      end
  endtask

  // run one round; returns cycles from the start edge to the last payload
  task automatic run_round(input int n, input bit ordered, output int cycles);
    logic [15:0] base [ROWS];
    int pk0 [ROWS];
    bit done;
    for (int r = 0; r < ROWS; r++) begin
      base[r] = gb_wr_count[r];
      pk0[r]  = gb_pkt_count[r];
    end
    @(negedge clk);
    start = 1; len = n[$clog2(SB_DEPTH+1)-1:0];
    @(negedge clk);
    start = 0;
    cycles = 1;
    done = 0;
    while (!done) begin
      @(negedge clk);
      cycles++;
      done = 1;
      for (int r = 0; r < ROWS; r++)
        if (gb_wr_count[r] - base[r] < 16'(COLS)) done = 0;
    end
    repeat (20) @(negedge clk);
    for (int r = 0; r < ROWS; r++) begin
      bit used [COLS];
      check(gb_wr_count[r] - base[r] == 16'(COLS), $sformatf("row %0d payload count", r));
      if (gb_pkt_count[r] - pk0[r] > 1) multi_pkt_rows++;
      if (ordered) check(gb_pkt_count[r] - pk0[r] == 1, $sformatf("row %0d one packet", r));
      for (int c = 0; c < COLS; c++) used[c] = 0;
      for (int i = 0; i < COLS; i++) begin
        bit found;
        gb_rd_row = r[$clog2(ROWS)-1:0];
        gb_rd_addr = $clog2(GB_DEPTH)'(int'(base[r]) + i);
        #1;
        found = 0;
        if (ordered) found = (gb_rd_data == gold[r][i]);
        else
          for (int c = 0; c < COLS; c++)
            if (!found && !used[c] && gb_rd_data == gold[r][c]) begin
              used[c] = 1; found = 1;
            end
        check(found, $sformatf("row %0d result %0d = %h", r, i, gb_rd_data));
      end
    end
  endtask

  initial begin
    int cyc, expect_min, expect_max;
    in_wr_en = 0; w_wr_en = 0; start = 0; len = '0;
    in_wr_lane = '0; in_wr_addr = '0; in_wr_data = '0;
    w_wr_lane = '0; w_wr_addr = '0; w_wr_data = '0;
    gb_rd_row = '0; gb_rd_addr = '0;
    // round 1: delta long enough for the row's single packet to arrive
    for (int r = 0; r < ROWS; r++)
      for (int c = 0; c < COLS; c++) delta_cfg[r][c] = 8'(DELTA_DEFAULT + 8 * c);
    repeat (3) @(negedge clk);
    rst_n = 1;

    load_round(363);
    run_round(363, 1, cyc);
    // Eq. (3) with eta >= M, no congestion: C*R*R + T_MAC + M*kappa + (L'/W - 1) + t_delta,
    // t_delta in 0..delta. The design adds its fixed start-up and PE-to-router
    // hand-off cycles, bounded here by 2*ROWS + 10 (the last row starts ROWS-1 cycles late).
    expect_min = 363 + T_MAC + COLS * KAPPA + (GATHER_FLITS - 1);
    expect_max = expect_min + DELTA_DEFAULT + 2 * ROWS + 10;
    $display("round 1: %0d cycles, equation without t_delta %0d", cyc, expect_min);
    check(cyc >= expect_min && cyc <= expect_max, "round 1 latency within the equation's range");
    check(nacks == ROWS, "round 1: only the leftmost PE of each row timed out");
    check(loads == ROWS * (COLS - 1), "round 1: every other PE loaded into the passing packet");

    // round 2: long timeouts only in the left half of each row -- partial gathering
    for (int r = 0; r < ROWS; r++)
      for (int c = 0; c < COLS; c++)
        delta_cfg[r][c] = (c < COLS / 2) ? 8'(DELTA_DEFAULT + 8 * c) : 8'(DELTA_DEFAULT);
    load_round(27);
    run_round(27, 0, cyc);
    $display("round 2: %0d cycles, loads so far %0d, timeouts so far %0d", cyc, loads, nacks);

    // round 3: the paper's delta = 5 at every router
    for (int r = 0; r < ROWS; r++)
      for (int c = 0; c < COLS; c++) delta_cfg[r][c] = 8'(DELTA_DEFAULT);
    load_round(9);
    run_round(9, 0, cyc);
    $display("round 3: %0d cycles, loads so far %0d, timeouts so far %0d", cyc, loads, nacks);

    // rounds 4..8: timeouts that grow by about one hop time per column, so a
    // PE starts its own packet just as the packet from its left neighbour
    // arrives; both then compete for the East output (switch allocation
    // conflicts). The exact overlap depends on the offset, so several are run.
    for (int off = 1; off <= 5; off++) begin
      for (int r = 0; r < ROWS; r++)
        for (int c = 0; c < COLS; c++) delta_cfg[r][c] = 8'(off + (KAPPA - 1) * c);
      load_round(9);
      run_round(9, 0, cyc);
      $display("round %0d: %0d cycles, loads so far %0d, timeouts so far %0d, sa conflicts so far %0d",
               3 + off, cyc, loads, nacks, sa_conflicts);
    end

    $display("loads=%0d uploads=%0d acks=%0d nacks=%0d self_pkts=%0d multi_pkt_rows=%0d va_stalls=%0d sa_conflicts=%0d ejects=%0d",
             loads, uploads, acks, nacks, self_pkts, multi_pkt_rows, va_stalls, sa_conflicts, ejects);
    check(loads > 0,        "mechanism: gather load");
    check(uploads == loads, "every load led to an upload");
    check(acks == loads,    "every upload was acknowledged");
    check(nacks > 0,        "mechanism: delta timeout");
    check(self_pkts == nacks, "every timeout started a packet");
    check(multi_pkt_rows > 0, "mechanism: row served by several gather packets");
    check(sa_conflicts > 0, "mechanism: switch allocation conflict");
    check(va_stalls > 0,    "mechanism: output-VC allocation stall");
    check(loads + nacks == 8 * ROWS * COLS, "each PE result either loaded or self-sent");
    check(ejects == 0, "no flit ejected at a PE");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (40000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
