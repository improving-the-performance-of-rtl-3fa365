// tb_global_buffer -- sends packets into two rows of the global buffer:
// gather packets with 1 to 9 filled slots, unicast packets with one payload,
// and two gather packets whose flits interleave on different VCs. It checks
// payload and packet counts, the stored values in arrival order, and the
// credit returned for every flit.
module tb_global_buffer;
  import noc_pkg::*;
  localparam int unsigned ROWS = 2, GB_DEPTH = 64;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  link_t                in_link  [ROWS];
  credit_t              credit   [ROWS];
  logic [0:0]           rd_row;
  logic [5:0]           rd_addr;
  logic [PAYLOAD_W-1:0] rd_data;
  logic [15:0]          wr_count [ROWS];
  logic [15:0]          pkt_count[ROWS];

  global_buffer #(.ROWS(ROWS), .GB_DEPTH(GB_DEPTH)) dut (.*);

  int checks = 0, failures = 0;
  logic [31:0] expq [ROWS][$];
  int npk [ROWS];
  int flits_sent = 0, credits_seen = 0;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL: %s", what); end
  endtask

  always @(posedge clk) if (rst_n) for (int r = 0; r < ROWS; r++) if (credit[r].valid) credits_seen++;

  function automatic flit_t mk_head(pkt_type_e pt, int filled);
    header_t h;
    h = '0; h.ft = FT_HEAD; h.pt = pt;
    h.aspace = (pt == PT_GATHER) ? ASPACE_W'(GATHER_SLOTS - filled) : '0;
    h.dst = '{row: 3'd0, col: 4'd8};
    return flit_t'(h);
  endfunction

  // build the flits of a packet, queue the expected payloads
  task automatic build(input int r, input pkt_type_e pt, input int filled, output flit_t f[$]);
    int nd;
    f = {};
    f.push_back(mk_head(pt, filled));
    nd = (pt == PT_GATHER) ? GATHER_FLITS - 1 : UNICAST_FLITS - 1;
    for (int k = 0; k < nd; k++) begin
      data_flit_t d;
      d.ft = (k == nd - 1) ? FT_TAIL : FT_BODY;
      for (int s = 0; s < SLOTS_PER_FLIT; s++) begin
        int slot;
        slot = k * SLOTS_PER_FLIT + s;
        d.data[32*s +: 32] = $urandom;
        if (slot < filled) expq[r].push_back(d.data[32*s +: 32]);
      end
      f.push_back(flit_t'(d));
    end
    npk[r]++;
  endtask

  task automatic send(input int r, input logic [VC_W-1:0] vc, input flit_t f);
    @(negedge clk);
    in_link[r] = '{valid: 1'b1, vc: vc, flit: f};
    flits_sent++;
    @(negedge clk);
    in_link[r] = '0;
  endtask

  initial begin
    flit_t a[$], b[$];
    for (int r = 0; r < ROWS; r++) begin in_link[r] = '0; npk[r] = 0; end
    rd_row = '0; rd_addr = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int filled = 1; filled <= GATHER_SLOTS; filled++) begin
      build(0, PT_GATHER, filled, a);
      foreach (a[i]) send(0, VC_W'(filled % NUM_VC), a[i]);
    end
    for (int i = 0; i < 3; i++) begin
      build(1, PT_UNICAST, 1, a);
      foreach (a[j]) send(1, 2'd1, a[j]);
    end
    // two gather packets interleaved flit by flit on VCs 0 and 3 of row 1;
    // payloads arrive interleaved too: build the expected order by hand
    begin
      logic [31:0] q0 [$], q1 [$];
      build(1, PT_GATHER, 8, a); q0 = expq[1][$-7:$]; repeat (8) void'(expq[1].pop_back());
      build(1, PT_GATHER, 5, b); q1 = expq[1][$-4:$]; repeat (5) void'(expq[1].pop_back());
      for (int i = 0; i < GATHER_FLITS; i++) begin
        send(1, 2'd0, a[i]);
        if (i > 0) for (int s = 0; s < 3 && q0.size() > 0; s++) expq[1].push_back(q0.pop_front());
        send(1, 2'd3, b[i]);
        if (i > 0) for (int s = 0; s < 3 && q1.size() > 0; s++) expq[1].push_back(q1.pop_front());
      end
    end
    repeat (3) @(negedge clk);
    for (int r = 0; r < ROWS; r++) begin
      check(wr_count[r] == 16'(expq[r].size()), $sformatf("row %0d payload count %0d", r, wr_count[r]));
      check(pkt_count[r] == 16'(npk[r]), "packet count");
      foreach (expq[r][i]) begin
        rd_row = r[0:0]; rd_addr = 6'(i);
        #1 check(rd_data == expq[r][i], $sformatf("row %0d word %0d", r, i));
      end
    end
    check(credits_seen == flits_sent, "a credit for every flit");
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
