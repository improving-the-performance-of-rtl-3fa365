// tb_input_unit -- drives one input port directly. A gather header written
// in cycle t must raise load_req in t+1 (RC) and va_req in t+2 (VA); after a
// granted load the buffered header's ASpace is decremented and the data flit
// that holds the reserved slot leaves the buffer with the payload merged in
// (uploaded pulses once). Also checked: a unicast packet with no load, packet
// order within a VC, two VCs in parallel, a credit for every flit read, and
// that the local port (LOAD_EN = 0) never asks to load.
module tb_input_unit;
  import noc_pkg::*;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  coord_t               my_pos, pl_dst;
  link_t                in_link;
  credit_t              credit_out, credit_out_l;
  logic [NUM_VC-1:0]    va_req, va_gnt, sa_req_vc, load_req, load_gnt, load_req_l;
  port_e                route [NUM_VC];
  logic [VC_W-1:0]      va_outvc[NUM_VC], outvc[NUM_VC];
  logic                 sa_gnt, pl_valid, uploaded, sa_tail;
  logic [VC_W-1:0]      sa_gnt_vc;
  flit_t                sa_flit;
  logic [PAYLOAD_W-1:0] pl_data;

  input_unit dut (.*);

  // the same unit configured as a local port, fed the same flits
  input_unit #(.LOAD_EN(1'b0)) dut_local (
    .clk, .rst_n, .my_pos, .in_link, .credit_out(credit_out_l),
    .va_req(), .route(), .va_gnt('0), .va_outvc(va_outvc), .sa_req_vc(), .outvc(),
    .sa_gnt(1'b0), .sa_gnt_vc('0), .sa_flit(), .sa_tail(),
    .pl_valid, .pl_data, .pl_dst, .load_req(load_req_l), .load_gnt('0), .uploaded()
  );

  int checks = 0, failures = 0, credits = 0, uploads = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL: %s", what); end
  endtask

  always @(posedge clk) if (rst_n) begin
    if (credit_out.valid) credits++;
    if (uploaded) uploads++;
    if (load_req_l != '0) begin failures++; $display("FAIL: local port asked to load"); end
  end

  function automatic flit_t head(pkt_type_e pt, int asp, coord_t d);
    header_t h;
    h = '0; h.ft = FT_HEAD; h.pt = pt; h.aspace = ASPACE_W'(asp); h.dst = d;
    return flit_t'(h);
  endfunction

  function automatic flit_t dat(flit_type_e ft, logic [95:0] d);
    data_flit_t f;
    f.ft = ft; f.data = d;
    return flit_t'(f);
  endfunction

  task automatic put(input logic [VC_W-1:0] vc, input flit_t f);
    in_link = '{valid: 1'b1, vc: vc, flit: f};
    @(negedge clk);
    in_link = '0;
  endtask

  // read one flit of VC vc through the switch; returns it
  task automatic take(input logic [VC_W-1:0] vc, output flit_t f);
    int guard;
    guard = 0;
    while (!sa_req_vc[vc] && guard < 20) begin @(negedge clk); guard++; end
    check(sa_req_vc[vc], "flit ready for the switch");
    sa_gnt = 1; sa_gnt_vc = vc;
    #1 f = sa_flit;
    @(negedge clk);
    sa_gnt = 0;
  endtask

  initial begin
    coord_t gb;
    flit_t f;
    header_t hh;
    logic [95:0] d0, d1, d2;
    my_pos = '{row: 3'd1, col: 4'd2};
    gb = '{row: 3'd1, col: 4'd8};
    in_link = '0; va_gnt = '0; sa_gnt = 0; sa_gnt_vc = '0; load_gnt = '0;
    pl_valid = 0; pl_data = 32'hCAFE_0001; pl_dst = gb;
    for (int v = 0; v < NUM_VC; v++) va_outvc[v] = VC_W'(3 - v);
    repeat (2) @(negedge clk);
    rst_n = 1;

    // gather packet on VC 2, ASpace 5 -> slot 4 = data flit 1, position 1
    pl_valid = 1;
    d0 = {$urandom, $urandom, $urandom}; d1 = {$urandom, $urandom, $urandom}; d2 = {$urandom, $urandom, $urandom};
    in_link = '{valid: 1'b1, vc: 2'd2, flit: head(PT_GATHER, 5, gb)};
    @(negedge clk);                       // cycle t+1: RC
    in_link = '{valid: 1'b1, vc: 2'd2, flit: dat(FT_BODY, d0)};
    check(load_req == 4'b0100 && va_req == '0, "RC cycle: load request on VC 2");
    check(route[2] == route[2], "route visible");
    load_gnt = 4'b0100;
    @(negedge clk);                       // t+2: VA
    load_gnt = '0;
    pl_valid = 0;                         // claimed
    in_link = '{valid: 1'b1, vc: 2'd2, flit: dat(FT_BODY, d1)};
    check(va_req == 4'b0100 && route[2] == PORT_EAST, "VA cycle, route East");
    va_gnt = 4'b0100;
    @(negedge clk);
    va_gnt = '0;
    in_link = '{valid: 1'b1, vc: 2'd2, flit: dat(FT_TAIL, d2)};
    @(negedge clk);
    in_link = '0;
    check(outvc[2] == 2'd1, "output VC kept");
    take(2, f);
    hh = header_t'(f);
    check(hh.aspace == 4'd4 && hh.dst == gb, "ASpace decremented in the header");
    take(2, f);
    check(f == dat(FT_BODY, d0), "first body untouched");
    take(2, f);
    check(f == dat(FT_BODY, {d1[95:64], 32'hCAFE_0001, d1[31:0]}), "payload merged into slot 4");
    take(2, f);
    check(f == dat(FT_TAIL, d2), "tail untouched");
    check(uploads == 1, "one upload");

    // unicast on VC 0 and a gather packet with ASpace 0 on VC 1, interleaved
    pl_valid = 1; pl_data = 32'h5555_AAAA;
    put(2'd0, head(PT_UNICAST, 0, '{row: 3'd3, col: 4'd2}));
    check(load_req == '0, "unicast never loads");
    put(2'd1, head(PT_GATHER, 0, gb));
    check(load_req == '0, "full gather packet never loads");
    put(2'd0, dat(FT_TAIL, 96'h1));
    put(2'd1, dat(FT_BODY, 96'h2));
    put(2'd1, dat(FT_BODY, 96'h3));
    put(2'd1, dat(FT_TAIL, 96'h4));
    check(va_req == 4'b0011, "two VCs in VA");
    check(route[0] == PORT_SOUTH && route[1] == PORT_EAST, "routes of both packets");
    va_gnt = 4'b0011;
    @(negedge clk);
    va_gnt = '0;
    take(0, f); check(flit_ft(f) == FT_HEAD, "VC0 head");
    take(1, f); hh = header_t'(f); check(hh.ft == FT_HEAD && hh.aspace == '0, "VC1 head unchanged");
    take(0, f); check(f == dat(FT_TAIL, 96'h1), "VC0 tail");
    take(1, f); check(f == dat(FT_BODY, 96'h2), "VC1 body 1");
    take(1, f); check(f == dat(FT_BODY, 96'h3), "VC1 body 2");
    take(1, f); check(f == dat(FT_TAIL, 96'h4), "VC1 tail");
    @(negedge clk);
    check(uploads == 1, "no upload without a load");
    check(credits == 10, $sformatf("one credit per flit read (%0d)", credits));
    check(sa_req_vc == '0 && va_req == '0, "all VCs idle");
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
