// tb_gather_load_gen -- checks the gather load decision against an
// independent model: random header fields, payload destinations and payload
// presence, plus directed cases for each of the four terms, including a full
// packet (ASpace = 0) that must not be loaded.
module tb_gather_load_gen;
  import noc_pkg::*;

  flit_t               flit;
  logic                pl_valid;
  coord_t              pl_dst;
  logic                load;
  logic [ASPACE_W-1:0] aspace_new, slot;

  gather_load_gen dut (.*);

  int checks = 0, failures = 0;

  task automatic try(input flit_type_e ft, input pkt_type_e pt, input int asp,
                     input coord_t d, input coord_t pd, input bit pv);
    header_t h;
    bit exp_load;
    h = '0;
    h.ft = ft; h.pt = pt; h.aspace = ASPACE_W'(asp); h.dst = d;
    h.src = coord_t'($urandom); h.mdst = {$urandom, $urandom}; h.rsv = RSV_W'($urandom);
    flit = flit_t'(h); pl_dst = pd; pl_valid = pv;
    #1;
    exp_load = (ft == FT_HEAD) && (pt == PT_GATHER) && (asp >= 1) && (d == pd) && pv;
    checks++;
    if (load !== exp_load || (exp_load && aspace_new != ASPACE_W'(asp - 1))
        || (!exp_load && aspace_new != ASPACE_W'(asp)) || slot != ASPACE_W'(GATHER_SLOTS - asp)) begin
      failures++;
      $display("FAIL ft=%0d pt=%0d asp=%0d load=%0d exp=%0d new=%0d slot=%0d", ft, pt, asp, load, exp_load, aspace_new, slot);
    end
  endtask

  initial begin
    coord_t a, b;
    a = '{row: 3'd2, col: 4'd8};
    b = '{row: 3'd3, col: 4'd8};
    try(FT_HEAD, PT_GATHER, 9, a, a, 1);   // loads
    try(FT_HEAD, PT_GATHER, 1, a, a, 1);   // last free slot
    try(FT_HEAD, PT_GATHER, 0, a, a, 1);   // full packet: no load
    try(FT_BODY, PT_GATHER, 5, a, a, 1);   // not a header
    try(FT_HEAD, PT_UNICAST, 5, a, a, 1);  // not a gather packet
    try(FT_HEAD, PT_MULTICAST, 5, a, a, 1);
    try(FT_HEAD, PT_GATHER, 5, a, b, 1);   // other destination
    try(FT_HEAD, PT_GATHER, 5, a, a, 0);   // no payload waiting
    for (int i = 0; i < 400; i++) begin
      coord_t d;
      d = coord_t'($urandom);
      try(flit_type_e'($urandom_range(0, 3)), pkt_type_e'($urandom_range(0, 2)),
          $urandom_range(0, GATHER_SLOTS), d, ($urandom_range(0, 1) != 0) ? d : coord_t'($urandom),
          $urandom_range(0, 1) != 0);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
