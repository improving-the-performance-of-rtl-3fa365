// gather_cnn_accel -- NoC-based output-stationary CNN accelerator with
// gather packets for the many-to-one result traffic.
//
// ROWS x COLS nodes form a mesh. Every node has a MAC processing element
// (pe_mac), a five-port VC router with a Gather Load Generator and a Gather
// Payload unit (router), and a network interface that starts gather packets
// (gather_ni). An input buffer on the left edge streams one feature-map
// vector per row, a weight buffer on the top edge one filter per column
// (stream_buffer); operands move right and down one PE per cycle, so PE (i,j)
// computes PC = sum over C*R*R steps of I_i * F_j. A global buffer on the
// right edge (global_buffer) receives each row's results from the East port
// of the row's last router.
//
// Result collection (row-based gather): a PE hands its finished sum to its
// router's Gather Payload unit, addressed to its row's global-buffer port
// (row r, column COLS). A gather packet travelling East along the row picks
// the payload up if it has a free slot; the router acks the PE. If none
// comes within delta cycles (delta_cfg, settable per router), the router
// nacks and the PE's network interface starts a new gather packet carrying
// its own payload. The leftmost PE of a row always finishes first, so it
// normally starts the row's packet and the others piggyback on it.
//
// Host interface: fill the buffers through the write ports, pulse start with
// len = C*R*R, and read the results from the global buffer once wr_count of
// every row has grown by COLS. Packets delivered to a node's local port
// (none in this design's own traffic) appear on eject_valid / eject_flit.
// Defaults follow the paper's main 8x8 configuration and Table I; see the
// sub-modules for what is this design's own choice.
module gather_cnn_accel
  import noc_pkg::*;
#(
  parameter int unsigned ROWS     = 8,
  parameter int unsigned COLS     = 8,
  parameter int unsigned DW       = 16,
  parameter int unsigned SB_DEPTH = 4608,
  parameter int unsigned GB_DEPTH = 64,
  parameter int unsigned DELTA_W  = 8
) (
  input  logic                          clk,
  input  logic                          rst_n,
  // input (feature map) buffer write port, one lane per row
  input  logic                          in_wr_en,
  input  logic [$clog2(ROWS)-1:0]       in_wr_lane,
  input  logic [$clog2(SB_DEPTH)-1:0]   in_wr_addr,
  input  logic [DW-1:0]                 in_wr_data,
  // weight buffer write port, one lane per column
  input  logic                          w_wr_en,
  input  logic [$clog2(COLS)-1:0]       w_wr_lane,
  input  logic [$clog2(SB_DEPTH)-1:0]   w_wr_addr,
  input  logic [DW-1:0]                 w_wr_data,
  // one round of convolution
  input  logic                          start,
  input  logic [$clog2(SB_DEPTH+1)-1:0] len,
  output logic                          stream_busy,
  // per-router delta timeout
  input  logic [DELTA_W-1:0]            delta_cfg [ROWS][COLS],
  // global buffer
  input  logic [$clog2(ROWS)-1:0]       gb_rd_row,
  input  logic [$clog2(GB_DEPTH)-1:0]   gb_rd_addr,
  output logic [PAYLOAD_W-1:0]          gb_rd_data,
  output logic [15:0]                   gb_wr_count [ROWS],
  output logic [15:0]                   gb_pkt_count[ROWS],
  // local ejection
  output logic                          eject_valid [ROWS][COLS],
  output flit_t                         eject_flit  [ROWS][COLS]
);

  // systolic operand wires: a_* leave PE (r,c) to the right, w_* downward
  logic [DW-1:0] a_d [ROWS][COLS];
  logic          a_v [ROWS][COLS];
  logic          a_l [ROWS][COLS];
  logic [DW-1:0] w_d [ROWS][COLS];
  logic          w_v [ROWS][COLS];
  logic          w_l [ROWS][COLS];

  logic [DW-1:0] ib_d [ROWS];
  logic          ib_v [ROWS];
  logic          ib_l [ROWS];
  logic [DW-1:0] wb_d [COLS];
  logic          wb_v [COLS];
  logic          wb_l [COLS];
  logic          ib_busy, wb_busy;

  stream_buffer #(.LANES(ROWS), .DEPTH(SB_DEPTH), .DW(DW)) u_ibuf (
    .clk, .rst_n,
    .wr_en(in_wr_en), .wr_lane(in_wr_lane), .wr_addr(in_wr_addr), .wr_data(in_wr_data),
    .start, .len, .busy(ib_busy),
    .out_data(ib_d), .out_valid(ib_v), .out_last(ib_l)
  );

  stream_buffer #(.LANES(COLS), .DEPTH(SB_DEPTH), .DW(DW)) u_wbuf (
    .clk, .rst_n,
    .wr_en(w_wr_en), .wr_lane(w_wr_lane), .wr_addr(w_wr_addr), .wr_data(w_wr_data),
    .start, .len, .busy(wb_busy),
    .out_data(wb_d), .out_valid(wb_v), .out_last(wb_l)
  );

  assign stream_busy = ib_busy || wb_busy;

  // router links, indexed by the router that drives them
  link_t   r_out  [ROWS][COLS][NUM_PORTS];
  credit_t r_cout [ROWS][COLS][NUM_PORTS];
  link_t   gb_in  [ROWS];
  credit_t gb_cred[ROWS];

  for (genvar r = 0; r < ROWS; r++) begin : g_row
    for (genvar c = 0; c < COLS; c++) begin : g_col
      coord_t  pos, gb_dst;
      link_t   rin  [NUM_PORTS];
      credit_t rcin [NUM_PORTS];
      link_t   inj;
      credit_t ej_cred;
      logic    pe_rv, pe_ready, ack, nack;
      logic [PAYLOAD_W-1:0] pe_res, nack_data;
      coord_t  nack_dst;

      assign pos    = '{row: ROW_W'(r), col: COL_W'(c)};
      assign gb_dst = '{row: ROW_W'(r), col: COL_W'(COLS)};

      pe_mac #(.DW(DW)) u_pe (
        .clk, .rst_n,
        .a_in      (c == 0 ? ib_d[r] : a_d[r][c == 0 ? 0 : c-1]),
        .a_valid_in(c == 0 ? ib_v[r] : a_v[r][c == 0 ? 0 : c-1]),
        .a_last_in (c == 0 ? ib_l[r] : a_l[r][c == 0 ? 0 : c-1]),
        .w_in      (r == 0 ? wb_d[c] : w_d[r == 0 ? 0 : r-1][c]),
        .w_valid_in(r == 0 ? wb_v[c] : w_v[r == 0 ? 0 : r-1][c]),
        .w_last_in (r == 0 ? wb_l[c] : w_l[r == 0 ? 0 : r-1][c]),
        .a_out(a_d[r][c]), .a_valid_out(a_v[r][c]), .a_last_out(a_l[r][c]),
        .w_out(w_d[r][c]), .w_valid_out(w_v[r][c]), .w_last_out(w_l[r][c]),
        .result_valid(pe_rv), .result(pe_res), .result_ready(pe_ready)
      );

      // inputs from the neighbours (nothing beyond the mesh edges)
      assign rin[PORT_LOCAL] = inj;
      assign rin[PORT_NORTH] = (r > 0)        ? r_out[r == 0 ? 0 : r-1][c][PORT_SOUTH] : '0;
      assign rin[PORT_SOUTH] = (r < ROWS - 1) ? r_out[r < ROWS-1 ? r+1 : r][c][PORT_NORTH] : '0;
      assign rin[PORT_WEST]  = (c > 0)        ? r_out[r][c == 0 ? 0 : c-1][PORT_EAST] : '0;
      assign rin[PORT_EAST]  = (c < COLS - 1) ? r_out[r][c < COLS-1 ? c+1 : c][PORT_WEST] : '0;

      // credits from whoever receives this router's outputs
      assign rcin[PORT_LOCAL] = ej_cred;
      assign rcin[PORT_NORTH] = (r > 0)        ? r_cout[r == 0 ? 0 : r-1][c][PORT_SOUTH] : '0;
      assign rcin[PORT_SOUTH] = (r < ROWS - 1) ? r_cout[r < ROWS-1 ? r+1 : r][c][PORT_NORTH] : '0;
      assign rcin[PORT_WEST]  = (c > 0)        ? r_cout[r][c == 0 ? 0 : c-1][PORT_EAST] : '0;
      assign rcin[PORT_EAST]  = (c < COLS - 1) ? r_cout[r][c < COLS-1 ? c+1 : c][PORT_WEST]
                                               : gb_cred[r];

      router #(.DELTA_W(DELTA_W)) u_router (
        .clk, .rst_n,
        .my_pos    (pos),
        .delta     (delta_cfg[r][c]),
        .in_link   (rin),
        .credit_out(r_cout[r][c]),
        .out_link  (r_out[r][c]),
        .credit_in (rcin),
        .pe_wr     (pe_rv && pe_ready),
        .pe_data   (pe_res),
        .pe_dst    (gb_dst),
        .pe_ready  (pe_ready),
        .ack       (ack),
        .nack      (nack),
        .nack_data (nack_data),
        .nack_dst  (nack_dst)
      );

      gather_ni u_ni (
        .clk, .rst_n,
        .my_pos    (pos),
        .init_req  (nack),
        .init_data (nack_data),
        .init_dst  (nack_dst),
        .busy      (),
        .inj_link  (inj),
        .inj_credit(r_cout[r][c][PORT_LOCAL]),
        .ej_link   (r_out[r][c][PORT_LOCAL]),
        .ej_credit (ej_cred),
        .ej_valid  (eject_valid[r][c]),
        .ej_flit   (eject_flit[r][c])
      );
    end
    assign gb_in[r] = r_out[r][COLS-1][PORT_EAST];
  end

  global_buffer #(.ROWS(ROWS), .GB_DEPTH(GB_DEPTH), .CNT_W(16)) u_gb (
    .clk, .rst_n,
    .in_link(gb_in), .credit(gb_cred),
    .rd_row(gb_rd_row), .rd_addr(gb_rd_addr), .rd_data(gb_rd_data),
    .wr_count(gb_wr_count), .pkt_count(gb_pkt_count)
  );

endmodule
