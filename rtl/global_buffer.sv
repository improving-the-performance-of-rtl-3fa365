// global_buffer -- the global buffer on the right edge of the mesh.
//
// Row r of the mesh delivers its results on the East port of its last
// router; the buffer has one such sink per row, always ready, returning a
// credit in the cycle after each flit. It unpacks packets and appends every
// payload they carry to that row's region of the buffer memory, in arrival
// order:
//   gather packet  -- the header says how many slots are filled
//                     (GATHER_SLOTS - ASpace); the data flits carry them,
//                     three 32-bit slots per flit, slot 0 first;
//   other packets  -- one payload, in slot 0 of the first data flit.
// Flits of packets on different VCs may interleave on a link, so the unpack
// state is kept per VC. Up to three payloads per row are written per cycle.
// Each row region is a ring of GB_DEPTH words; wr_count tells the host how
// many payloads a row has received in total, pkt_count how many packets.
// The host reads any word through a combinational read port.
// The paper gives the buffer's place and role only; its organisation here
// (per-row append rings, GB_DEPTH = 64) is this design's choice.
module global_buffer
  import noc_pkg::*;
#(
  parameter int unsigned ROWS     = 8,
  parameter int unsigned GB_DEPTH = 64,
  parameter int unsigned CNT_W    = 16
) (
  input  logic                        clk,
  input  logic                        rst_n,
  input  link_t                       in_link  [ROWS],
  output credit_t                     credit   [ROWS],
  input  logic [$clog2(ROWS > 1 ? ROWS : 2)-1:0] rd_row,
  input  logic [$clog2(GB_DEPTH)-1:0] rd_addr,
  output logic [PAYLOAD_W-1:0]        rd_data,
  output logic [CNT_W-1:0]            wr_count [ROWS],
  output logic [CNT_W-1:0]            pkt_count[ROWS]
);
  localparam int unsigned AW = $clog2(GB_DEPTH);

  logic [PAYLOAD_W-1:0] mem   [ROWS][GB_DEPTH];
  logic [ASPACE_W-1:0]  left_q[ROWS][NUM_VC];   // payloads still to unpack
  logic [CNT_W-1:0]     wcnt_q[ROWS];
  logic [CNT_W-1:0]     pcnt_q[ROWS];

  assign rd_data   = mem[rd_row][rd_addr];
  assign wr_count  = wcnt_q;
  assign pkt_count = pcnt_q;

  // per-row decode of the arriving flit
  logic                is_head [ROWS];
  logic                is_data [ROWS];
  data_flit_t          dflit   [ROWS];
  header_t             hflit   [ROWS];
  logic [ASPACE_W-1:0] n_left  [ROWS];   // payloads still expected on this VC
  logic [ASPACE_W-1:0] n_take  [ROWS];   // payloads in this flit
  logic [ASPACE_W-1:0] n_new   [ROWS];   // count announced by a header

  always_comb
    for (int r = 0; r < ROWS; r++) begin
      is_head[r] = in_link[r].valid && flit_ft(in_link[r].flit) == FT_HEAD;
      is_data[r] = in_link[r].valid && !is_head[r];
      dflit[r]   = data_flit_t'(in_link[r].flit);
      hflit[r]   = header_t'(in_link[r].flit);
      n_left[r]  = left_q[r][in_link[r].vc];
      n_take[r]  = (n_left[r] > ASPACE_W'(SLOTS_PER_FLIT)) ? ASPACE_W'(SLOTS_PER_FLIT) : n_left[r];
      n_new[r]   = (hflit[r].pt == PT_GATHER) ? ASPACE_W'(GATHER_SLOTS) - hflit[r].aspace
                                              : ASPACE_W'(1);
    end

  always_ff @(posedge clk)
    for (int r = 0; r < ROWS; r++)
      if (is_data[r])
        for (int s = 0; s < SLOTS_PER_FLIT; s++)
          if (ASPACE_W'(s) < n_take[r])
            mem[r][AW'(wcnt_q[r] + CNT_W'(s))] <= dflit[r].data[PAYLOAD_W*s +: PAYLOAD_W];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int r = 0; r < ROWS; r++) begin
        for (int v = 0; v < NUM_VC; v++) left_q[r][v] <= '0;
        wcnt_q[r] <= '0;
        pcnt_q[r] <= '0;
        credit[r] <= '0;
      end
    end else begin
      for (int r = 0; r < ROWS; r++) begin
        credit[r].valid <= in_link[r].valid;
        credit[r].vc    <= in_link[r].vc;
        if (is_head[r]) begin
          left_q[r][in_link[r].vc] <= n_new[r];
          pcnt_q[r] <= pcnt_q[r] + 1'b1;
        end else if (is_data[r]) begin
          left_q[r][in_link[r].vc] <= n_left[r] - n_take[r];
          wcnt_q[r] <= wcnt_q[r] + CNT_W'(n_take[r]);
        end
      end
    end
  end

endmodule
