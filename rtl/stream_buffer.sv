// stream_buffer -- edge buffer that streams operands into the systolic array.
//
// Used twice: as the input buffer on the left edge (one lane per PE row,
// lane i holding the C*R*R input values of feature map I_i) and as the
// weight buffer on the top edge (one lane per PE column, lane j holding the
// C*R*R weights of filter F_j). The host fills the lanes through the write
// port, then pulses start with len = C*R*R. The buffer reads address 0 to
// len-1 of all lanes, one address per cycle, and delays lane k by k cycles so
// that PE (i,j) receives I_i and F_j of the same step in the same cycle.
// The last value of each lane carries the last flag.
//
// Timing: if start is sampled at clock edge e, lane 0 presents address 0
// from edge e+3 on (load counter, read, skew register); lane k follows k
// cycles after lane 0.
// busy stays high until the last lane has sent its last value.
// The paper gives the streaming from the left and top edges; the memory
// organisation, the skew registers and the control port are this design's.
// DEPTH defaults to 4608 = 512*3*3, the largest C*R*R among the paper's
// evaluated layers.
module stream_buffer #(
  parameter int unsigned LANES = 8,
  parameter int unsigned DEPTH = 4608,
  parameter int unsigned DW    = 16
) (
  input  logic                     clk,
  input  logic                     rst_n,
  // host write port
  input  logic                     wr_en,
  input  logic [$clog2(LANES)-1:0] wr_lane,
  input  logic [$clog2(DEPTH)-1:0] wr_addr,
  input  logic [DW-1:0]            wr_data,
  // stream control
  input  logic                     start,
  input  logic [$clog2(DEPTH+1)-1:0] len,
  output logic                     busy,
  // skewed lane outputs
  output logic [DW-1:0]            out_data [LANES],
  output logic                     out_valid[LANES],
  output logic                     out_last [LANES]
);
  localparam int unsigned AW = $clog2(DEPTH);
  localparam int unsigned LW = $clog2(DEPTH + 1);

  logic [DW-1:0] mem [LANES][DEPTH];
  logic [AW-1:0] addr_q;
  logic [LW-1:0] left_q;        // addresses still to read
  logic          rd_q, last_q;  // read issued last cycle
  logic [DW-1:0] rd_data_q [LANES];

  // skew shift registers: lane k has k stages after the read register
  logic [DW-1:0] sk_data [LANES][LANES];
  logic          sk_valid[LANES][LANES];
  logic          sk_last [LANES][LANES];
  logic [LANES-1:0] pending;

  always_ff @(posedge clk) begin
    if (wr_en) mem[wr_lane][wr_addr] <= wr_data;
    for (int l = 0; l < LANES; l++) rd_data_q[l] <= mem[l][addr_q];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      addr_q <= '0;
      left_q <= '0;
      rd_q   <= 1'b0;
      last_q <= 1'b0;
    end else begin
      rd_q   <= (left_q != '0);
      last_q <= (left_q == LW'(1));
      if (start && left_q == '0) begin
        addr_q <= '0;
        left_q <= len;
      end else if (left_q != '0) begin
        addr_q <= addr_q + 1'b1;
        left_q <= left_q - 1'b1;
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int l = 0; l < LANES; l++)
        for (int s = 0; s < LANES; s++) begin
          sk_data[l][s] <= '0; sk_valid[l][s] <= 1'b0; sk_last[l][s] <= 1'b0;
        end
    end else begin
      for (int l = 0; l < LANES; l++) begin
        sk_data[l][0]  <= rd_data_q[l];
        sk_valid[l][0] <= rd_q;
        sk_last[l][0]  <= last_q;
        for (int s = 1; s < LANES; s++) begin
          sk_data[l][s]  <= sk_data[l][s-1];
          sk_valid[l][s] <= sk_valid[l][s-1];
          sk_last[l][s]  <= sk_last[l][s-1];
        end
      end
    end
  end

  always_comb begin
    for (int l = 0; l < LANES; l++) begin
      out_data[l]  = sk_data[l][l];
      out_valid[l] = sk_valid[l][l];
      out_last[l]  = sk_last[l][l];
      pending[l]   = 1'b0;
      for (int s = 0; s <= l; s++) pending[l] = pending[l] | sk_valid[l][s];
    end
  end

  assign busy = (left_q != '0) || rd_q || (|pending);

endmodule
