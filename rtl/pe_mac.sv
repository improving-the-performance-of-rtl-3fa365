// pe_mac -- processing element of the output-stationary systolic array.
//
// Each cycle the PE registers the input activation arriving from its left
// neighbour and the weight arriving from its upper neighbour, and passes the
// registered values on to its right and lower neighbours, so the operands
// move one PE per cycle. When both registered operands are valid it
// multiplies them; the product goes through a pipeline and is added to the
// accumulator, which stays in the PE (output stationary). The operand pair
// flagged last closes the partial convolution PC = sum(I*F) of one round:
// T_MAC cycles after that pair is registered, result_valid rises with the
// sum and the accumulator restarts from zero for the next round.
//
// The result is held until the router's Gather Payload unit accepts it
// (result_ready). The paper gives the dataflow, the MAC operation and
// T_MAC = 5 cycles; operand widths (16-bit signed) and the split of T_MAC
// into T_MAC-1 product register stages plus one accumulate stage are this
// design's choices. The 32-bit result matches the paper's gather payload.
module pe_mac
  import noc_pkg::*;
#(
  parameter int unsigned DW    = 16,
  parameter int unsigned TMAC  = T_MAC   // must be >= 2
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic signed [DW-1:0] a_in,
  input  logic                 a_valid_in,
  input  logic                 a_last_in,
  input  logic signed [DW-1:0] w_in,
  input  logic                 w_valid_in,
  input  logic                 w_last_in,
  output logic signed [DW-1:0] a_out,
  output logic                 a_valid_out,
  output logic                 a_last_out,
  output logic signed [DW-1:0] w_out,
  output logic                 w_valid_out,
  output logic                 w_last_out,
  output logic                 result_valid,
  output logic [PAYLOAD_W-1:0] result,
  input  logic                 result_ready
);
  localparam int unsigned PS = TMAC - 1;   // product pipeline stages

  logic signed [PAYLOAD_W-1:0] prod_q [PS];
  logic                        pv_q   [PS];
  logic                        pl_q   [PS];
  logic signed [PAYLOAD_W-1:0] acc_q;
  logic                        fire;

  assign fire = a_valid_out && w_valid_out;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      a_out <= '0; a_valid_out <= 1'b0; a_last_out <= 1'b0;
      w_out <= '0; w_valid_out <= 1'b0; w_last_out <= 1'b0;
      for (int s = 0; s < PS; s++) begin
        prod_q[s] <= '0; pv_q[s] <= 1'b0; pl_q[s] <= 1'b0;
      end
      acc_q        <= '0;
      result       <= '0;
      result_valid <= 1'b0;
    end else begin
      a_out <= a_in; a_valid_out <= a_valid_in; a_last_out <= a_last_in;
      w_out <= w_in; w_valid_out <= w_valid_in; w_last_out <= w_last_in;

      prod_q[0] <= PAYLOAD_W'(a_out * w_out);
      pv_q[0]   <= fire;
      pl_q[0]   <= fire && a_last_out;
      for (int s = 1; s < PS; s++) begin
        prod_q[s] <= prod_q[s-1];
        pv_q[s]   <= pv_q[s-1];
        pl_q[s]   <= pl_q[s-1];
      end

      if (result_valid && result_ready) result_valid <= 1'b0;
      if (pv_q[PS-1]) begin
        if (pl_q[PS-1]) begin
          result       <= acc_q + prod_q[PS-1];
          result_valid <= 1'b1;
          acc_q        <= '0;
        end else begin
          acc_q <= acc_q + prod_q[PS-1];
        end
      end
    end
  end

  // Operands of one step arrive together (the edge buffers skew the streams).
  assert property (@(posedge clk) disable iff (!rst_n) a_valid_out == w_valid_out);
  // A new result never overwrites one the router has not taken yet.
  assert property (@(posedge clk) disable iff (!rst_n)
    (pv_q[PS-1] && pl_q[PS-1]) |-> (!result_valid || result_ready));

endmodule
