// rr_arbiter -- round-robin arbiter used by the allocators.
//
// Grants one of N requests per cycle, one-hot. The search starts just after
// the last granted index, so every persistent request is served within N
// grants. The pointer moves only when upd is high and a grant is made (the
// grant was used). Combinational grant, registered pointer.
module rr_arbiter #(
  parameter int unsigned N = 4
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic [N-1:0] req,
  input  logic         upd,
  output logic [N-1:0] gnt,
  output logic [$clog2(N > 1 ? N : 2)-1:0] gnt_idx,
  output logic         gnt_valid
);
  localparam int unsigned IW = $clog2(N > 1 ? N : 2);

  logic [IW-1:0] last_q;

  always_comb begin
    gnt       = '0;
    gnt_idx   = '0;
    gnt_valid = 1'b0;
    for (int k = 1; k <= N; k++) begin
      int unsigned i;
      i = (int'(last_q) + k) % N;
      if (!gnt_valid && req[i]) begin
        gnt_valid = 1'b1;
        gnt_idx   = IW'(i);
        gnt[i]    = 1'b1;
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)                 last_q <= IW'(N - 1);
    else if (upd && gnt_valid)  last_q <= gnt_idx;
  end

endmodule
