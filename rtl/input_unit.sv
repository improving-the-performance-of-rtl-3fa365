// input_unit -- one input port of the router: VC buffers, per-VC pipeline
// state and the gather upload path.
//
// Each of the NUM_VC virtual channels has a BUF_DEPTH-flit FIFO and a state:
//   IDLE   -- when a header reaches the FIFO head, route computation (RC)
//             runs in that cycle and the Gather Load Generator evaluates it;
//   VA     -- the VC asks for an output VC; in the first VA cycle a granted
//             gather load writes the decremented ASpace into the buffered
//             header (ASpace is updated in the VC stage, as in the paper);
//   ACTIVE -- flits of the packet request the switch while credits allow;
//             sending the tail returns the VC to IDLE.
// Body and tail flits skip RC and VA. The payload upload is done on the read
// path: when the flit that holds the reserved slot is read from the buffer
// for switch traversal, the payload is written into its slot and uploaded
// pulses. The upload therefore adds no cycle to any flit, which is the
// paper's point; where exactly the merge sits in the pipeline is this
// design's choice (the paper places it in the RC/VA slots of body flits).
//
// Timing: a flit written at the end of cycle t is visible at the head in
// t+1 (RC for a header), VA in t+2, switch allocation in t+3 at the earliest.
// A credit is returned upstream (registered) for every flit read.
module input_unit
  import noc_pkg::*;
#(
  parameter bit LOAD_EN = 1'b1   // 0 for the local port: a PE never loads into its own packet
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  coord_t               my_pos,
  input  link_t                in_link,
  output credit_t              credit_out,
  // VC allocation
  output logic [NUM_VC-1:0]    va_req,
  output port_e                route   [NUM_VC],
  input  logic [NUM_VC-1:0]    va_gnt,
  input  logic [VC_W-1:0]      va_outvc[NUM_VC],
  // switch allocation
  output logic [NUM_VC-1:0]    sa_req_vc,   // ACTIVE and a flit is buffered
  output logic [VC_W-1:0]      outvc   [NUM_VC],
  input  logic                 sa_gnt,
  input  logic [VC_W-1:0]      sa_gnt_vc,
  output flit_t                sa_flit,
  output logic                 sa_tail,
  // gather support
  input  logic                 pl_valid,
  input  logic [PAYLOAD_W-1:0] pl_data,
  input  coord_t               pl_dst,
  output logic [NUM_VC-1:0]    load_req,    // a gather header here can take the payload
  input  logic [NUM_VC-1:0]    load_gnt,    // this VC got it
  output logic                 uploaded
);

  localparam int unsigned PTR_W = $clog2(BUF_DEPTH);
  localparam int unsigned CNT_W = $clog2(BUF_DEPTH + 1);

  typedef enum logic [1:0] {VS_IDLE, VS_VA, VS_ACTIVE} vc_state_e;

  flit_t               mem     [NUM_VC][BUF_DEPTH];
  logic [PTR_W-1:0]    rd_ptr  [NUM_VC];
  logic [PTR_W-1:0]    wr_ptr  [NUM_VC];
  logic [CNT_W-1:0]    count   [NUM_VC];
  vc_state_e           state   [NUM_VC];
  port_e               route_q [NUM_VC];
  logic [VC_W-1:0]     outvc_q [NUM_VC];
  logic                load_q  [NUM_VC];   // payload reserved in this packet
  logic                aspace_wb[NUM_VC];  // ASpace write-back pending (VA stage)
  logic [ASPACE_W-1:0] aspace_q[NUM_VC];
  logic [ASPACE_W-1:0] slot_q  [NUM_VC];
  logic [1:0]          dcnt_q  [NUM_VC];   // data flits of the packet read so far

  flit_t               head    [NUM_VC];
  port_e               rc_port [NUM_VC];
  logic                gl_load [NUM_VC];
  logic [ASPACE_W-1:0] gl_aspace[NUM_VC];
  logic [ASPACE_W-1:0] gl_slot [NUM_VC];
  logic [NUM_VC-1:0]   rc_now;

  for (genvar v = 0; v < NUM_VC; v++) begin : g_vc
    header_t head_hdr;
    assign head[v]  = mem[v][rd_ptr[v]];
    assign head_hdr = header_t'(head[v]);

    route_compute u_rc (
      .my_pos  (my_pos),
      .dst     (head_hdr.dst),
      .out_port(rc_port[v])
    );

    gather_load_gen u_glg (
      .flit      (head[v]),
      .pl_valid  (pl_valid),
      .pl_dst    (pl_dst),
      .load      (gl_load[v]),
      .aspace_new(gl_aspace[v]),
      .slot      (gl_slot[v])
    );

    assign rc_now[v]    = (state[v] == VS_IDLE) && (count[v] != '0)
                          && (flit_ft(head[v]) == FT_HEAD);
    assign load_req[v]  = LOAD_EN && rc_now[v] && gl_load[v];
    assign va_req[v]    = (state[v] == VS_VA);
    assign route[v]     = route_q[v];
    assign sa_req_vc[v] = (state[v] == VS_ACTIVE) && (count[v] != '0);
    assign outvc[v]     = outvc_q[v];
  end

  // Read path with the gather upload.
  flit_t      rd_flit;
  data_flit_t merged;
  logic       rd_is_data, do_upload;
  logic [ASPACE_W-1:0] rd_slot;

  always_comb begin
    rd_flit    = head[sa_gnt_vc];
    rd_slot    = slot_q[sa_gnt_vc];
    rd_is_data = (flit_ft(rd_flit) == FT_BODY) || (flit_ft(rd_flit) == FT_TAIL);
    do_upload  = sa_gnt && rd_is_data && load_q[sa_gnt_vc]
                 && (ASPACE_W'(dcnt_q[sa_gnt_vc]) == rd_slot / ASPACE_W'(SLOTS_PER_FLIT));
    merged     = data_flit_t'(rd_flit);
    if (do_upload)
      merged.data[PAYLOAD_W * (int'(rd_slot) % SLOTS_PER_FLIT) +: PAYLOAD_W] = pl_data;
    sa_flit    = flit_t'(merged);
    sa_tail    = (flit_ft(rd_flit) == FT_TAIL) || (flit_ft(rd_flit) == FT_HEADTAIL);
  end
  assign uploaded = do_upload;

  logic [NUM_VC-1:0] wr, rd;
  flit_t             head_upd [NUM_VC];   // head with the new ASpace

  always_comb
    for (int v = 0; v < NUM_VC; v++) begin
      header_t h;
      wr[v] = in_link.valid && (in_link.vc == VC_W'(v));
      rd[v] = sa_gnt && (sa_gnt_vc == VC_W'(v));
      h = header_t'(head[v]);
      h.aspace = aspace_q[v];
      head_upd[v] = flit_t'(h);
    end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int v = 0; v < NUM_VC; v++) begin
        rd_ptr[v]    <= '0;
        wr_ptr[v]    <= '0;
        count[v]     <= '0;
        state[v]     <= VS_IDLE;
        route_q[v]   <= PORT_LOCAL;
        outvc_q[v]   <= '0;
        load_q[v]    <= 1'b0;
        aspace_wb[v] <= 1'b0;
        aspace_q[v]  <= '0;
        slot_q[v]    <= '0;
        dcnt_q[v]    <= '0;
        for (int d = 0; d < BUF_DEPTH; d++) mem[v][d] <= '0;
      end
      credit_out <= '0;
    end else begin
      credit_out <= '0;
      for (int v = 0; v < NUM_VC; v++) begin
        if (wr[v]) begin
          mem[v][wr_ptr[v]] <= in_link.flit;
          wr_ptr[v]         <= wr_ptr[v] + 1'b1;
        end
        if (rd[v]) begin
          rd_ptr[v] <= rd_ptr[v] + 1'b1;
          credit_out.valid <= 1'b1;
          credit_out.vc    <= VC_W'(v);
        end
        count[v] <= count[v] + CNT_W'(wr[v]) - CNT_W'(rd[v]);

        unique case (state[v])
          VS_IDLE: if (rc_now[v]) begin
            state[v]     <= VS_VA;
            route_q[v]   <= rc_port[v];
            load_q[v]    <= load_gnt[v];
            aspace_wb[v] <= load_gnt[v];
            aspace_q[v]  <= gl_aspace[v];
            slot_q[v]    <= gl_slot[v];
            dcnt_q[v]    <= '0;
          end
          VS_VA: begin
            if (aspace_wb[v]) begin
              mem[v][rd_ptr[v]] <= head_upd[v];
              aspace_wb[v] <= 1'b0;
            end
            if (va_gnt[v]) begin
              state[v]   <= VS_ACTIVE;
              outvc_q[v] <= va_outvc[v];
            end
          end
          VS_ACTIVE: if (rd[v]) begin
            if (flit_ft(head[v]) != FT_HEAD) dcnt_q[v] <= dcnt_q[v] + 1'b1;
            if (sa_tail) begin
              state[v]  <= VS_IDLE;
              load_q[v] <= 1'b0;
            end
          end
          default: state[v] <= VS_IDLE;
        endcase
      end
    end
  end

  // A VC buffer never overflows: the upstream router only sends with credit.
  for (genvar v = 0; v < NUM_VC; v++) begin : g_chk
    assert property (@(posedge clk) disable iff (!rst_n)
      (in_link.valid && in_link.vc == VC_W'(v)) |-> (count[v] < CNT_W'(BUF_DEPTH)
                                                     || (sa_gnt && sa_gnt_vc == VC_W'(v))));
    assert property (@(posedge clk) disable iff (!rst_n)
      (sa_gnt && sa_gnt_vc == VC_W'(v)) |-> sa_req_vc[v]);
  end

endmodule
