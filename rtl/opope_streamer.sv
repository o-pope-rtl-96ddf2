// opope_streamer: memory-side data mover of the O-POPE accelerator.
//
// It turns one GEMM job (D = C + A*B, M x K times K x N) into four streams of
// 2p-element vectors on a single 2p*q-bit TCDM port:
//   A    : for each tile (tm, tn), for k: A[tm*2p .. +2p-1][k]
//          A is stored transposed (K x M row-major), so the vector is contiguous;
//   B    : for each tile, for k: B[k][tn*2p .. +2p-1]  (B stored K x N row-major);
//   C in : for each tile, for r < 2p: C[tm*2p + r][tn*2p .. +2p-1]  (M x N row-major);
//   D out: the same walk over the result matrix, fed by the engine.
// Tiles are visited tm-major.  Each channel has a three-level address
// generator.  Elements outside M or N are replaced by zeros on loads and get
// cleared byte enables on stores, so any M, N >= 1 works: partial tiles cost
// the same time as full ones.
//
// Port use: a round-robin arbiter picks one ready channel per cycle.  A read
// channel is ready only while its FIFO has a free slot that is not yet
// reserved by an outstanding read (FIFO count + outstanding < DEPTH), which is
// what lets the FIFOs absorb bank-conflict latency.  With the engine taking
// one A and one B vector per four cycles, A and B use half of the port and
// the C traffic the other half.
//
// TCDM port (this design's simplification of a multi-lane HWPE port): one
// request carries the whole 2p*q-bit vector; req_o is held with stable
// address and data until gnt_i; read data returns in order with rvalid_i
// (one cycle after the grant in the cluster); writes have no response.
module opope_streamer #(
  parameter int unsigned P        = opope_pkg::P_DEFAULT,
  parameter int unsigned Q        = opope_pkg::Q_DEFAULT,
  parameter int unsigned DEPTH    = 4,
  localparam int unsigned V  = 2 * P,
  localparam int unsigned VW = V * Q,
  localparam int unsigned EB = Q / 8,
  localparam int unsigned AW = opope_pkg::ADDR_W,
  localparam int unsigned DW = opope_pkg::DIM_W,
  localparam int unsigned FCW = $clog2(DEPTH + 1)
) (
  input  logic              clk_i,
  input  logic              rst_ni,
  // job
  input  logic              start_i,
  input  opope_pkg::job_t   job_i,
  input  logic [DW-1:0]     tm_n_i,      // tiles along M: ceil(M / 2p)
  input  logic [DW-1:0]     tn_n_i,      // tiles along N: ceil(N / 2p)
  output logic              idle_o,
  // FIFO side
  output logic              a_push_o,
  output logic [VW-1:0]     a_data_o,
  input  logic [FCW-1:0]    a_count_i,
  output logic              b_push_o,
  output logic [VW-1:0]     b_data_o,
  input  logic [FCW-1:0]    b_count_i,
  output logic              c_push_o,
  output logic [VW-1:0]     c_data_o,
  input  logic [FCW-1:0]    c_count_i,
  input  logic              d_valid_i,
  output logic              d_ready_o,
  input  logic [VW-1:0]     d_data_i,
  // TCDM
  output logic              tcdm_req_o,
  input  logic              tcdm_gnt_i,
  output logic              tcdm_wen_o,      // 1: write
  output logic [AW-1:0]     tcdm_addr_o,     // byte address
  output logic [VW-1:0]     tcdm_wdata_o,
  output logic [VW/8-1:0]   tcdm_be_o,
  input  logic              tcdm_rvalid_i,
  input  logic [VW-1:0]     tcdm_rdata_i
);
  import opope_pkg::*;

  localparam int unsigned NVW = $clog2(V + 1);
  localparam int unsigned TQD = 4;          // response tag queue depth

  // ------------------------------------------------------ address generators
  logic [AW-1:0] m_b, n_b, v_b;
  assign m_b = AW'(job_i.m) * AW'(EB);
  assign n_b = AW'(job_i.n) * AW'(EB);
  assign v_b = AW'(V * EB);

  logic [3:0]    ag_next, ag_done;
  logic [AW-1:0] ag_addr [4];
  logic [DW-1:0] ag_o [4], ag_m [4], ag_i [4];

  logic [AW-1:0] ag_base [4], ag_so [4], ag_sm [4], ag_si [4];
  logic [DW-1:0] ag_ni [4];
  always_comb begin
    ag_base[STR_A]    = job_i.a_addr; ag_so[STR_A]    = v_b;       ag_sm[STR_A]    = '0;  ag_si[STR_A]    = m_b; ag_ni[STR_A]    = job_i.k;
    ag_base[STR_B]    = job_i.b_addr; ag_so[STR_B]    = '0;        ag_sm[STR_B]    = v_b; ag_si[STR_B]    = n_b; ag_ni[STR_B]    = job_i.k;
    ag_base[STR_CIN]  = job_i.c_addr; ag_so[STR_CIN]  = v_b * n_b / AW'(EB); ag_sm[STR_CIN]  = v_b; ag_si[STR_CIN]  = n_b; ag_ni[STR_CIN]  = DW'(V);
    ag_base[STR_COUT] = job_i.d_addr; ag_so[STR_COUT] = v_b * n_b / AW'(EB); ag_sm[STR_COUT] = v_b; ag_si[STR_COUT] = n_b; ag_ni[STR_COUT] = DW'(V);
  end

  for (genvar s = 0; s < 4; s++) begin : g_ag
    opope_agen #(.AW(AW), .CW(DW)) i_agen (
      .clk_i, .rst_ni, .start_i,
      .base_i(ag_base[s]), .n_outer_i(tm_n_i), .n_mid_i(tn_n_i), .n_inner_i(ag_ni[s]),
      .s_outer_i(ag_so[s]), .s_mid_i(ag_sm[s]), .s_inner_i(ag_si[s]),
      .next_i(ag_next[s]), .addr_o(ag_addr[s]),
      .idx_outer_o(ag_o[s]), .idx_mid_o(ag_m[s]), .idx_inner_o(ag_i[s]), .done_o(ag_done[s])
    );
  end

  // number of valid elements of each channel's current vector
  function automatic logic [NVW-1:0] clip(input logic [DW-1:0] dim, input logic [DW-1:0] tile);
    logic [DW+NVW:0] rem;
    rem = {{(NVW+1){1'b0}}, dim} - ({{(NVW+1){1'b0}}, tile} * (DW+NVW+1)'(V));
    if (rem[DW+NVW]) return '0;                     // negative: outside
    return (rem >= (DW+NVW+1)'(V)) ? NVW'(V) : NVW'(rem);
  endfunction

  logic [NVW-1:0] nval [4];
  logic [DW:0]    crow [4];
  always_comb begin
    nval[STR_A] = clip(job_i.m, ag_o[STR_A]);
    nval[STR_B] = clip(job_i.n, ag_m[STR_B]);
    for (int s = 2; s < 4; s++) begin
      crow[s] = ({1'b0, ag_o[s]} << $clog2(V)) + {1'b0, ag_i[s]};
      nval[s] = (crow[s] < {1'b0, job_i.m}) ? clip(job_i.n, ag_m[s]) : '0;
    end
    crow[0] = '0;
    crow[1] = '0;
  end

  // ------------------------------------------------- reservations and tags
  logic [FCW-1:0] outst_q [3];
  logic [FCW-1:0] fcount [3];
  assign fcount[STR_A]   = a_count_i;
  assign fcount[STR_B]   = b_count_i;
  assign fcount[STR_CIN] = c_count_i;

  typedef struct packed {
    logic [1:0]     str;
    logic [NVW-1:0] nval;
  } tag_t;

  tag_t                   tagq_q [TQD];
  logic [$clog2(TQD)-1:0] tq_rd_q, tq_wr_q;
  logic [$clog2(TQD):0]   tq_cnt_q;

  // ---------------------------------------------------------- issue register
  logic           iss_v_q, iss_w_q;
  logic [1:0]     iss_s_q;
  logic [AW-1:0]  iss_addr_q;
  logic [VW-1:0]  iss_wdata_q;
  logic [VW/8-1:0] iss_be_q;
  logic [NVW-1:0] iss_nval_q;
  logic [1:0]     rr_q;

  logic [3:0] elig;
  logic       load, granted;
  logic [1:0] sel;

  assign granted = iss_v_q && tcdm_gnt_i;

  always_comb begin
    for (int s = 0; s < 3; s++) begin
      elig[s] = !ag_done[s] && ((32'(fcount[s]) + 32'(outst_q[s])) < DEPTH)
                && (tq_cnt_q < ($clog2(TQD)+1)'(TQD - 1));
    end
    elig[STR_COUT] = !ag_done[STR_COUT] && d_valid_i;
    sel = rr_q;
    for (int o = 3; o >= 0; o--) begin
      if (elig[2'(32'(rr_q) + o)]) sel = 2'(32'(rr_q) + o);
    end
    load = (!iss_v_q || granted) && (elig != '0);
    ag_next = '0;
    if (load) ag_next[sel] = 1'b1;
  end

  assign d_ready_o = load && (sel == STR_COUT);

  function automatic logic [VW/8-1:0] be_mask(input logic [NVW-1:0] n);
    logic [VW/8-1:0] be;
    for (int e = 0; e < V; e++) be[e*EB +: EB] = {EB{(e < int'(n))}};
    return be;
  endfunction

  function automatic logic [VW-1:0] data_mask(input logic [VW-1:0] d, input logic [NVW-1:0] n);
    logic [VW-1:0] r;
    for (int e = 0; e < V; e++) r[e*Q +: Q] = (e < int'(n)) ? d[e*Q +: Q] : '0;
    return r;
  endfunction

  // response handling
  tag_t head;
  logic resp;
  assign head = tagq_q[tq_rd_q];
  assign resp = tcdm_rvalid_i && (tq_cnt_q != '0);

  always_comb begin
    a_push_o = resp && (head.str == STR_A);
    b_push_o = resp && (head.str == STR_B);
    c_push_o = resp && (head.str == STR_CIN);
    a_data_o = data_mask(tcdm_rdata_i, head.nval);
    b_data_o = a_data_o;
    c_data_o = a_data_o;
  end

  logic push_tag;
  assign push_tag = granted && !iss_w_q;

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      iss_v_q <= 1'b0; iss_w_q <= 1'b0; iss_s_q <= '0; iss_addr_q <= '0;
      iss_wdata_q <= '0; iss_be_q <= '0; iss_nval_q <= '0; rr_q <= '0;
      for (int s = 0; s < 3; s++) outst_q[s] <= '0;
      for (int t = 0; t < TQD; t++) tagq_q[t] <= '0;
      tq_rd_q <= '0; tq_wr_q <= '0; tq_cnt_q <= '0;
    end else begin
      if (load) begin
        iss_v_q    <= 1'b1;
        iss_s_q    <= sel;
        iss_w_q    <= (sel == STR_COUT);
        iss_addr_q <= ag_addr[sel];
        iss_nval_q <= nval[sel];
        iss_wdata_q <= d_data_i;
        iss_be_q   <= be_mask(nval[sel]);
        rr_q       <= sel + 2'd1;
      end else if (granted) begin
        iss_v_q <= 1'b0;
      end
      // outstanding reads per channel: reserved at issue, released at push
      for (int s = 0; s < 3; s++) begin
        outst_q[s] <= outst_q[s] + FCW'(load && sel == 2'(s))
                                 - FCW'(resp && head.str == 2'(s));
      end
      if (push_tag) begin
        tagq_q[tq_wr_q] <= '{str: iss_s_q, nval: iss_nval_q};
        tq_wr_q <= tq_wr_q + 1;
      end
      if (resp) tq_rd_q <= tq_rd_q + 1;
      tq_cnt_q <= tq_cnt_q + ($clog2(TQD)+1)'(push_tag) - ($clog2(TQD)+1)'(resp);
    end
  end

  assign tcdm_req_o   = iss_v_q;
  assign tcdm_wen_o   = iss_w_q;
  assign tcdm_addr_o  = iss_addr_q;
  assign tcdm_wdata_o = iss_wdata_q;
  assign tcdm_be_o    = iss_be_q;

  assign idle_o = (ag_done == '1) && !iss_v_q && (tq_cnt_q == '0)
                && (outst_q[0] == '0) && (outst_q[1] == '0) && (outst_q[2] == '0);

`ifndef SYNTHESIS
  assert property (@(posedge clk_i) disable iff (!rst_ni) tcdm_rvalid_i |-> tq_cnt_q != '0)
    else $error("opope_streamer: read response without a pending request");
`endif

endmodule
