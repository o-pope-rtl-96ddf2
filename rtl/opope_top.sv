// opope_top: the O-POPE accelerator as a cluster hardware processing engine.
//
// Computes D = C + A * B in floating point (binary16 by default) on a p x p
// mesh of pipelined FMA processing elements.  The blocks are:
//   opope_ctrl      register file + job FSM, programmed over the config port;
//   opope_streamer  address generation and the single 2p*q-bit TCDM port;
//   opope_fifo x4   A, B, C-in and D-out vector FIFOs between the two;
//   opope_engine    the PE mesh, its input buffers and its tile sequencer.
// perf_o reports per-cycle events (see opope_pkg::perf_t).
//
// Data layout in TCDM (byte addresses, little-endian elements): A stored as
// K x M row-major (i.e. column-major A), B as K x N, C and D as M x N, all
// row-major with 4-byte aligned rows.
//
// Timing: a job starts two cycles after the TRIGGER write.  The FMAs idle
// while the first tile's initial values are loaded and while the last tile is
// written back; in between they accumulate in every cycle as long as K >= 2p
// and the memory keeps up.  evt_o pulses when the job is complete.
module opope_top #(
  parameter int unsigned P          = opope_pkg::P_DEFAULT,
  parameter int unsigned EXP_BITS   = opope_pkg::EXP_BITS_DEFAULT,
  parameter int unsigned MAN_BITS   = opope_pkg::MAN_BITS_DEFAULT,
  parameter int unsigned FIFO_DEPTH = 4,
  localparam int unsigned Q  = 1 + EXP_BITS + MAN_BITS,
  localparam int unsigned V  = 2 * P,
  localparam int unsigned VW = V * Q
) (
  input  logic            clk_i,
  input  logic            rst_ni,
  // configuration port (from the cluster cores)
  input  logic            cfg_req_i,
  input  logic            cfg_we_i,
  input  logic [3:0]      cfg_addr_i,
  input  logic [31:0]     cfg_wdata_i,
  output logic            cfg_gnt_o,
  output logic            cfg_rvalid_o,
  output logic [31:0]     cfg_rdata_o,
  // TCDM port (to the cluster interconnect)
  output logic            tcdm_req_o,
  input  logic            tcdm_gnt_i,
  output logic            tcdm_wen_o,
  output logic [31:0]     tcdm_addr_o,
  output logic [VW-1:0]   tcdm_wdata_o,
  output logic [VW/8-1:0] tcdm_be_o,
  input  logic            tcdm_rvalid_i,
  input  logic [VW-1:0]   tcdm_rdata_i,
  // status
  output logic            busy_o,
  output logic            evt_o,
  output opope_pkg::perf_t perf_o
);
  import opope_pkg::*;

  localparam int unsigned FCW = $clog2(FIFO_DEPTH + 1);

  logic            start;
  job_t            job;
  logic [DIM_W-1:0] tm_n, tn_n;
  logic [31:0]     num_tiles;
  logic            eng_done, str_idle;
  logic            ev_issue, ev_mac, ev_couple, ev_load, ev_store, ev_wait, ev_res;

  opope_ctrl #(.P(P)) i_ctrl (
    .clk_i, .rst_ni,
    .req_i(cfg_req_i), .we_i(cfg_we_i), .addr_i(cfg_addr_i), .wdata_i(cfg_wdata_i),
    .gnt_o(cfg_gnt_o), .rvalid_o(cfg_rvalid_o), .rdata_o(cfg_rdata_o),
    .start_o(start), .job_o(job), .tm_n_o(tm_n), .tn_n_o(tn_n), .num_tiles_o(num_tiles),
    .engine_done_i(eng_done), .streamer_idle_i(str_idle), .mac_i(ev_mac),
    .busy_o, .evt_o
  );

  // streamer <-> FIFOs
  logic            a_push, b_push, c_push;
  logic [VW-1:0]   a_sdata, b_sdata, c_sdata;
  logic [FCW-1:0]  a_cnt, b_cnt, c_cnt;
  logic            d_v, d_r;
  logic [VW-1:0]   d_sdata;

  opope_streamer #(.P(P), .Q(Q), .DEPTH(FIFO_DEPTH)) i_streamer (
    .clk_i, .rst_ni,
    .start_i(start), .job_i(job), .tm_n_i(tm_n), .tn_n_i(tn_n), .idle_o(str_idle),
    .a_push_o(a_push), .a_data_o(a_sdata), .a_count_i(a_cnt),
    .b_push_o(b_push), .b_data_o(b_sdata), .b_count_i(b_cnt),
    .c_push_o(c_push), .c_data_o(c_sdata), .c_count_i(c_cnt),
    .d_valid_i(d_v), .d_ready_o(d_r), .d_data_i(d_sdata),
    .tcdm_req_o, .tcdm_gnt_i, .tcdm_wen_o, .tcdm_addr_o, .tcdm_wdata_o, .tcdm_be_o,
    .tcdm_rvalid_i, .tcdm_rdata_i
  );

  // FIFOs <-> engine
  logic           a_v, a_r, b_v, b_r, c_v, c_r, o_v, o_r;
  logic [VW-1:0]  a_fdata, b_fdata, c_fdata, o_fdata;
  logic           a_full_n, b_full_n, c_full_n;
  logic [Q-1:0]   a_vec [V], b_vec [V], c_vec [V], o_vec [V];

  opope_fifo #(.WIDTH(VW), .DEPTH(FIFO_DEPTH)) i_fifo_a (
    .clk_i, .rst_ni, .clr_i(1'b0),
    .valid_i(a_push), .ready_o(a_full_n), .data_i(a_sdata),
    .valid_o(a_v), .ready_i(a_r), .data_o(a_fdata), .count_o(a_cnt));
  opope_fifo #(.WIDTH(VW), .DEPTH(FIFO_DEPTH)) i_fifo_b (
    .clk_i, .rst_ni, .clr_i(1'b0),
    .valid_i(b_push), .ready_o(b_full_n), .data_i(b_sdata),
    .valid_o(b_v), .ready_i(b_r), .data_o(b_fdata), .count_o(b_cnt));
  opope_fifo #(.WIDTH(VW), .DEPTH(FIFO_DEPTH)) i_fifo_c (
    .clk_i, .rst_ni, .clr_i(1'b0),
    .valid_i(c_push), .ready_o(c_full_n), .data_i(c_sdata),
    .valid_o(c_v), .ready_i(c_r), .data_o(c_fdata), .count_o(c_cnt));
  opope_fifo #(.WIDTH(VW), .DEPTH(FIFO_DEPTH)) i_fifo_d (
    .clk_i, .rst_ni, .clr_i(1'b0),
    .valid_i(o_v), .ready_o(o_r), .data_i(o_fdata),
    .valid_o(d_v), .ready_i(d_r), .data_o(d_sdata), .count_o());

  for (genvar e = 0; e < V; e++) begin : g_pack
    assign a_vec[e] = a_fdata[e*Q +: Q];
    assign b_vec[e] = b_fdata[e*Q +: Q];
    assign c_vec[e] = c_fdata[e*Q +: Q];
    assign o_fdata[e*Q +: Q] = o_vec[e];
  end

  opope_engine #(.P(P), .EXP_BITS(EXP_BITS), .MAN_BITS(MAN_BITS)) i_engine (
    .clk_i, .rst_ni,
    .start_i(start), .num_tiles_i(num_tiles), .k_i(32'(job.k)),
    .busy_o(), .done_o(eng_done),
    .a_valid_i(a_v), .a_ready_o(a_r), .a_data_i(a_vec),
    .b_valid_i(b_v), .b_ready_o(b_r), .b_data_i(b_vec),
    .cin_valid_i(c_v), .cin_ready_o(c_r), .cin_data_i(c_vec),
    .cout_valid_o(o_v), .cout_ready_i(o_r), .cout_data_o(o_vec),
    .ev_issue_o(ev_issue), .ev_mac_o(ev_mac), .ev_couple_o(ev_couple),
    .ev_load_o(ev_load), .ev_store_o(ev_store), .ev_wait_acc_o(ev_wait), .ev_result_o(ev_res)
  );

  assign perf_o = '{issue: ev_issue, mac: ev_mac, couple: ev_couple, acc_load: ev_load,
                    acc_store: ev_store, acc_wait: ev_wait, result: ev_res,
                    mem_stall: tcdm_req_o && !tcdm_gnt_i};

`ifndef SYNTHESIS
  // reserved FIFO slots guarantee that memory responses are never dropped
  assert property (@(posedge clk_i) disable iff (!rst_ni)
                   (a_push |-> a_full_n) and (b_push |-> b_full_n) and (c_push |-> c_full_n))
    else $error("opope_top: response pushed into a full FIFO");
`endif

endmodule
