// opope_engine: the O-POPE outer-product engine (p x p PE mesh + sequencer).
//
// Dataflow (output stationary, outer product): the output is processed in
// tiles of 2p x 2p elements.  For every k the engine takes one A vector (2p
// elements of column k of A, rows of the tile) and one B vector (2p elements
// of row k of B, columns of the tile) into its two 2p x q input buffers, and
// spends four issue slots on them: PE (i, j) updates c[2i+r][2j+s] in slot
// {r, s}, so the A buffer broadcasts element 2i+r along PE row i and the B
// buffer element 2j+s along PE column j (p elements per cycle each).  Each
// input element is used twice; a tile takes 4*K issue slots.
//
// C moves systolically: every PE column carries two q-bit lanes from the C
// input port (bottom, PE row p-1) up to the C output port (top, PE row 0).
// One shift moves a 2p-element tile row in or out, so a whole tile takes 2p
// shifts; after loading, PE (i, j) holds c[2i+r][2j+s] in acc[s][r].
//
// Sequencer (per tile t, matching the streamer/accumulator/FPU timeline):
//   1. load tile 0's initial C into the accumulators (FPUs idle);
//   2. coupled group (k = 0 of tile t): the FMAs take tile t's initial values
//      and the accumulators receive tile t-1's results;
//   3. while the FMAs accumulate tile t (decoupled): store tile t-1's results
//      (2p shifts out), then load tile t+1's initial values (2p shifts in);
//   4. after the last tile a coupled drain group moves the last results into
//      the accumulators, which are then stored.
// The FMAs stall (the whole mesh pipeline holds) when the A or B stream is
// empty, or when a tile is due to start but its initial values are not yet
// loaded, which is what happens when K < 2p.
//
// Interface: four valid/ready streams of 2p-element vectors (A, B, C in,
// C out).  start_i with num_tiles_i and k_i starts a job; done_o pulses when
// the last result row has left.  The ev_* outputs report per-cycle events
// for performance counting.  Rows/columns of the output that fall outside the
// matrix are handled by the streamer (zero padding); the engine always
// processes full tiles.
module opope_engine #(
  parameter int unsigned P        = opope_pkg::P_DEFAULT,
  parameter int unsigned EXP_BITS = opope_pkg::EXP_BITS_DEFAULT,
  parameter int unsigned MAN_BITS = opope_pkg::MAN_BITS_DEFAULT,
  parameter int unsigned CNT_W    = 32,
  localparam int unsigned Q = 1 + EXP_BITS + MAN_BITS,
  localparam int unsigned V = 2 * P                 // elements per vector
) (
  input  logic             clk_i,
  input  logic             rst_ni,
  // job
  input  logic             start_i,
  input  logic [CNT_W-1:0] num_tiles_i,
  input  logic [CNT_W-1:0] k_i,
  output logic             busy_o,
  output logic             done_o,
  // A and B vectors
  input  logic             a_valid_i,
  output logic             a_ready_o,
  input  logic [Q-1:0]     a_data_i [V],
  input  logic             b_valid_i,
  output logic             b_ready_o,
  input  logic [Q-1:0]     b_data_i [V],
  // C tile rows in / out
  input  logic             cin_valid_i,
  output logic             cin_ready_o,
  input  logic [Q-1:0]     cin_data_i [V],
  output logic             cout_valid_o,
  input  logic             cout_ready_i,
  output logic [Q-1:0]     cout_data_o [V],
  // events
  output logic             ev_issue_o,      // the FMA pipelines advanced
  output logic             ev_mac_o,        // ... with real operands
  output logic             ev_couple_o,     // ... in a coupled slot
  output logic             ev_load_o,       // accumulator chain shifted in a C row
  output logic             ev_store_o,      // accumulator chain shifted out a result row
  output logic             ev_wait_acc_o,   // a tile is ready but waits for its initial C
  output logic             ev_result_o      // the FMAs emit a result of real operands
);

  typedef enum logic [1:0] {ACC_FREE, ACC_LOADING, ACC_INIT, ACC_RESULT} acc_st_e;

  acc_st_e          acc_st_q;
  localparam int unsigned SCW = $clog2(V + 1);
  localparam logic [SCW-1:0] SHIFT_LAST = SCW'(V - 1);
  logic [SCW-1:0]   shift_cnt_q;
  logic [CNT_W-1:0] ld_tile_q;      // tiles whose initial values have been loaded
  logic [CNT_W-1:0] nx_tile_q;      // tile of the next group to start
  logic [CNT_W-1:0] nx_k_q;         // k of the next group to start
  logic             drained_q;      // the final coupled group has been started
  logic             busy_q;

  // input buffers and the group being issued
  logic [Q-1:0]     abuf_q [V];
  logic [Q-1:0]     bbuf_q [V];
  logic             grp_q, grp_couple_q, grp_valid_q, grp_last_q;
  logic [1:0]       slot_q;

  // ------------------------------------------------------- group start logic
  logic grp_free, want_drain, want_mac, acc_ok, start_grp;
  logic is_couple;

  assign grp_free   = !grp_q || (slot_q == 2'd3);
  assign want_drain = busy_q && (nx_tile_q == num_tiles_i) && !drained_q;
  assign want_mac   = busy_q && (nx_tile_q != num_tiles_i);
  assign is_couple  = want_drain || (nx_k_q == '0);
  // a coupled group needs the accumulators to hold the right data:
  // the initial values of the new tile, or (drain) nothing left to move
  assign acc_ok     = !is_couple
                    || (want_mac && acc_st_q == ACC_INIT)
                    || (want_drain && acc_st_q == ACC_FREE);
  assign start_grp  = grp_free && acc_ok
                    && (want_drain || (want_mac && a_valid_i && b_valid_i));
  assign a_ready_o  = start_grp && want_mac;
  assign b_ready_o  = start_grp && want_mac;
  assign ev_wait_acc_o = grp_free && want_mac && is_couple && !acc_ok && a_valid_i && b_valid_i;

  // ------------------------------------------------------------ shift logic
  logic do_load, do_store, do_shift;
  assign do_load      = (acc_st_q == ACC_LOADING) && cin_valid_i;
  assign do_store     = (acc_st_q == ACC_RESULT) && cout_ready_i;
  assign do_shift     = do_load || do_store;
  assign cin_ready_o  = do_load;
  assign cout_valid_o = (acc_st_q == ACC_RESULT);

  // ----------------------------------------------------------------- mesh
  logic [Q-1:0] chain [P+1][P][2];   // chain[i] feeds PE row i from below... see below
  logic [Q-1:0] pe_a [P][P], pe_b [P][P];
  logic         res_valid [P][P];
  logic         mesh_en;

  assign mesh_en = grp_q;

  // chain[P] is the engine C input, chain[i] (i < P) is the output of PE row i
  for (genvar j = 0; j < P; j++) begin : g_cin
    for (genvar l = 0; l < 2; l++) begin : g_l
      assign chain[P][j][l]       = do_load ? cin_data_i[2*j+l] : '0;
      assign cout_data_o[2*j+l]   = chain[0][j][l];
    end
  end

  for (genvar i = 0; i < P; i++) begin : g_row
    for (genvar j = 0; j < P; j++) begin : g_col
      logic [Q-1:0] ci [2], co [2];
      assign pe_a[i][j] = abuf_q[2*i + 32'(slot_q[1])];
      assign pe_b[i][j] = bbuf_q[2*j + 32'(slot_q[0])];
      assign ci[0] = chain[i+1][j][0];
      assign ci[1] = chain[i+1][j][1];
      assign chain[i][j][0] = co[0];
      assign chain[i][j][1] = co[1];
      opope_pe #(.EXP_BITS(EXP_BITS), .MAN_BITS(MAN_BITS)) i_pe (
        .clk_i, .rst_ni,
        .en_i(mesh_en), .valid_i(grp_valid_q), .slot_i(slot_q), .couple_i(grp_couple_q),
        .a_i(pe_a[i][j]), .b_i(pe_b[i][j]),
        .shift_i(do_shift), .c_i(ci), .c_o(co),
        .res_valid_o(res_valid[i][j])
      );
    end
  end

  // ------------------------------------------------------------ sequencer
  logic drain_done;
  assign drain_done = grp_q && grp_last_q && (slot_q == 2'd3);

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      acc_st_q     <= ACC_FREE;
      shift_cnt_q  <= '0;
      ld_tile_q    <= '0;
      nx_tile_q    <= '0;
      nx_k_q       <= '0;
      drained_q    <= 1'b0;
      busy_q       <= 1'b0;
      grp_q        <= 1'b0;
      grp_couple_q <= 1'b0;
      grp_valid_q  <= 1'b0;
      grp_last_q   <= 1'b0;
      slot_q       <= '0;
      for (int e = 0; e < V; e++) begin
        abuf_q[e] <= '0;
        bbuf_q[e] <= '0;
      end
    end else begin
      // job start
      if (start_i && !busy_q) begin
        busy_q    <= 1'b1;
        ld_tile_q <= '0;
        nx_tile_q <= '0;
        nx_k_q    <= '0;
        drained_q <= 1'b0;
        acc_st_q  <= ACC_FREE;
      end

      // issue groups of four slots
      if (grp_q) slot_q <= slot_q + 2'd1;
      if (start_grp) begin
        grp_q        <= 1'b1;
        grp_couple_q <= is_couple;
        grp_valid_q  <= want_mac;
        grp_last_q   <= want_drain;
        if (want_mac) begin
          abuf_q <= a_data_i;
          bbuf_q <= b_data_i;
          if (nx_k_q == k_i - 1) begin
            nx_k_q    <= '0;
            nx_tile_q <= nx_tile_q + 1;
          end else begin
            nx_k_q <= nx_k_q + 1;
          end
        end else begin
          drained_q <= 1'b1;
        end
      end else if (grp_q && slot_q == 2'd3) begin
        grp_q <= 1'b0;
      end

      // accumulator chain
      unique case (acc_st_q)
        ACC_FREE: begin
          if (busy_q && !(start_i) && ld_tile_q != num_tiles_i) begin
            acc_st_q    <= ACC_LOADING;
            shift_cnt_q <= '0;
          end
        end
        ACC_LOADING: begin
          if (do_load) begin
            shift_cnt_q <= shift_cnt_q + 1;
            if (shift_cnt_q == SHIFT_LAST) begin
              acc_st_q  <= ACC_INIT;
              ld_tile_q <= ld_tile_q + 1;
            end
          end
        end
        ACC_INIT: begin
          // the coupled group of the tile hands over the preloaded values
          if (grp_q && grp_couple_q && slot_q == 2'd3) begin
            acc_st_q    <= (ld_tile_q == 1) ? ACC_FREE : ACC_RESULT;
            shift_cnt_q <= '0;
          end
        end
        ACC_RESULT: begin
          if (do_store) begin
            shift_cnt_q <= shift_cnt_q + 1;
            if (shift_cnt_q == SHIFT_LAST) begin
              acc_st_q <= ACC_FREE;
              if (drained_q && !grp_q) busy_q <= 1'b0;
            end
          end
        end
        default: acc_st_q <= ACC_FREE;
      endcase

      // the drain group turns the free accumulators into the last results
      if (drain_done) begin
        acc_st_q    <= ACC_RESULT;
        shift_cnt_q <= '0;
      end
    end
  end

  assign done_o = busy_q && drained_q && !grp_q && do_store && (shift_cnt_q == SHIFT_LAST);
  assign busy_o = busy_q;

  assign ev_issue_o  = mesh_en;
  assign ev_mac_o    = mesh_en && grp_valid_q;
  assign ev_couple_o = mesh_en && grp_couple_q;
  assign ev_load_o   = do_load;
  assign ev_store_o  = do_store;

  // all PEs run in lock step; the corner PE reports for the mesh
  assign ev_result_o = res_valid[P-1][P-1];
`ifndef SYNTHESIS
  assert property (@(posedge clk_i) disable iff (!rst_ni)
                   (mesh_en && grp_couple_q) |-> !do_shift)
    else $error("opope_engine: accumulator shift during a coupled group");
  assert property (@(posedge clk_i) disable iff (!rst_ni) res_valid[0][0] == res_valid[P-1][P-1])
    else $error("opope_engine: PEs out of lock step");
`endif

endmodule
