// opope_pe: processing element of the outer-product engine.
//
// One FMA unit with four pipeline registers and four accumulator buffer
// registers.  The PE owns a 2 x 2 block of the output tile, c[r][s] with
// r, s in {0, 1}.  Over four consecutive issue slots it receives
// (a_r0,b_s0) (a_r0,b_s1) (a_r1,b_s0) (a_r1,b_s1) and, because the FMA latency
// equals the number of slots, the partial sum of slot (r,s) leaves the FMA
// exactly when the next operands of the same slot enter: the FMA output is fed
// straight back as the C operand and the pipeline registers themselves hold
// the four running sums.
//
// The accumulator registers are therefore free while the FMA accumulates
// (decoupled) and are used as a shift chain to move tile data in and out: each
// lane s (port c0 / c1) runs acc[s][1] -> acc[s][0] -> c_o[s], and c_i[s] comes
// from the PE below.  When a tile ends (couple_i during the four slots of the
// first k step), slot (r,s) swaps: the FMA result goes into acc[s][r] and the
// preloaded initial value in acc[s][r] becomes the FMA's C operand, so no
// cycle is lost between tiles.
//
// Following the PE drawing: FMA output and c0/c1 feed the input multiplexer
// of the accumulators, a 4:2 output multiplexer drives c0/c1 out, and a 2:1
// multiplexer picks one of them for the FMA's C-operand multiplexer.  The
// register-to-register shift path inside a lane and the slot numbering are
// this design's choices.
//
// Timing: en_i advances the FMA by one slot; shift_i moves the accumulator
// chain by one position.  shift_i must not be asserted together with a
// coupled issue (en_i && couple_i).
module opope_pe #(
  parameter int unsigned EXP_BITS = opope_pkg::EXP_BITS_DEFAULT,
  parameter int unsigned MAN_BITS = opope_pkg::MAN_BITS_DEFAULT,
  localparam int unsigned Q = 1 + EXP_BITS + MAN_BITS
) (
  input  logic         clk_i,
  input  logic         rst_ni,
  // MAC issue
  input  logic         en_i,       // advance the FMA pipeline (one issue slot)
  input  logic         valid_i,    // the slot carries real operands
  input  logic [1:0]   slot_i,     // {r, s} of the output element of this slot
  input  logic         couple_i,   // swap FMA result and accumulator in this slot
  input  logic [Q-1:0] a_i,        // row broadcast
  input  logic [Q-1:0] b_i,        // column broadcast
  // systolic C chain
  input  logic         shift_i,
  input  logic [Q-1:0] c_i [2],    // from the PE below (or the engine C input)
  output logic [Q-1:0] c_o [2],    // to the PE above (or the engine C output)
  output logic         res_valid_o // FMA output of this cycle came from real operands
);

  logic [Q-1:0] acc_q [2][2];      // acc_q[s][r]
  logic [Q-1:0] fma_d, fma_c, out_mux [2];
  logic         r, s;

  assign r = slot_i[1];
  assign s = slot_i[0];

  // 4:2 output multiplexer: shift position in decoupled mode, the slot's row
  // when coupled.  The 2:1 multiplexer picks the slot's column for the FMA.
  always_comb begin
    for (int l = 0; l < 2; l++) begin
      out_mux[l] = couple_i ? acc_q[l][r] : acc_q[l][0];
    end
    fma_c = couple_i ? out_mux[s] : fma_d;
  end

  assign c_o[0] = out_mux[0];
  assign c_o[1] = out_mux[1];

  opope_fma #(.EXP_BITS(EXP_BITS), .MAN_BITS(MAN_BITS), .NUM_PIPE(opope_pkg::NUM_PIPE)) i_fma (
    .clk_i, .rst_ni,
    .en_i, .valid_i,
    .a_i, .b_i, .c_i(fma_c),
    .valid_o(res_valid_o), .d_o(fma_d)
  );

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      for (int l = 0; l < 2; l++) begin
        acc_q[l][0] <= '0;
        acc_q[l][1] <= '0;
      end
    end else if (en_i && couple_i) begin
      acc_q[s][r] <= fma_d;
    end else if (shift_i) begin
      for (int l = 0; l < 2; l++) begin
        acc_q[l][0] <= acc_q[l][1];
        acc_q[l][1] <= c_i[l];
      end
    end
  end

`ifndef SYNTHESIS
  // the accumulators cannot shift while they are exchanging data with the FMA
  assert property (@(posedge clk_i) disable iff (!rst_ni) !(en_i && couple_i && shift_i))
    else $error("opope_pe: shift during coupled issue");
`endif

endmodule
