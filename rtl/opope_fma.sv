// opope_fma: pipelined floating-point fused multiply-add, d = a * b + c.
//
// This is the arithmetic core of every processing element.  The engine was
// designed around an existing open-source IEEE floating-point unit configured
// with a configurable number of pipeline registers; this module is a compact
// stand-in with the same role: three q-bit operands in, one q-bit result out,
// NUM_PIPE cycles of latency, one new operation accepted per enabled cycle.
//
// How it works: both a*b and c are converted to one exact fixed-point number
// whose LSB is the weight of the smallest product of two subnormals.  For
// binary16 this takes 82 bits.  The sum is therefore exact, and a single
// round-to-nearest-even step turns it back into the output format (a true
// fused operation, with subnormals).  NaN operands, inf*0 and inf-inf give the
// canonical quiet NaN; overflow gives infinity.  No exception flags are kept.
//
// Timing: the result is computed combinationally from the operands and then
// passes through NUM_PIPE registers.  All registers advance only when `en` is
// high, so the unit behaves as a NUM_PIPE-slot ring the engine can stall as a
// whole; a result leaves exactly NUM_PIPE enabled cycles after its operands
// entered.  Synthesis retiming is expected to spread the logic over the
// registers (the register placement is this design's choice).
module opope_fma #(
  parameter int unsigned EXP_BITS = opope_pkg::EXP_BITS_DEFAULT,
  parameter int unsigned MAN_BITS = opope_pkg::MAN_BITS_DEFAULT,
  parameter int unsigned NUM_PIPE = opope_pkg::NUM_PIPE,
  localparam int unsigned W = 1 + EXP_BITS + MAN_BITS
) (
  input  logic         clk_i,
  input  logic         rst_ni,
  input  logic         en_i,      // advance the pipeline by one slot
  input  logic         valid_i,   // operands of this slot are meaningful
  input  logic [W-1:0] a_i,
  input  logic [W-1:0] b_i,
  input  logic [W-1:0] c_i,
  output logic         valid_o,
  output logic [W-1:0] d_o
);

  localparam int unsigned BIAS   = (1 << (EXP_BITS - 1)) - 1;
  localparam int unsigned EMAX   = (1 << EXP_BITS) - 1;           // inf / NaN field
  localparam int unsigned PB     = 2 * (MAN_BITS + 1);            // product width
  localparam int unsigned PSHMAX = 2 * (EMAX - 1) - 2;            // largest product shift
  localparam int unsigned SW     = PB + PSHMAX + 2;               // exact sum width
  localparam int unsigned CSHOFF = BIAS + MAN_BITS - 2;           // c shift = ec + CSHOFF
  localparam int unsigned SUBLSB = BIAS + MAN_BITS - 1;           // LSB index of a subnormal result
  localparam int unsigned IW     = $clog2(SW);                    // bit-index width
  localparam logic [W-1:0] QNAN  = {1'b0, {EXP_BITS{1'b1}}, 1'b1, {(MAN_BITS-1){1'b0}}};

  // ---------------------------------------------------------------- decode
  typedef struct packed {
    logic                sign;
    logic [EXP_BITS-1:0] exp_eff;   // exponent field, 1 for subnormals
    logic [MAN_BITS:0]   mant;      // with hidden bit
    logic                is_zero;
    logic                is_inf;
    logic                is_nan;
  } opnd_t;

  function automatic opnd_t decode(input logic [W-1:0] x);
    opnd_t o;
    logic [EXP_BITS-1:0] e;
    logic [MAN_BITS-1:0] f;
    e = x[W-2 -: EXP_BITS];
    f = x[MAN_BITS-1:0];
    o.sign    = x[W-1];
    o.exp_eff = (e == '0) ? EXP_BITS'(1) : e;
    o.mant    = {(e != '0), f};
    o.is_zero = (e == '0) && (f == '0);
    o.is_inf  = (e == EXP_BITS'(EMAX)) && (f == '0);
    o.is_nan  = (e == EXP_BITS'(EMAX)) && (f != '0);
    return o;
  endfunction

  opnd_t oa, ob, oc;
  assign oa = decode(a_i);
  assign ob = decode(b_i);
  assign oc = decode(c_i);

  // ---------------------------------------------------- exact fixed-point sum
  logic [PB-1:0] prod;
  logic [SW-1:0] pfix, cfix, mag;
  logic          sp, rsign;
  logic [IW-1:0] pshift, cshift;

  always_comb begin
    prod   = oa.mant * ob.mant;
    sp     = oa.sign ^ ob.sign;
    pshift = IW'(oa.exp_eff) + IW'(ob.exp_eff) - IW'(2);
    cshift = IW'(oc.exp_eff) + IW'(CSHOFF);
    pfix   = SW'(prod) << pshift;
    cfix   = SW'(oc.mant) << cshift;
    if (sp == oc.sign) begin
      mag   = pfix + cfix;
      rsign = sp;
    end else if (pfix >= cfix) begin
      mag   = pfix - cfix;
      rsign = sp;
    end else begin
      mag   = cfix - pfix;
      rsign = oc.sign;
    end
  end

  // ------------------------------------------------- normalise and round RNE
  logic [IW-1:0] lead, lsb;
  logic [SW-1:0] kept, below;
  logic          guard, sticky, rnd;
  logic [SW:0]   enc;
  logic [W-1:0]  res;

  always_comb begin
    lead = '0;
    for (int unsigned i = 0; i < SW; i++) begin
      if (mag[i]) lead = IW'(i);
    end
    lsb    = (lead > IW'(MAN_BITS + SUBLSB)) ? lead - IW'(MAN_BITS) : IW'(SUBLSB);
    kept   = mag >> lsb;
    guard  = mag[lsb - IW'(1)];
    below  = mag & ((SW'(1) << (lsb - IW'(1))) - SW'(1));
    sticky = (below != '0);
    rnd    = guard & (sticky | kept[0]);
    enc    = {1'b0, kept} + {{SW{1'b0}}, rnd}
           + ((SW+1)'(lsb - IW'(SUBLSB)) << MAN_BITS);

    if (oa.is_nan || ob.is_nan || oc.is_nan
        || (oa.is_inf && ob.is_zero) || (ob.is_inf && oa.is_zero)
        || ((oa.is_inf || ob.is_inf) && oc.is_inf && (sp != oc.sign))) begin
      res = QNAN;
    end else if (oa.is_inf || ob.is_inf) begin
      res = {sp, {EXP_BITS{1'b1}}, {MAN_BITS{1'b0}}};
    end else if (oc.is_inf) begin
      res = {oc.sign, {EXP_BITS{1'b1}}, {MAN_BITS{1'b0}}};
    end else if (mag == '0) begin
      // exact zero: -0 only when both addends are -0
      res = {((oa.is_zero || ob.is_zero) && oc.is_zero) ? (sp & oc.sign) : 1'b0,
             {(W-1){1'b0}}};
    end else if (enc >= ((SW+1)'(EMAX) << MAN_BITS)) begin
      res = {rsign, {EXP_BITS{1'b1}}, {MAN_BITS{1'b0}}};
    end else begin
      res = {rsign, enc[W-2:0]};
    end
  end

  // ------------------------------------------------------------- pipeline
  logic [W-1:0] pipe_q  [NUM_PIPE];
  logic         pvld_q  [NUM_PIPE];

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      for (int i = 0; i < NUM_PIPE; i++) begin
        pipe_q[i] <= '0;
        pvld_q[i] <= 1'b0;
      end
    end else if (en_i) begin
      pipe_q[0] <= res;
      pvld_q[0] <= valid_i;
      for (int i = 1; i < NUM_PIPE; i++) begin
        pipe_q[i] <= pipe_q[i-1];
        pvld_q[i] <= pvld_q[i-1];
      end
    end
  end

  assign d_o     = pipe_q[NUM_PIPE-1];
  assign valid_o = pvld_q[NUM_PIPE-1];

endmodule
