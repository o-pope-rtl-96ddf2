// tb_opope_fma: self-checking test of the pipelined binary16 FMA.
// Random finite operands (normal and subnormal) plus directed special values
// are issued with random stall cycles; each result must appear exactly
// NUM_PIPE enabled cycles after its operands and equal the reference.
module tb_opope_fma;
  import opope_fp_ref::*;

  localparam int NP = 4;
  logic clk = 0, rst_n = 0;
  logic en, vin, vout;
  logic [15:0] a, b, c, d;
  int checks = 0, failures = 0;

  opope_fma dut (.clk_i(clk), .rst_ni(rst_n), .en_i(en), .valid_i(vin),
                 .a_i(a), .b_i(b), .c_i(c), .valid_o(vout), .d_o(d));

  always #5 clk = ~clk;

  logic [15:0] exp_q [NP];
  logic        expv_q[NP];

  // directed cases: {a, b, c, expected}
  logic [63:0] directed [12] = '{
    {16'h3C00, 16'h3C00, 16'h3C00, 16'h4000},  // 1*1+1 = 2
    {16'h7C00, 16'h0000, 16'h3C00, 16'h7E00},  // inf*0 -> NaN
    {16'h7C00, 16'h3C00, 16'hFC00, 16'h7E00},  // inf - inf -> NaN
    {16'h7C00, 16'hBC00, 16'h3C00, 16'hFC00},  // -inf
    {16'h7E01, 16'h3C00, 16'h3C00, 16'h7E00},  // NaN in
    {16'h7BFF, 16'h4000, 16'h0000, 16'h7C00},  // overflow -> inf
    {16'h8000, 16'h3C00, 16'h8000, 16'h8000},  // -0 + -0 = -0
    {16'h3C00, 16'h3C00, 16'hBC00, 16'h0000},  // 1 - 1 = +0
    {16'h0001, 16'h3800, 16'h0000, 16'h0000},  // tiny/2 ties to even -> 0
    {16'h0003, 16'h3800, 16'h0000, 16'h0002},  // 1.5 ulp -> 2 ulp
    {16'h3C01, 16'h3C01, 16'hBC02, 16'h0010},  // cancellation leaves 2^-20 (subnormal)
    {16'h4248, 16'h0000, 16'h7C00, 16'h7C00}   // c = inf
  };

  initial begin : watchdog
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int n;
    int ea, eb, ec;
    logic [15:0] ta, tb2, tc, te;
    en = 0; vin = 0; a = 0; b = 0; c = 0;
    for (int i = 0; i < NP; i++) begin exp_q[i] = '0; expv_q[i] = 1'b0; end
    repeat (3) @(posedge clk);
    rst_n = 1;
    n = 0;
    while (n < 3000 + 12) begin
      @(negedge clk);
      // check the output of the previous cycle's state against the model
      if (expv_q[NP-1]) begin
        checks++;
        if (!vout || d !== exp_q[NP-1]) begin
          failures++;
          if (failures < 10) $display("FAIL got %h exp %h vout %b", d, exp_q[NP-1], vout);
        end
      end else if (vout) begin
        checks++; failures++;
        $display("FAIL unexpected valid");
      end
      en  = ($urandom_range(9) != 0);
      vin = ($urandom_range(7) != 0);
      if (n < 12) begin
        {ta, tb2, tc, te} = directed[n];
        vin = 1'b1;
      end else begin
        ea = int'($urandom_range(30));
        eb = int'($urandom_range(30));
        ta  = rand_h(ea, ea);
        tb2 = rand_h(eb, eb);
        ec = ea + eb - 15 + int'($urandom_range(24)) - 12;
        if (ec < 0) ec = 0;
        if (ec > 30) ec = 30;
        tc = rand_h(ec, ec);
        te = fma16(ta, tb2, tc);
      end
      a = ta; b = tb2; c = tc;
      if (en) begin
        for (int i = NP-1; i > 0; i--) begin exp_q[i] = exp_q[i-1]; expv_q[i] = expv_q[i-1]; end
        exp_q[0] = te; expv_q[0] = vin;
        if (vin) n++;
      end
    end
    @(negedge clk);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
