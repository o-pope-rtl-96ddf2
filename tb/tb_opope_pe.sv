// tb_opope_pe: self-checking test of one processing element.
// Three output tiles of 2 x 2 elements are processed back to back.  Initial
// values are shifted into the accumulator chain while the FMA works on the
// previous tile, results are shifted out after each coupling, and every
// result is compared with a chain of reference FMAs.  Issue slots are
// separated by random stall cycles; the result of a tile must reach the
// accumulators exactly at the coupled slots of the next tile.
module tb_opope_pe;
  import opope_fp_ref::*;

  localparam int K = 6;
  localparam int T = 3;
  logic clk = 0, rst_n = 0;
  logic en, vin, couple, shift;
  logic [1:0] slot;
  logic [15:0] a, b, ci [2], co [2];
  logic rv;
  int checks = 0, failures = 0;

  opope_pe dut (.clk_i(clk), .rst_ni(rst_n), .en_i(en), .valid_i(vin), .slot_i(slot),
                .couple_i(couple), .a_i(a), .b_i(b), .shift_i(shift), .c_i(ci), .c_o(co),
                .res_valid_o(rv));

  always #5 clk = ~clk;

  logic [15:0] av [T][K][2], bv [T][K][2], cinit [T][2][2], cexp [T][2][2];

  initial begin : watchdog
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic idle_cycle();
    @(negedge clk); en = 0; shift = 0; couple = 0;
  endtask

  // one issue slot, optionally preceded by stall cycles
  task automatic issue(input logic [15:0] ta, tb2, input logic [1:0] sl, input logic cp, input logic v);
    @(negedge clk);
    en = 0; shift = 0; couple = 0;
    while ($urandom_range(3) == 0) @(negedge clk);
    en = 1; vin = v; slot = sl; couple = cp; a = ta; b = tb2;
    @(negedge clk); en = 0; couple = 0;
  endtask

  // shift a row pair in (lane 0 = s0, lane 1 = s1); order: r = 0 first
  task automatic shift_in(input int t);
    for (int r = 0; r < 2; r++) begin
      @(negedge clk); en = 0; couple = 0;
      shift = 1; ci[0] = cinit[t][r][0]; ci[1] = cinit[t][r][1];
      @(negedge clk); shift = 0;
    end
  endtask

  task automatic shift_out_check(input int t);
    for (int r = 0; r < 2; r++) begin
      @(negedge clk); en = 0; couple = 0;
      for (int l = 0; l < 2; l++) begin
        checks++;
        if (co[l] !== cexp[t][r][l]) begin
          failures++;
          $display("FAIL tile %0d c[%0d][%0d] got %h exp %h", t, r, l, co[l], cexp[t][r][l]);
        end
      end
      shift = 1; ci[0] = 16'h0; ci[1] = 16'h0;
      @(negedge clk); shift = 0;
    end
  endtask

  initial begin
    en = 0; vin = 0; couple = 0; shift = 0; slot = 0; a = 0; b = 0; ci[0] = 0; ci[1] = 0;
    // data and reference
    for (int t = 0; t < T; t++) begin
      for (int k = 0; k < K; k++)
        for (int i = 0; i < 2; i++) begin
          av[t][k][i] = rand_h(12, 17);
          bv[t][k][i] = rand_h(12, 17);
        end
      for (int r = 0; r < 2; r++)
        for (int s = 0; s < 2; s++) begin
          cinit[t][r][s] = rand_h(12, 17);
          cexp[t][r][s]  = cinit[t][r][s];
          for (int k = 0; k < K; k++) cexp[t][r][s] = fma16(av[t][k][r], bv[t][k][s], cexp[t][r][s]);
        end
    end
    repeat (2) @(posedge clk);
    rst_n = 1;
    shift_in(0);
    for (int t = 0; t < T; t++) begin
      for (int k = 0; k < K; k++) begin
        for (int sl = 0; sl < 4; sl++)
          issue(av[t][k][sl>>1], bv[t][k][sl&1], 2'(sl), k == 0, 1'b1);
        // after the coupled group the accumulators hold the previous results
        if (k == 1 && t > 0) shift_out_check(t - 1);
        if (k == 2 && t + 1 < T) shift_in(t + 1);
      end
    end
    // final coupling: drain the last tile into the accumulators
    for (int sl = 0; sl < 4; sl++) issue(16'h0, 16'h0, 2'(sl), 1'b1, 1'b0);
    checks++;
    if (rv) begin failures++; $display("FAIL res_valid after drain"); end
    shift_out_check(T - 1);
    idle_cycle();
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
