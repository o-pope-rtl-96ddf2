// tb_opope_full: the accelerator at its default size (16 x 16 PEs, binary16,
// 512-bit TCDM port) end to end: a GEMM of two 32 x 32 output tiles with
// K = 32 = 2p, a job with a partial tile in N, and a 64 x 128 x 128 job (the
// size of one L1 tile when large layers are processed piecewise, computed in
// place), whose utilisation must reach 95 %.
// Results are checked element by element and the run time against the
// bound 4*K*tiles + preload + writeback.
module tb_opope_full;
  localparam int P = opope_pkg::P_DEFAULT;
  localparam int STALL = 5;
`include "opope_tb_job.svh"

  opope_top dut (
    .clk_i(clk), .rst_ni(rst_n),
    .cfg_req_i(cfg_req), .cfg_we_i(cfg_we), .cfg_addr_i(cfg_addr), .cfg_wdata_i(cfg_wdata),
    .cfg_gnt_o(cfg_gnt), .cfg_rvalid_o(cfg_rvalid), .cfg_rdata_o(cfg_rdata),
    .tcdm_req_o(tcdm_req), .tcdm_gnt_i(tcdm_gnt), .tcdm_wen_o(tcdm_wen), .tcdm_addr_o(tcdm_addr),
    .tcdm_wdata_o(tcdm_wdata), .tcdm_be_o(tcdm_be), .tcdm_rvalid_i(tcdm_rvalid), .tcdm_rdata_i(tcdm_rdata),
    .busy_o(busy), .evt_o(evt), .perf_o(perf));

  initial begin : watchdog
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    real u;
    repeat (3) @(posedge clk);
    rst_n = 1;
    run_gemm(32, 64, 32, 4*32*2 + 4*2*32 + 80, 0, u);
    run_gemm(32, 40, 8, 2000, 0, u);
    // one L1 tile job of the layer benchmarks: 64 x 128 x 128, D in place of C
    run_gemm(64, 128, 128, 4*128*8 + 300, 1, u);
    checks++;
    if (u < 95.0) begin failures++; $display("FAIL utilisation %0.2f%% below 95%%", u); end
    finish_tb();
  end
endmodule
