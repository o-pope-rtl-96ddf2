// tb_opope_util4: the 4 x 4 configuration on a 64 x 256 x 128 GEMM
// (M = 64, K = 256, N = 128; 128 output tiles of 8 x 8, D in place of C so the
// operands fill 112 KiB of the 128 KiB memory), with an ideal memory.  This is
// the case where the FMA pipelines stay busy from the end of the first tile
// preload to the start of the last write-back; the utilisation must exceed
// 99.9 % (the published figure for this case is 99.97 %) and every element
// of D is checked.  The memory model and the 99.9 % margin are this
// testbench's choices.  The watchdog ends the run after 300000 cycles.
module tb_opope_util4;
  localparam int P = 4;
  localparam int STALL = 0;
`include "opope_tb_job.svh"

  opope_top #(.P(P)) dut (
    .clk_i(clk), .rst_ni(rst_n),
    .cfg_req_i(cfg_req), .cfg_we_i(cfg_we), .cfg_addr_i(cfg_addr), .cfg_wdata_i(cfg_wdata),
    .cfg_gnt_o(cfg_gnt), .cfg_rvalid_o(cfg_rvalid), .cfg_rdata_o(cfg_rdata),
    .tcdm_req_o(tcdm_req), .tcdm_gnt_i(tcdm_gnt), .tcdm_wen_o(tcdm_wen), .tcdm_addr_o(tcdm_addr),
    .tcdm_wdata_o(tcdm_wdata), .tcdm_be_o(tcdm_be), .tcdm_rvalid_i(tcdm_rvalid), .tcdm_rdata_i(tcdm_rdata),
    .busy_o(busy), .evt_o(evt), .perf_o(perf));

  initial begin : watchdog
    repeat (300000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    real u;
    repeat (3) @(posedge clk);
    rst_n = 1;
    run_gemm(64, 128, 256, 4*256*128 + 100, 1, u);
    checks++;
    if (u < 99.9) begin failures++; $display("FAIL utilisation %0.3f%% below 99.9%%", u); end
    finish_tb();
  end
endmodule
