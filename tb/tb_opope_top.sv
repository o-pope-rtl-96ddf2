// tb_opope_top: end-to-end test of the accelerator on a reduced 2 x 2 mesh
// (tiles of 4 x 4 outputs) with a memory that withholds 20 % of the grants.
// Jobs cover: several full tiles with K >= 2p (near-full utilisation, checked
// against a cycle bound), K < 2p (tile starts must wait for the accumulator
// reload), and M, N that are not multiples of 2p (zero-padded partial tiles).
// Every mechanism must have occurred at least once.
module tb_opope_top;
  localparam int P = 2;
  localparam int STALL = 20;
`include "opope_tb_job.svh"

  opope_top #(.P(P)) dut (
    .clk_i(clk), .rst_ni(rst_n),
    .cfg_req_i(cfg_req), .cfg_we_i(cfg_we), .cfg_addr_i(cfg_addr), .cfg_wdata_i(cfg_wdata),
    .cfg_gnt_o(cfg_gnt), .cfg_rvalid_o(cfg_rvalid), .cfg_rdata_o(cfg_rdata),
    .tcdm_req_o(tcdm_req), .tcdm_gnt_i(tcdm_gnt), .tcdm_wen_o(tcdm_wen), .tcdm_addr_o(tcdm_addr),
    .tcdm_wdata_o(tcdm_wdata), .tcdm_be_o(tcdm_be), .tcdm_rvalid_i(tcdm_rvalid), .tcdm_rdata_i(tcdm_rdata),
    .busy_o(busy), .evt_o(evt), .perf_o(perf));

  initial begin : watchdog
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    real u;
    repeat (3) @(posedge clk);
    rst_n = 1;
    // 2 x 2 tiles, K = 16 >= 2p: 4*K*tiles MAC cycles plus load/store of one tile
    run_gemm(8, 8, 16, 4*16*4 + 120, 0, u);
    // short K: tile hand-over limited by the accumulator reload
    run_gemm(8, 8, 2, 400, 0, u);
    // partial tiles in M and N
    run_gemm(6, 10, 5, 600, 0, u);
    i_mem.stall_pct = 0;
    run_gemm(4, 4, 1, 100, 0, u);
    checks++; if (n_couple == 0)    begin failures++; $display("FAIL no drain group"); end
    checks++; if (n_wait == 0)      begin failures++; $display("FAIL no accumulator-reload wait"); end
    checks++; if (n_mem_stall == 0) begin failures++; $display("FAIL no memory stall"); end
    checks++; if (n_partial == 0)   begin failures++; $display("FAIL no partial tile"); end
    checks++; if (n_load == 0 || n_store == 0) begin failures++; $display("FAIL no C shifts"); end
    finish_tb();
  end
endmodule
