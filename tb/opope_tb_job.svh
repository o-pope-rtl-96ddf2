// Shared body of the accelerator-level testbenches.  Expects localparam P
// (mesh side) and STALL (percentage of withheld TCDM grants) to be declared
// by the including module.  Instantiates opope_top and the memory model,
// programs jobs through the configuration port, checks every element of D
// against a reference computed with sequential binary16 FMAs, and counts the
// mechanisms the jobs exercised.

  localparam int Q  = 16;
  localparam int VW = 2 * P * Q;
  logic clk = 0, rst_n = 0;
  logic cfg_req, cfg_we, cfg_gnt, cfg_rvalid;
  logic [3:0]  cfg_addr;
  logic [31:0] cfg_wdata, cfg_rdata;
  logic tcdm_req, tcdm_gnt, tcdm_wen, tcdm_rvalid;
  logic [31:0] tcdm_addr;
  logic [VW-1:0] tcdm_wdata, tcdm_rdata;
  logic [VW/8-1:0] tcdm_be;
  logic busy, evt;
  opope_pkg::perf_t perf;
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  tb_tcdm_model #(.VW(VW), .STALL_PCT(STALL)) i_mem (
    .clk_i(clk), .req_i(tcdm_req), .gnt_o(tcdm_gnt), .wen_i(tcdm_wen), .addr_i(tcdm_addr),
    .wdata_i(tcdm_wdata), .be_i(tcdm_be), .rvalid_o(tcdm_rvalid), .rdata_o(tcdm_rdata));

  // mechanism counters
  int n_couple, n_mac, n_wait, n_mem_stall, n_partial, n_load, n_store, n_jobs;
  always @(posedge clk) begin
    if (rst_n) begin
      if (perf.couple && !perf.mac) n_couple++;   // drain slots
      if (perf.mac) n_mac++;
      if (perf.acc_wait) n_wait++;
      if (perf.mem_stall) n_mem_stall++;
      if (perf.acc_load) n_load++;
      if (perf.acc_store) n_store++;
    end
  end

  task automatic cfg_write(input int unsigned a, input logic [31:0] d);
    @(negedge clk);
    cfg_req = 1; cfg_we = 1; cfg_addr = 4'(a); cfg_wdata = d;
    @(negedge clk);
    cfg_req = 0; cfg_we = 0;
  endtask

  task automatic cfg_read(input int unsigned a, output logic [31:0] d);
    @(negedge clk);
    cfg_req = 1; cfg_we = 0; cfg_addr = 4'(a);
    @(negedge clk);
    cfg_req = 0;
    d = cfg_rdata;
  endtask

  // run D = C + A*B with the matrices at fixed addresses; check D and timing.
  // With inplace set, D overwrites C.  Returns the utilisation in percent.
  task automatic run_gemm(input int M, input int N, input int K, input int max_cycles,
                          input bit inplace = 0, output real util);
    int unsigned A0, B0, C0, D0;
    logic [15:0] cinit [];
    logic [15:0] acc;
    logic [31:0] cycles, macs;
    int tiles, t0, t1, bad;
    A0 = 32'h0000; B0 = A0 + 32'(K*M*2); C0 = B0 + 32'(K*N*2);
    D0 = inplace ? C0 : C0 + 32'(M*N*2);
    cinit = new[M*N];
    for (int i = 0; i < K*M; i++) i_mem.wr16(A0 + 32'(2*i), opope_fp_ref::rand_h(12, 16));
    for (int i = 0; i < K*N; i++) i_mem.wr16(B0 + 32'(2*i), opope_fp_ref::rand_h(12, 16));
    if (!inplace) begin
      // D region and a guard area after it are pre-filled with a marker
      for (int i = 0; i < M*N + 2*P; i++) i_mem.wr16(D0 + 32'(2*i), 16'hDEAD);
    end
    for (int i = 0; i < M*N; i++) begin
      cinit[i] = opope_fp_ref::rand_h(12, 16);
      i_mem.wr16(C0 + 32'(2*i), cinit[i]);
    end
    cfg_write(opope_pkg::REG_A_ADDR, A0);
    cfg_write(opope_pkg::REG_B_ADDR, B0);
    cfg_write(opope_pkg::REG_C_ADDR, C0);
    cfg_write(opope_pkg::REG_D_ADDR, D0);
    cfg_write(opope_pkg::REG_M, 32'(M));
    cfg_write(opope_pkg::REG_N, 32'(N));
    cfg_write(opope_pkg::REG_K, 32'(K));
    t0 = int'($time);
    cfg_write(opope_pkg::REG_TRIGGER, 32'd1);
    while (!evt) @(posedge clk);
    t1 = int'($time);
    @(negedge clk);
    n_jobs++;
    bad = 0;
    for (int m = 0; m < M; m++)
      for (int n = 0; n < N; n++) begin
        acc = cinit[m*N + n];
        for (int k = 0; k < K; k++)
          acc = opope_fp_ref::fma16(i_mem.rd16(A0 + 32'(2*(k*M + m))),
                                    i_mem.rd16(B0 + 32'(2*(k*N + n))), acc);
        checks++;
        if (i_mem.rd16(D0 + 32'(2*(m*N + n))) !== acc) begin
          failures++; bad++;
          if (bad < 5) $display("FAIL D[%0d][%0d] got %h exp %h", m, n,
                                i_mem.rd16(D0 + 32'(2*(m*N + n))), acc);
        end
      end
    for (int i = M*N; i < M*N + 2*P && !inplace; i++) begin
      checks++;
      if (i_mem.rd16(D0 + 32'(2*i)) !== 16'hDEAD) begin failures++; $display("FAIL write past D"); end
    end
    tiles = ((M + 2*P - 1) / (2*P)) * ((N + 2*P - 1) / (2*P));
    if (M % (2*P) != 0 || N % (2*P) != 0) n_partial++;
    cfg_read(opope_pkg::REG_CYCLES, cycles);
    cfg_read(opope_pkg::REG_MACS, macs);
    checks++;
    if (macs != 32'(4*K*tiles)) begin failures++; $display("FAIL MAC slots %0d exp %0d", macs, 4*K*tiles); end
    checks++;
    if (int'(cycles) > max_cycles) begin failures++; $display("FAIL %0d cycles > %0d", cycles, max_cycles); end
    util = 100.0 * real'(macs) / real'(cycles);
    $display("GEMM M=%0d K=%0d N=%0d on %0dx%0d: %0d cycles, %0d MAC slots, utilisation %0.3f%%",
             M, K, N, P, P, cycles, macs, util);
  endtask

  initial begin
    cfg_req = 0; cfg_we = 0; cfg_addr = 0; cfg_wdata = 0;
    n_couple = 0; n_mac = 0; n_wait = 0; n_mem_stall = 0; n_partial = 0; n_load = 0; n_store = 0; n_jobs = 0;
  end

  task automatic finish_tb();
    $display("mechanisms: jobs=%0d drain_slots=%0d acc_wait=%0d mem_stall=%0d partial_tiles=%0d acc_load=%0d acc_store=%0d",
             n_jobs, n_couple, n_wait, n_mem_stall, n_partial, n_load, n_store);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  endtask
