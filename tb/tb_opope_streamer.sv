// tb_opope_streamer: self-checking test of the streamer on a 2 x 2 mesh
// configuration (4-element vectors).  The memory holds a pattern in which
// every 16-bit element equals its own element address, so each vector pushed
// towards the engine can be checked against the expected walk, including the
// zero padding of partial tiles.  Result vectors offered on the D side are
// written back and checked in memory, including the cleared byte enables
// outside the matrix.  FIFOs are modelled as queues drained at random; the
// reservation rule (a push never meets a full FIFO) is checked.  With an
// ideal memory and instant consumers the port must move one vector per cycle.
module tb_opope_streamer;
  localparam int P = 2, V = 2 * P, Q = 16, VW = V * Q, DEPTH = 4;
  logic clk = 0, rst_n = 0;
  logic start, idle;
  opope_pkg::job_t job;
  logic [15:0] tm_n, tn_n;
  logic a_push, b_push, c_push, d_valid, d_ready;
  logic [VW-1:0] a_data, b_data, c_data, d_data;
  logic [2:0] a_cnt, b_cnt, c_cnt;
  logic req, gnt, wen, rvalid;
  logic [31:0] addr;
  logic [VW-1:0] wdata, rdata;
  logic [VW/8-1:0] be;
  int checks = 0, failures = 0;
  int drain_pct;

  always #5 clk = ~clk;

  opope_streamer #(.P(P), .Q(Q), .DEPTH(DEPTH)) dut (
    .clk_i(clk), .rst_ni(rst_n), .start_i(start), .job_i(job), .tm_n_i(tm_n), .tn_n_i(tn_n),
    .idle_o(idle),
    .a_push_o(a_push), .a_data_o(a_data), .a_count_i(a_cnt),
    .b_push_o(b_push), .b_data_o(b_data), .b_count_i(b_cnt),
    .c_push_o(c_push), .c_data_o(c_data), .c_count_i(c_cnt),
    .d_valid_i(d_valid), .d_ready_o(d_ready), .d_data_i(d_data),
    .tcdm_req_o(req), .tcdm_gnt_i(gnt), .tcdm_wen_o(wen), .tcdm_addr_o(addr),
    .tcdm_wdata_o(wdata), .tcdm_be_o(be), .tcdm_rvalid_i(rvalid), .tcdm_rdata_i(rdata));

  tb_tcdm_model #(.VW(VW), .SIZE(8192)) i_mem (
    .clk_i(clk), .req_i(req), .gnt_o(gnt), .wen_i(wen), .addr_i(addr),
    .wdata_i(wdata), .be_i(be), .rvalid_o(rvalid), .rdata_o(rdata));

  // FIFO models and expected streams
  int qa, qb, qc;                       // occupancy
  int na, nb, nc, nd;                   // vectors seen / offered
  int M, N, K, TM, TN;
  int unsigned A0, B0, C0, D0;

  assign a_cnt = 3'(qa);
  assign b_cnt = 3'(qb);
  assign c_cnt = 3'(qc);

  function automatic logic [15:0] expect_elem(input int str, input int idx, input int e);
    int t, tm, tn, k, r, row, col;
    t = idx / ((str < 2) ? K : V);
    tm = t / TN; tn = t % TN;
    if (str == 0) begin
      k = idx % K; row = tm*V + e;
      return (row < M) ? 16'((A0/2 + k*M + row)) : 16'h0;
    end else if (str == 1) begin
      k = idx % K; col = tn*V + e;
      return (col < N) ? 16'((B0/2 + k*N + col)) : 16'h0;
    end
    r = idx % V; row = tm*V + r; col = tn*V + e;
    return (row < M && col < N) ? 16'((C0/2 + row*N + col)) : 16'h0;
  endfunction

  task automatic check_vec(input int str, input int idx, input logic [VW-1:0] d);
    for (int e = 0; e < V; e++) begin
      checks++;
      if (d[e*Q +: Q] !== expect_elem(str, idx, e)) begin
        failures++;
        if (failures < 10) $display("FAIL stream %0d vec %0d elem %0d got %h exp %h",
                                    str, idx, e, d[e*Q +: Q], expect_elem(str, idx, e));
      end
    end
  endtask

  always @(posedge clk) begin
    if (rst_n) begin
      if (a_push) begin check_vec(0, na, a_data); na++; end
      if (b_push) begin check_vec(1, nb, b_data); nb++; end
      if (c_push) begin check_vec(2, nc, c_data); nc++; end
      if ((a_push && qa == DEPTH) || (b_push && qb == DEPTH) || (c_push && qc == DEPTH)) begin
        failures++; $display("FAIL push into full FIFO");
      end
      qa = qa + int'(a_push); qb = qb + int'(b_push); qc = qc + int'(c_push);
      if (d_valid && d_ready) nd++;
    end
  end

  // consumers drain the FIFO models; the D source offers tagged result rows
  always @(negedge clk) begin
    if (qa > 0 && $urandom_range(99) < drain_pct) qa--;
    if (qb > 0 && $urandom_range(99) < drain_pct) qb--;
    if (qc > 0 && $urandom_range(99) < drain_pct) qc--;
    d_valid = (nd < TM*TN*V) && ($urandom_range(99) < drain_pct);
    for (int e = 0; e < V; e++) d_data[e*Q +: Q] = 16'(32'hC000 + nd*V + e);
  end

  initial begin : watchdog
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic run(input int m, input int n, input int k, input int stall, input int drain,
                     output int cycles);
    M = m; N = n; K = k; TM = (M + V - 1) / V; TN = (N + V - 1) / V;
    A0 = 32'h100; B0 = A0 + 32'(2*K*M); C0 = B0 + 32'(2*K*N); D0 = C0 + 32'(2*M*N) + 32'h40;
    for (int i = 0; i < 4096; i++) i_mem.wr16(32'(2*i), 16'(i));
    i_mem.stall_pct = stall; drain_pct = drain;
    na = 0; nb = 0; nc = 0; nd = 0; qa = 0; qb = 0; qc = 0;
    job = '{a_addr: A0, b_addr: B0, c_addr: C0, d_addr: D0, m: 16'(M), n: 16'(N), k: 16'(K)};
    tm_n = 16'(TM); tn_n = 16'(TN);
    @(negedge clk); start = 1;
    @(negedge clk); start = 0;
    cycles = 1;
    while (!idle) begin @(negedge clk); cycles++; end
    repeat (2) @(negedge clk);
    checks += 3;
    if (na != TM*TN*K || nb != TM*TN*K || nc != TM*TN*V) begin
      failures++; $display("FAIL vector counts %0d %0d %0d", na, nb, nc);
    end
    if (nd != TM*TN*V) begin failures++; $display("FAIL D rows %0d", nd); end
    // D in memory: row r of tile t holds tag 0xC000 + (t*V + r)*V + e where inside
    for (int row = 0; row < M; row++)
      for (int col = 0; col < N; col++) begin
        int t, r, e;
        t = (row / V) * TN + col / V; r = row % V; e = col % V;
        checks++;
        if (i_mem.rd16(D0 + 32'(2*(row*N + col))) !== 16'(32'hC000 + (t*V + r)*V + e)) begin
          failures++;
          if (failures < 10) $display("FAIL D[%0d][%0d] = %h", row, col, i_mem.rd16(D0 + 32'(2*(row*N + col))));
        end
      end
    // the word right after D is untouched (partial columns/rows masked)
    if (i_mem.rd16(D0 + 32'(2*M*N)) !== 16'((D0 + 2*M*N) / 2)) begin
      failures++; $display("FAIL write past the end of D");
    end
  endtask

  initial begin
    int cyc;
    start = 0; job = '0; tm_n = 0; tn_n = 0; d_valid = 0; d_data = 0; drain_pct = 100;
    repeat (3) @(posedge clk);
    rst_n = 1;
    // ideal memory, instant consumers: one vector per cycle
    run(8, 8, 4, 0, 100, cyc);
    checks++;
    if (cyc > 4 * (2*4 + 2*4) + 6) begin failures++; $display("FAIL %0d cycles for 64 vectors", cyc); end
    $display("8x4x8: %0d cycles for %0d vectors", cyc, 4 * (2*4 + 2*4));
    // bank conflicts, slow consumers, partial tiles
    run(6, 10, 3, 30, 40, cyc);
    run(2, 2, 1, 50, 70, cyc);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
