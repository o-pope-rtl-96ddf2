// tb_opope_engine: self-checking test of the PE mesh and its sequencer.
// Runs several GEMM jobs on a reduced 2 x 2 mesh (tiles of 4 x 4 outputs):
//  - long K with streams always ready: every output is checked, and the FMAs
//    must issue in every cycle from the first slot to the end of the drain
//    group (full utilisation once the first tile is loaded);
//  - short K (K < 2p): the engine must wait for the accumulators to be
//    reloaded, and still produce correct results;
//  - random gaps on all four streams.
module tb_opope_engine;
  import opope_fp_ref::*;

  localparam int P = 2;
  localparam int V = 2 * P;
  localparam int TMAX = 3, KMAX = 9;

  logic clk = 0, rst_n = 0;
  logic start, busy, done;
  logic [31:0] num_tiles, kk;
  logic a_v, a_r, b_v, b_r, ci_v, ci_r, co_v, co_r;
  logic [15:0] a_d [V], b_d [V], ci_d [V], co_d [V];
  logic ev_issue, ev_mac, ev_couple, ev_load, ev_store, ev_wait, ev_res;
  int checks = 0, failures = 0;

  opope_engine #(.P(P)) dut (
    .clk_i(clk), .rst_ni(rst_n), .start_i(start), .num_tiles_i(num_tiles), .k_i(kk),
    .busy_o(busy), .done_o(done),
    .a_valid_i(a_v), .a_ready_o(a_r), .a_data_i(a_d),
    .b_valid_i(b_v), .b_ready_o(b_r), .b_data_i(b_d),
    .cin_valid_i(ci_v), .cin_ready_o(ci_r), .cin_data_i(ci_d),
    .cout_valid_o(co_v), .cout_ready_i(co_r), .cout_data_o(co_d),
    .ev_issue_o(ev_issue), .ev_mac_o(ev_mac), .ev_couple_o(ev_couple),
    .ev_load_o(ev_load), .ev_store_o(ev_store), .ev_wait_acc_o(ev_wait), .ev_result_o(ev_res));

  always #5 clk = ~clk;

  logic [15:0] av [TMAX][KMAX][V], bv [TMAX][KMAX][V], cinit [TMAX][V][V], cexp [TMAX][V][V];
  int ia, ib, ic, io;         // stream positions
  int T, K;
  bit gaps;
  int n_mac, n_couple, n_wait, n_wait_mid, first_issue, last_issue, cyc;

  initial begin : watchdog
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // stream drivers: present data at the negative edge, advance on handshake
  always @(negedge clk) begin
    if (busy) begin
      a_v  = (ia < T*K)  && (!gaps || $urandom_range(3) != 0);
      b_v  = (ib < T*K)  && (!gaps || $urandom_range(3) != 0);
      ci_v = (ic < T*V)  && (!gaps || $urandom_range(3) != 0);
      co_r = (!gaps || $urandom_range(2) != 0);
      for (int e = 0; e < V; e++) begin
        a_d[e]  = (ia < T*K) ? av[ia / K][ia % K][e] : 16'h0;
        b_d[e]  = (ib < T*K) ? bv[ib / K][ib % K][e] : 16'h0;
        ci_d[e] = (ic < T*V) ? cinit[ic / V][ic % V][e] : 16'h0;
      end
    end else begin
      a_v = 0; b_v = 0; ci_v = 0; co_r = 0;
    end
  end

  always @(posedge clk) begin
    if (rst_n && busy) begin
      cyc++;
      if (a_v && a_r) ia++;
      if (b_v && b_r) ib++;
      if (ci_v && ci_r) ic++;
      if (co_v && co_r) begin
        for (int e = 0; e < V; e++) begin
          checks++;
          if (co_d[e] !== cexp[io / V][io % V][e]) begin
            failures++;
            if (failures < 10) $display("FAIL tile %0d row %0d col %0d got %h exp %h",
                                        io / V, io % V, e, co_d[e], cexp[io / V][io % V][e]);
          end
        end
        io++;
      end
      if (ev_mac) n_mac++;
      if (ev_couple) n_couple++;
      if (ev_wait) n_wait++;
      if (ev_issue) begin
        if (first_issue < 0) first_issue = cyc;
        last_issue = cyc;
      end
      if (ev_wait && first_issue >= 0) n_wait_mid++;
    end
  end

  task automatic run_job(input int t_n, input int k_n, input int g);
    T = t_n; K = k_n; gaps = (g != 0);
    for (int t = 0; t < T; t++) begin
      for (int k = 0; k < K; k++)
        for (int e = 0; e < V; e++) begin
          av[t][k][e] = rand_h(12, 17);
          bv[t][k][e] = rand_h(12, 17);
        end
      for (int r = 0; r < V; r++)
        for (int c = 0; c < V; c++) begin
          cinit[t][r][c] = rand_h(12, 17);
          cexp[t][r][c]  = cinit[t][r][c];
          for (int k = 0; k < K; k++) cexp[t][r][c] = fma16(av[t][k][r], bv[t][k][c], cexp[t][r][c]);
        end
    end
    ia = 0; ib = 0; ic = 0; io = 0; cyc = 0;
    n_mac = 0; n_couple = 0; n_wait = 0; n_wait_mid = 0; first_issue = -1; last_issue = -1;
    @(negedge clk);
    num_tiles = 32'(T); kk = 32'(K); start = 1;
    @(negedge clk);
    start = 0;
    while (busy) @(negedge clk);
    // every result row written back, all MAC slots issued, one coupled group per tile + drain
    checks++;
    if (io != T*V) begin failures++; $display("FAIL rows out %0d", io); end
    checks++;
    if (n_mac != 4*K*T) begin failures++; $display("FAIL mac slots %0d exp %0d", n_mac, 4*K*T); end
    checks++;
    if (n_couple != 4*(T+1)) begin failures++; $display("FAIL coupled slots %0d", n_couple); end
    $display("job T=%0d K=%0d gaps=%0d: cycles=%0d mac=%0d wait=%0d issue span=%0d",
             T, K, g, cyc, n_mac, n_wait, last_issue - first_issue + 1);
  endtask

  initial begin
    start = 0; num_tiles = 0; kk = 0;
    a_v = 0; b_v = 0; ci_v = 0; co_r = 0;
    for (int e = 0; e < V; e++) begin a_d[e] = 0; b_d[e] = 0; ci_d[e] = 0; end
    repeat (3) @(posedge clk);
    rst_n = 1;
    // 1) K >= 2p, no gaps: the FMAs never stall between the first slot and the drain
    run_job(3, 8, 0);
    checks++;
    if (last_issue - first_issue + 1 != 4*K*T + 4) begin
      failures++;
      $display("FAIL issue span %0d exp %0d", last_issue - first_issue + 1, 4*K*T + 4);
    end
    checks++;
    // the first slot follows the 2p-row preload of the first tile:
    // one cycle to start loading, 2p shifts, one cycle to fill the input buffers
    if (first_issue != V + 3) begin failures++; $display("FAIL first issue at %0d", first_issue); end
    checks++;
    if (n_wait_mid != 0) begin failures++; $display("FAIL waits with long K"); end
    // 2) K < 2p: tile starts wait for the accumulator reload
    run_job(3, 2, 0);
    checks++;
    if (n_wait_mid == 0) begin failures++; $display("FAIL no accumulator wait with short K"); end
    // 3) random gaps
    run_job(3, 5, 1);
    run_job(1, 1, 1);
    repeat (3) @(negedge clk);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
