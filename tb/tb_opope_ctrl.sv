// tb_opope_ctrl: self-checking test of the job controller.
// Register write/read-back, the start pulse two cycles after TRIGGER, tile
// counts ceil(M/2p) and ceil(N/2p) (default p = 16), completion only after
// both the engine and the streamer are done, the completion event, the
// cycle and MAC counters, and the rejection of triggers while busy or with a
// zero dimension.
module tb_opope_ctrl;
  import opope_pkg::*;
  logic clk = 0, rst_n = 0;
  logic req, we, gnt, rvalid;
  logic [3:0] addr;
  logic [31:0] wdata, rdata;
  logic start, eng_done, str_idle, mac, busy, evt;
  job_t job;
  logic [15:0] tm_n, tn_n;
  logic [31:0] tiles;
  int checks = 0, failures = 0;
  int starts;

  always #5 clk = ~clk;

  opope_ctrl dut (.clk_i(clk), .rst_ni(rst_n), .req_i(req), .we_i(we), .addr_i(addr),
    .wdata_i(wdata), .gnt_o(gnt), .rvalid_o(rvalid), .rdata_o(rdata),
    .start_o(start), .job_o(job), .tm_n_o(tm_n), .tn_n_o(tn_n), .num_tiles_o(tiles),
    .engine_done_i(eng_done), .streamer_idle_i(str_idle), .mac_i(mac), .busy_o(busy), .evt_o(evt));

  initial begin : watchdog
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) if (start) starts++;

  task automatic chk(input logic cond, input string msg);
    checks++;
    if (!cond) begin failures++; $display("FAIL %s", msg); end
  endtask

  task automatic wr(input int unsigned a, input logic [31:0] d);
    @(negedge clk); req = 1; we = 1; addr = 4'(a); wdata = d;
    @(negedge clk); req = 0; we = 0;
  endtask

  task automatic rd(input int unsigned a, output logic [31:0] d);
    @(negedge clk); req = 1; we = 0; addr = 4'(a);
    @(negedge clk); req = 0;
    chk(rvalid, "rvalid");
    d = rdata;
  endtask

  task automatic job_run(input int m, input int n, input int k, input int run_cycles);
    logic [31:0] d;
    int t;
    wr(REG_M, 32'(m)); wr(REG_N, 32'(n)); wr(REG_K, 32'(k));
    starts = 0;
    // trigger: start exactly two cycles after the write cycle
    @(negedge clk); req = 1; we = 1; addr = 4'(REG_TRIGGER); wdata = 1;
    @(negedge clk); req = 0; we = 0;
    chk(busy && !start, "busy, no start in setup");
    @(negedge clk);
    chk(start, "start pulse");
    chk(tm_n == 16'((m + 31) / 32) && tn_n == 16'((n + 31) / 32), "tile counts");
    chk(tiles == 32'(((m + 31) / 32) * ((n + 31) / 32)), "number of tiles");
    chk(job.m == 16'(m) && job.k == 16'(k) && job.a_addr == 32'h1000, "job latched");
    str_idle = 0;
    // a trigger while busy is ignored
    wr(REG_TRIGGER, 1);
    for (t = 0; t < run_cycles; t++) begin
      @(negedge clk); mac = (t % 2 == 0);
    end
    @(negedge clk); mac = 0;
    eng_done = 1; @(negedge clk); eng_done = 0;
    repeat (3) @(negedge clk);
    chk(busy && !evt, "waits for the streamer");
    str_idle = 1;
    #1 chk(evt, "event");
    @(negedge clk);
    chk(!busy, "idle after event");
    chk(starts == 1, "exactly one start");
    rd(REG_MACS, d);
    chk(d == 32'((run_cycles + 1) / 2), "MAC counter");
    rd(REG_CYCLES, d);
    chk(d > 32'(run_cycles) && d < 32'(run_cycles + 12), "cycle counter");
  endtask

  initial begin
    logic [31:0] d;
    req = 0; we = 0; addr = 0; wdata = 0; eng_done = 0; str_idle = 1; mac = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    chk(!busy && gnt == 0, "reset state");
    wr(REG_A_ADDR, 32'h1000); wr(REG_B_ADDR, 32'h2000); wr(REG_C_ADDR, 32'h3000); wr(REG_D_ADDR, 32'h4000);
    rd(REG_A_ADDR, d); chk(d == 32'h1000, "A readback");
    rd(REG_D_ADDR, d); chk(d == 32'h4000, "D readback");
    // zero K: trigger ignored
    wr(REG_M, 32); wr(REG_N, 32); wr(REG_K, 0);
    wr(REG_TRIGGER, 1);
    repeat (3) @(negedge clk);
    chk(!busy, "zero dimension rejected");
    job_run(32, 64, 40, 50);
    job_run(33, 5, 1, 7);
    rd(REG_STATUS, d); chk(d[0] == 1'b0, "status idle");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
