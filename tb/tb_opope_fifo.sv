// tb_opope_fifo: self-checking test of the stream FIFO.
// Random push/pop traffic against a queue model: data order, occupancy count,
// full/empty flags, and the fall-through (zero-cycle) read latency.
module tb_opope_fifo;
  localparam int W = 24, D = 4;
  logic clk = 0, rst_n = 0;
  logic vi, ro, vo, ri, clr;
  logic [W-1:0] di, dout;
  logic [2:0] cnt;
  int checks = 0, failures = 0;
  logic [W-1:0] model [$];

  opope_fifo #(.WIDTH(W), .DEPTH(D)) dut (.clk_i(clk), .rst_ni(rst_n), .clr_i(clr),
    .valid_i(vi), .ready_o(ro), .data_i(di), .valid_o(vo), .ready_i(ri), .data_o(dout), .count_o(cnt));

  always #5 clk = ~clk;

  initial begin : watchdog
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    vi = 0; ri = 0; di = 0; clr = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int i = 0; i < 3000; i++) begin
      @(negedge clk);
      // check state
      checks++;
      if (int'(cnt) != model.size() || vo != (model.size() != 0) || ro != (model.size() != D)) begin
        failures++;
        if (failures < 10) $display("FAIL cnt %0d model %0d vo %b ro %b", cnt, model.size(), vo, ro);
      end
      if (model.size() != 0) begin
        checks++;
        if (dout !== model[0]) begin failures++; $display("FAIL data %h exp %h", dout, model[0]); end
      end
      // drive: bias phases toward full and toward empty
      vi = (i % 400 < 200) ? ($urandom_range(3) != 0) : ($urandom_range(3) == 0);
      vi = vi && (model.size() != D);
      ri = $urandom_range(1) == 1;
      di = W'($urandom);
      @(posedge clk);
      if (ri && model.size() != 0) void'(model.pop_front());
      if (vi) model.push_back(di);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
