// tb_tcdm_model: behavioural model of the cluster's shared L1 memory (TCDM)
// and interconnect, as seen from the accelerator's wide port.  Not
// synthesizable.  A byte array of SIZE bytes (128 KiB like the cluster's L1);
// a request is granted at once or, with probability STALL_PCT %, held back a
// random number of cycles (modelling bank conflicts with the cores).  Read
// data returns one cycle after the grant, writes honour the byte enables.
// Addresses wrap at SIZE.
module tb_tcdm_model #(
  parameter int unsigned VW        = 512,
  parameter int unsigned SIZE      = 131072,
  parameter int unsigned STALL_PCT = 0
) (
  input  logic            clk_i,
  input  logic            req_i,
  output logic            gnt_o,
  input  logic            wen_i,
  input  logic [31:0]     addr_i,
  input  logic [VW-1:0]   wdata_i,
  input  logic [VW/8-1:0] be_i,
  output logic            rvalid_o,
  output logic [VW-1:0]   rdata_o
);
  logic [7:0] mem [SIZE];
  int unsigned stall_pct = STALL_PCT;
  logic        gnt_rand;

  initial begin
    for (int i = 0; i < SIZE; i++) mem[i] = 8'h00;
    rvalid_o = 1'b0;
    rdata_o  = '0;
    gnt_rand = 1'b1;
  end

  always @(negedge clk_i) gnt_rand = ($urandom_range(99) >= stall_pct);
  assign gnt_o = req_i && gnt_rand;

  always @(posedge clk_i) begin
    rvalid_o <= 1'b0;
    if (req_i && gnt_o) begin
      if (wen_i) begin
        for (int b = 0; b < VW/8; b++)
          if (be_i[b]) mem[(addr_i + 32'(b)) % SIZE] <= wdata_i[b*8 +: 8];
      end else begin
        for (int b = 0; b < VW/8; b++) rdata_o[b*8 +: 8] <= mem[(addr_i + 32'(b)) % SIZE];
        rvalid_o <= 1'b1;
      end
    end
  end

  // 16-bit element access for the testbenches
  function automatic logic [15:0] rd16(input int unsigned a);
    return {mem[(a + 1) % SIZE], mem[a % SIZE]};
  endfunction
  function automatic void wr16(input int unsigned a, input logic [15:0] v);
    mem[a % SIZE] = v[7:0];
    mem[(a + 1) % SIZE] = v[15:8];
  endfunction
endmodule
