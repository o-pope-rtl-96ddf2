// opope_fifo: synchronous FIFO placed between the streamer and the engine.
//
// The streamer reserves a slot before it issues a memory read, so a response
// can always be pushed: the FIFO absorbs the variable latency caused by TCDM
// bank conflicts without back-pressuring the memory port.  DEPTH is a
// design-time choice (not given numerically; four by default).
//
// Interface: valid/ready on both sides, first-word fall-through output
// (data_o shows the oldest entry whenever valid_o is high).  count_o is the
// number of stored entries, used by the streamer for slot reservation.
//
// Timing: an entry pushed at a clock edge is visible on data_o after that
// edge; a push and a pop may happen in the same cycle.  The FIFOs between
// streamer and engine and their reserved slots follow the published
// architecture; the fall-through style and the depth are this design's.
module opope_fifo #(
  parameter int unsigned WIDTH = 512,
  parameter int unsigned DEPTH = 4,
  localparam int unsigned CW   = $clog2(DEPTH + 1)
) (
  input  logic             clk_i,
  input  logic             rst_ni,
  input  logic             clr_i,
  input  logic             valid_i,
  output logic             ready_o,
  input  logic [WIDTH-1:0] data_i,
  output logic             valid_o,
  input  logic             ready_i,
  output logic [WIDTH-1:0] data_o,
  output logic [CW-1:0]    count_o
);
  localparam int unsigned PW = (DEPTH > 1) ? $clog2(DEPTH) : 1;

  logic [WIDTH-1:0] mem_q [DEPTH];
  logic [PW-1:0]    rd_q, wr_q;
  logic [CW-1:0]    cnt_q;
  logic             push, pop;

  assign ready_o = (cnt_q != CW'(DEPTH));
  assign valid_o = (cnt_q != '0);
  assign data_o  = mem_q[rd_q];
  assign count_o = cnt_q;
  assign push    = valid_i && ready_o;
  assign pop     = valid_o && ready_i;

  function automatic logic [PW-1:0] nxt(input logic [PW-1:0] p);
    return (p == PW'(DEPTH - 1)) ? '0 : p + PW'(1);
  endfunction

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      rd_q  <= '0;
      wr_q  <= '0;
      cnt_q <= '0;
    end else if (clr_i) begin
      rd_q  <= '0;
      wr_q  <= '0;
      cnt_q <= '0;
    end else begin
      if (push) wr_q <= nxt(wr_q);
      if (pop)  rd_q <= nxt(rd_q);
      cnt_q <= cnt_q + CW'(push) - CW'(pop);
    end
  end

  // storage without reset
  always_ff @(posedge clk_i) begin
    if (push) mem_q[wr_q] <= data_i;
  end

endmodule
