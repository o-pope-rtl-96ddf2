// opope_agen: three-level address generator of one streamer channel.
//
// Walks  for o in [0, n_outer)  for m in [0, n_mid)  for i in [0, n_inner)
// and presents  addr = base + o*s_outer + m*s_mid + i*s_inner  together with
// the three indices.  next_i moves to the following point; done_o is high
// once every point has been consumed.  Addresses are formed by accumulation,
// not by multiplication.  start_i (with the new configuration) restarts.
//
// Timing: addr_o and the indices come straight from registers and change at
// the clock edge after next_i.  The published design only says that the
// streamer generates the addresses of its transfer sequence; the three-level
// walk is this design's way of doing it.
module opope_agen #(
  parameter int unsigned AW = 32,
  parameter int unsigned CW = 16
) (
  input  logic          clk_i,
  input  logic          rst_ni,
  input  logic          start_i,
  input  logic [AW-1:0] base_i,
  input  logic [CW-1:0] n_outer_i,
  input  logic [CW-1:0] n_mid_i,
  input  logic [CW-1:0] n_inner_i,
  input  logic [AW-1:0] s_outer_i,
  input  logic [AW-1:0] s_mid_i,
  input  logic [AW-1:0] s_inner_i,
  input  logic          next_i,
  output logic [AW-1:0] addr_o,
  output logic [CW-1:0] idx_outer_o,
  output logic [CW-1:0] idx_mid_o,
  output logic [CW-1:0] idx_inner_o,
  output logic          done_o
);
  logic [AW-1:0] obase_q, mbase_q, addr_q;
  logic [CW-1:0] o_q, m_q, i_q;
  logic          done_q;

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      obase_q <= '0; mbase_q <= '0; addr_q <= '0;
      o_q <= '0; m_q <= '0; i_q <= '0;
      done_q <= 1'b1;
    end else if (start_i) begin
      obase_q <= base_i; mbase_q <= base_i; addr_q <= base_i;
      o_q <= '0; m_q <= '0; i_q <= '0;
      done_q <= (n_outer_i == '0) || (n_mid_i == '0) || (n_inner_i == '0);
    end else if (next_i && !done_q) begin
      if (i_q != n_inner_i - 1) begin
        i_q    <= i_q + 1;
        addr_q <= addr_q + s_inner_i;
      end else begin
        i_q <= '0;
        if (m_q != n_mid_i - 1) begin
          m_q     <= m_q + 1;
          mbase_q <= mbase_q + s_mid_i;
          addr_q  <= mbase_q + s_mid_i;
        end else begin
          m_q     <= '0;
          mbase_q <= obase_q + s_outer_i;
          addr_q  <= obase_q + s_outer_i;
          obase_q <= obase_q + s_outer_i;
          if (o_q != n_outer_i - 1) o_q <= o_q + 1;
          else                      done_q <= 1'b1;
        end
      end
    end
  end

  assign addr_o      = addr_q;
  assign idx_outer_o = o_q;
  assign idx_mid_o   = m_q;
  assign idx_inner_o = i_q;
  assign done_o      = done_q;

endmodule
