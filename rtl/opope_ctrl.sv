// opope_ctrl: job controller of the O-POPE accelerator.
//
// A small register file on a 32-bit configuration port, written by the
// cluster core that programs the accelerator, and a three-state job FSM:
//   IDLE  -> (write to TRIGGER) -> SETUP: latch the job, compute the tile
//            counts ceil(M/2p), ceil(N/2p) and their product;
//   SETUP -> RUN: start streamer and engine in the same cycle;
//   RUN   -> IDLE when the engine has emitted the last result row and the
//            streamer has written it and has nothing outstanding; evt_o then
//            pulses for one cycle (completion event to the cores).
// While RUN, writes to the job registers are accepted but take effect only at
// the next trigger; a trigger while busy is ignored.  Two read-only counters
// report the cycles and the MAC issue slots of the last job, so software can
// compute the array utilisation.  The register map is in opope_pkg.
//
// Configuration port: req_i/we_i/addr_i (word index)/wdata_i, always granted,
// read data returned one cycle later with rvalid_o.
module opope_ctrl #(
  parameter int unsigned P = opope_pkg::P_DEFAULT,
  localparam int unsigned DW = opope_pkg::DIM_W
) (
  input  logic            clk_i,
  input  logic            rst_ni,
  // configuration port
  input  logic            req_i,
  input  logic            we_i,
  input  logic [3:0]      addr_i,
  input  logic [31:0]     wdata_i,
  output logic            gnt_o,
  output logic            rvalid_o,
  output logic [31:0]     rdata_o,
  // to streamer and engine
  output logic            start_o,
  output opope_pkg::job_t job_o,
  output logic [DW-1:0]   tm_n_o,
  output logic [DW-1:0]   tn_n_o,
  output logic [31:0]     num_tiles_o,
  input  logic            engine_done_i,
  input  logic            streamer_idle_i,
  input  logic            mac_i,          // one MAC issue slot of the mesh
  output logic            busy_o,
  output logic            evt_o
);
  import opope_pkg::*;

  localparam int unsigned LV = $clog2(2 * P);

  typedef enum logic [1:0] {S_IDLE, S_SETUP, S_RUN} state_e;

  state_e        st_q;
  job_t          regs_q, job_q;
  logic [DW-1:0] tm_q, tn_q;
  logic [31:0]   tiles_q, cyc_q, macs_q, cyc_last_q, macs_last_q;
  logic          eng_done_q, rvalid_q;
  logic [31:0]   rdata_q;

  assign gnt_o = req_i;

  function automatic logic [DW-1:0] ceil_tiles(input logic [DW-1:0] d);
    return DW'(({1'b0, d} + (DW+1)'(2 * P - 1)) >> LV);
  endfunction

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      st_q <= S_IDLE;
      regs_q <= '0; job_q <= '0;
      tm_q <= '0; tn_q <= '0; tiles_q <= '0;
      cyc_q <= '0; macs_q <= '0; cyc_last_q <= '0; macs_last_q <= '0;
      eng_done_q <= 1'b0;
      rvalid_q <= 1'b0; rdata_q <= '0;
    end else begin
      // register file
      rvalid_q <= req_i && !we_i;
      if (req_i && we_i) begin
        unique case (32'(addr_i))
          REG_A_ADDR: regs_q.a_addr <= wdata_i;
          REG_B_ADDR: regs_q.b_addr <= wdata_i;
          REG_C_ADDR: regs_q.c_addr <= wdata_i;
          REG_D_ADDR: regs_q.d_addr <= wdata_i;
          REG_M:      regs_q.m      <= wdata_i[DW-1:0];
          REG_N:      regs_q.n      <= wdata_i[DW-1:0];
          REG_K:      regs_q.k      <= wdata_i[DW-1:0];
          default: ;
        endcase
      end
      if (req_i && !we_i) begin
        unique case (32'(addr_i))
          REG_STATUS: rdata_q <= {31'd0, st_q != S_IDLE};
          REG_A_ADDR: rdata_q <= regs_q.a_addr;
          REG_B_ADDR: rdata_q <= regs_q.b_addr;
          REG_C_ADDR: rdata_q <= regs_q.c_addr;
          REG_D_ADDR: rdata_q <= regs_q.d_addr;
          REG_M:      rdata_q <= 32'(regs_q.m);
          REG_N:      rdata_q <= 32'(regs_q.n);
          REG_K:      rdata_q <= 32'(regs_q.k);
          REG_CYCLES: rdata_q <= cyc_last_q;
          REG_MACS:   rdata_q <= macs_last_q;
          default:    rdata_q <= '0;
        endcase
      end

      // job FSM
      unique case (st_q)
        S_IDLE: begin
          if (req_i && we_i && 32'(addr_i) == REG_TRIGGER
              && regs_q.m != '0 && regs_q.n != '0 && regs_q.k != '0) begin
            job_q <= regs_q;
            tm_q  <= ceil_tiles(regs_q.m);
            tn_q  <= ceil_tiles(regs_q.n);
            st_q  <= S_SETUP;
          end
        end
        S_SETUP: begin
          tiles_q    <= 32'(tm_q) * 32'(tn_q);
          cyc_q      <= '0;
          macs_q     <= '0;
          eng_done_q <= 1'b0;
          st_q       <= S_RUN;
        end
        S_RUN: begin
          cyc_q <= cyc_q + 1;
          if (mac_i) macs_q <= macs_q + 1;
          if (engine_done_i) eng_done_q <= 1'b1;
          if (eng_done_q && streamer_idle_i) begin
            st_q        <= S_IDLE;
            cyc_last_q  <= cyc_q + 1;
            macs_last_q <= macs_q;
          end
        end
        default: st_q <= S_IDLE;
      endcase
    end
  end

  // the engine and the streamer start one cycle after the tile count is known
  assign start_o     = (st_q == S_RUN) && (cyc_q == '0);
  assign job_o       = job_q;
  assign tm_n_o      = tm_q;
  assign tn_n_o      = tn_q;
  assign num_tiles_o = tiles_q;
  assign busy_o      = (st_q != S_IDLE);
  assign evt_o       = (st_q == S_RUN) && eng_done_q && streamer_idle_i;
  assign rvalid_o    = rvalid_q;
  assign rdata_o     = rdata_q;

endmodule
