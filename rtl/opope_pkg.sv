// opope_pkg: constants and types shared by the outer-product GEMM engine.
//
// The defaults describe the main configuration: a 16 x 16 mesh of processing
// elements (p = 16), each built around an IEEE binary16 (FP16 -> FP16)
// multiply-accumulate unit (q = 16 bits) with four pipeline registers.  Every
// PE therefore owns a 2 x 2 block of output elements, so a full output tile is
// 2p x 2p = 32 x 32 elements and every vector moved between memory and the
// engine holds 2p elements (2p*q = 512 bits).
//
// The TCDM word size (32 bit) and the controller register map are choices of
// this implementation.
package opope_pkg;

  // Mesh side p (power of two) and datapath width q.
  parameter int unsigned P_DEFAULT        = 16;
  parameter int unsigned EXP_BITS_DEFAULT = 5;   // binary16
  parameter int unsigned MAN_BITS_DEFAULT = 10;  // binary16
  parameter int unsigned Q_DEFAULT        = 1 + EXP_BITS_DEFAULT + MAN_BITS_DEFAULT;
  // Pipeline registers of the FPU = accumulators per PE = rank-1 updates per
  // input pair.  The dataflow of the engine is written for four.
  parameter int unsigned NUM_PIPE         = 4;

  // Width of the GEMM size and address registers.
  parameter int unsigned DIM_W  = 16;
  parameter int unsigned ADDR_W = 32;

  // Streams moved by the streamer.
  typedef enum logic [1:0] {
    STR_A    = 2'd0,   // A vector (2p elements of one column of A)
    STR_B    = 2'd1,   // B vector (2p elements of one row of B)
    STR_CIN  = 2'd2,   // initial C tile row, loaded into the accumulators
    STR_COUT = 2'd3    // computed C tile row, written back
  } stream_e;

  // Job descriptor written by the controller, read by streamer and engine.
  typedef struct packed {
    logic [ADDR_W-1:0] a_addr;   // A stored K x M (column-major A), byte address
    logic [ADDR_W-1:0] b_addr;   // B stored K x N (row-major), byte address
    logic [ADDR_W-1:0] c_addr;   // initial C, M x N row-major
    logic [ADDR_W-1:0] d_addr;   // result,    M x N row-major
    logic [DIM_W-1:0]  m;
    logic [DIM_W-1:0]  n;
    logic [DIM_W-1:0]  k;
  } job_t;

  // Per-cycle events of the accelerator, for performance counting.
  typedef struct packed {
    logic issue;      // the FMA pipelines of the mesh advanced
    logic mac;        // ... with real operands
    logic couple;     // ... in a coupled slot (tile hand-over)
    logic acc_load;   // accumulator chain shifted in an initial C row
    logic acc_store;  // accumulator chain shifted out a result row
    logic acc_wait;   // a tile start waits for its initial values (K < 2p)
    logic result;     // the FMAs emitted a result of real operands
    logic mem_stall;  // TCDM request not granted (bank conflict)
  } perf_t;

  // Controller register map (word offsets on the 32-bit configuration port).
  parameter int unsigned REG_TRIGGER = 0;  // write: start the programmed job
  parameter int unsigned REG_STATUS  = 1;  // read: bit0 busy
  parameter int unsigned REG_A_ADDR  = 2;
  parameter int unsigned REG_B_ADDR  = 3;
  parameter int unsigned REG_C_ADDR  = 4;
  parameter int unsigned REG_D_ADDR  = 5;
  parameter int unsigned REG_M       = 6;
  parameter int unsigned REG_N       = 7;
  parameter int unsigned REG_K       = 8;
  parameter int unsigned REG_CYCLES  = 9;  // read: cycles of the last job
  parameter int unsigned REG_MACS    = 10; // read: MAC issue slots of the last job
  parameter int unsigned NUM_REGS    = 11;

endpackage
