// chain_pkg: types and constants shared by the FP subsystem with scalar chaining.
//
// The sizes follow the design this RTL documents: 32 FP architectural registers of 64 bit
// (double precision), a 32-bit chaining mask in CSR 0x7C3 (one bit per FP register), an FPU
// with three pipeline stages, and three stream semantic registers (SSRs) bound to ft0, ft1
// and ft2. The depth of the SSR data FIFOs (4) is read off the block diagram of the design.
// The instruction encoding below (an opcode enum plus register indices) is this design's own
// choice: the FP subsystem receives already-decoded instructions from the integer core.
package chain_pkg;

  localparam int unsigned FLEN          = 64;       // FP register width (fadd.d / fmul.d)
  localparam int unsigned NREGS         = 32;       // FP architectural registers
  localparam int unsigned RIDX_W        = $clog2(NREGS);
  localparam int unsigned FPU_STAGES    = 3;        // FPU pipeline depth
  localparam int unsigned NUM_SSR       = 3;        // SSRs on ft0, ft1, ft2
  localparam int unsigned SSR_DEPTH     = 4;        // data FIFO entries per SSR
  localparam int unsigned ADDR_W        = 32;       // byte address width of the memory ports
  localparam int unsigned CNT_W         = 16;       // SSR stream length counter width
  localparam logic [11:0] CHAIN_CSR_ADDR = 12'h7C3;

  typedef logic [FLEN-1:0]   fp_word_t;
  typedef logic [RIDX_W-1:0] ridx_t;
  typedef logic [NREGS-1:0]  regmask_t;

  // Operations of the FP pipeline. FP_MVIN moves a 64-bit value supplied by the integer side
  // into an FP register through the pipeline (used to place constants in the register file).
  typedef enum logic [1:0] {
    FP_ADD  = 2'd0,
    FP_SUB  = 2'd1,
    FP_MUL  = 2'd2,
    FP_MVIN = 2'd3
  } fp_op_e;

  // One decoded FP instruction offloaded by the integer core.
  typedef struct packed {
    fp_op_e   op;
    ridx_t    rd;
    ridx_t    rs1;
    ridx_t    rs2;
    fp_word_t imm;       // operand of FP_MVIN
  } fp_instr_t;

  // Destination tag carried through the FPU pipeline next to the result.
  typedef struct packed {
    ridx_t rd;
    logic  chain;        // rd was chaining-enabled at issue: FIFO push semantics
    logic  ssr;          // rd is an SSR-mapped register: push into the write stream
  } wb_tag_t;

  // CSR access operations (RISC-V csrrw / csrrs / csrrc).
  typedef enum logic [1:0] {
    CSR_RW = 2'd0,
    CSR_RS = 2'd1,
    CSR_RC = 2'd2
  } csr_op_e;

  // Memory port of an SSR: request (valid/ready) and response (valid, in request order).
  typedef struct packed {
    logic [ADDR_W-1:0] addr;
    logic              we;
    fp_word_t          wdata;
  } mem_req_t;

  // Configuration of one SSR stream: 1-D affine address sequence.
  typedef struct packed {
    logic [ADDR_W-1:0] base;
    logic [ADDR_W-1:0] stride;    // byte stride between elements
    logic [CNT_W-1:0]  count;     // number of elements in the stream
  } ssr_cfg_t;

endpackage
