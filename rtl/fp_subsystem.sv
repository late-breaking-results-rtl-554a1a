// fp_subsystem: floating-point subsystem of a scalar in-order core with scalar chaining.
//
// What it is. The FP half of a small in-order RISC-V core: an FP register file, a three-stage
// double-precision FPU, three stream semantic registers (SSRs: ft0 and ft1 read arrays from
// memory, ft2 writes one) and the issue logic. On top of this baseline it adds chaining: a
// CSR mask (0x7C3) selects FP registers that behave as FIFOs, and a valid bit per register
// provides backpressure. A loop such as  c = a + b; out = c * k  can then issue four fadd.d
// into ft3 back to back and four fmul.d reading ft3 after them, the three results still in
// flight being held by the FPU pipeline registers instead of three extra architectural
// registers (loop unrolling without register pressure).
//
// Data path (as in the design's block diagram): rs1/rs2 read muxes pick either the register
// file or, for ft0/ft1 with streams enabled, the head of SSR 0/1; the FPU result returns
// through the rd write port to the register file, or, for ft2 with streams enabled, into
// SSR 2 which stores it to memory. FP_MVIN places an integer-side 64-bit value in a register.
//
// Interface. Decoded FP instructions arrive with valid/ready (instr_*): ready is high in the
// cycle the instruction issues. CSR accesses (csr_*) reach the chaining mask. Streams are
// enabled by ssr_en_i and configured with ssr_cfg_*; the three memory ports are valid/ready
// requests with in-order read responses. ev_* are one-cycle event strobes for performance
// counting; busy_o is high while any result or store is outstanding.
//
// Timing. An instruction issued in cycle t writes its result at the end of cycle t+3; an
// ordinary dependent instruction can issue in t+4 (three stall cycles); a chaining
// dependent one issues as soon as the value is in the register, with no issue slot lost in
// steady state. Stream enabling, SSR configuration ports and FP_MVIN are this design's own
// interface choices; the integer core and the L1 memory are outside this module.
module fp_subsystem
  import chain_pkg::*;
(
  input  logic              clk_i,
  input  logic              rst_ni,
  // FP instructions offloaded by the integer core
  input  logic              instr_valid_i,
  output logic              instr_ready_o,
  input  fp_instr_t         instr_i,
  // CSR access
  input  logic              csr_valid_i,
  input  logic [11:0]       csr_addr_i,
  input  csr_op_e           csr_op_i,
  input  logic [31:0]       csr_wdata_i,
  output logic              csr_hit_o,
  output logic [31:0]       csr_rdata_o,
  // streams
  input  logic              ssr_en_i,
  input  logic [NUM_SSR-1:0] ssr_cfg_valid_i,
  input  ssr_cfg_t          ssr_cfg_i       [NUM_SSR],
  output logic [NUM_SSR-1:0] ssr_busy_o,
  // memory ports of the SSRs
  output logic [NUM_SSR-1:0] mem_req_valid_o,
  input  logic [NUM_SSR-1:0] mem_req_ready_i,
  output mem_req_t          mem_req_o       [NUM_SSR],
  input  logic [NUM_SSR-1:0] mem_rsp_valid_i,
  input  fp_word_t          mem_rsp_rdata_i [NUM_SSR],
  // status
  output regmask_t          chain_mask_o,
  output logic              busy_o,
  output logic              ev_issue_o,
  output logic              ev_stall_raw_o,
  output logic              ev_stall_chain_o,
  output logic              ev_stall_ssr_o,
  output logic              ev_bp_chain_o,
  output logic              ev_bp_ssr_o,
  output logic              ev_chain_pushpop_o
);

  // ---- chaining mask CSR ----
  regmask_t chain_mask;
  chain_csr #(.CSR_ADDR(CHAIN_CSR_ADDR), .NBITS(NREGS)) i_csr (
    .clk_i, .rst_ni,
    .csr_valid_i, .csr_addr_i, .csr_op_i, .csr_wdata_i,
    .csr_hit_o, .csr_rdata_o,
    .mask_o (chain_mask)
  );
  assign chain_mask_o = chain_mask;

  // ---- register file ----
  fp_word_t rf_rdata1, rf_rdata2;
  regmask_t rf_valid, rf_pop;
  logic     rf_we, rf_set_valid;
  ridx_t    rf_waddr;
  fp_word_t fpu_result;

  fp_regfile #(.N(NREGS), .W(FLEN)) i_rf (
    .clk_i, .rst_ni,
    .raddr1_i (instr_i.rs1), .rdata1_o (rf_rdata1),
    .raddr2_i (instr_i.rs2), .rdata2_o (rf_rdata2),
    .we_i (rf_we), .waddr_i (rf_waddr), .wdata_i (fpu_result),
    .set_valid_i (rf_set_valid),
    .pop_i (rf_pop), .valid_o (rf_valid)
  );

  // ---- SSRs: 0 and 1 read, 2 writes ----
  logic [NUM_SSR-1:0] ssr_rvalid, ssr_wready;
  logic [1:0]         ssr_pop;
  logic               ssr_push;
  fp_word_t           ssr_rdata [NUM_SSR];

  for (genvar s = 0; s < NUM_SSR; s++) begin : g_ssr
    ssr_streamer #(.WRITE(s == NUM_SSR - 1), .DEPTH(SSR_DEPTH)) i_ssr (
      .clk_i, .rst_ni,
      .cfg_valid_i     (ssr_cfg_valid_i[s]),
      .cfg_i           (ssr_cfg_i[s]),
      .busy_o          (ssr_busy_o[s]),
      .core_rvalid_o   (ssr_rvalid[s]),
      .core_rdata_o    (ssr_rdata[s]),
      .core_pop_i      ((s < 2) ? ssr_pop[s % 2] : 1'b0),
      .core_wready_o   (ssr_wready[s]),
      .core_wdata_i    (fpu_result),
      .core_push_i     ((s == NUM_SSR - 1) ? ssr_push : 1'b0),
      .mem_req_valid_o (mem_req_valid_o[s]),
      .mem_req_ready_i (mem_req_ready_i[s]),
      .mem_req_o       (mem_req_o[s]),
      .mem_rsp_valid_i (mem_rsp_valid_i[s]),
      .mem_rsp_rdata_i (mem_rsp_rdata_i[s])
    );
  end

  // ---- issue and writeback control ----
  logic    fpu_in_valid, fpu_in_ready, fpu_out_valid, fpu_out_ready;
  wb_tag_t fpu_in_tag, fpu_out_tag;
  logic [1:0] src_ssr;
  logic    ctrl_busy, fpu_busy;

  fp_issue_ctrl i_ctrl (
    .clk_i, .rst_ni,
    .instr_valid_i, .instr_ready_o, .instr_i,
    .chain_mask_i   (chain_mask),
    .ssr_en_i,
    .rf_valid_i     (rf_valid),
    .rf_pop_o       (rf_pop),
    .ssr_rvalid_i   (ssr_rvalid[1:0]),
    .ssr_pop_o      (ssr_pop),
    .src_ssr_o      (src_ssr),
    .fpu_in_valid_o (fpu_in_valid),
    .fpu_in_ready_i (fpu_in_ready),
    .fpu_in_tag_o   (fpu_in_tag),
    .fpu_out_valid_i(fpu_out_valid),
    .fpu_out_tag_i  (fpu_out_tag),
    .fpu_out_ready_o(fpu_out_ready),
    .rf_we_o        (rf_we),
    .rf_waddr_o     (rf_waddr),
    .rf_set_valid_o (rf_set_valid),
    .ssr_wready_i   (ssr_wready[NUM_SSR-1]),
    .ssr_push_o     (ssr_push),
    .ev_stall_raw_o, .ev_stall_chain_o, .ev_stall_ssr_o,
    .ev_bp_chain_o, .ev_bp_ssr_o, .ev_chain_pushpop_o,
    .busy_o         (ctrl_busy)
  );

  // ---- operand muxes (rs1 / rs2: register file or read stream) ----
  fp_word_t op_a, op_b;
  always_comb begin
    op_a = src_ssr[0] ? (instr_i.rs1[0] ? ssr_rdata[1] : ssr_rdata[0]) : rf_rdata1;
    op_b = src_ssr[1] ? (instr_i.rs2[0] ? ssr_rdata[1] : ssr_rdata[0]) : rf_rdata2;
    if (instr_i.op == FP_MVIN) op_a = instr_i.imm;
  end

  // ---- FPU ----
  fpu_pipe #(.STAGES(FPU_STAGES)) i_fpu (
    .clk_i, .rst_ni,
    .in_valid_i  (fpu_in_valid),
    .in_ready_o  (fpu_in_ready),
    .in_op_i     (instr_i.op),
    .in_a_i      (op_a),
    .in_b_i      (op_b),
    .in_tag_i    (fpu_in_tag),
    .out_valid_o (fpu_out_valid),
    .out_ready_i (fpu_out_ready),
    .out_result_o(fpu_result),
    .out_tag_o   (fpu_out_tag),
    .busy_o      (fpu_busy)
  );

  assign ev_issue_o = instr_valid_i && instr_ready_o;
  assign busy_o     = ctrl_busy || fpu_busy || (|ssr_busy_o);

endmodule
