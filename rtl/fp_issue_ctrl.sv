// fp_issue_ctrl: issue and writeback control of the FP subsystem, including chaining.
//
// This is where the chaining extension lives. Every FP register is, at issue time, one of:
//   * an SSR register (ft0/ft1 read streams, ft2 write stream) while streams are enabled;
//   * a chaining register, if its bit in the chaining mask (CSR 0x7C3) is set;
//   * an ordinary register otherwise.
//
// Issue. An instruction issues when all its operands are available and the FPU takes it:
//   * ordinary source: no write to it may be in flight (RAW hazard: a scoreboard bit per
//     register is set at issue and cleared at writeback). This is the stall the design sets
//     out to hide: a dependent instruction waits three cycles, the FPU depth;
//   * ordinary destination: no write to it may be in flight (WAW hazard);
//   * chaining source: its valid bit V must be set (a value was pushed); issuing pops it;
//   * chaining destination: no check at all. Writes to it are no longer tied to execution, so
//     consecutive instructions may target the same register while earlier results are still
//     in the FPU: the FPU pipeline registers plus the architectural register form the
//     register's logical FIFO;
//   * SSR source: its read FIFO must hold data; issuing pops it.
//   * An instruction reading the same chaining or SSR register on both ports pops it once and
//     uses the value twice (this design's choice; the design does not say).
//
// Writeback (in order, from the FPU output). An ordinary result is written and clears its
// scoreboard bit. A result for the SSR write stream is pushed when its FIFO has room. A result
// for a chaining register is written, setting V, only when V is clear or the value held is
// popped in the same cycle; otherwise the FPU output is refused and the whole pipeline holds
// (backpressure), so an unconsumed value is never overwritten. The same-cycle pop-and-push
// rule uses the pop the waiting instruction would do if issued, not its actual issue: if the
// writeback is accepted the FPU can also take the instruction, so the two agree and no
// combinational loop through the FPU's ready chain arises.
//
// The per-register V bit and the FIFO semantics follow the design; the scoreboard, the
// encoding of the status outputs and the same-cycle rules are this design's own choices.
// Everything here is combinational except the scoreboard bits.
module fp_issue_ctrl
  import chain_pkg::*;
(
  input  logic      clk_i,
  input  logic      rst_ni,
  // instruction from the integer core
  input  logic      instr_valid_i,
  output logic      instr_ready_o,
  input  fp_instr_t instr_i,
  // modes
  input  regmask_t  chain_mask_i,
  input  logic      ssr_en_i,
  // register file state
  input  regmask_t  rf_valid_i,
  output regmask_t  rf_pop_o,
  // read streams (SSR 0 on ft0, SSR 1 on ft1)
  input  logic [1:0] ssr_rvalid_i,
  output logic [1:0] ssr_pop_o,
  output logic [1:0] src_ssr_o,       // rs1 / rs2 take their value from an SSR
  // FPU issue side
  output logic      fpu_in_valid_o,
  input  logic      fpu_in_ready_i,
  output wb_tag_t   fpu_in_tag_o,
  // FPU writeback side
  input  logic      fpu_out_valid_i,
  input  wb_tag_t   fpu_out_tag_i,
  output logic      fpu_out_ready_o,
  // register file write port
  output logic      rf_we_o,
  output ridx_t     rf_waddr_o,
  output logic      rf_set_valid_o,
  // write stream (SSR 2 on ft2)
  input  logic      ssr_wready_i,
  output logic      ssr_push_o,
  // events, one bit per cycle in which they happen
  output logic      ev_stall_raw_o,     // waiting for an ordinary register (RAW or WAW)
  output logic      ev_stall_chain_o,   // waiting for a value in a chaining register
  output logic      ev_stall_ssr_o,     // waiting for read-stream data
  output logic      ev_bp_chain_o,      // FPU held: chaining register still full
  output logic      ev_bp_ssr_o,        // FPU held: write stream full
  output logic      ev_chain_pushpop_o, // chaining register popped and pushed in one cycle
  output logic      busy_o              // a write is outstanding
);

  regmask_t busy_q;

  logic  uses_src;
  ridx_t src [2];
  logic  s_ssr [2], s_chain [2], s_ok [2];
  logic  d_ssr, d_chain, d_ok;
  logic  ops_ok, issue;

  assign uses_src = instr_i.op != FP_MVIN;
  assign src[0]   = instr_i.rs1;
  assign src[1]   = instr_i.rs2;

  always_comb begin
    for (int k = 0; k < 2; k++) begin
      s_ssr[k]   = uses_src && ssr_en_i && (src[k] < ridx_t'(2));
      s_chain[k] = uses_src && !s_ssr[k] && chain_mask_i[src[k]];
      if (!uses_src)     s_ok[k] = 1'b1;
      else if (s_ssr[k]) s_ok[k] = ssr_rvalid_i[src[k][0]];
      else if (s_chain[k]) s_ok[k] = rf_valid_i[src[k]];
      else               s_ok[k] = !busy_q[src[k]];
    end
    d_ssr   = ssr_en_i && (instr_i.rd == ridx_t'(2));
    d_chain = !d_ssr && chain_mask_i[instr_i.rd];
    d_ok    = d_ssr || d_chain || !busy_q[instr_i.rd];
  end

  assign ops_ok          = s_ok[0] && s_ok[1] && d_ok;
  assign fpu_in_valid_o  = instr_valid_i && ops_ok;
  assign issue           = fpu_in_valid_o && fpu_in_ready_i;
  assign instr_ready_o   = issue;
  assign fpu_in_tag_o    = '{rd: instr_i.rd, chain: d_chain, ssr: d_ssr};
  assign src_ssr_o       = {s_ssr[1], s_ssr[0]};

  // pops the waiting instruction makes when it issues
  regmask_t pop_intent;
  always_comb begin
    pop_intent = '0;
    ssr_pop_o  = '0;
    for (int k = 0; k < 2; k++) begin
      if (fpu_in_valid_o && s_chain[k]) pop_intent[src[k]] = 1'b1;
      if (issue && s_ssr[k])            ssr_pop_o[src[k][0]] = 1'b1;
    end
  end
  assign rf_pop_o = issue ? pop_intent : '0;

  // writeback
  logic wb_ok;
  always_comb begin
    if (fpu_out_tag_i.ssr)        wb_ok = ssr_wready_i;
    else if (fpu_out_tag_i.chain) wb_ok = !rf_valid_i[fpu_out_tag_i.rd] || pop_intent[fpu_out_tag_i.rd];
    else                          wb_ok = 1'b1;
  end
  assign fpu_out_ready_o = wb_ok;
  assign rf_we_o         = fpu_out_valid_i && wb_ok && !fpu_out_tag_i.ssr;
  assign rf_waddr_o      = fpu_out_tag_i.rd;
  assign rf_set_valid_o  = fpu_out_tag_i.chain;
  assign ssr_push_o      = fpu_out_valid_i && wb_ok && fpu_out_tag_i.ssr;

  // scoreboard of ordinary destinations
  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      busy_q <= '0;
    end else begin
      for (int i = 0; i < NREGS; i++) begin
        if (issue && !d_ssr && !d_chain && instr_i.rd == ridx_t'(i)) busy_q[i] <= 1'b1;
        else if (rf_we_o && !fpu_out_tag_i.chain && fpu_out_tag_i.rd == ridx_t'(i))
          busy_q[i] <= 1'b0;
      end
    end
  end
  assign busy_o = busy_q != '0;

  // events
  logic raw_wait;
  always_comb begin
    raw_wait = !d_ok;
    for (int k = 0; k < 2; k++) if (uses_src && !s_ssr[k] && !s_chain[k] && busy_q[src[k]]) raw_wait = 1'b1;
  end
  assign ev_stall_raw_o   = instr_valid_i && raw_wait;
  assign ev_stall_chain_o = instr_valid_i && ((s_chain[0] && !s_ok[0]) || (s_chain[1] && !s_ok[1]));
  assign ev_stall_ssr_o   = instr_valid_i && ((s_ssr[0] && !s_ok[0]) || (s_ssr[1] && !s_ok[1]));
  assign ev_bp_chain_o    = fpu_out_valid_i && fpu_out_tag_i.chain && !fpu_out_tag_i.ssr && !wb_ok;
  assign ev_bp_ssr_o      = fpu_out_valid_i && fpu_out_tag_i.ssr && !wb_ok;
  assign ev_chain_pushpop_o = rf_we_o && fpu_out_tag_i.chain && rf_pop_o[fpu_out_tag_i.rd];

  // a chaining register is never overwritten while it holds an unconsumed value
  assert property (@(posedge clk_i) disable iff (!rst_ni)
                   (rf_we_o && rf_set_valid_o) |-> (!rf_valid_i[rf_waddr_o] || rf_pop_o[rf_waddr_o]));
  // a popped value is pushed back only by a writeback, never duplicated by a second pop
  assert property (@(posedge clk_i) disable iff (!rst_ni) (rf_pop_o & ~rf_valid_i) == '0);

endmodule
