// fpu_pipe: in-order, fully pipelined double-precision FPU with STAGES pipeline stages.
//
// Function. Executes FP_ADD (a+b), FP_SUB (a-b), FP_MUL (a*b) and FP_MVIN (passes a through)
// on 64-bit IEEE 754 operands. A result leaves the pipeline exactly STAGES cycles after its
// instruction was accepted, unless the pipeline is held. Each entry carries a writeback tag
// (destination register, chaining flag, SSR flag) that the pipeline only transports.
//
// Structure. Stage 1 registers the operands; the arithmetic (fp64_pkg) sits between stage 1
// and stage 2; the remaining stages carry the result. In a real implementation the register
// stages would be retimed into the arithmetic; functionally only the depth matters. The depth
// of three follows the design (the FPU has three pipeline stages, which is also the number of
// cycles a dependent instruction stalls). Where the arithmetic sits inside the stages is this
// design's own choice.
//
// Backpressure. Every stage has a valid bit; a stage may take new data when it is empty or
// when the stage after it advances (bubbles collapse). When the output is not accepted
// (out_ready low: the destination is a chaining register still holding an unconsumed value,
// or the SSR write FIFO is full) the last stage holds its result and the stall propagates
// backwards, so the pipeline registers keep the intermediate results of the logical FIFO
// instead of losing them. The bubble-collapsing rule is this design's own choice.
//
// Interface: valid/ready on the input (in_*) and on the output (out_*); busy_o is high while
// any stage holds an operation. Active-low asynchronous reset clears the valid bits.
module fpu_pipe
  import chain_pkg::*;
#(
  parameter int unsigned STAGES = FPU_STAGES
) (
  input  logic     clk_i,
  input  logic     rst_ni,
  // issue side
  input  logic     in_valid_i,
  output logic     in_ready_o,
  input  fp_op_e   in_op_i,
  input  fp_word_t in_a_i,
  input  fp_word_t in_b_i,
  input  wb_tag_t  in_tag_i,
  // writeback side
  output logic     out_valid_o,
  input  logic     out_ready_i,
  output fp_word_t out_result_o,
  output wb_tag_t  out_tag_o,
  // any stage occupied
  output logic     busy_o
);

  // stage 1: operands
  logic     s1_valid;
  fp_op_e   s1_op;
  fp_word_t s1_a, s1_b;
  wb_tag_t  s1_tag;

  // stages 2..STAGES: results (index 0 is stage 2)
  logic     r_valid [STAGES-1];
  fp_word_t r_data  [STAGES-1];
  wb_tag_t  r_tag   [STAGES-1];

  logic     r_ready [STAGES-1];
  logic     s1_ready;
  fp_word_t s1_result;

  // arithmetic between stage 1 and stage 2
  always_comb begin
    // one adder serves FP_ADD and FP_SUB
    fp_word_t sum, prod;
    sum  = fp64_pkg::fp_add(s1_a, s1_b, s1_op == FP_SUB);
    prod = fp64_pkg::fp_mul(s1_a, s1_b);
    unique case (s1_op)
      FP_ADD, FP_SUB: s1_result = sum;
      FP_MUL:         s1_result = prod;
      default:        s1_result = s1_a;
    endcase
  end

  // ready chain, from the output backwards
  // a stage advances when it or any stage after it is empty, or the output is taken
  always_comb begin
    for (int i = 0; i < STAGES-1; i++) begin
      logic full;
      full = 1'b1;
      for (int j = i; j < STAGES-1; j++) full &= r_valid[j];
      r_ready[i] = !full || out_ready_i;
    end
    s1_ready = !s1_valid || r_ready[0];
  end

  assign in_ready_o = s1_ready;

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      s1_valid <= 1'b0;
      for (int i = 0; i < STAGES-1; i++) r_valid[i] <= 1'b0;
    end else begin
      if (s1_ready) s1_valid <= in_valid_i;
      if (r_ready[0]) r_valid[0] <= s1_valid;
      for (int i = 1; i < STAGES-1; i++) if (r_ready[i]) r_valid[i] <= r_valid[i-1];
    end
  end

  // data registers have no reset: they are only read when their valid bit is set
  always_ff @(posedge clk_i) begin
    if (s1_ready && in_valid_i) begin
      s1_op  <= in_op_i;
      s1_a   <= in_a_i;
      s1_b   <= in_b_i;
      s1_tag <= in_tag_i;
    end
    if (r_ready[0] && s1_valid) begin
      r_data[0] <= s1_result;
      r_tag[0]  <= s1_tag;
    end
    for (int i = 1; i < STAGES-1; i++) begin
      if (r_ready[i] && r_valid[i-1]) begin
        r_data[i] <= r_data[i-1];
        r_tag[i]  <= r_tag[i-1];
      end
    end
  end

  always_comb begin
    busy_o = s1_valid;
    for (int i = 0; i < STAGES-1; i++) busy_o |= r_valid[i];
  end

  assign out_valid_o  = r_valid[STAGES-2];
  assign out_result_o = r_data[STAGES-2];
  assign out_tag_o    = r_tag[STAGES-2];

  // STAGES must leave room for the operand stage and one result stage
  initial assert (STAGES >= 2) else $error("fpu_pipe: STAGES must be at least 2");

  // a held output must stay stable
  property p_hold;
    @(posedge clk_i) disable iff (!rst_ni)
      (out_valid_o && !out_ready_i) |=> (out_valid_o && $stable(out_result_o));
  endproperty
  assert property (p_hold);

endmodule
