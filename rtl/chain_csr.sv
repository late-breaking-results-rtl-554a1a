// chain_csr: the chaining-mask control and status register at CSR address 0x7C3.
//
// The register holds one bit per FP architectural register (32 bits). A set bit gives the
// register FIFO semantics: a write pushes a value, a read pops it (see fp_issue_ctrl). Software
// enables chaining on, e.g., ft3 with `li t0, 8; csrs 0x7C3, t0` and disables it again with a
// clearing access. The address and the one-bit-per-register layout follow the design; the
// reset value (all zero: chaining off) and the access port are this design's own choices.
//
// Interface: one CSR access per cycle, qualified by csr_valid_i; csr_hit_o tells whether the
// address is this register. The read data (the old value, as RISC-V CSR instructions return)
// is combinational; the new value is visible from the next cycle on mask_o.
module chain_csr
  import chain_pkg::*;
#(
  parameter logic [11:0] CSR_ADDR = CHAIN_CSR_ADDR,
  parameter int unsigned NBITS    = NREGS
) (
  input  logic             clk_i,
  input  logic             rst_ni,
  input  logic             csr_valid_i,
  input  logic [11:0]      csr_addr_i,
  input  csr_op_e          csr_op_i,
  input  logic [NBITS-1:0] csr_wdata_i,
  output logic             csr_hit_o,
  output logic [NBITS-1:0] csr_rdata_o,
  output logic [NBITS-1:0] mask_o
);

  logic [NBITS-1:0] mask_q, mask_d;

  assign csr_hit_o   = csr_addr_i == CSR_ADDR;
  assign csr_rdata_o = csr_hit_o ? mask_q : '0;
  assign mask_o      = mask_q;

  always_comb begin
    mask_d = mask_q;
    if (csr_valid_i && csr_hit_o) begin
      unique case (csr_op_i)
        CSR_RW:  mask_d = csr_wdata_i;
        CSR_RS:  mask_d = mask_q | csr_wdata_i;
        CSR_RC:  mask_d = mask_q & ~csr_wdata_i;
        default: mask_d = mask_q;
      endcase
    end
  end

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) mask_q <= '0;
    else         mask_q <= mask_d;
  end

endmodule
