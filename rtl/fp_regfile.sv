// fp_regfile: FP register file with one valid bit (V) per architectural register.
//
// NREGS registers of FLEN bits with two combinational read ports (rs1, rs2) and one write
// port (rd), as drawn in the design's block diagram. Next to every register sits a valid bit
// that belongs to the chaining extension: a write to a chaining-enabled register (set_valid_i)
// sets it, marking a value that has been pushed into the register's logical FIFO and not yet
// consumed; a read of such a register pops the value, which the issue logic signals with a
// bit of pop_i that clears V. When a push and a pop hit the same register in one cycle the
// push wins, so one value can leave and the next enter in the same cycle (full throughput).
// The bits stay 0 for ordinary registers. The data registers are not reset (software writes
// a register before reading it); the valid bits reset to 0.
module fp_regfile
  import chain_pkg::*;
#(
  parameter int unsigned N = NREGS,
  parameter int unsigned W = FLEN
) (
  input  logic                 clk_i,
  input  logic                 rst_ni,
  input  logic [$clog2(N)-1:0] raddr1_i,
  output logic [W-1:0]         rdata1_o,
  input  logic [$clog2(N)-1:0] raddr2_i,
  output logic [W-1:0]         rdata2_o,
  input  logic                 we_i,
  input  logic [$clog2(N)-1:0] waddr_i,
  input  logic [W-1:0]         wdata_i,
  input  logic                 set_valid_i,
  input  logic [N-1:0]         pop_i,
  output logic [N-1:0]         valid_o
);

  logic [W-1:0] regs [N];
  logic [N-1:0] valid_q;

  assign rdata1_o = regs[raddr1_i];
  assign rdata2_o = regs[raddr2_i];
  assign valid_o  = valid_q;

  always_ff @(posedge clk_i) begin
    if (we_i) regs[waddr_i] <= wdata_i;
  end

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      valid_q <= '0;
    end else begin
      for (int i = 0; i < N; i++) begin
        if (we_i && set_valid_i && waddr_i == i[$clog2(N)-1:0]) valid_q[i] <= 1'b1;
        else if (pop_i[i])                                     valid_q[i] <= 1'b0;
      end
    end
  end

endmodule
