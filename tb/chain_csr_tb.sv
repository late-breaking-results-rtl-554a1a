// chain_csr_tb: self-checking testbench of the chaining-mask CSR (address 0x7C3).
//
// Checks the reset value (chaining off), csrrw / csrrs / csrrc against a model of the mask,
// that reads return the old value, that other CSR addresses neither hit nor change the mask,
// and the sequence used by software: set bit 3 (ft3) with csrs, then clear it again.
module chain_csr_tb;
  import chain_pkg::*;

  logic        clk = 1'b0;
  logic        rst_n;
  logic        valid;
  logic [11:0] addr;
  csr_op_e     op;
  logic [31:0] wdata, rdata, mask;
  logic        hit;
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  chain_csr dut (
    .clk_i(clk), .rst_ni(rst_n), .csr_valid_i(valid), .csr_addr_i(addr), .csr_op_i(op),
    .csr_wdata_i(wdata), .csr_hit_o(hit), .csr_rdata_o(rdata), .mask_o(mask));

  task automatic check(input logic cond, input string what);
    checks++;
    if (!cond) begin
      failures++;
      $display("FAIL %s", what);
    end
  endtask

  // one access; returns the value read
  task automatic access(input logic [11:0] a, input csr_op_e o, input logic [31:0] d,
                        output logic [31:0] rd, output logic h);
    valid = 1; addr = a; op = o; wdata = d;
    #1;
    rd = rdata; h = hit;
    @(posedge clk); #1;
    valid = 0;
  endtask

  initial begin : watchdog
    repeat (10000) @(posedge clk);
    failures++;
    $display("FAIL watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [31:0] model, rd;
    logic h;
    valid = 0; addr = '0; op = CSR_RW; wdata = '0;
    rst_n = 1;
    #1 rst_n = 0;
    repeat (2) @(posedge clk);
    #1 rst_n = 1;
    check(mask == 32'd0, "reset value is not zero");
    model = '0;

    // software sequence: li t0, 8; csrs 0x7C3, t0
    access(12'h7C3, CSR_RS, 32'd8, rd, h);
    check(h && rd == 32'd0 && mask == 32'h8, "csrs 0x7C3, 8 does not enable ft3");
    access(12'h7C3, CSR_RC, 32'd8, rd, h);
    check(rd == 32'h8 && mask == 32'h0, "csrc 0x7C3, 8 does not disable ft3");

    for (int i = 0; i < 2000; i++) begin
      logic [11:0] a;
      csr_op_e o;
      logic [31:0] d;
      a = ($urandom_range(0, 3) == 0) ? 12'($urandom) : 12'h7C3;
      o = csr_op_e'($urandom_range(0, 2));
      d = $urandom;
      access(a, o, d, rd, h);
      check(h == (a == 12'h7C3), "hit");
      if (a == 12'h7C3) begin
        check(rd == model, "read value is not the old mask");
        case (o)
          CSR_RW:  model = d;
          CSR_RS:  model = model | d;
          default: model = model & ~d;
        endcase
      end else begin
        check(rd == 32'd0, "other address returns data");
      end
      check(mask == model, "mask differs from model");
    end

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
