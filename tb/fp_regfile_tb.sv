// fp_regfile_tb: self-checking testbench of the FP register file with valid bits.
//
// A model array and model valid bits are kept alongside the register file. Random cycles
// write registers (with or without setting V), pop random sets of registers and read two
// ports; every cycle both read ports and all 32 valid bits are compared with the model.
// Directed checks: a push and a pop of the same register in one cycle leave V set; a pop
// alone clears it; an ordinary write leaves V alone.
module fp_regfile_tb;
  import chain_pkg::*;

  logic     clk = 1'b0;
  logic     rst_n;
  ridx_t    ra1, ra2, wa;
  fp_word_t rd1, rd2, wd;
  logic     we, setv;
  regmask_t pop, valid;
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  fp_regfile dut (
    .clk_i(clk), .rst_ni(rst_n), .raddr1_i(ra1), .rdata1_o(rd1), .raddr2_i(ra2), .rdata2_o(rd2),
    .we_i(we), .waddr_i(wa), .wdata_i(wd), .set_valid_i(setv), .pop_i(pop), .valid_o(valid));

  fp_word_t model [NREGS];
  regmask_t mvalid;

  task automatic check(input logic cond, input string what);
    checks++;
    if (!cond) begin
      failures++;
      if (failures < 20) $display("FAIL %s", what);
    end
  endtask

  task automatic cycle();
    @(posedge clk);
    if (we) model[wa] = wd;
    for (int i = 0; i < NREGS; i++) begin
      if (we && setv && wa == ridx_t'(i)) mvalid[i] = 1'b1;
      else if (pop[i])                    mvalid[i] = 1'b0;
    end
    #1;
    check(valid == mvalid, "valid bits");
  endtask

  initial begin : watchdog
    repeat (20000) @(posedge clk);
    failures++;
    $display("FAIL watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    ra1 = '0; ra2 = '0; wa = '0; wd = '0; we = 0; setv = 0; pop = '0;
    rst_n = 1;
    #1 rst_n = 0;
    repeat (2) @(posedge clk);
    #1 rst_n = 1;
    mvalid = '0;
    check(valid == '0, "valid bits not cleared by reset");

    // initialise every register
    for (int i = 0; i < NREGS; i++) begin
      we = 1; wa = ridx_t'(i); wd = {$urandom, $urandom}; setv = 0;
      cycle();
    end
    we = 0;

    // directed: push sets V, push+pop keeps V, pop clears V, ordinary write keeps V clear
    we = 1; wa = 5'd3; wd = 64'h1111; setv = 1; cycle();
    check(valid[3], "push does not set V");
    pop = 32'h8; wd = 64'h2222; cycle();
    check(valid[3], "push and pop together clear V");
    we = 0; pop = 32'h8; cycle();
    check(!valid[3], "pop does not clear V");
    pop = '0; we = 1; wa = 5'd4; setv = 0; wd = 64'h3333; cycle();
    check(!valid[4], "ordinary write sets V");
    we = 0;

    for (int i = 0; i < 5000; i++) begin
      we   = $urandom_range(0, 1);
      wa   = ridx_t'($urandom);
      wd   = {$urandom, $urandom};
      setv = $urandom_range(0, 1);
      pop  = $urandom & $urandom;
      ra1  = ridx_t'($urandom);
      ra2  = ridx_t'($urandom);
      #1;
      check(rd1 == model[ra1], "read port 1");
      check(rd2 == model[ra2], "read port 2");
      cycle();
    end

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
