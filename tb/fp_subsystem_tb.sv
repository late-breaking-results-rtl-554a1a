// fp_subsystem_tb: end-to-end testbench of the FP subsystem with scalar chaining.
//
// It plays the integer core (issuing decoded FP instructions and CSR accesses) and uses a
// behavioural L1 memory. All runs compute the vector kernel a[i] = b * (c[i] + d[i]) with c and
// d streamed through ft0 / ft1 (SSR 0 / SSR 1) and a stored through ft2 (SSR 2); results are
// compared with the simulator's double arithmetic. The top is used at its default sizes.
//
//  1. Baseline loop: fadd ft3,ft0,ft1 ; fmul ft2,ft3,ft4 per element. Each fmul must issue
//     exactly four cycles after its fadd (three RAW stall cycles, the FPU depth).
//  1b. The loop unrolled by four with ft3..ft6 holding the sums and two empty loop slots per
//      iteration: no stall, but four registers.
//  2. Chained loop, as in the design's example trace: csrs 0x7C3 with mask 8 (ft3), then per
//     iteration four fadd.d into ft3, four fmul.d from ft3, and two empty FP slots standing for
//     the loop's addi / bneq. The first iteration also has the empty slot after the first fmul
//     that the example shows; there the pipeline must be full and ft3 valid (backpressure).
//     Every instruction must issue in the cycle it is presented: no stall at all.
//  3. Chained loop with only two fadds per two fmuls: the consumer has to wait for the value.
//  4. The chained loop again with a slow memory: stream stalls and write-stream backpressure.
//  5. csrc 0x7C3 switches chaining off again: the baseline RAW stalls return.
// Every mechanism (RAW stall, chained write without WAW check, wait on an empty chaining
// register, chaining backpressure, same-cycle push/pop, SSR read stall, SSR write
// backpressure, chaining on/off switch) is counted, and one that never happens is a failure.
module fp_subsystem_tb;
  import chain_pkg::*;

  localparam int unsigned N      = 64;     // elements per run
  localparam int unsigned C_BASE = 0;      // word offsets in memory
  localparam int unsigned D_BASE = 1024;
  localparam int unsigned A_BASE = 2048;

  logic clk = 1'b0;
  logic rst_n;
  always #5 clk = ~clk;

  logic        instr_valid, instr_ready;
  fp_instr_t   instr;
  logic        csr_valid, csr_hit;
  logic [11:0] csr_addr;
  csr_op_e     csr_op;
  logic [31:0] csr_wdata, csr_rdata;
  logic        ssr_en;
  logic [NUM_SSR-1:0] cfg_valid, ssr_busy;
  ssr_cfg_t    cfg [NUM_SSR];
  logic [NUM_SSR-1:0] mreq_valid, mreq_ready, mrsp_valid;
  mem_req_t    mreq [NUM_SSR];
  fp_word_t    mrsp [NUM_SSR];
  regmask_t    chain_mask;
  logic        busy, ev_issue, ev_raw, ev_chain, ev_ssr, ev_bpc, ev_bps, ev_pp;
  logic        mem_slow;

  fp_subsystem dut (
    .clk_i(clk), .rst_ni(rst_n),
    .instr_valid_i(instr_valid), .instr_ready_o(instr_ready), .instr_i(instr),
    .csr_valid_i(csr_valid), .csr_addr_i(csr_addr), .csr_op_i(csr_op), .csr_wdata_i(csr_wdata),
    .csr_hit_o(csr_hit), .csr_rdata_o(csr_rdata),
    .ssr_en_i(ssr_en), .ssr_cfg_valid_i(cfg_valid), .ssr_cfg_i(cfg), .ssr_busy_o(ssr_busy),
    .mem_req_valid_o(mreq_valid), .mem_req_ready_i(mreq_ready), .mem_req_o(mreq),
    .mem_rsp_valid_i(mrsp_valid), .mem_rsp_rdata_i(mrsp),
    .chain_mask_o(chain_mask), .busy_o(busy),
    .ev_issue_o(ev_issue), .ev_stall_raw_o(ev_raw), .ev_stall_chain_o(ev_chain),
    .ev_stall_ssr_o(ev_ssr), .ev_bp_chain_o(ev_bpc), .ev_bp_ssr_o(ev_bps),
    .ev_chain_pushpop_o(ev_pp));

  // slow memory: ready about one cycle in four
  logic [NUM_SSR-1:0] mem_ready_raw;
  logic [NUM_SSR-1:0] slow_gate;
  always @(posedge clk) slow_gate <= mem_slow ? NUM_SSR'($urandom) & NUM_SSR'($urandom) : '1;
  assign mreq_ready = mem_ready_raw & slow_gate;
  logic [NUM_SSR-1:0] mreq_valid_eff;
  assign mreq_valid_eff = mreq_valid & slow_gate;

  tb_mem #(.NPORTS(NUM_SSR), .WORDS(4096), .LAT(2)) u_mem (
    .clk_i(clk), .stall_i(1'b0), .req_valid_i(mreq_valid_eff), .req_ready_o(mem_ready_raw),
    .req_i(mreq), .rsp_valid_o(mrsp_valid), .rsp_rdata_o(mrsp));

  int checks = 0, failures = 0;
  int cyc = 0;
  // event counters
  int n_raw = 0, n_chain_wait = 0, n_ssr_wait = 0, n_bpc = 0, n_bps = 0, n_pp = 0;
  int n_chain_waw = 0, n_mode_switch = 0;

  task automatic check(input logic cond, input string what);
    checks++;
    if (!cond) begin
      failures++;
      if (failures < 30) $display("FAIL %s (cycle %0d)", what, cyc);
    end
  endtask

  always @(negedge clk) begin
    if (rst_n) begin
      cyc++;
      n_raw        += int'(ev_raw);
      n_chain_wait += int'(ev_chain);
      n_ssr_wait   += int'(ev_ssr);
      n_bpc        += int'(ev_bpc);
      n_bps        += int'(ev_bps);
      n_pp         += int'(ev_pp);
      // a chained write issued while an earlier one is still in the FPU: no WAW stall
      if (ev_issue && dut.fpu_in_tag.chain && dut.fpu_busy) n_chain_waw++;
    end
  end

  // ---------------------------------------------------------------- driver
  int wait_cycles;        // cycles an instruction was presented but not issued
  int issue_cycle;        // cycle of the last issue

  task automatic issue(input fp_op_e op, input int rd, input int rs1, input int rs2,
                       input fp_word_t imm = '0);
    instr_valid = 1'b1;
    instr = '{op: op, rd: ridx_t'(rd), rs1: ridx_t'(rs1), rs2: ridx_t'(rs2), imm: imm};
    forever begin
      logic acc;
      @(negedge clk);
      acc = instr_ready;
      issue_cycle = cyc;
      @(posedge clk); #1;
      if (acc) break;
      wait_cycles++;
    end
    instr_valid = 1'b0;
  endtask

  task automatic bubble(input int n);
    instr_valid = 1'b0;
    repeat (n) begin @(posedge clk); #1; end
  endtask

  task automatic csr(input csr_op_e op, input logic [31:0] d, output logic [31:0] old);
    csr_valid = 1'b1; csr_addr = CHAIN_CSR_ADDR; csr_op = op; csr_wdata = d;
    #1 old = csr_rdata;
    @(posedge clk); #1;
    csr_valid = 1'b0;
  endtask

  task automatic drain();
    int t;
    t = 0;
    do begin @(posedge clk); #1; t++; end while ((busy || ssr_busy != '0) && t < 5000);
    check(t < 5000, "subsystem does not go idle");
  endtask

  // configure the three streams for one run; output array at A_BASE + off
  task automatic start_streams(input int unsigned off);
    cfg[0] = '{base: 32'(C_BASE * 8), stride: 32'd8, count: 16'(N)};
    cfg[1] = '{base: 32'(D_BASE * 8), stride: 32'd8, count: 16'(N)};
    cfg[2] = '{base: 32'((A_BASE + off) * 8), stride: 32'd8, count: 16'(N)};
    cfg_valid = '1;
    @(posedge clk); #1 cfg_valid = '0;
    repeat (8) @(posedge clk);   // let the read streams prefetch
    #1;
  endtask

  real       b_real;
  fp_word_t  b_bits;

  task automatic check_results(input int unsigned off, input string run);
    int bad;
    bad = 0;
    for (int i = 0; i < N; i++) begin
      fp_word_t expv, got;
      expv = $realtobits(b_real * ($bitstoreal(u_mem.word_read(C_BASE + i)) +
                                   $bitstoreal(u_mem.word_read(D_BASE + i))));
      got  = u_mem.word_read(A_BASE + off + i);
      checks++;
      if (got != expv) begin
        failures++;
        bad++;
        if (bad < 5) $display("FAIL %s: a[%0d] = %h expected %h", run, i, got, expv);
      end
    end
  endtask

  initial begin : watchdog
    repeat (200000) @(posedge clk);
    failures++;
    $display("FAIL watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [31:0] old;
    int t0, t1, base_cycles, chain_cycles;
    instr_valid = 0; instr = '0; csr_valid = 0; csr_addr = '0; csr_op = CSR_RW; csr_wdata = '0;
    ssr_en = 0; cfg_valid = '0; mem_slow = 0;
    for (int s = 0; s < NUM_SSR; s++) cfg[s] = '0;
    for (int i = 0; i < N; i++) begin
      u_mem.word_write(C_BASE + i, $realtobits(real'($urandom_range(0, 100000)) / 37.0 - 1000.0));
      u_mem.word_write(D_BASE + i, $realtobits(real'($urandom_range(0, 100000)) / 91.0));
    end
    for (int i = 0; i < 1024; i++) u_mem.word_write(A_BASE + i, '0);
    b_real = 1.0 / 3.0;
    b_bits = $realtobits(b_real);

    rst_n = 1;
    #1 rst_n = 0;
    repeat (3) @(posedge clk);
    #1 rst_n = 1;
    check(chain_mask == '0, "chaining enabled after reset");

    // place b in ft4 and enable the streams
    issue(FP_MVIN, 4, 0, 0, b_bits);
    ssr_en = 1;

    // ------------------------------------------------ 1. baseline
    start_streams(0);
    wait_cycles = 0;
    t0 = cyc;
    for (int i = 0; i < N; i++) begin
      int tf;
      issue(FP_ADD, 3, 0, 1);
      tf = issue_cycle;
      issue(FP_MUL, 2, 3, 4);
      check(issue_cycle - tf == FPU_STAGES + 1, "baseline: fmul not issued FPU depth + 1 cycles after fadd");
    end
    base_cycles = cyc - t0;
    drain();
    check(wait_cycles == FPU_STAGES * N, "baseline: stall cycles differ from 3 per element");
    check(n_raw == FPU_STAGES * N, "baseline: RAW stall events");
    check_results(0, "baseline");

    // ------------------------------------------------ 1b. unrolled by four (ft3..ft6, b in ft7)
    issue(FP_MVIN, 7, 0, 0, b_bits);
    start_streams(128);
    wait_cycles = 0;
    t0 = cyc;
    for (int it = 0; it < N / 4; it++) begin
      for (int k = 0; k < 4; k++) issue(FP_ADD, 3 + k, 0, 1);
      for (int k = 0; k < 4; k++) issue(FP_MUL, 2, 3 + k, 7);
      bubble(2);                     // addi, bneq
    end
    t1 = cyc - t0;
    drain();
    check(wait_cycles == 0, "unrolled loop: an instruction stalled");
    check(t1 == (N / 4) * 10, "unrolled loop: cycle count");
    check_results(128, "unrolled");
    issue(FP_MVIN, 4, 0, 0, b_bits);   // the unrolled loop used ft4: put b back

    // ------------------------------------------------ 2. chained loop (example trace)
    csr(CSR_RS, 32'd8, old);
    n_mode_switch++;
    check(old == '0 && chain_mask == 32'h8, "csrs 0x7C3, 8");
    start_streams(256);
    wait_cycles = 0;
    t0 = cyc;
    for (int it = 0; it < N / 4; it++) begin
      repeat (4) issue(FP_ADD, 3, 0, 1);
      issue(FP_MUL, 2, 3, 4);
      if (it == 0) begin
        // the empty slot of the example: pipeline full, ft3 holds an unconsumed value
        #1;
        check(dut.i_fpu.s1_valid && dut.i_fpu.r_valid[0] && dut.i_fpu.r_valid[1],
              "example slot: FPU pipeline not full");
        check(dut.rf_valid[3], "example slot: ft3 not valid");
        check(ev_bpc, "example slot: no backpressure on ft3");
        bubble(1);
      end
      repeat (3) issue(FP_MUL, 2, 3, 4);
      bubble(2);                     // addi, bneq
    end
    chain_cycles = cyc - t0;
    drain();
    check(wait_cycles == 0, "chained loop: an instruction stalled");
    check(chain_cycles == (N / 4) * 10 + 1, "chained loop: cycle count");
    check_results(256, "chained");
    $display("cycles for %0d elements: baseline %0d, unrolled (4 extra registers) %0d, chained %0d (two empty loop slots per 4 elements, plus one in the chained run)",
             N, base_cycles, t1, chain_cycles);
    $display("FP issue utilisation: baseline %0d%%, chained %0d%%", 200 * N / base_cycles,
             200 * N / chain_cycles);

    // ------------------------------------------------ 3. too short a chain: consumer waits
    start_streams(512);
    begin
      int n_wait0;
      n_wait0 = n_chain_wait;
      for (int it = 0; it < N / 2; it++) begin
        repeat (2) issue(FP_ADD, 3, 0, 1);
        repeat (2) issue(FP_MUL, 2, 3, 4);
      end
      drain();
      check(n_chain_wait - n_wait0 == 2 * (N / 2), "short chain: 2 wait cycles per pair expected");
    end
    check_results(512, "short chain");

    // ------------------------------------------------ 4. slow memory
    mem_slow = 1;
    start_streams(768);
    for (int it = 0; it < N / 4; it++) begin
      repeat (4) issue(FP_ADD, 3, 0, 1);
      repeat (4) issue(FP_MUL, 2, 3, 4);
    end
    drain();
    mem_slow = 0;
    check_results(768, "slow memory");

    // ------------------------------------------------ 5. chaining off: RAW stalls return
    csr(CSR_RC, 32'd8, old);
    n_mode_switch++;
    check(old == 32'h8 && chain_mask == '0, "csrc 0x7C3, 8");
    for (int i = 0; i < 1024; i++) u_mem.word_write(A_BASE + i, '0);
    start_streams(0);
    begin
      int n_raw0;
      n_raw0 = n_raw;
      for (int i = 0; i < N; i++) begin
        issue(FP_ADD, 3, 0, 1);
        issue(FP_MUL, 2, 3, 4);
      end
      drain();
      check(n_raw - n_raw0 == FPU_STAGES * N, "after switch-off: RAW stalls");
    end
    check_results(0, "baseline again");

    // every mechanism must have happened
    check(n_raw > 0,         "never: RAW stall");
    check(n_chain_waw > 0,   "never: chained write without WAW stall");
    check(n_chain_wait > 0,  "never: wait on empty chaining register");
    check(n_bpc > 0,         "never: chaining backpressure");
    check(n_pp > 0,          "never: same-cycle push and pop");
    check(n_ssr_wait > 0,    "never: SSR read stall");
    check(n_bps > 0,         "never: SSR write backpressure");
    check(n_mode_switch == 2, "never: chaining mode switch");
    $display("events: raw %0d chain_waw %0d chain_wait %0d bp_chain %0d pushpop %0d ssr_wait %0d bp_ssr %0d",
             n_raw, n_chain_waw, n_chain_wait, n_bpc, n_pp, n_ssr_wait, n_bps);

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
