// stencil27_tb: 27-point 3-D box stencil (radius 1) on the FP subsystem, with chaining.
//
// out[x,y,z] = sum over the 27 neighbours k of c_k * in[x+dx,y+dy,z+dz], dx,dy,dz in {-1,0,1},
// for an NxNxN block of outputs. The 27 coefficients stay in ft5..ft31 for the whole run.
// There is no fused multiply-add, so each tap is an fmul into chaining register ft3 and an
// fadd that accumulates in chaining register ft4:
//
//     fmul ft4, ft0, c0                     first product starts the sum
//     fmul ft3, ft0, c1
//     fmul ft3, ft0, c_k+1 ; fadd ft4, ft4, ft3    k = 1 .. 25
//     fadd ft2, ft4, ft3                    last tap goes to the write stream
//
// Each fmul is issued one tap ahead of the fadd that uses it, so ft3 holds up to two products
// (a software-pipelined chain). This keeps the product off the critical path.
// ft0 streams the input, ft2 streams the output: 2 stream + 2 chaining + 27 coefficient
// registers, 31 of 32. The address generator of a stream is one-dimensional, so the testbench
// lays the neighbourhoods out in access order in memory (27 words per output), which is the
// sequence a nested-loop generator would fetch from the grid.
//
// Checks: every output bit-exact against the same sequence of rounded double operations,
// and the cycle count per output. The accumulating fadd depends on the previous one, so each
// tap costs FPU depth + 1 cycles: (FPU_STAGES + 1) * 25 + FPU_STAGES + 3 cycles per output.
// Utilisation therefore stays near one half: without a fused multiply-add, the chain of
// dependent additions sets the pace.
module stencil27_tb;
  import chain_pkg::*;

  localparam int unsigned N      = 4;              // outputs per dimension
  localparam int unsigned G      = N + 2;          // input grid per dimension
  localparam int unsigned TAPS   = 27;
  localparam int unsigned NOUT   = N * N * N;
  localparam int unsigned IN_BASE  = 0;            // word offsets in memory
  localparam int unsigned OUT_BASE = NOUT * TAPS;
  localparam int unsigned PER_OUT  = (FPU_STAGES + 1) * (TAPS - 2) + FPU_STAGES + 3;

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

  tb_mem #(.NPORTS(NUM_SSR), .WORDS(4096), .LAT(2)) u_mem (
    .clk_i(clk), .stall_i(1'b0), .req_valid_i(mreq_valid), .req_ready_o(mreq_ready),
    .req_i(mreq), .rsp_valid_o(mrsp_valid), .rsp_rdata_o(mrsp));

  int checks = 0, failures = 0;
  int cyc = 0;
  int n_issue = 0, n_chain_wait = 0, n_raw = 0;

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
      n_issue      += int'(ev_issue);
      n_chain_wait += int'(ev_chain);
      n_raw        += int'(ev_raw);
    end
  end

  int issue_cycle;

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
    end
    instr_valid = 1'b0;
  endtask

  initial begin : watchdog
    repeat (100000) @(posedge clk);
    failures++;
    $display("FAIL watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  real grid [G][G][G];
  real coef [TAPS];

  initial begin
    logic [31:0] old;
    int t_first, t_prev, t_now, bad;
    instr_valid = 0; instr = '0; csr_valid = 0; csr_addr = '0; csr_op = CSR_RW; csr_wdata = '0;
    ssr_en = 0; cfg_valid = '0;
    for (int s = 0; s < NUM_SSR; s++) cfg[s] = '0;

    // input grid and coefficients; neighbourhoods gathered in access order
    for (int x = 0; x < G; x++)
      for (int y = 0; y < G; y++)
        for (int z = 0; z < G; z++)
          grid[x][y][z] = real'($urandom_range(0, 200000)) / 131.0 - 700.0;
    for (int k = 0; k < TAPS; k++) coef[k] = real'($urandom_range(1, 4000)) / 1024.0 - 2.0;
    for (int o = 0; o < NOUT; o++) begin
      int x, y, z;
      x = o / (N * N); y = (o / N) % N; z = o % N;
      for (int k = 0; k < TAPS; k++)
        u_mem.word_write(IN_BASE + o * TAPS + k,
                         $realtobits(grid[x + k / 9][y + (k / 3) % 3][z + k % 3]));
      u_mem.word_write(OUT_BASE + o, '0);
    end

    rst_n = 1;
    #1 rst_n = 0;
    repeat (3) @(posedge clk);
    #1 rst_n = 1;

    // coefficients into ft5..ft31, chaining on ft3 and ft4, streams on
    for (int k = 0; k < TAPS; k++) issue(FP_MVIN, 5 + k, 0, 0, $realtobits(coef[k]));
    csr_valid = 1'b1; csr_addr = CHAIN_CSR_ADDR; csr_op = CSR_RS; csr_wdata = 32'h18;
    #1 old = csr_rdata;
    @(posedge clk); #1 csr_valid = 1'b0;
    check(old == '0 && chain_mask == 32'h18, "csrs 0x7C3, 0x18");
    ssr_en = 1;
    cfg[0] = '{base: 32'(IN_BASE * 8), stride: 32'd8, count: 16'(NOUT * TAPS)};
    cfg[2] = '{base: 32'(OUT_BASE * 8), stride: 32'd8, count: 16'(NOUT)};
    cfg_valid = 3'b101;
    @(posedge clk); #1 cfg_valid = '0;
    repeat (8) @(posedge clk);
    #1;

    n_issue = 0;
    t_first = cyc;
    t_prev  = -1;
    for (int o = 0; o < NOUT; o++) begin
      issue(FP_MUL, 4, 0, 5);
      t_now = issue_cycle;
      if (t_prev >= 0) check(t_now - t_prev == PER_OUT, "cycles per output");
      t_prev = t_now;
      issue(FP_MUL, 3, 0, 6);
      for (int k = 1; k < TAPS; k++) begin
        if (k < TAPS - 1) issue(FP_MUL, 3, 0, 6 + k);
        issue(FP_ADD, (k == TAPS - 1) ? 2 : 4, 4, 3);
      end
    end
    t_now = cyc - t_first;
    begin
      int t;
      t = 0;
      do begin @(posedge clk); #1; t++; end while ((busy || ssr_busy != '0) && t < 5000);
      check(t < 5000, "subsystem does not go idle");
    end
    check(n_issue == NOUT * (2 * TAPS - 1), "issued instruction count");
    check(n_chain_wait > 0, "accumulator never waited on its chaining register");
    check(n_raw == 0, "RAW stall on an ordinary register");

    bad = 0;
    for (int o = 0; o < NOUT; o++) begin
      int x, y, z;
      real s;
      fp_word_t got;
      x = o / (N * N); y = (o / N) % N; z = o % N;
      s = coef[0] * grid[x][y][z];
      for (int k = 1; k < TAPS; k++) s = s + coef[k] * grid[x + k / 9][y + (k / 3) % 3][z + k % 3];
      got = u_mem.word_read(OUT_BASE + o);
      checks++;
      if (got != $realtobits(s)) begin
        failures++;
        bad++;
        if (bad < 5) $display("FAIL out[%0d] = %h expected %h", o, got, $realtobits(s));
      end
    end
    $display("%0d outputs x %0d taps: %0d cycles, %0d per output, FPU utilisation %0d%%",
             NOUT, TAPS, t_now, PER_OUT, 100 * NOUT * (2 * TAPS - 1) / t_now);

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
