// fp_issue_ctrl_tb: self-checking testbench of the issue / writeback control with chaining.
//
// Directed scenarios, each checking the issue decision, pops, writeback acceptance and
// event strobes against hand-derived expectations:
//   RAW and WAW stalls on ordinary registers (scoreboard set at issue, cleared at writeback);
//   no WAW check on a chaining register (two writes in flight to ft3);
//   a read of a chaining register waits for V and pops it;
//   writeback to a full chaining register is refused (backpressure) unless the value is
//   popped in the same cycle, in which case push and pop happen together;
//   SSR sources wait for stream data and pop it; SSR destination honours the write FIFO;
//   FP_MVIN ignores its (unused) sources; the FPU's ready gates the issue.
module fp_issue_ctrl_tb;
  import chain_pkg::*;

  logic      clk = 1'b0;
  logic      rst_n;
  logic      instr_valid, instr_ready;
  fp_instr_t instr;
  regmask_t  chain_mask, rf_valid, rf_pop;
  logic      ssr_en;
  logic [1:0] ssr_rvalid, ssr_pop, src_ssr;
  logic      fpu_in_valid, fpu_in_ready, fpu_out_valid, fpu_out_ready;
  wb_tag_t   fpu_in_tag, fpu_out_tag;
  logic      rf_we, rf_set_valid, ssr_wready, ssr_push;
  ridx_t     rf_waddr;
  logic      ev_raw, ev_chain, ev_ssr, ev_bpc, ev_bps, ev_pp, busy;
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  fp_issue_ctrl dut (
    .clk_i(clk), .rst_ni(rst_n),
    .instr_valid_i(instr_valid), .instr_ready_o(instr_ready), .instr_i(instr),
    .chain_mask_i(chain_mask), .ssr_en_i(ssr_en),
    .rf_valid_i(rf_valid), .rf_pop_o(rf_pop),
    .ssr_rvalid_i(ssr_rvalid), .ssr_pop_o(ssr_pop), .src_ssr_o(src_ssr),
    .fpu_in_valid_o(fpu_in_valid), .fpu_in_ready_i(fpu_in_ready), .fpu_in_tag_o(fpu_in_tag),
    .fpu_out_valid_i(fpu_out_valid), .fpu_out_tag_i(fpu_out_tag), .fpu_out_ready_o(fpu_out_ready),
    .rf_we_o(rf_we), .rf_waddr_o(rf_waddr), .rf_set_valid_o(rf_set_valid),
    .ssr_wready_i(ssr_wready), .ssr_push_o(ssr_push),
    .ev_stall_raw_o(ev_raw), .ev_stall_chain_o(ev_chain), .ev_stall_ssr_o(ev_ssr),
    .ev_bp_chain_o(ev_bpc), .ev_bp_ssr_o(ev_bps), .ev_chain_pushpop_o(ev_pp), .busy_o(busy));

  task automatic check(input logic cond, input string what);
    checks++;
    if (!cond) begin
      failures++;
      $display("FAIL %s (t=%0t)", what, $time);
    end
  endtask

  function automatic fp_instr_t mk(input fp_op_e op, input int rd, input int rs1, input int rs2);
    return '{op: op, rd: ridx_t'(rd), rs1: ridx_t'(rs1), rs2: ridx_t'(rs2), imm: '0};
  endfunction

  task automatic present(input fp_instr_t i);
    instr_valid = 1; instr = i; #1;
  endtask

  task automatic idle();
    instr_valid = 0; fpu_out_valid = 0; #1;
  endtask

  task automatic wb(input int rd, input logic ch, input logic ss);
    fpu_out_valid = 1; fpu_out_tag = '{rd: ridx_t'(rd), chain: ch, ssr: ss}; #1;
  endtask

  task automatic tick();
    @(posedge clk); #1;
  endtask

  initial begin : watchdog
    repeat (1000) @(posedge clk);
    failures++;
    $display("FAIL watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    instr_valid = 0; instr = '0; chain_mask = '0; rf_valid = '0; ssr_en = 0; ssr_rvalid = '0;
    fpu_in_ready = 1; fpu_out_valid = 0; fpu_out_tag = '0; ssr_wready = 1;
    rst_n = 1;
    #1 rst_n = 0;
    repeat (2) @(posedge clk);
    #1 rst_n = 1;
    check(!busy, "busy after reset");

    // ---- ordinary registers: RAW ----
    present(mk(FP_ADD, 3, 5, 6));
    check(instr_ready && fpu_in_tag == '{rd: 5'd3, chain: 1'b0, ssr: 1'b0}, "ordinary issue");
    tick(); idle();
    check(busy, "scoreboard not set");
    present(mk(FP_MUL, 2, 3, 4));
    check(!instr_ready && !fpu_in_valid && ev_raw, "RAW stall missing");
    tick();
    wb(3, 0, 0);
    check(fpu_out_ready && rf_we && rf_waddr == 5'd3 && !rf_set_valid, "ordinary writeback");
    check(!instr_ready, "RAW: no forwarding in the writeback cycle");
    tick(); fpu_out_valid = 0; #1;
    check(instr_ready && !ev_raw, "RAW stall not released after writeback");
    tick(); idle();
    // ---- WAW ----
    present(mk(FP_ADD, 9, 10, 11)); tick();
    present(mk(FP_ADD, 9, 12, 13));
    check(!instr_ready && ev_raw, "WAW stall missing");
    wb(9, 0, 0); tick(); fpu_out_valid = 0; #1;
    check(instr_ready, "WAW stall not released");
    tick(); idle(); wb(9, 0, 0); tick(); idle();
    // also retire rd=2 from the fmul above
    wb(2, 0, 0); tick(); idle();
    check(!busy, "scoreboard not empty");

    // ---- chaining register ft3 ----
    chain_mask = 32'h8;
    present(mk(FP_ADD, 3, 5, 6));
    check(instr_ready && fpu_in_tag.chain, "chained destination issue");
    tick();
    present(mk(FP_ADD, 3, 5, 6));
    check(instr_ready && !ev_raw, "chained destination has a WAW check");
    tick();
    check(!busy, "chained destination set the scoreboard");
    present(mk(FP_MUL, 2, 3, 4));
    check(!instr_ready && ev_chain && rf_pop == '0, "read of empty chaining register not stalled");
    // first result arrives: V clear, so it is written and sets V
    wb(3, 1, 0);
    check(fpu_out_ready && rf_we && rf_set_valid && !ev_bpc, "push into empty chaining register");
    tick(); rf_valid[3] = 1'b1; fpu_out_valid = 0; #1;
    // consumer issues and pops
    check(instr_ready && rf_pop == 32'h8, "pop of chaining register");
    // second result arrives while the consumer pops: push and pop together
    wb(3, 1, 0);
    check(fpu_out_ready && rf_we && ev_pp, "same-cycle push and pop");
    tick();
    // V stays set (new value); consumer gone: a third result must wait
    idle(); wb(3, 1, 0);
    check(!fpu_out_ready && !rf_we && ev_bpc, "backpressure on full chaining register");
    // FPU not ready: no issue although operands are there
    present(mk(FP_MUL, 12, 3, 4)); fpu_in_ready = 0; fpu_out_valid = 0; #1;
    check(fpu_in_valid && !instr_ready && rf_pop == '0, "issue despite FPU not ready");
    fpu_in_ready = 1; #1;
    idle(); rf_valid = '0; chain_mask = '0;

    // ---- SSR streams ----
    ssr_en = 1; ssr_rvalid = 2'b01;
    present(mk(FP_ADD, 2, 0, 1));
    check(!instr_ready && ev_ssr, "SSR source empty not stalled");
    ssr_rvalid = 2'b11; #1;
    check(instr_ready && ssr_pop == 2'b11 && src_ssr == 2'b11 && fpu_in_tag.ssr, "SSR issue");
    tick(); idle();
    wb(2, 0, 1); ssr_wready = 0; #1;
    check(!fpu_out_ready && !ssr_push && ev_bps && !rf_we, "write stream full not held");
    ssr_wready = 1; #1;
    check(fpu_out_ready && ssr_push && !rf_we, "write stream push");
    tick(); idle();
    present(mk(FP_ADD, 5, 0, 0));
    check(instr_ready && ssr_pop == 2'b01, "same SSR on both ports pops once");
    tick(); idle(); wb(5, 0, 0); tick(); idle();
    ssr_en = 0;

    // ---- FP_MVIN ignores sources ----
    present(mk(FP_ADD, 7, 1, 1)); tick(); idle();
    present(mk(FP_MVIN, 8, 7, 7));
    check(instr_ready, "FP_MVIN stalled on an unused source");
    tick(); idle();

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
