// ssr_streamer_tb: self-checking testbench of the stream semantic register.
//
// A read SSR and a write SSR share a behavioural memory. Checks: (1) after configuration
// and with no consumer, the read SSR prefetches exactly DEPTH elements and then stops
// requesting; (2) a strided read stream delivers the expected elements in order to a consumer
// that pops at random, under random memory stalls; (3) a strided write stream stores every
// pushed element at the expected address and accepts no more than DEPTH elements while the
// memory refuses all requests; (4) both SSRs report idle when done.
module ssr_streamer_tb;
  import chain_pkg::*;

  localparam int unsigned N = 200;

  logic clk = 1'b0;
  logic rst_n;
  logic stall;
  int   checks = 0, failures = 0;

  always #5 clk = ~clk;

  // read SSR (port 0) and write SSR (port 1)
  logic     cfg_valid [2];
  ssr_cfg_t cfg [2];
  logic     busy [2];
  logic     rvalid, pop, wready, push;
  fp_word_t rdata, wdata;
  logic [1:0] mreq_valid, mreq_ready, mrsp_valid;
  mem_req_t mreq [2];
  fp_word_t mrsp [2];
  logic     mem_stall_all;

  ssr_streamer #(.WRITE(1'b0)) dut_rd (
    .clk_i(clk), .rst_ni(rst_n), .cfg_valid_i(cfg_valid[0]), .cfg_i(cfg[0]), .busy_o(busy[0]),
    .core_rvalid_o(rvalid), .core_rdata_o(rdata), .core_pop_i(pop),
    .core_wready_o(), .core_wdata_i('0), .core_push_i(1'b0),
    .mem_req_valid_o(mreq_valid[0]), .mem_req_ready_i(mreq_ready[0] && !mem_stall_all),
    .mem_req_o(mreq[0]), .mem_rsp_valid_i(mrsp_valid[0]), .mem_rsp_rdata_i(mrsp[0]));

  ssr_streamer #(.WRITE(1'b1)) dut_wr (
    .clk_i(clk), .rst_ni(rst_n), .cfg_valid_i(cfg_valid[1]), .cfg_i(cfg[1]), .busy_o(busy[1]),
    .core_rvalid_o(), .core_rdata_o(), .core_pop_i(1'b0),
    .core_wready_o(wready), .core_wdata_i(wdata), .core_push_i(push),
    .mem_req_valid_o(mreq_valid[1]), .mem_req_ready_i(mreq_ready[1] && !mem_stall_all),
    .mem_req_o(mreq[1]), .mem_rsp_valid_i(mrsp_valid[1]), .mem_rsp_rdata_i(mrsp[1]));

  logic [1:0] eff_valid;
  assign eff_valid = mreq_valid & {2{!mem_stall_all}};

  tb_mem #(.NPORTS(2), .WORDS(4096), .LAT(2)) u_mem (
    .clk_i(clk), .stall_i(stall), .req_valid_i(eff_valid), .req_ready_o(mreq_ready),
    .req_i(mreq), .rsp_valid_o(mrsp_valid), .rsp_rdata_o(mrsp));

  function automatic fp_word_t pattern(input int unsigned i);
    return {32'hC0DE_0000 | 32'(i), ~32'(i * 7)};
  endfunction

  // count memory requests of the read SSR
  int rd_reqs = 0;
  always @(posedge clk) if (rst_n && mreq_valid[0] && mreq_ready[0] && !mem_stall_all) rd_reqs++;

  initial begin : watchdog
    repeat (20000) @(posedge clk);
    failures++;
    $display("FAIL watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int got;
    cfg_valid[0] = 0; cfg_valid[1] = 0; cfg[0] = '0; cfg[1] = '0;
    pop = 0; push = 0; wdata = '0; stall = 0; mem_stall_all = 0;
    for (int i = 0; i < 4096; i++) u_mem.word_write(i, pattern(i));
    rst_n = 1;
    #1 rst_n = 0;   // falling edge: asynchronous reset before the first clock edge
    repeat (3) @(posedge clk);
    #1 rst_n = 1;

    // (1) prefetch stops at DEPTH
    cfg[0] = '{base: 32'h100, stride: 32'd24, count: 16'(N)};   // word 32, every third word
    cfg_valid[0] = 1;
    @(posedge clk); #1 cfg_valid[0] = 0;
    repeat (30) @(posedge clk);
    #1;
    checks++;
    if (rd_reqs != SSR_DEPTH || dut_rd.fill != SSR_DEPTH) begin
      failures++;
      $display("FAIL prefetch: %0d requests, fill %0d, expected %0d", rd_reqs, dut_rd.fill, SSR_DEPTH);
    end

    // (2) random consumer, stalling memory
    stall = 1;
    got = 0;
    while (got < N) begin
      logic p;
      p = ($urandom_range(0, 2) != 0);
      @(negedge clk);
      pop = p && rvalid;
      if (pop) begin
        checks++;
        if (rdata != pattern(32 + 3 * got)) begin
          failures++;
          $display("FAIL read element %0d: %h expected %h", got, rdata, pattern(32 + 3 * got));
        end
        got++;
      end
      @(posedge clk); #1 pop = 0;
    end
    repeat (10) @(posedge clk);
    checks++;
    if (busy[0] || rvalid || rd_reqs != N) begin
      failures++;
      $display("FAIL read stream end: busy %b rvalid %b requests %0d", busy[0], rvalid, rd_reqs);
    end

    // (3) write stream: memory blocked, at most DEPTH pushes accepted
    mem_stall_all = 1;
    cfg[1] = '{base: 32'h8000, stride: 32'd16, count: 16'(N)};   // word 4096/... every other word
    cfg_valid[1] = 1;
    @(posedge clk); #1 cfg_valid[1] = 0;
    begin
      int acc;
      acc = 0;
      for (int c = 0; c < 10; c++) begin
        @(negedge clk);
        push  = wready;
        wdata = ~pattern(acc);
        if (wready) acc++;
        @(posedge clk); #1 push = 0;
      end
      checks++;
      if (acc != SSR_DEPTH) begin
        failures++;
        $display("FAIL write FIFO took %0d while memory blocked, expected %0d", acc, SSR_DEPTH);
      end
      mem_stall_all = 0;
      while (acc < N) begin
        logic p;
        p = ($urandom_range(0, 3) != 0);
        @(negedge clk);
        push  = p && wready;
        wdata = ~pattern(acc);
        if (push) acc++;
        @(posedge clk); #1 push = 0;
      end
    end
    repeat (40) @(posedge clk);
    checks++;
    if (busy[1]) begin
      failures++;
      $display("FAIL write stream still busy");
    end
    for (int i = 0; i < N; i++) begin
      // byte 0x8000 + 16 i = word 4096 + 2 i, wrapped into the 4096-word array
      fp_word_t w;
      w = u_mem.word_read((4096 + 2 * i) % 4096);
      checks++;
      if (w != ~pattern(i)) begin
        failures++;
        if (failures < 10) $display("FAIL written element %0d: %h expected %h", i, w, ~pattern(i));
      end
    end

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
