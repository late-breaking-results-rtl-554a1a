// fpu_pipe_tb: self-checking testbench of the three-stage FP64 pipeline.
//
// Reference results come from the simulator's own double-precision arithmetic ($bitstoreal /
// $realtobits, IEEE round-to-nearest-even); a NaN is expected as the canonical NaN. Checks:
// the latency of one isolated operation (three cycles), thousands of random add/sub/mul/move
// operations with operands biased towards the hard cases (cancellation, subnormals, overflow,
// zeros, infinities, NaNs) under random output backpressure, and that a fully held pipeline
// accepts exactly STAGES operations.
module fpu_pipe_tb;
  import chain_pkg::*;

  localparam int unsigned STAGES = FPU_STAGES;
  localparam int unsigned NOPS   = 20000;

  logic     clk = 1'b0;
  logic     rst_n;
  logic     in_valid, in_ready, out_valid, out_ready;
  fp_op_e   in_op;
  fp_word_t in_a, in_b, out_result;
  wb_tag_t  in_tag, out_tag;

  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  fpu_pipe #(.STAGES(STAGES)) dut (
    .clk_i(clk), .rst_ni(rst_n),
    .in_valid_i(in_valid), .in_ready_o(in_ready), .in_op_i(in_op),
    .in_a_i(in_a), .in_b_i(in_b), .in_tag_i(in_tag),
    .out_valid_o(out_valid), .out_ready_i(out_ready),
    .out_result_o(out_result), .out_tag_o(out_tag), .busy_o()
  );

  function automatic logic [63:0] rnd64();
    return {$urandom, $urandom};
  endfunction

  // operand with a chosen class
  function automatic logic [63:0] rnd_operand(input logic [63:0] other);
    logic [63:0] x;
    int k;
    k = int'($urandom_range(0, 11));
    x = rnd64();
    case (k)
      0:  x = rnd64();                                            // anything, NaN included
      1:  x[62:52] = 11'd0;                                       // subnormal
      2:  x[62:0]  = 63'd0;                                       // signed zero
      3:  x[62:0]  = {11'h7FF, 52'd0};                            // infinity
      4:  x[62:52] = other[62:52];                                // same exponent: cancellation
      5:  x = {~other[63], other[62:52], other[51:4], x[3:0]};    // near-total cancellation
      6:  x[62:52] = 11'(other[62:52] + 11'($urandom_range(0, 60)) - 11'd30);
      7:  x[62:52] = 11'($urandom_range(2000, 2046));             // large
      8:  x[62:52] = 11'($urandom_range(1, 40));                  // small
      9:  x = {other[63], other[62:52] - 11'd1, 52'hF_FFFF_FFFF_FFFF}; // rounding carries
      default: x[62:52] = 11'($urandom_range(900, 1150));         // ordinary
    endcase
    return x;
  endfunction

  function automatic logic [63:0] ref_result(input fp_op_e op, input logic [63:0] a,
                                             input logic [63:0] b);
    real ra, rb, r;
    ra = $bitstoreal(a);
    rb = $bitstoreal(b);
    case (op)
      FP_ADD:  r = ra + rb;
      FP_SUB:  r = ra - rb;
      FP_MUL:  r = ra * rb;
      default: return a;
    endcase
    return $realtobits(r);
  endfunction

  function automatic logic nan64(input logic [63:0] x);
    return (x[62:52] == 11'h7FF) && (x[51:0] != '0);
  endfunction

  logic [63:0] exp_q[$];
  logic [4:0]  tag_q[$];
  logic        canon_q[$];   // 1: a NaN result must be the canonical NaN
  int          accepted;
  int          outputs;

  // output checker: inputs change just after a rising edge, so the values seen at the falling
  // edge are the ones the next rising edge will act on
  always @(negedge clk) begin
    if (rst_n && out_valid && out_ready) begin
      logic [63:0] e;
      logic [4:0]  t;
      logic        c;
      outputs++;
      if (exp_q.size() == 0) begin
        failures++;
        $display("FAIL unexpected output %h", out_result);
      end else begin
        e = exp_q.pop_front();
        t = tag_q.pop_front();
        c = canon_q.pop_front();
        checks++;
        if ((c && nan64(e)) ? (out_result != 64'h7FF8_0000_0000_0000) : (out_result != e)) begin
          failures++;
          if (failures < 20) $display("FAIL result %h expected %h", out_result, e);
        end
        checks++;
        if (out_tag.rd != t) begin
          failures++;
          $display("FAIL tag %0d expected %0d", out_tag.rd, t);
        end
      end
    end
  end

  task automatic drive(input fp_op_e op, input logic [63:0] a, input logic [63:0] b,
                       input logic [4:0] rd);
    in_valid = 1'b1;
    in_op    = op;
    in_a     = a;
    in_b     = b;
    in_tag   = '{rd: rd, chain: 1'b0, ssr: 1'b0};
    forever begin
      logic acc;
      @(negedge clk);
      acc = in_ready;
      @(posedge clk);
      #1;
      if (acc) break;
    end
    exp_q.push_back(ref_result(op, a, b));
    tag_q.push_back(rd);
    canon_q.push_back(op != FP_MVIN);
    accepted++;
    in_valid = 1'b0;
  endtask

  initial begin : watchdog
    repeat (NOPS * 4 + 1000) @(posedge clk);
    failures++;
    $display("FAIL watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int t0, lat;
    in_valid = 1'b0; out_ready = 1'b1;
    in_op = FP_ADD; in_a = '0; in_b = '0; in_tag = '0;
    accepted = 0; outputs = 0;
    rst_n = 1'b1;
    #1 rst_n = 1'b0;   // falling edge: asynchronous reset before the first clock edge
    repeat (3) @(posedge clk);
    #1 rst_n = 1'b1;
    @(posedge clk); #1;

    // 1) latency of an isolated operation: 1.5 + 2.25 = 3.75
    in_valid = 1'b1; in_op = FP_ADD;
    in_a = 64'h3FF8_0000_0000_0000; in_b = 64'h4002_0000_0000_0000;
    in_tag = '{rd: 5'd3, chain: 1'b0, ssr: 1'b0};
    exp_q.push_back(64'h400E_0000_0000_0000); tag_q.push_back(5'd3); canon_q.push_back(1'b1);
    @(posedge clk); #1;
    in_valid = 1'b0;
    lat = 1;
    while (!out_valid && lat < 20) begin @(posedge clk); #1; lat++; end
    checks++;
    if (lat != STAGES) begin
      failures++;
      $display("FAIL latency %0d expected %0d", lat, STAGES);
    end
    @(posedge clk); #1;

    // 2) random operations under random backpressure
    fork
      begin
        for (int i = 0; i < NOPS; i++) begin
          logic [63:0] a, b;
          fp_op_e op;
          a  = rnd_operand(rnd64());
          b  = rnd_operand(a);
          op = fp_op_e'($urandom_range(0, 3));
          drive(op, a, b, 5'($urandom));
          if ($urandom_range(0, 3) == 0) begin @(posedge clk); #1; end
        end
      end
      begin
        while (accepted < NOPS || exp_q.size() != 0) begin
          @(posedge clk); #1;
          out_ready = ($urandom_range(0, 3) != 0);
        end
      end
    join
    out_ready = 1'b1;
    repeat (5) @(posedge clk);
    checks++;
    if (outputs != NOPS + 1) begin
      failures++;
      $display("FAIL %0d outputs, expected %0d", outputs, NOPS + 1);
    end

    // 3) a held pipeline takes exactly STAGES operations
    #1 out_ready = 1'b0;
    begin
      int n;
      n = 0;
      in_valid = 1'b1; in_op = FP_MUL;
      in_a = 64'h4000_0000_0000_0000; in_b = 64'h4000_0000_0000_0000;
      in_tag = '{rd: 5'd1, chain: 1'b1, ssr: 1'b0};
      for (int c = 0; c < 10; c++) begin
        @(negedge clk);
        if (in_ready) begin
          n++;
          exp_q.push_back(64'h4010_0000_0000_0000); tag_q.push_back(5'd1); canon_q.push_back(1'b1);
        end
        @(posedge clk);
        #1;
      end
      in_valid = 1'b0;
      checks++;
      if (n != STAGES) begin
        failures++;
        $display("FAIL held pipeline accepted %0d, expected %0d", n, STAGES);
      end
      #1 out_ready = 1'b1;
      repeat (6) @(posedge clk);
      checks++;
      if (exp_q.size() != 0) begin
        failures++;
        $display("FAIL %0d results not drained", exp_q.size());
      end
    end

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
