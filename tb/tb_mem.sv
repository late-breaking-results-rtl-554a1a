// tb_mem: behavioural model of the L1 data memory seen by the SSR ports (testbench only).
//
// NPORTS independent request ports onto one word array of WORDS 64-bit words (byte address,
// word = addr[..:3]). Reads answer in order after LAT cycles; writes take effect when
// accepted. When stall_i is high each port's ready is dropped at random (about half the
// cycles), which exercises stream backpressure. All outputs are registered so a testbench can
// sample them at any time in a cycle. Testbenches fill and check the array through the
// word_write / word_read functions.
module tb_mem
  import chain_pkg::*;
#(
  parameter int unsigned NPORTS = 1,
  parameter int unsigned WORDS  = 4096,
  parameter int unsigned LAT    = 2
) (
  input  logic              clk_i,
  input  logic              stall_i,
  input  logic [NPORTS-1:0] req_valid_i,
  output logic [NPORTS-1:0] req_ready_o,
  input  mem_req_t          req_i       [NPORTS],
  output logic [NPORTS-1:0] rsp_valid_o,
  output fp_word_t          rsp_rdata_o [NPORTS]
);

  fp_word_t mem [WORDS];

  logic     pv [NPORTS][LAT];
  fp_word_t pd [NPORTS][LAT];

  int unsigned reads = 0, writes = 0;

  function automatic void word_write(input int unsigned idx, input fp_word_t d);
    mem[idx] = d;
  endfunction

  function automatic fp_word_t word_read(input int unsigned idx);
    return mem[idx];
  endfunction

  initial begin
    for (int p = 0; p < NPORTS; p++) begin
      req_ready_o[p] = 1'b1;
      rsp_valid_o[p] = 1'b0;
      rsp_rdata_o[p] = '0;
      for (int l = 0; l < LAT; l++) begin pv[p][l] = 1'b0; pd[p][l] = '0; end
    end
  end

  always @(posedge clk_i) begin
    for (int p = 0; p < NPORTS; p++) begin
      logic     nv;
      fp_word_t nd;
      nv = 1'b0;
      nd = '0;
      if (req_valid_i[p] && req_ready_o[p]) begin
        if (req_i[p].we) begin
          mem[(req_i[p].addr >> 3) % WORDS] = req_i[p].wdata;
          writes++;
        end else begin
          nv = 1'b1;
          nd = mem[(req_i[p].addr >> 3) % WORDS];
          reads++;
        end
      end
      // response pipeline
      rsp_valid_o[p] <= pv[p][LAT-1];
      rsp_rdata_o[p] <= pd[p][LAT-1];
      for (int l = LAT-1; l > 0; l--) begin
        pv[p][l] = pv[p][l-1];
        pd[p][l] = pd[p][l-1];
      end
      pv[p][0] = nv;
      pd[p][0] = nd;
      req_ready_o[p] <= stall_i ? ($urandom_range(0, 1) == 1) : 1'b1;
    end
  end

endmodule
