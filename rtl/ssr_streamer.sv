// ssr_streamer: a stream semantic register (SSR), read or write direction.
//
// An SSR turns an FP register into a port on a memory stream: with streams enabled, every
// read of ft0 or ft1 returns the next element of an array, and every write of ft2 stores the
// next element of an array, without load or store instructions. The design this RTL follows
// takes SSRs from the processor it extends and only uses them; it fixes their function, their
// binding to ft0/ft1 (read) and ft2 (write) and, in its block diagram, four data entries per
// SSR. The address generator here is the simplest one that streams an array: one affine loop
// (base, byte stride, element count), loaded through cfg_valid_i. Multi-dimensional loops, as
// in the original SSR hardware, are not described by the design and are not built.
//
// READ stream (WRITE = 0): requests addresses ahead of the core while the data FIFO plus the
// requests in flight leave room (credit scheme, so a response never finds the FIFO full);
// responses fill the FIFO; core_pop_i takes the head (core_rvalid_o = FIFO not empty).
// WRITE stream (WRITE = 1): core_push_i puts core_wdata_i into the FIFO (core_wready_o = not
// full); the head is stored at the next address while elements remain.
//
// Memory port: request valid/ready (mem_req_o.we tells the direction); responses return in
// request order, one per read request, with mem_rsp_valid_i; writes have no response.
module ssr_streamer
  import chain_pkg::*;
#(
  parameter bit          WRITE = 1'b0,
  parameter int unsigned DEPTH = SSR_DEPTH
) (
  input  logic     clk_i,
  input  logic     rst_ni,
  // configuration: start a new stream
  input  logic     cfg_valid_i,
  input  ssr_cfg_t cfg_i,
  output logic     busy_o,
  // core side
  output logic     core_rvalid_o,
  output fp_word_t core_rdata_o,
  input  logic     core_pop_i,
  output logic     core_wready_o,
  input  fp_word_t core_wdata_i,
  input  logic     core_push_i,
  // memory side
  output logic     mem_req_valid_o,
  input  logic     mem_req_ready_i,
  output mem_req_t mem_req_o,
  input  logic     mem_rsp_valid_i,
  input  fp_word_t mem_rsp_rdata_i
);

  localparam int unsigned PW = $clog2(DEPTH);
  localparam int unsigned CW = $clog2(DEPTH + 1);

  fp_word_t          fifo [DEPTH];
  logic [PW-1:0]     rd_ptr, wr_ptr;
  logic [CW-1:0]     fill;          // entries in the FIFO
  logic [CW-1:0]     inflight;      // read requests without response
  logic [ADDR_W-1:0] addr_q, stride_q;
  logic [CNT_W-1:0]  remain_q;      // elements still to request

  logic fifo_push, fifo_pop, req_fire;
  fp_word_t fifo_wdata;

  assign req_fire = mem_req_valid_o && mem_req_ready_i;

  if (WRITE) begin : g_write
    assign fifo_push       = core_push_i && core_wready_o;
    assign fifo_wdata      = core_wdata_i;
    assign fifo_pop        = req_fire;
    assign mem_req_valid_o = (remain_q != '0) && (fill != '0);
    assign core_wready_o   = fill != CW'(DEPTH);
    assign core_rvalid_o   = 1'b0;
    assign inflight        = '0;    // writes expect no response
  end else begin : g_read
    assign fifo_push       = mem_rsp_valid_i;
    assign fifo_wdata      = mem_rsp_rdata_i;
    assign fifo_pop        = core_pop_i && core_rvalid_o;
    assign mem_req_valid_o = (remain_q != '0) && (32'(fill) + 32'(inflight) < DEPTH);
    assign core_wready_o   = 1'b0;
    assign core_rvalid_o   = fill != '0;
    always_ff @(posedge clk_i or negedge rst_ni) begin
      if (!rst_ni) inflight <= '0;
      else         inflight <= inflight + CW'(req_fire) - CW'(mem_rsp_valid_i);
    end
  end

  assign core_rdata_o    = fifo[rd_ptr];
  assign mem_req_o.addr  = addr_q;
  assign mem_req_o.we    = WRITE;
  assign mem_req_o.wdata = WRITE ? fifo[rd_ptr] : '0;
  assign busy_o          = (remain_q != '0) || (inflight != '0) || (WRITE && fill != '0);

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      rd_ptr   <= '0;
      wr_ptr   <= '0;
      fill     <= '0;
      addr_q   <= '0;
      stride_q <= '0;
      remain_q <= '0;
    end else begin
      if (fifo_push) wr_ptr <= (wr_ptr == PW'(DEPTH-1)) ? '0 : wr_ptr + 1'b1;
      if (fifo_pop)  rd_ptr <= (rd_ptr == PW'(DEPTH-1)) ? '0 : rd_ptr + 1'b1;
      fill <= fill + CW'(fifo_push) - CW'(fifo_pop);
      if (cfg_valid_i) begin
        addr_q   <= cfg_i.base;
        stride_q <= cfg_i.stride;
        remain_q <= cfg_i.count;
      end else if (req_fire) begin
        addr_q   <= addr_q + stride_q;
        remain_q <= remain_q - 1'b1;
      end
    end
  end

  always_ff @(posedge clk_i) begin
    if (fifo_push) fifo[wr_ptr] <= fifo_wdata;
  end

  // protocol rules
  assert property (@(posedge clk_i) disable iff (!rst_ni)
                   mem_req_valid_o && !mem_req_ready_i |=> mem_req_valid_o && $stable(mem_req_o));
  assert property (@(posedge clk_i) disable iff (!rst_ni) !(WRITE == 0 && mem_rsp_valid_i && inflight == '0))
    else $error("ssr_streamer: response without request");
  assert property (@(posedge clk_i) disable iff (!rst_ni) !(core_pop_i && !core_rvalid_o && !WRITE))
    else $error("ssr_streamer: pop from an empty read stream");
  assert property (@(posedge clk_i) disable iff (!rst_ni) !(core_push_i && !core_wready_o && WRITE))
    else $error("ssr_streamer: push into a full write stream");

  initial assert (DEPTH >= 2 && (DEPTH & (DEPTH - 1)) == 0)
    else $error("ssr_streamer: DEPTH must be a power of two, at least 2");

endmodule
