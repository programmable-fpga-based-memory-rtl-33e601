// path_selector: the meeting point of the cache engine and the DMA engine
// on the way to memory.
//
// Requests: when both engines present a line request, the cache's goes first
// (a cache-line access is short, a bulk transfer long). But once the first
// line request of a DMA transfer has been accepted, the path is locked to
// the DMA engine and the cache waits until the transfer's last line request
// has gone out. Responses: lines read from memory are steered by their tag,
// to the cache miss buffer (is_dma = 0) or to the DMA engine (is_dma = 1).
// Combinational valid/ready paths; only the lock is a register. The priority
// rule and the stall come from the paper; locking until the last request is
// issued (rather than until the data has returned) is this design's reading.
module path_selector
  import mc_pkg::*;
(
  input  logic                  clk,
  input  logic                  rst_n,
  // cache engine
  input  logic                  c_valid,
  output logic                  c_ready,
  input  mem_req_t              c_req,
  // DMA engine
  input  logic                  d_valid,
  output logic                  d_ready,
  input  mem_req_t              d_req,
  input  logic                  d_first,
  input  logic                  d_last,
  // towards the memory scheduler
  output logic                  out_valid,
  input  logic                  out_ready,
  output mem_req_t              out_req,
  // read data from memory
  input  logic                  rsp_valid,
  input  mem_rsp_t              rsp,
  output logic                  c_rsp_valid,
  output logic [MEM_DATA_W-1:0] c_rsp_data,
  output logic                  d_rsp_valid,
  output mem_rsp_t              d_rsp,
  output logic                  dma_lock
);
  logic grant_dma;

  assign grant_dma = dma_lock || (!c_valid && d_valid);
  assign out_valid = grant_dma ? d_valid : c_valid;
  assign out_req   = grant_dma ? d_req : c_req;
  assign c_ready   = !grant_dma && out_ready;
  assign d_ready   =  grant_dma && out_ready;

  assign c_rsp_valid = rsp_valid && !rsp.tag.is_dma;
  assign c_rsp_data  = rsp.rdata;
  assign d_rsp_valid = rsp_valid && rsp.tag.is_dma;
  assign d_rsp       = rsp;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) dma_lock <= 1'b0;
    else if (d_valid && d_ready) dma_lock <= !d_last;
  end

  assert property (@(posedge clk) disable iff (!rst_n) d_valid && d_ready && !dma_lock |-> d_first);
endmodule
