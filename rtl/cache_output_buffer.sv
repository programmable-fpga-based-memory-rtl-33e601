// cache_output_buffer: queue of cache responses waiting for the forwarding
// unit.
//
// Responses leave the cache as one-cycle pulses (PE pipeline hits and
// answers to misses from the MEM pipeline) and cannot be held inside the
// cache, so this buffer raises almost_full while fewer than MARGIN entries
// are free; the cache stops its pipelines on almost_full and the responses
// already in flight still find room. Show-ahead output with valid/ready.
// The paper names the buffer; depth and margin are this design's choices.
module cache_output_buffer
  import mc_pkg::*;
#(
  parameter int unsigned DEPTH  = 16,
  parameter int unsigned MARGIN = 4
) (
  input  logic    clk,
  input  logic    rst_n,
  input  logic    in_valid,
  input  pe_rsp_t in_rsp,
  output logic    almost_full,
  output logic    out_valid,
  input  logic    out_ready,
  output pe_rsp_t out_rsp
);
  logic                       full, empty;
  logic [$clog2(DEPTH+1)-1:0] count;

  sync_fifo #(.T(pe_rsp_t), .DEPTH(DEPTH)) u_fifo (
    .clk, .rst_n, .push(in_valid), .din(in_rsp), .pop(out_ready), .dout(out_rsp),
    .full, .empty, .count
  );

  assign out_valid   = !empty;
  assign almost_full = (count >= ($clog2(DEPTH+1))'(DEPTH - MARGIN));

  assert property (@(posedge clk) disable iff (!rst_n) in_valid |-> !full);
endmodule
