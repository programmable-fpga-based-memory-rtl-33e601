// forwarding_unit: returns responses from both engines to the accelerator.
//
// Sources are the cache output buffer (single-word answers and write
// acknowledges) and the DMA output buffer (the words of bulk reads and the
// acknowledges of bulk writes). Cache responses go first when both wait,
// except that a DMA response stream, once started, is forwarded without
// interruption up to its word marked last. The response register is the
// only stage: valid/ready on all sides, one response per cycle.
module forwarding_unit
  import mc_pkg::*;
(
  input  logic    clk,
  input  logic    rst_n,
  input  logic    c_valid,
  output logic    c_ready,
  input  pe_rsp_t c_rsp,
  input  logic    d_valid,
  output logic    d_ready,
  input  pe_rsp_t d_rsp,
  output logic    out_valid,
  input  logic    out_ready,
  output pe_rsp_t out_rsp
);
  logic in_dma_burst, load, pick_dma;

  assign load     = !out_valid || out_ready;
  assign pick_dma = in_dma_burst || !c_valid;
  assign c_ready  = load && !pick_dma;
  assign d_ready  = load &&  pick_dma;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid    <= 1'b0;
      out_rsp      <= '0;
      in_dma_burst <= 1'b0;
    end else if (load) begin
      out_valid <= pick_dma ? d_valid : c_valid;
      out_rsp   <= pick_dma ? d_rsp : c_rsp;
      if (pick_dma && d_valid) in_dma_burst <= !d_rsp.last;
    end
  end
endmodule
