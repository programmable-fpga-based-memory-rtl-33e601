// mem_to_dma_forward: delivers lines read from memory to the DMA buffer
// controller that asked for them.
//
// The DMA id inside the memory tag selects the controller; the line index
// travels with the data so the controller can store lines that return in
// any order. One register stage: a line arriving in cycle t is presented to
// its DMA in cycle t+1 as a one-cycle pulse (no back-pressure, the data
// buffers always have room for the lines they requested).
module mem_to_dma_forward
  import mc_pkg::*;
#(
  parameter int unsigned NUM_DMA = 4
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic                  in_valid,
  input  mem_rsp_t              in_rsp,
  output logic [NUM_DMA-1:0]    out_valid,
  output logic [DMA_LINE_W-1:0] out_line,
  output logic [MEM_DATA_W-1:0] out_data
);
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= '0;
      out_line  <= '0;
      out_data  <= '0;
    end else begin
      out_valid <= '0;
      if (in_valid && in_rsp.tag.is_dma)
        out_valid <= NUM_DMA'(1) << in_rsp.tag.dma_id;
      out_line <= in_rsp.tag.line;
      out_data <= in_rsp.rdata;
    end
  end
endmodule
