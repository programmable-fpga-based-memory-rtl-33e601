// dma_request_mapper: sends each DMA FLIT to the DMA buffer controller that
// owns its transfer.
//
// The first FLIT of a bulk transfer is given to the lowest-numbered DMA
// whose status register says free; the mapper records the PE id of origin
// for that DMA. Later FLITs carrying the same PE id go to the occupied DMA
// recorded for that PE. When no DMA is free a first FLIT waits (in_ready
// low). Combinational routing with valid/ready on both sides; the table is
// updated at the accepting clock edge, and the chosen DMA shows occupied
// from the next cycle. One transfer per PE at a time is assumed.
module dma_request_mapper
  import mc_pkg::*;
#(
  parameter int unsigned NUM_DMA = 4
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic                  in_valid,
  output logic                  in_ready,
  input  flit_hdr_t             in_hdr,
  input  logic [APP_DATA_W-1:0] in_payload,
  input  logic [NUM_DMA-1:0]    occupied,
  output logic [NUM_DMA-1:0]    out_valid,
  input  logic [NUM_DMA-1:0]    out_ready,
  output flit_hdr_t             out_hdr,
  output logic [APP_DATA_W-1:0] out_payload,
  output logic                  no_free       // a first FLIT is waiting for a free DMA
);
  localparam int unsigned ID_W = (NUM_DMA > 1) ? $clog2(NUM_DMA) : 1;

  logic [PE_ID_W-1:0] map_pe [NUM_DMA];
  logic               found;
  logic [ID_W-1:0]    target;

  always_comb begin
    found  = 1'b0;
    target = '0;
    for (int i = NUM_DMA - 1; i >= 0; i--) begin
      if (in_hdr.first ? !occupied[i] : (occupied[i] && map_pe[i] == in_hdr.pe_id)) begin
        found  = 1'b1;
        target = ID_W'(i);
      end
    end
  end

  always_comb begin
    out_valid = '0;
    out_valid[target] = in_valid && found;
  end
  assign in_ready    = found && out_ready[target];
  assign out_hdr     = in_hdr;
  assign out_payload = in_payload;
  assign no_free     = in_valid && in_hdr.first && !found;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < NUM_DMA; i++) map_pe[i] <= '0;
    end else if (in_valid && in_ready && in_hdr.first) begin
      map_pe[target] <= in_hdr.pe_id;
    end
  end
endmodule
