// dma_selector: chooses which DMA buffer controller may send its memory
// requests to the path selector.
//
// Round-robin among the DMAs with a request pending; once a DMA is granted
// its first line request, the grant stays with it until its request marked
// last has been accepted, so the lines of one bulk transfer reach memory
// back to back. Combinational grant, valid/ready on both sides; the
// round-robin pointer moves past a DMA when its transfer ends.
module dma_selector
  import mc_pkg::*;
#(
  parameter int unsigned NUM_DMA = 4
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic [NUM_DMA-1:0] in_valid,
  output logic [NUM_DMA-1:0] in_ready,
  input  mem_req_t           in_req   [NUM_DMA],
  input  logic [NUM_DMA-1:0] in_first,
  input  logic [NUM_DMA-1:0] in_last,
  output logic               out_valid,
  input  logic               out_ready,
  output mem_req_t           out_req,
  output logic               out_first,
  output logic               out_last
);
  localparam int unsigned ID_W = (NUM_DMA > 1) ? $clog2(NUM_DMA) : 1;

  logic            locked;
  logic [ID_W-1:0] cur, ptr, pick;
  logic            any;

  always_comb begin
    int unsigned i;
    i    = 0;
    any  = 1'b0;
    pick = cur;
    if (locked) begin
      any = in_valid[cur];
    end else begin
      for (int k = NUM_DMA - 1; k >= 0; k--) begin
        i = (int'(ptr) + k) % NUM_DMA;
        if (in_valid[i]) begin
          any  = 1'b1;
          pick = ID_W'(i);
        end
      end
    end
  end

  always_comb begin
    in_ready = '0;
    in_ready[pick] = any && out_ready;
  end
  assign out_valid = any;
  assign out_req   = in_req[pick];
  assign out_first = in_first[pick];
  assign out_last  = in_last[pick];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      locked <= 1'b0;
      cur    <= '0;
      ptr    <= '0;
    end else if (out_valid && out_ready) begin
      if (out_last) begin
        locked <= 1'b0;
        ptr    <= (pick == ID_W'(NUM_DMA - 1)) ? '0 : pick + 1'b1;
      end else begin
        locked <= 1'b1;
        cur    <= pick;
      end
    end
  end
endmodule
