// dma_output_buffer: collects the words that the DMA buffer controllers
// return to the PEs and queues them for the forwarding unit.
//
// One DMA at a time is connected to the queue (round-robin among those with
// data), and it keeps the connection until it has sent the word marked last,
// so a transfer's words stay together. The queue is a FIFO of DEPTH entries
// with show-ahead valid/ready output.
module dma_output_buffer
  import mc_pkg::*;
#(
  parameter int unsigned NUM_DMA = 4,
  parameter int unsigned DEPTH   = 16
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic [NUM_DMA-1:0] in_valid,
  output logic [NUM_DMA-1:0] in_ready,
  input  pe_rsp_t            in_rsp [NUM_DMA],
  output logic               out_valid,
  input  logic               out_ready,
  output pe_rsp_t            out_rsp
);
  localparam int unsigned ID_W = (NUM_DMA > 1) ? $clog2(NUM_DMA) : 1;

  logic            locked, any, push, full, empty;
  logic [ID_W-1:0] cur, ptr, pick;
  logic [$clog2(DEPTH+1)-1:0] count;

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

  assign push = any && !full;
  always_comb begin
    in_ready = '0;
    in_ready[pick] = push;
  end

  sync_fifo #(.T(pe_rsp_t), .DEPTH(DEPTH)) u_fifo (
    .clk, .rst_n, .push, .din(in_rsp[pick]), .pop(out_ready), .dout(out_rsp),
    .full, .empty, .count
  );
  assign out_valid = !empty;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      locked <= 1'b0;
      cur    <= '0;
      ptr    <= '0;
    end else if (push) begin
      if (in_rsp[pick].last) begin
        locked <= 1'b0;
        ptr    <= (pick == ID_W'(NUM_DMA - 1)) ? '0 : pick + 1'b1;
      end else begin
        locked <= 1'b1;
        cur    <= pick;
      end
    end
  end
endmodule
