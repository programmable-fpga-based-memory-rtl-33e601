// cache_miss_buffer: the cache engine's link to memory.
//
// It takes the request that missed in the cache (one at a time, the cache
// blocks on a miss), sends a read of the whole 512-bit line towards the path
// selector, waits for the line and presents it, together with the original
// request, to the cache's MEM pipeline as a fill. Dirty lines evicted by the
// MEM pipeline are queued here and sent as line writes; queued write-backs
// go out before the next line read so that a read never overtakes the
// write-back of the same line.
//
// Interface: miss_* and wb_* are one-cycle pulses from the cache; mreq_* is
// valid/ready towards the path selector; mrsp_valid carries the returned
// line; fill_* is valid/ready into the cache. The paper names this buffer in
// its overview figure; its behaviour here is this design's choice.
module cache_miss_buffer
  import mc_pkg::*;
#(
  parameter int unsigned WB_DEPTH = 4
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic                  miss_valid,
  input  flit_hdr_t             miss_hdr,
  input  logic [APP_DATA_W-1:0] miss_wdata,
  input  logic                  wb_valid,
  input  logic [MEM_ADDR_W-1:0] wb_addr,
  input  logic [MEM_DATA_W-1:0] wb_data,
  output logic                  mreq_valid,
  input  logic                  mreq_ready,
  output mem_req_t              mreq,
  input  logic                  mrsp_valid,
  input  logic [MEM_DATA_W-1:0] mrsp_data,
  output logic                  fill_valid,
  input  logic                  fill_ready,
  output flit_hdr_t             fill_hdr,
  output logic [APP_DATA_W-1:0] fill_wdata,
  output logic [MEM_DATA_W-1:0] fill_line,
  output logic                  busy
);
  typedef enum logic [1:0] {IDLE, RD_REQ, WAIT, FILL} state_e;
  typedef struct packed {
    logic [MEM_ADDR_W-1:0] addr;
    logic [MEM_DATA_W-1:0] data;
  } wb_t;

  state_e state;
  wb_t    wb_in, wb_head;
  logic   wb_empty, wb_full, wb_pop;
  logic [$clog2(WB_DEPTH+1)-1:0] wb_count;

  assign wb_in = '{addr: wb_addr, data: wb_data};

  sync_fifo #(.T(wb_t), .DEPTH(WB_DEPTH)) u_wb_fifo (
    .clk, .rst_n, .push(wb_valid), .din(wb_in), .pop(wb_pop), .dout(wb_head),
    .full(wb_full), .empty(wb_empty), .count(wb_count)
  );

  always_comb begin
    mreq        = '0;
    mreq_valid  = 1'b0;
    wb_pop      = 1'b0;
    if (!wb_empty) begin
      mreq_valid = 1'b1;
      mreq.we    = 1'b1;
      mreq.addr  = wb_head.addr;
      mreq.wdata = wb_head.data;
      wb_pop     = mreq_ready;
    end else if (state == RD_REQ) begin
      mreq_valid = 1'b1;
      mreq.we    = 1'b0;
      mreq.addr  = line_mem_addr(fill_hdr.addr);
    end
  end

  assign fill_valid = (state == FILL);
  assign busy       = (state != IDLE) || !wb_empty;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state      <= IDLE;
      fill_hdr   <= '0;
      fill_wdata <= '0;
      fill_line  <= '0;
    end else begin
      unique case (state)
        IDLE:   if (miss_valid) begin
                  fill_hdr   <= miss_hdr;
                  fill_wdata <= miss_wdata;
                  state      <= RD_REQ;
                end
        RD_REQ: if (wb_empty && mreq_ready) state <= WAIT;
        WAIT:   if (mrsp_valid) begin
                  fill_line <= mrsp_data;
                  state     <= FILL;
                end
        FILL:   if (fill_ready) state <= IDLE;
        default: state <= IDLE;
      endcase
    end
  end

  assert property (@(posedge clk) disable iff (!rst_n) miss_valid |-> state == IDLE);
  assert property (@(posedge clk) disable iff (!rst_n) wb_valid |-> !wb_full);
endmodule
