// dma_buffer_controller: one DMA of the DMA engine, serving one bulk
// transfer at a time.
//
// Status registers hold whether the DMA is occupied, the PE that owns it,
// the direction, the total size and the progress counters. The data buffer
// (BUF_BYTES, kept as 512-bit lines) holds the transfer's data and the
// address buffer the memory address of every line.
//
//   DMA write: the first FLIT claims the DMA; every FLIT's payload word is
//   written into the data buffer, and the FLIT that opens a line supplies
//   that line's memory address. Only when all FLITs are in (the FLIT marked
//   last) are the line writes issued, one per cycle when accepted. A single
//   write acknowledge then goes back to the PE and the DMA is freed.
//   DMA read: the single FLIT gives start address and total size. The line
//   reads (consecutive line addresses) are issued, returned lines are stored
//   by their tag's line index (they may return in any order), and when all
//   have arrived the data is streamed to the PE as 64-bit words, the final
//   one flagged last.
//
// Width conversion between 64-bit PE words and 512-bit memory lines happens
// in the data buffer. Memory requests carry tag {is_dma=1, DMA_ID, line} and
// first/last marks for the path selector. Sizes follow the paper's main
// configuration (16 KB buffer). Writes are assumed to be whole lines: the
// unused tail of a partial last line is written with stale buffer contents.
module dma_buffer_controller
  import mc_pkg::*;
#(
  parameter int unsigned BUF_BYTES = 16384,
  parameter int unsigned DMA_ID    = 0
) (
  input  logic                  clk,
  input  logic                  rst_n,
  // FLITs routed by the request mapper
  input  logic                  in_valid,
  output logic                  in_ready,
  input  flit_hdr_t             in_hdr,
  input  logic [APP_DATA_W-1:0] in_payload,
  // status registers visible to the mapper
  output logic                  occupied,
  output logic [PE_ID_W-1:0]    owner_pe,
  // memory requests to the DMA selector
  output logic                  mreq_valid,
  input  logic                  mreq_ready,
  output mem_req_t              mreq,
  output logic                  mreq_first,
  output logic                  mreq_last,
  // returned lines from the memory-to-DMA forward
  input  logic                  mrsp_valid,
  input  logic [DMA_LINE_W-1:0] mrsp_line,
  input  logic [MEM_DATA_W-1:0] mrsp_data,
  // words to the DMA output buffer
  output logic                  out_valid,
  input  logic                  out_ready,
  output pe_rsp_t               out_rsp
);
  localparam int unsigned LINES  = BUF_BYTES / LINE_BYTES;
  localparam int unsigned WORDS  = BUF_BYTES / WORD_BYTES;
  localparam int unsigned LI_W   = (LINES > 1) ? $clog2(LINES) : 1;
  localparam int unsigned LC_W   = $clog2(LINES + 1);
  localparam int unsigned WI_W   = $clog2(WORDS);
  localparam int unsigned WC_W   = $clog2(WORDS + 1);

  typedef enum logic [2:0] {FREE, COLLECT, ISSUE, WAIT_RD, SEND, ACK} state_e;

  state_e                  state;
  logic                    is_write;
  logic [TOTAL_SIZE_W-1:0] total, bytes_rcvd;
  logic [LC_W-1:0]         nlines, issue_idx, ret_cnt;
  logic [WC_W-1:0]         nwords, send_idx;
  logic [MEM_ADDR_W-1:0]   base_addr;

  logic [MEM_DATA_W-1:0]   data_buf [LINES];
  logic [MEM_ADDR_W-1:0]   addr_buf [LINES];

  // data buffer write port
  logic                      buf_we;
  logic [LI_W-1:0]           buf_wline;
  logic [WORDS_PER_LINE-1:0] buf_wmask;
  logic [MEM_DATA_W-1:0]     buf_wdata;
  logic [LI_W-1:0]           buf_rline;
  logic [MEM_DATA_W-1:0]     buf_rdata;

  logic                    take_in, take_req, take_out;
  logic [WI_W-1:0]         widx;
  logic [TOTAL_SIZE_W-1:0] in_total;

  assign in_ready = (state == FREE) || (state == COLLECT);
  assign take_in  = in_valid && in_ready;
  assign take_req = mreq_valid && mreq_ready;
  assign take_out = out_valid && out_ready;
  assign occupied = (state != FREE);
  assign widx     = (state == FREE) ? '0 : WI_W'(bytes_rcvd / WORD_BYTES);
  assign in_total = in_hdr.total_size;

  always_comb begin
    buf_we    = 1'b0;
    buf_wline = widx[WI_W-1 -: LI_W];
    buf_wmask = '0;
    buf_wdata = {WORDS_PER_LINE{in_payload}};
    if (mrsp_valid) begin
      buf_we    = 1'b1;
      buf_wline = LI_W'(mrsp_line);
      buf_wmask = '1;
      buf_wdata = mrsp_data;
    end else if (take_in && in_hdr.acc == ACC_DMA_WR) begin
      buf_we    = 1'b1;
      buf_wmask[widx[WORD_OFF_W-1:0]] = 1'b1;
    end
  end

  always_ff @(posedge clk) begin
    if (buf_we)
      for (int i = 0; i < WORDS_PER_LINE; i++)
        if (buf_wmask[i]) data_buf[buf_wline][i*APP_DATA_W +: APP_DATA_W] <= buf_wdata[i*APP_DATA_W +: APP_DATA_W];
    if (take_in && in_hdr.acc == ACC_DMA_WR && widx[WORD_OFF_W-1:0] == '0)
      addr_buf[widx[WI_W-1 -: LI_W]] <= line_mem_addr(in_hdr.addr);
  end

  assign buf_rline = (state == SEND) ? send_idx[WI_W-1 -: LI_W] : LI_W'(issue_idx);
  assign buf_rdata = data_buf[buf_rline];

  // memory requests
  always_comb begin
    mreq            = '0;
    mreq.we         = is_write;
    mreq.addr       = is_write ? addr_buf[LI_W'(issue_idx)]
                               : base_addr + (MEM_ADDR_W'(issue_idx) * MEM_ADDR_W'(UNITS_PER_LINE));
    mreq.tag.is_dma = 1'b1;
    mreq.tag.dma_id = MAX_DMA_W'(DMA_ID);
    mreq.tag.line   = DMA_LINE_W'(issue_idx);
    mreq.wdata      = buf_rdata;
    mreq_valid      = (state == ISSUE);
    mreq_first      = (issue_idx == '0);
    mreq_last       = (issue_idx == nlines - 1'b1);
  end

  // words to the PE
  always_comb begin
    out_rsp          = '0;
    out_rsp.pe_id    = owner_pe;
    out_rsp.from_dma = 1'b1;
    out_rsp.is_write = (state == ACK);
    out_rsp.last     = (state == ACK) || (send_idx == nwords - 1'b1);
    out_rsp.data     = (state == SEND) ? buf_rdata[send_idx[WORD_OFF_W-1:0]*APP_DATA_W +: APP_DATA_W] : '0;
    out_valid        = (state == SEND) || (state == ACK);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state      <= FREE;
      is_write   <= 1'b0;
      owner_pe   <= '0;
      total      <= '0;
      bytes_rcvd <= '0;
      nlines     <= '0;
      nwords     <= '0;
      issue_idx  <= '0;
      ret_cnt    <= '0;
      send_idx   <= '0;
      base_addr  <= '0;
    end else begin
      if (mrsp_valid) ret_cnt <= ret_cnt + 1'b1;
      unique case (state)
        FREE: if (take_in) begin
          owner_pe   <= in_hdr.pe_id;
          is_write   <= (in_hdr.acc == ACC_DMA_WR);
          total      <= in_total;
          nlines     <= LC_W'((in_total + TOTAL_SIZE_W'(LINE_BYTES - 1)) >> LINE_OFF_W);
          nwords     <= WC_W'((in_total + TOTAL_SIZE_W'(WORD_BYTES - 1)) >> $clog2(WORD_BYTES));
          base_addr  <= line_mem_addr(in_hdr.addr);
          bytes_rcvd <= TOTAL_SIZE_W'(in_hdr.payload_size);
          issue_idx  <= '0;
          ret_cnt    <= '0;
          send_idx   <= '0;
          state      <= (in_hdr.acc == ACC_DMA_RD || in_hdr.last) ? ISSUE : COLLECT;
        end
        COLLECT: if (take_in) begin
          bytes_rcvd <= bytes_rcvd + TOTAL_SIZE_W'(in_hdr.payload_size);
          if (in_hdr.last) state <= ISSUE;
        end
        ISSUE: if (take_req) begin
          issue_idx <= issue_idx + 1'b1;
          if (mreq_last) state <= is_write ? ACK : WAIT_RD;
        end
        WAIT_RD: if (ret_cnt == nlines) state <= SEND;
        SEND: if (take_out) begin
          send_idx <= send_idx + 1'b1;
          if (out_rsp.last) state <= FREE;
        end
        ACK: if (take_out) state <= FREE;
        default: state <= FREE;
      endcase
    end
  end

  assert property (@(posedge clk) disable iff (!rst_n)
                   take_in && state == FREE |-> in_hdr.first && in_total <= TOTAL_SIZE_W'(BUF_BYTES));
  assert property (@(posedge clk) disable iff (!rst_n) mrsp_valid |-> !is_write);
endmodule
