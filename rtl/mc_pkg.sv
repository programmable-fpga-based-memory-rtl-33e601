// mc_pkg: widths, encodings and bundle types shared by every block of the
// programmable memory controller.
//
// The controller sits between an accelerator (one request port shared by all
// processing elements, PEs) and a DDR4 memory interface. Requests are turned
// into FLITs (flow control units) that travel either to the cache engine
// (single-word "cache-line" accesses) or to the DMA engine (bulk transfers).
// Both engines send line-sized memory requests through the path selector and
// the batch-reordering memory scheduler to the memory interface.
//
// Numbers that follow the paper: 512-bit memory data, 31-bit memory interface
// address (the DDR4 interface of the evaluation board). Choices of this
// design: 64-bit PE data, 34-bit PE byte address (inside the 28-37 bit range
// the paper allows), four PEs, the memory address counted in 8-byte DRAM bus
// words, and the bank/row split of that address used by the scheduler.
package mc_pkg;

  // ---------------- overall design ----------------
  localparam int unsigned MEM_DATA_W  = 512;              // memory interface data width (bits)
  localparam int unsigned MEM_ADDR_W  = 31;               // memory interface address (8-byte units)
  localparam int unsigned APP_DATA_W  = 64;               // PE data width (bits)
  localparam int unsigned APP_ADDR_W  = 34;               // PE byte address
  localparam int unsigned NUM_PE      = 4;
  localparam int unsigned PE_ID_W     = (NUM_PE > 1) ? $clog2(NUM_PE) : 1;

  localparam int unsigned LINE_BYTES     = MEM_DATA_W / 8;          // 64
  localparam int unsigned WORD_BYTES     = APP_DATA_W / 8;          // 8
  localparam int unsigned WORDS_PER_LINE = MEM_DATA_W / APP_DATA_W; // 8
  localparam int unsigned LINE_OFF_W     = $clog2(LINE_BYTES);      // 6
  localparam int unsigned WORD_OFF_W     = $clog2(WORDS_PER_LINE);  // 3
  localparam int unsigned BUS_BYTES      = 8;                       // DRAM bus word
  localparam int unsigned UNITS_PER_LINE = LINE_BYTES / BUS_BYTES;  // 8

  // largest bulk transfer: 256 KB (top of the paper's range)
  localparam int unsigned TOTAL_SIZE_W   = 19;
  localparam int unsigned PAYLOAD_SIZE_W = $clog2(WORD_BYTES) + 1;

  // ---------------- memory address split (scheduler key) ----------------
  // memory address (8-byte units): [9:0] column, [13:10] bank group + bank,
  // [30:14] row.
  localparam int unsigned COL_W  = 10;
  localparam int unsigned BANK_W = 4;
  localparam int unsigned ROW_W  = MEM_ADDR_W - COL_W - BANK_W;     // 17
  localparam int unsigned ROWKEY_W = BANK_W + ROW_W;                // "modified row index"

  // ---------------- memory tags ----------------
  localparam int unsigned MAX_DMA_W  = 3;   // up to 8 parallel DMAs
  localparam int unsigned DMA_LINE_W = 12;  // up to 4096 lines (256 KB) per buffer
  localparam int unsigned MEM_TAG_W  = 1 + MAX_DMA_W + DMA_LINE_W;

  typedef enum logic [1:0] {
    ACC_CACHE_RD = 2'd0,
    ACC_CACHE_WR = 2'd1,
    ACC_DMA_RD   = 2'd2,
    ACC_DMA_WR   = 2'd3
  } access_e;

  // request as presented by the accelerator
  typedef struct packed {
    logic [PE_ID_W-1:0]        pe_id;
    access_e                   acc;
    logic [PAYLOAD_SIZE_W-1:0] payload_size;  // bytes carried by this request
    logic [TOTAL_SIZE_W-1:0]   total_size;    // bytes of the whole transfer
    logic [APP_ADDR_W-1:0]     addr;          // byte address
  } pe_req_hdr_t;

  // FLIT header: the request header plus framing of bulk transfers
  typedef struct packed {
    logic [PE_ID_W-1:0]        pe_id;
    access_e                   acc;
    logic [PAYLOAD_SIZE_W-1:0] payload_size;
    logic [TOTAL_SIZE_W-1:0]   total_size;
    logic [APP_ADDR_W-1:0]     addr;
    logic                      first;
    logic                      last;
  } flit_hdr_t;

  typedef struct packed {
    logic                   is_dma;
    logic [MAX_DMA_W-1:0]   dma_id;
    logic [DMA_LINE_W-1:0]  line;
  } mem_tag_t;

  // line-sized request to memory
  typedef struct packed {
    logic                   we;
    logic [MEM_ADDR_W-1:0]  addr;
    mem_tag_t               tag;
    logic [MEM_DATA_W-1:0]  wdata;
  } mem_req_t;

  // read data returned by memory
  typedef struct packed {
    mem_tag_t               tag;
    logic [MEM_DATA_W-1:0]  rdata;
  } mem_rsp_t;

  // response to the accelerator
  typedef struct packed {
    logic [PE_ID_W-1:0]     pe_id;
    logic                   from_dma;
    logic                   is_write;   // write acknowledge, data unused
    logic                   last;       // last word of the response
    logic [APP_DATA_W-1:0]  data;
  } pe_rsp_t;

  function automatic logic [MEM_ADDR_W-1:0] line_mem_addr(input logic [APP_ADDR_W-1:0] a);
    return {a[APP_ADDR_W-1:LINE_OFF_W], {($clog2(UNITS_PER_LINE)){1'b0}}};
  endfunction

  function automatic logic [ROWKEY_W-1:0] row_key(input logic [MEM_ADDR_W-1:0] a);
    return {a[COL_W +: BANK_W], a[MEM_ADDR_W-1 -: ROW_W]};
  endfunction

endpackage
