// dma_engine: serves bulk transfers, several in parallel.
//
// DMA FLITs from the FLIT generator pass the request mapper, which gives
// each transfer its own DMA buffer controller (NUM_DMA of them, each with a
// BUF_BYTES data buffer). Their line requests are merged by the DMA selector
// (one transfer's lines back to back) and go to the path selector; read
// lines coming back from memory are routed by tag through the
// memory-to-DMA forward; the words for the PEs leave through the DMA output
// buffer. Defaults follow the paper's main configuration: 4 DMAs of 16 KB.
module dma_engine
  import mc_pkg::*;
#(
  parameter int unsigned NUM_DMA   = 4,
  parameter int unsigned BUF_BYTES = 16384,
  parameter int unsigned OUT_DEPTH = 16
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic                  in_valid,
  output logic                  in_ready,
  input  flit_hdr_t             in_hdr,
  input  logic [APP_DATA_W-1:0] in_payload,
  output logic                  mreq_valid,
  input  logic                  mreq_ready,
  output mem_req_t              mreq,
  output logic                  mreq_first,
  output logic                  mreq_last,
  input  logic                  mrsp_valid,
  input  mem_rsp_t              mrsp,
  output logic                  out_valid,
  input  logic                  out_ready,
  output pe_rsp_t               out_rsp,
  output logic [NUM_DMA-1:0]    occupied,
  output logic                  no_free
);
  logic [NUM_DMA-1:0]    map_valid, map_ready;
  flit_hdr_t             map_hdr;
  logic [APP_DATA_W-1:0] map_payload;
  logic [PE_ID_W-1:0]    owner [NUM_DMA];

  logic [NUM_DMA-1:0]    rq_valid, rq_ready, rq_first, rq_last;
  mem_req_t              rq [NUM_DMA];
  logic [NUM_DMA-1:0]    fw_valid;
  logic [DMA_LINE_W-1:0] fw_line;
  logic [MEM_DATA_W-1:0] fw_data;
  logic [NUM_DMA-1:0]    ob_valid, ob_ready;
  pe_rsp_t               ob_rsp [NUM_DMA];

  dma_request_mapper #(.NUM_DMA(NUM_DMA)) u_mapper (
    .clk, .rst_n, .in_valid, .in_ready, .in_hdr, .in_payload, .occupied,
    .out_valid(map_valid), .out_ready(map_ready), .out_hdr(map_hdr), .out_payload(map_payload),
    .no_free
  );

  for (genvar i = 0; i < NUM_DMA; i++) begin : g_dma
    dma_buffer_controller #(.BUF_BYTES(BUF_BYTES), .DMA_ID(i)) u_ctrl (
      .clk, .rst_n,
      .in_valid(map_valid[i]), .in_ready(map_ready[i]), .in_hdr(map_hdr), .in_payload(map_payload),
      .occupied(occupied[i]), .owner_pe(owner[i]),
      .mreq_valid(rq_valid[i]), .mreq_ready(rq_ready[i]), .mreq(rq[i]),
      .mreq_first(rq_first[i]), .mreq_last(rq_last[i]),
      .mrsp_valid(fw_valid[i]), .mrsp_line(fw_line), .mrsp_data(fw_data),
      .out_valid(ob_valid[i]), .out_ready(ob_ready[i]), .out_rsp(ob_rsp[i])
    );
  end

  dma_selector #(.NUM_DMA(NUM_DMA)) u_sel (
    .clk, .rst_n, .in_valid(rq_valid), .in_ready(rq_ready), .in_req(rq),
    .in_first(rq_first), .in_last(rq_last),
    .out_valid(mreq_valid), .out_ready(mreq_ready), .out_req(mreq),
    .out_first(mreq_first), .out_last(mreq_last)
  );

  mem_to_dma_forward #(.NUM_DMA(NUM_DMA)) u_fwd (
    .clk, .rst_n, .in_valid(mrsp_valid), .in_rsp(mrsp),
    .out_valid(fw_valid), .out_line(fw_line), .out_data(fw_data)
  );

  dma_output_buffer #(.NUM_DMA(NUM_DMA), .DEPTH(OUT_DEPTH)) u_out (
    .clk, .rst_n, .in_valid(ob_valid), .in_ready(ob_ready), .in_rsp(ob_rsp),
    .out_valid, .out_ready, .out_rsp
  );
endmodule
