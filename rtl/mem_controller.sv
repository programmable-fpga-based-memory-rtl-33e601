// mem_controller: top level of the programmable memory controller.
//
// Data flow: accelerator request -> FLIT generator -> cache engine (ACC_CACHE_*)
// or DMA engine (ACC_DMA_*) -> path selector -> memory scheduler -> memory
// interface (DDR4 IP, outside this design). Read data from the memory
// interface returns through the path selector to the engine that asked;
// responses to the PEs leave through the forwarding unit.
//
// Ports: one request port shared by all PEs (the PE id travels in the
// header), one response port, and the user side of the memory interface:
// dram_req_* (valid/ready, ready = DRAM availability) and dram_rsp_* (read
// data with the request's tag). sched_bypass switches the scheduler to its
// bypass mode at run time.
//
// Parameters (defaults from the paper's main configuration where it gives
// one): cache of NUM_LINES = 4096 lines of 512 bits, WAYS = 4; NUM_DMA = 4
// DMAs of BUF_BYTES = 16 KB; scheduler batch BATCH = 32 (one of the two best
// sizes reported), TIMEOUT = 40 cycles (top of the 4-40 range, value chosen
// here so a batch of 32 can fill from back-to-back requests); ENABLE_SCHED = 0 removes the scheduler and connects the path
// selector straight to the memory interface.
module mem_controller
  import mc_pkg::*;
#(
  parameter int unsigned NUM_LINES    = 4096,
  parameter int unsigned WAYS         = 4,
  parameter int unsigned NUM_DMA      = 4,
  parameter int unsigned BUF_BYTES    = 16384,
  parameter int unsigned BATCH        = 32,
  parameter int unsigned TIMEOUT      = 40,
  parameter bit          ENABLE_SCHED = 1'b1
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic                  sched_bypass,
  // accelerator
  input  logic                  req_valid,
  output logic                  req_ready,
  input  pe_req_hdr_t           req_hdr,
  input  logic [APP_DATA_W-1:0] req_payload,
  output logic                  rsp_valid,
  input  logic                  rsp_ready,
  output pe_rsp_t               rsp,
  // memory interface (user side)
  output logic                  dram_req_valid,
  input  logic                  dram_req_ready,
  output mem_req_t              dram_req,
  input  logic                  dram_rsp_valid,
  input  mem_rsp_t              dram_rsp
);
  logic                  c_valid, c_ready, d_valid, d_ready;
  flit_hdr_t             c_hdr, d_hdr;
  logic [APP_DATA_W-1:0] c_payload, d_payload;

  logic                  cm_valid, cm_ready, dm_valid, dm_ready, dm_first, dm_last;
  mem_req_t              cm_req, dm_req;
  logic                  crsp_valid, drsp_valid;
  logic [MEM_DATA_W-1:0] crsp_data;
  mem_rsp_t              drsp;

  logic                  co_valid, co_ready, do_valid, do_ready;
  pe_rsp_t               co_rsp, do_rsp;

  logic                  ps_valid, ps_ready, dma_lock;
  mem_req_t              ps_req;
  logic                  miss_seen, wb_seen, no_free;
  logic [NUM_DMA-1:0]    occupied;

  flit_generator u_flit (
    .clk, .rst_n,
    .req_valid, .req_ready, .req_hdr, .req_payload,
    .c_valid, .c_ready, .c_hdr, .c_payload,
    .d_valid, .d_ready, .d_hdr, .d_payload
  );

  cache_engine #(.NUM_LINES(NUM_LINES), .WAYS(WAYS)) u_cache (
    .clk, .rst_n,
    .in_valid(c_valid), .in_ready(c_ready), .in_hdr(c_hdr), .in_payload(c_payload),
    .mreq_valid(cm_valid), .mreq_ready(cm_ready), .mreq(cm_req),
    .mrsp_valid(crsp_valid), .mrsp_data(crsp_data),
    .out_valid(co_valid), .out_ready(co_ready), .out_rsp(co_rsp),
    .miss_seen, .wb_seen
  );

  dma_engine #(.NUM_DMA(NUM_DMA), .BUF_BYTES(BUF_BYTES)) u_dma (
    .clk, .rst_n,
    .in_valid(d_valid), .in_ready(d_ready), .in_hdr(d_hdr), .in_payload(d_payload),
    .mreq_valid(dm_valid), .mreq_ready(dm_ready), .mreq(dm_req),
    .mreq_first(dm_first), .mreq_last(dm_last),
    .mrsp_valid(drsp_valid), .mrsp(drsp),
    .out_valid(do_valid), .out_ready(do_ready), .out_rsp(do_rsp),
    .occupied, .no_free
  );

  path_selector u_path (
    .clk, .rst_n,
    .c_valid(cm_valid), .c_ready(cm_ready), .c_req(cm_req),
    .d_valid(dm_valid), .d_ready(dm_ready), .d_req(dm_req), .d_first(dm_first), .d_last(dm_last),
    .out_valid(ps_valid), .out_ready(ps_ready), .out_req(ps_req),
    .rsp_valid(dram_rsp_valid), .rsp(dram_rsp),
    .c_rsp_valid(crsp_valid), .c_rsp_data(crsp_data),
    .d_rsp_valid(drsp_valid), .d_rsp(drsp),
    .dma_lock
  );

  if (ENABLE_SCHED) begin : g_sched
    logic batch_full, batch_timeout, batch_type, bypassed;
    memory_scheduler #(.BATCH(BATCH), .TIMEOUT(TIMEOUT)) u_sched (
      .clk, .rst_n, .bypass(sched_bypass),
      .in_valid(ps_valid), .in_ready(ps_ready), .in_req(ps_req),
      .out_valid(dram_req_valid), .out_ready(dram_req_ready), .out_req(dram_req),
      .batch_full, .batch_timeout, .batch_type, .bypassed
    );
  end else begin : g_no_sched
    assign dram_req_valid = ps_valid;
    assign dram_req       = ps_req;
    assign ps_ready       = dram_req_ready;
  end

  forwarding_unit u_fwd (
    .clk, .rst_n,
    .c_valid(co_valid), .c_ready(co_ready), .c_rsp(co_rsp),
    .d_valid(do_valid), .d_ready(do_ready), .d_rsp(do_rsp),
    .out_valid(rsp_valid), .out_ready(rsp_ready), .out_rsp(rsp)
  );
endmodule
