// cache_engine: serves single-word ("cache-line") accesses with low latency.
//
// It joins the cache (PE and MEM pipelines), the cache miss buffer (line
// reads and dirty write-backs to memory) and the cache output buffer
// (responses waiting for the forwarding unit). FLITs arrive from the FLIT
// generator with valid/ready; line requests leave towards the path selector
// with valid/ready; returned lines come back as one-cycle pulses. The engine
// processes its requests in arrival order: the cache blocks on a miss.
module cache_engine
  import mc_pkg::*;
#(
  parameter int unsigned NUM_LINES = 4096,
  parameter int unsigned WAYS      = 4,
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
  input  logic                  mrsp_valid,
  input  logic [MEM_DATA_W-1:0] mrsp_data,
  output logic                  out_valid,
  input  logic                  out_ready,
  output pe_rsp_t               out_rsp,
  output logic                  miss_seen,   // pulse: a miss left the PE pipeline
  output logic                  wb_seen      // pulse: a dirty line was written back
);
  logic                  miss_valid, fill_valid, fill_ready, wb_valid, rsp_valid, stall;
  logic                  mem_en, blocked, busy;
  flit_hdr_t             miss_hdr, fill_hdr;
  logic [APP_DATA_W-1:0] miss_wdata, fill_wdata;
  logic [MEM_DATA_W-1:0] fill_line, wb_data;
  logic [MEM_ADDR_W-1:0] wb_addr;
  pe_rsp_t               rsp;

  cache #(.NUM_LINES(NUM_LINES), .WAYS(WAYS)) u_cache (
    .clk, .rst_n,
    .pe_valid(in_valid), .pe_ready(in_ready), .pe_hdr(in_hdr), .pe_wdata(in_payload),
    .rsp_stall(stall),
    .miss_valid, .miss_hdr, .miss_wdata,
    .fill_valid, .fill_ready, .fill_hdr, .fill_wdata, .fill_line,
    .wb_valid, .wb_addr, .wb_data,
    .rsp_valid, .rsp, .mem_en, .blocked
  );

  cache_miss_buffer u_miss (
    .clk, .rst_n,
    .miss_valid, .miss_hdr, .miss_wdata,
    .wb_valid, .wb_addr, .wb_data,
    .mreq_valid, .mreq_ready, .mreq,
    .mrsp_valid, .mrsp_data,
    .fill_valid, .fill_ready, .fill_hdr, .fill_wdata, .fill_line, .busy
  );

  cache_output_buffer #(.DEPTH(OUT_DEPTH)) u_out (
    .clk, .rst_n, .in_valid(rsp_valid), .in_rsp(rsp), .almost_full(stall),
    .out_valid, .out_ready, .out_rsp
  );

  assign miss_seen = miss_valid;
  assign wb_seen   = wb_valid;
endmodule
