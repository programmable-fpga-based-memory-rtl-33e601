// flit_generator: entry point of the memory controller.
//
// Every request from the accelerator (PE id, access type, payload size, total
// request size, byte address, payload) is encoded as one FLIT: a header bus
// and a separate payload bus that travel side by side. The header gains two
// framing bits, first and last, that mark the boundaries of a bulk (DMA)
// transfer. For a DMA write the generator keeps, per PE, the number of bytes
// still expected and sets first on the FLIT that opens a transfer and last on
// the one that completes it; a DMA read and every cache access are a single
// FLIT (first = last = 1). The FLIT is then steered by access type to the
// cache engine (ACC_CACHE_*) or to the DMA engine (ACC_DMA_*).
//
// Timing: one register stage (the FLIT is presented one cycle after the
// request is accepted). Valid/ready on both sides; a stalled destination
// holds the FLIT and back-pressures req_ready. The paper names the FLIT
// generator and its inputs; the framing bits, the per-PE byte counters and
// the single register stage are this design's choices.
module flit_generator
  import mc_pkg::*;
(
  input  logic                  clk,
  input  logic                  rst_n,
  // accelerator requests
  input  logic                  req_valid,
  output logic                  req_ready,
  input  pe_req_hdr_t           req_hdr,
  input  logic [APP_DATA_W-1:0] req_payload,
  // FLITs to the cache engine
  output logic                  c_valid,
  input  logic                  c_ready,
  output flit_hdr_t             c_hdr,
  output logic [APP_DATA_W-1:0] c_payload,
  // FLITs to the DMA engine
  output logic                  d_valid,
  input  logic                  d_ready,
  output flit_hdr_t             d_hdr,
  output logic [APP_DATA_W-1:0] d_payload
);
  logic                  out_valid, out_to_dma;
  flit_hdr_t             out_hdr;
  logic [APP_DATA_W-1:0] out_payload;
  logic [TOTAL_SIZE_W-1:0] remaining [NUM_PE];  // bytes still due per PE (DMA writes)

  logic      out_taken;
  flit_hdr_t enc_hdr;
  logic [TOTAL_SIZE_W-1:0] rem_now, rem_next;

  assign out_taken = out_valid && (out_to_dma ? d_ready : c_ready);
  assign req_ready = !out_valid || out_taken;

  // FLIT encoding
  always_comb begin
    rem_now  = remaining[req_hdr.pe_id];
    enc_hdr.pe_id        = req_hdr.pe_id;
    enc_hdr.acc          = req_hdr.acc;
    enc_hdr.payload_size = req_hdr.payload_size;
    enc_hdr.total_size   = req_hdr.total_size;
    enc_hdr.addr         = req_hdr.addr;
    enc_hdr.first        = 1'b1;
    enc_hdr.last         = 1'b1;
    rem_next             = rem_now;
    if (req_hdr.acc == ACC_DMA_WR) begin
      enc_hdr.first = (rem_now == '0);
      if (rem_now == '0)
        rem_next = (req_hdr.total_size > TOTAL_SIZE_W'(req_hdr.payload_size))
                 ? req_hdr.total_size - TOTAL_SIZE_W'(req_hdr.payload_size) : '0;
      else
        rem_next = (rem_now > TOTAL_SIZE_W'(req_hdr.payload_size))
                 ? rem_now - TOTAL_SIZE_W'(req_hdr.payload_size) : '0;
      enc_hdr.last = (rem_next == '0);
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid  <= 1'b0;
      out_to_dma <= 1'b0;
      out_hdr    <= '0;
      out_payload <= '0;
      for (int i = 0; i < NUM_PE; i++) remaining[i] <= '0;
    end else begin
      if (out_taken) out_valid <= 1'b0;
      if (req_valid && req_ready) begin
        out_valid   <= 1'b1;
        out_to_dma  <= req_hdr.acc[1];   // path selection by access type
        out_hdr     <= enc_hdr;
        out_payload <= req_payload;
        remaining[req_hdr.pe_id] <= rem_next;
      end
    end
  end

  assign c_valid   = out_valid && !out_to_dma;
  assign d_valid   = out_valid &&  out_to_dma;
  assign c_hdr     = out_hdr;
  assign d_hdr     = out_hdr;
  assign c_payload = out_payload;
  assign d_payload = out_payload;
endmodule
