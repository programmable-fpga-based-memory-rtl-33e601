// tb_dma_engine: the DMA engine (request mapper, four buffer controllers,
// selector, memory-to-DMA forward, output buffer) against a memory model
// that answers reads out of order by tag. Four PEs send write transfers
// whose FLITs are interleaved on the single input, so the mapper must keep
// each PE's FLITs on its own DMA; a fifth transfer arrives while all DMAs
// are occupied (no_free must be seen). All regions are then read back by
// DMA reads and the words compared; line requests of one transfer must
// leave the engine back to back, and each PE gets exactly one write
// acknowledge per write transfer. Buffers are reduced to 2 KB.
// Follows the original's DMA flow (first FLIT claims a DMA, later FLITs
// follow the PE id, memory accessed once all FLITs are in); the interleaving
// pattern and sizes are chosen here.
module tb_dma_engine;
  import mc_pkg::*;
  localparam int ND = 4;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic in_valid = 0, in_ready, mreq_valid, mreq_ready = 0, mreq_first, mreq_last, mrsp_valid = 0;
  logic out_valid, out_ready = 0, no_free;
  flit_hdr_t in_hdr = '0;
  logic [APP_DATA_W-1:0] in_payload = '0;
  mem_req_t mreq;
  mem_rsp_t mrsp = '0;
  pe_rsp_t out_rsp;
  logic [ND-1:0] occupied;

  dma_engine #(.NUM_DMA(ND), .BUF_BYTES(2048), .OUT_DEPTH(16)) dut (.*);

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", msg); end
  endtask

  logic [MEM_DATA_W-1:0] mem [logic [MEM_ADDR_W-1:0]];
  mem_rsp_t rd_q[$];
  bit mem_hold = 1;
  int n_nofree = 0, max_occ = 0, acks [NUM_PE], words [NUM_PE], in_xfer = -1;

  function automatic logic [APP_DATA_W-1:0] pat(input int region, input int w);
    return {32'(region) ^ 32'h1357_0000, 32'(w)};
  endfunction
  function automatic logic [APP_ADDR_W-1:0] base_of(input int region);
    return APP_ADDR_W'(34'h0_4000_0000) + APP_ADDR_W'(region) * APP_ADDR_W'(34'h10_0000);
  endfunction

  always @(posedge clk) if (rst_n) begin
    if (no_free) n_nofree++;
    if ($countones(occupied) > max_occ) max_occ = $countones(occupied);
  end

  // memory model
  always @(negedge clk) if (rst_n) begin
    mreq_ready <= !mem_hold && $urandom_range(0, 3) != 0;
    out_ready  <= $urandom_range(0, 3) != 0;
    mrsp_valid <= 0;
    if (rd_q.size() > 0 && $urandom_range(0, 1) == 0) begin
      int k;
      k = $urandom_range(0, rd_q.size() - 1);
      mrsp_valid <= 1; mrsp <= rd_q[k];
      rd_q.delete(k);
    end
  end
  always @(posedge clk) if (rst_n && mreq_valid && mreq_ready) begin
    check(mreq.tag.is_dma, "DMA request without DMA tag");
    if (in_xfer >= 0) check(int'(mreq.tag.dma_id) == in_xfer, "transfers interleaved at the selector");
    check(mreq_first == (in_xfer < 0), "first mark");
    in_xfer = mreq_last ? -1 : int'(mreq.tag.dma_id);
    if (mreq.we) mem[mreq.addr] = mreq.wdata;
    else rd_q.push_back('{tag: mreq.tag, rdata: mem.exists(mreq.addr) ? mem[mreq.addr] : '0});
  end

  // responses, checked per PE
  int rd_region [NUM_PE];
  always @(posedge clk) if (rst_n && out_valid && out_ready) begin
    int p;
    p = int'(out_rsp.pe_id);
    check(out_rsp.from_dma, "response not marked DMA");
    if (out_rsp.is_write) acks[p]++;
    else begin
      check(out_rsp.data == pat(rd_region[p], words[p]), $sformatf("PE %0d word %0d", p, words[p]));
      words[p]++;
    end
  end

  task automatic put(input int pe, input access_e acc, input int region, input int w, input int nw);
    @(negedge clk);
    in_hdr = '0;
    in_hdr.pe_id = PE_ID_W'(pe); in_hdr.acc = acc;
    in_hdr.payload_size = PAYLOAD_SIZE_W'((acc == ACC_DMA_WR) ? 8 : 0);
    in_hdr.total_size = TOTAL_SIZE_W'(nw * 8);
    in_hdr.addr = base_of(region) + APP_ADDR_W'(w * 8);
    in_hdr.first = (w == 0); in_hdr.last = (acc == ACC_DMA_RD) || (w == nw - 1);
    in_payload = pat(region, w);
    in_valid = 1;
    #1;
    while (!in_ready) begin @(negedge clk); #1; end
    @(posedge clk); #1 in_valid = 0;
  endtask

  initial begin
    int nw [5] = '{64, 24, 256, 8, 40};
    int pos [NUM_PE];
    for (int p = 0; p < NUM_PE; p++) begin acks[p] = 0; words[p] = 0; pos[p] = 0; end
    repeat (3) @(posedge clk);
    #1 rst_n = 1;
    // four write transfers, FLITs interleaved at random: PE p writes region p
    while (pos[0] < nw[0] || pos[1] < nw[1] || pos[2] < nw[2] || pos[3] < nw[3]) begin
      int p;
      p = $urandom_range(0, NUM_PE - 1);
      if (pos[p] < nw[p]) begin put(p, ACC_DMA_WR, p, pos[p], nw[p]); pos[p]++; end
    end
    // a fifth transfer while the DMAs are still busy (the memory holds off
    // until then): region 4 from PE 0
    fork
      begin repeat (20) @(posedge clk); mem_hold = 0; end
    join_none
    for (int w = 0; w < nw[4]; w++) put(0, ACC_DMA_WR, 4, w, nw[4]);
    wait (acks[0] == 2 && acks[1] == 1 && acks[2] == 1 && acks[3] == 1);
    // read back: PE p reads region (p+1)%4, one after the other per PE
    for (int p = 0; p < NUM_PE; p++) begin rd_region[p] = (p + 1) % 4; put(p, ACC_DMA_RD, (p + 1) % 4, 0, nw[(p + 1) % 4]); end
    for (int p = 0; p < NUM_PE; p++) wait (words[p] == nw[(p + 1) % 4]);
    wait (occupied == '0);
    rd_region[3] = 4; words[3] = 0;
    put(3, ACC_DMA_RD, 4, 0, nw[4]);
    wait (words[3] == nw[4]);
    repeat (10) @(posedge clk);
    check(n_nofree > 0, "no_free never raised");
    check(max_occ == ND, $sformatf("at most %0d DMAs busy", max_occ));
    check(acks[0] == 2 && acks[1] == 1 && acks[2] == 1 && acks[3] == 1, "write acknowledges");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
