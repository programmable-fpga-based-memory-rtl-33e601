// tb_mem_controller: end-to-end test of the whole controller at its default
// parameters (4096-line 4-way cache, four 16 KB DMAs, batch 32, timeout 40)
// against the behavioural DRAM model.
//
// Four PEs share the request port. The test runs cache reads and writes
// (with misses, hits and dirty evictions in one set), four DMA write
// transfers whose FLITs are interleaved (four DMAs busy at once), a fifth
// transfer that has to wait for a free DMA, DMA reads of written and of
// untouched memory (including one full 16 KB buffer), cache traffic mixed
// with DMA traffic (the path selector locks the cache out while a transfer
// is issued) and a phase with the scheduler in bypass mode. Cache and DMA
// use disjoint address ranges, as the controller's consistency rules ask.
// Every response is checked against a reference memory, per PE and per
// engine in order; each mechanism is counted and must have happened.
module tb_mem_controller;
  import mc_pkg::*;
  import tb_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0, cycle = 0;
  always @(posedge clk) cycle <= cycle + 1;

  logic sched_bypass = 0, req_valid = 0, req_ready, rsp_valid, rsp_ready = 1;
  pe_req_hdr_t req_hdr = '0;
  logic [APP_DATA_W-1:0] req_payload = '0;
  pe_rsp_t rsp;
  logic dram_req_valid, dram_req_ready, dram_rsp_valid;
  mem_req_t dram_req;
  mem_rsp_t dram_rsp;

  mem_controller dut (.*);
  dram_model u_dram (.clk, .rst_n, .req_valid(dram_req_valid), .req_ready(dram_req_ready),
                     .req(dram_req), .rsp_valid(dram_rsp_valid), .rsp(dram_rsp));

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", msg); end
  endtask

  // reference memory, 64-bit words by byte address >> 3
  logic [APP_DATA_W-1:0] gold [logic [APP_ADDR_W-4:0]];
  function automatic logic [APP_DATA_W-1:0] gword(input logic [APP_ADDR_W-1:0] a);
    return gold.exists(a[APP_ADDR_W-1:3]) ? gold[a[APP_ADDR_W-1:3]] : word_init(a);
  endfunction

  typedef struct { bit wr; bit last; logic [APP_DATA_W-1:0] data; } exp_t;
  exp_t cq [NUM_PE][$];    // expected cache responses per PE
  exp_t dq [NUM_PE][$];    // expected DMA responses per PE
  int n_rsp = 0;

  always @(posedge clk) if (rst_n && rsp_valid && rsp_ready) begin
    exp_t e;
    if (rsp.from_dma) begin
      check(dq[rsp.pe_id].size() > 0, "unexpected DMA response");
      if (dq[rsp.pe_id].size() > 0) begin
        e = dq[rsp.pe_id].pop_front();
        check(rsp.is_write == e.wr && rsp.last == e.last && (e.wr || rsp.data == e.data),
              $sformatf("DMA rsp pe %0d: wr %0d last %0d data %h, expected %0d %0d %h",
                        rsp.pe_id, rsp.is_write, rsp.last, rsp.data, e.wr, e.last, e.data));
      end
    end else begin
      check(cq[rsp.pe_id].size() > 0, "unexpected cache response");
      if (cq[rsp.pe_id].size() > 0) begin
        e = cq[rsp.pe_id].pop_front();
        check(rsp.is_write == e.wr && (e.wr || rsp.data == e.data),
              $sformatf("cache rsp pe %0d: wr %0d data %h, expected %0d %h",
                        rsp.pe_id, rsp.is_write, rsp.data, e.wr, e.data));
      end
    end
    n_rsp++;
  end
  always @(negedge clk) rsp_ready <= ($urandom_range(0, 7) != 0);

  // ---------------- mechanism counters ----------------
  int n_hit = 0, n_miss = 0, n_wb = 0, n_dma4 = 0, n_nofree = 0, n_lock_stall = 0;
  int n_full = 0, n_tmo = 0, n_type = 0, n_byp = 0, n_cache_rsp = 0;
  always @(posedge clk) if (rst_n) begin
    n_miss += int'(dut.u_cache.miss_seen);
    n_wb   += int'(dut.u_cache.wb_seen);
    if (dut.u_cache.u_cache.s3_v && !dut.u_cache.u_cache.mem_en && !dut.u_cache.u_cache.rsp_stall) n_hit++;
    if (&dut.u_dma.occupied) n_dma4++;
    n_nofree += int'(dut.u_dma.no_free);
    if (dut.u_path.dma_lock && dut.u_path.c_valid) n_lock_stall++;
    n_full += int'(dut.g_sched.batch_full);
    n_tmo  += int'(dut.g_sched.batch_timeout);
    n_type += int'(dut.g_sched.batch_type);
    n_byp  += int'(dut.g_sched.bypassed);
  end

  // ---------------- request drivers ----------------
  bit port_busy = 0;   // one driver at a time on the shared request port
  task automatic send(input pe_req_hdr_t h, input logic [APP_DATA_W-1:0] p);
    @(negedge clk);
    while (port_busy) @(negedge clk);
    port_busy = 1;
    req_valid = 1; req_hdr = h; req_payload = p;
    #1;
    while (!req_ready) begin @(negedge clk); #1; end
    @(posedge clk); #1 req_valid = 0;
    port_busy = 0;
  endtask

  task automatic cache_op(input int pe, input bit wr, input logic [APP_ADDR_W-1:0] a, input logic [APP_DATA_W-1:0] d);
    pe_req_hdr_t h;
    exp_t e;
    h = '0; h.pe_id = PE_ID_W'(pe); h.acc = wr ? ACC_CACHE_WR : ACC_CACHE_RD;
    h.payload_size = PAYLOAD_SIZE_W'(WORD_BYTES); h.total_size = TOTAL_SIZE_W'(WORD_BYTES); h.addr = a;
    e.wr = wr; e.last = 1; e.data = gword(a);
    if (wr) gold[a[APP_ADDR_W-1:3]] = d;
    cq[pe].push_back(e);
    send(h, d);
  endtask

  task automatic dma_read(input int pe, input logic [APP_ADDR_W-1:0] a, input int bytes);
    pe_req_hdr_t h;
    exp_t e;
    h = '0; h.pe_id = PE_ID_W'(pe); h.acc = ACC_DMA_RD; h.payload_size = 0;
    h.total_size = TOTAL_SIZE_W'(bytes); h.addr = a;
    for (int i = 0; i < bytes / WORD_BYTES; i++) begin
      e.wr = 0; e.last = (i == bytes / WORD_BYTES - 1); e.data = gword(a + APP_ADDR_W'(i * WORD_BYTES));
      dq[pe].push_back(e);
    end
    send(h, 0);
  endtask

  // DMA writes from several PEs at once, FLITs interleaved round robin
  task automatic dma_writes(input int npe, input int first_pe, input logic [APP_ADDR_W-1:0] base, input int bytes);
    for (int p = 0; p < npe; p++) begin
      exp_t e; e.wr = 1; e.last = 1; e.data = 0;
      dq[(first_pe + p) % NUM_PE].push_back(e);
    end
    for (int i = 0; i < bytes / WORD_BYTES; i++)
      for (int p = 0; p < npe; p++) begin
        pe_req_hdr_t h;
        logic [APP_ADDR_W-1:0] a;
        logic [APP_DATA_W-1:0] d;
        a = base + APP_ADDR_W'(p * 32'h10000 + i * WORD_BYTES);
        d = {$urandom, $urandom};
        h = '0; h.pe_id = PE_ID_W'((first_pe + p) % NUM_PE); h.acc = ACC_DMA_WR;
        h.payload_size = PAYLOAD_SIZE_W'(WORD_BYTES); h.total_size = TOTAL_SIZE_W'(bytes); h.addr = a;
        gold[a[APP_ADDR_W-1:3]] = d;
        send(h, d);
      end
  endtask

  task automatic drain(input string phase);
    int t;
    t = 0;
    while (t < 200000) begin
      bit empty;
      empty = 1;
      for (int p = 0; p < NUM_PE; p++) if (cq[p].size() != 0 || dq[p].size() != 0) empty = 0;
      if (empty) break;
      @(posedge clk); t++;
    end
    check(t < 200000, $sformatf("%s: responses missing", phase));
    if (t >= 200000)
      for (int p = 0; p < NUM_PE; p++) $display("  pe %0d: %0d cache, %0d DMA responses outstanding", p, cq[p].size(), dq[p].size());
    repeat (20) @(posedge clk);
  endtask

  localparam logic [APP_ADDR_W-1:0] DMA_BASE = 34'h1_0000_0000;

  initial begin
    repeat (3) @(posedge clk);
    #1 rst_n = 1;
    repeat (2) @(posedge clk);

    // 1. cache: words of a few lines, then six lines mapping to one set
    for (int i = 0; i < 64; i++) cache_op(i % NUM_PE, i % 3 == 0, 34'h4000 + 34'($urandom_range(0, 31) * 8), {$urandom, $urandom});
    for (int r = 0; r < 3; r++)
      for (int t = 0; t < 6; t++) cache_op(t % NUM_PE, 1'(r == 0), 34'h8040 + 34'(t) * 34'h10000, {$urandom, $urandom});
    drain("cache");

    // 2. four DMA writes at once (1 KB each), then a fifth transfer while they run
    fork
      dma_writes(4, 0, DMA_BASE, 1024);
      begin
        repeat (40) @(posedge clk);
        wait (&dut.u_dma.occupied);
      end
    join
    dma_writes(1, 0, DMA_BASE + 34'h8_0000, 256);   // has to wait for a free DMA
    drain("DMA writes");

    // 3. DMA reads of written and untouched memory, one full 16 KB buffer
    for (int p = 0; p < NUM_PE; p++) dma_read(p, DMA_BASE + 34'(p) * 34'h10000, 1024);
    dma_read(1, DMA_BASE + 34'h40_0000, 16384);
    drain("DMA reads");

    // 4. cache and DMA traffic mixed
    fork
      dma_read(2, DMA_BASE + 34'h10000, 1024);
      for (int i = 0; i < 40; i++) cache_op(3, i % 2 == 0, 34'hC000 + 34'(i) * 34'h40, {$urandom, $urandom});
    join
    dma_writes(2, 0, DMA_BASE + 34'h20_0000, 512);
    drain("mixed");

    // 5. scheduler bypass
    sched_bypass = 1;
    for (int i = 0; i < 16; i++) cache_op(i % NUM_PE, 1'(i % 2), 34'h2_0000 + 34'(i) * 34'h40, {$urandom, $urandom});
    dma_read(0, DMA_BASE + 34'h20_0000, 512);
    drain("bypass");
    sched_bypass = 0;

    $display("responses %0d | cache hits %0d misses %0d write-backs %0d | all DMAs busy %0d cycles, waits for a free DMA %0d",
             n_rsp, n_hit, n_miss, n_wb, n_dma4, n_nofree);
    $display("cache held by DMA lock %0d cycles | batches: full %0d timeout %0d type %0d | bypassed %0d | DRAM row hits %0d first %0d conflicts %0d",
             n_lock_stall, n_full, n_tmo, n_type, n_byp, u_dram.hits, u_dram.firsts, u_dram.conflicts);
    check(n_hit > 0,        "no cache hit");
    check(n_miss > 0,       "no cache miss");
    check(n_wb > 0,         "no dirty write-back");
    check(n_dma4 > 0,       "never four DMAs busy at once");
    check(n_nofree > 0,     "never waited for a free DMA");
    check(n_lock_stall > 0, "cache never held back by a DMA transfer");
    check(n_full > 0,       "no batch closed full");
    check(n_tmo > 0,        "no batch closed by timeout");
    check(n_type > 0,       "no batch closed by a type change");
    check(n_byp > 0,        "bypass never used");
    check(u_dram.hits > 0,  "no DRAM row hit");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (1000000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
