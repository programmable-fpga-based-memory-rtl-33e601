// tb_cache_engine: the cache engine (cache, miss buffer, output buffer)
// against a memory model with random ready and latency. Random cache-line
// reads and writes from four PEs over an address range several times the
// (reduced) cache size, with random back-pressure on the responses. In the
// first half a few lines are hit at full rate while the consumer is slow,
// so the output buffer's almost-full stall has to hold the pipeline. A
// reference memory of 64-bit words gives the expected read data; responses
// must come back in request order with the right PE and direction. Misses
// and write-backs must both occur.
// Cache sizes are reduced for speed (the default is 4096 lines, 4 ways);
// in-order responses follow from this design's blocking cache.
module tb_cache_engine;
  import mc_pkg::*;
  import tb_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic in_valid = 0, in_ready, mreq_valid, mreq_ready = 0, mrsp_valid = 0;
  logic out_valid, out_ready = 0, miss_seen, wb_seen;
  flit_hdr_t in_hdr = '0;
  logic [APP_DATA_W-1:0] in_payload = '0;
  mem_req_t mreq;
  logic [MEM_DATA_W-1:0] mrsp_data = '0;
  pe_rsp_t out_rsp;

  cache_engine #(.NUM_LINES(16), .WAYS(2), .OUT_DEPTH(16)) dut (.*);

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", msg); end
  endtask

  logic [MEM_DATA_W-1:0] mem [logic [MEM_ADDR_W-1:0]];
  logic [APP_DATA_W-1:0] ref_w [logic [APP_ADDR_W-1:0]];
  logic [MEM_ADDR_W-1:0] rd_q[$];
  int rd_delay = 0;
  pe_rsp_t exp_q[$];
  int n_req = 0, n_rsp = 0, n_miss = 0, n_wb = 0;

  always @(posedge clk) if (rst_n) begin
    if (miss_seen) n_miss++;
    if (wb_seen) n_wb++;
  end

  // memory model
  always @(negedge clk) if (rst_n) begin
    mreq_ready <= $urandom_range(0, 2) != 0;
    // slow consumer for the first half, so the output buffer fills
    out_ready  <= (n_req < 1500) ? ($urandom_range(0, 4) == 0) : ($urandom_range(0, 3) != 0);
    mrsp_valid <= 0;
    if (rd_q.size() > 0) begin
      if (rd_delay == 0) begin
        mrsp_valid <= 1;
        mrsp_data  <= mem.exists(rd_q[0]) ? mem[rd_q[0]] : line_init(rd_q[0]);
        void'(rd_q.pop_front());
        rd_delay = $urandom_range(2, 10);
      end else rd_delay--;
    end
  end
  always @(posedge clk) if (rst_n && mreq_valid && mreq_ready) begin
    if (mreq.we) mem[mreq.addr] = mreq.wdata;
    else rd_q.push_back(mreq.addr);
  end

  // responses
  always @(posedge clk) if (rst_n && out_valid && out_ready) begin
    check(exp_q.size() > 0, "response without request");
    if (exp_q.size() > 0) begin
      check(out_rsp.pe_id == exp_q[0].pe_id && out_rsp.is_write == exp_q[0].is_write && out_rsp.last &&
            !out_rsp.from_dma, "response framing");
      if (!exp_q[0].is_write)
        check(out_rsp.data == exp_q[0].data, $sformatf("read %0d data %h expected %h", n_rsp, out_rsp.data, exp_q[0].data));
      void'(exp_q.pop_front());
    end
    n_rsp++;
  end

  initial begin
    repeat (3) @(posedge clk);
    #1 rst_n = 1;
    while (n_req < 3000) begin
      logic [APP_ADDR_W-1:0] a;
      bit wr;
      pe_rsp_t e;
      @(negedge clk);
      in_valid = 0;
      if ($urandom_range(0, 4) != 0) begin
        // first half: 8 lines that stay cached (hits at full rate); second
        // half: 64 lines, 4x the 16-line cache
        a  = APP_ADDR_W'(34'h2_0000_0000) + APP_ADDR_W'({$urandom_range(0, (n_req < 1500) ? 7 : 63), 6'b0}) + APP_ADDR_W'({$urandom_range(0, 7), 3'b0});
        wr = $urandom_range(0, 2) == 0;
        in_hdr = '0;
        in_hdr.pe_id = PE_ID_W'($urandom); in_hdr.acc = wr ? ACC_CACHE_WR : ACC_CACHE_RD;
        in_hdr.payload_size = PAYLOAD_SIZE_W'(8); in_hdr.total_size = TOTAL_SIZE_W'(8);
        in_hdr.addr = a; in_hdr.first = 1; in_hdr.last = 1;
        in_payload = {$urandom, $urandom};
        in_valid = 1;
        #1;
        if (in_ready) begin
          e = '0; e.pe_id = in_hdr.pe_id; e.is_write = wr; e.last = 1;
          e.data = ref_w.exists(a) ? ref_w[a] : word_init(a);
          if (wr) ref_w[a] = in_payload;
          exp_q.push_back(e);
          n_req++;
        end
      end
    end
    @(negedge clk) in_valid = 0;
    wait (n_rsp == n_req);
    check(exp_q.size() == 0, "responses missing");
    check(n_miss > 0 && n_wb > 0, $sformatf("misses %0d write-backs %0d", n_miss, n_wb));
    $display("misses %0d write-backs %0d", n_miss, n_wb);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
