// tb_cache_miss_buffer: plays the cache and the memory. Each miss must
// produce one line read at the line address; the returned line must come
// back as a fill together with the missed request. Write-backs queued
// before or during a miss must leave first, unchanged and in order. The
// memory side has random ready and latency; busy is checked throughout.
// Write-back-first ordering and the single outstanding miss are this design's
// choices; the original only names the block.
module tb_cache_miss_buffer;
  import mc_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic miss_valid = 0, wb_valid = 0, mreq_valid, mreq_ready = 0, mrsp_valid = 0;
  logic fill_valid, fill_ready = 0, busy;
  flit_hdr_t miss_hdr = '0, fill_hdr;
  logic [APP_DATA_W-1:0] miss_wdata = '0, fill_wdata;
  logic [MEM_ADDR_W-1:0] wb_addr = '0;
  logic [MEM_DATA_W-1:0] wb_data = '0, mrsp_data = '0, fill_line;
  mem_req_t mreq;

  cache_miss_buffer #(.WB_DEPTH(4)) dut (.*);

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", msg); end
  endtask

  mem_req_t exp_wb[$];
  int n_wb = 0, n_rd = 0, pending_rd = 0;
  logic [MEM_ADDR_W-1:0] rd_addr;

  // memory: random ready; a read is answered after a random delay
  always @(negedge clk) if (rst_n) mreq_ready <= $urandom_range(0, 2) != 0;
  always @(posedge clk) if (rst_n && mreq_valid && mreq_ready) begin
    if (mreq.we) begin
      check(exp_wb.size() > 0 && mreq.addr == exp_wb[0].addr && mreq.wdata == exp_wb[0].wdata,
            "write-back differs or out of order");
      if (exp_wb.size() > 0) void'(exp_wb.pop_front());
      n_wb++;
    end else begin
      check(exp_wb.size() == 0, "line read overtook a queued write-back");
      check(pending_rd == 0, "second line read for one miss");
      rd_addr = mreq.addr; pending_rd = 1; n_rd++;
    end
  end

  task automatic push_wb();
    @(negedge clk);
    wb_valid = 1;
    wb_addr  = MEM_ADDR_W'($urandom) & ~MEM_ADDR_W'(7);
    wb_data  = {16{$urandom}};
    exp_wb.push_back('{we: 1'b1, addr: wb_addr, tag: '0, wdata: wb_data});
    @(negedge clk) wb_valid = 0;
  endtask

  initial begin
    repeat (3) @(posedge clk);
    #1 rst_n = 1;
    @(negedge clk) check(!busy && !fill_valid && !mreq_valid, "idle after reset");
    for (int m = 0; m < 30; m++) begin
      flit_hdr_t h;
      logic [APP_DATA_W-1:0] wd;
      logic [MEM_DATA_W-1:0] line;
      int nwb;
      nwb = $urandom_range(0, 3);
      for (int k = 0; k < nwb; k++) push_wb();
      h = '0;
      h.addr = APP_ADDR_W'({$urandom, 2'b0});
      h.acc  = (m % 2) ? ACC_CACHE_WR : ACC_CACHE_RD;
      h.pe_id = PE_ID_W'(m);
      wd = {$urandom, $urandom};
      @(negedge clk);
      miss_valid = 1; miss_hdr = h; miss_wdata = wd;
      if (m % 3 == 0) begin wb_valid = 1; wb_addr = 31'h100 + 31'(m * 8); wb_data = {16{32'(m)}};
        exp_wb.push_back('{we: 1'b1, addr: wb_addr, tag: '0, wdata: wb_data}); end
      @(negedge clk);
      miss_valid = 0; wb_valid = 0;
      check(busy, "not busy during a miss");
      wait (pending_rd == 1);
      check(rd_addr == line_mem_addr(h.addr), $sformatf("read address %h for %h", rd_addr, h.addr));
      repeat ($urandom_range(1, 12)) @(negedge clk);
      check(!fill_valid, "fill before the line came back");
      line = {16{$urandom}};
      mrsp_valid = 1; mrsp_data = line;
      @(negedge clk) mrsp_valid = 0; pending_rd = 0;
      check(fill_valid && fill_hdr == h && fill_wdata == wd && fill_line == line, "fill differs");
      repeat ($urandom_range(0, 3)) begin @(negedge clk) check(fill_valid, "fill dropped without ready"); end
      fill_ready = 1;
      @(negedge clk) fill_ready = 0;
      check(!fill_valid, "fill held after ready");
    end
    repeat (20) @(negedge clk);
    check(exp_wb.size() == 0 && !busy, "write-backs left behind");
    check(n_rd == 30, $sformatf("%0d line reads for 30 misses", n_rd));
    $display("write-backs %0d", n_wb);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
