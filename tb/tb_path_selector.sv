// tb_path_selector: checks the arbitration rules between the cache engine
// and the DMA engine: a cache request wins when both wait; once a DMA
// transfer's first line request is accepted, cache requests are held until
// the transfer's last line request has gone out; requests are passed
// unchanged; returned lines are steered by tag to the cache or the DMA side.
module tb_path_selector;
  import mc_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic c_valid = 0, c_ready, d_valid = 0, d_ready, d_first = 0, d_last = 0;
  logic out_valid, out_ready = 1, rsp_valid = 0, c_rsp_valid, d_rsp_valid, dma_lock;
  mem_req_t c_req = '0, d_req = '0, out_req;
  mem_rsp_t rsp = '0, d_rsp;
  logic [MEM_DATA_W-1:0] c_rsp_data;

  path_selector dut (.*);

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", msg); end
  endtask

  mem_req_t order [$];
  always @(posedge clk) if (rst_n && out_valid && out_ready) order.push_back(out_req);

  function automatic mem_req_t mk(input bit dma, input int n);
    mem_req_t r;
    r = '0; r.tag.is_dma = dma; r.tag.line = DMA_LINE_W'(n); r.addr = MEM_ADDR_W'(n * 8);
    r.wdata = MEM_DATA_W'(n) << 100;
    return r;
  endfunction

  initial begin
    int dn;
    repeat (3) @(posedge clk);
    #1 rst_n = 1;
    // both request: cache first
    @(negedge clk);
    c_valid = 1; c_req = mk(0, 1);
    d_valid = 1; d_req = mk(1, 100); d_first = 1; d_last = 0;
    #1 check(c_ready && !d_ready && out_req == c_req, "cache not preferred");
    @(posedge clk); #1 c_valid = 0;
    // DMA transfer of 4 lines; a cache request arrives after the first
    dn = 0;
    while (dn < 4) begin
      @(negedge clk);
      d_req = mk(1, 100 + dn); d_first = (dn == 0); d_last = (dn == 3);
      if (dn == 1) begin c_valid = 1; c_req = mk(0, 2); end
      out_ready = (dn != 2) || $urandom_range(0, 1);
      #1;
      if (dn >= 1) check(!c_ready && dma_lock, "cache not held during DMA transfer");
      if (d_ready) dn++;
    end
    @(posedge clk); #1 d_valid = 0; out_ready = 1;
    @(negedge clk); #1 check(c_ready && !dma_lock, "cache not released after last");
    @(posedge clk); #1 c_valid = 0;
    repeat (2) @(posedge clk);
    check(order.size() == 6, $sformatf("%0d requests out", order.size()));
    if (order.size() == 6) begin
      check(order[0] == mk(0, 1), "order 0");
      for (int i = 0; i < 4; i++) check(order[1+i] == mk(1, 100 + i), $sformatf("order %0d", i + 1));
      check(order[5] == mk(0, 2), "order 5");
    end
    // response steering
    @(negedge clk);
    rsp_valid = 1; rsp.tag = '{is_dma: 1'b1, dma_id: 3'd2, line: 12'd7}; rsp.rdata = 512'hABCD;
    #1 check(d_rsp_valid && !c_rsp_valid && d_rsp == rsp, "DMA response not steered");
    @(negedge clk);
    rsp.tag = '0; rsp.rdata = 512'h1234;
    #1 check(c_rsp_valid && !d_rsp_valid && c_rsp_data == 512'h1234, "cache response not steered");
    @(negedge clk) rsp_valid = 0;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
