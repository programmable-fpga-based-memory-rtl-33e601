// tb_cache: random reads and writes from a pool of lines larger than a small
// cache (16 lines, 2 ways), so hits, misses, evictions and dirty write-backs
// all occur. The testbench plays the miss buffer and memory: it answers
// each miss after a random delay with the line as memory holds it and
// applies write-backs to that memory. Every response is compared, in
// request order, with a reference memory updated at issue; the hit latency
// through the four PE stages is checked (the response register is loaded 3
// clock edges after the accepting edge), 
// as are back-to-back hits at one per cycle.
module tb_cache;
  import mc_pkg::*;
  import tb_pkg::*;
  localparam int NL = 16, W = 2, NREQ = 3000;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0, cycle = 0;
  always @(posedge clk) cycle <= cycle + 1;

  logic pe_valid = 0, pe_ready, rsp_stall = 0;
  flit_hdr_t pe_hdr = '0;
  logic [APP_DATA_W-1:0] pe_wdata = '0;
  logic miss_valid, fill_valid = 0, fill_ready, wb_valid, rsp_valid, mem_en, blocked;
  flit_hdr_t miss_hdr, fill_hdr = '0;
  logic [APP_DATA_W-1:0] miss_wdata, fill_wdata = '0;
  logic [MEM_DATA_W-1:0] fill_line = '0, wb_data;
  logic [MEM_ADDR_W-1:0] wb_addr;
  pe_rsp_t rsp;

  cache #(.NUM_LINES(NL), .WAYS(W)) dut (.*);

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", msg); end
  endtask

  logic [MEM_DATA_W-1:0] gold [logic [MEM_ADDR_W-1:0]];   // reference contents
  logic [MEM_DATA_W-1:0] dram [logic [MEM_ADDR_W-1:0]];   // what memory holds
  function automatic logic [MEM_DATA_W-1:0] rd(ref logic [MEM_DATA_W-1:0] m [logic [MEM_ADDR_W-1:0]], input logic [MEM_ADDR_W-1:0] a);
    return m.exists(a) ? m[a] : line_init(a);
  endfunction

  typedef struct { bit wr; logic [APP_DATA_W-1:0] data; logic [PE_ID_W-1:0] pe; int t; } exp_t;
  exp_t expq [$];
  int n_rsp = 0, n_miss = 0, n_wb = 0, n_fast = 0, n_b2b = 0, last_rsp_cycle = -10;

  // responses
  always @(posedge clk) if (rst_n && rsp_valid) begin
    exp_t e;
    check(expq.size() > 0, "response without request");
    if (expq.size() > 0) begin
      e = expq.pop_front();
      check(rsp.is_write == e.wr && rsp.pe_id == e.pe && (e.wr || rsp.data == e.data),
            $sformatf("rsp %0d: wr %0d data %h expected %h", n_rsp, rsp.is_write, rsp.data, e.data));
      if (cycle - e.t == 3) n_fast++;
      check(cycle - e.t >= 3, $sformatf("response after %0d cycles", cycle - e.t));
    end
    if (cycle == last_rsp_cycle + 1) n_b2b++;
    last_rsp_cycle = cycle;
    n_rsp++;
  end

  bit stall_on = 0;
  always @(negedge clk) rsp_stall <= stall_on && ($urandom_range(0, 15) == 0);

  // memory side: write-backs and fills
  always @(posedge clk) if (rst_n && wb_valid) begin
    dram[wb_addr] = wb_data;
    n_wb++;
  end
  initial begin
    forever begin
      @(posedge clk);
      if (rst_n && miss_valid) begin
        flit_hdr_t h; logic [APP_DATA_W-1:0] d;
        h = miss_hdr; d = miss_wdata; n_miss++;
        repeat ($urandom_range(2, 9)) @(posedge clk);
        @(negedge clk);
        fill_valid = 1; fill_hdr = h; fill_wdata = d; fill_line = rd(dram, line_mem_addr(h.addr));
        #1;
        while (!fill_ready) begin @(negedge clk); #1; end
        @(posedge clk); #1 fill_valid = 0;
      end
    end
  end

  task automatic issue(input bit wr, input logic [APP_ADDR_W-1:0] a, input logic [APP_DATA_W-1:0] d);
    exp_t e;
    logic [MEM_ADDR_W-1:0] la;
    logic [MEM_DATA_W-1:0] l;
    @(negedge clk);
    pe_valid = 1;
    pe_hdr = '0;
    pe_hdr.pe_id = PE_ID_W'($urandom);
    pe_hdr.acc = wr ? ACC_CACHE_WR : ACC_CACHE_RD;
    pe_hdr.addr = a; pe_hdr.payload_size = 8; pe_hdr.total_size = 8;
    pe_hdr.first = 1; pe_hdr.last = 1;
    pe_wdata = d;
    #1;
    while (!pe_ready) begin @(negedge clk); #1; end
    la = line_mem_addr(a);
    l = rd(gold, la);
    e.wr = wr; e.pe = pe_hdr.pe_id; e.t = cycle + 1;
    e.data = l[a[5:3]*APP_DATA_W +: APP_DATA_W];
    if (wr) begin l[a[5:3]*APP_DATA_W +: APP_DATA_W] = d; gold[la] = l; end
    expq.push_back(e);
    @(posedge clk); #1 pe_valid = 0;
  endtask

  initial begin
    repeat (3) @(posedge clk);
    #1 rst_n = 1;
    // back-to-back hits: warm one line, then 8 reads of it in a row
    issue(0, 34'h1000, 0);
    repeat (30) @(posedge clk);
    for (int i = 0; i < 8; i++) issue(0, 34'h1000 + 34'(i * 8), 0);
    repeat (20) @(posedge clk);
    stall_on = 1;
    // random traffic over 40 lines (5 per set for 8 sets of 2 ways)
    for (int n = 0; n < NREQ; n++) begin
      logic [APP_ADDR_W-1:0] a;
      a = {20'h0, 5'($urandom_range(0, 4)), 3'($urandom_range(0, 7)), 3'($urandom), 3'b000};
      issue($urandom_range(0, 2) == 0, a, {$urandom, $urandom});
      if ($urandom_range(0, 9) == 0) repeat ($urandom_range(1, 5)) @(posedge clk);
    end
    stall_on = 0;
    // read every line back
    for (int s = 0; s < 5; s++)
      for (int t = 0; t < 8; t++)
        for (int w = 0; w < 8; w++) issue(0, {20'h0, 5'(s), 3'(t), 3'(w), 3'b000}, 0);
    repeat (100) @(posedge clk);
    check(expq.size() == 0, $sformatf("%0d responses missing", expq.size()));
    check(n_miss > 100 && n_wb > 50, $sformatf("misses %0d write-backs %0d", n_miss, n_wb));
    check(n_fast > 100, $sformatf("%0d hits at 4-cycle latency", n_fast));
    check(n_b2b >= 7, $sformatf("%0d back-to-back responses", n_b2b));
    $display("responses %0d misses %0d write-backs %0d", n_rsp, n_miss, n_wb);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired: blocked %0d mem_en %0d s1 %0d s2 %0d s3 %0d fill_valid %0d expq %0d", blocked, mem_en, dut.s1_v, dut.s2_v, dut.s3_v, fill_valid, expq.size());
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
