// tb_flit_generator: sends cache accesses, DMA reads and interleaved DMA
// write transfers of two PEs with random back-pressure on both outputs, and
// checks that every FLIT reaches the right path unchanged, in order, with
// first/last marking the first and final FLIT of each DMA write transfer,
// and that an idle generator presents a FLIT one cycle after accepting it.
module tb_flit_generator;
  import mc_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0, cycle = 0;
  always @(posedge clk) cycle <= cycle + 1;

  logic req_valid = 0, req_ready, c_valid, c_ready = 1, d_valid, d_ready = 1;
  pe_req_hdr_t req_hdr = '0;
  logic [APP_DATA_W-1:0] req_payload = '0, c_payload, d_payload;
  flit_hdr_t c_hdr, d_hdr;
  bit bp = 0;

  flit_generator dut (.*);

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", msg); end
  endtask

  typedef struct { flit_hdr_t h; logic [APP_DATA_W-1:0] p; int t; } fl_t;
  fl_t cexp [$], dexp [$];
  int n_first = 0, n_last = 0, n_fast = 0;

  always @(negedge clk) begin
    c_ready <= !bp || $urandom_range(0, 1);
    d_ready <= !bp || $urandom_range(0, 1);
  end

  always @(posedge clk) if (rst_n) begin
    if (c_valid && c_ready) begin
      fl_t e;
      check(cexp.size() > 0, "unexpected cache FLIT");
      if (cexp.size() > 0) begin
        e = cexp.pop_front();
        check(c_hdr == e.h && c_payload == e.p, "cache FLIT differs");
        if (cycle - e.t == 1) n_fast++;
      end
    end
    if (d_valid && d_ready) begin
      fl_t e;
      check(dexp.size() > 0, "unexpected DMA FLIT");
      if (dexp.size() > 0) begin
        e = dexp.pop_front();
        check(d_hdr == e.h && d_payload == e.p,
              $sformatf("DMA FLIT differs: first %0d last %0d, expected %0d %0d", d_hdr.first, d_hdr.last, e.h.first, e.h.last));
        if (cycle - e.t == 1) n_fast++;
        n_first += int'(d_hdr.first);
        n_last  += int'(d_hdr.last);
      end
    end
  end

  task automatic send(input int pe, input access_e acc, input int psz, input int tot, input logic [APP_ADDR_W-1:0] a, input bit first, input bit last);
    fl_t e;
    @(negedge clk);
    req_valid = 1;
    req_hdr.pe_id = PE_ID_W'(pe); req_hdr.acc = acc; req_hdr.payload_size = PAYLOAD_SIZE_W'(psz);
    req_hdr.total_size = TOTAL_SIZE_W'(tot); req_hdr.addr = a;
    req_payload = {$urandom, $urandom};
    #1;
    while (!req_ready) begin @(negedge clk); #1; end
    e.h = '{pe_id: PE_ID_W'(pe), acc: acc, payload_size: PAYLOAD_SIZE_W'(psz), total_size: TOTAL_SIZE_W'(tot),
            addr: a, first: first, last: last};
    e.p = req_payload; e.t = cycle + 1;
    if (acc[1]) dexp.push_back(e); else cexp.push_back(e);
    @(posedge clk); #1 req_valid = 0;
  endtask

  initial begin
    repeat (3) @(posedge clk);
    #1 rst_n = 1;
    send(0, ACC_CACHE_RD, 8, 8, 34'h100, 1, 1);
    send(1, ACC_CACHE_WR, 8, 8, 34'h108, 1, 1);
    send(2, ACC_DMA_RD, 0, 4096, 34'h2000, 1, 1);
    bp = 1;
    // PE 1 and PE 3 write 32 and 64 bytes, FLITs interleaved
    for (int i = 0; i < 8; i++) begin
      if (i < 4) send(1, ACC_DMA_WR, 8, 32, 34'h4000 + 34'(i * 8), i == 0, i == 3);
      send(3, ACC_DMA_WR, 8, 64, 34'h8000 + 34'(i * 8), i == 0, i == 7);
      send(0, ACC_CACHE_RD, 8, 8, 34'(i * 64), 1, 1);
    end
    // a second transfer from PE 1 starts fresh
    for (int i = 0; i < 2; i++) send(1, ACC_DMA_WR, 8, 16, 34'h5000 + 34'(i * 8), i == 0, i == 1);
    bp = 0;
    repeat (10) @(posedge clk);
    check(cexp.size() == 0 && dexp.size() == 0, "FLITs missing");
    check(n_first == 4 && n_last == 4, $sformatf("first %0d last %0d marks", n_first, n_last));
    check(n_fast >= 3, "no one-cycle FLIT latency");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
