// tb_forwarding_unit: feeds random cache responses and multi-word DMA
// responses with random back-pressure and checks that all arrive, each
// source in its own order, that a DMA stream is never interrupted between
// its first and last word, and that cache responses win when both wait
// between DMA streams.
module tb_forwarding_unit;
  import mc_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic c_valid = 0, c_ready, d_valid = 0, d_ready, out_valid, out_ready = 1;
  pe_rsp_t c_rsp = '0, d_rsp = '0, out_rsp;

  forwarding_unit dut (.*);

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", msg); end
  endtask

  pe_rsp_t cq [$], dq [$];
  int ci = 0, di = 0, n_c = 0, n_d = 0, n_prio = 0;
  bit in_burst = 0;

  // sources: queues presented as valid/ready streams
  always @(posedge clk) if (rst_n) begin
    if (c_valid && c_ready) ci++;
    if (d_valid && d_ready) di++;
    if (c_valid && d_valid && c_ready && !in_burst) n_prio++;
  end
  always @(negedge clk) begin
    c_valid <= ci < cq.size() && $urandom_range(0, 2) != 0;
    c_rsp   <= (ci < cq.size()) ? cq[ci] : '0;
    d_valid <= di < dq.size();
    d_rsp   <= (di < dq.size()) ? dq[di] : '0;
    out_ready <= $urandom_range(0, 3) != 0;
  end

  always @(posedge clk) if (rst_n && out_valid && out_ready) begin
    if (out_rsp.from_dma) begin
      check(out_rsp == dq[n_d], $sformatf("DMA word %0d differs", n_d));
      n_d++;
      in_burst = !out_rsp.last;
    end else begin
      check(!in_burst, "cache response inside a DMA stream");
      check(out_rsp == cq[n_c], $sformatf("cache response %0d differs", n_c));
      n_c++;
    end
  end

  initial begin
    for (int i = 0; i < 200; i++) begin
      pe_rsp_t r;
      r = '0; r.pe_id = PE_ID_W'($urandom); r.data = {$urandom, $urandom}; r.last = 1;
      cq.push_back(r);
    end
    for (int b = 0; b < 20; b++) begin
      int len;
      len = $urandom_range(1, 16);
      for (int i = 0; i < len; i++) begin
        pe_rsp_t r;
        r = '0; r.pe_id = PE_ID_W'(b); r.from_dma = 1; r.data = {$urandom, $urandom}; r.last = (i == len - 1);
        dq.push_back(r);
      end
    end
    repeat (3) @(posedge clk);
    #1 rst_n = 1;
    repeat (1500) @(posedge clk);
    check(n_c == cq.size() && n_d == dq.size(), $sformatf("delivered %0d/%0d cache, %0d/%0d DMA", n_c, cq.size(), n_d, dq.size()));
    check(n_prio > 0, "cache never preferred");
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
