// tb_dma_selector: four DMAs each present several transfers of random
// length (first/last marked), with random gaps in each DMA's valid and
// random back-pressure at the output. The
// check: every request goes out exactly once, each DMA's requests keep
// their order, a transfer is never interleaved with another DMA's requests,
// and grants rotate among the DMAs (round robin).
// The rule that a transfer is never split is this design's (the original only
// names the selector); the test sizes are chosen here.
module tb_dma_selector;
  import mc_pkg::*;
  localparam int ND = 4;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic [ND-1:0] in_valid = '0, in_ready, in_first = '0, in_last = '0;
  mem_req_t in_req [ND];
  logic out_valid, out_ready = 1, out_first, out_last;
  mem_req_t out_req;

  dma_selector #(.NUM_DMA(ND)) dut (.*);

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", msg); end
  endtask

  int len [ND][$];       // transfer lengths per DMA
  int pos [ND];          // requests sent per DMA
  int tr [ND], ti [ND];  // current transfer and index in it
  int total = 0, got = 0, cur_dma = -1, last_dma = -1, n_switch = 0;
  int next_seq [ND];

  initial for (int d = 0; d < ND; d++) begin
    in_req[d] = '0; pos[d] = 0; tr[d] = 0; ti[d] = 0; next_seq[d] = 0;
    for (int t = 0; t < 6; t++) begin len[d].push_back($urandom_range(1, 9)); total += len[d][t]; end
  end

  always @(negedge clk) begin
    for (int d = 0; d < ND; d++) begin
      in_valid[d] <= tr[d] < 6 && rst_n && $urandom_range(0, 3) != 0;
      in_first[d] <= ti[d] == 0;
      in_last[d]  <= tr[d] < 6 && ti[d] == len[d][tr[d]] - 1;
      in_req[d].tag.dma_id <= MAX_DMA_W'(d);
      in_req[d].tag.line   <= DMA_LINE_W'(pos[d]);
    end
    out_ready <= $urandom_range(0, 3) != 0;
  end

  always @(posedge clk) if (rst_n) begin
    for (int d = 0; d < ND; d++)
      if (in_valid[d] && in_ready[d]) begin
        pos[d]++;
        if (ti[d] == len[d][tr[d]] - 1) begin tr[d]++; ti[d] = 0; end else ti[d]++;
      end
    if (out_valid && out_ready) begin
      int d;
      d = int'(out_req.tag.dma_id);
      check(int'(out_req.tag.line) == next_seq[d], $sformatf("DMA %0d request out of order", d));
      next_seq[d]++;
      if (cur_dma >= 0) check(d == cur_dma, "transfer interleaved");
      if (out_first && last_dma >= 0 && d != last_dma) n_switch++;
      cur_dma = out_last ? -1 : d;
      if (out_last) last_dma = d;
      got++;
    end
  end

  initial begin
    repeat (3) @(posedge clk);
    #1 rst_n = 1;
    repeat (800) @(posedge clk);
    check(got == total, $sformatf("%0d of %0d requests out", got, total));
    check(n_switch >= 18, $sformatf("only %0d changes of DMA between transfers", n_switch));
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
