// tb_dma_output_buffer: four DMAs each stream several responses of random
// length (last word marked) with random back-pressure at the output; the
// check is that all words come out, each DMA's words in order, and that
// no stream is interleaved with another between its first and last word.
// Whole-transfer arbitration is this design's choice; the original only names
// the block.
module tb_dma_output_buffer;
  import mc_pkg::*;
  localparam int ND = 4;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic [ND-1:0] in_valid = '0, in_ready;
  pe_rsp_t in_rsp [ND];
  logic out_valid, out_ready = 1;
  pe_rsp_t out_rsp;

  dma_output_buffer #(.NUM_DMA(ND), .DEPTH(16)) dut (.*);

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", msg); end
  endtask

  pe_rsp_t src [ND][$];
  int idx [ND], nxt [ND];
  int total = 0, got = 0, cur = -1;

  initial for (int d = 0; d < ND; d++) begin
    idx[d] = 0; nxt[d] = 0; in_rsp[d] = '0;
    for (int s = 0; s < 5; s++) begin
      int len;
      len = $urandom_range(1, 12);
      for (int i = 0; i < len; i++) begin
        pe_rsp_t r;
        r = '0; r.pe_id = PE_ID_W'(d); r.from_dma = 1; r.last = (i == len - 1);
        r.data = {32'(d), 32'(total)};
        src[d].push_back(r);
        total++;
      end
    end
  end

  always @(negedge clk) begin
    for (int d = 0; d < ND; d++) begin
      in_valid[d] <= rst_n && idx[d] < src[d].size() && $urandom_range(0, 3) != 0;
      in_rsp[d]   <= (idx[d] < src[d].size()) ? src[d][idx[d]] : '0;
    end
    out_ready <= $urandom_range(0, 2) != 0;
  end

  always @(posedge clk) if (rst_n) begin
    for (int d = 0; d < ND; d++) if (in_valid[d] && in_ready[d]) idx[d]++;
    if (out_valid && out_ready) begin
      int d;
      d = int'(out_rsp.pe_id);
      check(out_rsp == src[d][nxt[d]], $sformatf("DMA %0d word %0d differs", d, nxt[d]));
      nxt[d]++;
      if (cur >= 0) check(d == cur, "streams interleaved");
      cur = out_rsp.last ? -1 : d;
      got++;
    end
  end

  initial begin
    repeat (3) @(posedge clk);
    #1 rst_n = 1;
    repeat (1500) @(posedge clk);
    check(got == total, $sformatf("%0d of %0d words out", got, total));
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
