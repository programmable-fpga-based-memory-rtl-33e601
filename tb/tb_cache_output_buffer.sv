// tb_cache_output_buffer: a producer that obeys almost_full (stopping one
// cycle late, as the cache pipeline does) against a consumer with random
// back-pressure. Checks order and content of every response, that
// almost_full follows the fill level (DEPTH - MARGIN), and that the FIFO
// never overflows.
// Depth 16 and margin 4 are this design's choices.
module tb_cache_output_buffer;
  import mc_pkg::*;
  localparam int DEPTH = 16, MARGIN = 4;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic in_valid = 0, almost_full, out_valid, out_ready = 0;
  pe_rsp_t in_rsp = '0, out_rsp;

  cache_output_buffer #(.DEPTH(DEPTH), .MARGIN(MARGIN)) dut (.*);

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", msg); end
  endtask

  pe_rsp_t q[$];
  int sent = 0, got = 0, level = 0, n_af = 0, max_level = 0;
  bit af_d = 0;

  always @(negedge clk) if (rst_n) begin
    in_valid <= sent < 400 && !af_d && $urandom_range(0, 3) != 0;
    in_rsp   <= '{pe_id: PE_ID_W'(sent), from_dma: 1'b0, is_write: sent[0], last: 1'b1, data: {32'(sent), $urandom}};
    out_ready <= (sent < 200) ? ($urandom_range(0, 4) == 0) : ($urandom_range(0, 1) == 0);
  end

  always @(posedge clk) if (rst_n) begin
    check(almost_full == (level >= DEPTH - MARGIN), $sformatf("almost_full %0d at level %0d", almost_full, level));
    check(level <= DEPTH, "overflow");
    if (almost_full) n_af++;
    af_d = almost_full;
    if (out_valid && out_ready) begin
      check(q.size() > 0 && out_rsp == q[0], "response differs");
      void'(q.pop_front()); got++; level--;
    end
    if (in_valid) begin q.push_back(in_rsp); sent++; level++; end
    if (level > max_level) max_level = level;
  end

  initial begin
    repeat (3) @(posedge clk);
    #1 rst_n = 1;
    wait (got == 400);
    check(n_af > 0 && max_level >= DEPTH - MARGIN, "almost_full never reached");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
