// tb_mem_to_dma_forward: random read responses, some tagged for the cache,
// the rest for one of four DMAs; checks that exactly the addressed DMA sees
// a pulse one cycle later with the right line index and data, and that
// cache-tagged responses reach no DMA.
// Tag-based steering is this design's choice; the original only names the block.
module tb_mem_to_dma_forward;
  import mc_pkg::*;
  localparam int ND = 4;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic in_valid = 0;
  mem_rsp_t in_rsp = '0;
  logic [ND-1:0] out_valid;
  logic [DMA_LINE_W-1:0] out_line;
  logic [MEM_DATA_W-1:0] out_data;

  mem_to_dma_forward #(.NUM_DMA(ND)) dut (.*);

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", msg); end
  endtask

  initial begin
    repeat (3) @(posedge clk);
    #1 rst_n = 1;
    for (int n = 0; n < 200; n++) begin
      logic v; mem_rsp_t r;
      @(negedge clk);
      v = $urandom_range(0, 3) != 0;
      r.tag.is_dma = $urandom_range(0, 4) != 0;
      r.tag.dma_id = MAX_DMA_W'($urandom_range(0, ND - 1));
      r.tag.line   = DMA_LINE_W'($urandom);
      r.rdata      = {16{$urandom}};
      in_valid = v; in_rsp = r;
      @(negedge clk);
      in_valid = 0;
      if (v && r.tag.is_dma) begin
        check(out_valid == ND'(1 << r.tag.dma_id), $sformatf("out_valid %b for DMA %0d", out_valid, r.tag.dma_id));
        check(out_line == r.tag.line && out_data == r.rdata, "line or data differ");
      end else
        check(out_valid == '0, "pulse without a DMA response");
    end
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
