// tb_dma_buffer_controller: one DMA against a memory model kept in the
// testbench. Write transfers of 1 to 32 lines are sent as 8-byte FLITs; the
// DMA must issue nothing until the last FLIT is in, then write every line
// once with the right address and data, and send one write acknowledge. Read
// transfers of the same regions must issue consecutive line reads; the model
// returns the lines in random order, and the words streamed back to the PE
// must equal what was written, with last on the final word. Occupied and
// owner_pe are checked throughout. A reduced buffer (2 KB) keeps it short.
// Follows the original in collecting all FLITs before any memory access;
// the read streaming, the tag format and the single acknowledge are this
// design's choices.
module tb_dma_buffer_controller;
  import mc_pkg::*;
  localparam int BUF = 2048;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic in_valid = 0, in_ready, occupied, mreq_valid, mreq_ready = 0, mreq_first, mreq_last;
  flit_hdr_t in_hdr = '0;
  logic [APP_DATA_W-1:0] in_payload = '0;
  logic [PE_ID_W-1:0] owner_pe;
  mem_req_t mreq;
  logic mrsp_valid = 0, out_valid, out_ready = 0;
  logic [DMA_LINE_W-1:0] mrsp_line = '0;
  logic [MEM_DATA_W-1:0] mrsp_data = '0;
  pe_rsp_t out_rsp;

  dma_buffer_controller #(.BUF_BYTES(BUF), .DMA_ID(5)) dut (.*);

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", msg); end
  endtask

  logic [MEM_DATA_W-1:0] mem [logic [MEM_ADDR_W-1:0]];
  logic [DMA_LINE_W-1:0] rd_line[$];
  logic [MEM_ADDR_W-1:0] rd_addr[$];
  int n_wr = 0, n_rd = 0, exp_idx = 0;
  bit collecting = 0;
  logic [MEM_ADDR_W-1:0] exp_base;

  // memory side: random ready, writes stored, reads answered out of order
  always @(negedge clk) if (rst_n) begin
    mreq_ready <= $urandom_range(0, 2) != 0;
    out_ready  <= $urandom_range(0, 3) != 0;
    mrsp_valid <= 0;
    if (rd_line.size() > 0 && $urandom_range(0, 2) == 0) begin
      int k;
      k = $urandom_range(0, rd_line.size() - 1);
      mrsp_valid <= 1;
      mrsp_line  <= rd_line[k];
      mrsp_data  <= mem.exists(rd_addr[k]) ? mem[rd_addr[k]] : '0;
      rd_line.delete(k); rd_addr.delete(k);
    end
  end

  always @(posedge clk) if (rst_n && mreq_valid && mreq_ready) begin
    check(!collecting, "memory request before the last FLIT");
    check(mreq.tag.is_dma && mreq.tag.dma_id == 3'd5 && int'(mreq.tag.line) == exp_idx, "tag wrong");
    check(mreq.addr == exp_base + MEM_ADDR_W'(exp_idx * 8), $sformatf("line %0d address %h", exp_idx, mreq.addr));
    check(mreq_first == (exp_idx == 0), "first mark");
    if (mreq.we) begin mem[mreq.addr] = mreq.wdata; n_wr++; end
    else begin rd_line.push_back(mreq.tag.line); rd_addr.push_back(mreq.addr); n_rd++; end
    exp_idx++;
  end

  task automatic dma_write(input int pe, input logic [APP_ADDR_W-1:0] base, input int lines);
    int words;
    words = lines * 8;
    exp_base = line_mem_addr(base); exp_idx = 0; collecting = 1;
    for (int w = 0; w < words; w++) begin
      @(negedge clk);
      in_hdr = '0;
      in_hdr.pe_id = PE_ID_W'(pe); in_hdr.acc = ACC_DMA_WR;
      in_hdr.payload_size = PAYLOAD_SIZE_W'(8); in_hdr.total_size = TOTAL_SIZE_W'(words * 8);
      in_hdr.addr = base + APP_ADDR_W'(w * 8);
      in_hdr.first = (w == 0); in_hdr.last = (w == words - 1);
      in_payload = {base[31:0], 32'(w)} ^ {2{32'hC3A5_0000}};
      in_valid = 1;
      if (w == words - 1) collecting = 0;
      #1 check(in_ready, "FLIT not accepted");
      @(posedge clk); #1 in_valid = 0;
      check(occupied && owner_pe == PE_ID_W'(pe), "status registers");
    end
    // wait for the single acknowledge
    forever begin
      @(posedge clk);
      if (out_valid && out_ready) break;
    end
    check(out_rsp.is_write && out_rsp.last && out_rsp.from_dma && out_rsp.pe_id == PE_ID_W'(pe), "write ack");
    check(exp_idx == lines, $sformatf("%0d line writes for %0d lines", exp_idx, lines));
    #1 check(!occupied, "DMA not freed after the write");
  endtask

  task automatic dma_read(input int pe, input logic [APP_ADDR_W-1:0] base, input int lines);
    int words, got;
    words = lines * 8; got = 0;
    exp_base = line_mem_addr(base); exp_idx = 0;
    @(negedge clk);
    in_hdr = '0;
    in_hdr.pe_id = PE_ID_W'(pe); in_hdr.acc = ACC_DMA_RD;
    in_hdr.total_size = TOTAL_SIZE_W'(words * 8); in_hdr.addr = base;
    in_hdr.first = 1; in_hdr.last = 1;
    in_valid = 1;
    #1 check(in_ready, "read FLIT not accepted");
    @(posedge clk); #1 in_valid = 0;
    while (got < words) begin
      @(posedge clk);
      if (out_valid && out_ready) begin
        check(out_rsp.data == ({base[31:0], 32'(got)} ^ {2{32'hC3A5_0000}}), $sformatf("read word %0d", got));
        check(out_rsp.last == (got == words - 1) && !out_rsp.is_write && out_rsp.pe_id == PE_ID_W'(pe), "read framing");
        got++;
      end
    end
    check(exp_idx == lines, "line reads");
    #1 check(!occupied, "DMA not freed after the read");
  endtask

  initial begin
    int lens[6] = '{1, 3, 32, 8, 2, 17};
    repeat (3) @(posedge clk);
    #1 rst_n = 1;
    check(!occupied, "free after reset");
    for (int t = 0; t < 6; t++) dma_write(t % NUM_PE, APP_ADDR_W'(34'h1_0000_0000 + t * 34'h1_0000), lens[t]);
    for (int t = 5; t >= 0; t--) dma_read((t + 1) % NUM_PE, APP_ADDR_W'(34'h1_0000_0000 + t * 34'h1_0000), lens[t]);
    check(n_wr == 63 && n_rd == 63, $sformatf("%0d writes %0d reads", n_wr, n_rd));
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
