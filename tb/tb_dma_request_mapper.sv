// tb_dma_request_mapper: drives FLIT streams from several PEs into the
// mapper with a model of which DMAs are occupied. Checks that a first FLIT
// goes to the lowest free DMA, that later FLITs of a PE follow it to the DMA
// it was given, that no_free is raised (and nothing accepted) when all DMAs
// are busy, and that a FLIT waits while its DMA is not ready.
// Follows the original's mapping rule (first FLIT claims a DMA, later FLITs
// of the same PE follow it); lowest-free allocation and no_free are this
// design's choices.
module tb_dma_request_mapper;
  import mc_pkg::*;
  localparam int ND = 4;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic in_valid = 0, in_ready;
  flit_hdr_t in_hdr = '0;
  logic [APP_DATA_W-1:0] in_payload = '0;
  logic [ND-1:0] occupied = '0, out_valid, out_ready = '1;
  flit_hdr_t out_hdr;
  logic [APP_DATA_W-1:0] out_payload;
  logic no_free;

  dma_request_mapper #(.NUM_DMA(ND)) dut (.*);

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", msg); end
  endtask

  int owner [NUM_PE];   // DMA given to each PE by the reference, -1 none

  function automatic int lowest_free();
    for (int i = 0; i < ND; i++) if (!occupied[i]) return i;
    return -1;
  endfunction

  // present one FLIT and wait until it is taken; check where it went
  task automatic send(input int pe, input bit first, input bit last);
    int exp;
    @(negedge clk);
    in_hdr = '0;
    in_hdr.pe_id = PE_ID_W'(pe); in_hdr.acc = ACC_DMA_WR;
    in_hdr.first = first; in_hdr.last = last;
    in_payload = {32'(pe), $urandom};
    in_valid = 1;
    exp = first ? lowest_free() : owner[pe];
    #1;
    check(out_valid == ND'(1 << exp), $sformatf("PE %0d FLIT to %b, expected DMA %0d", pe, out_valid, exp));
    check(out_hdr == in_hdr && out_payload == in_payload, "FLIT changed on the way");
    check(in_ready && !no_free, "FLIT for a ready DMA not taken");
    @(posedge clk); #1 in_valid = 0;
    if (first) begin owner[pe] = exp; occupied[exp] = 1; end
  endtask

  initial begin
    for (int p = 0; p < NUM_PE; p++) owner[p] = -1;
    repeat (3) @(posedge clk);
    #1 rst_n = 1;
    // PEs 2, 0, 3, 1 open transfers: DMAs 0..3 in that order
    send(2, 1, 0); send(0, 1, 0); send(3, 1, 0); send(1, 1, 0);
    check(owner[2] == 0 && owner[0] == 1 && owner[3] == 2 && owner[1] == 3, "DMA order");
    // interleaved continuation FLITs follow their PE
    for (int n = 0; n < 20; n++) send($urandom_range(0, NUM_PE - 1), 0, 0);
    // all DMAs occupied: a new transfer must wait with no_free
    @(negedge clk);
    in_hdr = '0; in_hdr.pe_id = 2; in_hdr.first = 1; in_valid = 1;
    #1 check(no_free && !in_ready && out_valid == '0, "first FLIT accepted with no DMA free");
    @(negedge clk) in_valid = 0;
    // DMA 3's target not ready: its FLIT waits
    @(negedge clk);
    out_ready = 4'b0111;
    in_hdr = '0; in_hdr.pe_id = PE_ID_W'(1); in_valid = 1;
    #1 check(out_valid == 4'b1000 && !in_ready, "FLIT taken by a DMA that is not ready");
    @(negedge clk) in_valid = 0; out_ready = '1;
    // DMA 1 frees: next first FLIT takes it and later FLITs of that PE follow
    occupied[1] = 0;
    send(0, 1, 0);
    check(owner[0] == 1, "freed DMA reused");
    send(0, 0, 1);
    occupied[2] = 0; occupied[0] = 0;
    send(3, 1, 0);
    check(owner[3] == 0, "lowest free DMA chosen");
    send(3, 0, 0); send(1, 0, 0); send(0, 0, 0);
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
