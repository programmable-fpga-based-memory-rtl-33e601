// tb_bitonic_sorter: sorts random batches of 32 keys (several in a row, one
// per cycle) and checks each output is ascending, is a permutation of its
// input, and appears exactly log2(N)(log2(N)+1)/2 = 15 cycles after input.
module tb_bitonic_sorter;
  localparam int N = 32, KW = 26, LAT = 15, BATCHES = 20;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic          in_valid = 0, out_valid;
  logic [KW-1:0] in_keys [N], out_keys [N];
  logic [KW-1:0] sent [BATCHES][N];
  int            sent_cycle [BATCHES];
  int            cycle = 0, nout = 0;

  bitonic_sorter #(.N(N), .KEY_W(KW)) dut (.*);

  always @(posedge clk) cycle <= cycle + 1;

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", msg); end
  endtask

  // output checker
  always @(posedge clk) if (rst_n && out_valid) begin
    logic [KW-1:0] a [N], b [N];
    bit sorted;
    sorted = 1;
    for (int i = 1; i < N; i++) if (out_keys[i-1] > out_keys[i]) sorted = 0;
    check(sorted, $sformatf("batch %0d not ascending", nout));
    a = out_keys; b = sent[nout];
    a.sort(); b.sort();
    check(a == b, $sformatf("batch %0d not a permutation", nout));
    check(cycle - sent_cycle[nout] == LAT, $sformatf("batch %0d latency %0d", nout, cycle - sent_cycle[nout]));
    nout++;
  end

  initial begin
    for (int i = 0; i < N; i++) in_keys[i] = '0;
    repeat (3) @(posedge clk);
    #1 rst_n = 1;
    for (int b = 0; b < BATCHES; b++) begin
      @(posedge clk); #1;
      in_valid = 1;
      for (int i = 0; i < N; i++) begin
        // batches with many equal keys and fully random ones
        in_keys[i] = (b % 2) ? KW'($urandom) : KW'($urandom_range(0, 7));
        sent[b][i] = in_keys[i];
      end
      sent_cycle[b] = cycle;
      if (b == 5) begin @(posedge clk); #1 in_valid = 0; end  // a gap
    end
    @(posedge clk); #1 in_valid = 0;
    repeat (LAT + 5) @(posedge clk);
    check(nout == BATCHES, $sformatf("got %0d batches", nout));
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
