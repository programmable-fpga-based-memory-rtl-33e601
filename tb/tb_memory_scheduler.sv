// tb_memory_scheduler: drives the scheduler at its default size (batch 32,
// timeout 40) and compares every request leaving the output FIFO with a
// reference: each batch sorted by (bank, row) with ties kept in arrival
// order. Cases: a full batch (with the T_sch = 32 + 15 + 2 = 49 cycle
// latency check), batches closed by the timeout and by a change of request
// type, writes to one address keeping their order, two batches back to back
// (double buffering), back-pressure from the DRAM side, and bypass mode.
module tb_memory_scheduler;
  import mc_pkg::*;
  localparam int BATCH = 32, TIMEOUT = 40, TSCH = 32 + 15 + 2;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0, cycle = 0;
  always @(posedge clk) cycle <= cycle + 1;

  logic bypass = 0, in_valid = 0, in_ready, out_valid, out_ready = 1;
  mem_req_t in_req = '0, out_req;
  logic batch_full, batch_timeout, batch_type, bypassed;
  int n_full = 0, n_timeout = 0, n_type = 0, n_bypass = 0;

  memory_scheduler #(.BATCH(BATCH), .TIMEOUT(TIMEOUT)) dut (.*);

  mem_req_t got [$];
  mem_req_t expq [$];
  int first_out_cycle = -1;
  bit rand_ready = 0;

  always @(posedge clk) if (rst_n) begin
    if (out_valid && out_ready) begin
      got.push_back(out_req);
      if (first_out_cycle < 0) first_out_cycle = cycle;
    end
    n_full    += int'(batch_full);
    n_timeout += int'(batch_timeout);
    n_type    += int'(batch_type);
    n_bypass  += int'(bypassed);
  end
  always @(negedge clk) out_ready <= rand_ready ? 1'($urandom_range(0, 1)) : 1'b1;

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", msg); end
  endtask

  int seq = 0;
  function automatic mem_req_t mk(input bit we, input int bank, input int row, input int col);
    mem_req_t r;
    r = '0;
    r.we = we;
    r.addr = {ROW_W'(row), BANK_W'(bank), COL_W'(col)};
    r.tag.line = DMA_LINE_W'(seq);
    r.wdata = MEM_DATA_W'(seq) * 3;
    seq++;
    return r;
  endfunction

  // expected order of one batch: stable sort on the row key
  task automatic expect_batch(input mem_req_t b [$]);
    mem_req_t s [$];
    s = b;
    for (int i = 1; i < s.size(); i++)
      for (int j = i; j > 0 && row_key(s[j-1].addr) > row_key(s[j].addr); j--) begin
        mem_req_t t; t = s[j]; s[j] = s[j-1]; s[j-1] = t;
      end
    foreach (s[i]) expq.push_back(s[i]);
  endtask

  task automatic send(input mem_req_t r);
    @(negedge clk);
    in_valid = 1; in_req = r;
    #1;
    while (!in_ready) begin @(negedge clk); #1; end
    @(posedge clk); #1 in_valid = 0;
  endtask

  task automatic compare(input string name);
    repeat (400) @(posedge clk);
    check(got.size() == expq.size(), $sformatf("%s: %0d out, %0d expected", name, got.size(), expq.size()));
    for (int i = 0; i < expq.size() && i < got.size(); i++)
      check(got[i] == expq[i], $sformatf("%s: position %0d tag %0d expected tag %0d", name, i, got[i].tag.line, expq[i].tag.line));
    got.delete(); expq.delete();
  endtask

  initial begin
    mem_req_t b [$];
    int t0;
    repeat (3) @(posedge clk);
    #1 rst_n = 1;
    @(posedge clk); #1;

    // 1: one full batch of reads, rows drawn from a few values
    b.delete();
    for (int i = 0; i < BATCH; i++) b.push_back(mk(0, $urandom_range(0, 3), $urandom_range(0, 5), i));
    expect_batch(b);
    first_out_cycle = -1;
    t0 = cycle;
    foreach (b[i]) send(b[i]);
    compare("full batch");
    check(first_out_cycle - t0 == TSCH, $sformatf("T_sch %0d, expected %0d", first_out_cycle - t0, TSCH));

    // 2: a short batch closed by the timeout, with same-address writes
    b.delete();
    for (int i = 0; i < 6; i++) b.push_back(mk(1, 2, (i % 2) ? 7 : 3, 5));
    expect_batch(b);
    foreach (b[i]) send(b[i]);
    compare("timeout batch");

    // 3: reads then writes: the type change closes the first batch
    b.delete();
    for (int i = 0; i < 5; i++) b.push_back(mk(0, i % 2, 9 - i, i));
    expect_batch(b);
    foreach (b[i]) send(b[i]);
    b.delete();
    for (int i = 0; i < 4; i++) b.push_back(mk(1, 1, 4 - i, i));
    expect_batch(b);
    foreach (b[i]) send(b[i]);
    compare("type change");

    // 4: two full batches back to back, random DRAM availability
    rand_ready = 1;
    for (int k = 0; k < 2; k++) begin
      b.delete();
      for (int i = 0; i < BATCH; i++) b.push_back(mk(0, $urandom_range(0, 15), $urandom_range(0, 3), i));
      expect_batch(b);
      foreach (b[i]) send(b[i]);
    end
    compare("double buffering");
    rand_ready = 0;

    // 5: bypass keeps arrival order
    bypass = 1;
    for (int i = 0; i < 8; i++) begin
      mem_req_t r; r = mk(i % 2, $urandom_range(0, 15), 100 - i, i);
      expq.push_back(r);
      send(r);
    end
    compare("bypass");
    bypass = 0;

    check(n_full == 3,    $sformatf("full closes %0d", n_full));
    check(n_timeout == 2, $sformatf("timeout closes %0d", n_timeout));
    check(n_type == 1,    $sformatf("type closes %0d", n_type));
    check(n_bypass == 8,  $sformatf("bypassed %0d", n_bypass));
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
