// memory_scheduler: reorders line requests in batches so that requests to
// the same DRAM row are sent back to back (more row-buffer hits).
//
// Batch formation: two input buffers of BATCH entries (double buffering).
// Requests are written into the buffer being filled, each at the position
// given by the buffer's write counter; at the same time its "modified row
// index" (bank and row of the address) is shifted into the SIPO register of
// that buffer. A timeout counter starts with the first request of a batch
// and counts every clock. The batch closes when the buffer is full, when the
// counter reaches TIMEOUT, or when a request of the other type (read versus
// write) arrives: a batch holds only reads or only writes. The next batch
// then fills the other buffer.
//
// Reordering: a closed batch's keys {row index, position} go in parallel
// into the bitonic sorting network. Because the buffer position is the low
// part of the key, requests with equal row index keep their arrival order,
// so requests to the same address are never reordered. The sorted keys are
// loaded into the PISO register, which walks through them one per cycle;
// each position read back selects the complete request in the input buffer
// and moves it into the output FIFO. The memory interface takes requests
// from the output FIFO when it is available (out_ready). The drained buffer
// is free again for the next batch.
//
// Bypass: with bypass high (sequential traffic or low load) requests go
// straight to the output FIFO once no batch is pending.
//
// Timing (in cycles, from the first request of a full batch accepted on
// consecutive cycles to its first request at the output): BATCH for batch
// formation + log2(BATCH)(log2(BATCH)+1)/2 for sorting + 2 for the
// serial/parallel conversions (load into the sorter, load of the PISO),
// i.e. the paper's T_sch = N + logN(logN+1)/2 + L_data_cond with
// L_data_cond = 2. Afterwards one request per cycle.
//
// Follows the paper: double-buffered input, timeout, SIPO / bitonic sorter
// / PISO, read-back of the reordered requests into an output FIFO, one
// request type per batch, bypass. Choices of this design: one pair of
// buffers for all banks with the bank in the sort key, the address split in
// mc_pkg, the TIMEOUT default and a new sort starting only after the PISO
// has emptied.
module memory_scheduler
  import mc_pkg::*;
#(
  parameter int unsigned BATCH     = 32,
  parameter int unsigned TIMEOUT   = 40,
  parameter int unsigned OUT_DEPTH = 32
) (
  input  logic     clk,
  input  logic     rst_n,
  input  logic     bypass,
  input  logic     in_valid,
  output logic     in_ready,
  input  mem_req_t in_req,
  output logic     out_valid,
  input  logic     out_ready,      // DRAM availability
  output mem_req_t out_req,
  // events
  output logic     batch_full,     // pulse: a batch closed because a buffer filled
  output logic     batch_timeout,  // pulse: a batch closed by the timeout
  output logic     batch_type,     // pulse: a batch closed by a change of request type
  output logic     bypassed        // pulse: a request took the bypass
);
  localparam int unsigned IDX_W = (BATCH > 1) ? $clog2(BATCH) : 1;
  localparam int unsigned CNT_W = $clog2(BATCH + 1);
  localparam int unsigned KEY_W = ROWKEY_W + IDX_W;
  localparam int unsigned TMO_W = $clog2(TIMEOUT + 1);

  typedef enum logic [1:0] {B_FREE, B_FILL, B_READY, B_SORT} bstate_e;

  mem_req_t          ibuf [2][BATCH];          // input buffers 1 and 2
  logic [ROWKEY_W-1:0] sipo [2][BATCH];        // SIPO: row indexes per buffer
  bstate_e           bst  [2];
  logic [CNT_W-1:0]  cnt  [2];
  logic              bwe  [2];                 // request type of each batch
  logic              wsel, ssel, dsel;         // fill / next sort / drain buffer
  logic [TMO_W-1:0]  timer;

  logic              sort_busy, piso_active;
  logic [IDX_W-1:0]  piso [BATCH];
  logic [CNT_W-1:0]  piso_pos;

  logic [KEY_W-1:0]  s_in  [BATCH];
  logic [KEY_W-1:0]  s_out [BATCH];
  logic              s_in_valid, s_out_valid;

  logic              idle, bypass_path, accept, close_type, close_now, launch, drain_push;
  logic              fifo_push, fifo_full, fifo_empty;
  mem_req_t          fifo_din;
  logic [$clog2(OUT_DEPTH+1)-1:0] fifo_count;

  assign idle        = bst[0] == B_FREE && bst[1] == B_FREE && !sort_busy && !piso_active;
  assign bypass_path = bypass && idle;
  assign in_ready    = bypass_path ? !fifo_full
                     : !bypass && (bst[wsel] == B_FREE || (bst[wsel] == B_FILL && bwe[wsel] == in_req.we));
  assign accept      = in_valid && in_ready && !bypass_path;
  assign close_type  = in_valid && !bypass && bst[wsel] == B_FILL && bwe[wsel] != in_req.we;
  assign close_now   = bst[wsel] == B_FILL &&
                       (close_type || (timer == TMO_W'(TIMEOUT - 1)) ||
                        (accept && cnt[wsel] == CNT_W'(BATCH - 1)));

  // sorter input: {row index, position}; empty positions sort to the end
  always_comb begin
    for (int i = 0; i < BATCH; i++)
      s_in[i] = (CNT_W'(i) < cnt[ssel]) ? {sipo[ssel][i], IDX_W'(i)} : {{ROWKEY_W{1'b1}}, IDX_W'(i)};
  end
  assign launch     = bst[ssel] == B_READY && !sort_busy && !piso_active;
  assign s_in_valid = launch;

  bitonic_sorter #(.N(BATCH), .KEY_W(KEY_W)) u_sort (
    .clk, .rst_n, .in_valid(s_in_valid), .in_keys(s_in),
    .out_valid(s_out_valid), .out_keys(s_out)
  );

  assign drain_push = piso_active && !fifo_full;
  assign fifo_push  = drain_push || (bypass_path && in_valid && !fifo_full);
  assign fifo_din   = drain_push ? ibuf[dsel][piso[IDX_W'(piso_pos)]] : in_req;

  sync_fifo #(.T(mem_req_t), .DEPTH(OUT_DEPTH)) u_out_fifo (
    .clk, .rst_n, .push(fifo_push), .din(fifo_din), .pop(out_ready), .dout(out_req),
    .full(fifo_full), .empty(fifo_empty), .count(fifo_count)
  );
  assign out_valid = !fifo_empty;

  // input buffer and SIPO writes
  always_ff @(posedge clk) begin
    if (accept) begin
      ibuf[wsel][IDX_W'(cnt[wsel])] <= in_req;
      sipo[wsel][IDX_W'(cnt[wsel])] <= row_key(in_req.addr);
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int b = 0; b < 2; b++) begin
        bst[b] <= B_FREE;
        cnt[b] <= '0;
        bwe[b] <= 1'b0;
      end
      wsel <= 1'b0; ssel <= 1'b0; dsel <= 1'b0;
      timer <= '0;
      sort_busy <= 1'b0; piso_active <= 1'b0; piso_pos <= '0;
      for (int i = 0; i < BATCH; i++) piso[i] <= '0;
      batch_full <= 1'b0; batch_timeout <= 1'b0; batch_type <= 1'b0; bypassed <= 1'b0;
    end else begin
      batch_full    <= 1'b0;
      batch_timeout <= 1'b0;
      batch_type    <= 1'b0;
      bypassed      <= bypass_path && in_valid && !fifo_full;

      // ---- batch formation ----
      if (accept) begin
        cnt[wsel] <= cnt[wsel] + 1'b1;
        if (bst[wsel] == B_FREE) begin
          bst[wsel] <= B_FILL;
          bwe[wsel] <= in_req.we;
        end
      end
      if (bst[wsel] == B_FILL || accept) timer <= (bst[wsel] == B_FILL) ? timer + 1'b1 : '0;
      if (close_now) begin
        bst[wsel] <= B_READY;
        wsel      <= !wsel;
        timer     <= '0;
        if (accept && cnt[wsel] == CNT_W'(BATCH - 1)) batch_full <= 1'b1;
        else if (close_type)                          batch_type <= 1'b1;
        else                                          batch_timeout <= 1'b1;
      end

      // ---- reordering ----
      if (launch) begin
        bst[ssel] <= B_SORT;
        dsel      <= ssel;
        ssel      <= !ssel;
        sort_busy <= 1'b1;
      end
      if (s_out_valid) begin                   // PISO load
        for (int i = 0; i < BATCH; i++) piso[i] <= s_out[i][IDX_W-1:0];
        piso_active <= 1'b1;
        piso_pos    <= '0;
        sort_busy   <= 1'b0;
      end
      if (drain_push) begin                    // read-back into the output FIFO
        piso_pos <= piso_pos + 1'b1;
        if (piso_pos == cnt[dsel] - 1'b1) begin
          piso_active <= 1'b0;
          bst[dsel]   <= B_FREE;
          cnt[dsel]   <= '0;
        end
      end
    end
  end

  assert property (@(posedge clk) disable iff (!rst_n) !(launch && s_out_valid));
  assert property (@(posedge clk) disable iff (!rst_n) fifo_push |-> !fifo_full);
endmodule
