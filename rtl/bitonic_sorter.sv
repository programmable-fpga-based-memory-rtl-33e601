// bitonic_sorter: the parallel sorting network of the memory scheduler.
//
// Sorts N keys (N a power of two) into ascending order with Batcher's
// bitonic network. The network has log2(N)(log2(N)+1)/2 layers of
// compare-exchange elements; every layer is followed by a register, so a
// batch presented with in_valid comes out with out_valid exactly
// log2(N)(log2(N)+1)/2 cycles later (15 cycles for N = 32), matching the
// sorting time the paper gives. A new batch may enter every cycle.
//
// Layer (p, q), p = 1..log2(N), q = p-1..0, compares element i with element
// i XOR 2^q (for the lower index of each pair); the pair is put in ascending
// order when bit p of i is 0 and in descending order otherwise.
module bitonic_sorter #(
  parameter int unsigned N     = 32,
  parameter int unsigned KEY_W = 26
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             in_valid,
  input  logic [KEY_W-1:0] in_keys  [N],
  output logic             out_valid,
  output logic [KEY_W-1:0] out_keys [N]
);
  localparam int unsigned LOGN   = $clog2(N);
  localparam int unsigned STAGES = LOGN * (LOGN + 1) / 2;

  // stage number -> (p, q)
  function automatic int unsigned layer_p(input int unsigned st);
    int unsigned c;
    c = 0;
    for (int unsigned p = 1; p <= LOGN; p++)
      for (int q = int'(p) - 1; q >= 0; q--) begin
        if (c == st) return p;
        c++;
      end
    return 1;
  endfunction
  function automatic int unsigned layer_q(input int unsigned st);
    int unsigned c;
    c = 0;
    for (int unsigned p = 1; p <= LOGN; p++)
      for (int q = int'(p) - 1; q >= 0; q--) begin
        if (c == st) return int'(q);
        c++;
      end
    return 0;
  endfunction

  logic [KEY_W-1:0] stg [STAGES+1][N];
  logic [STAGES:0]  vld;

  assign stg[0] = in_keys;
  assign vld[0] = in_valid;

  for (genvar s = 0; s < STAGES; s++) begin : g_layer
    localparam int unsigned P = layer_p(s);
    localparam int unsigned Q = layer_q(s);
    logic [KEY_W-1:0] nxt [N];
    always_comb begin
      nxt = stg[s];
      for (int unsigned i = 0; i < N; i++) begin
        int unsigned l;
        l = i ^ (1 << Q);
        if (l > i) begin
          if (((i >> P) & 1) == 0) begin
            if (stg[s][i] > stg[s][l]) begin nxt[i] = stg[s][l]; nxt[l] = stg[s][i]; end
          end else begin
            if (stg[s][i] < stg[s][l]) begin nxt[i] = stg[s][l]; nxt[l] = stg[s][i]; end
          end
        end
      end
    end
    always_ff @(posedge clk) stg[s+1] <= nxt;
    always_ff @(posedge clk or negedge rst_n)
      if (!rst_n) vld[s+1] <= 1'b0;
      else        vld[s+1] <= vld[s];
  end

  assign out_keys  = stg[STAGES];
  assign out_valid = vld[STAGES];
endmodule
