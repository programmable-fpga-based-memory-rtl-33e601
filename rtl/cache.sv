// cache: the set-associative cache of the cache engine, with its two
// pipelines sharing one Tag RAM, one Data RAM and the LRU state.
//
// PE pipeline (four stages, advanced by Stage EN = peEN & ~memEN):
//   1 Tag Access   - the request is registered and the tags (Tag_x) and valid
//                    bits of all ways of its set are read.
//   2 Tag Compare  - the m tags are compared with the request tag: HIT + way.
//   3 Data Access  - on a hit the LRU is updated; a read fetches the line of
//                    every way (Data_x); a write hit stores the word into the
//                    hit way and marks the line dirty.
//   4 Data Select  - the hit way's word is selected and sent out (HIT_PE_OUT).
// A miss leaving stage 2 is handed to the cache miss buffer and the cache
// blocks: stages 1-2 freeze (the next request waits in stage 1) while older
// hits in stages 3-4 drain.
//
// MEM pipeline (three stages, memEN; it has priority over the PE pipeline):
//   1 LRU Access   - the way to replace is chosen (an invalid way, else the
//                    least recently used) and its tag and line are read.
//   2 Tag/Data Update - the new tag and the returned line are written; a
//                    missed write is merged into the line first (write
//                    allocate). If the replaced line was dirty, tag replace /
//                    data replace leave as a write-back. The missed request
//                    is answered here.
//   3 BRAM Operation - the tags of the request waiting in stage 1 are read
//                    again so it compares against up-to-date entries; the
//                    cache then unblocks.
// A fill is started only when PE stage 3 is empty, so that responses leave
// in request order.
//
// Line width is the memory data width (512 bits); NUM_LINES and WAYS follow
// the paper's main configuration (4096 lines, 4 ways). The blocking
// behaviour, write-allocate/write-back policy, true-LRU age counters and the
// write acknowledge response are this design's choices.
module cache
  import mc_pkg::*;
#(
  parameter int unsigned NUM_LINES = 4096,
  parameter int unsigned WAYS      = 4
) (
  input  logic                  clk,
  input  logic                  rst_n,
  // PE requests (peEN = pe_valid)
  input  logic                  pe_valid,
  output logic                  pe_ready,
  input  flit_hdr_t             pe_hdr,
  input  logic [APP_DATA_W-1:0] pe_wdata,
  input  logic                  rsp_stall,     // output buffer almost full
  // miss to the cache miss buffer (one-cycle pulse)
  output logic                  miss_valid,
  output flit_hdr_t             miss_hdr,
  output logic [APP_DATA_W-1:0] miss_wdata,
  // line returned from memory with the request that missed
  input  logic                  fill_valid,
  output logic                  fill_ready,
  input  flit_hdr_t             fill_hdr,
  input  logic [APP_DATA_W-1:0] fill_wdata,
  input  logic [MEM_DATA_W-1:0] fill_line,
  // dirty victim (one-cycle pulse)
  output logic                  wb_valid,
  output logic [MEM_ADDR_W-1:0] wb_addr,
  output logic [MEM_DATA_W-1:0] wb_data,
  // responses (one-cycle pulse)
  output logic                  rsp_valid,
  output pe_rsp_t               rsp,
  output logic                  mem_en,
  output logic                  blocked
);
  localparam int unsigned SETS  = NUM_LINES / WAYS;
  localparam int unsigned SET_W = (SETS > 1) ? $clog2(SETS) : 1;
  localparam int unsigned WAY_W = (WAYS > 1) ? $clog2(WAYS) : 1;
  localparam int unsigned TAG_W = APP_ADDR_W - LINE_OFF_W - SET_W;

  typedef logic [SET_W-1:0] set_t;
  typedef logic [TAG_W-1:0] tag_t;
  typedef logic [WAY_W-1:0] way_t;

  function automatic set_t set_of(input logic [APP_ADDR_W-1:0] a);
    return a[LINE_OFF_W +: SET_W];
  endfunction
  function automatic tag_t tag_of(input logic [APP_ADDR_W-1:0] a);
    return a[APP_ADDR_W-1 -: TAG_W];
  endfunction
  function automatic logic [WORD_OFF_W-1:0] word_of(input logic [APP_ADDR_W-1:0] a);
    return a[LINE_OFF_W-1 -: WORD_OFF_W];
  endfunction

  // ---------------- state shared by both pipelines ----------------
  logic [WAYS-1:0] vld   [SETS];
  logic [WAYS-1:0] dirty [SETS];
  logic [WAYS-1:0][WAY_W-1:0] age [SETS];   // per way, 0 = most recently used

  tag_t                  tag_q  [WAYS];   // Tag_x
  logic [WAYS-1:0]       vld_q;
  logic [MEM_DATA_W-1:0] data_q [WAYS];   // Data_x

  // RAM port controls
  logic                  tag_rd_en;
  set_t                  tag_rd_set;
  logic [WAYS-1:0]       tag_we;
  set_t                  tag_wr_set;
  tag_t                  tag_wdata;
  logic                  data_rd_en;
  set_t                  data_rd_set;
  logic [WAYS-1:0]       data_we;
  set_t                  data_wr_set;
  logic [WORDS_PER_LINE-1:0] data_wmask;
  logic [MEM_DATA_W-1:0] data_wdata;

  for (genvar w = 0; w < WAYS; w++) begin : g_way
    tag_t                  tag_ram  [SETS];
    logic [MEM_DATA_W-1:0] data_ram [SETS];
    always_ff @(posedge clk) begin
      if (tag_we[w]) tag_ram[tag_wr_set] <= tag_wdata;
      if (tag_rd_en) tag_q[w] <= tag_ram[tag_rd_set];
    end
    always_ff @(posedge clk) begin
      for (int i = 0; i < WORDS_PER_LINE; i++)
        if (data_we[w] && data_wmask[i])
          data_ram[data_wr_set][i*APP_DATA_W +: APP_DATA_W] <= data_wdata[i*APP_DATA_W +: APP_DATA_W];
      if (data_rd_en) data_q[w] <= data_ram[data_rd_set];
    end
  end

  // ---------------- PE pipeline registers ----------------
  logic                  s1_v, s2_v, s3_v;
  flit_hdr_t             s1, s2, s3;
  logic [APP_DATA_W-1:0] s1_wd, s2_wd;
  logic                  s2_hit;
  way_t                  s2_way, s3_way;

  // ---------------- MEM pipeline registers ----------------
  logic                  m1_v, m2_v, m3_v;
  flit_hdr_t             m1_hdr;
  logic [APP_DATA_W-1:0] m1_wd;
  logic [MEM_DATA_W-1:0] m1_line;
  way_t                  m1_way;

  logic front_en, back_en, fill_take, s2_miss;
  logic hit_c;
  way_t way_c, victim_c;
  logic [MEM_DATA_W-1:0] merged_line;

  assign mem_en    = m1_v | m2_v | m3_v;
  assign s2_miss   = s2_v && !s2_hit;
  assign back_en   = !mem_en && !rsp_stall;
  assign front_en  = back_en && !blocked && !s2_miss;     // Stage EN
  assign pe_ready  = front_en;
  assign fill_ready = !mem_en && !s3_v;
  assign fill_take = fill_valid && fill_ready;

  // Tag Compare
  always_comb begin
    hit_c = 1'b0;
    way_c = '0;
    for (int w = 0; w < WAYS; w++)
      if (vld_q[w] && tag_q[w] == tag_of(s1.addr)) begin
        hit_c = 1'b1;
        way_c = way_t'(w);
      end
  end

  // LRU Access: invalid way first, otherwise the oldest
  always_comb begin
    set_t fs;
    logic found;
    fs       = set_of(fill_hdr.addr);
    victim_c = '0;
    found    = 1'b0;
    for (int w = 0; w < WAYS; w++)
      if (!found && !vld[fs][w]) begin
        victim_c = way_t'(w);
        found    = 1'b1;
      end
    if (!found)
      for (int w = 0; w < WAYS; w++)
        if (age[fs][w] == way_t'(WAYS - 1)) victim_c = way_t'(w);
  end

  // write-allocate merge of a missed write
  always_comb begin
    merged_line = m1_line;
    if (m1_hdr.acc == ACC_CACHE_WR)
      merged_line[word_of(m1_hdr.addr)*APP_DATA_W +: APP_DATA_W] = m1_wd;
  end

  // RAM port multiplexing
  always_comb begin
    tag_rd_en   = front_en | fill_take | m2_v;
    tag_rd_set  = fill_take ? set_of(fill_hdr.addr) : m2_v ? set_of(s1.addr) : set_of(pe_hdr.addr);
    tag_we      = '0;
    tag_wr_set  = set_of(m1_hdr.addr);
    tag_wdata   = tag_of(m1_hdr.addr);
    data_rd_en  = fill_take | (back_en && s2_v && s2_hit);
    data_rd_set = fill_take ? set_of(fill_hdr.addr) : set_of(s2.addr);
    data_we     = '0;
    data_wr_set = set_of(s2.addr);
    data_wmask  = '0;
    data_wdata  = {WORDS_PER_LINE{s2_wd}};
    if (m1_v) begin
      tag_we[m1_way]  = 1'b1;
      data_we[m1_way] = 1'b1;
      data_wr_set     = set_of(m1_hdr.addr);
      data_wmask      = '1;
      data_wdata      = merged_line;
    end else if (back_en && s2_v && s2_hit && s2.acc == ACC_CACHE_WR) begin
      data_we[s2_way]              = 1'b1;
      data_wmask[word_of(s2.addr)] = 1'b1;
    end
  end

  // LRU update: the used way becomes the youngest, younger ones age by one
  function automatic logic [WAYS-1:0][WAY_W-1:0] touch(input logic [WAYS-1:0][WAY_W-1:0] a, input way_t w);
    logic [WAYS-1:0][WAY_W-1:0] r;
    r = a;
    for (int i = 0; i < WAYS; i++)
      if (a[i] < a[w]) r[i] = a[i] + 1'b1;
    r[w] = '0;
    return r;
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      s1_v <= 1'b0; s2_v <= 1'b0; s3_v <= 1'b0;
      s1 <= '0; s2 <= '0; s3 <= '0; s1_wd <= '0; s2_wd <= '0;
      s2_hit <= 1'b0; s2_way <= '0; s3_way <= '0;
      m1_v <= 1'b0; m2_v <= 1'b0; m3_v <= 1'b0;
      m1_hdr <= '0; m1_wd <= '0; m1_line <= '0; m1_way <= '0;
      vld_q <= '0;
      blocked <= 1'b0;
      miss_valid <= 1'b0; miss_hdr <= '0; miss_wdata <= '0;
      wb_valid <= 1'b0; wb_addr <= '0; wb_data <= '0;
      rsp_valid <= 1'b0; rsp <= '0;
      for (int s = 0; s < SETS; s++) begin
        vld[s]   <= '0;
        dirty[s] <= '0;
        for (int w = 0; w < WAYS; w++) age[s][w] <= way_t'(w);
      end
    end else begin
      miss_valid <= 1'b0;
      wb_valid   <= 1'b0;
      rsp_valid  <= 1'b0;

      // ---- stages 1 and 2 ----
      if (front_en) begin
        s1_v  <= pe_valid;
        s1    <= pe_hdr;
        s1_wd <= pe_wdata;
        vld_q <= vld[set_of(pe_hdr.addr)];
        s2_v  <= s1_v;
        s2    <= s1;
        s2_wd <= s1_wd;
        s2_hit <= hit_c;
        s2_way <= way_c;
      end else if (back_en && s2_v) begin
        s2_v <= 1'b0;
      end

      // ---- stages 3 and 4 ----
      if (back_en) begin
        s3_v   <= s2_v && s2_hit;
        s3     <= s2;
        s3_way <= s2_way;
        if (s2_v && s2_hit) begin
          age[set_of(s2.addr)] <= touch(age[set_of(s2.addr)], s2_way);
          if (s2.acc == ACC_CACHE_WR) dirty[set_of(s2.addr)][s2_way] <= 1'b1;
        end
        if (s2_miss) begin
          miss_valid <= 1'b1;
          miss_hdr   <= s2;
          miss_wdata <= s2_wd;
          blocked    <= 1'b1;
        end
        if (s3_v) begin
          rsp_valid     <= 1'b1;
          rsp.pe_id     <= s3.pe_id;
          rsp.from_dma  <= 1'b0;
          rsp.is_write  <= (s3.acc == ACC_CACHE_WR);
          rsp.last      <= 1'b1;
          rsp.data      <= data_q[s3_way][word_of(s3.addr)*APP_DATA_W +: APP_DATA_W];
        end
      end

      // ---- MEM pipeline ----
      m1_v <= fill_take;
      m2_v <= m1_v;
      m3_v <= m2_v;
      if (fill_take) begin                       // stage 1: LRU Access
        m1_hdr  <= fill_hdr;
        m1_wd   <= fill_wdata;
        m1_line <= fill_line;
        m1_way  <= victim_c;
      end
      if (m1_v) begin                            // stage 2: Tag / Data Update
        if (vld[set_of(m1_hdr.addr)][m1_way] && dirty[set_of(m1_hdr.addr)][m1_way]) begin
          wb_valid <= 1'b1;
          wb_addr  <= {tag_q[m1_way], set_of(m1_hdr.addr), {($clog2(UNITS_PER_LINE)){1'b0}}};
          wb_data  <= data_q[m1_way];
        end
        vld[set_of(m1_hdr.addr)][m1_way]   <= 1'b1;
        dirty[set_of(m1_hdr.addr)][m1_way] <= (m1_hdr.acc == ACC_CACHE_WR);
        age[set_of(m1_hdr.addr)] <= touch(age[set_of(m1_hdr.addr)], m1_way);
        rsp_valid    <= 1'b1;
        rsp.pe_id    <= m1_hdr.pe_id;
        rsp.from_dma <= 1'b0;
        rsp.is_write <= (m1_hdr.acc == ACC_CACHE_WR);
        rsp.last     <= 1'b1;
        rsp.data     <= merged_line[word_of(m1_hdr.addr)*APP_DATA_W +: APP_DATA_W];
      end
      if (m2_v) begin                            // stage 3: BRAM Operation
        vld_q   <= vld[set_of(s1.addr)];
        blocked <= 1'b0;
      end
    end
  end

  // a fill only arrives for an outstanding miss
  assert property (@(posedge clk) disable iff (!rst_n) fill_take |-> blocked);
endmodule
