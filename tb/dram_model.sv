// dram_model: behavioural model of the DDR4 memory interface and DRAM, for
// simulation only (not synthesizable: sparse associative-array storage).
//
// Requests are served one at a time under an open-row policy, with the
// latencies of the DRAM timing model: a row hit costs TCL cycles, an access
// to a bank with no open row TRCD + TCL, a row conflict TRP + TRCD + TCL
// (all in controller clock cycles). req_ready is the DRAM availability.
// Reads return {tag, line} as a one-cycle pulse in request order; untouched
// lines read as tb_pkg::line_init(address). Counters report row hits,
// first accesses and conflicts.
module dram_model
  import mc_pkg::*;
#(
  parameter int unsigned TCL  = 4,
  parameter int unsigned TRCD = 4,
  parameter int unsigned TRP  = 4
) (
  input  logic     clk,
  input  logic     rst_n,
  input  logic     req_valid,
  output logic     req_ready,
  input  mem_req_t req,
  output logic     rsp_valid,
  output mem_rsp_t rsp
);
  logic [MEM_DATA_W-1:0] store [logic [MEM_ADDR_W-1:0]];
  logic [ROW_W-1:0]      open_row [1 << BANK_W];
  logic                  row_open [1 << BANK_W];
  mem_req_t              cur;
  logic                  busy;
  int unsigned           wait_cnt;
  int unsigned           hits, firsts, conflicts, reads, writes;

  assign req_ready = !busy;

  always @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy <= 1'b0; wait_cnt <= 0; rsp_valid <= 1'b0; rsp <= '0; cur <= '0;
      hits <= 0; firsts <= 0; conflicts <= 0; reads <= 0; writes <= 0;
      for (int b = 0; b < (1 << BANK_W); b++) begin row_open[b] <= 1'b0; open_row[b] <= '0; end
    end else begin
      rsp_valid <= 1'b0;
      if (!busy && req_valid) begin
        automatic int unsigned bank = int'(req.addr[COL_W +: BANK_W]);
        automatic logic [ROW_W-1:0] row = req.addr[MEM_ADDR_W-1 -: ROW_W];
        cur  <= req;
        busy <= 1'b1;
        if (row_open[bank] && open_row[bank] == row) begin
          hits <= hits + 1; wait_cnt <= TCL;
        end else if (!row_open[bank]) begin
          firsts <= firsts + 1; wait_cnt <= TRCD + TCL;
        end else begin
          conflicts <= conflicts + 1; wait_cnt <= TRP + TRCD + TCL;
        end
        row_open[bank] <= 1'b1;
        open_row[bank] <= row;
      end else if (busy) begin
        if (wait_cnt > 1) wait_cnt <= wait_cnt - 1;
        else begin
          busy <= 1'b0;
          if (cur.we) begin
            store[cur.addr] = cur.wdata;
            writes <= writes + 1;
          end else begin
            rsp_valid <= 1'b1;
            rsp.tag   <= cur.tag;
            rsp.rdata <= store.exists(cur.addr) ? store[cur.addr] : tb_pkg::line_init(cur.addr);
            reads <= reads + 1;
          end
        end
      end
    end
  end
endmodule
