// dimm_model: behavioural model of a DDR3 ECC DIMM with design-induced
// latency variation, for testbenches only (not synthesizable).
//
// Storage is sparse (an associative array of 576-bit lines keyed by bank, row
// and column), so a full-size address space costs only what is written.
// Commands are sampled on the rising clock edge; read data returns CL cycles
// after READ, in order.
//
// Failure model. Every parameter has a requirement in cycles: need_slow for
// rows whose offset within a subarray equals slow_off (the slowest row by
// design), need_fast for all other rows. When a command comes earlier than
// the requirement, the shortfall d (in cycles) decides how many of the
// chips' slow burst positions fail:
//   tRCD (ACT->column), tRP (PRE->ACT)  -> the data read is corrupted;
//   tRAS (ACT->PRE), tWR (end of write burst->PRE) -> the row is left weakly
//                                          restored and reads of it are
//                                          corrupted until it is rewritten.
// A read with shortfall d flips bit 3 of every data chip (lanes 0-7) in the
// chip-internal burst beats SLOW_BEAT[0..d-1], i.e. the same positions in
// all chips, as the paper observes for design-induced variation. Shortfalls
// of several parameters do not add: the largest counts.
module dimm_model
  import diva_pkg::*;
#(
  parameter int N_BANKS = 8,
  parameter int ROW_W   = 16,
  parameter int COL_W   = 7,
  parameter int SA_BITS = 9,
  parameter int CL      = 11,
  parameter int CWL     = 8,
  parameter int BANK_W  = (N_BANKS > 1) ? $clog2(N_BANKS) : 1
) (
  input  logic                    clk,
  input  dram_cmd_e               cmd,
  input  logic [BANK_W-1:0]       bank,
  input  logic [ROW_W-1:0]        row,
  input  logic [COL_W-1:0]        col,
  input  logic [CODED_LINE_W-1:0] wdata,
  output logic                    rvalid,
  output logic [CODED_LINE_W-1:0] rdata,
  input  logic [SA_BITS-1:0]      slow_off,
  input  timing_t                 need_slow,
  input  timing_t                 need_fast
);

  localparam int SLOW_BEAT [8] = '{2, 6, 5, 1, 0, 3, 4, 7};

  typedef logic [BANK_W+ROW_W+COL_W-1:0] key_t;
  typedef logic [BANK_W+ROW_W-1:0]       rkey_t;

  logic [CODED_LINE_W-1:0] mem  [key_t];
  int                      weak_d [rkey_t];

  longint now = 0;
  longint act_t [N_BANKS], pre_t [N_BANKS], wr_end_t [N_BANKS];
  logic   open_b [N_BANKS], wrote [N_BANKS];
  logic [ROW_W-1:0] orow [N_BANKS];
  int     rp_short [N_BANKS];

  typedef struct { longint due; logic [CODED_LINE_W-1:0] d; } rd_t;
  rd_t rq[$];

  // statistics for testbenches
  int n_act = 0, n_pre = 0, n_rd = 0, n_wr = 0, n_corrupt_rd = 0, n_weak_pre = 0;

  initial begin
    for (int b = 0; b < N_BANKS; b++) begin
      act_t[b] = -1000; pre_t[b] = -1000; wr_end_t[b] = -1000;
      open_b[b] = 0; wrote[b] = 0; rp_short[b] = 0; orow[b] = '0;
    end
    rvalid = 0;
    rdata  = '0;
  end

  function automatic timing_t need_of(logic [ROW_W-1:0] r);
    return (r[SA_BITS-1:0] == slow_off) ? need_slow : need_fast;
  endfunction

  function automatic int short_of(int need, longint used);
    return (used >= need) ? 0 : int'(need - used);
  endfunction

  function automatic logic [CODED_LINE_W-1:0] corrupt(logic [CODED_LINE_W-1:0] l, int d);
    for (int j = 0; j < d && j < 8; j++)
      for (int c = 0; c < 8; c++)
        l[SLOW_BEAT[j]*CW_W + c*8 + 3] = ~l[SLOW_BEAT[j]*CW_W + c*8 + 3];
    return l;
  endfunction

  always @(posedge clk) begin
    timing_t n;
    int d;
    key_t k;
    rkey_t rk;
    now++;
    rvalid <= 1'b0;
    if (rq.size() > 0 && rq[0].due <= now) begin
      rd_t r;
      r = rq.pop_front();
      rvalid <= 1'b1;
      rdata  <= r.d;
    end
    k  = {bank, orow[bank], col};
    rk = {bank, orow[bank]};
    case (cmd)
      CMD_ACT: begin
        n_act++;
        n = need_of(row);
        open_b[bank]   = 1;
        orow[bank]     = row;
        act_t[bank]    = now;
        wrote[bank]    = 0;
        rp_short[bank] = short_of(n.trp, now - pre_t[bank]);
      end
      CMD_WR: begin
        n_wr++;
        mem[k]         = wdata;
        wrote[bank]    = 1;
        wr_end_t[bank] = now + CWL + 4;
      end
      CMD_RD: begin
        logic [CODED_LINE_W-1:0] l;
        n_rd++;
        n = need_of(orow[bank]);
        d = short_of(n.trcd, now - act_t[bank]);
        if (rp_short[bank] > d) d = rp_short[bank];
        if (weak_d.exists(rk) && weak_d[rk] > d) d = weak_d[rk];
        l = mem.exists(k) ? mem[k] : '0;
        if (d > 0) n_corrupt_rd++;
        rq.push_back('{now + CL, corrupt(l, d)});
      end
      CMD_PRE: begin
        n_pre++;
        n = need_of(orow[bank]);
        d = short_of(n.tras, now - act_t[bank]);
        if (wrote[bank] && short_of(n.twr, now - wr_end_t[bank]) > d)
          d = short_of(n.twr, now - wr_end_t[bank]);
        if (d > 0) n_weak_pre++;
        if (wrote[bank]) weak_d[rk] = d;
        else if (!weak_d.exists(rk) || d > weak_d[rk]) weak_d[rk] = d;
        open_b[bank] = 0;
        pre_t[bank]  = now;
      end
      default: ;
    endcase
  end

endmodule
