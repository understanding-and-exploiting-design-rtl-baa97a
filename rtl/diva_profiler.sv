// diva_profiler: DIVA Profiling, online search for the lowest reliable DRAM
// timing using only the latency test rows.
//
// Design-induced variation makes one row per subarray (the one farthest from
// the sense amplifiers and wordline drivers) the slowest. These test rows hold
// no useful data. Periodically (every INTERVAL cycles, or on start) the
// profiler runs one round:
//   1. pick a candidate timing set: the current lowest passing set with one
//      parameter (tRCD, tRAS, tRP, tWR in turn) lowered by one cycle. If that
//      parameter is at its lowest allowed value, or its last lowering failed
//      (its floor bit is set), the candidate is the current set itself, which
//      re-verifies it;
//   2. for every bank and every subarray, write the test pattern to all
//      columns of the test row, close the row, then read all columns back and
//      close the row again (if inverse is set the same is repeated with the
//      inverted pattern). The controller runs test rows with the candidate
//      set, so the write exercises tWR and the reads exercise tRP, tRCD and
//      tRAS. The reads of a row are drained before the next row or pass;
//   3. a single fail bit records whether any read came back with an
//      uncorrectable ECC error or with data that differs from the pattern
//      after correction. Single-bit errors that ECC corrects do not fail;
//   4. at the end: pass -> the candidate becomes the current set (after a
//      passing re-verification the floor bit is cleared, so the next visit
//      tries lower again); fail on a lowered candidate -> the current set
//      stays and the floor bit is set; fail while re-verifying the current
//      set (the part got slower, e.g. with aging) -> that parameter is raised
//      by one cycle, up to its standard value, and is verified again on its
//      next visit.
// The data region is run with the current set plus MARGIN cycles on each
// parameter (capped at the standard values). Before the first round the
// current set is the standard timing.
//
// Interface: req_* is a valid/ready request port (stable while valid), one
// column per request, wpat is the 64-bit pattern of every beat; rsp_valid
// with rsp_data/rsp_ue returns reads in order. test_off is the row address
// register pointing to the slowest row of a subarray, loaded by cfg_off_we.
//
// From the paper: test rows only, one per subarray, all columns tested, one
// fail bit, one row address register, SECDED judging multi-bit errors, the
// standard values as upper bound and a one-cycle margin for the data region.
// This design's own: the one-parameter-at-a-time search, the four floor bits,
// re-verification and back-off, the round structure, the period (64 ms by default) and the
// option of testing the inverted pattern.
module diva_profiler
  import diva_pkg::*;
#(
  parameter int unsigned N_BANKS   = 8,
  parameter int unsigned SUBARRAYS = 128,       // per bank: 65536 rows / 512
  parameter int unsigned SA_BITS   = 9,         // 512 rows per subarray
  parameter int unsigned COLS      = 128,       // column accesses per row
  parameter int unsigned INTERVAL  = 51_200_000,// 64 ms at 800 MHz
  parameter int unsigned MARGIN    = 1,
  parameter int unsigned BANK_W    = (N_BANKS > 1) ? $clog2(N_BANKS) : 1,
  parameter int unsigned SUB_W     = (SUBARRAYS > 1) ? $clog2(SUBARRAYS) : 1,
  parameter int unsigned COL_W     = (COLS > 1) ? $clog2(COLS) : 1,
  parameter int unsigned ROW_W     = SUB_W + SA_BITS
) (
  input  logic                 clk,
  input  logic                 rst_n,

  input  logic                 enable,      // periodic rounds on
  input  logic                 start,       // start a round now (pulse)
  input  logic                 cfg_off_we,
  input  logic [SA_BITS-1:0]   cfg_off,
  input  logic [DATA_W-1:0]    pattern,
  input  logic                 inverse,

  output logic                 req_valid,
  input  logic                 req_ready,
  output logic                 req_write,
  output logic [BANK_W-1:0]    req_bank,
  output logic [ROW_W-1:0]     req_row,
  output logic [COL_W-1:0]     req_col,
  output logic                 req_close,
  output logic [DATA_W-1:0]    wpat,

  input  logic                 rsp_valid,
  input  logic [LINE_W-1:0]    rsp_data,
  input  logic                 rsp_ue,

  output logic [SA_BITS-1:0]   test_off,
  output timing_t              test_timing,
  output timing_t              data_timing,
  output timing_t              cur_timing,
  output logic                 busy,
  output logic                 fail,        // result of the last round
  output logic [15:0]          rounds,
  output logic                 round_done   // pulse at the end of a round
);

  typedef enum logic [2:0] {S_IDLE, S_WRITE, S_READ, S_DRAIN, S_UPDATE} state_e;

  state_e              state_q;
  timing_t             cur_q, cand_q;
  tparam_e             p_q;
  logic                verify_q, fail_q, fail_round_q, inv_q;
  logic [3:0]          floor_q;           // per parameter: last lowering failed
  logic [BANK_W-1:0]   bank_q;
  logic [SUB_W-1:0]    sub_q;
  logic [COL_W-1:0]    col_q;
  logic [SA_BITS-1:0]  off_q;
  logic [31:0]         timer_q;
  logic [15:0]         rounds_q;
  logic [COL_W:0]      outst_q;
  logic [DATA_W-1:0]   cur_pat;
  logic                last_col, last_row, issue, rsp_bad;
  logic [TW-1:0]       cur_v, min_v, std_v;

  assign cur_pat   = inv_q ? ~pattern : pattern;
  assign last_col  = (col_q == COL_W'(COLS - 1));
  assign last_row  = (sub_q == SUB_W'(SUBARRAYS - 1)) && (bank_q == BANK_W'(N_BANKS - 1));
  assign issue     = req_valid && req_ready;

  assign req_valid = (state_q == S_WRITE) || (state_q == S_READ);
  assign req_write = (state_q == S_WRITE);
  assign req_bank  = bank_q;
  assign req_row   = {sub_q, off_q};
  assign req_col   = col_q;
  assign req_close = last_col;
  assign wpat      = cur_pat;

  // A read fails on an uncorrectable codeword or on data that differs from
  // the pattern after correction (a miscorrected multi-bit error).
  assign rsp_bad = rsp_ue || (rsp_data != {BEATS{cur_pat}});

  assign cur_v = tget(cur_q, p_q);
  assign min_v = tget(MIN_TIMING, p_q);
  assign std_v = tget(STD_TIMING, p_q);

  function automatic logic [TW-1:0] add_cap(logic [TW-1:0] v, logic [TW-1:0] cap);
    logic [TW:0] s;
    s = {1'b0, v} + (TW+1)'(MARGIN);
    return (s > {1'b0, cap}) ? cap : s[TW-1:0];
  endfunction

  always_comb begin
    data_timing.trcd = add_cap(cur_q.trcd, STD_TIMING.trcd);
    data_timing.tras = add_cap(cur_q.tras, STD_TIMING.tras);
    data_timing.trp  = add_cap(cur_q.trp,  STD_TIMING.trp);
    data_timing.twr  = add_cap(cur_q.twr,  STD_TIMING.twr);
  end

  assign test_timing = busy ? cand_q : cur_q;
  assign cur_timing  = cur_q;
  assign test_off    = off_q;
  assign busy        = (state_q != S_IDLE);
  assign fail        = fail_q;
  assign rounds      = rounds_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state_q      <= S_IDLE;
      cur_q        <= STD_TIMING;
      cand_q       <= STD_TIMING;
      p_q          <= P_TRCD;
      verify_q     <= 1'b0;
      floor_q      <= '0;
      fail_q       <= 1'b0;
      fail_round_q <= 1'b0;
      inv_q        <= 1'b0;
      bank_q       <= '0;
      sub_q        <= '0;
      col_q        <= '0;
      off_q        <= SA_BITS'((1 << SA_BITS) - 1);
      timer_q      <= '0;
      rounds_q     <= '0;
      outst_q      <= '0;
      round_done   <= 1'b0;
    end else begin
      round_done <= 1'b0;
      if (cfg_off_we && state_q == S_IDLE) off_q <= cfg_off;

      // outstanding reads
      case ({issue && state_q == S_READ, rsp_valid})
        2'b10:   outst_q <= outst_q + 1'b1;
        2'b01:   outst_q <= outst_q - 1'b1;
        default: ;
      endcase
      if (rsp_valid && rsp_bad) fail_round_q <= 1'b1;

      unique case (state_q)
        S_IDLE: begin
          if (enable && timer_q < INTERVAL - 1) timer_q <= timer_q + 1;
          if (start || (enable && timer_q >= INTERVAL - 1)) begin
            timer_q      <= '0;
            fail_round_q <= 1'b0;
            bank_q       <= '0;
            sub_q        <= '0;
            col_q        <= '0;
            inv_q        <= 1'b0;
            if (cur_v > min_v && !floor_q[p_q]) begin
              cand_q   <= tset(cur_q, p_q, cur_v - 1'b1);
              verify_q <= 1'b0;
            end else begin
              cand_q   <= cur_q;
              verify_q <= 1'b1;
            end
            state_q <= S_WRITE;
          end
        end
        S_WRITE: if (issue) begin
          col_q <= last_col ? '0 : col_q + 1'b1;
          if (last_col) state_q <= S_READ;
        end
        S_READ: if (issue) begin
          col_q <= last_col ? '0 : col_q + 1'b1;
          if (last_col) state_q <= S_DRAIN;
        end
        // Wait for the row's reads to return before the next pass or row.
        S_DRAIN: if (outst_q == '0 && !rsp_valid) begin
          if (inverse && !inv_q) begin
            inv_q   <= 1'b1;
            state_q <= S_WRITE;
          end else if (last_row) begin
            state_q <= S_UPDATE;
          end else begin
            inv_q   <= 1'b0;
            state_q <= S_WRITE;
            if (sub_q == SUB_W'(SUBARRAYS - 1)) begin
              sub_q  <= '0;
              bank_q <= bank_q + 1'b1;
            end else begin
              sub_q <= sub_q + 1'b1;
            end
          end
        end
        S_UPDATE: begin
          fail_q   <= fail_round_q;
          rounds_q <= rounds_q + 1'b1;
          if (!fail_round_q) begin
            cur_q <= cand_q;
            if (verify_q) floor_q[p_q] <= 1'b0;
          end else if (!verify_q) begin
            floor_q[p_q] <= 1'b1;
          end else if (cur_v < std_v) begin
            cur_q <= tset(cur_q, p_q, cur_v + 1'b1);
          end
          p_q        <= tparam_e'(p_q + 2'd1);
          round_done <= 1'b1;
          inv_q      <= 1'b0;
          state_q    <= S_IDLE;
        end
        default: state_q <= S_IDLE;
      endcase
    end
  end

  a_no_rsp_underflow: assert property (@(posedge clk) disable iff (!rst_n)
    rsp_valid |-> outst_q != '0 || (issue && state_q == S_READ));

endmodule
