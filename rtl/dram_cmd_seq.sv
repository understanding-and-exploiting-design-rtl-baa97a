// dram_cmd_seq: DRAM command sequencer whose timing parameters can change with
// every request.
//
// A DIVA Profiling memory controller must run the latency test rows with a
// candidate timing set and the data rows with another, and must be able to
// change both at run time. This sequencer takes one column request at a time
// (in order) together with the timing set that applies to its row, and turns
// it into DDR3 commands for that bank:
//   bank closed              -> ACTIVATE once tRP has passed since its PRECHARGE
//   bank open, other row     -> PRECHARGE once tRAS, tWR and tRTP allow
//   bank open, same row      -> READ/WRITE once tRCD has passed since ACTIVATE
//                               and tCCD since the last column command
// tRCD, tRAS, tRP and tWR come from the timing set; tRAS and tWR are checked
// against the set latched when the row was activated. A request with close=1
// leaves a pending precharge on its bank, issued as soon as tRAS/tWR/tRTP
// allow (when the current request does not use the command bus); a later
// request to that bank also waits for it. Write recovery tWR counts from the
// end of the write burst, CWL + 4 cycles after the WRITE command.
//
// Interface: req_* is a valid/ready port; the request must stay stable while
// req_valid is high, and req_ready is high in the cycle its READ or WRITE is
// issued (write data is taken from the request in that cycle). cmd/cmd_bank/
// cmd_row/cmd_col carry at most one command per cycle, registered.
//
// The four timing parameters and their meaning follow the paper; the command
// policy (in order, open page with optional close), tCCD = 4, CWL = 8 and
// tRTP = 6 (DDR3-1600 values) are this design's choices. Refresh, tFAW, tRRD
// and bus turnaround are left to the surrounding controller.
module dram_cmd_seq
  import diva_pkg::*;
#(
  parameter int unsigned N_BANKS = 8,
  parameter int unsigned ROW_W   = 16,
  parameter int unsigned COL_W   = 7,
  parameter int unsigned TCCD    = 4,
  parameter int unsigned CWL     = 8,
  parameter int unsigned TRTP    = 6,
  parameter int unsigned BANK_W  = (N_BANKS > 1) ? $clog2(N_BANKS) : 1
) (
  input  logic              clk,
  input  logic              rst_n,

  input  logic              req_valid,
  output logic              req_ready,
  input  logic              req_write,
  input  logic [BANK_W-1:0] req_bank,
  input  logic [ROW_W-1:0]  req_row,
  input  logic [COL_W-1:0]  req_col,
  input  logic              req_close,
  input  timing_t           req_timing,

  output dram_cmd_e         cmd,
  output logic [BANK_W-1:0] cmd_bank,
  output logic [ROW_W-1:0]  cmd_row,
  output logic [COL_W-1:0]  cmd_col
);

  localparam int CW = 7;                       // cycle counter width
  localparam logic [CW-1:0] SAT = '1;

  logic [N_BANKS-1:0]  open_q, close_pend_q;
  logic [ROW_W-1:0]    row_q   [N_BANKS];
  timing_t             tim_q   [N_BANKS];
  logic [CW-1:0]       c_act_q [N_BANKS];      // cycles since ACTIVATE
  logic [CW-1:0]       c_pre_q [N_BANKS];      // cycles since PRECHARGE
  logic [CW-1:0]       c_wr_q  [N_BANKS];      // cycles since WRITE
  logic [CW-1:0]       c_rd_q  [N_BANKS];      // cycles since READ
  logic [CW-1:0]       c_col_q;                // cycles since any column cmd

  logic [N_BANKS-1:0]  pre_ok;
  logic                act_ok, col_ok;
  dram_cmd_e           nxt_cmd;
  logic [BANK_W-1:0]   nxt_bank;

  // Precharge allowed on bank b: tRAS since ACT, tWR after the write burst,
  // tRTP since READ.
  always_comb begin
    for (int b = 0; b < N_BANKS; b++) begin
      pre_ok[b] = open_q[b]
               && (c_act_q[b] >= CW'(tim_q[b].tras))
               && (c_wr_q[b]  >= CW'(CWL + 4) + CW'(tim_q[b].twr))
               && (c_rd_q[b]  >= CW'(TRTP));
    end
  end

  always_comb begin
    act_ok    = c_pre_q[req_bank] >= CW'(req_timing.trp);
    col_ok    = (c_act_q[req_bank] >= CW'(tim_q[req_bank].trcd)) && (c_col_q >= CW'(TCCD));
    nxt_cmd   = CMD_NOP;
    nxt_bank  = req_bank;
    req_ready = 1'b0;
    if (req_valid) begin
      if (!open_q[req_bank]) begin
        if (act_ok) nxt_cmd = CMD_ACT;
      end else if (row_q[req_bank] != req_row || close_pend_q[req_bank]) begin
        if (pre_ok[req_bank]) nxt_cmd = CMD_PRE;
      end else if (col_ok) begin
        nxt_cmd   = req_write ? CMD_WR : CMD_RD;
        req_ready = 1'b1;
      end
    end
    // Pending auto-close precharges use otherwise idle command slots.
    if (nxt_cmd == CMD_NOP) begin
      for (int b = N_BANKS - 1; b >= 0; b--) begin
        if (close_pend_q[b] && pre_ok[b]) begin
          nxt_cmd  = CMD_PRE;
          nxt_bank = BANK_W'(b);
        end
      end
    end
  end

  function automatic logic [CW-1:0] inc(logic [CW-1:0] v);
    return (v == SAT) ? v : v + CW'(1);
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      open_q       <= '0;
      close_pend_q <= '0;
      c_col_q      <= SAT;
      for (int b = 0; b < N_BANKS; b++) begin
        row_q[b]   <= '0;
        tim_q[b]   <= STD_TIMING;
        c_act_q[b] <= SAT;
        c_pre_q[b] <= SAT;
        c_wr_q[b]  <= SAT;
        c_rd_q[b]  <= SAT;
      end
      cmd      <= CMD_NOP;
      cmd_bank <= '0;
      cmd_row  <= '0;
      cmd_col  <= '0;
    end else begin
      c_col_q <= inc(c_col_q);
      for (int b = 0; b < N_BANKS; b++) begin
        c_act_q[b] <= inc(c_act_q[b]);
        c_pre_q[b] <= inc(c_pre_q[b]);
        c_wr_q[b]  <= inc(c_wr_q[b]);
        c_rd_q[b]  <= inc(c_rd_q[b]);
      end
      case (nxt_cmd)
        CMD_ACT: begin
          open_q[nxt_bank]  <= 1'b1;
          row_q[nxt_bank]   <= req_row;
          tim_q[nxt_bank]   <= req_timing;
          c_act_q[nxt_bank] <= CW'(1);
        end
        CMD_PRE: begin
          open_q[nxt_bank]       <= 1'b0;
          close_pend_q[nxt_bank] <= 1'b0;
          c_pre_q[nxt_bank]      <= CW'(1);
        end
        CMD_RD, CMD_WR: begin
          c_col_q <= CW'(1);
          if (nxt_cmd == CMD_WR) c_wr_q[nxt_bank] <= CW'(1);
          else                   c_rd_q[nxt_bank] <= CW'(1);
          if (req_close) close_pend_q[nxt_bank] <= 1'b1;
        end
        default: ;
      endcase
      cmd      <= nxt_cmd;
      cmd_bank <= nxt_bank;
      cmd_row  <= req_row;
      cmd_col  <= req_col;
    end
  end

  // A new row is only activated in a closed bank, and a column command only
  // goes to the open row.
  a_act_closed: assert property (@(posedge clk) disable iff (!rst_n)
    nxt_cmd == CMD_ACT |-> !open_q[nxt_bank]);
  a_col_open: assert property (@(posedge clk) disable iff (!rst_n)
    (nxt_cmd == CMD_RD || nxt_cmd == CMD_WR) |-> open_q[nxt_bank] && row_q[nxt_bank] == req_row);

endmodule
