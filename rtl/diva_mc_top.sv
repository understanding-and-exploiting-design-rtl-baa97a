// diva_mc_top: memory-controller side of DIVA-DRAM for one DDR3 ECC DIMM.
//
// DIVA-DRAM lowers DRAM latency below the datasheet values by exploiting
// design-induced variation: the cells that are slowest by design sit at known
// places of every subarray and of every chip's burst. Two mechanisms:
//   * DIVA Profiling (diva_profiler): periodically tests only the slowest row
//     of every subarray with a reduced candidate timing and keeps the lowest
//     timing under which no test row shows an uncorrectable error; the data
//     rows then run at that timing plus a one-cycle margin.
//   * DIVA Shuffling (diva_shuffle): places each chip's share of the eight
//     SECDED codewords of a line at rotated burst positions, so the bits that
//     fail first (same position in every chip) fall into different codewords
//     and stay correctable.
//
// Data path. Write: host line (512) -> 8 x secded_enc -> diva_shuffle ->
// dram_wdata (576 = 8 beats x 72 bits, beat k at [72k +: 72]). Read:
// dram_rdata -> diva_shuffle (inverse) -> 8 x secded_dec -> registered
// response to the host or to the profiler, in order (a small FIFO remembers
// who issued each read).
//
// Control path. Host and profiler requests share one dram_cmd_seq through a
// round-robin arbiter that holds its choice until the request is accepted.
// diva_timing_sel gives each request the test-region timing (profiler's
// candidate) if its row is a latency test row, else the data-region timing.
//
// DRAM side (to a DDR3 PHY, not part of this design): dram_cmd/bank/row/col
// one command per cycle; dram_wdata is valid in the cycle dram_cmd is
// CMD_WR; dram_rvalid/dram_rdata return each READ's line in order.
// Host side: host_req_* valid/ready (stable while valid), host_rsp_* one cycle
// after dram_rvalid with ce/ue = some codeword corrected / uncorrectable.
// Host software must leave the test rows (one row per subarray, 0.2% of the
// capacity at 512 rows per subarray) unused.
//
// Defaults follow the paper's 4 GB DDR3-1600 DIMM: 8 banks, 64K rows of 128
// column bursts per bank, 512-row subarrays. The arbitration, the response
// FIFO and the port layout are this design's choices.
module diva_mc_top
  import diva_pkg::*;
#(
  parameter int unsigned N_BANKS       = 8,
  parameter int unsigned ROWS_PER_BANK = 65536,
  parameter int unsigned SA_ROWS       = 512,
  parameter int unsigned COLS          = 128,
  parameter int unsigned INTERVAL      = 51_200_000,
  parameter int unsigned MARGIN        = 1,
  parameter int unsigned ROT_STEP      = 1,
  parameter int unsigned BANK_W        = (N_BANKS > 1) ? $clog2(N_BANKS) : 1,
  parameter int unsigned ROW_W         = $clog2(ROWS_PER_BANK),
  parameter int unsigned SA_BITS       = $clog2(SA_ROWS),
  parameter int unsigned COL_W         = (COLS > 1) ? $clog2(COLS) : 1
) (
  input  logic                    clk,
  input  logic                    rst_n,

  // host requests (one 64-byte line per request)
  input  logic                    host_req_valid,
  output logic                    host_req_ready,
  input  logic                    host_req_write,
  input  logic [BANK_W-1:0]       host_req_bank,
  input  logic [ROW_W-1:0]        host_req_row,
  input  logic [COL_W-1:0]        host_req_col,
  input  logic [LINE_W-1:0]       host_req_wdata,
  output logic                    host_rsp_valid,
  output logic [LINE_W-1:0]       host_rsp_rdata,
  output logic                    host_rsp_ce,
  output logic                    host_rsp_ue,

  // profiling control (values a DIMM's SPD would supply) and status
  input  logic                    prof_enable,
  input  logic                    prof_start,
  input  logic                    cfg_off_we,
  input  logic [SA_BITS-1:0]      cfg_off,
  input  logic [DATA_W-1:0]       cfg_pattern,
  input  logic                    cfg_inverse,
  output logic                    prof_busy,
  output logic                    prof_fail,
  output logic                    prof_round_done,
  output logic [15:0]             prof_rounds,
  output timing_t                 data_timing,
  output timing_t                 test_timing,
  output timing_t                 cur_timing,

  // DRAM / PHY side
  output dram_cmd_e               dram_cmd,
  output logic [BANK_W-1:0]       dram_bank,
  output logic [ROW_W-1:0]        dram_row,
  output logic [COL_W-1:0]        dram_col,
  output logic [CODED_LINE_W-1:0] dram_wdata,
  input  logic                    dram_rvalid,
  input  logic [CODED_LINE_W-1:0] dram_rdata
);

  localparam int unsigned SUBARRAYS = ROWS_PER_BANK / SA_ROWS;
  localparam int unsigned FIFO_D    = 16;

  // ---------------- profiler ----------------
  logic                p_valid, p_ready, p_write, p_close;
  logic [BANK_W-1:0]   p_bank;
  logic [ROW_W-1:0]    p_row;
  logic [COL_W-1:0]    p_col;
  logic [DATA_W-1:0]   p_wpat;
  logic                p_rsp_valid;
  logic [SA_BITS-1:0]  test_off;

  // ---------------- read return ----------------
  logic [LINE_W-1:0]   dec_data;
  logic                dec_ce, dec_ue;
  logic [LINE_W-1:0]   rsp_data_q;
  logic                rsp_ce_q, rsp_ue_q, rsp_valid_q, rsp_src_q;

  diva_profiler #(
    .N_BANKS(N_BANKS), .SUBARRAYS(SUBARRAYS), .SA_BITS(SA_BITS), .COLS(COLS),
    .INTERVAL(INTERVAL), .MARGIN(MARGIN)
  ) u_prof (
    .clk, .rst_n,
    .enable(prof_enable), .start(prof_start),
    .cfg_off_we, .cfg_off, .pattern(cfg_pattern), .inverse(cfg_inverse),
    .req_valid(p_valid), .req_ready(p_ready), .req_write(p_write),
    .req_bank(p_bank), .req_row(p_row), .req_col(p_col), .req_close(p_close),
    .wpat(p_wpat),
    .rsp_valid(p_rsp_valid), .rsp_data(rsp_data_q), .rsp_ue(rsp_ue_q),
    .test_off, .test_timing, .data_timing, .cur_timing,
    .busy(prof_busy), .fail(prof_fail), .rounds(prof_rounds),
    .round_done(prof_round_done)
  );

  // ---------------- arbiter ----------------
  typedef enum logic {SRC_HOST = 1'b0, SRC_PROF = 1'b1} src_e;

  src_e               sel, lock_src_q, last_q;
  logic               lock_q;
  logic               s_valid, s_ready, s_write, s_close;
  logic [BANK_W-1:0]  s_bank;
  logic [ROW_W-1:0]   s_row;
  logic [COL_W-1:0]   s_col;
  logic [LINE_W-1:0]  s_wdata;
  timing_t            s_timing;
  logic               s_is_test;

  always_comb begin
    if (lock_q)                            sel = lock_src_q;
    else if (host_req_valid && p_valid)    sel = (last_q == SRC_HOST) ? SRC_PROF : SRC_HOST;
    else if (p_valid)                      sel = SRC_PROF;
    else                                   sel = SRC_HOST;

    if (sel == SRC_PROF) begin
      s_valid = p_valid;
      s_write = p_write;
      s_bank  = p_bank;
      s_row   = p_row;
      s_col   = p_col;
      s_close = p_close;
      s_wdata = {BEATS{p_wpat}};
    end else begin
      s_valid = host_req_valid;
      s_write = host_req_write;
      s_bank  = host_req_bank;
      s_row   = host_req_row;
      s_col   = host_req_col;
      s_close = 1'b0;
      s_wdata = host_req_wdata;
    end
    host_req_ready = s_ready && (sel == SRC_HOST);
    p_ready        = s_ready && (sel == SRC_PROF);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      lock_q     <= 1'b0;
      lock_src_q <= SRC_HOST;
      last_q     <= SRC_HOST;
    end else begin
      if (s_valid && s_ready) begin
        lock_q <= 1'b0;
        last_q <= sel;
      end else if (s_valid) begin
        lock_q     <= 1'b1;
        lock_src_q <= sel;
      end
    end
  end

  diva_timing_sel #(.ROW_W(ROW_W), .SA_BITS(SA_BITS)) u_tsel (
    .row(s_row), .test_off, .test_timing, .data_timing,
    .is_test(s_is_test), .timing(s_timing)
  );

  dram_cmd_seq #(.N_BANKS(N_BANKS), .ROW_W(ROW_W), .COL_W(COL_W)) u_seq (
    .clk, .rst_n,
    .req_valid(s_valid), .req_ready(s_ready), .req_write(s_write),
    .req_bank(s_bank), .req_row(s_row), .req_col(s_col), .req_close(s_close),
    .req_timing(s_timing),
    .cmd(dram_cmd), .cmd_bank(dram_bank), .cmd_row(dram_row), .cmd_col(dram_col)
  );

  // ---------------- write data path ----------------
  logic [CODED_LINE_W-1:0] enc_line, wdata_d;

  for (genvar b = 0; b < BEATS; b++) begin : g_enc
    secded_enc u_enc (.data(s_wdata[b*DATA_W +: DATA_W]), .code(enc_line[b*CW_W +: CW_W]));
  end

  logic [CODED_LINE_W-1:0] rd_cw;

  diva_shuffle #(.ROT_STEP(ROT_STEP)) u_shuf (
    .wr_cw(enc_line), .wr_dram(wdata_d), .rd_dram(dram_rdata), .rd_cw(rd_cw)
  );

  // Registered together with the WRITE command.
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) dram_wdata <= '0;
    else if (s_valid && s_ready && s_write) dram_wdata <= wdata_d;
  end

  // ---------------- read data path ----------------
  logic [BEATS-1:0] cw_ce, cw_ue;

  for (genvar b = 0; b < BEATS; b++) begin : g_dec
    secded_dec u_dec (
      .code(rd_cw[b*CW_W +: CW_W]), .data(dec_data[b*DATA_W +: DATA_W]),
      .ce(cw_ce[b]), .ue(cw_ue[b])
    );
  end
  assign dec_ce = |cw_ce;
  assign dec_ue = |cw_ue;

  // Source of each outstanding READ, in issue order.
  logic [FIFO_D-1:0]         src_fifo_q;
  logic [$clog2(FIFO_D):0]   cnt_q;
  logic                      rd_issue;
  assign rd_issue = s_valid && s_ready && !s_write;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      src_fifo_q  <= '0;
      cnt_q       <= '0;
      rsp_valid_q <= 1'b0;
      rsp_src_q   <= 1'b0;
      rsp_ce_q    <= 1'b0;
      rsp_ue_q    <= 1'b0;
      rsp_data_q  <= '0;
    end else begin
      rsp_valid_q <= dram_rvalid;
      if (dram_rvalid) begin
        rsp_src_q  <= src_fifo_q[0];
        rsp_data_q <= dec_data;
        rsp_ce_q   <= dec_ce;
        rsp_ue_q   <= dec_ue;
      end
      case ({rd_issue, dram_rvalid})
        2'b10: begin
          src_fifo_q[cnt_q[$clog2(FIFO_D)-1:0]] <= (sel == SRC_PROF);
          cnt_q <= cnt_q + 1'b1;
        end
        2'b01: begin
          src_fifo_q <= src_fifo_q >> 1;
          cnt_q      <= cnt_q - 1'b1;
        end
        2'b11: begin
          src_fifo_q <= src_fifo_q >> 1;
          src_fifo_q[cnt_q[$clog2(FIFO_D)-1:0] - 1'b1] <= (sel == SRC_PROF);
        end
        default: ;
      endcase
    end
  end

  assign host_rsp_valid = rsp_valid_q && (rsp_src_q == SRC_PROF ? 1'b0 : 1'b1);
  assign host_rsp_rdata = rsp_data_q;
  assign host_rsp_ce    = rsp_ce_q;
  assign host_rsp_ue    = rsp_ue_q;
  assign p_rsp_valid    = rsp_valid_q && rsp_src_q;

  // Test rows hold no useful data: the host must not use them.
  a_host_not_test: assert property (@(posedge clk) disable iff (!rst_n)
    (s_valid && sel == SRC_HOST) |-> !s_is_test);
  a_fifo_no_overflow: assert property (@(posedge clk) disable iff (!rst_n)
    rd_issue |-> cnt_q < FIFO_D);
  a_fifo_no_underflow: assert property (@(posedge clk) disable iff (!rst_n)
    dram_rvalid |-> cnt_q != 0);

endmodule
