// tb_diva_mc_top: end-to-end test of diva_mc_top with the dimm_model DIMM.
//
// Reduced size: 2 banks, 64 rows per bank in 16-row subarrays, 8 columns per
// row, a profiling period of 3000 cycles. The slowest row of each subarray
// (offset 15) is the latency test row. The model needs, in the slow rows,
// tRCD/tRAS/tRP/tWR = 7/13/8/6 cycles and one cycle less in all other rows;
// a one-cycle shortfall flips one bit per chip at the same burst position
// (correctable after shuffling), two cycles flip two (uncorrectable).
//
// Host traffic (random writes and reads of data rows, checked against a
// scoreboard) runs all the time. Phases:
//   1. standard timing, profiling off;
//   2. profiling on: the current set must settle at 6/12/7/5 (one cycle
//      below the slow rows' need, reachable because ECC corrects the single
//      flipped bit per codeword; tRAS stops at its floor of 12) and the data
//      region at one more cycle;
//   3. aging: tRCD needs two more cycles everywhere. Host reads then see
//      single-bit errors that ECC corrects, the profiler's re-verification
//      fails and tRCD climbs back to 8 (data region 9);
//   4. latency: a read that must close another row of its bank first is
//      measured at standard and at the profiled timing; it must be shorter by
//      exactly the tRP plus tRCD reduction.
// Every mechanism is counted and must happen at least once: rounds that pass,
// rounds that fail, a timing reduction, a re-verification that raises a
// parameter, ECC corrections on host and profiler reads, host/profiler
// arbitration conflicts, corrupted test-row reads in the DIMM.
module tb_diva_mc_top;
  import diva_pkg::*;

  localparam int NB = 2, RPB = 64, SAR = 16, NC = 8;
  localparam int BW = 1, RW = 6, SAB = 4, CWD = 3;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic              host_req_valid = 0, host_req_ready, host_req_write = 0;
  logic [BW-1:0]     host_req_bank = 0;
  logic [RW-1:0]     host_req_row = 0;
  logic [CWD-1:0]    host_req_col = 0;
  logic [511:0]      host_req_wdata = '0;
  logic              host_rsp_valid, host_rsp_ce, host_rsp_ue;
  logic [511:0]      host_rsp_rdata;
  logic              prof_enable = 0, prof_start = 0, cfg_off_we = 0, cfg_inverse = 1;
  logic [SAB-1:0]    cfg_off = 0;
  logic [63:0]       cfg_pattern = 64'h3333_3333_3333_3333;
  logic              prof_busy, prof_fail, prof_round_done;
  logic [15:0]       prof_rounds;
  timing_t           data_timing, test_timing, cur_timing;
  dram_cmd_e         dram_cmd;
  logic [BW-1:0]     dram_bank;
  logic [RW-1:0]     dram_row;
  logic [CWD-1:0]    dram_col;
  logic [575:0]      dram_wdata, dram_rdata;
  logic              dram_rvalid;
  timing_t           need_slow, need_fast;

  diva_mc_top #(.N_BANKS(NB), .ROWS_PER_BANK(RPB), .SA_ROWS(SAR), .COLS(NC), .INTERVAL(3000)) dut (.*);

  dimm_model #(.N_BANKS(NB), .ROW_W(RW), .COL_W(CWD), .SA_BITS(SAB)) dimm (
    .clk, .cmd(dram_cmd), .bank(dram_bank), .row(dram_row), .col(dram_col), .wdata(dram_wdata),
    .rvalid(dram_rvalid), .rdata(dram_rdata), .slow_off(4'd15), .need_slow, .need_fast);

  int checks = 0, failures = 0;
  int cyc = 0;
  logic [511:0] sb [int];          // host scoreboard
  typedef struct { logic [511:0] d; int t; } exp_t;
  exp_t eq[$];
  int n_host_rd = 0, n_host_ce = 0, n_prof_ce = 0, n_conflict = 0;
  int n_pass = 0, n_fail = 0, n_reduce = 0, n_raise = 0;
  int last_lat = 0;
  bit traffic = 0;
  timing_t prev_cur;

  task automatic fail_msg(string s);
    failures++;
    $display("FAIL @%0d: %s", cyc, s);
  endtask

  function automatic logic [511:0] rnd_line();
    logic [511:0] l;
    for (int i = 0; i < 16; i++) l[32*i +: 32] = $urandom;
    return l;
  endfunction

  // monitor: responses, mechanism counters
  always @(negedge clk) begin
    #2;
    cyc++;
    if (rst_n) begin
      if (host_rsp_valid) begin
        exp_t e;
        checks++;
        if (eq.size() == 0) fail_msg("unexpected host response");
        else begin
          e = eq.pop_front();
          last_lat = cyc - e.t;
          if (host_rsp_rdata !== e.d || host_rsp_ue) fail_msg($sformatf("host read data wrong: got %h exp %h ue %b", host_rsp_rdata[63:0], e.d[63:0], host_rsp_ue));
        end
        if (host_rsp_ce) n_host_ce++;
      end
      if (dut.rsp_valid_q && dut.rsp_src_q && dut.rsp_ce_q) n_prof_ce++;
      if (host_req_valid && dut.p_valid) n_conflict++;
      if (prof_round_done) begin
        if (prof_fail) n_fail++; else n_pass++;
      end
      if (cur_timing != prev_cur) begin
        if (cur_timing.trcd < prev_cur.trcd || cur_timing.tras < prev_cur.tras ||
            cur_timing.trp < prev_cur.trp || cur_timing.twr < prev_cur.twr) n_reduce++;
        if (cur_timing.trcd > prev_cur.trcd || cur_timing.tras > prev_cur.tras ||
            cur_timing.trp > prev_cur.trp || cur_timing.twr > prev_cur.twr) n_raise++;
      end
      prev_cur = cur_timing;
    end
  end

  task automatic host_op(logic w, int b, int r, int c, logic [511:0] d);
    int t0;
    t0 = cyc;
    host_req_valid = 1; host_req_write = w; host_req_bank = BW'(b);
    host_req_row = RW'(r); host_req_col = CWD'(c); host_req_wdata = d;
    #1;
    while (!host_req_ready) begin
      @(negedge clk);
      #1;
    end
    if (w) sb[(b * 100000 + r * 100 + c)] = d;
    else begin
      eq.push_back('{sb.exists((b * 100000 + r * 100 + c)) ? sb[(b * 100000 + r * 100 + c)] : '0, t0});
      n_host_rd++;
    end
    @(negedge clk);
    host_req_valid = 0;
  endtask

  task automatic random_host_op();
    int b, r, c;
    b = $urandom_range(NB - 1);
    r = $urandom_range(RPB - 1);
    if (r % SAR == 15) r = r - 1;        // test rows are reserved
    r = r % 8;                           // a few rows: many hits and reads of written data
    c = $urandom_range(NC - 1);
    host_op($urandom_range(1), b, r, c, rnd_line());
  endtask

  task automatic drain();
    int n;
    n = 0;
    while (eq.size() > 0 && n < 1000) begin
      @(negedge clk);
      n++;
    end
  endtask

  always begin
    @(negedge clk);
    if (traffic) begin
      random_host_op();
      repeat ($urandom_range(6)) @(negedge clk);
    end
  end

  task automatic wait_rounds(int n);
    int r0;
    r0 = prof_rounds;
    while (prof_rounds < r0 + n) @(negedge clk);
  endtask

  task automatic closed_read_latency(int b, int r, output int lat);
    // close everything by touching another row of the bank first
    host_op(0, b, r + 1, 0, '0);
    drain();
    repeat (40) @(negedge clk);
    host_op(0, b, r, 0, '0);
    drain();
    lat = last_lat;
  endtask

  initial begin
    #20000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int lat_std, lat_fast;
    timing_t e;
    need_slow = '{trcd: 6'd7, tras: 6'd13, trp: 6'd8, twr: 6'd6};
    need_fast = '{trcd: 6'd6, tras: 6'd12, trp: 6'd7, twr: 6'd5};
    prev_cur  = STD_TIMING;
    repeat (3) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    cfg_off = 4'd15; cfg_off_we = 1;
    @(negedge clk);
    cfg_off_we = 0;

    // 1. standard timing
    closed_read_latency(1, 2, lat_std);
    traffic = 1;
    repeat (3000) @(negedge clk);

    // 2. profiling
    prof_enable = 1;
    wait_rounds(64);
    e = '{trcd: 6'd6, tras: 6'd12, trp: 6'd7, twr: 6'd5};
    checks++;
    if (cur_timing != e)
      fail_msg($sformatf("profiled %0d/%0d/%0d/%0d, expected 6/12/7/5", cur_timing.trcd,
                         cur_timing.tras, cur_timing.trp, cur_timing.twr));
    checks++;
    if (data_timing != '{trcd: 6'd7, tras: 6'd13, trp: 6'd8, twr: 6'd6})
      fail_msg("data-region timing is not profiled + 1");

    // 3. aging
    need_slow.trcd = 6'd9;
    need_fast.trcd = 6'd8;
    wait_rounds(24);
    checks++;
    if (cur_timing.trcd != 6'd8 || data_timing.trcd != 6'd9)
      fail_msg($sformatf("after aging tRCD %0d (data %0d), expected 8 (9)", cur_timing.trcd,
                         data_timing.trcd));

    // 4. latency at the profiled timing
    traffic = 0;
    prof_enable = 0;
    repeat (20) @(negedge clk);
    while (prof_busy) @(negedge clk);
    drain();
    closed_read_latency(1, 2, lat_fast);
    checks++;
    if (lat_std - lat_fast != int'(STD_TIMING.trcd) - int'(data_timing.trcd)
                            + int'(STD_TIMING.trp) - int'(data_timing.trp))
      fail_msg($sformatf("row-conflict read latency %0d -> %0d cycles", lat_std, lat_fast));
    $display("row-conflict read latency: %0d cycles at standard timing, %0d profiled", lat_std, lat_fast);
    repeat (50) @(negedge clk);
    checks++;
    if (eq.size() != 0) fail_msg("host reads lost");

    $display("host reads %0d, host ECC corrections %0d, profiler ECC corrections %0d",
             n_host_rd, n_host_ce, n_prof_ce);
    $display("rounds %0d: passed %0d, failed %0d; reductions %0d, raises %0d; conflicts %0d; corrupted DIMM reads %0d",
             prof_rounds, n_pass, n_fail, n_reduce, n_raise, n_conflict, dimm.n_corrupt_rd);
    checks++; if (n_pass == 0)             fail_msg("no passing round");
    checks++; if (n_fail == 0)             fail_msg("no failing round");
    checks++; if (n_reduce == 0)           fail_msg("no timing reduction");
    checks++; if (n_raise == 0)            fail_msg("no re-verification raise");
    checks++; if (n_host_ce == 0)          fail_msg("no ECC correction on host reads");
    checks++; if (n_prof_ce == 0)          fail_msg("no ECC correction on test-row reads");
    checks++; if (n_conflict == 0)         fail_msg("no arbitration conflict");
    checks++; if (dimm.n_corrupt_rd == 0)  fail_msg("no corrupted DIMM read");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
