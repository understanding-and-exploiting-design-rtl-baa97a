// tb_diva_mc_full: diva_mc_top at its default (full) size, one complete
// DIVA Profiling round.
//
// Full size is a 4 GB DDR3-1600 ECC DIMM: 8 banks x 65536 rows, 512-row
// subarrays (1024 latency test rows), 128 column bursts of 64 bytes per row.
// The bench loads the test-row offset (511), writes and reads a few host
// lines, then starts one round with the pattern and its inverse while host
// traffic continues. It checks that the round tests every test row (2 x 2 x
// 1024 x 128 column commands to rows at offset 511), that the first
// candidate (tRCD lowered to 10 cycles) passes and becomes the current set
// with an 11-cycle data-region tRCD, that host data stays intact, and it
// reports the round's length against the ideal of one column burst per four
// cycles: 2 x 131072 bursts x 4 cycles = 1,048,576 cycles per pattern
// (1.31 ms at 800 MHz; 1.22 ms when 4 GB is counted as 4e9 bytes).
module tb_diva_mc_full;
  import diva_pkg::*;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic              host_req_valid = 0, host_req_ready, host_req_write = 0;
  logic [2:0]        host_req_bank = 0;
  logic [15:0]       host_req_row = 0;
  logic [6:0]        host_req_col = 0;
  logic [511:0]      host_req_wdata = '0;
  logic              host_rsp_valid, host_rsp_ce, host_rsp_ue;
  logic [511:0]      host_rsp_rdata;
  logic              prof_enable = 0, prof_start = 0, cfg_off_we = 0, cfg_inverse = 1;
  logic [8:0]        cfg_off = 0;
  logic [63:0]       cfg_pattern = 64'h5555_5555_5555_5555;
  logic              prof_busy, prof_fail, prof_round_done;
  logic [15:0]       prof_rounds;
  timing_t           data_timing, test_timing, cur_timing;
  dram_cmd_e         dram_cmd;
  logic [2:0]        dram_bank;
  logic [15:0]       dram_row;
  logic [6:0]        dram_col;
  logic [575:0]      dram_wdata, dram_rdata;
  logic              dram_rvalid;
  timing_t           need_slow, need_fast;

  diva_mc_top dut (.*);

  dimm_model dimm (
    .clk, .cmd(dram_cmd), .bank(dram_bank), .row(dram_row), .col(dram_col), .wdata(dram_wdata),
    .rvalid(dram_rvalid), .rdata(dram_rdata), .slow_off(9'd511), .need_slow, .need_fast);

  int checks = 0, failures = 0;
  longint cyc = 0;
  logic [511:0] eq[$];
  longint n_test_col = 0, n_bad_row = 0;

  task automatic fail_msg(string s);
    failures++;
    $display("FAIL @%0d: %s", cyc, s);
  endtask

  function automatic logic [511:0] line_of(int b, int r, int c);
    return {16{32'(b * 1000003 + r * 131 + c)}};
  endfunction

  always @(negedge clk) begin
    #2;
    cyc++;
    if (rst_n) begin
      if (host_rsp_valid) begin
        checks++;
        if (eq.size() == 0) fail_msg("unexpected host response");
        else if (host_rsp_rdata !== eq.pop_front() || host_rsp_ue) fail_msg("host read data wrong");
      end
      if (dram_cmd == CMD_RD || dram_cmd == CMD_WR) begin
        if (dram_row[8:0] == 9'd511) n_test_col++;
      end
    end
  end

  task automatic host_op(logic w, int b, int r, int c);
    host_req_valid = 1; host_req_write = w; host_req_bank = 3'(b);
    host_req_row = 16'(r); host_req_col = 7'(c); host_req_wdata = line_of(b, r, c);
    #1;
    while (!host_req_ready) begin
      @(negedge clk);
      #1;
    end
    if (!w) eq.push_back(line_of(b, r, c));
    @(negedge clk);
    host_req_valid = 0;
  endtask

  initial begin
    #200000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    longint t0, t1, ideal;
    need_slow = '{trcd: 6'd7, tras: 6'd13, trp: 6'd8, twr: 6'd6};
    need_fast = '{trcd: 6'd6, tras: 6'd12, trp: 6'd7, twr: 6'd5};
    repeat (3) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    cfg_off = 9'd511; cfg_off_we = 1;
    @(negedge clk);
    cfg_off_we = 0;
    for (int i = 0; i < 64; i++) host_op(1, i % 8, 2100 + i, i % 128);
    for (int i = 0; i < 64; i++) host_op(0, i % 8, 2100 + i, i % 128);
    prof_start = 1;
    @(negedge clk);
    prof_start = 0;
    t0 = cyc;
    // host traffic during the round
    for (int i = 0; i < 200; i++) begin
      host_op(0, i % 8, 2100 + (i % 64), (i % 64) % 128);
      repeat (1000) @(negedge clk);
    end
    while (!prof_round_done) @(negedge clk);
    t1 = cyc;
    repeat (100) @(negedge clk);
    ideal = 2 * 2 * 1024 * 128 * 4;
    $display("round: %0d cycles for 2 patterns, ideal %0d (%0d%%)", t1 - t0, ideal, (t1 - t0) * 100 / ideal);
    checks++;
    if (prof_rounds != 1 || prof_fail) fail_msg("round did not complete and pass");
    checks++;
    if (n_test_col != 2 * 2 * 1024 * 128) fail_msg($sformatf("%0d test-row column commands", n_test_col));
    checks++;
    if (cur_timing.trcd != 6'd10 || data_timing.trcd != 6'd11) fail_msg("tRCD not lowered to 10 (data 11)");
    checks++;
    if (t1 - t0 > ideal * 11 / 10) fail_msg("round takes more than 110% of the ideal time");
    checks++;
    if (eq.size() != 0) fail_msg("host reads lost");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
