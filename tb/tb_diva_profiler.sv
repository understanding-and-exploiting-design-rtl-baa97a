// tb_diva_profiler: self-checking test of diva_profiler.
//
// The bench plays the memory controller and the DRAM for a small array
// (2 banks x 2 subarrays x 4 columns, 16-row subarrays). It accepts requests
// with random back-pressure, stores written lines, and returns reads in order
// after a random delay. A read comes back uncorrectable when the timing set
// the profiler is testing has any parameter below the part's threshold thr
// (the lowest value that still works), which the bench can change to mimic
// aging or recovery. Checked:
//   * every request goes to the test row (offset = loaded register) of the
//     expected bank/subarray, columns in order, close on the last column,
//     writes carry the pattern (then the inverted pattern), reads follow;
//   * each round issues exactly banks x subarrays x columns x 2 x 2 requests;
//   * the fail bit of each round equals "some parameter of the tested set
//     was below thr";
//   * the current set converges to max(thr, floor) in every parameter, the
//     data-region set is that plus one cycle (capped at the standard values);
//   * after thr.tRCD is raised by two the current tRCD climbs back to it, and
//     after thr.tRAS is lowered it descends again;
//   * rounds start on their own every INTERVAL cycles when enabled.
module tb_diva_profiler;
  import diva_pkg::*;

  localparam int NB = 2, NS = 2, SAB = 4, NC = 4;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic              enable = 0, start = 0, cfg_off_we = 0, inverse = 1;
  logic [SAB-1:0]    cfg_off = 0;
  logic [63:0]       pattern = 64'h3333_3333_3333_3333;
  logic              req_valid, req_ready = 0, req_write, req_close;
  logic [0:0]        req_bank;
  logic [4:0]        req_row;
  logic [1:0]        req_col;
  logic [63:0]       wpat;
  logic              rsp_valid = 0, rsp_ue = 0;
  logic [511:0]      rsp_data = '0;
  logic [SAB-1:0]    test_off;
  timing_t           test_timing, data_timing, cur_timing;
  logic              busy, fail, round_done;
  logic [15:0]       rounds;

  diva_profiler #(.N_BANKS(NB), .SUBARRAYS(NS), .SA_BITS(SAB), .COLS(NC), .INTERVAL(200)) dut (.*);

  int checks = 0, failures = 0;
  timing_t thr;
  logic [511:0] mem [int];
  typedef struct { int due; logic [511:0] d; logic ue; } rd_t;
  rd_t rq[$];
  int cyc = 0;
  int exp_idx = 0, n_req = 0, n_fail_rounds = 0, n_pass_rounds = 0;
  logic round_bad = 0;

  task automatic fail_msg(string s);
    failures++;
    $display("FAIL @%0d: %s", cyc, s);
  endtask

  function automatic logic below(timing_t t, timing_t h);
    return t.trcd < h.trcd || t.tras < h.tras || t.trp < h.trp || t.twr < h.twr;
  endfunction

  // request sequence of one round: (bank, sub, pass, write, col)
  always @(negedge clk) begin
    cyc++;
    // return reads in order
    rsp_valid = 0;
    if (rq.size() > 0 && rq[0].due <= cyc) begin
      rd_t r;
      r = rq.pop_front();
      rsp_valid = 1; rsp_data = r.d; rsp_ue = r.ue;
    end
    req_ready = ($urandom_range(3) != 0);
    #1;
    if (req_valid && req_ready) begin
      int b, s, pass, w, c, key;
      logic [63:0] pat;
      c    = exp_idx % NC;
      w    = ((exp_idx / NC) % 2) == 0;
      pass = (exp_idx / (2 * NC)) % 2;
      s    = (exp_idx / (4 * NC)) % NS;
      b    = (exp_idx / (4 * NC * NS));
      pat  = pass ? ~pattern : pattern;
      checks++;
      if (req_bank != b || req_row != {1'(s), test_off} || req_col != c || req_write != w ||
          req_close != (c == NC - 1) || (w && wpat != pat))
        fail_msg($sformatf("request %0d: bank %0d row %0d col %0d w %0d close %0d", exp_idx,
                           req_bank, req_row, req_col, req_write, req_close));
      if (below(test_timing, thr)) round_bad = 1;
      key = {req_bank, req_row, req_col};
      if (req_write) mem[key] = {8{wpat}};
      else rq.push_back('{cyc + $urandom_range(8, 2), mem.exists(key) ? mem[key] : '0,
                          below(test_timing, thr)});
      exp_idx++;
      n_req++;
    end
  end

  always @(posedge clk) if (rst_n && round_done) begin
    #2;
    checks++;
    if (exp_idx != NB * NS * NC * 4) fail_msg($sformatf("round had %0d requests", exp_idx));
    checks++;
    if (fail != round_bad) fail_msg($sformatf("fail bit %0d, expected %0d", fail, round_bad));
    if (round_bad) n_fail_rounds++; else n_pass_rounds++;
    exp_idx   = 0;
    round_bad = 0;
  end

  task automatic run_rounds(int n);
    int r0;
    r0 = rounds;
    while (rounds < r0 + n) begin
      @(negedge clk);
      start = !busy && !start;
    end
    start = 0;
  endtask

  function automatic int mx(int a, int b);
    return a > b ? a : b;
  endfunction

  task automatic check_converged(string tag);
    timing_t e;
    e.trcd = 6'(mx(thr.trcd, MIN_TIMING.trcd));
    e.tras = 6'(mx(thr.tras, MIN_TIMING.tras));
    e.trp  = 6'(mx(thr.trp,  MIN_TIMING.trp));
    e.twr  = 6'(mx(thr.twr,  MIN_TIMING.twr));
    checks++;
    if (cur_timing != e)
      fail_msg($sformatf("%s: cur %0d/%0d/%0d/%0d expected %0d/%0d/%0d/%0d", tag, cur_timing.trcd,
               cur_timing.tras, cur_timing.trp, cur_timing.twr, e.trcd, e.tras, e.trp, e.twr));
    checks++;
    if (data_timing.trcd != 6'(mx(0, e.trcd + 1 > 11 ? 11 : e.trcd + 1)) ||
        data_timing.tras != 6'(e.tras + 1 > 28 ? 28 : e.tras + 1) ||
        data_timing.trp  != 6'(e.trp + 1 > 11 ? 11 : e.trp + 1) ||
        data_timing.twr  != 6'(e.twr + 1 > 12 ? 12 : e.twr + 1))
      fail_msg($sformatf("%s: data-region timing is not current + 1", tag));
  endtask

  initial begin
    #2000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    thr = '{trcd: 6'd7, tras: 6'd20, trp: 6'd8, twr: 6'd3};
    repeat (3) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    checks++;
    if (cur_timing != STD_TIMING || data_timing != STD_TIMING) fail_msg("reset timing is not standard");
    cfg_off = 4'd13; cfg_off_we = 1;
    @(negedge clk);
    cfg_off_we = 0;
    checks++;
    if (test_off != 4'd13) fail_msg("row address register not loaded");
    run_rounds(4 * 12);
    check_converged("initial");
    // the part slows down (aging): tRCD needs two more cycles
    thr.trcd = 6'd9;
    run_rounds(4 * 6);
    check_converged("aged");
    // the part gets faster: tRAS needs fewer cycles
    thr.tras = 6'd16;
    run_rounds(4 * 10);
    check_converged("recovered");
    // periodic rounds without start
    begin
      int r0;
      r0 = rounds;
      enable = 1;
      repeat (3000) @(negedge clk);
      enable = 0;
      checks++;
      if (rounds == r0) fail_msg("no periodic round");
    end
    repeat (50) @(negedge clk);
    checks++;
    if (n_fail_rounds == 0 || n_pass_rounds == 0) fail_msg("rounds did not both pass and fail");
    $display("rounds=%0d passed=%0d failed=%0d requests=%0d", rounds, n_pass_rounds, n_fail_rounds, n_req);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
