// tb_dram_cmd_seq: self-checking test of dram_cmd_seq.
//
// A command monitor written here keeps its own per-bank state (open row,
// cycle of the last ACTIVATE/PRECHARGE/READ/WRITE, timing set latched at
// ACTIVATE) and checks every command on the bus:
//   ACT  only to a closed bank, >= tRP after its PRECHARGE
//   RD/WR only to the open row, >= tRCD after ACT, >= 4 after any column cmd,
//        with the column of the request being served
//   PRE  >= tRAS after ACT, >= CWL+4+tWR after WRITE, >= 6 after READ
// Directed cases also check exact cycle counts: ACT to READ is exactly tRCD
// and a close after a lone write precharges exactly at max(tRAS, CWL+4+tWR).
// Random traffic (banks, rows, close flags, timing sets that change from
// request to request) then checks the rules and that every request is served
// exactly once.
module tb_dram_cmd_seq;
  import diva_pkg::*;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic        req_valid = 0, req_ready, req_write = 0, req_close = 0;
  logic [2:0]  req_bank = 0;
  logic [15:0] req_row = 0;
  logic [6:0]  req_col = 0;
  timing_t     req_timing = STD_TIMING;
  dram_cmd_e   cmd;
  logic [2:0]  cmd_bank;
  logic [15:0] cmd_row;
  logic [6:0]  cmd_col;

  dram_cmd_seq dut (.*);

  int checks = 0, failures = 0;
  longint cyc = 0;
  initial prev_timing = STD_TIMING;
  longint act_t[8], pre_t[8], wr_t[8], rd_t[8], col_t;
  logic   open_m[8];
  logic [15:0] row_m[8];
  timing_t tim_m[8];
  timing_t prev_timing;
  logic [6:0] prev_col;
  int n_col = 0, n_acc = 0, n_pre = 0, n_act = 0;

  task automatic fail(string s);
    failures++;
    $display("FAIL @%0d: %s", cyc, s);
  endtask

  // The bench drives at the falling edge; the monitor samples 2 time units
  // later, when both the request and the registered command are stable.
  always @(negedge clk) begin
    #2;
    cyc++;
    if (rst_n) begin
      case (cmd)
        CMD_ACT: begin
          n_act++;
          checks++;
          if (open_m[cmd_bank]) fail("ACT to open bank");
          checks++;
          if (cyc - pre_t[cmd_bank] < prev_timing.trp) fail($sformatf("tRP violated: %0d", cyc - pre_t[cmd_bank]));
          open_m[cmd_bank] = 1; row_m[cmd_bank] = cmd_row; act_t[cmd_bank] = cyc;
          tim_m[cmd_bank] = prev_timing;
        end
        CMD_PRE: begin
          n_pre++;
          checks++;
          if (!open_m[cmd_bank]) fail("PRE to closed bank");
          checks++;
          if (cyc - act_t[cmd_bank] < tim_m[cmd_bank].tras) fail("tRAS violated");
          checks++;
          if (cyc - wr_t[cmd_bank] < 12 + tim_m[cmd_bank].twr) fail("tWR violated");
          checks++;
          if (cyc - rd_t[cmd_bank] < 6) fail("tRTP violated");
          open_m[cmd_bank] = 0; pre_t[cmd_bank] = cyc;
        end
        CMD_RD, CMD_WR: begin
          n_col++;
          checks++;
          if (!open_m[cmd_bank] || row_m[cmd_bank] != cmd_row) fail("column cmd to wrong row");
          checks++;
          if (cyc - act_t[cmd_bank] < tim_m[cmd_bank].trcd) fail("tRCD violated");
          checks++;
          if (cyc - col_t < 4) fail("tCCD violated");
          checks++;
          if (cmd_col != prev_col) fail("wrong column");
          col_t = cyc;
          if (cmd == CMD_WR) wr_t[cmd_bank] = cyc; else rd_t[cmd_bank] = cyc;
        end
        default: ;
      endcase
    end
    prev_timing = req_timing;
    prev_col    = req_col;
  end

  task automatic send(logic w, int b, int r, int c, logic cl, timing_t t);
    req_valid = 1; req_write = w; req_bank = 3'(b); req_row = 16'(r);
    req_col = 7'(c); req_close = cl; req_timing = t;
    #1;
    while (!req_ready) begin
      @(negedge clk);
      #1;
    end
    @(negedge clk);
    n_acc++;
  endtask

  task automatic idle(int n);
    req_valid = 0;
    repeat (n) @(negedge clk);
  endtask

  initial begin
    #4000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    timing_t t;
    longint ta, tc;
    for (int b = 0; b < 8; b++) begin
      act_t[b] = -1000; pre_t[b] = -1000; wr_t[b] = -1000; rd_t[b] = -1000; open_m[b] = 0;
    end
    col_t = -1000;
    idle(3);
    rst_n = 1;
    @(negedge clk);
    idle(2);

    // exact ACT -> READ distance for several tRCD values
    for (int v = 4; v <= 11; v++) begin
      t = STD_TIMING; t.trcd = 6'(v);
      send(0, 1, 100 + v, 3, 1, t);
      idle(60);
      checks++;
      if (rd_t[1] - act_t[1] != longint'(v)) fail($sformatf("ACT->RD %0d, expected %0d", rd_t[1] - act_t[1], v));
    end
    // exact WRITE -> close distance: max(tRAS after ACT, 12 + tWR after WR)
    t = STD_TIMING; t.trcd = 5; t.tras = 14; t.twr = 7;
    send(1, 2, 7, 0, 1, t);
    idle(60);
    checks++;
    if (pre_t[2] - act_t[2] != ((5 + 12 + 7) > 14 ? 5 + 12 + 7 : 14))
      fail($sformatf("ACT->PRE %0d", pre_t[2] - act_t[2]));
    t.twr = 4; t.tras = 28;
    send(1, 2, 8, 0, 1, t);
    idle(60);
    checks++;
    if (pre_t[2] - act_t[2] != 28) fail($sformatf("ACT->PRE %0d (tRAS bound)", pre_t[2] - act_t[2]));
    // row hits stream at one column per 4 cycles
    t = STD_TIMING;
    send(0, 3, 9, 0, 0, t);
    idle(1);
    tc = col_t;
    for (int c = 1; c < 8; c++) send(0, 3, 9, c, 0, t);
    idle(1);
    checks++;
    if (col_t - tc != 28) fail($sformatf("8 row hits took %0d cycles", col_t - tc));

    // random traffic
    for (int i = 0; i < 3000; i++) begin
      t.trcd = 6'($urandom_range(11, 4));
      t.tras = 6'($urandom_range(28, 12));
      t.trp  = 6'($urandom_range(11, 4));
      t.twr  = 6'($urandom_range(12, 4));
      send($urandom_range(1), $urandom_range(7), $urandom_range(3), $urandom_range(127),
           ($urandom_range(3) == 0), t);
      if ($urandom_range(5) == 0) idle($urandom_range(10));
    end
    idle(100);
    checks++;
    if (n_col != n_acc) fail($sformatf("%0d column commands for %0d requests", n_col, n_acc));
    checks++;
    if (n_act == 0 || n_pre == 0) fail("no ACT or PRE seen");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
