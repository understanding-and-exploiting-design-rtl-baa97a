// tb_diva_shuffle: self-checking test of diva_shuffle.
//
// 1. Mapping: for random lines, the byte of codeword b in lane c must appear
//    in DRAM-side beat (b + c) mod 8, lane c (ECC lane 8 not rotated).
// 2. Inverse: feeding wr_dram back through the read direction gives the
//    codewords back.
// 3. Purpose: when the same chip-internal beat position is corrupted in every
//    chip (one bit per chip), each codeword seen after the inverse mapping
//    holds at most one flipped bit; with the conventional mapping (computed
//    here) one codeword would hold eight.
module tb_diva_shuffle;
  import diva_pkg::*;

  logic [CODED_LINE_W-1:0] wr_cw, wr_dram, rd_dram, rd_cw;
  int checks = 0, failures = 0;

  diva_shuffle dut (.wr_cw, .wr_dram, .rd_dram, .rd_cw);

  function automatic logic [CODED_LINE_W-1:0] rnd_line();
    logic [CODED_LINE_W-1:0] l;
    for (int i = 0; i < CODED_LINE_W / 32; i++) l[32*i +: 32] = $urandom;
    return l;
  endfunction

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int it = 0; it < 50; it++) begin
      wr_cw   = rnd_line();
      rd_dram = '0;
      #1;
      for (int b = 0; b < 8; b++) begin
        for (int c = 0; c < 9; c++) begin
          int k;
          k = (c == 8) ? b : (b + c) % 8;
          checks++;
          if (wr_dram[72*k + 8*c +: 8] !== wr_cw[72*b + 8*c +: 8]) begin
            failures++;
            $display("FAIL cw %0d lane %0d not at beat %0d", b, c, k);
          end
        end
      end
      rd_dram = wr_dram;
      #1;
      checks++;
      if (rd_cw !== wr_cw) begin
        failures++;
        $display("FAIL inverse mapping");
      end
    end
    // slow beat position k in all eight data chips
    for (int k = 0; k < 8; k++) begin
      int n;
      rd_dram = '0;
      for (int c = 0; c < 8; c++) rd_dram[72*k + 8*c + 3] = 1'b1;
      #1;
      for (int b = 0; b < 8; b++) begin
        n = $countones(rd_cw[72*b +: 72]);
        checks++;
        if (n > 1) begin
          failures++;
          $display("FAIL slow beat %0d puts %0d errors in codeword %0d", k, n, b);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
