// tb_secded: self-checking test of secded_enc.
//
// A reference encoder written here places the 64 data bits at the
// non-power-of-two positions of a 71-bit Hamming word, sets each check bit at
// position 2^j to the XOR of all positions with bit j set, and adds an
// overall even-parity bit. Random and corner data words are encoded by both
// and compared; the test also checks that every codeword has even parity and
// that flipping one data bit changes the check bits.
module tb_secded;
  import diva_pkg::*;

  logic [DATA_W-1:0] data;
  logic [CW_W-1:0]   code;
  int checks = 0, failures = 0;

  secded_enc dut (.data, .code);

  function automatic logic [CW_W-1:0] ref_enc(logic [63:0] d);
    logic [71:0] h;     // h[pos] for pos 1..71
    logic [6:0]  chk;
    int n;
    h = '0;
    n = 0;
    for (int pos = 1; pos <= 71; pos++) begin
      if (pos != 1 && pos != 2 && pos != 4 && pos != 8 && pos != 16 && pos != 32 && pos != 64) begin
        h[pos] = d[n];
        n++;
      end
    end
    for (int j = 0; j < 7; j++) begin
      chk[j] = 1'b0;
      for (int pos = 1; pos <= 71; pos++)
        if ((pos >> j) & 1) chk[j] ^= h[pos];
    end
    return {^{chk, d}, chk, d};
  endfunction

  task automatic check_word(logic [63:0] d);
    logic [CW_W-1:0] exp;
    data = d;
    #1;
    exp = ref_enc(d);
    checks++;
    if (code !== exp) begin
      failures++;
      $display("FAIL data=%h code=%h exp=%h", d, code, exp);
    end
    checks++;
    if (^code !== 1'b0) begin
      failures++;
      $display("FAIL odd parity for data=%h", d);
    end
  endtask

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [CW_W-1:0] c0;
    check_word(64'h0);
    check_word('1);
    check_word(64'h5555_5555_5555_5555);
    for (int i = 0; i < 64; i++) check_word(64'h1 << i);
    for (int i = 0; i < 300; i++) check_word({$urandom, $urandom});
    // single data-bit change must change the check bits
    for (int i = 0; i < 64; i++) begin
      data = 64'h0123_4567_89ab_cdef;
      #1 c0 = code;
      data[i] = ~data[i];
      #1;
      checks++;
      if (code[71:64] == c0[71:64]) begin
        failures++;
        $display("FAIL bit %0d does not reach the check bits", i);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
