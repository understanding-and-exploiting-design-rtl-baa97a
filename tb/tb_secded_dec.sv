// tb_secded_dec: self-checking test of secded_dec.
//
// Codewords are built with a reference encoder written here (same code as
// tb_secded), then 0, 1 or 2 bits anywhere in the 72-bit word are flipped.
// Expected: no error -> data unchanged, ce=ue=0; one error -> data restored,
// ce=1, ue=0; two errors -> ue=1, ce=0.
module tb_secded_dec;
  import diva_pkg::*;

  logic [CW_W-1:0]   code;
  logic [DATA_W-1:0] data;
  logic              ce, ue;
  int checks = 0, failures = 0;

  secded_dec dut (.code, .data, .ce, .ue);

  function automatic logic [CW_W-1:0] ref_enc(logic [63:0] d);
    logic [71:0] h;
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

  task automatic run(logic [63:0] d, int nerr, int e0, int e1);
    logic [CW_W-1:0] c;
    c = ref_enc(d);
    if (nerr >= 1) c[e0] = ~c[e0];
    if (nerr >= 2) c[e1] = ~c[e1];
    code = c;
    #1;
    checks++;
    case (nerr)
      0: if (data !== d || ce || ue) begin
           failures++; $display("FAIL clean d=%h got=%h ce=%b ue=%b", d, data, ce, ue);
         end
      1: if (data !== d || !ce || ue) begin
           failures++; $display("FAIL single bit %0d d=%h got=%h ce=%b ue=%b", e0, d, data, ce, ue);
         end
      default: if (!ue || ce) begin
           failures++; $display("FAIL double bits %0d,%0d ce=%b ue=%b", e0, e1, ce, ue);
         end
    endcase
  endtask

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [63:0] d;
    int a, b;
    for (int i = 0; i < 50; i++) run({$urandom, $urandom}, 0, 0, 0);
    for (int e = 0; e < 72; e++) begin
      run({$urandom, $urandom}, 1, e, 0);
      run(64'h0, 1, e, 0);
    end
    for (int i = 0; i < 400; i++) begin
      a = $urandom_range(71);
      b = (a + 1 + $urandom_range(70)) % 72;
      run({$urandom, $urandom}, 2, a, b);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
