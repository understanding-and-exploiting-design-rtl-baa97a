// tb_diva_timing_sel: self-checking test of diva_timing_sel.
//
// Random rows and test offsets, with a forced match in half of the cases: a
// row whose offset within its 512-row subarray equals the test offset must
// get the test timing set and is_test, every other row the data timing set.
module tb_diva_timing_sel;
  import diva_pkg::*;

  logic [15:0] row;
  logic [8:0]  test_off;
  timing_t     test_timing, data_timing, timing;
  logic        is_test;
  int checks = 0, failures = 0;

  diva_timing_sel dut (.row, .test_off, .test_timing, .data_timing, .is_test, .timing);

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic exp_t;
    for (int i = 0; i < 500; i++) begin
      test_off    = 9'($urandom);
      row         = 16'($urandom);
      if (i % 2 == 0) row = {7'($urandom), test_off};
      if (i % 7 == 0) row = {7'($urandom), test_off ^ 9'(1 << $urandom_range(8))};
      test_timing = timing_t'($urandom);
      data_timing = timing_t'($urandom);
      #1;
      exp_t = ((row % 512) == test_off);
      checks++;
      if (is_test !== exp_t || timing !== (exp_t ? test_timing : data_timing)) begin
        failures++;
        $display("FAIL row=%0d off=%0d is_test=%b", row, test_off, is_test);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
