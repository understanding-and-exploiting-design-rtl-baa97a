// diva_timing_sel: latency-test-region decoder and timing-set selector.
//
// DIVA Profiling reserves, in every subarray, the row that is slowest by
// design (farthest from the sense amplifiers and wordline drivers) as a latency
// test row that holds no useful data. Because every subarray has the same
// design, one register holding the row's offset within a subarray points to
// the test row of all subarrays. This block compares the low SA_BITS bits of
// a row address with that offset: on a match the row is a test row and gets
// the test timing set (the candidate the profiler is trying), otherwise the
// data-region timing set (lowest passing set plus margin).
//
// Only the low SA_BITS bits of row matter (the subarray number does not).
// Interface: row, test_off, test_timing, data_timing in; is_test and timing
// out. Combinational. Rows are DRAM-external addresses as the controller
// issues them: the paper notes the controller can address the test rows
// without applying its own address scrambling.
module diva_timing_sel
  import diva_pkg::*;
#(
  parameter int unsigned ROW_W  = 16,  // 64K rows per bank
  parameter int unsigned SA_BITS = 9   // 512 rows per subarray
) (
  input  logic [ROW_W-1:0]   row,
  input  logic [SA_BITS-1:0] test_off,
  input  timing_t            test_timing,
  input  timing_t            data_timing,
  output logic               is_test,
  output timing_t            timing
);

  always_comb begin
    is_test = (row[SA_BITS-1:0] == test_off);
    timing  = is_test ? test_timing : data_timing;
  end

endmodule
