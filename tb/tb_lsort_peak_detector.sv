// tb_lsort_peak_detector -- self-checking test of the incremental-median peak
// detector at two window sizes: N = 25 (the default) and N = 50 (the larger
// window of the median-cost comparison), 3 channels each.
//
// Each bench (lsort_peak_detector_bench) keeps, per channel, the last N
// magnitudes in arrival order (a plain FIFO, initialised like the hardware
// with N copies of the largest magnitude), sorts a copy from scratch for every
// sample, takes entry N/2 as the median and flags a peak when |x| > M * median.
// Checked: every output word (channel, data, is_peak) in order, and the whole
// sorted row the block writes back for each sample. Stimulus: noise with
// occasional large excursions, few distinct values (ties), random channel
// order with back-to-back samples of one channel (RAM forwarding) and random
// output stalls. The first phase runs at full rate and checks one sample per
// clock with a 2-cycle latency. A watchdog ends the run.
module tb_lsort_peak_detector;
  logic clk = 0;
  always #5 clk = ~clk;

  int   checks_a, failures_a, checks_b, failures_b;
  logic done_a, done_b;

  lsort_peak_detector_bench #(.NCH(3), .N(25), .M(7)) bench_n25 (
    .clk, .checks(checks_a), .failures(failures_a), .done(done_a));
  lsort_peak_detector_bench #(.NCH(3), .N(50), .M(7)) bench_n50 (
    .clk, .checks(checks_b), .failures(failures_b), .done(done_b));

  initial begin : watchdog
    repeat (100000) @(posedge clk);
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks_a + checks_b, failures_a + failures_b + 1);
    $finish;
  end

  initial begin
    wait (done_a && done_b);
    $display("TB_RESULT checks=%0d failures=%0d", checks_a + checks_b, failures_a + failures_b);
    $finish;
  end
endmodule
