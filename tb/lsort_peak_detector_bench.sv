// lsort_peak_detector_bench -- stimulus, reference model and checks for one
// instance of the incremental-median peak detector; tb_lsort_peak_detector
// runs it at two window sizes.
//
// The reference keeps, per channel, the last N magnitudes in arrival order
// (a plain FIFO, initialised like the hardware with N copies of the largest
// magnitude), sorts a copy from scratch for every sample, takes entry N/2 as
// the median and flags a peak when |x| > M * median. Checked: every output
// word (channel, data, is_peak) in order, and the whole sorted row the block
// writes back for each sample. Stimulus: noise with occasional large
// excursions, few distinct values (ties), random channel order with
// back-to-back samples of one channel (RAM forwarding) and random output
// stalls. Phase 1 runs at full rate and checks one sample per clock with a
// 2-cycle latency.
module lsort_peak_detector_bench
  import lsort_pkg::*;
#(
  parameter int NCH = 3,
  parameter int N   = 25,
  parameter int M   = 7
) (
  input  logic clk,
  output int   checks,
  output int   failures,
  output logic done
);
  logic rst_n = 0;

  logic in_valid, in_ready, out_valid, out_ready;
  filt_sample_t in_s;
  peak_sample_t out_s;

  lsort_peak_detector #(.NCH(NCH), .N(N), .M(M)) dut (.*);

  int win [NCH][$];
  peak_sample_t expq [$];
  int rowq [$][$];
  int npeaks = 0, nquiet = 0, fwd_events = 0, last_ch = -1;

  task automatic model(filt_sample_t s);
    int mag, srt[$], med;
    peak_sample_t e;
    mag = s.data < 0 ? -int'(s.data) : int'(s.data);
    void'(win[s.ch].pop_front());
    win[s.ch].push_back(mag);
    srt = win[s.ch];
    srt.sort();
    med = srt[N / 2];
    e.ch = s.ch;
    e.data = s.data;
    e.is_peak = mag > M * med;
    expq.push_back(e);
    rowq.push_back(srt);
  endtask

  always @(posedge clk) if (rst_n) begin
    if (in_valid && in_ready) begin
      if (int'(in_s.ch) == last_ch) fwd_events++;
      last_ch = int'(in_s.ch);
      model(in_s);
    end
    // the sorted row written back this cycle
    if (dut.v1 && dut.adv) begin
      int r[$];
      r = rowq.pop_front();
      checks++;
      for (int i = 0; i < N; i++)
        if (int'(dut.new_row[i].mag) != r[i]) begin
          failures++;
          $display("FAIL: row entry %0d got %0d exp %0d", i, dut.new_row[i].mag, r[i]);
          break;
        end
    end
    if (out_valid && out_ready) begin
      peak_sample_t e;
      checks++;
      if (expq.size() == 0) begin
        failures++;
        $display("FAIL: unexpected output");
      end else begin
        e = expq.pop_front();
        if (e != out_s) begin
          failures++;
          if (failures < 10) $display("FAIL: ch=%0d d=%0d peak=%0b exp ch=%0d d=%0d peak=%0b",
            out_s.ch, $signed(out_s.data), out_s.is_peak, e.ch, $signed(e.data), e.is_peak);
        end
        if (e.is_peak) npeaks++; else nquiet++;
      end
    end
  end

  function automatic logic signed [DATA_W-1:0] stim(bit few_values);
    int v;
    if (few_values) v = int'($urandom % 7) - 3;
    else if ($urandom % 20 == 0) v = int'($urandom % 3000) - 1500;
    else v = int'($urandom % 201) - 100;
    return DATA_W'(v);
  endfunction

  initial begin
    checks = 0; failures = 0; done = 0;
    for (int c = 0; c < NCH; c++)
      for (int i = 0; i < N; i++) win[c].push_back(2**DATA_W - 1);
    in_valid = 0; in_s = '0; out_ready = 1;
    repeat (3) @(posedge clk);
    rst_n = 1;
    wait (in_ready);
    @(negedge clk);
    // phase 1: full rate round robin
    for (int t = 0; t < 100; t++)
      for (int c = 0; c < NCH; c++) begin
        in_valid = 1; in_s.ch = CH_W'(c); in_s.data = stim(0);
        @(negedge clk);
        checks++;
        if (!in_ready) begin failures++; $display("FAIL: stall at full rate"); end
      end
    in_valid = 0;
    repeat (3) @(negedge clk);
    checks++;
    if (expq.size() != 0) begin failures++; $display("FAIL: latency above 2 cycles"); end
    // phase 2: random order, ties, stalls
    fork
      for (int k = 0; k < 4000; k++) begin
        in_valid = ($urandom % 4) != 0;
        in_s.ch = CH_W'(($urandom % 3 == 0) ? int'(in_s.ch) : $urandom % NCH);
        in_s.data = stim(k > 3000);
        @(posedge clk);
        while (in_valid && !in_ready) @(posedge clk);
        @(negedge clk);
      end
      forever begin
        out_ready = ($urandom % 3) != 0;
        @(negedge clk);
      end
    join_any
    disable fork;
    in_valid = 0; out_ready = 1;
    repeat (10) @(negedge clk);
    checks++;
    if (expq.size() != 0) begin failures++; $display("FAIL: %0d outputs missing", expq.size()); end
    checks++;
    if (npeaks == 0 || nquiet == 0 || fwd_events == 0) begin
      failures++;
      $display("FAIL: coverage peaks=%0d quiet=%0d fwd=%0d", npeaks, nquiet, fwd_events);
    end
    $display("N=%0d: peaks=%0d quiet=%0d forwarding=%0d checks=%0d failures=%0d",
             N, npeaks, nquiet, fwd_events, checks, failures);
    done = 1;
  end
endmodule
