// tb_lsort_iir_filter -- self-checking test of the multi-channel DF-II filter.
//
// A reference model with 64-bit integer arithmetic computes every output from
// its own per-channel delay lines (same Q2.10 coefficients, floor shift and
// saturation) when the sample is accepted; the outputs must match it in
// order. Phases: (1) full rate, round-robin over the channels, ready always
// high, checking one output per clock after a 2-cycle latency; (2) random
// channel order including back-to-back samples of one channel (state
// forwarding) with random valid and ready; (3) a large step to exercise
// saturation. A watchdog ends the run.
module tb_lsort_iir_filter;
  import lsort_pkg::*;

  localparam int NCH = 4;
  localparam int B0 = 414, B1 = 0, B2 = -414, A1 = -1165, A2 = 195;
  localparam int STATE_W = 20;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic in_valid, in_ready, out_valid, out_ready;
  raw_sample_t in_s;
  filt_sample_t out_s;

  lsort_iir_filter #(.NCH(NCH)) dut (.*);

  int checks = 0, failures = 0;
  longint w1 [NCH], w2 [NCH];
  filt_sample_t expq [$];
  int fwd_events = 0;
  int last_ch = -1;

  function automatic longint sat(longint v, int w);
    longint mx = (longint'(1) << (w - 1)) - 1;
    longint mn = -(longint'(1) << (w - 1));
    return v > mx ? mx : (v < mn ? mn : v);
  endfunction

  function automatic longint floor_shift(longint v);
    return v >>> 10;
  endfunction

  // reference model, run when a sample is accepted
  task automatic model(raw_sample_t s);
    longint x, w, y;
    filt_sample_t e;
    x = longint'(s.data);
    w = sat(floor_shift((x <<< 10) - A1 * w1[s.ch] - A2 * w2[s.ch]), STATE_W);
    y = sat(floor_shift(B0 * w + B1 * w1[s.ch] + B2 * w2[s.ch]), DATA_W);
    w2[s.ch] = w1[s.ch];
    w1[s.ch] = w;
    e.ch = s.ch;
    e.data = DATA_W'(y);
    expq.push_back(e);
  endtask

  always @(posedge clk) if (rst_n) begin
    if (in_valid && in_ready) begin
      if (int'(in_s.ch) == last_ch) fwd_events++;
      last_ch = int'(in_s.ch);
      model(in_s);
    end
    if (out_valid && out_ready) begin
      checks++;
      if (expq.size() == 0) begin
        failures++;
        $display("FAIL: unexpected output ch=%0d", out_s.ch);
      end else begin
        filt_sample_t e;
        e = expq.pop_front();
        if (e != out_s) begin
          failures++;
          if (failures < 10) $display("FAIL: ch=%0d got %0d exp ch=%0d %0d", out_s.ch, $signed(out_s.data), e.ch, $signed(e.data));
        end
      end
    end
  end

  initial begin : watchdog
    repeat (200000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // a filtered test signal: slow drift (should be removed) plus a fast wiggle
  function automatic logic signed [IN_W-1:0] stim(int t, int ch);
    int v = ((t * 7 + ch * 13) % 200) - 100 + 600 + ((t % 4 < 2) ? 150 : -150) + ($urandom % 41) - 20;
    return IN_W'(v);
  endfunction

  int t0, nout;
  initial begin
    for (int c = 0; c < NCH; c++) begin w1[c] = 0; w2[c] = 0; end
    in_valid = 0; in_s = '0; out_ready = 1;
    repeat (3) @(posedge clk);
    rst_n = 1;
    wait (in_ready);
    @(negedge clk);
    // phase 1: full rate
    t0 = 0;
    for (int t = 0; t < 200; t++)
      for (int c = 0; c < NCH; c++) begin
        in_valid = 1; in_s.ch = CH_W'(c); in_s.data = stim(t, c);
        @(negedge clk);
        checks++;
        if (!in_ready) begin failures++; $display("FAIL: stalled at full rate"); end
      end
    in_valid = 0;
    repeat (3) @(negedge clk);
    checks++;
    if (expq.size() != 0) begin failures++; $display("FAIL: %0d outputs missing after 2-cycle latency", expq.size()); end
    // phase 2: random order, random valid/ready
    fork
      begin
        for (int k = 0; k < 3000; k++) begin
          in_valid = ($urandom % 4) != 0;
          in_s.ch = CH_W'(($urandom % 3 == 0) ? int'(in_s.ch) : $urandom % NCH);
          in_s.data = IN_W'(int'($urandom % 4096) - 2048);
          @(posedge clk);
          while (in_valid && !in_ready) @(posedge clk);
          @(negedge clk);
        end
        in_valid = 0;
      end
      begin
        for (int k = 0; k < 8000; k++) begin
          out_ready = ($urandom % 3) != 0;
          @(negedge clk);
        end
      end
    join_any
    out_ready = 1;
    // phase 3: large step for saturation
    for (int k = 0; k < 50; k++) begin
      in_valid = 1; in_s.ch = 0; in_s.data = (k < 25) ? 12'sd2047 : -12'sd2048;
      @(negedge clk);
    end
    in_valid = 0;
    repeat (10) @(negedge clk);
    checks++;
    if (expq.size() != 0) begin failures++; $display("FAIL: %0d outputs missing", expq.size()); end
    checks++;
    if (fwd_events == 0) begin failures++; $display("FAIL: no back-to-back same-channel samples"); end
    $display("forwarding events: %0d", fwd_events);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
