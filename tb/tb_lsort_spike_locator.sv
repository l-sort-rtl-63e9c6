// tb_lsort_spike_locator -- self-checking test of peak grouping and
// centre-of-mass localisation.
//
// Synthetic spikes are placed at random times and channels; each lights up a
// few neighbouring channels for a few time steps with a peak amplitude that
// falls off with channel distance. The full sample stream (all channels of
// every time step, is_peak set on the spike samples) is fed at full rate.
// A cycle-level reference keeps its own list of ongoing spikes and applies
// the rules independently: merge into the first entry within CH_TH channels
// and T_TH steps, otherwise open an entry, drop when all NBUF are busy; send
// entry 0 in a peak-free cycle once T_TH steps have passed and the output
// slot is free. Expected positions are sum(amp*x)/sum(amp) and
// sum(amp*z)/sum(amp) on the probe layout. Output words and the overflow
// count are compared; each mechanism (new, merge, largest-peak update, send,
// shift with several entries, overflow, output stall) must occur.
module tb_lsort_spike_locator;
  import lsort_pkg::*;

  localparam int NCH = 24, NBUF = 4, CH_TH = 4, T_TH = 6;
  localparam int N_COLS = 2, X_PITCH = 20, Z_PITCH = 20;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic in_valid, in_ready, out_valid, out_ready;
  peak_sample_t in_s;
  spike_t out_s;
  logic [15:0] overflow_cnt;

  lsort_spike_locator #(.NCH(NCH), .NBUF(NBUF), .CH_TH(CH_TH), .T_TH(T_TH),
                        .N_COLS(N_COLS), .X_PITCH(X_PITCH), .Z_PITCH(Z_PITCH)) dut (.*);

  int checks = 0, failures = 0;

  typedef struct { int amp, ch, t; longint sa, sx, sz; } ent_t;
  ent_t ents [$];
  spike_t expq [$];
  int m_t = 0, drops = 0;
  int c_new = 0, c_merge = 0, c_upd = 0, c_send = 0, c_shift = 0, c_stall = 0;

  function automatic int iabs(int v); return v < 0 ? -v : v; endfunction

  always @(posedge clk) if (rst_n) begin
    bit pk, slot_free, merged;
    int amp, x, z;
    spike_t e;
    slot_free = !out_valid || out_ready;
    if (out_valid && !out_ready) c_stall++;
    pk = in_valid && in_s.is_peak;
    amp = iabs(int'(in_s.data));
    x = (int'(in_s.ch) % N_COLS) * X_PITCH;
    z = (int'(in_s.ch) / N_COLS) * Z_PITCH;
    if (pk) begin
      merged = 0;
      foreach (ents[i])
        if (!merged && iabs(int'(in_s.ch) - ents[i].ch) <= CH_TH && m_t - ents[i].t <= T_TH) begin
          merged = 1;
          c_merge++;
          ents[i].sa += amp; ents[i].sx += amp * x; ents[i].sz += amp * z;
          if (amp > ents[i].amp) begin
            c_upd++;
            ents[i].amp = amp; ents[i].ch = int'(in_s.ch); ents[i].t = m_t;
          end
        end
      if (!merged) begin
        if (ents.size() < NBUF) begin
          ents.push_back('{amp, int'(in_s.ch), m_t, amp, amp * x, amp * z});
          c_new++;
        end else drops++;
      end
    end else if (ents.size() > 0 && m_t - ents[0].t > T_TH && slot_free) begin
      e.t = TIME_W'(ents[0].t);
      e.x = X_W'(ents[0].sx / ents[0].sa);
      e.z = Z_W'(ents[0].sz / ents[0].sa);
      expq.push_back(e);
      if (ents.size() > 1) c_shift++;
      void'(ents.pop_front());
      c_send++;
    end
    if (in_valid && int'(in_s.ch) == NCH - 1) m_t++;

    if (out_valid && out_ready) begin
      checks++;
      if (expq.size() == 0) begin
        failures++; $display("FAIL: unexpected spike t=%0d", out_s.t);
      end else begin
        e = expq.pop_front();
        if (e != out_s) begin
          failures++;
          $display("FAIL: spike t=%0d x=%0d z=%0d exp t=%0d x=%0d z=%0d",
                   out_s.t, out_s.x, out_s.z, e.t, e.x, e.z);
        end
      end
    end
  end

  initial begin : watchdog
    repeat (400000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // spike plan: start step, centre channel, duration, peak amplitude
  typedef struct { int t0, c0, dur, a; } plan_t;
  plan_t plans [$];

  task automatic run_steps(int t_begin, int t_end, bit stalls);
    for (int t = t_begin; t < t_end; t++)
      for (int c = 0; c < NCH; c++) begin
        int best = 0;
        foreach (plans[p])
          if (t >= plans[p].t0 && t < plans[p].t0 + plans[p].dur && iabs(c - plans[p].c0) <= 2) begin
            int a = plans[p].a / (1 + iabs(c - plans[p].c0)) + (t - plans[p].t0) * 3;
            if (a > best) best = a;
          end
        in_valid = 1;
        in_s.ch = CH_W'(c);
        in_s.is_peak = best > 0;
        in_s.data = best > 0 ? ((($urandom % 2) != 0) ? -DATA_W'(best) : DATA_W'(best))
                             : DATA_W'(int'($urandom % 41) - 20);
        if (stalls) out_ready = ($urandom % 4) == 0;
        @(negedge clk);
        if (!in_ready) begin checks++; failures++; $display("FAIL: input stalled"); end
      end
  endtask

  initial begin
    in_valid = 0; in_s = '0; out_ready = 1;
    // isolated spikes
    for (int k = 0; k < 40; k++)
      plans.push_back('{20 + 25 * k, int'($urandom % NCH), 2 + int'($urandom % 4), 200 + int'($urandom % 1500)});
    // overlapping spikes on distant channels
    for (int k = 0; k < 30; k++) begin
      plans.push_back('{1100 + 30 * k, 1, 3, 500 + int'($urandom % 500)});
      plans.push_back('{1101 + 30 * k, 12, 4, 400 + int'($urandom % 500)});
      plans.push_back('{1102 + 30 * k, 7, 2, 300 + int'($urandom % 500)});
    end
    // five simultaneous spikes: one more than the buffer holds
    plans.push_back('{2100, 0, 2, 900});
    plans.push_back('{2100, 5, 2, 900});
    plans.push_back('{2100, 10, 2, 900});
    plans.push_back('{2100, 15, 2, 900});
    plans.push_back('{2101, 20, 2, 900});
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    run_steps(0, 1500, 0);
    run_steps(1500, 2000, 1);
    out_ready = 1;
    run_steps(2000, 2200, 0);
    in_valid = 0;
    repeat (50) @(negedge clk);
    checks++;
    if (expq.size() != 0 || ents.size() != 0) begin
      failures++; $display("FAIL: %0d spikes not sent, %0d pending", expq.size(), ents.size());
    end
    checks++;
    if (int'(overflow_cnt) != drops) begin
      failures++; $display("FAIL: overflow_cnt=%0d exp %0d", overflow_cnt, drops);
    end
    checks++;
    if (c_new == 0 || c_merge == 0 || c_upd == 0 || c_send == 0 || c_shift == 0 || drops == 0 || c_stall == 0) begin
      failures++; $display("FAIL: coverage");
    end
    $display("new=%0d merge=%0d update=%0d send=%0d shift=%0d overflow=%0d stall=%0d",
             c_new, c_merge, c_upd, c_send, c_shift, drops, c_stall);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
