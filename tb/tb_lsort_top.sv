// tb_lsort_top -- end-to-end test of the L-Sort pipeline at its default size
// (120 channels, 25-point median, 4 spike buffers, 32 clusters).
//
// A synthetic probe recording is generated on the fly: 2 columns x 60 rows of
// electrodes 20 um apart, uniform background noise on every channel, and
// spikes from five neurons at fixed positions. A spike is a short biphasic
// waveform whose amplitude on each electrode falls off with the electrode's
// distance from its neuron (1/(1 + d^2/400um^2)). Samples stream in at full rate, one channel per
// clock, while the result stream is stalled at random.
// Checked: the input is never stalled after start-up (real-time operation);
// at least 90 % of injected spikes are reported within 6 time steps (the largest peak may fall on either lobe of the filtered waveform); for each
// of five fixed neurons at least 90 % of its spikes have a report in one
// cluster (a spike may also leave a small fragment elsewhere), and
// the five get five different clusters. Reports that match no injected spike
// come from noise crossing the threshold; they are counted, not failed. A
// sixth neuron drifts between two positions so that two clusters form and
// later merge. The locator buffers are then overfilled with five
// simultaneous spikes, and each mechanism (peak flags, spike new / merge /
// send / overflow, cluster new / join / merge, output stall) must occur.
module tb_lsort_top;
  import lsort_pkg::*;

  localparam int NCH = 120, NNEU = 6, NSPK = 160, GAP = 60;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic                     s_valid, s_ready, m_valid, m_ready;
  logic        [CH_W-1:0]   s_ch;
  logic signed [IN_W-1:0]   s_data;
  logic        [TIME_W-1:0] m_time;
  logic        [CL_W-1:0]   m_cluster;
  logic        [15:0]       loc_overflow;
  logic        [CL_W:0]     n_clusters;

  lsort_top dut (.*);

  int checks = 0, failures = 0;

  // neurons: position in um, amplitude
  // neuron 5 drifts: z = 1000 um, then 1016 um, then 1008 um, so it first
  // opens two clusters and later pulls them together (a cluster merge)
  int nx [NNEU] = '{0, 20, 10, 0, 20, 10};
  int nz [NNEU] = '{200, 450, 700, 900, 1100, 1000};
  int na [NNEU] = '{900, 800, 1000, 850, 950, 900};
  // injected spikes: time, neuron, position
  int sp_t [NSPK + 5], sp_n [NSPK + 5], sp_x [NSPK + 5], sp_z [NSPK + 5];
  int nsp = 0;
  int found [NSPK + 5];
  logic [31:0] rep_cl [NSPK + 5];
  int hist [NNEU][32];

  function automatic int iabs(int v); return v < 0 ? -v : v; endfunction

  // amplitude of injected spike i on channel c
  function automatic int amp_on(int i, int c);
    int ex = (c % 2) * 20, ez = (c / 2) * 20;
    int d2 = (ex - sp_x[i]) * (ex - sp_x[i]) + (ez - sp_z[i]) * (ez - sp_z[i]);
    return na[sp_n[i]] * 400 / (400 + d2);
  endfunction

  // zero-mean waveform sample k steps after onset, scaled by a/8
  function automatic int wave(int k, int a);
    case (k)
      0: return -a * 4 / 8;
      1: return -a;
      2: return -a * 5 / 8;
      3: return a * 3 / 8;
      4: return a * 5 / 8;
      5: return a * 5 / 8;
      6: return a * 3 / 8;
      7: return a / 8;
      default: return 0;
    endcase
  endfunction

  // ---- output monitor -------------------------------------------------------
  int n_out = 0, n_unmatched = 0, c_stall = 0;
  always @(posedge clk) if (rst_n) begin
    if (m_valid && !m_ready) c_stall++;
    if (m_valid && m_ready) begin
      int best, bd;
      n_out++;
      best = -1; bd = 1000;
      for (int i = 0; i < nsp; i++)
        if (iabs(int'(m_time) - sp_t[i]) < bd) begin bd = iabs(int'(m_time) - sp_t[i]); best = i; end
      if (best < 0 || bd > 6) n_unmatched++;
      else begin
        found[best]++;
        // clusters that the reports of each injected spike landed in
        rep_cl[best][m_cluster] = 1'b1;
      end
    end
  end

  // ---- mechanism counters (internal events) -------------------------------
  int c_peak = 0, c_new = 0, c_merge = 0, c_send = 0, c_drop = 0;
  int c_cnew = 0, c_cjoin = 0, c_cmerge = 0, c_in_stall = 0;
  always @(posedge clk) if (rst_n) begin
    if (dut.peak_valid && dut.peak_ready && dut.peak.is_peak) c_peak++;
    if (dut.u_locator.do_new)   c_new++;
    if (dut.u_locator.do_merge) c_merge++;
    if (dut.u_locator.do_send)  c_send++;
    if (dut.u_locator.do_drop)  c_drop++;
    if (dut.u_cluster.state == dut.u_cluster.S_ASSIGN) begin
      if (dut.u_cluster.best_ok && (dut.u_cluster.best_d <= dut.u_cluster.TH2 || !dut.u_cluster.any_free))
        c_cjoin++;
      else c_cnew++;
    end
    if (dut.u_cluster.state == dut.u_cluster.S_MERGE && dut.u_cluster.best_ok &&
        dut.u_cluster.best_d <= dut.u_cluster.TH2) c_cmerge++;
  end

  initial begin : watchdog
    repeat (3000000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin : stall_gen
    m_ready = 1;
    forever begin
      @(negedge clk);
      m_ready = ($urandom % 4) != 0;
    end
  end

  int total_steps;
  initial begin
    int ok_n, n5, ninj, maj [NNEU];
    s_valid = 0; s_ch = '0; s_data = '0;
    // spike schedule: one neuron every GAP steps, then five at once
    n5 = 0;
    for (int i = 0; i < NSPK + 5; i++) begin rep_cl[i] = '0; found[i] = 0; end
    for (int n = 0; n < NNEU; n++) for (int k = 0; k < 32; k++) hist[n][k] = 0;
    for (int i = 0; i < NSPK; i++) begin
      sp_t[i] = 100 + i * GAP + int'($urandom % 10);
      sp_n[i] = (i < 20) ? (i % 5) : (i % 3 == 0) ? 5 : int'($urandom % 5);
      sp_x[i] = nx[sp_n[i]];
      sp_z[i] = nz[sp_n[i]];
      if (sp_n[i] == 5) begin
        sp_z[i] = (n5 < 10) ? 1000 : (n5 < 20) ? 1016 : 1008;
        n5++;
      end
    end
    nsp = NSPK;
    total_steps = 100 + NSPK * GAP + 300;
    repeat (3) @(posedge clk);
    rst_n = 1;
    wait (s_ready);
    @(negedge clk);
    for (int t = 0; t < total_steps; t++) begin
      if (t == total_steps - 200 && nsp == NSPK) begin
        // five neurons-worth of spikes at once on far-apart channels
        for (int k = 0; k < 5; k++) begin
          sp_t[nsp] = t + 5; sp_n[nsp] = k; sp_x[nsp] = nx[k]; sp_z[nsp] = nz[k]; nsp++;
        end
      end
      for (int c = 0; c < NCH; c++) begin
        int v;
        v = int'($urandom % 161) - 80;
        for (int i = 0; i < nsp; i++)
          if (t >= sp_t[i] && t < sp_t[i] + 8) v += wave(t - sp_t[i], amp_on(i, c));
        if (v > 2047) v = 2047;
        if (v < -2048) v = -2048;
        s_valid = 1; s_ch = CH_W'(c); s_data = IN_W'(v);
        @(posedge clk);
        if (!s_ready) c_in_stall++;
        while (!s_ready) @(posedge clk);
        @(negedge clk);
      end
    end
    s_valid = 0;
    repeat (2000) @(negedge clk);
    // real time: no input stall
    checks++;
    if (c_in_stall != 0) begin failures++; $display("FAIL: input stalled %0d times", c_in_stall); end
    // detection
    ok_n = 0;
    for (int i = 0; i < NSPK; i++) if (found[i] > 0) ok_n++;
    checks++;
    if (ok_n * 10 < NSPK * 9) begin failures++; $display("FAIL: detected %0d of %0d spikes", ok_n, NSPK); end
    // clustering: one dominant cluster per neuron, distinct between neurons
    for (int i = 0; i < NSPK; i++) for (int k = 0; k < 32; k++) hist[sp_n[i]][k] += int'(rep_cl[i][k]);
    for (int n = 0; n < NNEU - 1; n++) begin
      int mx;
      mx = 0;
      ninj = 0;
      maj[n] = 0;
      for (int i = 0; i < NSPK; i++) ninj += (sp_n[i] == n);
      for (int k = 0; k < 32; k++)
        if (hist[n][k] > mx) begin mx = hist[n][k]; maj[n] = k; end
      checks++;
      if (mx * 10 < ninj * 9) begin
        failures++; $display("FAIL: neuron %0d: %0d of %0d spikes in cluster %0d", n, mx, ninj, maj[n]);
      end
      $display("neuron %0d -> cluster %0d (%0d of %0d spikes)", n, maj[n], mx, ninj);
    end
    for (int a = 0; a < NNEU - 1; a++)
      for (int b = a + 1; b < NNEU - 1; b++) begin
        checks++;
        if (maj[a] == maj[b]) begin failures++; $display("FAIL: neurons %0d and %0d share cluster %0d", a, b, maj[a]); end
      end
    // mechanisms
    $display("spikes injected=%0d reported=%0d detected=%0d noise reports=%0d clusters=%0d",
             nsp, n_out, ok_n, n_unmatched, n_clusters);
    $display("peaks=%0d spike_new=%0d spike_merge=%0d spike_send=%0d overflow=%0d (port %0d)",
             c_peak, c_new, c_merge, c_send, c_drop, loc_overflow);
    $display("cluster_new=%0d cluster_join=%0d cluster_merge=%0d out_stall=%0d",
             c_cnew, c_cjoin, c_cmerge, c_stall);
    checks++; if (c_peak == 0)  begin failures++; $display("FAIL: no peak flagged"); end
    checks++; if (c_new == 0)   begin failures++; $display("FAIL: no spike opened"); end
    checks++; if (c_merge == 0) begin failures++; $display("FAIL: no peak merged"); end
    checks++; if (c_send == 0)  begin failures++; $display("FAIL: no spike sent"); end
    checks++; if (c_drop == 0 || int'(loc_overflow) != c_drop) begin failures++; $display("FAIL: overflow"); end
    checks++; if (c_cnew == 0)  begin failures++; $display("FAIL: no cluster created"); end
    checks++; if (c_cjoin == 0) begin failures++; $display("FAIL: no spike joined a cluster"); end
    checks++; if (c_cmerge == 0) begin failures++; $display("FAIL: no cluster merge"); end
    checks++; if (c_stall == 0) begin failures++; $display("FAIL: no output stall"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
