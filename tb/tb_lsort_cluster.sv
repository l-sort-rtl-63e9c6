// tb_lsort_cluster -- self-checking test of the online clustering block.
//
// A reference written with plain integers keeps its own cluster table (mean
// in 1/16 um, count) and applies the rules: nearest valid cluster by squared
// distance (lowest index on ties); join it when within DIST_TH or when no
// slot is free, moving the mean by trunc((p - mean)/(n + 1)); otherwise open
// the first free slot; then find the cluster nearest to the updated one and,
// when within DIST_TH, merge both into the lower index with the
// count-weighted mean (floor division). Each output (time, cluster) is
// compared, as is the live-cluster count. The latency from accepting a spike
// to presenting its result must be 2*MAX_CL + 2 cycles. Stimulus: spikes
// scattered around fixed sources, a source that creeps between two clusters
// until they merge, random positions that fill every slot, and output stalls.
module tb_lsort_cluster;
  import lsort_pkg::*;

  localparam int MAX_CL = 8, DIST_TH = 10, FR = 16;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic in_valid, in_ready, out_valid, out_ready;
  spike_t in_s;
  sorted_spike_t out_s;
  logic [CL_W:0] n_clusters;

  lsort_cluster #(.MAX_CL(MAX_CL), .DIST_TH(DIST_TH)) dut (.*);

  int checks = 0, failures = 0;
  bit cv [MAX_CL];
  longint cx [MAX_CL], cz [MAX_CL], cn [MAX_CL];
  sorted_spike_t expq [$];
  int c_new = 0, c_join = 0, c_merge = 0, c_full = 0, c_stall = 0;

  function automatic longint d2(longint ax, longint az, longint bx, longint bz);
    return (ax - bx) * (ax - bx) + (az - bz) * (az - bz);
  endfunction

  task automatic model(spike_t s);
    longint px, pz, bd, th2;
    int b, tgt, fr;
    sorted_spike_t e;
    px = longint'(s.x) * FR; pz = longint'(s.z) * FR;
    th2 = longint'(DIST_TH * FR) * (DIST_TH * FR);
    b = -1; fr = -1;
    for (int i = 0; i < MAX_CL; i++) begin
      if (cv[i] && (b < 0 || d2(px, pz, cx[i], cz[i]) < bd)) begin b = i; bd = d2(px, pz, cx[i], cz[i]); end
      if (!cv[i] && fr < 0) fr = i;
    end
    if (b >= 0 && (bd <= th2 || fr < 0)) begin
      if (bd > th2) c_full++; else c_join++;
      cx[b] += (px - cx[b]) / (cn[b] + 1);
      cz[b] += (pz - cz[b]) / (cn[b] + 1);
      cn[b]++;
      tgt = b;
    end else begin
      c_new++;
      cv[fr] = 1; cx[fr] = px; cz[fr] = pz; cn[fr] = 1;
      tgt = fr;
    end
    b = -1;
    for (int i = 0; i < MAX_CL; i++)
      if (cv[i] && i != tgt && (b < 0 || d2(cx[tgt], cz[tgt], cx[i], cz[i]) < bd)) begin
        b = i; bd = d2(cx[tgt], cz[tgt], cx[i], cz[i]);
      end
    if (b >= 0 && bd <= th2) begin
      int lo, hi;
      longint nx, nz, nn;
      c_merge++;
      lo = b < tgt ? b : tgt; hi = b < tgt ? tgt : b;
      nn = cn[lo] + cn[hi];
      nx = (cx[lo] * cn[lo] + cx[hi] * cn[hi]) / nn;
      nz = (cz[lo] * cn[lo] + cz[hi] * cn[hi]) / nn;
      cx[lo] = nx; cz[lo] = nz; cn[lo] = nn;
      cv[hi] = 0; cx[hi] = 0; cz[hi] = 0; cn[hi] = 0;
      tgt = lo;
    end
    e.t = s.t;
    e.cluster = CL_W'(tgt);
    expq.push_back(e);
  endtask

  int acc_cycle, cyc = 0;
  always @(posedge clk) begin
    cyc++;
    if (rst_n) begin
      if (in_valid && in_ready) begin
        model(in_s);
        acc_cycle = cyc;
      end
      if (out_valid && !out_ready) c_stall++;
      if (out_valid && out_ready) begin
        sorted_spike_t e;
        int ncl;
        checks++;
        e = expq.pop_front();
        if (e != out_s) begin
          failures++;
          $display("FAIL: t=%0d cluster=%0d exp t=%0d cluster=%0d", out_s.t, out_s.cluster, e.t, e.cluster);
        end
        ncl = 0;
        foreach (cv[i]) ncl += cv[i];
        checks++;
        if (int'(n_clusters) != ncl) begin failures++; $display("FAIL: n_clusters=%0d exp %0d", n_clusters, ncl); end
      end
    end
  end

  // latency: result valid 2*MAX_CL+2 cycles after acceptance
  always @(posedge out_valid) begin
    checks++;
    if (cyc - acc_cycle != 2 * MAX_CL + 2) begin
      failures++; $display("FAIL: latency %0d", cyc - acc_cycle);
    end
  end

  initial begin : watchdog
    repeat (100000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int tstamp = 0;
  task automatic send(int x, int z);
    if (x < 0) x = 0;
    if (x > 31) x = 31;
    if (z < 0) z = 0;
    in_valid = 1;
    in_s.t = TIME_W'(tstamp);
    in_s.x = X_W'(x);
    in_s.z = Z_W'(z);
    tstamp += 1 + int'($urandom % 100);
    @(posedge clk);
    while (!in_ready) @(posedge clk);
    @(negedge clk);
    in_valid = 0;
  endtask

  function automatic int jit(int r); return int'($urandom % (2 * r + 1)) - r; endfunction

  initial begin
    in_valid = 0; in_s = '0; out_ready = 1;
    for (int i = 0; i < MAX_CL; i++) begin cv[i] = 0; cx[i] = 0; cz[i] = 0; cn[i] = 0; end
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    // three separated sources
    for (int k = 0; k < 60; k++)
      case (k % 3)
        0: send(0 + jit(3), 200 + jit(4));
        1: send(20 + jit(3), 600 + jit(4));
        default: send(10 + jit(3), 1100 + jit(4));
      endcase
    // two clusters 14 um apart, then spikes in between pull them together
    for (int k = 0; k < 10; k++) begin send(10, 400); send(10, 414); end
    for (int k = 0; k < 50; k++) send(10, 407);
    // random positions fill all slots, with output stalls
    fork
      for (int k = 0; k < 60; k++) send(int'($urandom % 32), int'($urandom % 1200));
      forever begin out_ready = ($urandom % 3) == 0; @(negedge clk); end
    join_any
    disable fork;
    out_ready = 1;
    repeat (4 * MAX_CL) @(negedge clk);
    checks++;
    if (expq.size() != 0) begin failures++; $display("FAIL: %0d results missing", expq.size()); end
    checks++;
    if (c_new == 0 || c_join == 0 || c_merge == 0 || c_full == 0 || c_stall == 0) begin
      failures++; $display("FAIL: coverage");
    end
    $display("new=%0d join=%0d merge=%0d full=%0d stall=%0d", c_new, c_join, c_merge, c_full, c_stall);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
