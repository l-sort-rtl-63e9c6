// lsort_cluster -- online (O-Sort style) clustering of spike positions with a
// fixed distance threshold.
//
// Each spike arrives as a 2-D source position (x, z) in um. The block keeps
// up to MAX_CL clusters, each a mean position (4 fraction bits) and a spike
// count, and for every spike:
//   1. SCAN   visits the clusters one per cycle with two multipliers and
//             finds the nearest one by squared Euclidean distance;
//   2. ASSIGN if that distance is within DIST_TH um, the spike joins the
//             cluster and its mean moves by (p - mean)/(n + 1); otherwise a
//             new cluster is opened at the spike position (when all MAX_CL
//             slots are taken the spike joins the nearest cluster instead);
//   3. MSCAN  visits the clusters again to find the one nearest to the
//             cluster just updated;
//   4. MERGE  if that one is within DIST_TH too, the two clusters merge into
//             the lower index, with the count-weighted mean of both;
//   5. OUT    the spike leaves with its time and its cluster index.
//
// Following the paper: O-Sort's two steps (merge the spike into a cluster or
// create one; update the cluster and merge it with another similar cluster)
// and a fixed merging threshold on the geometric features, used for both
// steps. This design's own choices: squared Euclidean distance, DIST_TH = 10
// um, 32 cluster slots, the running-mean update, the count-weighted cluster
// merge, at most one cluster merge per spike, the surviving index and the
// behaviour when the slots are full.
//
// Interface: spike_t stream in, sorted_spike_t stream out (valid/ready).
// Timing: not pipelined; one spike takes 2*MAX_CL + 4 cycles when the output
// is accepted at once (about 70 cycles at the defaults), while spikes arrive
// thousands of cycles apart. in_ready is high only in the idle state.
module lsort_cluster
  import lsort_pkg::*;
#(
  parameter int unsigned MAX_CL  = 32,
  parameter int unsigned DIST_TH = 10
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          in_valid,
  output logic          in_ready,
  input  spike_t        in_s,
  output logic          out_valid,
  input  logic          out_ready,
  output sorted_spike_t out_s,
  output logic [CL_W:0] n_clusters
);
  localparam int unsigned FRAC  = 4;
  localparam int unsigned MX_W  = X_W + FRAC;
  localparam int unsigned MZ_W  = Z_W + FRAC;
  localparam int unsigned D_W   = MZ_W + 1;      // signed difference
  localparam int unsigned SQ_W  = 2 * D_W + 1;   // sum of two squares
  localparam int unsigned N_W   = 16;            // spike count per cluster
  localparam logic [SQ_W-1:0] TH2 = SQ_W'(DIST_TH * DIST_TH) << (2 * FRAC);

  typedef enum logic [2:0] {S_IDLE, S_SCAN, S_ASSIGN, S_MSCAN, S_MERGE, S_OUT} state_e;

  typedef struct packed {
    logic            valid;
    logic [MX_W-1:0] mx;
    logic [MZ_W-1:0] mz;
    logic [N_W-1:0]  n;
  } cluster_t;

  cluster_t          cl [MAX_CL];
  state_e            state;
  logic [CL_W-1:0]   idx, best, target;
  logic              best_ok;
  logic [SQ_W-1:0]   best_d;
  logic [MX_W-1:0]   sx;   // spike (or target cluster) position being compared
  logic [MZ_W-1:0]   sz;
  logic [TIME_W-1:0] st;

  assert property (@(posedge clk) disable iff (!rst_n)
                   out_valid && !out_ready |=> out_valid && $stable(out_s))
    else $error("output word changed while stalled");

  // ---- distance datapath (two multipliers) ---------------------------------
  logic signed [D_W-1:0]  dx, dz;
  logic        [SQ_W-1:0] d2;

  always_comb begin
    dx   = D_W'(signed'({1'b0, sx})) - D_W'(signed'({1'b0, cl[idx].mx}));
    dz   = D_W'(signed'({1'b0, sz})) - D_W'(signed'({1'b0, cl[idx].mz}));
    d2   = SQ_W'(dx * dx) + SQ_W'(dz * dz);
  end

  // ---- first free slot -----------------------------------------------------
  logic            any_free;
  logic [CL_W-1:0] free_idx;
  always_comb begin
    any_free = 1'b0;
    free_idx = '0;
    for (int i = MAX_CL - 1; i >= 0; i--)
      if (!cl[i].valid) begin
        any_free = 1'b1;
        free_idx = CL_W'(i);
      end
  end

  // ---- cluster update arithmetic -------------------------------------------
  localparam int unsigned DV_W = N_W + 2;
  logic signed [DV_W-1:0]    diff_x, diff_z, div_n;
  logic signed [D_W-1:0]     ux, uz;
  logic [MX_W-1:0]           upd_x;
  logic [MZ_W-1:0]           upd_z;
  logic [N_W-1:0]            n_b;
  logic [MZ_W+N_W:0]         wsum_x, wsum_z;
  logic [N_W:0]              n_sum;
  logic [MX_W-1:0]           mrg_x;
  logic [MZ_W-1:0]           mrg_z;
  logic [N_W-1:0]            mrg_n;

  always_comb begin
    n_b = cl[best].n;
    // running mean: mean + (p - mean) / (n + 1)
    diff_x = DV_W'(signed'(D_W'(sx) - D_W'(cl[best].mx)));
    diff_z = DV_W'(signed'(D_W'(sz) - D_W'(cl[best].mz)));
    div_n  = signed'(DV_W'(n_b) + DV_W'(1));
    ux     = D_W'(diff_x / div_n);
    uz     = D_W'(diff_z / div_n);
    upd_x = MX_W'(D_W'(cl[best].mx) + ux);
    upd_z = MZ_W'(D_W'(cl[best].mz) + uz);
    // count-weighted merge of clusters target and best
    n_sum  = (N_W+1)'(cl[target].n) + (N_W+1)'(cl[best].n);
    wsum_x = (MZ_W+N_W+1)'(cl[target].mx) * (MZ_W+N_W+1)'(cl[target].n)
           + (MZ_W+N_W+1)'(cl[best].mx)   * (MZ_W+N_W+1)'(cl[best].n);
    wsum_z = (MZ_W+N_W+1)'(cl[target].mz) * (MZ_W+N_W+1)'(cl[target].n)
           + (MZ_W+N_W+1)'(cl[best].mz)   * (MZ_W+N_W+1)'(cl[best].n);
    mrg_x  = '0;
    mrg_z  = '0;
    if (n_sum != '0) begin
      mrg_x = MX_W'(wsum_x / (MZ_W+N_W+1)'(n_sum));
      mrg_z = MZ_W'(wsum_z / (MZ_W+N_W+1)'(n_sum));
    end
    mrg_n = n_sum[N_W] ? '1 : n_sum[N_W-1:0];
  end

  assign in_ready = (state == S_IDLE);

  always_comb begin
    n_clusters = '0;
    for (int i = 0; i < MAX_CL; i++) n_clusters += (CL_W+1)'(cl[i].valid);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < MAX_CL; i++) cl[i] <= '0;
      state     <= S_IDLE;
      idx       <= '0;
      best      <= '0;
      target    <= '0;
      best_ok   <= 1'b0;
      best_d    <= '0;
      sx        <= '0;
      sz        <= '0;
      st        <= '0;
      out_valid <= 1'b0;
      out_s     <= '0;
    end else begin
      unique case (state)
        S_IDLE: if (in_valid) begin
          sx      <= {in_s.x, FRAC'(0)};
          sz      <= {in_s.z, FRAC'(0)};
          st      <= in_s.t;
          idx     <= '0;
          best_ok <= 1'b0;
          best_d  <= '1;
          state   <= S_SCAN;
        end

        S_SCAN, S_MSCAN: begin
          if (cl[idx].valid && !(state == S_MSCAN && idx == target) && (!best_ok || d2 < best_d)) begin
            best    <= idx;
            best_d  <= d2;
            best_ok <= 1'b1;
          end
          idx <= idx + 1'b1;
          if (idx == CL_W'(MAX_CL - 1))
            state <= (state == S_SCAN) ? S_ASSIGN : S_MERGE;
        end

        S_ASSIGN: begin
          if (best_ok && (best_d <= TH2 || !any_free)) begin
            cl[best].mx <= upd_x;
            cl[best].mz <= upd_z;
            if (cl[best].n != '1) cl[best].n <= cl[best].n + 1'b1;
            target <= best;
            sx     <= upd_x;
            sz     <= upd_z;
          end else begin
            cl[free_idx] <= '{valid: 1'b1, mx: sx, mz: sz, n: N_W'(1)};
            target <= free_idx;
          end
          idx     <= '0;
          best_ok <= 1'b0;
          best_d  <= '1;
          state   <= S_MSCAN;
        end

        S_MERGE: begin
          out_s.t       <= st;
          out_s.cluster <= target;
          if (best_ok && best_d <= TH2) begin
            if (best < target) begin
              cl[best]   <= '{valid: 1'b1, mx: mrg_x, mz: mrg_z, n: mrg_n};
              cl[target] <= '0;
              out_s.cluster <= best;
            end else begin
              cl[target] <= '{valid: 1'b1, mx: mrg_x, mz: mrg_z, n: mrg_n};
              cl[best]   <= '0;
            end
          end
          out_valid <= 1'b1;
          state     <= S_OUT;
        end

        S_OUT: if (out_ready) begin
          out_valid <= 1'b0;
          state     <= S_IDLE;
        end

        default: state <= S_IDLE;
      endcase
    end
  end

endmodule
