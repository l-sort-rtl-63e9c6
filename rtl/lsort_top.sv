// lsort_top -- L-Sort real-time multi-channel spike sorter.
//
// Raw samples of a high-density probe arrive time-multiplexed, one
// (channel, value) pair per clock, channel 0..NCH-1 in each time step. They
// flow through four stages joined by valid/ready streams:
//   filter      band-pass IIR per channel (lsort_iir_filter)
//   detector    per-channel median threshold, flags peaks (lsort_peak_detector)
//   locator     groups peaks into spikes, centre-of-mass position
//               (lsort_spike_locator)
//   clustering  online clustering of positions (lsort_cluster)
// and leave as (spike time, cluster index) words.
//
// Following the paper: the four stages, their order and the stream
// handshakes between them. The host-side DMA and the word packing around it
// are not part of this module: the input and output streams are brought out
// as plain valid/ready ports with separate fields.
//
// Interface: s_* is the sample stream in, m_* the sorted-spike stream out.
// loc_overflow counts peaks dropped because all locator buffers were busy;
// n_clusters is the number of live clusters.
// Timing: one sample per clock at full rate (NCH x sample rate, 3.6 MHz for
// 120 channels at 30 kHz). After reset the filter and detector clear their
// memories, so s_ready rises after NCH cycles. A spike is reported T_TH time
// steps after its largest peak plus about 2*MAX_CL + 10 cycles.
module lsort_top
  import lsort_pkg::*;
#(
  parameter int unsigned NCH     = 120,
  parameter int unsigned N_MED   = 25,
  parameter int unsigned M_TH    = 7,
  parameter int unsigned NBUF    = 4,
  parameter int unsigned CH_TH   = 8,
  parameter int unsigned T_TH    = 15,
  parameter int unsigned MAX_CL  = 32,
  parameter int unsigned DIST_TH = 10
) (
  input  logic                     clk,
  input  logic                     rst_n,
  // sample stream in
  input  logic                     s_valid,
  output logic                     s_ready,
  input  logic        [CH_W-1:0]   s_ch,
  input  logic signed [IN_W-1:0]   s_data,
  // sorted spike stream out
  output logic                     m_valid,
  input  logic                     m_ready,
  output logic        [TIME_W-1:0] m_time,
  output logic        [CL_W-1:0]   m_cluster,
  // status
  output logic        [15:0]       loc_overflow,
  output logic        [CL_W:0]     n_clusters
);
  raw_sample_t   raw;
  filt_sample_t  filt;
  peak_sample_t  peak;
  spike_t        spike;
  sorted_spike_t sorted;
  logic filt_valid, filt_ready, peak_valid, peak_ready, spk_valid, spk_ready;

  assign raw = '{ch: s_ch, data: s_data};

  lsort_iir_filter #(.NCH(NCH)) u_filter (
    .clk, .rst_n,
    .in_valid (s_valid),    .in_ready (s_ready),    .in_s (raw),
    .out_valid(filt_valid), .out_ready(filt_ready), .out_s(filt)
  );

  lsort_peak_detector #(.NCH(NCH), .N(N_MED), .M(M_TH)) u_detector (
    .clk, .rst_n,
    .in_valid (filt_valid), .in_ready (filt_ready), .in_s (filt),
    .out_valid(peak_valid), .out_ready(peak_ready), .out_s(peak)
  );

  lsort_spike_locator #(.NCH(NCH), .NBUF(NBUF), .CH_TH(CH_TH), .T_TH(T_TH)) u_locator (
    .clk, .rst_n,
    .in_valid (peak_valid), .in_ready (peak_ready), .in_s (peak),
    .out_valid(spk_valid),  .out_ready(spk_ready),  .out_s(spike),
    .overflow_cnt(loc_overflow)
  );

  lsort_cluster #(.MAX_CL(MAX_CL), .DIST_TH(DIST_TH)) u_cluster (
    .clk, .rst_n,
    .in_valid (spk_valid), .in_ready (spk_ready), .in_s (spike),
    .out_valid(m_valid),   .out_ready(m_ready),   .out_s(sorted),
    .n_clusters
  );

  assign m_time    = sorted.t;
  assign m_cluster = sorted.cluster;

endmodule
