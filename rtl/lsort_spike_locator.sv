// lsort_spike_locator -- groups per-channel peaks into spikes and computes
// each spike's source position by a peak-based centre of mass.
//
// A neuron's spike shows up as peaks on several neighbouring channels over a
// few samples. The block holds up to NBUF ongoing spikes in a small buffer
// file; each entry keeps the time step, channel and magnitude of its largest
// peak and three running sums: sum(amp), sum(amp*x), sum(amp*z).
//   * new / merge: when a peak arrives, every valid entry checks whether the
//     peak's channel lies within CH_TH channels of the entry's channel and
//     its time within T_TH time steps of the entry's time. The peak is merged
//     into the first entry that matches (sums grow; channel, time and
//     magnitude are replaced when the peak is larger); otherwise it opens a
//     new entry after the last valid one.
//   * send: in a cycle with no peak, entry 0 checks whether more than T_TH
//     time steps have passed since its peak time. If so it leaves the buffer
//     as a spike: X = sum(amp*x)/sum(amp), Z = sum(amp*z)/sum(amp), with its
//     peak time, and entries 1..NBUF-1 move down one place.
// Entries stay packed from entry 0 in order of creation, so entry 0 is always
// the oldest ongoing spike.
//
// Following the paper: the buffer of 4 entries with fields amp, ch, time,
// sum Z, sum X, sum amp; the new/merge/send decisions on channel and time
// differences; merge-or-new on a peak, send by entry 0 only when no peak
// arrives, shift of the other entries on send; the centre-of-mass formula; a
// time counter driven by the channel stream.
// This design's own choices: the thresholds CH_TH and T_TH (not printed);
// the probe layout (channel c at column c mod N_COLS, row c / N_COLS, pitches
// X_PITCH and Z_PITCH um); the time counter stepping after the last channel
// of each time step; the send test against the stored peak time (the figure
// holds one time field); first-match merging; dropping a new spike when all
// entries are busy (counted in overflow_cnt); integer-um positions with
// truncating division.
//
// Interface: peak_sample_t stream in (every sample, is_peak marks peaks); it
// is always accepted (in_ready = 1), so the real-time stream never stalls.
// spike_t stream out, held until accepted; while it is held, entry 0 waits.
// Timing: one input sample per clock; a spike appears on the output one edge
// after the send decision.
module lsort_spike_locator
  import lsort_pkg::*;
#(
  parameter int unsigned NCH     = 120,
  parameter int unsigned NBUF    = 4,
  parameter int unsigned CH_TH   = 8,
  parameter int unsigned T_TH    = 15,
  parameter int unsigned N_COLS  = 2,
  parameter int unsigned X_PITCH = 20,
  parameter int unsigned Z_PITCH = 20
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         in_valid,
  output logic         in_ready,
  input  peak_sample_t in_s,
  output logic         out_valid,
  input  logic         out_ready,
  output spike_t       out_s,
  output logic [15:0]  overflow_cnt
);
  localparam int unsigned BI_W = (NBUF > 1) ? $clog2(NBUF) : 1;

  spike_buf_t        buf_q [NBUF];
  logic [TIME_W-1:0] time_cnt;

  assign in_ready = 1'b1;

  // stream rule: a word offered on the output stays put until it is taken
  assert property (@(posedge clk) disable iff (!rst_n)
                   out_valid && !out_ready |=> out_valid && $stable(out_s))
    else $error("output word changed while stalled");

  // ---- peak geometry -------------------------------------------------------
  logic [AMP_W-1:0] amp;
  logic [X_W-1:0]   px;
  logic [Z_W-1:0]   pz;
  logic             pk;

  always_comb begin
    amp = magnitude(in_s.data);
    px  = X_W'((int'(in_s.ch) % N_COLS) * X_PITCH);
    pz  = Z_W'((int'(in_s.ch) / N_COLS) * Z_PITCH);
    pk  = in_valid && in_s.is_peak;
  end

  // ---- new / merge ---------------------------------------------------------
  logic [NBUF-1:0]  match;
  logic [BI_W-1:0]  merge_idx, free_idx;
  logic             any_match, any_free;

  function automatic logic [CH_W-1:0] ch_dist(logic [CH_W-1:0] a, logic [CH_W-1:0] b);
    return (a > b) ? a - b : b - a;
  endfunction

  always_comb begin
    for (int i = 0; i < NBUF; i++)
      match[i] = buf_q[i].valid
              && (ch_dist(in_s.ch, buf_q[i].ch) <= CH_W'(CH_TH))
              && ((time_cnt - buf_q[i].t) <= TIME_W'(T_TH));
    any_match = |match;
    merge_idx = '0;
    for (int i = NBUF - 1; i >= 0; i--)
      if (match[i]) merge_idx = BI_W'(i);
    any_free = 1'b0;
    free_idx = '0;
    for (int i = NBUF - 1; i >= 0; i--)
      if (!buf_q[i].valid) begin
        any_free = 1'b1;
        free_idx = BI_W'(i);
      end
  end

  // ---- send + position calculation ----------------------------------------
  logic do_send, do_merge, do_new, do_drop;
  logic [SX_W-1:0] pos_x;
  logic [SZ_W-1:0] pos_z;

  always_comb begin
    do_merge = pk && any_match;
    do_new   = pk && !any_match && any_free;
    do_drop  = pk && !any_match && !any_free;
    do_send  = !pk && buf_q[0].valid
            && ((time_cnt - buf_q[0].t) > TIME_W'(T_TH))
            && (!out_valid || out_ready);
    pos_x = '0;
    pos_z = '0;
    if (buf_q[0].samp != '0) begin
      pos_x = buf_q[0].sx / SX_W'(buf_q[0].samp);
      pos_z = buf_q[0].sz / SZ_W'(buf_q[0].samp);
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < NBUF; i++) buf_q[i] <= '0;
      time_cnt     <= '0;
      out_valid    <= 1'b0;
      out_s        <= '0;
      overflow_cnt <= '0;
    end else begin
      if (in_valid && in_s.ch == CH_W'(NCH - 1))
        time_cnt <= time_cnt + 1'b1;

      if (out_valid && out_ready) out_valid <= 1'b0;

      if (do_merge) begin
        buf_q[merge_idx].samp <= buf_q[merge_idx].samp + SAMP_W'(amp);
        buf_q[merge_idx].sx   <= buf_q[merge_idx].sx + SX_W'(amp) * SX_W'(px);
        buf_q[merge_idx].sz   <= buf_q[merge_idx].sz + SZ_W'(amp) * SZ_W'(pz);
        if (amp > buf_q[merge_idx].amp) begin
          buf_q[merge_idx].amp <= amp;
          buf_q[merge_idx].ch  <= in_s.ch;
          buf_q[merge_idx].t   <= time_cnt;
        end
      end

      if (do_new)
        buf_q[free_idx] <= '{valid: 1'b1, amp: amp, ch: in_s.ch, t: time_cnt,
                             sz: SZ_W'(amp) * SZ_W'(pz), sx: SX_W'(amp) * SX_W'(px),
                             samp: SAMP_W'(amp)};

      if (do_drop && overflow_cnt != '1)
        overflow_cnt <= overflow_cnt + 1'b1;

      if (do_send) begin
        out_valid <= 1'b1;
        out_s     <= '{t: buf_q[0].t, x: X_W'(pos_x), z: Z_W'(pos_z)};
        for (int i = 0; i < NBUF - 1; i++) buf_q[i] <= buf_q[i+1];
        buf_q[NBUF-1] <= '0;
      end
    end
  end

endmodule
