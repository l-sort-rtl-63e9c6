// lsort_peak_detector -- per-channel median-threshold peak detector with an
// incrementally maintained sorted window.
//
// For every channel the block keeps the magnitudes of the last N samples in
// ascending order, each with an age counter, in one RAM row per channel. When
// a sample arrives its row is read and, in one pass:
//   * every age counter is decremented; the entry whose counter reaches 0 is
//     the oldest sample ("oldest index");
//   * the new magnitude is compared with all N stored magnitudes and a
//     priority encoder gives the number of entries below it ("insert index");
//   * multiplexers remove the oldest entry and insert the new one (counter N)
//     so the row stays sorted: when insert <= oldest the entries between them
//     move up one place, otherwise they move down one place;
//   * the new row is written back and its middle entry is the median.
// The sample is a peak when its magnitude exceeds M x median. Cost is O(N)
// comparators instead of the O(N^2) of a full sort.
//
// Following the paper: the RAM of (counter, value) pairs, the counter set to N
// and decremented on each access, oldest index where it reaches 0, insert index
// from a comparator bank and priority encoder, the shifting multiplexers, the
// median times M compared with the new sample, N = 25.
// This design's own choices: magnitudes |x| are stored and compared (the paper
// speaks of "relatively high absolute values"); the median is taken over the
// window after the new sample is inserted (as the figure draws it); the median
// is entry N/2 (entry 12 of 25); M is an integer (default 7, about 4.7 sigma of
// Gaussian noise since median|x| = 0.6745 sigma); after reset every row is
// filled with the largest magnitude and counters 1..N, so no peak is flagged
// until a channel has seen N/2+1 samples.
//
// Interface: valid/ready streams, filt_sample_t in, peak_sample_t out. Every
// sample is passed on with its is_peak flag, so the spike locator can keep
// time. After reset, in_ready stays low for NCH cycles while the rows are
// initialised.
// Timing: one sample per clock, two clock edges from input to output. A
// sample of the same channel on the very next cycle is served by forwarding
// the row just written (RAM read-during-write bypass).
module lsort_peak_detector
  import lsort_pkg::*;
#(
  parameter int unsigned NCH = 120,
  parameter int unsigned N   = 25,
  parameter int unsigned M   = 7
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         in_valid,
  output logic         in_ready,
  input  filt_sample_t in_s,
  output logic         out_valid,
  input  logic         out_ready,
  output peak_sample_t out_s
);
  localparam int unsigned CNT_W = $clog2(N + 1);
  localparam int unsigned IDX_W = $clog2(N + 1);
  localparam int unsigned MED   = N / 2;
  localparam int unsigned TH_W  = DATA_W + $clog2(M + 1);

  typedef struct packed {
    logic [CNT_W-1:0]  cnt;
    logic [DATA_W-1:0] mag;
  } entry_t;
  typedef entry_t [N-1:0] row_t;

  row_t mem [NCH];

  logic            init_done;
  logic [CH_W-1:0] init_ch;
  row_t            init_row;

  always_comb
    for (int i = 0; i < N; i++) begin
      init_row[i].cnt = CNT_W'(i + 1);
      init_row[i].mag = '1;
    end

  // ---- stage 1 -------------------------------------------------------------
  logic         v1;
  filt_sample_t s1;
  row_t         ram_q, fwd_row, cur_row, new_row;
  logic         fwd_hit;
  logic         adv;

  assign adv       = !out_valid || out_ready;
  assign in_ready  = adv && init_done;
  assign cur_row   = fwd_hit ? fwd_row : ram_q;

  // stream rule: a word offered on the output stays put until it is taken
  assert property (@(posedge clk) disable iff (!rst_n)
                   out_valid && !out_ready |=> out_valid && $stable(out_s))
    else $error("output word changed while stalled");

  // ---- oldest index, insert index, shifting multiplexers --------------------
  logic [DATA_W-1:0] new_mag;
  logic [N-1:0]      is_old;   // counter reaches 0 after the decrement
  logic [N-1:0]      ge_new;   // stored magnitude >= new magnitude
  logic [IDX_W-1:0]  old_idx, ins_idx;
  logic [DATA_W-1:0] median;
  logic [TH_W-1:0]   thresh;
  logic              is_peak;

  row_t dec_row;  // stored row with every counter decremented (--i)

  always_comb begin
    new_mag = magnitude(s1.data);
    for (int i = 0; i < N; i++) begin
      dec_row[i].cnt = cur_row[i].cnt - 1'b1;
      dec_row[i].mag = cur_row[i].mag;
      is_old[i] = (dec_row[i].cnt == '0);
      ge_new[i] = (cur_row[i].mag >= new_mag);
    end
    // find(i == 0)
    old_idx = '0;
    for (int i = N - 1; i >= 0; i--)
      if (is_old[i]) old_idx = IDX_W'(i);
    // priority encoder: first stored entry not below the new sample
    ins_idx = IDX_W'(N);
    for (int i = N - 1; i >= 0; i--)
      if (ge_new[i]) ins_idx = IDX_W'(i);
    // multiplexers: drop entry old_idx, place the new sample
    for (int j = 0; j < N; j++) begin
      new_row[j] = dec_row[j];
      if (ins_idx <= old_idx) begin
        if (j == int'(ins_idx))
          new_row[j] = '{cnt: CNT_W'(N), mag: new_mag};
        else if (j > int'(ins_idx) && j <= int'(old_idx))
          new_row[j] = dec_row[j-1];
      end else begin
        if (j == int'(ins_idx) - 1)
          new_row[j] = '{cnt: CNT_W'(N), mag: new_mag};
        else if (j >= int'(old_idx) && j < int'(ins_idx) - 1)
          new_row[j] = dec_row[j+1];
      end
    end
    median  = new_row[MED].mag;
    thresh  = TH_W'(median) * TH_W'(M);
    is_peak = TH_W'(new_mag) > thresh;
  end

  always_ff @(posedge clk) begin
    if (!init_done)
      mem[init_ch] <= init_row;
    else if (adv && v1)
      mem[s1.ch] <= new_row;
    if (adv)
      ram_q <= mem[in_s.ch];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      init_done <= 1'b0;
      init_ch   <= '0;
      v1        <= 1'b0;
      s1        <= '0;
      fwd_hit   <= 1'b0;
      fwd_row   <= '0;
      out_valid <= 1'b0;
      out_s     <= '0;
    end else begin
      if (!init_done) begin
        init_ch <= init_ch + 1'b1;
        if (init_ch == CH_W'(NCH - 1)) init_done <= 1'b1;
      end
      if (adv) begin
        out_valid <= v1;
        if (v1) out_s <= '{ch: s1.ch, data: s1.data, is_peak: is_peak};
        v1      <= in_valid && in_ready;
        s1      <= in_s;
        fwd_hit <= v1 && (s1.ch == in_s.ch);
        fwd_row <= new_row;
      end
    end
  end

endmodule
