// lsort_iir_filter -- multi-channel band-pass IIR filter, Direct Form II.
//
// Removes the local field potential and high-frequency noise from a
// time-multiplexed stream of raw samples. One filter datapath serves all
// channels; each channel's two delay-line states w[n-1], w[n-2] live in a
// small state memory indexed by the channel number. Per sample:
//   w[n] = x[n] - a1*w[n-1] - a2*w[n-2]
//   y[n] = b0*w[n] + b1*w[n-1] + b2*w[n-2]
// with 12-bit signed coefficients holding 10 fraction bits.
//
// Following the paper: a first-order band-pass (300-6000 Hz) filter in Direct
// Form II with 12-bit Q2.10 coefficients. The default coefficients are the
// first-order Butterworth band-pass for a 30 kHz sample rate (a second-order
// transfer function, b1 = 0, b2 = -b0), quantized to Q2.10; they are this
// design's own numbers. Also this design's own: the 20-bit state width with
// saturation, floor rounding, the 16-bit saturated output and the clearing
// sweep after reset.
//
// Interface: input and output are valid/ready streams (raw_sample_t in,
// filt_sample_t out). After reset the block clears its state memory, one
// channel per cycle (NCH cycles), with in_ready low.
// Timing: one sample per clock; a sample accepted on one edge appears on the
// output two edges later (state-memory read, then compute). Two back-to-back
// samples of the same channel are handled by forwarding the new state.
module lsort_iir_filter
  import lsort_pkg::*;
#(
  parameter int unsigned NCH     = 120,
  parameter int unsigned STATE_W = 20,
  parameter int          B0      = 414,
  parameter int          B1      = 0,
  parameter int          B2      = -414,
  parameter int          A1      = -1165,
  parameter int          A2      = 195
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         in_valid,
  output logic         in_ready,
  input  raw_sample_t  in_s,
  output logic         out_valid,
  input  logic         out_ready,
  output filt_sample_t out_s
);
  localparam int unsigned PROD_W = STATE_W + COEF_W + 3;

  typedef struct packed {
    logic signed [STATE_W-1:0] w1;
    logic signed [STATE_W-1:0] w2;
  } state_t;

  state_t mem [NCH];

  // ---- reset sweep ---------------------------------------------------------
  logic            init_done;
  logic [CH_W-1:0] init_ch;

  // ---- pipeline stage 1: sample + state read -------------------------------
  logic        v1;
  raw_sample_t s1;
  state_t      ram_q, fwd_state, cur_state, new_state;
  logic        fwd_hit;
  logic        adv;

  assign adv      = !out_valid || out_ready;
  assign in_ready = adv && init_done;
  assign cur_state = fwd_hit ? fwd_state : ram_q;

  // stream rule: a word offered on the output stays put until it is taken
  assert property (@(posedge clk) disable iff (!rst_n)
                   out_valid && !out_ready |=> out_valid && $stable(out_s))
    else $error("output word changed while stalled");

  // ---- arithmetic ----------------------------------------------------------
  logic signed [PROD_W-1:0] x_sc, w_acc, y_acc, w_full, y_full;
  logic signed [STATE_W-1:0] w_new;
  logic signed [DATA_W-1:0]  y_new;

  function automatic logic signed [STATE_W-1:0] sat_state(logic signed [PROD_W-1:0] v);
    localparam logic signed [PROD_W-1:0] MAXV = PROD_W'((1 << (STATE_W-1)) - 1);
    localparam logic signed [PROD_W-1:0] MINV = -PROD_W'(1 << (STATE_W-1));
    if (v > MAXV) return STATE_W'(MAXV);
    if (v < MINV) return STATE_W'(MINV);
    return STATE_W'(v);
  endfunction

  function automatic logic signed [DATA_W-1:0] sat_data(logic signed [PROD_W-1:0] v);
    localparam logic signed [PROD_W-1:0] MAXV = PROD_W'((1 << (DATA_W-1)) - 1);
    localparam logic signed [PROD_W-1:0] MINV = -PROD_W'(1 << (DATA_W-1));
    if (v > MAXV) return DATA_W'(MAXV);
    if (v < MINV) return DATA_W'(MINV);
    return DATA_W'(v);
  endfunction

  always_comb begin
    x_sc   = PROD_W'(s1.data) <<< COEF_FRAC;
    w_acc  = x_sc - PROD_W'(A1) * PROD_W'(cur_state.w1) - PROD_W'(A2) * PROD_W'(cur_state.w2);
    w_full = w_acc >>> COEF_FRAC;
    w_new  = sat_state(w_full);
    y_acc  = PROD_W'(B0) * PROD_W'(w_new) + PROD_W'(B1) * PROD_W'(cur_state.w1)
           + PROD_W'(B2) * PROD_W'(cur_state.w2);
    y_full = y_acc >>> COEF_FRAC;
    y_new  = sat_data(y_full);
    new_state.w1 = w_new;
    new_state.w2 = cur_state.w1;
  end

  // ---- state memory (synchronous read, one write port) ---------------------
  always_ff @(posedge clk) begin
    if (!init_done)
      mem[init_ch] <= '0;
    else if (adv && v1)
      mem[s1.ch] <= new_state;
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
      fwd_state <= '0;
      out_valid <= 1'b0;
      out_s     <= '0;
    end else begin
      if (!init_done) begin
        init_ch <= init_ch + 1'b1;
        if (init_ch == CH_W'(NCH - 1)) init_done <= 1'b1;
      end
      if (adv) begin
        // stage 1 -> output
        out_valid <= v1;
        if (v1) begin
          out_s.ch   <= s1.ch;
          out_s.data <= y_new;
        end
        // input -> stage 1
        v1        <= in_valid && in_ready;
        s1        <= in_s;
        fwd_hit   <= v1 && (s1.ch == in_s.ch);
        fwd_state <= new_state;
      end
    end
  end

endmodule
