// lsort_pkg -- widths and stream payload types shared by the L-Sort spike
// sorting pipeline.
//
// The pipeline carries four kinds of stream word, each on its own valid/ready
// (AXI-Stream style) handshake:
//   raw_sample_t    channel index + raw 12-bit voltage       (host -> filter)
//   filt_sample_t   channel index + filtered 16-bit sample   (filter -> detector)
//   peak_sample_t   filtered sample + "is a peak" flag       (detector -> locator)
//   spike_t         peak time + centre-of-mass position      (locator -> clustering)
//   sorted_spike_t  spike time + cluster (neuron) index      (clustering -> host)
//
// What follows the paper: 12-bit input samples and 120 channels (its
// utilization table), 12-bit coefficients with 10 fraction bits, a 4-entry
// spike buffer whose fields add up to the 134 bits the paper quotes.
// Own choices: the 16-bit filtered sample, the 32-bit sample-time counter, the
// probe geometry in micrometres and the split of the 134 buffer bits into
// fields (16 amp + 7 ch + 32 time + 21 sum amp + 26 sum amp*x + 32 sum amp*z).
package lsort_pkg;

  // ---- stream fields -------------------------------------------------------
  localparam int unsigned CH_W   = 7;   // channel index, 120 channels
  localparam int unsigned IN_W   = 12;  // raw sample width
  localparam int unsigned DATA_W = 16;  // filtered sample width
  localparam int unsigned TIME_W = 32;  // sample-time counter (time steps)
  localparam int unsigned X_W    = 5;   // x position in um (0..31)
  localparam int unsigned Z_W    = 11;  // z position in um (0..2047)
  localparam int unsigned CL_W   = 5;   // cluster index (up to 32 clusters)

  // ---- filter coefficients -------------------------------------------------
  localparam int unsigned COEF_W    = 12;
  localparam int unsigned COEF_FRAC = 10;

  // ---- spike locator accumulators -----------------------------------------
  localparam int unsigned AMP_W  = DATA_W;       // peak magnitude
  localparam int unsigned SAMP_W = AMP_W + 5;    // sum of amp, up to 32 peaks
  localparam int unsigned SX_W   = SAMP_W + X_W; // sum of amp*x
  localparam int unsigned SZ_W   = SAMP_W + Z_W; // sum of amp*z

  typedef struct packed {
    logic        [CH_W-1:0] ch;
    logic signed [IN_W-1:0] data;
  } raw_sample_t;

  typedef struct packed {
    logic        [CH_W-1:0]   ch;
    logic signed [DATA_W-1:0] data;
  } filt_sample_t;

  typedef struct packed {
    logic        [CH_W-1:0]   ch;
    logic signed [DATA_W-1:0] data;
    logic                     is_peak;
  } peak_sample_t;

  typedef struct packed {
    logic [TIME_W-1:0] t;
    logic [X_W-1:0]    x;
    logic [Z_W-1:0]    z;
  } spike_t;

  typedef struct packed {
    logic [TIME_W-1:0] t;
    logic [CL_W-1:0]   cluster;
  } sorted_spike_t;

  // One spike-locator buffer entry (134 bits of payload plus a valid bit).
  typedef struct packed {
    logic              valid;
    logic [AMP_W-1:0]  amp;   // largest peak magnitude seen so far
    logic [CH_W-1:0]   ch;    // channel of that peak
    logic [TIME_W-1:0] t;     // time step of that peak
    logic [SZ_W-1:0]   sz;    // sum of amp * z
    logic [SX_W-1:0]   sx;    // sum of amp * x
    logic [SAMP_W-1:0] samp;  // sum of amp
  } spike_buf_t;

  // Magnitude of a filtered sample (|x|, fits in DATA_W bits unsigned).
  function automatic logic [DATA_W-1:0] magnitude(logic signed [DATA_W-1:0] v);
    return v[DATA_W-1] ? DATA_W'(-v) : DATA_W'(v);
  endfunction

endpackage
