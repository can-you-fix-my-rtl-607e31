// chares_pkg: types and constants shared by the waveform-synthesis agent.
//
// All real-valued quantities (FIR taps, network activations and weights, the
// state seen by the agent, the exploration noise) use one signed fixed-point
// format, fx_t: 16 bits with FRAC = 12 fractional bits (range [-8, 8),
// resolution 1/4096). The format is a choice of this design; the network sizes,
// tap count, tap bound, buffer depth, batch size and reward values are the
// numbers of the published configuration.
package chares_pkg;

  // ---------------- fixed point ----------------
  localparam int unsigned FX_W    = 16;
  localparam int unsigned FX_FRAC = 12;
  typedef logic signed [FX_W-1:0] fx_t;

  localparam fx_t FX_ONE  = fx_t'(1 << FX_FRAC);      // 1.0
  localparam fx_t FX_MAX  = fx_t'(16'sh7FFF);
  localparam fx_t FX_MIN  = fx_t'(-16'sh8000);

  // Saturate a wide signed value into fx_t.
  function automatic fx_t fx_sat(input logic signed [47:0] v);
    if (v > 48'sd32767)       return FX_MAX;
    else if (v < -48'sd32768) return FX_MIN;
    else                      return fx_t'(v[FX_W-1:0]);
  endfunction

  // ---------------- FIR / action space ----------------
  localparam int unsigned NUM_TAPS   = 11;             // M
  localparam int unsigned ACTION_DIM = 2 * NUM_TAPS;   // Re and Im of each tap
  // alpha = 0.1 -> round(0.1 * 4096) = 410
  localparam fx_t ALPHA_DEFAULT = fx_t'(410);

  // IQ samples carried through the FIR
  localparam int unsigned SAMPLE_W = 16;
  typedef logic signed [SAMPLE_W-1:0] sample_t;
  typedef struct packed {
    sample_t re;
    sample_t im;
  } iq_t;

  // ---------------- agent state / feedback ----------------
  // State s = {average softmax output of the intended class, label correct}
  localparam int unsigned STATE_DIM = 2;
  typedef fx_t [STATE_DIM-1:0] state_t;
  typedef fx_t [ACTION_DIM-1:0] action_t;

  // Feedback returned by the receiver for one batch of W waveforms.
  typedef struct packed {
    logic label_ok;     // classifier reported the intended label
    logic decode_fail;  // receiver reports a high decoding failure rate
    fx_t  softmax;      // average softmax output of the intended class
  } feedback_t;

  // ---------------- reward ----------------
  typedef logic signed [7:0] reward_t;
  localparam reward_t RHO_SUCCESS = 8'sd2;
  localparam reward_t RHO_UP      = 8'sd1;
  localparam reward_t RHO_DOWN    = -8'sd1;
  localparam reward_t RHO_SAME    = 8'sd0;

  // ---------------- actor network ----------------
  localparam int unsigned HIDDEN      = 30;   // neurons per hidden layer
  localparam int unsigned HID_LAYERS  = 10;   // hidden layers

  // Number of weight-memory words of a fully connected network: each neuron
  // stores its bias followed by one weight per input.
  function automatic int unsigned mlp_words(int unsigned in_dim, int unsigned hid,
                                            int unsigned n_hid, int unsigned out_dim);
    return hid * (in_dim + 1) + (n_hid - 1) * hid * (hid + 1) + out_dim * (hid + 1);
  endfunction

  // ---------------- experience buffer ----------------
  localparam int unsigned BUF_DEPTH = 10000;
  localparam int unsigned BATCH     = 64;

  // One trajectory (s, a, r, s')
  typedef struct packed {
    state_t  s;
    action_t a;
    reward_t r;
    state_t  s_next;
  } trajectory_t;

endpackage
