// action_clip: turns one raw actor output into a feasible FIR tap component.
//
// The agent may only move each tap within +-alpha of the default filter
// h0 = [1, 0, ..., 0], separately for the real and the imaginary part. This
// block adds the (optional) exploration noise to one action element and clips
// the sum into that box:
//   low  = h0 - alpha,  high = h0 + alpha,  h0 = 1.0 for the real part of
//   tap 0 and 0 for every other element,
//   tap  = min(max(action + noise, low), high).
// Elements are numbered as in the actor output: element 2m is Re h[m] and
// element 2m+1 is Im h[m]. The box and alpha = 0.1 follow the paper; the
// element order and the use of a plain clip (rather than, for instance, a tanh
// output layer) are choices of this design. Purely combinational; clipped is
// high when the bound was applied.
module action_clip
  import chares_pkg::*;
#(
  parameter int unsigned ADIM = ACTION_DIM
) (
  input  logic [$clog2(ADIM)-1:0] idx,      // action element index
  input  fx_t                     action,   // actor output
  input  fx_t                     noise,    // exploration noise (0 at test time)
  input  fx_t                     alpha,    // tap bound, fx_t (>= 0)
  output fx_t                     tap,      // feasible tap component
  output logic                    clipped
);

  fx_t                h0;
  logic signed [17:0] sum, lo, hi;

  always_comb begin
    h0  = (idx == '0) ? FX_ONE : fx_t'(0);
    sum = 18'(action) + 18'(noise);
    lo  = 18'(h0) - 18'(alpha);
    hi  = 18'(h0) + 18'(alpha);
    clipped = 1'b1;
    if (sum < lo)      tap = fx_t'(lo);
    else if (sum > hi) tap = fx_t'(hi);
    else begin
      tap     = fx_t'(sum);
      clipped = 1'b0;
    end
  end

endmodule
