// gaussian_noise: exploration noise eps ~ N(0, sigma) for the actor's actions.
//
// During training the agent perturbs each action element with zero-mean
// Gaussian noise; at test time no noise is used. This block makes one noise
// sample per clock while en is high.
//
// How it works: a 64-bit xorshift generator (shifts 13, 7, 17) produces 64
// fresh pseudo-random bits per clock. They are cut into four 16-bit uniform
// numbers whose sum (Irwin-Hall, n = 4) is close to Gaussian with mean
// 2*65535 and standard deviation 65536/sqrt(3). Subtracting the mean and
// multiplying by 7094/65536 (= 4096*sqrt(3)/65536) gives a unit-variance value
// z in fx_t; the output is z * sigma. The sample is bounded to about
// +-3.46 sigma, which the action clipper makes irrelevant for the tap bounds.
// The generator choice and the seed are this design's; the paper only asks for
// Gaussian noise of a given sigma. The top uses a second instance, with
// another seed, for the noise added to the target actor's output during
// learning.
//
// Timing: noise is registered; with en high in clock t, a new sample appears
// after the edge ending clock t (valid = 1 the clock after). SEED must be
// nonzero.
module gaussian_noise
  import chares_pkg::*;
#(
  parameter logic [63:0] SEED = 64'h9E37_79B9_7F4A_7C15
) (
  input  logic clk,
  input  logic rst_n,
  input  logic en,
  input  fx_t  sigma,      // standard deviation, fx_t (>= 0)
  output logic valid,
  output fx_t  noise
);

  logic [63:0] state_q, state_n;

  always_comb begin
    state_n = state_q;
    state_n = state_n ^ (state_n << 13);
    state_n = state_n ^ (state_n >> 7);
    state_n = state_n ^ (state_n << 17);
  end

  logic [17:0]        usum;
  logic signed [19:0] centered;
  logic signed [47:0] z_w, n_w;
  fx_t                z;
  always_comb begin
    usum     = 18'(state_n[15:0]) + 18'(state_n[31:16]) + 18'(state_n[47:32]) + 18'(state_n[63:48]);
    centered = $signed({2'b00, usum}) - 20'sd131070;
    z_w      = (48'(centered) * 48'sd7094) >>> 16;
    z        = fx_sat(z_w);
    n_w      = (48'(z) * 48'(sigma)) >>> FX_FRAC;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state_q <= SEED;
      valid   <= 1'b0;
      noise   <= '0;
    end else begin
      valid <= en;
      if (en) begin
        state_q <= state_n;
        noise   <= fx_sat(n_w);
      end
    end
  end

endmodule
