// fir_filter: complex FIR that synthesizes the transmitted waveform.
//
// Each valid input IQ sample x[n] enters a delay line of NUM_TAPS samples and
// the filter produces y[n] = sum_{m=0}^{M-1} h[m] x[n-m] with complex taps h[m]
// (the filtering equation of the waveform-synthesis scheme). All M complex
// products are computed in parallel, so the filter accepts one sample per clock.
//
// Interface: in_valid/in_sample feed the stream (no back-pressure); taps[m] is
// {Re h[m], Im h[m]} in the shared fixed-point format (FX_FRAC fractional bits).
// out_valid/out_sample follow one clock after the input. The products are summed
// at full precision, shifted right by FX_FRAC (arithmetic, truncating) and
// saturated to SAMPLE_W bits. After reset the delay line holds zeros.
// The tap count follows the paper (M = 11); the number formats, the one-cycle
// latency and the saturation are choices of this design. Taps may change at any
// clock; the caller changes all of them in the same clock.
module fir_filter
  import chares_pkg::*;
#(
  parameter int unsigned M = NUM_TAPS
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic            in_valid,
  input  iq_t             in_sample,
  input  fx_t             taps_re [M],
  input  fx_t             taps_im [M],
  output logic            out_valid,
  output iq_t             out_sample
);

  iq_t delay_q [M];        // delay_q[m] = x[n-m] once x[n] has been shifted in
  iq_t window  [M];        // window seen by the output for the current input

  always_comb begin
    window[0] = in_sample;
    for (int m = 1; m < M; m++) window[m] = delay_q[m-1];
  end

  // Full-precision signed product of a tap and a sample component.
  function automatic logic signed [47:0] mul(input fx_t a, input sample_t b);
    logic signed [47:0] a_w, b_w;
    a_w = 48'(a);
    b_w = 48'(b);
    return a_w * b_w;
  endfunction

  logic signed [47:0] acc_re, acc_im;
  always_comb begin
    acc_re = '0;
    acc_im = '0;
    for (int m = 0; m < M; m++) begin
      // (a + jb)(c + jd) = (ac - bd) + j(ad + bc)
      acc_re = acc_re + mul(taps_re[m], window[m].re) - mul(taps_im[m], window[m].im);
      acc_im = acc_im + mul(taps_re[m], window[m].im) + mul(taps_im[m], window[m].re);
    end
  end

  function automatic sample_t scale_sat(input logic signed [47:0] v);
    logic signed [47:0] s;
    s = v >>> FX_FRAC;
    if (s > 48'sd32767)       return sample_t'(16'sh7FFF);
    else if (s < -48'sd32768) return sample_t'(-16'sh8000);
    else                      return sample_t'(s[SAMPLE_W-1:0]);
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int m = 0; m < M; m++) delay_q[m] <= '0;
      out_valid  <= 1'b0;
      out_sample <= '0;
    end else begin
      out_valid <= in_valid;
      if (in_valid) begin
        for (int m = 0; m < M; m++) delay_q[m] <= window[m];
        out_sample.re <= scale_sat(acc_re);
        out_sample.im <= scale_sat(acc_im);
      end
    end
  end

endmodule
