// reward_unit: converts the receiver's feedback into the agent's reward and
// next state.
//
// Reward rules (values from the published configuration):
//   label reported correct                          -> RHO_SUCCESS (+2)
//   otherwise, decoding failure reported            -> RHO_DOWN    (-1)
//   otherwise, softmax higher than last feedback    -> RHO_UP      (+1)
//   otherwise, softmax lower than last feedback     -> RHO_DOWN    (-1)
//   otherwise (softmax unchanged)                   -> RHO_SAME    ( 0)
// The previous softmax is remembered between feedbacks; after reset it is 0,
// so a first wrong-label feedback with nonzero softmax counts as an increase.
// The next state is s' = {softmax, label_ok ? 1.0 : 0.0} (element 0 is the
// softmax). The order of the rules (success first, then decoding failure) and
// the state encoding are choices of this design.
//
// Timing: fb_valid is sampled on the clock edge; r_valid, reward and s_next
// appear one clock later and hold until the next feedback.
module reward_unit
  import chares_pkg::*;
(
  input  logic      clk,
  input  logic      rst_n,
  input  logic      fb_valid,
  input  feedback_t fb,
  output logic      r_valid,
  output reward_t   reward,
  output state_t    s_next,
  output logic      success
);

  fx_t     prev_softmax;
  reward_t r_n;

  always_comb begin
    if (fb.label_ok)                     r_n = RHO_SUCCESS;
    else if (fb.decode_fail)             r_n = RHO_DOWN;
    else if (fb.softmax > prev_softmax)  r_n = RHO_UP;
    else if (fb.softmax < prev_softmax)  r_n = RHO_DOWN;
    else                                 r_n = RHO_SAME;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      prev_softmax <= '0;
      r_valid      <= 1'b0;
      reward       <= RHO_SAME;
      s_next       <= '0;
      success      <= 1'b0;
    end else begin
      r_valid <= fb_valid;
      if (fb_valid) begin
        prev_softmax <= fb.softmax;
        reward       <= r_n;
        s_next[0]    <= fb.softmax;
        s_next[1]    <= fb.label_ok ? FX_ONE : fx_t'(0);
        success      <= fb.label_ok;
      end
    end
  end

endmodule
