// chares_controller: step sequencer of the waveform-synthesis agent.
//
// One agent step starts when the receiver's feedback for the last batch of
// waveforms has been turned into a reward r and next state s' (r_valid):
//   1. Training mode only: the trajectory (s, a, r, s') of the previous step
//      is written to the experience buffer (from the second feedback on,
//      since the first one has no previous step of the agent).
//   2. If the feedback reports the intended label (success), the current taps
//      are kept: the batch is already classified correctly.
//      Otherwise (and always on the first feedback) the actor is started on s'.
//   3. When the actor is done, its ACTION_DIM outputs are walked one per clock:
//      in training mode a fresh exploration-noise sample is added, then each
//      element is clipped into the feasible box around h0 (action_clip).
//   4. All taps are committed to the FIR in one clock (taps_updated pulses),
//      and the clipped action becomes the a of the next trajectory.
// The sequence and the training/testing difference (noise and trajectory
// storage only in training) follow the paper's description; the rule that a
// successful feedback keeps the taps follows its example that a correctly
// classified batch needs no new taps. The tap set after reset is h0 = [1,0,...,0].
//
// Interface: ready is high when a new feedback may be accepted; the top drops
// feedback that arrives while it is low. noise_en requests one noise sample per
// clock of step 3 (the generator's output register supplies the value used in
// the same clock). taps_re/taps_im hold the committed taps. n_new, n_kept,
// n_stored and n_clipped count steps with new taps, steps that kept the taps,
// stored trajectories and clipped tap components.
// Timing: a step with new taps takes actor latency + ACTION_DIM + 3 clocks from
// r_valid to taps_updated; a kept step takes one clock.
module chares_controller
  import chares_pkg::*;
#(
  parameter int unsigned M = NUM_TAPS,
  localparam int unsigned ADIM = 2 * M
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        train,       // 1: training (noise + storage), 0: testing
  input  fx_t         alpha,
  // from the reward unit
  input  logic        r_valid,
  input  reward_t     reward,
  input  state_t      s_next,
  input  logic        success,
  output logic        ready,
  // actor network
  output logic        actor_start,
  output fx_t         actor_state [STATE_DIM],
  input  logic        actor_done,
  input  fx_t         actor_action [ADIM],
  // exploration noise
  output logic        noise_en,
  input  fx_t         noise,
  // experience buffer
  output logic        buf_wr_valid,
  output trajectory_t buf_wr_data,
  // FIR taps
  output fx_t         taps_re [M],
  output fx_t         taps_im [M],
  output logic        taps_updated,
  // activity counters
  output logic [31:0] n_new,
  output logic [31:0] n_kept,
  output logic [31:0] n_stored,
  output logic [31:0] n_clipped
);

  typedef enum logic [1:0] {ST_IDLE, ST_ACT, ST_CLIP, ST_COMMIT} st_e;
  st_e st;

  localparam int unsigned IW = $clog2(ADIM);

  state_t        s_prev;
  fx_t           a_prev [ADIM];
  fx_t           shadow [ADIM];
  logic          have_prev;
  logic [IW-1:0] idx;

  // clip the current element
  fx_t  clip_tap;
  logic clip_hit;
  action_clip #(.ADIM(ADIM)) u_clip (
    .idx     (idx),
    .action  (actor_action[idx]),
    .noise   (train ? noise : fx_t'(0)),
    .alpha   (alpha),
    .tap     (clip_tap),
    .clipped (clip_hit)
  );

  assign ready    = (st == ST_IDLE) && !r_valid;
  assign noise_en = (st == ST_CLIP) && train;

  always_comb begin
    for (int i = 0; i < STATE_DIM; i++) actor_state[i] = s_prev[i];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st           <= ST_IDLE;
      s_prev       <= '0;
      have_prev    <= 1'b0;
      idx          <= '0;
      actor_start  <= 1'b0;
      buf_wr_valid <= 1'b0;
      buf_wr_data  <= '0;
      taps_updated <= 1'b0;
      n_new        <= '0;
      n_kept       <= '0;
      n_stored     <= '0;
      n_clipped    <= '0;
      for (int i = 0; i < ADIM; i++) begin
        a_prev[i] <= (i == 0) ? FX_ONE : fx_t'(0);
        shadow[i] <= '0;
      end
      for (int m = 0; m < M; m++) begin
        taps_re[m] <= (m == 0) ? FX_ONE : fx_t'(0);
        taps_im[m] <= '0;
      end
    end else begin
      actor_start  <= 1'b0;
      buf_wr_valid <= 1'b0;
      taps_updated <= 1'b0;
      unique case (st)
        ST_IDLE: if (r_valid) begin
          if (train && have_prev) begin
            buf_wr_valid <= 1'b1;
            buf_wr_data.s      <= s_prev;
            for (int i = 0; i < ADIM; i++) buf_wr_data.a[i] <= a_prev[i];
            buf_wr_data.r      <= reward;
            buf_wr_data.s_next <= s_next;
            n_stored <= n_stored + 1;
          end
          have_prev <= 1'b1;
          s_prev    <= s_next;
          if (success && have_prev) begin
            n_kept <= n_kept + 1;
          end else begin
            actor_start <= 1'b1;
            st          <= ST_ACT;
          end
        end
        ST_ACT: if (actor_done) begin
          idx <= '0;
          st  <= ST_CLIP;
        end
        ST_CLIP: begin
          shadow[idx] <= clip_tap;
          if (clip_hit) n_clipped <= n_clipped + 1;
          if (idx == IW'(ADIM - 1)) st <= ST_COMMIT;
          else idx <= idx + IW'(1);
        end
        ST_COMMIT: begin
          for (int m = 0; m < M; m++) begin
            taps_re[m] <= shadow[2*m];
            taps_im[m] <= shadow[2*m+1];
          end
          for (int i = 0; i < ADIM; i++) a_prev[i] <= shadow[i];
          taps_updated <= 1'b1;
          n_new        <= n_new + 1;
          st           <= ST_IDLE;
        end
        default: st <= ST_IDLE;
      endcase
    end
  end

endmodule
