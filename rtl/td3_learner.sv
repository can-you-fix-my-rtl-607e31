// td3_learner: sequencer of one learning step of the agent's twin-critic
// (TD3) training, for everything except the gradient computation.
//
// One learning step, started by learn_req from the trainer:
//   1. Extract a batch of B trajectories (s, a, r, s') from the experience
//      buffer into a local batch memory.
//   2. For each trajectory j, in order:
//        - start the target actor on s'_j and, in parallel, the two main
//          critics on (s_j, a_j);
//        - when the target actor is done, add a fresh smoothing-noise sample
//          to each of its 22 outputs and clip it to the feasible tap box
//          (action_clip), giving a~_j;
//        - start both target critics on (s'_j, a~_j);
//        - when all four critics are done, hand r_j and the four Q values to
//          the learning-target unit (first/last flags mark the batch).
//   3. Wait for learn_ack: the trainer has used the targets to update the
//      main critics (and, on every D-th step, the main actor) and written
//      their weights back.
//   4. Every D-th step, start the soft update of all three target networks
//      and wait until all three are done.
//   5. Pulse learn_done.
// actor_due is high during a step whose number (counting from 1) is a
// multiple of D, the steps on which the main actor is updated too.
// n_tgt_clipped counts target-action elements that hit the feasible box.
//
// The order of the operations, the twin critics with min, the smoothing noise
// on the target action and the "every D steps" rule follow the paper's
// training procedure (D = 2). That the target action is clipped to the same
// feasible box as the transmitted taps, and the batch memory, are this
// design's choices. Critic inputs are {s[0], s[1], a[0], ..., a[21]}.
//
// Interface: the learner drives start pulses and input vectors of the five
// networks and reads their done pulses and outputs; noise_en requests one
// noise sample per clock while clipping (the value on noise is used in the
// same clock). learn_req is taken only while idle with batch_avail high.
module td3_learner
  import chares_pkg::*;
#(
  parameter int unsigned M = NUM_TAPS,
  parameter int unsigned B = BATCH,
  parameter int unsigned D = 2,
  localparam int unsigned ADIM = 2 * M,
  localparam int unsigned CIN  = STATE_DIM + ADIM
) (
  input  logic        clk,
  input  logic        rst_n,
  input  fx_t         alpha,
  // trainer handshake
  input  logic        learn_req,
  input  logic        learn_ack,
  output logic        busy,
  output logic        actor_due,
  output logic        learn_done,
  output logic [31:0] n_steps,
  output logic [31:0] n_soft_updates,
  output logic [31:0] n_tgt_clipped,
  // experience buffer
  input  logic        batch_avail,
  output logic        batch_req,
  input  logic        rd_valid,
  input  logic        rd_last,
  input  trajectory_t rd_data,
  // target actor
  output logic        ta_start,
  output fx_t         ta_state [STATE_DIM],
  input  logic        ta_done,
  input  fx_t         ta_action [ADIM],
  // smoothing noise
  output logic        noise_en,
  input  fx_t         noise,
  // critics: index 0/1 main critics 1/2, index 2/3 target critics 1/2
  output logic        c_start [4],
  output fx_t         c_in    [4][CIN],
  input  logic        c_done  [4],
  input  fx_t         c_q     [4],
  // learning-target unit
  output logic        lt_valid,
  output logic        lt_first,
  output logic        lt_last,
  output reward_t     lt_reward,
  output fx_t         lt_q [4],
  // soft updates (actor, critic 1, critic 2 target networks)
  output logic        su_start,
  input  logic        su_done [3]
);

  typedef enum logic [3:0] {
    L_IDLE, L_REQ, L_CAPTURE, L_START, L_WAIT_TA, L_CLIP, L_TC, L_WAIT_C,
    L_EMIT, L_ACK, L_SOFT, L_DONE
  } lst_e;
  lst_e st;

  localparam int unsigned JW = $clog2(B + 1);
  localparam int unsigned IW = $clog2(ADIM);

  trajectory_t bmem [B];
  logic [JW-1:0] j;
  logic [IW-1:0] idx;
  fx_t           a_tilde [ADIM];
  logic          cdone_q [4];
  logic          sdone_q [3];
  trajectory_t   cur;

  assign cur  = bmem[j[$clog2(B)-1:0]];
  assign busy = (st != L_IDLE);

  // target action element: target actor output + smoothing noise, clipped
  fx_t  clip_tap;
  logic clip_hit;
  action_clip #(.ADIM(ADIM)) u_clip (
    .idx     (idx),
    .action  (ta_action[idx]),
    .noise   (noise),
    .alpha   (alpha),
    .tap     (clip_tap),
    .clipped (clip_hit)
  );

  assign noise_en = (st == L_CLIP);

  // network inputs
  always_comb begin
    for (int i = 0; i < STATE_DIM; i++) ta_state[i] = cur.s_next[i];
    for (int c = 0; c < 4; c++) begin
      for (int i = 0; i < STATE_DIM; i++) c_in[c][i] = (c < 2) ? cur.s[i] : cur.s_next[i];
      for (int i = 0; i < ADIM; i++)
        c_in[c][STATE_DIM + i] = (c < 2) ? cur.a[i] : a_tilde[i];
    end
  end

  always_ff @(posedge clk) begin
    if (st == L_CAPTURE && rd_valid) bmem[j[$clog2(B)-1:0]] <= rd_data;
  end

  logic [$clog2(D+1)-1:0] dcount;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st             <= L_IDLE;
      j              <= '0;
      idx            <= '0;
      batch_req      <= 1'b0;
      ta_start       <= 1'b0;
      su_start       <= 1'b0;
      lt_valid       <= 1'b0;
      lt_first       <= 1'b0;
      lt_last        <= 1'b0;
      lt_reward      <= '0;
      learn_done     <= 1'b0;
      n_steps        <= '0;
      n_soft_updates <= '0;
      n_tgt_clipped  <= '0;
      dcount         <= '0;
      actor_due      <= 1'b0;
      for (int c = 0; c < 4; c++) begin
        c_start[c] <= 1'b0;
        cdone_q[c] <= 1'b0;
        lt_q[c]    <= '0;
      end
      for (int k = 0; k < 3; k++) sdone_q[k] <= 1'b0;
      for (int i = 0; i < ADIM; i++) a_tilde[i] <= '0;
    end else begin
      batch_req  <= 1'b0;
      ta_start   <= 1'b0;
      su_start   <= 1'b0;
      lt_valid   <= 1'b0;
      learn_done <= 1'b0;
      for (int c = 0; c < 4; c++) begin
        c_start[c] <= 1'b0;
        if (c_done[c]) cdone_q[c] <= 1'b1;
      end
      for (int k = 0; k < 3; k++) if (su_done[k]) sdone_q[k] <= 1'b1;

      unique case (st)
        L_IDLE: if (learn_req && batch_avail) begin
          batch_req <= 1'b1;
          j         <= '0;
          actor_due <= (dcount == ($clog2(D+1))'(D - 1));
          st        <= L_REQ;
        end
        L_REQ: st <= L_CAPTURE;
        L_CAPTURE: if (rd_valid) begin
          j <= j + 1'b1;
          if (rd_last) begin
            j  <= '0;
            st <= L_START;
          end
        end
        L_START: begin
          ta_start   <= 1'b1;
          c_start[0] <= 1'b1;
          c_start[1] <= 1'b1;
          for (int c = 0; c < 4; c++) cdone_q[c] <= 1'b0;
          st <= L_WAIT_TA;
        end
        L_WAIT_TA: if (ta_done) begin
          idx <= '0;
          st  <= L_CLIP;
        end
        L_CLIP: begin
          a_tilde[idx] <= clip_tap;
          if (clip_hit) n_tgt_clipped <= n_tgt_clipped + 1;
          if (idx == IW'(ADIM - 1)) st <= L_TC;
          else idx <= idx + IW'(1);
        end
        L_TC: begin
          c_start[2] <= 1'b1;
          c_start[3] <= 1'b1;
          st <= L_WAIT_C;
        end
        L_WAIT_C: if ((cdone_q[0] || c_done[0]) && (cdone_q[1] || c_done[1]) &&
                      (cdone_q[2] || c_done[2]) && (cdone_q[3] || c_done[3])) begin
          st <= L_EMIT;
        end
        L_EMIT: begin
          lt_valid  <= 1'b1;
          lt_first  <= (j == '0);
          lt_last   <= (j == JW'(B - 1));
          lt_reward <= cur.r;
          for (int c = 0; c < 4; c++) lt_q[c] <= c_q[c];
          if (j == JW'(B - 1)) st <= L_ACK;
          else begin
            j  <= j + 1'b1;
            st <= L_START;
          end
        end
        L_ACK: if (learn_ack) begin
          n_steps <= n_steps + 1;
          if (dcount == ($clog2(D+1))'(D - 1)) begin
            dcount   <= '0;
            su_start <= 1'b1;
            for (int k = 0; k < 3; k++) sdone_q[k] <= 1'b0;
            st <= L_SOFT;
          end else begin
            dcount <= dcount + 1'b1;
            st     <= L_DONE;
          end
        end
        L_SOFT: if (!su_start && (sdone_q[0] || su_done[0]) && (sdone_q[1] || su_done[1]) &&
                    (sdone_q[2] || su_done[2])) begin
          n_soft_updates <= n_soft_updates + 1;
          st <= L_DONE;
        end
        L_DONE: begin
          learn_done <= 1'b1;
          actor_due  <= 1'b0;
          st         <= L_IDLE;
        end
        default: st <= L_IDLE;
      endcase
    end
  end

endmodule
