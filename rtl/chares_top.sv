// chares_top: transmitter-side adaptive waveform synthesis.
//
// A learning agent chooses the taps of a short complex FIR filter that is
// applied to every transmitted IQ sample, so that a remote, black-box
// classifier at the receiver keeps recognising the signal when the channel
// distorts it. The receiver returns only light feedback per batch of waveforms
// (was the label right, the average softmax of the intended class, whether
// decoding failed). From it the agent derives a reward and a state, its actor
// network maps the state to new taps, and the taps are bounded to a small box
// around the pass-through filter [1, 0, ..., 0].
//
// Blocks:
//   reward_unit        feedback -> reward r and state s'
//   chares_controller  step sequencing, tap registers, noise + clipping
//   fc_network x 6     actor pi (2 -> 22), target actor pi', critics Q1, Q2
//                      and target critics Q1', Q2' (24 -> 1); all 10 x 30 ReLU
//   gaussian_noise x 2 exploration noise (inference) and target-policy
//                      smoothing noise (learning)
//   experience_buffer  trajectories (s, a, r, s'), read out in random batches
//   td3_learner        one learning step: batch, target actor, clipped noisy
//                      target action, four critics, learning targets, and every
//                      D = 2 steps the soft update of the three target networks
//   learning_target    y = r + gamma * min(Q1', Q2'), critic errors, MSBE loss
//   soft_update x 3    theta' <- omega * theta + (1 - omega) * theta'
//   fir_filter         11-tap complex FIR on the IQ stream
// The gradient computation (critic SGD on the MSBE loss, deterministic policy
// gradient for the actor) is not in this design: an external trainer reads
// the batch (batch_* port) and the learning targets (tgt_* / loss*), writes
// new main-network weights through wmem_*, and answers with learn_ack.
//
// Weight port: wmem_sel selects the memory (0 actor, 1 critic 1, 2 critic 2,
// 3 target actor, 4 target critic 1, 5 target critic 2); the address is the
// word index in the layout of fc_network. The target memories are also
// written by the soft updates; the trainer must not write them while
// learn_busy is high.
//
// Timing: fb_valid is accepted when fb_ready is high and dropped otherwise
// (n_fb_dropped counts those). The FIR runs continuously at one sample per
// clock with one clock of latency; new taps take effect all at once, in the
// clock after taps_updated rises. learn_req is taken when learn_busy is low
// and batch_avail is high; learn_done pulses at the end of the step. Inference
// and learning share no network, so they may overlap. All parameters default
// to the published configuration.
module chares_top
  import chares_pkg::*;
#(
  parameter int unsigned M         = NUM_TAPS,
  parameter int unsigned HID       = HIDDEN,
  parameter int unsigned N_HID     = HID_LAYERS,
  parameter int unsigned DEPTH     = BUF_DEPTH,
  parameter int unsigned B         = BATCH,
  localparam int unsigned ADIM     = 2 * M,
  localparam int unsigned NUM_W    = mlp_words(STATE_DIM, HID, N_HID, ADIM),
  localparam int unsigned CIN      = STATE_DIM + ADIM,
  localparam int unsigned NUM_WC   = mlp_words(CIN, HID, N_HID, 1),
  localparam int unsigned WAW      = $clog2((NUM_WC > NUM_W) ? NUM_WC : NUM_W),
  localparam int unsigned AAW      = $clog2(NUM_W),
  localparam int unsigned CAW      = $clog2(NUM_WC),
  localparam int unsigned BAW      = $clog2(DEPTH),
  localparam int unsigned BCW      = $clog2(DEPTH + 1)
) (
  input  logic            clk,
  input  logic            rst_n,
  // configuration
  input  logic            train,
  input  fx_t             alpha,
  input  fx_t             sigma,
  input  fx_t             sigma_t,
  input  fx_t             gamma,
  input  fx_t             omega,
  // weight load port (from the trainer)
  input  logic            wmem_wr_en,
  input  logic [2:0]      wmem_sel,
  input  logic [WAW-1:0]  wmem_wr_addr,
  input  fx_t             wmem_wr_data,
  // receiver feedback
  input  logic            fb_valid,
  input  feedback_t       fb,
  output logic            fb_ready,
  // IQ stream through the synthesis filter
  input  logic            tx_in_valid,
  input  iq_t             tx_in,
  output logic            tx_out_valid,
  output iq_t             tx_out,
  // learning steps
  input  logic            learn_req,
  input  logic            learn_ack,
  output logic            learn_busy,
  output logic            learn_done,
  output logic            actor_due,
  output logic            tgt_valid,
  output fx_t             tgt_y,
  output fx_t             tgt_err1,
  output fx_t             tgt_err2,
  output logic            loss_valid,
  output fx_t             loss1,
  output fx_t             loss2,
  output logic [31:0]     n_learn_steps,
  output logic [31:0]     n_soft_updates,
  output logic [31:0]     n_tgt_clipped,
  // experience batches (seen by the trainer as the learner reads them)
  output logic            batch_avail,
  output logic            batch_valid,
  output logic            batch_last,
  output logic [BAW-1:0]  batch_index,
  output trajectory_t     batch_data,
  output logic [BCW-1:0]  buf_count,
  // status
  output fx_t             taps_re [M],
  output fx_t             taps_im [M],
  output logic            taps_updated,
  output logic [31:0]     n_new,
  output logic [31:0]     n_kept,
  output logic [31:0]     n_stored,
  output logic [31:0]     n_clipped,
  output logic [31:0]     n_fb_dropped
);

  // ---------------- feedback -> reward ----------------
  logic    fb_accept;
  logic    r_valid, success;
  reward_t reward;
  state_t  s_next;

  assign fb_accept = fb_valid && fb_ready;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)                     n_fb_dropped <= '0;
    else if (fb_valid && !fb_ready) n_fb_dropped <= n_fb_dropped + 1;
  end

  reward_unit u_reward (
    .clk, .rst_n,
    .fb_valid (fb_accept),
    .fb       (fb),
    .r_valid  (r_valid),
    .reward   (reward),
    .s_next   (s_next),
    .success  (success)
  );

  // ---------------- weight port decode ----------------
  logic wr_sel [6];
  always_comb for (int n = 0; n < 6; n++) wr_sel[n] = wmem_wr_en && (wmem_sel == 3'(n));

  // soft-update traffic (index 0 actor, 1 critic 1, 2 critic 2)
  logic           su_start, su_busy [3], su_done [3];
  logic [AAW-1:0] sua_main_addr, sua_tgt_addr, sua_wr_addr;
  logic [CAW-1:0] suc_main_addr [2], suc_tgt_addr [2], suc_wr_addr [2];
  fx_t            su_main_data [3], su_tgt_data [3], su_wr_data [3];
  logic           su_wr_en [3];

  // ---------------- actor and target actor ----------------
  logic actor_start, actor_busy, actor_done;
  fx_t  actor_state  [STATE_DIM];
  fx_t  actor_action [ADIM];

  fc_network #(
    .IN_DIM (STATE_DIM),
    .HID    (HID),
    .N_HID  (N_HID),
    .OUT_DIM(ADIM)
  ) u_actor (
    .clk, .rst_n,
    .wr_en    (wr_sel[0]),
    .wr_addr  (wmem_wr_addr[AAW-1:0]),
    .wr_data  (wmem_wr_data),
    .rd_addr  (sua_main_addr),
    .rd_data  (su_main_data[0]),
    .start    (actor_start),
    .state_in (actor_state),
    .busy     (actor_busy),
    .done     (actor_done),
    .action   (actor_action)
  );

  logic ta_start, ta_busy, ta_done;
  fx_t  ta_state  [STATE_DIM];
  fx_t  ta_action [ADIM];

  fc_network #(
    .IN_DIM (STATE_DIM),
    .HID    (HID),
    .N_HID  (N_HID),
    .OUT_DIM(ADIM)
  ) u_tgt_actor (
    .clk, .rst_n,
    .wr_en    (su_busy[0] ? su_wr_en[0] : wr_sel[3]),
    .wr_addr  (su_busy[0] ? sua_wr_addr : wmem_wr_addr[AAW-1:0]),
    .wr_data  (su_busy[0] ? su_wr_data[0] : wmem_wr_data),
    .rd_addr  (sua_tgt_addr),
    .rd_data  (su_tgt_data[0]),
    .start    (ta_start),
    .state_in (ta_state),
    .busy     (ta_busy),
    .done     (ta_done),
    .action   (ta_action)
  );

  soft_update #(.NUM_W(NUM_W)) u_su_actor (
    .clk, .rst_n,
    .start        (su_start),
    .omega        (omega),
    .busy         (su_busy[0]),
    .done         (su_done[0]),
    .main_rd_addr (sua_main_addr),
    .main_rd_data (su_main_data[0]),
    .tgt_rd_addr  (sua_tgt_addr),
    .tgt_rd_data  (su_tgt_data[0]),
    .tgt_wr_en    (su_wr_en[0]),
    .tgt_wr_addr  (sua_wr_addr),
    .tgt_wr_data  (su_wr_data[0])
  );

  // ---------------- critics and target critics ----------------
  // index 0/1: main critics 1/2, index 2/3: target critics 1/2
  logic c_start [4], c_busy [4], c_done [4];
  fx_t  c_in    [4][CIN];
  fx_t  c_out   [4][1];
  fx_t  c_q     [4];

  for (genvar c = 0; c < 2; c++) begin : g_critic
    fc_network #(
      .IN_DIM (CIN),
      .HID    (HID),
      .N_HID  (N_HID),
      .OUT_DIM(1)
    ) u_critic (
      .clk, .rst_n,
      .wr_en    (wr_sel[1 + c]),
      .wr_addr  (wmem_wr_addr[CAW-1:0]),
      .wr_data  (wmem_wr_data),
      .rd_addr  (suc_main_addr[c]),
      .rd_data  (su_main_data[1 + c]),
      .start    (c_start[c]),
      .state_in (c_in[c]),
      .busy     (c_busy[c]),
      .done     (c_done[c]),
      .action   (c_out[c])
    );

    fc_network #(
      .IN_DIM (CIN),
      .HID    (HID),
      .N_HID  (N_HID),
      .OUT_DIM(1)
    ) u_tgt_critic (
      .clk, .rst_n,
      .wr_en    (su_busy[1 + c] ? su_wr_en[1 + c] : wr_sel[4 + c]),
      .wr_addr  (su_busy[1 + c] ? suc_wr_addr[c] : wmem_wr_addr[CAW-1:0]),
      .wr_data  (su_busy[1 + c] ? su_wr_data[1 + c] : wmem_wr_data),
      .rd_addr  (suc_tgt_addr[c]),
      .rd_data  (su_tgt_data[1 + c]),
      .start    (c_start[2 + c]),
      .state_in (c_in[2 + c]),
      .busy     (c_busy[2 + c]),
      .done     (c_done[2 + c]),
      .action   (c_out[2 + c])
    );

    soft_update #(.NUM_W(NUM_WC)) u_su_critic (
      .clk, .rst_n,
      .start        (su_start),
      .omega        (omega),
      .busy         (su_busy[1 + c]),
      .done         (su_done[1 + c]),
      .main_rd_addr (suc_main_addr[c]),
      .main_rd_data (su_main_data[1 + c]),
      .tgt_rd_addr  (suc_tgt_addr[c]),
      .tgt_rd_data  (su_tgt_data[1 + c]),
      .tgt_wr_en    (su_wr_en[1 + c]),
      .tgt_wr_addr  (suc_wr_addr[c]),
      .tgt_wr_data  (su_wr_data[1 + c])
    );
  end

  always_comb for (int c = 0; c < 4; c++) c_q[c] = c_out[c][0];

  // ---------------- noise ----------------
  logic noise_en, noise_valid;
  fx_t  noise;

  gaussian_noise u_noise (
    .clk, .rst_n,
    .en    (noise_en),
    .sigma (sigma),
    .valid (noise_valid),
    .noise (noise)
  );

  // ---------------- controller ----------------
  logic        buf_wr_valid;
  trajectory_t buf_wr_data;

  chares_controller #(.M(M)) u_ctrl (
    .clk, .rst_n,
    .train        (train),
    .alpha        (alpha),
    .r_valid      (r_valid),
    .reward       (reward),
    .s_next       (s_next),
    .success      (success),
    .ready        (fb_ready),
    .actor_start  (actor_start),
    .actor_state  (actor_state),
    .actor_done   (actor_done),
    .actor_action (actor_action),
    .noise_en     (noise_en),
    .noise        (noise),
    .buf_wr_valid (buf_wr_valid),
    .buf_wr_data  (buf_wr_data),
    .taps_re      (taps_re),
    .taps_im      (taps_im),
    .taps_updated (taps_updated),
    .n_new        (n_new),
    .n_kept       (n_kept),
    .n_stored     (n_stored),
    .n_clipped    (n_clipped)
  );

  // ---------------- experience buffer ----------------
  logic batch_req;

  experience_buffer #(.DEPTH(DEPTH), .B(B)) u_buf (
    .clk, .rst_n,
    .wr_valid    (buf_wr_valid),
    .wr_data     (buf_wr_data),
    .count       (buf_count),
    .batch_avail (batch_avail),
    .batch_req   (batch_req),
    .rd_valid    (batch_valid),
    .rd_last     (batch_last),
    .rd_index    (batch_index),
    .rd_data     (batch_data)
  );

  // ---------------- learning ----------------
  logic tn_en, tn_valid;
  fx_t  tnoise;

  gaussian_noise #(.SEED(64'hD1B5_4A32_D192_ED03)) u_tnoise (
    .clk, .rst_n,
    .en    (tn_en),
    .sigma (sigma_t),
    .valid (tn_valid),
    .noise (tnoise)
  );

  logic    lt_valid, lt_first, lt_last;
  reward_t lt_reward;
  fx_t     lt_q [4];

  td3_learner #(.M(M), .B(B), .D(2)) u_learner (
    .clk, .rst_n,
    .alpha          (alpha),
    .learn_req      (learn_req),
    .learn_ack      (learn_ack),
    .busy           (learn_busy),
    .actor_due      (actor_due),
    .learn_done     (learn_done),
    .n_steps        (n_learn_steps),
    .n_soft_updates (n_soft_updates),
    .n_tgt_clipped  (n_tgt_clipped),
    .batch_avail    (batch_avail),
    .batch_req      (batch_req),
    .rd_valid       (batch_valid),
    .rd_last        (batch_last),
    .rd_data        (batch_data),
    .ta_start       (ta_start),
    .ta_state       (ta_state),
    .ta_done        (ta_done),
    .ta_action      (ta_action),
    .noise_en       (tn_en),
    .noise          (tnoise),
    .c_start        (c_start),
    .c_in           (c_in),
    .c_done         (c_done),
    .c_q            (c_q),
    .lt_valid       (lt_valid),
    .lt_first       (lt_first),
    .lt_last        (lt_last),
    .lt_reward      (lt_reward),
    .lt_q           (lt_q),
    .su_start       (su_start),
    .su_done        (su_done)
  );

  learning_target #(.B(B)) u_target (
    .clk, .rst_n,
    .gamma      (gamma),
    .in_valid   (lt_valid),
    .in_first   (lt_first),
    .in_last    (lt_last),
    .reward     (lt_reward),
    .q_t1       (lt_q[2]),
    .q_t2       (lt_q[3]),
    .q_m1       (lt_q[0]),
    .q_m2       (lt_q[1]),
    .out_valid  (tgt_valid),
    .y          (tgt_y),
    .err1       (tgt_err1),
    .err2       (tgt_err2),
    .loss_valid (loss_valid),
    .loss1      (loss1),
    .loss2      (loss2)
  );

  // ---------------- FIR ----------------
  fir_filter #(.M(M)) u_fir (
    .clk, .rst_n,
    .in_valid   (tx_in_valid),
    .in_sample  (tx_in),
    .taps_re    (taps_re),
    .taps_im    (taps_im),
    .out_valid  (tx_out_valid),
    .out_sample (tx_out)
  );

  // Rules of the handshakes
  property p_no_start_while_busy;
    @(posedge clk) disable iff (!rst_n) actor_start |-> !actor_busy;
  endproperty
  a_no_start_while_busy: assert property (p_no_start_while_busy);

  property p_batch_only_when_full;
    @(posedge clk) disable iff (!rst_n) batch_valid |-> (buf_count >= BCW'(B));
  endproperty
  property p_noise_follows_request;
    @(posedge clk) disable iff (!rst_n) noise_en |=> noise_valid;
  endproperty
  a_noise_follows_request: assert property (p_noise_follows_request);

  property p_tnoise_follows_request;
    @(posedge clk) disable iff (!rst_n) tn_en |=> tn_valid;
  endproperty
  a_tnoise_follows_request: assert property (p_tnoise_follows_request);

  a_batch_only_when_full: assert property (p_batch_only_when_full);

  property p_no_critic_start_while_busy;
    @(posedge clk) disable iff (!rst_n)
      (c_start[0] |-> !c_busy[0]) and (c_start[2] |-> !c_busy[2]) and (ta_start |-> !ta_busy);
  endproperty
  a_no_critic_start_while_busy: assert property (p_no_critic_start_while_busy);

  property p_no_tgt_write_during_soft_update;
    @(posedge clk) disable iff (!rst_n) su_busy[0] |-> !wr_sel[3];
  endproperty
  a_no_tgt_write_during_soft_update: assert property (p_no_tgt_write_during_soft_update);

endmodule
