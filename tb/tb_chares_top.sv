// tb_chares_top: end-to-end test of the waveform-synthesis agent at its
// default (published) sizes: 11 taps, 10 x 30 actor and critics, 10000-entry
// buffer, batches of 64, target update every 2 learning steps.
//
// The testbench acts as the trainer (loads the weights of all six networks,
// starts learning steps, changes the main networks' weights in place of a
// gradient step and acknowledges), as the receiver (sends feedback) and as the
// baseband source (streams IQ samples through the FIR the whole time). It
// holds its own model of the agent: the fully connected networks in 64-bit
// integers, both xorshift/Irwin-Hall noise sequences, the tap clipping, the
// reward rules, the trajectory list, the learning targets and losses and the
// soft update, and checks against it:
//  - the taps after every step (new taps in training with noise, in testing
//    without noise, kept taps after a correct label);
//  - every trajectory returned in a batch, by slot, including after the buffer
//    has wrapped past 10000 entries;
//  - every FIR output sample against sum h[m] x[n-m] with the taps in force;
//  - the latency from feedback to new taps;
//  - for every batch entry of a learning step the target y and both critic
//    errors, the two batch losses, the clocks between entries and the clocks
//    from learn_ack to learn_done with and without a soft update;
//  - the target networks after a soft update (through the next step's
//    targets), and the step, soft-update and target-clip counters.
// Mechanisms counted (each must occur): new-tap step in training, new-tap
// step in testing, kept step, clipped tap component, feedback dropped while
// busy, each of the four reward values, batch extraction, buffer wrap,
// learning step, soft target update, clipped target-action element, step
// with the actor update due.
module tb_chares_top;
  import chares_pkg::*;

  localparam int M = NUM_TAPS, ADIM = ACTION_DIM, H = HIDDEN, NH = HID_LAYERS;
  localparam int NUM_W = mlp_words(STATE_DIM, H, NH, ADIM);
  localparam int CIN = STATE_DIM + ADIM;
  localparam int NUM_WC = mlp_words(CIN, H, NH, 1);
  localparam int WAW = $clog2(NUM_WC);
  // clocks between learning-target outputs: target actor (NUM_W + 1), target
  // action walk (ADIM), target critics (NUM_WC + 1) and 5 clocks of sequencing
  localparam int ENTRY_LAT = NUM_W + NUM_WC + ADIM + 7;
  // learn_ack to learn_done: with a soft update (the critic memories are the
  // longer walk, NUM_WC + 2 clocks from start to done, plus 3 of
  // sequencing), and without
  localparam int SOFT_LAT = NUM_WC + 5, PLAIN_LAT = 2;
  localparam int DEPTH = BUF_DEPTH, BAW = $clog2(DEPTH), BCW = $clog2(DEPTH + 1);
  // taps_updated is high in the clock NUM_W + ADIM + 4 clocks after the clock
  // in which the feedback is accepted: reward (1) + actor start (1) + actor
  // (NUM_W) + done seen (1) + clip walk (ADIM) + commit (1). The counter below
  // starts at 1 in the accepting clock, hence the + 5.
  localparam int STEP_LAT = NUM_W + ADIM + 5;

  logic clk = 0, rst_n = 0;
  logic train = 1;
  fx_t  alpha = fx_t'(410), sigma = fx_t'(1024), sigma_t = fx_t'(819);
  fx_t  gamma = fx_t'(4055), omega = fx_t'(205);
  logic wmem_wr_en = 0;
  logic [2:0] wmem_sel = '0;
  logic [WAW-1:0] wmem_wr_addr = '0;
  fx_t  wmem_wr_data = '0;
  logic fb_valid = 0;
  feedback_t fb = '0;
  logic fb_ready;
  logic tx_in_valid = 0;
  iq_t  tx_in = '0;
  logic tx_out_valid;
  iq_t  tx_out;
  logic learn_req = 0, learn_ack = 0, learn_busy, learn_done, actor_due;
  logic tgt_valid, loss_valid;
  fx_t  tgt_y, tgt_err1, tgt_err2, loss1, loss2;
  logic [31:0] n_learn_steps, n_soft_updates, n_tgt_clipped;
  logic batch_avail, batch_valid, batch_last;
  logic [BAW-1:0] batch_index;
  trajectory_t batch_data;
  logic [BCW-1:0] buf_count;
  fx_t  taps_re [M], taps_im [M];
  logic taps_updated;
  logic [31:0] n_new, n_kept, n_stored, n_clipped, n_fb_dropped;

  int checks = 0, failures = 0;
  int c_new_train = 0, c_new_test = 0, c_kept = 0, c_clip = 0, c_drop = 0;
  int c_rw [4], c_batch = 0, c_wrap = 0;
  int c_learn = 0, c_soft = 0, c_tclip = 0, c_due = 0;

  chares_top dut (.*);
  always #5 clk = ~clk;

  initial begin
    #2000000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ---------------- reference models ----------------
  // weights: 0 actor, 1 critic 1, 2 critic 2, 3 target actor,
  // 4 target critic 1, 5 target critic 2 (the wmem_sel numbering)
  fx_t wn [6][NUM_WC];

  function automatic longint sat(longint v);
    if (v > 32767) return 32767;
    if (v < -32768) return -32768;
    return v;
  endfunction

  // network net on inputs fin[0 .. in_dim-1]; outputs in fout
  longint fin [64], fout [64];
  task automatic ref_fc(int net, int in_dim, int out_dim);
    longint a [64], b [64];
    longint acc;
    int base, n_in, n_out;
    base = 0;
    for (int i = 0; i < in_dim; i++) a[i] = fin[i];
    for (int l = 0; l <= NH; l++) begin
      n_in  = (l == 0) ? in_dim : H;
      n_out = (l == NH) ? out_dim : H;
      for (int n = 0; n < n_out; n++) begin
        acc = longint'(wn[net][base]) <<< 12;
        for (int i = 0; i < n_in; i++) acc += longint'(wn[net][base + 1 + i]) * a[i];
        b[n] = sat(acc >>> 12);
        if (l != NH && b[n] < 0) b[n] = 0;
        base += n_in + 1;
      end
      for (int n = 0; n < n_out; n++) a[n] = b[n];
    end
    for (int n = 0; n < out_dim; n++) fout[n] = a[n];
  endtask

  longint ref_act [ADIM];
  task automatic ref_actor(input state_t s);
    for (int i = 0; i < STATE_DIM; i++) fin[i] = s[i];
    ref_fc(0, STATE_DIM, ADIM);
    for (int n = 0; n < ADIM; n++) ref_act[n] = fout[n];
  endtask

  longint unsigned nst = 64'h9E37_79B9_7F4A_7C15;
  longint nreg = 0;    // value held in the generator's output register
  function automatic longint noise_next(longint sig);
    longint u, z;
    nst = nst ^ (nst << 13);
    nst = nst ^ (nst >> 7);
    nst = nst ^ (nst << 17);
    u = longint'(nst[15:0]) + longint'(nst[31:16]) + longint'(nst[47:32]) + longint'(nst[63:48]);
    z = sat(((u - 131070) * 7094) >>> 16);
    return sat((z * sig) >>> 12);
  endfunction

  // target-policy smoothing noise (second generator, its own seed)
  longint unsigned tst = 64'hD1B5_4A32_D192_ED03;
  longint tnreg = 0;
  function automatic longint tnoise_next(longint sig);
    longint u, z;
    tst = tst ^ (tst << 13);
    tst = tst ^ (tst >> 7);
    tst = tst ^ (tst << 17);
    u = longint'(tst[15:0]) + longint'(tst[31:16]) + longint'(tst[47:32]) + longint'(tst[63:48]);
    z = sat(((u - 131070) * 7094) >>> 16);
    return sat((z * sig) >>> 12);
  endfunction

  fx_t    cur_a [ADIM];       // committed taps, action order
  state_t prev_s;
  bit     have_prev = 0;
  int     prev_softmax = 0;
  trajectory_t traj [$];      // every trajectory written, in order

  // ---------------- IQ stream and FIR monitor ----------------
  bit stream_on = 0;
  longint hist_re [M], hist_im [M];
  longint exp_re, exp_im;
  bit exp_valid = 0;
  int fir_checked = 0;
  always @(negedge clk) begin
    tx_in_valid <= stream_on && ($urandom_range(3) != 0);
    tx_in.re <= sample_t'($urandom);
    tx_in.im <= sample_t'($urandom);
  end
  always @(posedge clk) begin
    if (rst_n) begin
      if (tx_out_valid != exp_valid) begin
        checks++; failures++; $display("tx_out_valid wrong");
      end else if (exp_valid) begin
        checks++; fir_checked++;
        if (longint'(tx_out.re) != exp_re || longint'(tx_out.im) != exp_im) begin
          failures++;
          if (failures < 10) $display("FIR: got %0d %0d exp %0d %0d", tx_out.re, tx_out.im, exp_re, exp_im);
        end
      end
      exp_valid = tx_in_valid;
      if (tx_in_valid) begin
        longint ar, ai;
        ar = 0; ai = 0;
        for (int m = M-1; m > 0; m--) begin hist_re[m] = hist_re[m-1]; hist_im[m] = hist_im[m-1]; end
        hist_re[0] = tx_in.re; hist_im[0] = tx_in.im;
        for (int m = 0; m < M; m++) begin
          ar += longint'(taps_re[m]) * hist_re[m] - longint'(taps_im[m]) * hist_im[m];
          ai += longint'(taps_re[m]) * hist_im[m] + longint'(taps_im[m]) * hist_re[m];
        end
        exp_re = sat(ar >>> 12); exp_im = sat(ai >>> 12);
      end
    end
  end

  // ---------------- one feedback ----------------
  // kind: 0 label ok, 1 wrong + softmax up, 2 wrong + softmax down,
  //       3 wrong + same softmax, 4 wrong + decoding failure
  task automatic feedback(int kind, bit try_drop = 0);
    int sm, e_r, lat;
    bit newtaps;
    state_t sn;
    case (kind)
      1: sm = (prev_softmax < 4000) ? prev_softmax + 1 + int'($urandom_range(90)) : prev_softmax;
      2: sm = (prev_softmax > 100) ? prev_softmax - 1 - int'($urandom_range(90)) : prev_softmax;
      3: sm = prev_softmax;
      default: sm = int'($urandom_range(4096));
    endcase
    if (kind == 0) e_r = 2;
    else if (kind == 4) e_r = -1;
    else if (sm > prev_softmax) e_r = 1;
    else if (sm < prev_softmax) e_r = -1;
    else e_r = 0;
    case (e_r) 2: c_rw[0]++; 1: c_rw[1]++; -1: c_rw[2]++; default: c_rw[3]++; endcase
    prev_softmax = sm;
    sn[0] = fx_t'(sm); sn[1] = (kind == 0) ? FX_ONE : fx_t'(0);

    while (!fb_ready) @(negedge clk);
    fb_valid = 1;
    fb.label_ok = (kind == 0); fb.decode_fail = (kind == 4); fb.softmax = fx_t'(sm);
    @(negedge clk);
    fb_valid = 0;

    if (train && have_prev) begin
      trajectory_t t;
      t.s = prev_s; t.r = reward_t'(e_r); t.s_next = sn;
      for (int i = 0; i < ADIM; i++) t.a[i] = cur_a[i];
      traj.push_back(t);
    end
    newtaps = (kind != 0) || !have_prev;
    have_prev = 1;
    prev_s = sn;

    if (newtaps) begin
      ref_actor(sn);
      for (int i = 0; i < ADIM; i++) begin
        longint v = ref_act[i], h0 = (i == 0) ? 4096 : 0;
        if (train) begin v += nreg; nreg = noise_next(longint'(sigma)); end
        if (v < h0 - alpha) begin v = h0 - alpha; c_clip++; end
        else if (v > h0 + alpha) begin v = h0 + alpha; c_clip++; end
        cur_a[i] = fx_t'(v);
      end
      if (train) c_new_train++; else c_new_test++;
      lat = 1;
      while (!taps_updated && lat < 20000) begin
        @(negedge clk); lat++;
        if (try_drop && lat == 100) begin
          // the receiver sends again while the agent is busy: dropped
          fb_valid = 1; fb.label_ok = 1; fb.softmax = fx_t'(4000);
          @(negedge clk); fb_valid = 0; lat++;
          c_drop++;
        end
      end
      checks++;
      if (lat != STEP_LAT) begin failures++; $display("step latency %0d, expected %0d", lat, STEP_LAT); end
      @(negedge clk);
      for (int m = 0; m < M; m++) begin
        checks++;
        if (taps_re[m] != cur_a[2*m] || taps_im[m] != cur_a[2*m+1]) begin
          failures++;
          if (failures < 10) $display("tap %0d: got %0d %0d exp %0d %0d", m, taps_re[m], taps_im[m], cur_a[2*m], cur_a[2*m+1]);
        end
      end
    end else begin
      c_kept++;
      @(negedge clk);
      checks++;
      if (taps_updated) begin failures++; $display("taps changed after a correct label"); end
    end
  endtask

  task automatic wload(int net, int addr, fx_t v);
    @(negedge clk);
    wmem_wr_en = 1; wmem_sel = 3'(net); wmem_wr_addr = WAW'(addr); wmem_wr_data = v;
    wn[net][addr] = v;
  endtask

  // One learning step: batch, targets and losses, trainer update, soft update.
  int n_steps_done = 0;
  task automatic learn();
    int got, n, slot, k, j, lat, net;
    bit do_soft;
    trajectory_t bt [BATCH];
    longint ey [BATCH], ee1 [BATCH], ee2 [BATCH], acc1, acc2, q [4], qmin, sq, v, h0;
    n = traj.size();
    got = 0;
    @(negedge clk); learn_req = 1;
    @(negedge clk); learn_req = 0;
    while (!batch_valid) @(negedge clk);
    while (batch_valid) begin
      slot = int'(batch_index);
      // newest trajectory stored in this slot
      k = ((n - 1 - slot) / DEPTH) * DEPTH + slot;
      checks++;
      if (slot >= ((n < DEPTH) ? n : DEPTH) || batch_data != traj[k]) begin
        failures++;
        if (failures < 10) $display("batch entry from slot %0d (trajectory %0d) wrong", slot, k);
      end
      if (got < BATCH) bt[got] = batch_data;
      got++;
      @(negedge clk);
    end
    checks++;
    if (got != BATCH) begin failures++; $display("batch of %0d", got); end
    c_batch++;

    // reference targets, entry by entry in batch order
    acc1 = 0; acc2 = 0;
    for (int e = 0; e < BATCH; e++) begin
      for (int i = 0; i < STATE_DIM; i++) fin[i] = bt[e].s_next[i];
      ref_fc(3, STATE_DIM, ADIM);
      for (int i = 0; i < ADIM; i++) begin
        h0 = (i == 0) ? 4096 : 0;
        v = fout[i] + tnreg;
        tnreg = tnoise_next(longint'(sigma_t));
        if (v < h0 - alpha) begin v = h0 - alpha; c_tclip++; end
        else if (v > h0 + alpha) begin v = h0 + alpha; c_tclip++; end
        fin[STATE_DIM + i] = v;
      end
      ref_fc(4, CIN, 1); q[2] = fout[0];
      ref_fc(5, CIN, 1); q[3] = fout[0];
      for (int i = 0; i < STATE_DIM; i++) fin[i] = bt[e].s[i];
      for (int i = 0; i < ADIM; i++) fin[STATE_DIM + i] = bt[e].a[i];
      ref_fc(1, CIN, 1); q[0] = fout[0];
      ref_fc(2, CIN, 1); q[1] = fout[0];
      qmin = (q[2] < q[3]) ? q[2] : q[3];
      ey[e]  = sat((longint'(bt[e].r) <<< 12) + ((longint'(gamma) * qmin) >>> 12));
      ee1[e] = sat(q[0] - ey[e]);
      ee2[e] = sat(q[1] - ey[e]);
      acc1 += (ee1[e] * ee1[e]) >>> 12;
      acc2 += (ee2[e] * ee2[e]) >>> 12;
    end

    // compare the learning-target outputs
    j = 0; lat = 0;
    while (j < BATCH && lat < 3 * ENTRY_LAT) begin
      @(negedge clk); lat++;
      if (tgt_valid) begin
        checks += 2;
        if (longint'(tgt_y) != ey[j] || longint'(tgt_err1) != ee1[j] || longint'(tgt_err2) != ee2[j]) begin
          failures++;
          if (failures < 10) $display("entry %0d: y %0d e %0d %0d, expected %0d %0d %0d", j, tgt_y, tgt_err1, tgt_err2, ey[j], ee1[j], ee2[j]);
        end
        if (j > 0 && lat != ENTRY_LAT) begin
          failures++; $display("entry %0d after %0d clocks, expected %0d", j, lat, ENTRY_LAT);
        end
        if (actor_due != ((n_steps_done % 2) == 1)) begin failures++; $display("actor_due wrong"); end
        if (j == BATCH - 1) begin
          checks++;
          if (!loss_valid || longint'(loss1) != sat(acc1 / BATCH) || longint'(loss2) != sat(acc2 / BATCH)) begin
            failures++;
            $display("loss %0d %0d (valid %0d), expected %0d %0d", loss1, loss2, loss_valid, sat(acc1 / BATCH), sat(acc2 / BATCH));
          end
        end
        j++; lat = 0;
      end
    end
    checks++;
    if (j != BATCH) begin failures++; $display("only %0d learning targets", j); end
    if (actor_due) c_due++;

    // the trainer's gradient step, stood in for by new values in the main
    // networks (actor only on steps with the actor update due)
    for (int i = 0; i < 300; i++) begin
      net = int'($urandom_range(2));
      if (net == 0 && !actor_due) net = 1;
      if (net == 0) wload(0, int'($urandom_range(NUM_W - 1)), fx_t'(int'($urandom_range(3000)) - 1500));
      else          wload(net, int'($urandom_range(NUM_WC - 1)), fx_t'(int'($urandom_range(800)) - 400));
    end
    @(negedge clk); wmem_wr_en = 0;
    do_soft = (n_steps_done % 2) == 1;
    learn_ack = 1;
    @(negedge clk); learn_ack = 0;
    lat = 1;
    while (!learn_done && lat < 2 * SOFT_LAT) begin @(negedge clk); lat++; end
    checks++;
    if (lat != (do_soft ? SOFT_LAT : PLAIN_LAT)) begin
      failures++; $display("learn_ack to learn_done %0d clocks, expected %0d", lat, do_soft ? SOFT_LAT : PLAIN_LAT);
    end
    if (do_soft) begin
      // reference soft update of the three target networks
      for (int t = 0; t < 3; t++)
        for (int i = 0; i < ((t == 0) ? NUM_W : NUM_WC); i++)
          wn[3 + t][i] = fx_t'(sat((longint'(omega) * wn[t][i] + (4096 - longint'(omega)) * wn[3 + t][i]) >>> 12));
      c_soft++;
    end
    n_steps_done++;
    c_learn++;
    checks++;
    if (int'(n_learn_steps) != n_steps_done || int'(n_soft_updates) != c_soft || int'(n_tgt_clipped) != c_tclip) begin
      failures++;
      $display("learner counters: steps %0d soft %0d clipped %0d", n_learn_steps, n_soft_updates, n_tgt_clipped);
    end
  endtask

  initial begin
    for (int i = 0; i < ADIM; i++) cur_a[i] = (i == 0) ? FX_ONE : fx_t'(0);
    for (int m = 0; m < M; m++) begin hist_re[m] = 0; hist_im[m] = 0; end
    repeat (3) @(posedge clk);
    rst_n = 1;
    stream_on = 1;
    // trainer loads the main networks and copies them into the targets
    for (int i = 0; i < NUM_W; i++) wload(0, i, fx_t'(int'($urandom_range(3000)) - 1500));
    for (int c = 1; c <= 2; c++)
      for (int i = 0; i < NUM_WC; i++) wload(c, i, fx_t'(int'($urandom_range(800)) - 400));
    for (int t = 0; t < 3; t++)
      for (int i = 0; i < ((t == 0) ? NUM_W : NUM_WC); i++) wload(3 + t, i, wn[t][i]);
    @(negedge clk); wmem_wr_en = 0;

    // training: wrong labels of every kind -> new taps with noise
    train = 1;
    feedback(4);
    feedback(1, 1);
    feedback(2);
    feedback(3);
    feedback(1);
    feedback(4);
    // training: correct labels keep the taps; fill the buffer past B
    for (int i = 0; i < 70; i++) feedback(0);
    feedback(2);
    checks++;
    if (!batch_avail) begin failures++; $display("batch not available"); end
    learn();
    // testing: no noise, nothing stored
    train = 0;
    feedback(1);
    feedback(0);
    feedback(3);
    feedback(2);
    checks++;
    if (int'(buf_count) != traj.size()) begin failures++; $display("stored during testing"); end
    // training again until the buffer wraps
    train = 1;
    feedback(1);
    while (traj.size() < DEPTH + 50) feedback(0);
    feedback(2);
    checks++;
    if (int'(buf_count) != DEPTH) begin failures++; $display("count %0d after wrap", buf_count); end
    else c_wrap++;
    learn();
    learn();
    repeat (5) @(negedge clk);

    // counters and mechanism coverage
    checks++;
    if (int'(n_fb_dropped) != c_drop || int'(n_clipped) != c_clip || int'(n_new) != c_new_train + c_new_test ||
        int'(n_kept) != c_kept || int'(n_stored) != traj.size()) begin
      failures++;
      $display("counters: dropped %0d clipped %0d new %0d kept %0d stored %0d", n_fb_dropped, n_clipped, n_new, n_kept, n_stored);
    end
    $display("mechanisms: new(train) %0d new(test) %0d kept %0d clipped %0d dropped %0d", c_new_train, c_new_test, c_kept, c_clip, c_drop);
    $display("rewards: +2 %0d, +1 %0d, -1 %0d, 0 %0d; batches %0d; wraps %0d; FIR samples %0d",
             c_rw[0], c_rw[1], c_rw[2], c_rw[3], c_batch, c_wrap, fir_checked);
    $display("learning steps %0d, soft updates %0d, clipped target elements %0d, actor-due steps %0d",
             c_learn, c_soft, c_tclip, c_due);
    $display("step latency %0d clocks (actor %0d clocks); %0d clocks per batch entry",
             STEP_LAT, NUM_W + 1, ENTRY_LAT);
    begin
      int cov [16];
      cov = '{c_new_train, c_new_test, c_kept, c_clip, c_drop, c_rw[0], c_rw[1], c_rw[2], c_rw[3], c_batch, c_wrap,
              fir_checked, c_learn, c_soft, c_tclip, c_due};
      foreach (cov[i]) begin
        checks++;
        if (cov[i] == 0) begin failures++; $display("mechanism %0d never happened", i); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
