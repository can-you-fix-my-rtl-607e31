// tb_td3_learner: self-checking test of the learning-step sequencer, with a
// batch of 4 and the published 11 taps and D = 2.
//
// The five networks, the experience buffer, the smoothing-noise register and
// the soft updates are stood in for by small behavioural models in this
// file: a network raises done a set number of clocks after its start clock
// and returns a fixed hash of the inputs it saw at start; the buffer returns
// B random trajectories starting two clocks after batch_req; the noise
// register takes the next value of a prepared list on every noise_en clock.
// The testbench checks, entry by entry:
//  - the target actor is started on s'_j and the main critics on (s_j, a_j);
//  - the target critics are started on (s'_j, a~_j) with
//    a~_j[i] = clip(pi'(s'_j)[i] + noise, h0[i] +- alpha), only after the
//    target actor is done, using exactly 22 noise samples;
//  - the learning-target inputs carry r_j, the four critic values and the
//    first/last flags, only after all four critics are done;
//  - with fixed network latencies, the clocks between entries equal
//    latency(target actor) + latency(slower target critic) + 22 + 5
//    (with the real networks: 9143 + 9152 + 27 = 18322);
// and per step: no batch is requested while none is available, requests
// while busy are ignored, the soft update starts after learn_ack on every
// second step only, learn_done waits for all three soft updates,
// actor_due is high on every second step, and the step, soft-update and
// clip counters.
module tb_td3_learner;
  import chares_pkg::*;

  localparam int M = NUM_TAPS, ADIM = 2 * M, CIN = STATE_DIM + ADIM, B = 4, D = 2;
  localparam int STEPS = 6;

  logic clk = 0, rst_n = 0;
  fx_t  alpha = fx_t'(410);
  logic learn_req = 0, learn_ack = 0, busy, actor_due, learn_done;
  logic [31:0] n_steps, n_soft_updates, n_tgt_clipped;
  logic batch_avail = 0, batch_req, rd_valid = 0, rd_last = 0;
  trajectory_t rd_data = '0;
  logic ta_start, ta_done = 0;
  fx_t  ta_state [STATE_DIM], ta_action [ADIM];
  logic noise_en;
  fx_t  noise = '0;
  logic c_start [4], c_done [4];
  fx_t  c_in [4][CIN], c_q [4];
  logic lt_valid, lt_first, lt_last;
  reward_t lt_reward;
  fx_t  lt_q [4];
  logic su_start, su_done [3];

  int checks = 0, failures = 0;

  td3_learner #(.M(M), .B(B), .D(D)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    #20000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ---------------- stand-in models ----------------
  function automatic fx_t ta_hash(state_t s, int i);
    return fx_t'(((int'(s[0]) * 3 + int'(s[1]) * 5 + i * 97) & 16'h03FF) - 512 + ((i == 0) ? 4096 : 0));
  endfunction
  function automatic fx_t q_hash(fx_t x [CIN], int c);
    int acc;
    acc = c * 1000;
    for (int i = 0; i < CIN; i++) acc += int'(x[i]) * (i + 1 + c);
    return fx_t'(acc);
  endfunction

  int lat_ta = 40, lat_c [4] = '{30, 35, 50, 55};
  int cnt [5];
  fx_t cin_q [4][CIN];
  state_t ta_s_q;

  always @(posedge clk) begin
    if (!rst_n) begin
      ta_done <= 0;
      for (int k = 0; k < 5; k++) cnt[k] = 0;
      for (int c = 0; c < 4; c++) begin c_done[c] <= 0; c_q[c] <= '0; end
      for (int i = 0; i < ADIM; i++) ta_action[i] <= '0;
    end else begin
      ta_done <= 0;
      if (ta_start) begin
        for (int i = 0; i < STATE_DIM; i++) ta_s_q[i] = ta_state[i];
        cnt[4] = lat_ta - 1;
      end else if (cnt[4] > 0) begin
        cnt[4]--;
        if (cnt[4] == 0) begin
          ta_done <= 1;
          for (int i = 0; i < ADIM; i++) ta_action[i] <= ta_hash(ta_s_q, i);
        end
      end
      for (int c = 0; c < 4; c++) begin
        c_done[c] <= 0;
        if (c_start[c]) begin
          for (int i = 0; i < CIN; i++) cin_q[c][i] = c_in[c][i];
          cnt[c] = lat_c[c] - 1;
        end else if (cnt[c] > 0) begin
          cnt[c]--;
          if (cnt[c] == 0) begin c_done[c] <= 1; c_q[c] <= q_hash(cin_q[c], c); end
        end
      end
    end
  end

  // noise register: holds value n of the list during the n-th request
  // (counted from reset; value 0 is the reset value)
  fx_t nv [4096];
  int  n_noise = 0, step_noise_base = 0;
  always @(posedge clk) begin
    if (!rst_n) noise <= '0;
    else if (noise_en) begin n_noise++; noise <= nv[n_noise]; end
  end

  // experience buffer: first entry visible two edges after the request edge
  trajectory_t bt [B];
  int bcnt = B, bwait = 0;
  always @(posedge clk) begin
    if (!rst_n) begin rd_valid <= 0; rd_last <= 0; bcnt = B; bwait = 0; end
    else begin
      rd_valid <= 0; rd_last <= 0;
      if (batch_req) begin
        checks++;
        if (!batch_avail) begin failures++; $display("batch requested while none available"); end
        bcnt = 0; bwait = 1;
      end else if (bwait > 0) bwait--;
      else if (bcnt < B) begin
        rd_valid <= 1; rd_last <= (bcnt == B - 1); rd_data <= bt[bcnt]; bcnt++;
      end
    end
  end

  // soft updates: done after a random delay, each on its own
  int su_cnt [3];
  bit su_seen = 0;
  always @(posedge clk) begin
    if (!rst_n) begin
      for (int k = 0; k < 3; k++) begin su_done[k] <= 0; su_cnt[k] = 0; end
    end else begin
      for (int k = 0; k < 3; k++) begin
        su_done[k] <= 0;
        if (su_start) su_cnt[k] = 5 + int'($urandom_range(60));
        else if (su_cnt[k] > 0) begin
          su_cnt[k]--;
          if (su_cnt[k] == 0) su_done[k] <= 1;
        end
      end
    end
  end

  // ---------------- checker ----------------
  int jt = 0, jc = 0, jtc = 0, jl = 0;        // entries started / emitted
  int n_ta_done = 0, n_c_done = 0, noise_at_tc = 0;
  int n_clip_exp = 0, step = 0, last_lt = 0, cyc = 0, n_su = 0;
  bit fixed_lat = 1, acked = 0;

  always @(posedge clk) if (rst_n) begin
    cyc++;
    if (ta_done) n_ta_done++;
    if (ta_start) begin
      checks++;
      if (ta_state[0] != bt[jt].s_next[0] || ta_state[1] != bt[jt].s_next[1]) begin
        failures++; $display("target actor input wrong at entry %0d", jt);
      end
      jt++;
    end
    if (c_start[0] || c_start[1]) begin
      checks++;
      if (!(c_start[0] && c_start[1])) begin failures++; $display("main critics not started together"); end
      for (int c = 0; c < 2; c++) begin
        for (int i = 0; i < STATE_DIM; i++) if (c_in[c][i] != bt[jc].s[i]) failures++;
        for (int i = 0; i < ADIM; i++) if (c_in[c][STATE_DIM + i] != bt[jc].a[i]) failures++;
      end
      jc++;
    end
    if (c_start[2] || c_start[3]) begin
      bit bad;
      int h0, v;
      bad = !(c_start[2] && c_start[3]) || (n_ta_done != jtc + 1) || (n_noise - step_noise_base != (jtc + 1) * ADIM);
      for (int i = 0; i < ADIM; i++) begin
        h0 = (i == 0) ? 4096 : 0;
        v = int'(ta_hash(bt[jtc].s_next, i)) + int'(nv[step_noise_base + jtc * ADIM + i]);
        if (v < h0 - 410) begin v = h0 - 410; n_clip_exp++; end
        else if (v > h0 + 410) begin v = h0 + 410; n_clip_exp++; end
        for (int c = 2; c < 4; c++) if (int'(c_in[c][STATE_DIM + i]) != v) bad = 1;
      end
      for (int c = 2; c < 4; c++)
        for (int i = 0; i < STATE_DIM; i++) if (c_in[c][i] != bt[jtc].s_next[i]) bad = 1;
      checks++;
      if (bad) begin failures++; $display("target critics' input or order wrong at entry %0d", jtc); end
      jtc++;
    end
    if (lt_valid) begin
      checks++;
      if (lt_reward != bt[jl].r || lt_first != (jl == 0) || lt_last != (jl == B - 1) ||
          jtc != jl + 1 || jc != jl + 1 ||
          lt_q[0] != q_hash_main(jl, 0) || lt_q[1] != q_hash_main(jl, 1) ||
          lt_q[2] != cq_t[2] || lt_q[3] != cq_t[3]) begin
        failures++; $display("learning-target inputs wrong at entry %0d", jl);
      end
      if (fixed_lat && jl > 0) begin
        checks++;
        if (cyc - last_lt != lat_ta + tc_lat() + ADIM + 5) begin
          failures++; $display("entry interval %0d, expected %0d", cyc - last_lt, lat_ta + tc_lat() + ADIM + 5);
        end
      end
      last_lt = cyc;
      jl++;
    end
    if (su_start) begin
      n_su++;
      checks++;
      if (!acked || (step % D) != D - 1) begin failures++; $display("soft update at step %0d", step); end
    end
  end

  function automatic int tc_lat();
    return (lat_c[2] > lat_c[3]) ? lat_c[2] : lat_c[3];
  endfunction

  // target critics' values as the stand-ins returned them at done
  fx_t cq_t [4];
  always @(posedge clk) for (int c = 0; c < 4; c++) if (c_done[c]) cq_t[c] <= q_hash(cin_q[c], c);
  function automatic fx_t q_hash_main(int j, int c);
    fx_t x [CIN];
    for (int i = 0; i < STATE_DIM; i++) x[i] = bt[j].s[i];
    for (int i = 0; i < ADIM; i++) x[STATE_DIM + i] = bt[j].a[i];
    return q_hash(x, c);
  endfunction

  initial begin
    int lat;
    nv[0] = '0;
    for (int i = 1; i < 4096; i++) nv[i] = fx_t'(int'($urandom_range(600)) - 300);
    repeat (3) @(negedge clk);
    rst_n = 1;
    // no batch available: request ignored
    @(negedge clk); learn_req = 1;
    @(negedge clk); learn_req = 0;
    repeat (5) @(negedge clk);
    checks++;
    if (busy) begin failures++; $display("started without a batch"); end
    batch_avail = 1;
    for (step = 0; step < STEPS; step++) begin
      for (int j = 0; j < B; j++) begin
        bt[j].r = reward_t'(int'($urandom_range(3)) - 1);
        for (int i = 0; i < STATE_DIM; i++) begin bt[j].s[i] = fx_t'($urandom); bt[j].s_next[i] = fx_t'($urandom); end
        for (int i = 0; i < ADIM; i++) bt[j].a[i] = fx_t'($urandom);
      end
      fixed_lat = (step < 2);
      if (!fixed_lat) begin
        lat_ta = 3 + int'($urandom_range(40));
        for (int c = 0; c < 4; c++) lat_c[c] = 2 + int'($urandom_range(80));
      end
      jt = 0; jc = 0; jtc = 0; jl = 0; n_ta_done = 0; acked = 0;
      step_noise_base = n_noise;
      @(negedge clk); learn_req = 1;
      @(negedge clk); learn_req = 0;
      checks++;
      if (!busy) begin failures++; $display("step %0d not started", step); end
      checks++;
      if (actor_due != ((step % D) == D - 1)) begin failures++; $display("actor_due wrong at step %0d", step); end
      lat = 0;
      while (jl < B && lat < 100000) begin
        @(negedge clk); lat++;
        // a request while busy must be ignored
        learn_req = (lat == 20);
      end
      learn_req = 0;
      checks++;
      if (jl != B) begin failures++; $display("step %0d emitted %0d entries", step, jl); end
      repeat (int'($urandom_range(10))) @(negedge clk);
      checks++;
      if (su_start || learn_done || !busy) begin failures++; $display("step ended before learn_ack"); end
      learn_ack = 1; acked = 1;
      @(negedge clk); learn_ack = 0;
      lat = 0;
      while (!learn_done && lat < 1000) begin @(negedge clk); lat++; end
      checks++;
      if (!learn_done) begin failures++; $display("no learn_done"); end
      else if ((step % D) == D - 1) begin
        // learn_done only after the last soft update finished
        checks++;
        if (su_cnt[0] != 0 || su_cnt[1] != 0 || su_cnt[2] != 0) begin failures++; $display("learn_done before soft updates ended"); end
      end
      @(negedge clk);
      checks++;
      if (busy) begin failures++; $display("still busy after learn_done"); end
    end
    checks++;
    if (int'(n_steps) != STEPS || int'(n_soft_updates) != STEPS / D || n_su != STEPS / D ||
        int'(n_tgt_clipped) != n_clip_exp) begin
      failures++;
      $display("counters: steps %0d soft %0d (started %0d) clipped %0d (expected %0d)",
               n_steps, n_soft_updates, n_su, n_tgt_clipped, n_clip_exp);
    end
    $display("steps %0d, soft updates %0d, clipped target elements %0d", n_steps, n_soft_updates, n_tgt_clipped);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
