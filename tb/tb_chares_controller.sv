// tb_chares_controller: self-checking test of the agent's step sequencer.
// The testbench plays the reward unit, the actor network (answers each start
// after a random delay with random outputs, some far outside the tap box) and
// the noise generator (a new random value every clock). For a random sequence
// of feedbacks in training and in testing mode it checks:
//  - the actor starts only when the taps must change (first feedback, or the
//    label was wrong), and is given the new state s';
//  - committed taps equal clip(action + noise) (training) or clip(action)
//    (testing), element 2m -> Re h[m], 2m+1 -> Im h[m], with the noise value
//    of the clock in which each element was processed;
//  - in training, each feedback after the first writes (s, a, r, s') with the
//    previous state and the previously committed taps; none in testing;
//  - ready is low while a step is in progress; the counters match.
module tb_chares_controller;
  import chares_pkg::*;

  localparam int M = NUM_TAPS, ADIM = 2 * M;
  logic clk = 0, rst_n = 0;
  logic train = 1;
  fx_t  alpha = fx_t'(410);
  logic r_valid = 0, success = 0;
  reward_t reward = '0;
  state_t s_next = '0;
  logic ready, actor_start, actor_done = 0;
  fx_t  actor_state [STATE_DIM];
  fx_t  actor_action [ADIM];
  logic noise_en;
  fx_t  noise = '0;
  logic buf_wr_valid;
  trajectory_t buf_wr_data;
  fx_t  taps_re [M], taps_im [M];
  logic taps_updated;
  logic [31:0] n_new, n_kept, n_stored, n_clipped;
  int checks = 0, failures = 0;

  chares_controller dut (.*);
  always #5 clk = ~clk;

  initial begin
    #5000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // noise source: new value each clock; record values consumed
  fx_t used_noise [$];
  always @(posedge clk) begin
    if (noise_en) used_noise.push_back(noise);
  end
  always @(negedge clk) noise <= fx_t'(int'($urandom_range(1600)) - 800);

  int exp_new = 0, exp_kept = 0, exp_stored = 0, exp_clip = 0;
  fx_t cur_taps [ADIM];
  state_t prev_s;
  bit have_prev = 0;
  int busy_ready_err = 0;

  function automatic int clipv(int i, int v);
    int h0 = (i == 0) ? 4096 : 0;
    if (v < h0 - 410) begin exp_clip++; return h0 - 410; end
    if (v > h0 + 410) begin exp_clip++; return h0 + 410; end
    return v;
  endfunction

  task automatic one_step(bit tr, bit ok);
    int d;
    bit started = 0, stored = 0;
    state_t sn;
    reward_t rw;
    train = tr;
    sn[0] = fx_t'($urandom_range(4096)); sn[1] = ok ? FX_ONE : fx_t'(0);
    rw = reward_t'(int'($urandom_range(3)) - 1);
    @(negedge clk);
    checks++; if (!ready) begin failures++; $display("not ready when idle"); end
    r_valid = 1; success = ok; s_next = sn; reward = rw;
    @(negedge clk);
    r_valid = 0;
    // stored trajectory check
    checks++;
    if (tr && have_prev) begin
      exp_stored++;
      if (!buf_wr_valid || buf_wr_data.s != prev_s || buf_wr_data.r != rw || buf_wr_data.s_next != sn) begin
        failures++; $display("trajectory wrong/missing");
      end else
        for (int i = 0; i < ADIM; i++) if (buf_wr_data.a[i] != cur_taps[i]) begin failures++; $display("trajectory action %0d wrong", i); break; end
    end else if (buf_wr_valid) begin failures++; $display("unexpected trajectory write"); end
    checks++;
    if (!ok || !have_prev) begin
      if (!actor_start || actor_state[0] != sn[0] || actor_state[1] != sn[1]) begin failures++; $display("actor not started correctly"); end
      exp_new++;
      used_noise.delete();
      d = $urandom_range(20);
      repeat (d) begin @(negedge clk); if (ready) busy_ready_err++; end
      for (int i = 0; i < ADIM; i++)
        actor_action[i] = ($urandom_range(3) == 0) ? fx_t'($urandom) : fx_t'(((i == 0) ? 4096 : 0) + int'($urandom_range(700)) - 350);
      actor_done = 1;
      @(negedge clk); actor_done = 0;
      while (!taps_updated) begin @(negedge clk); if (ready && !taps_updated) busy_ready_err++; end
      checks++;
      if (tr && used_noise.size() != ADIM) begin failures++; $display("%0d noise samples used", used_noise.size()); end
      if (!tr && used_noise.size() != 0) begin failures++; $display("noise used in testing"); end
      for (int i = 0; i < ADIM; i++) begin
        int v = int'(actor_action[i]) + (tr ? int'(used_noise[i]) : 0);
        cur_taps[i] = fx_t'(clipv(i, v));
      end
      for (int m = 0; m < M; m++) begin
        checks++;
        if (taps_re[m] != cur_taps[2*m] || taps_im[m] != cur_taps[2*m+1]) begin
          failures++;
          if (failures < 10) $display("tap %0d: got %0d %0d exp %0d %0d", m, taps_re[m], taps_im[m], cur_taps[2*m], cur_taps[2*m+1]);
        end
      end
    end else begin
      if (actor_start) begin failures++; $display("actor started on success"); end
      exp_kept++;
    end
    have_prev = 1;
    prev_s = sn;
  endtask

  initial begin
    for (int i = 0; i < ADIM; i++) begin cur_taps[i] = (i == 0) ? FX_ONE : '0; actor_action[i] = '0; end
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    for (int m = 0; m < M; m++) begin
      checks++;
      if (taps_re[m] != cur_taps[2*m] || taps_im[m] != 0) begin failures++; $display("reset taps not h0"); end
    end
    for (int k = 0; k < 300; k++) one_step(k < 200, $urandom_range(2) == 0);
    repeat (2) @(negedge clk);
    checks++;
    if (busy_ready_err != 0) begin failures++; $display("ready high while busy %0d times", busy_ready_err); end
    checks++;
    if (n_new != exp_new || n_kept != exp_kept || n_stored != exp_stored || n_clipped != exp_clip) begin
      failures++;
      $display("counters %0d %0d %0d %0d, expected %0d %0d %0d %0d", n_new, n_kept, n_stored, n_clipped, exp_new, exp_kept, exp_stored, exp_clip);
    end
    $display("steps: new %0d kept %0d stored %0d clipped %0d", exp_new, exp_kept, exp_stored, exp_clip);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
