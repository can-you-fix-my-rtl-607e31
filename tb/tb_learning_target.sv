// tb_learning_target: self-checking test of learning_target with the
// published batch size (64) and gamma = 0.99.
//
// Drives 20 batches of random rewards (-1, 0, +1, +2) and critic values,
// with gaps between entries in some batches and extreme values (full-scale
// Q values, so y and the errors saturate) in others. For every entry the
// testbench computes y = r + gamma * min(Q'1, Q'2) and e_i = Q_i - y in its
// own 64-bit arithmetic, and at the end of each batch the mean squared
// errors, and checks them on the outputs exactly one clock after the input
// (out_valid and loss_valid timing included).
module tb_learning_target;
  import chares_pkg::*;

  localparam int B = BATCH;

  logic clk = 0, rst_n = 0;
  fx_t  gamma = fx_t'(4055);
  logic in_valid = 0, in_first = 0, in_last = 0;
  reward_t reward = '0;
  fx_t  q_t1 = '0, q_t2 = '0, q_m1 = '0, q_m2 = '0;
  logic out_valid, loss_valid;
  fx_t  y, err1, err2, loss1, loss2;

  int checks = 0, failures = 0;

  learning_target dut (.*);
  always #5 clk = ~clk;

  initial begin
    #10000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic longint sat(longint v);
    if (v > 32767) return 32767;
    if (v < -32768) return -32768;
    return v;
  endfunction

  function automatic fx_t rnd_q(bit extreme);
    if (extreme) return ($urandom_range(1) != 0) ? FX_MAX : FX_MIN;
    return fx_t'(int'($urandom_range(16000)) - 8000);
  endfunction

  // expected outputs for the entry being driven (nxt_*) and, one clock
  // later, for the outputs (exp_*)
  bit     nxt_v = 0, nxt_lv = 0, exp_v = 0, exp_lv = 0;
  longint ny, ne1, ne2, nl1, nl2, ey, ee1, ee2, el1, el2, acc1, acc2;
  int     n_sat = 0;

  always @(posedge clk) begin
    exp_v <= nxt_v; exp_lv <= nxt_lv;
    ey <= ny; ee1 <= ne1; ee2 <= ne2; el1 <= nl1; el2 <= nl2;
  end

  always @(negedge clk) begin
    if (rst_n) begin
      checks++;
      if (out_valid != exp_v || loss_valid != exp_lv) begin
        failures++; $display("valid timing: out %0d loss %0d, expected %0d %0d", out_valid, loss_valid, exp_v, exp_lv);
      end else if (exp_v) begin
        checks++;
        if (longint'(y) != ey || longint'(err1) != ee1 || longint'(err2) != ee2) begin
          failures++;
          if (failures < 10) $display("y %0d e %0d %0d, expected %0d %0d %0d", y, err1, err2, ey, ee1, ee2);
        end
        if (exp_lv) begin
          checks++;
          if (longint'(loss1) != el1 || longint'(loss2) != el2) begin
            failures++; $display("loss %0d %0d, expected %0d %0d", loss1, loss2, el1, el2);
          end
        end
      end
    end
  end

  task automatic batch(bit gaps, bit extreme);
    longint qmin, yy;
    for (int j = 0; j < B; j++) begin
      while (gaps && $urandom_range(2) == 0) begin
        in_valid = 0; nxt_v = 0; nxt_lv = 0;
        @(posedge clk); #1;
      end
      case ($urandom_range(3)) 0: reward = -8'sd1; 1: reward = 8'sd0; 2: reward = 8'sd1; default: reward = 8'sd2; endcase
      q_t1 = rnd_q(extreme && $urandom_range(1) != 0);
      q_t2 = rnd_q(extreme && $urandom_range(1) != 0);
      q_m1 = rnd_q(extreme && $urandom_range(1) != 0);
      q_m2 = rnd_q(extreme && $urandom_range(1) != 0);
      in_valid = 1; in_first = (j == 0); in_last = (j == B - 1);
      qmin = (q_t1 < q_t2) ? q_t1 : q_t2;
      yy   = (longint'(reward) <<< 12) + ((longint'(gamma) * qmin) >>> 12);
      ny   = sat(yy);
      if (ny != yy) n_sat++;
      ne1  = sat(longint'(q_m1) - ny);
      ne2  = sat(longint'(q_m2) - ny);
      if (j == 0) begin acc1 = 0; acc2 = 0; end
      acc1 += (ne1 * ne1) >>> 12;
      acc2 += (ne2 * ne2) >>> 12;
      nl1 = sat(acc1 / B);
      nl2 = sat(acc2 / B);
      nxt_v = 1; nxt_lv = (j == B - 1);
      @(posedge clk); #1;
    end
    in_valid = 0; in_first = 0; in_last = 0; nxt_v = 0; nxt_lv = 0;
    @(posedge clk); #1;
  endtask

  initial begin
    repeat (3) @(posedge clk);
    #1 rst_n = 1;
    // a first batch with small values so the losses stay in range
    batch(0, 0);
    for (int b = 0; b < 19; b++) batch(b % 2 == 1, b % 3 == 2);
    checks++;
    if (n_sat == 0) begin failures++; $display("no saturated target exercised"); end
    repeat (3) @(posedge clk);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
