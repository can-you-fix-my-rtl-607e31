// tb_reward_unit: self-checking test of the reward rules.
// Sends a random sequence of feedbacks (label right or wrong, decoding failure
// flag, softmax that rises, falls or repeats) and checks reward, next state
// and success flag one clock after each, against an independent model that
// remembers the previous softmax. Counts every reward kind and fails if any of
// the four never occurred. Also checks that outputs hold between feedbacks.
module tb_reward_unit;
  import chares_pkg::*;

  logic clk = 0, rst_n = 0, fb_valid = 0;
  feedback_t fb = '0;
  logic r_valid, success;
  reward_t reward;
  state_t s_next;
  int checks = 0, failures = 0;
  int seen [4];

  reward_unit dut (.*);
  always #5 clk = ~clk;

  initial begin
    #1000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int prev = 0, e_r;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int i = 0; i < 2000; i++) begin
      int sm;
      @(negedge clk);
      fb_valid = 1;
      fb.label_ok    = ($urandom_range(3) == 0);
      fb.decode_fail = ($urandom_range(5) == 0);
      case ($urandom_range(2))
        0: sm = prev;
        1: sm = int'($urandom_range(4096));
        default: sm = (prev > 100) ? prev - 1 : prev + 1;
      endcase
      fb.softmax = fx_t'(sm);
      if (fb.label_ok)          e_r = 2;
      else if (fb.decode_fail)  e_r = -1;
      else if (sm > prev)       e_r = 1;
      else if (sm < prev)       e_r = -1;
      else                      e_r = 0;
      prev = sm;
      @(negedge clk);
      fb_valid = 0;
      checks++;
      if (!r_valid || int'(reward) != e_r || success != fb.label_ok ||
          int'(s_next[0]) != sm || int'(s_next[1]) != (fb.label_ok ? 4096 : 0)) begin
        failures++;
        if (failures < 10) $display("fb %0d: reward %0d exp %0d, s' %0d %0d", i, reward, e_r, s_next[0], s_next[1]);
      end
      case (e_r) 2: seen[0]++; 1: seen[1]++; -1: seen[2]++; default: seen[3]++; endcase
      // idle clock: outputs hold, r_valid low
      fb.softmax = fx_t'($urandom_range(4096));
      @(negedge clk);
      checks++;
      if (r_valid || int'(reward) != e_r) begin failures++; $display("outputs did not hold"); end
    end
    $display("rewards: success %0d up %0d down %0d same %0d", seen[0], seen[1], seen[2], seen[3]);
    for (int k = 0; k < 4; k++) begin
      checks++;
      if (seen[k] == 0) begin failures++; $display("reward kind %0d never seen", k); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
