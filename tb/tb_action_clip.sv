// tb_action_clip: exhaustive-style check of the feasible-tap clipper.
// For every action element index and many random (action, noise, alpha)
// triples, the expected tap is computed here as min(max(a + n, h0 - alpha),
// h0 + alpha) with h0 = 1.0 for element 0 (Re h[0]) and 0 otherwise; the
// clipped flag must be set exactly when a bound applied. Edge values at the
// bounds themselves are included.
module tb_action_clip;
  import chares_pkg::*;

  localparam int ADIM = ACTION_DIM;
  logic [$clog2(ADIM)-1:0] idx;
  fx_t action, noise, alpha, tap;
  logic clipped;
  int checks = 0, failures = 0;

  action_clip dut (.*);

  initial begin
    #10000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check_one(int i, int a, int n, int al);
    int h0, lo, hi, s, e;
    bit ec;
    idx = ($clog2(ADIM))'(i); action = fx_t'(a); noise = fx_t'(n); alpha = fx_t'(al);
    #1;
    h0 = (i == 0) ? 4096 : 0;
    lo = h0 - al; hi = h0 + al; s = a + n;
    ec = 1;
    if (s < lo) e = lo; else if (s > hi) e = hi; else begin e = s; ec = 0; end
    checks++;
    if (int'(tap) != e || clipped != ec) begin
      failures++;
      if (failures < 10) $display("idx %0d a %0d n %0d alpha %0d: got %0d/%0b exp %0d/%0b", i, a, n, al, tap, clipped, e, ec);
    end
  endtask

  initial begin
    for (int i = 0; i < ADIM; i++) begin
      int h0 = (i == 0) ? 4096 : 0;
      // exactly on and just beyond the bounds, alpha = 0.1
      check_one(i, h0 + 410, 0, 410);
      check_one(i, h0 + 411, 0, 410);
      check_one(i, h0 - 410, 0, 410);
      check_one(i, h0 - 411, 0, 410);
      check_one(i, h0 + 200, 300, 410);
      for (int k = 0; k < 2000; k++)
        check_one(i, int'($urandom_range(24000)) - 12000, int'($urandom_range(2000)) - 1000,
                  int'($urandom_range(1000)));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
