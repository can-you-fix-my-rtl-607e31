// tb_fir_filter: self-checking test of the 11-tap complex FIR.
// Drives random taps (inside and outside the agent's tap box) and random IQ
// samples, including full-scale ones that saturate, with gaps in in_valid.
// A reference model keeps its own sample history and computes
// sum_m h[m] x[n-m] with 64-bit integers, then >>> 12 and saturation. It also
// checks that each output appears exactly one clock after its input and that
// the filter is a pass-through with the default taps [1, 0, ..., 0].
module tb_fir_filter;
  import chares_pkg::*;

  localparam int M = NUM_TAPS;
  logic clk = 0, rst_n = 0;
  logic in_valid = 0;
  iq_t  in_sample = '0;
  fx_t  taps_re [M], taps_im [M];
  logic out_valid;
  iq_t  out_sample;

  int checks = 0, failures = 0;

  fir_filter dut (.*);

  always #5 clk = ~clk;

  initial begin
    #200000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  longint hist_re [M], hist_im [M];

  function automatic longint sat16(longint v);
    longint s = v >>> 12;
    if (s > 32767) return 32767;
    if (s < -32768) return -32768;
    return s;
  endfunction

  longint exp_re, exp_im;
  logic   exp_valid = 0;

  task automatic push(input iq_t x);
    longint ar = 0, ai = 0;
    for (int m = M-1; m > 0; m--) begin hist_re[m] = hist_re[m-1]; hist_im[m] = hist_im[m-1]; end
    hist_re[0] = x.re; hist_im[0] = x.im;
    for (int m = 0; m < M; m++) begin
      ar += longint'(taps_re[m]) * hist_re[m] - longint'(taps_im[m]) * hist_im[m];
      ai += longint'(taps_re[m]) * hist_im[m] + longint'(taps_im[m]) * hist_re[m];
    end
    exp_re = sat16(ar); exp_im = sat16(ai);
  endtask

  // Monitor: outputs seen at an edge belong to the inputs of the previous edge.
  always @(posedge clk) begin
    if (rst_n) begin
      checks++;
      if (out_valid != exp_valid) begin
        failures++;
        $display("out_valid %0b, expected %0b", out_valid, exp_valid);
      end else if (exp_valid && (longint'(out_sample.re) != exp_re || longint'(out_sample.im) != exp_im)) begin
        failures++;
        if (failures < 10) $display("mismatch: got %0d %0d exp %0d %0d", out_sample.re, out_sample.im, exp_re, exp_im);
      end
      exp_valid = in_valid;
      if (in_valid) push(in_sample);
    end
  end

  initial begin
    for (int m = 0; m < M; m++) begin taps_re[m] = (m == 0) ? FX_ONE : '0; taps_im[m] = '0; hist_re[m] = 0; hist_im[m] = 0; end
    repeat (3) @(posedge clk);
    rst_n = 1;
    // phase 1: default taps [1,0,...,0] (pass-through), then random taps
    for (int trial = 0; trial < 5; trial++) begin
      @(negedge clk);
      in_valid = 0;
      if (trial > 0)
        for (int m = 0; m < M; m++) begin
          if (trial < 3) begin
            taps_re[m] = fx_t'((m == 0 ? 4096 : 0) + int'($urandom_range(820)) - 410);
            taps_im[m] = fx_t'(int'($urandom_range(820)) - 410);
          end else begin
            taps_re[m] = fx_t'($urandom); taps_im[m] = fx_t'($urandom);
          end
        end
      for (int n = 0; n < 300; n++) begin
        @(negedge clk);
        in_valid = ($urandom_range(3) != 0);
        if (trial == 2) begin in_sample.re = (n % 2) ? 16'sh7FFF : -16'sh8000; in_sample.im = 16'sh7FFF; end
        else begin in_sample.re = sample_t'($urandom); in_sample.im = sample_t'($urandom); end
      end
    end
    @(negedge clk); in_valid = 0;
    @(posedge clk); @(posedge clk);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
