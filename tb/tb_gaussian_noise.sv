// tb_gaussian_noise: self-checking test of the exploration-noise generator.
// 1) Bit-exact: a reference xorshift64 (13, 7, 17) and Irwin-Hall (n = 4)
//    transform written here with integers must give the same samples.
// 2) Statistics: over 20000 samples at sigma = 0.5 the mean must be n_in1s
//    0.02 of 0 and the standard deviation n_in1s 5 % of sigma; about 68 %
//    (60..76 %) of the samples must lie n_in1s one sigma.
// 3) sigma = 0 must give zero noise; en low must hold the output.
module tb_gaussian_noise;
  import chares_pkg::*;

  logic clk = 0, rst_n = 0, en = 0;
  fx_t  sigma = '0;
  logic valid;
  fx_t  noise;
  int checks = 0, failures = 0;

  gaussian_noise dut (.*);
  always #5 clk = ~clk;

  initial begin
    #1000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  longint unsigned st = 64'h9E37_79B9_7F4A_7C15;
  function automatic longint ref_next(input longint sig);
    longint u, z;
    st = st ^ (st << 13);
    st = st ^ (st >> 7);
    st = st ^ (st << 17);
    u = longint'(st[15:0]) + longint'(st[31:16]) + longint'(st[47:32]) + longint'(st[63:48]);
    z = ((u - 131070) * 7094) >>> 16;
    if (z > 32767) z = 32767;
    if (z < -32768) z = -32768;
    return (z * sig) >>> 12;
  endfunction

  initial begin
    real sum = 0, sum2 = 0, mean, sd;
    int n_in1s = 0;
    longint e;
    repeat (3) @(posedge clk);
    rst_n = 1;
    sigma = fx_t'(2048);
    for (int i = 0; i < 20000; i++) begin
      @(negedge clk); en = 1;
      e = ref_next(2048);
      @(negedge clk); en = 0;
      checks++;
      if (!valid || longint'(noise) != e) begin
        failures++;
        if (failures < 10) $display("sample %0d: got %0d exp %0d valid %0b", i, noise, e, valid);
      end
      sum  += real'(noise) / 4096.0;
      sum2 += (real'(noise) / 4096.0) ** 2;
      if (noise >= -2048 && noise <= 2048) n_in1s++;
      // output holds while en is low
      @(negedge clk);
      checks++;
      if (valid || longint'(noise) != e) begin failures++; $display("output changed with en low"); end
    end
    mean = sum / 20000.0;
    sd   = $sqrt(sum2 / 20000.0 - mean * mean);
    $display("mean %f sd %f within-1-sigma %0d / 20000", mean, sd, n_in1s);
    checks++; if (mean > 0.02 || mean < -0.02) begin failures++; $display("mean off"); end
    checks++; if (sd < 0.475 || sd > 0.525) begin failures++; $display("sd off"); end
    checks++; if (n_in1s < 12000 || n_in1s > 15200) begin failures++; $display("shape off"); end
    // sigma = 0
    sigma = '0;
    for (int i = 0; i < 50; i++) begin
      @(negedge clk); en = 1;
      void'(ref_next(0));
      @(negedge clk); en = 0;
      checks++;
      if (noise != 0) begin failures++; $display("nonzero noise at sigma 0"); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
