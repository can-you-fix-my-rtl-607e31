// tb_fc_network: self-checking test of the network engine at the actor's full
// size (2 inputs, 10 hidden layers of 30 ReLU neurons, 22 linear outputs); the
// critics are the same engine with other IN_DIM / OUT_DIM and are exercised at
// full size by the top-level test.
// Loads random weights and biases through the write port, runs several states
// and compares every output with a reference model written here with 64-bit
// integers (bias << 12 plus the sum of products, >>> 12, saturation to 16 bits,
// ReLU in hidden layers). Also checks that done arrives exactly
// after start: NUM_W + 1 clocks counted from the clock in which start is
// raised (one multiply-accumulate per weight-memory word), and that the
// registered read port returns each loaded word one clock after its address.
module tb_fc_network;
  import chares_pkg::*;

  localparam int IN = STATE_DIM, H = HIDDEN, NH = HID_LAYERS, OUT = ACTION_DIM;
  localparam int NUM_W = mlp_words(IN, H, NH, OUT);
  localparam int AW = $clog2(NUM_W);

  logic clk = 0, rst_n = 0;
  logic wr_en = 0;
  logic [AW-1:0] wr_addr = '0;
  fx_t  wr_data = '0;
  logic [AW-1:0] rd_addr = '0;
  fx_t  rd_data;
  logic start = 0;
  fx_t  state_in [IN];
  logic busy, done;
  fx_t  action [OUT];

  int checks = 0, failures = 0;
  fx_t w [NUM_W];

  fc_network dut (.*);

  always #5 clk = ~clk;

  initial begin
    #2000000;
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

  longint ref_out [OUT];
  task automatic reference(input fx_t s [IN]);
    longint a [64], b [64];
    int base = 0, n_in, n_out;
    for (int i = 0; i < IN; i++) a[i] = s[i];
    for (int l = 0; l <= NH; l++) begin
      n_in  = (l == 0) ? IN : H;
      n_out = (l == NH) ? OUT : H;
      for (int n = 0; n < n_out; n++) begin
        longint acc = longint'(w[base]) <<< 12;
        for (int i = 0; i < n_in; i++) acc += longint'(w[base + 1 + i]) * a[i];
        b[n] = sat(acc >>> 12);
        if (l != NH && b[n] < 0) b[n] = 0;
        base += n_in + 1;
      end
      for (int n = 0; n < n_out; n++) a[n] = b[n];
    end
    for (int n = 0; n < OUT; n++) ref_out[n] = a[n];
  endtask

  initial begin
    int cyc;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 4; t++) begin
      // load weights: trial 0 small, later ones larger so saturation occurs
      for (int i = 0; i < NUM_W; i++) begin
        int span = (t < 2) ? 1200 : 9000;
        w[i] = fx_t'(int'($urandom_range(2*span)) - span);
        @(negedge clk);
        wr_en = 1; wr_addr = AW'(i); wr_data = w[i];
      end
      @(negedge clk); wr_en = 0;
      // read port: one clock of latency
      for (int r = 0; r < 40; r++) begin
        int a = (r < 3) ? r : ((r == 3) ? NUM_W - 1 : int'($urandom_range(NUM_W - 1)));
        rd_addr = AW'(a);
        @(negedge clk);
        checks++;
        if (rd_data != w[a]) begin failures++; $display("read port word %0d: got %0d exp %0d", a, rd_data, w[a]); end
      end
      for (int k = 0; k < 3; k++) begin
        fx_t s [IN];
        s[0] = fx_t'($urandom_range(4096));
        s[1] = (k == 1) ? FX_ONE : fx_t'(0);
        for (int i = 0; i < IN; i++) state_in[i] = s[i];
        reference(s);
        @(negedge clk); start = 1;
        @(negedge clk); start = 0;
        cyc = 1;
        checks++;
        if (!busy) begin failures++; $display("busy not raised"); end
        while (!done) begin @(negedge clk); cyc++; if (cyc > 20000) break; end
        checks++;
        if (cyc != NUM_W + 1) begin failures++; $display("latency %0d, expected %0d", cyc, NUM_W + 1); end
        for (int n = 0; n < OUT; n++) begin
          checks++;
          if (longint'(action[n]) != ref_out[n]) begin
            failures++;
            if (failures < 10) $display("trial %0d out %0d: got %0d exp %0d", t, n, action[n], ref_out[n]);
          end
        end
      end
    end
    $display("latency %0d clocks for %0d weight words", NUM_W + 1, NUM_W);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
