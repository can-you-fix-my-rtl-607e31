// tb_soft_update: self-checking test of soft_update at the actor size
// (9142 words).
//
// The testbench models the two weight memories (main and target) with
// registered reads, as fc_network has them, and runs three updates: with
// omega = 0.05 (twice in a row, so the second reads what the first wrote) and
// with omega = 1.0 (a plain copy). After each update every target word is
// compared with
//   theta' = sat((omega * theta + (4096 - omega) * theta') >>> 12),
// computed from the memory contents before the update. It also checks that
// busy lasts NUM_W + 1 clocks, that done pulses NUM_W + 2 clocks after the
// start clock, that no write happens outside busy and that every address is
// written exactly once per update.
module tb_soft_update;
  import chares_pkg::*;

  localparam int NUM_W = mlp_words(STATE_DIM, HIDDEN, HID_LAYERS, ACTION_DIM);
  localparam int AW = $clog2(NUM_W);

  logic clk = 0, rst_n = 0;
  logic start = 0;
  fx_t  omega = fx_t'(205);
  logic busy, done;
  logic [AW-1:0] main_rd_addr, tgt_rd_addr, tgt_wr_addr;
  fx_t  main_rd_data, tgt_rd_data, tgt_wr_data;
  logic tgt_wr_en;

  int checks = 0, failures = 0;

  soft_update dut (.*);
  always #5 clk = ~clk;

  initial begin
    #5000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  fx_t main_m [NUM_W], tgt_m [NUM_W], expect_m [NUM_W];
  int  writes [NUM_W];

  always_ff @(posedge clk) begin
    main_rd_data <= main_m[main_rd_addr];
    tgt_rd_data  <= tgt_m[tgt_rd_addr];
    if (tgt_wr_en) begin
      tgt_m[tgt_wr_addr] <= tgt_wr_data;
      writes[tgt_wr_addr] <= writes[tgt_wr_addr] + 1;
    end
  end

  always @(negedge clk) begin
    if (rst_n && tgt_wr_en && !busy) begin
      checks++; failures++; $display("write outside busy");
    end
  end

  function automatic longint sat(longint v);
    if (v > 32767) return 32767;
    if (v < -32768) return -32768;
    return v;
  endfunction

  task automatic run(int om);
    int nbusy, ndone, cyc;
    omega = fx_t'(om);
    for (int i = 0; i < NUM_W; i++) begin
      expect_m[i] = fx_t'(sat((longint'(om) * main_m[i] + (4096 - longint'(om)) * tgt_m[i]) >>> 12));
      writes[i] = 0;
    end
    @(negedge clk); start = 1;
    @(negedge clk); start = 0;
    nbusy = 0; ndone = 0; cyc = 1;
    while (ndone == 0 && cyc < NUM_W + 100) begin
      if (busy) nbusy++;
      if (done) ndone = cyc;
      @(negedge clk); cyc++;
    end
    checks += 2;
    if (nbusy != NUM_W + 1) begin failures++; $display("busy for %0d clocks", nbusy); end
    if (ndone != NUM_W + 2) begin failures++; $display("done %0d clocks after start", ndone); end
    for (int i = 0; i < NUM_W; i++) begin
      checks++;
      if (tgt_m[i] != expect_m[i] || writes[i] != 1) begin
        failures++;
        if (failures < 10) $display("word %0d: %0d (written %0d times), expected %0d", i, tgt_m[i], writes[i], expect_m[i]);
      end
    end
  endtask

  initial begin
    for (int i = 0; i < NUM_W; i++) begin
      main_m[i] = fx_t'($urandom);
      tgt_m[i]  = fx_t'($urandom);
      writes[i] = 0;
    end
    main_m[0] = FX_MAX; tgt_m[0] = FX_MAX;
    main_m[1] = FX_MIN; tgt_m[1] = FX_MIN;
    repeat (3) @(negedge clk);
    rst_n = 1;
    repeat (2) @(negedge clk);
    checks++;
    if (busy || done) begin failures++; $display("busy or done after reset"); end
    run(205);
    for (int i = 0; i < NUM_W; i++) main_m[i] = fx_t'($urandom);
    run(205);
    run(4096);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
