// tb_experience_buffer: self-checking test of the trajectory replay memory.
// Runs at DEPTH = 100 and B = 8 to keep the run short (same logic as the
// 10000 / 64 default). Checks:
//  - count and batch_avail while filling, no batch before B entries;
//  - every returned entry equals the entry this testbench wrote to the slot
//    rd_index names, and rd_index < count;
//  - each batch has exactly B entries, rd_last on the final one, starting two
//    clocks after the request;
//  - after more than DEPTH writes count saturates and the oldest entries are
//    overwritten (the ring wraps);
//  - draws cover most slots (uniformity sanity check).
module tb_experience_buffer;
  import chares_pkg::*;

  localparam int DEPTH = 100, B = 8;
  localparam int AW = $clog2(DEPTH), CW = $clog2(DEPTH + 1);

  logic clk = 0, rst_n = 0;
  logic wr_valid = 0;
  trajectory_t wr_data = '0;
  logic [CW-1:0] count;
  logic batch_avail, batch_req = 0, rd_valid, rd_last;
  logic [AW-1:0] rd_index;
  trajectory_t rd_data;
  int checks = 0, failures = 0;

  experience_buffer #(.DEPTH(DEPTH), .B(B)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    #2000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  trajectory_t model [DEPTH];
  int n_written = 0;
  int hits [DEPTH];

  function automatic trajectory_t make(int k);
    trajectory_t t;
    for (int i = 0; i < STATE_DIM; i++) begin t.s[i] = fx_t'(k * 7 + i); t.s_next[i] = fx_t'(k * 13 + i); end
    for (int i = 0; i < ACTION_DIM; i++) t.a[i] = fx_t'($urandom);
    t.r = reward_t'(k % 5 - 2);
    return t;
  endfunction

  task automatic write_one();
    @(negedge clk);
    wr_valid = 1;
    wr_data  = make(n_written);
    model[n_written % DEPTH] = wr_data;
    n_written++;
    @(negedge clk);
    wr_valid = 0;
  endtask

  task automatic get_batch();
    int got = 0, waitc = 0;
    @(negedge clk); batch_req = 1;
    @(negedge clk); batch_req = 0;
    // first entry is visible after the second clock edge following the request edge
    while (!rd_valid && waitc < 10) begin @(negedge clk); waitc++; end
    checks++;
    if (waitc != 2) begin failures++; $display("first entry after %0d extra clocks", waitc); end
    while (rd_valid) begin
      int lim = (n_written < DEPTH) ? n_written : DEPTH;
      got++;
      checks++;
      if (int'(rd_index) >= lim || rd_data != model[rd_index]) begin
        failures++;
        if (failures < 10) $display("bad entry from slot %0d", rd_index);
      end
      hits[rd_index]++;
      checks++;
      if (rd_last != (got == B)) begin failures++; $display("rd_last wrong at %0d", got); end
      @(negedge clk);
    end
    checks++;
    if (got != B) begin failures++; $display("batch of %0d entries", got); end
  endtask

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    // fill below B: requests ignored
    for (int i = 0; i < B - 1; i++) write_one();
    checks++;
    if (batch_avail || int'(count) != B - 1) begin failures++; $display("avail early"); end
    @(negedge clk); batch_req = 1; @(negedge clk); batch_req = 0;
    repeat (4) begin
      @(negedge clk);
      checks++;
      if (rd_valid) begin failures++; $display("batch served below B"); end
    end
    write_one();
    checks++;
    if (!batch_avail) begin failures++; $display("not avail at B"); end
    get_batch();
    // fill past DEPTH (wrap)
    while (n_written < DEPTH + 37) begin
      write_one();
      checks++;
      if (int'(count) != ((n_written < DEPTH) ? n_written : DEPTH)) begin failures++; $display("count %0d", count); end
      if (n_written % 20 == 0) get_batch();
    end
    for (int k = 0; k < 60; k++) get_batch();
    begin
      int covered = 0;
      for (int i = 0; i < DEPTH; i++) if (hits[i] > 0) covered++;
      $display("slots drawn at least once: %0d of %0d", covered, DEPTH);
      checks++;
      if (covered < 90) begin failures++; $display("poor coverage"); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
