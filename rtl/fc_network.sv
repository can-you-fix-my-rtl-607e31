// fc_network: one of the agent's fully connected networks, evaluated in hardware.
//
// A fully connected network with IN_DIM inputs, N_HID hidden layers of HID ReLU
// neurons and a linear output layer of OUT_DIM neurons. The same engine serves
// as the actor pi_phi(s) (defaults: 2 state inputs, 2*11 outputs, one per real
// number of the FIR taps) and, with IN_DIM = 24 and OUT_DIM = 1, as the critics
// Q(s, a). Actor and critics all use 10 layers of 30 ReLU neurons, as in the
// published configuration.
//
// How it works: one multiply-accumulate unit walks the network neuron by neuron.
// For each neuron it loads the bias (one clock) and then accumulates one
// weight*activation product per clock, so a neuron with n inputs takes n+1
// clocks. Activations of the current layer live in one of two small ping-pong
// buffers; the finished neuron writes its ReLU (or, in the last layer, linear)
// output, saturated to fx_t, into the other buffer. Weights and biases live in
// one on-chip memory of NUM_W words laid out layer by layer, neuron by neuron,
// each neuron as {bias, w[0], ..., w[n-1]}. The wr_* port writes it (the
// trainer, or the soft target update); the rd_* port reads it with one clock of
// latency (rd_data holds mem[rd_addr] of the previous clock), which the soft
// target update uses to read the main network's weights.
//
// Timing: start is sampled when the engine is idle (busy low). done pulses for
// one clock exactly NUM_W + 1 clocks after start; action holds the outputs from
// then until the next done. Writing the weight memory while busy is allowed
// but changes the result. The serial single-MAC schedule and the number format
// are choices of this design; the published FPGA build (from high-level
// synthesis) reports 13614 clocks, this schedule takes NUM_W + 1 = 9143 clocks
// at the default sizes.
module fc_network
  import chares_pkg::*;
#(
  parameter int unsigned IN_DIM  = STATE_DIM,
  parameter int unsigned HID     = HIDDEN,
  parameter int unsigned N_HID   = HID_LAYERS,
  parameter int unsigned OUT_DIM = ACTION_DIM,
  localparam int unsigned NUM_W  = mlp_words(IN_DIM, HID, N_HID, OUT_DIM),
  localparam int unsigned AW     = $clog2(NUM_W)
) (
  input  logic          clk,
  input  logic          rst_n,
  // weight / bias memory load port
  input  logic          wr_en,
  input  logic [AW-1:0] wr_addr,
  input  fx_t           wr_data,
  // weight / bias memory read port (registered)
  input  logic [AW-1:0] rd_addr,
  output fx_t           rd_data,
  // inference
  input  logic          start,
  input  fx_t           state_in [IN_DIM],
  output logic          busy,
  output logic          done,
  output fx_t           action   [OUT_DIM]
);

  localparam int unsigned MAXD = (IN_DIM > HID) ? ((IN_DIM > OUT_DIM) ? IN_DIM : OUT_DIM)
                                                : ((HID > OUT_DIM) ? HID : OUT_DIM);
  localparam int unsigned LW   = $clog2(N_HID + 1) + 1;
  localparam int unsigned DW   = $clog2(MAXD + 1) + 1;
  localparam int unsigned IXW  = $clog2(MAXD);
  localparam int unsigned OXW  = (OUT_DIM > 1) ? $clog2(OUT_DIM) : 1;

  fx_t wmem [NUM_W];
  always_ff @(posedge clk) begin
    if (wr_en) wmem[wr_addr] <= wr_data;
    rd_data <= wmem[rd_addr];
  end

  fx_t act [2][MAXD];          // ping-pong activation buffers

  logic          running;
  logic [LW-1:0] layer;        // 0 .. N_HID (N_HID is the output layer)
  logic [DW-1:0] neuron;       // neuron within the layer
  logic [DW-1:0] k;            // 0 = bias, 1..n = inputs
  logic          rd_sel;       // buffer holding the layer's inputs
  logic [AW-1:0] addr;         // current weight-memory word
  logic signed [47:0] acc;

  logic [DW-1:0] in_n, out_n;
  logic          last_layer;
  always_comb begin
    last_layer = (layer == LW'(N_HID));
    in_n       = (layer == '0) ? DW'(IN_DIM) : DW'(HID);
    out_n      = last_layer ? DW'(OUT_DIM) : DW'(HID);
  end

  // Product of the current weight and input activation (k >= 1).
  fx_t x_k;
  logic signed [47:0] prod, acc_next;
  always_comb begin
    x_k  = (k == '0) ? '0 : act[rd_sel][IXW'(k - DW'(1))];
    prod = 48'(wmem[addr]) * 48'(x_k);
    if (k == '0) acc_next = 48'(wmem[addr]) <<< FX_FRAC;  // bias aligned to products
    else         acc_next = acc + prod;
  end

  fx_t neuron_out;
  always_comb begin
    neuron_out = fx_sat(acc_next >>> FX_FRAC);
    if (!last_layer && neuron_out < 0) neuron_out = '0;     // ReLU
  end

  assign busy = running;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      running <= 1'b0;
      done    <= 1'b0;
      layer   <= '0;
      neuron  <= '0;
      k       <= '0;
      rd_sel  <= 1'b0;
      addr    <= '0;
      acc     <= '0;
      for (int i = 0; i < OUT_DIM; i++) action[i] <= '0;
      for (int b = 0; b < 2; b++)
        for (int i = 0; i < MAXD; i++) act[b][i] <= '0;
    end else begin
      done <= 1'b0;
      if (!running) begin
        if (start) begin
          for (int i = 0; i < IN_DIM; i++) act[0][i] <= state_in[i];
          running <= 1'b1;
          layer   <= '0;
          neuron  <= '0;
          k       <= '0;
          rd_sel  <= 1'b0;
          addr    <= '0;
        end
      end else begin
        acc  <= acc_next;
        addr <= addr + AW'(1);
        if (k == in_n) begin
          // neuron finished
          act[~rd_sel][IXW'(neuron)] <= neuron_out;
          if (last_layer) action[OXW'(neuron)] <= neuron_out;
          k <= '0;
          if (neuron == out_n - DW'(1)) begin
            neuron <= '0;
            if (last_layer) begin
              running <= 1'b0;
              done    <= 1'b1;
            end else begin
              layer  <= layer + LW'(1);
              rd_sel <= ~rd_sel;
            end
          end else begin
            neuron <= neuron + DW'(1);
          end
        end else begin
          k <= k + DW'(1);
        end
      end
    end
  end

endmodule
