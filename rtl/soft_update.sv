// soft_update: soft update of a target network's weights from its main network.
//
// Implements theta' <- omega * theta + (1 - omega) * theta' for every word of
// a weight memory (biases included), which keeps the target networks a slowly
// moving average of the main ones. omega is a run-time fx_t input: 0.05 (205)
// in the published configuration; omega = 1.0 (4096) copies the main weights,
// which is how targets are initialised.
//
// How it works: a counter walks the NUM_W addresses, one per clock, on the
// read ports of both memories (registered reads, one clock of latency). One
// clock later the two words are blended,
//   new = (omega * theta + (4096 - omega) * theta') >>> 12   (truncating),
// saturated to fx_t and written back to the target memory at the address read
// the clock before. Reads run one address ahead of writes, so no word is read
// after it has been overwritten.
//
// Timing: start is sampled while idle; busy stays high for NUM_W + 1 clocks
// and done pulses in the clock after the last write. The caller must keep
// both networks idle (no inference, no other writes) while busy is high.
// The blend formula and omega follow the paper; the one-word-per-clock
// streaming is this design's choice.
module soft_update
  import chares_pkg::*;
#(
  parameter int unsigned NUM_W = mlp_words(STATE_DIM, HIDDEN, HID_LAYERS, ACTION_DIM),
  localparam int unsigned AW   = $clog2(NUM_W)
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          start,
  input  fx_t           omega,
  output logic          busy,
  output logic          done,
  // main network memory, read
  output logic [AW-1:0] main_rd_addr,
  input  fx_t           main_rd_data,
  // target network memory, read and write
  output logic [AW-1:0] tgt_rd_addr,
  input  fx_t           tgt_rd_data,
  output logic          tgt_wr_en,
  output logic [AW-1:0] tgt_wr_addr,
  output fx_t           tgt_wr_data
);

  logic          reading;     // an address is being issued this clock
  logic [AW-1:0] addr;
  logic          wr_pend;     // the words read last clock are to be written
  logic [AW-1:0] wr_addr_q;

  assign main_rd_addr = addr;
  assign tgt_rd_addr  = addr;
  assign busy         = reading || wr_pend;

  logic signed [47:0] blend;
  always_comb begin
    blend = (48'(omega) * 48'(main_rd_data) +
             (48'sd4096 - 48'(omega)) * 48'(tgt_rd_data)) >>> FX_FRAC;
  end

  assign tgt_wr_en   = wr_pend;
  assign tgt_wr_addr = wr_addr_q;
  assign tgt_wr_data = fx_sat(blend);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      reading   <= 1'b0;
      addr      <= '0;
      wr_pend   <= 1'b0;
      wr_addr_q <= '0;
      done      <= 1'b0;
    end else begin
      done      <= wr_pend && !reading;
      wr_pend   <= reading;
      wr_addr_q <= addr;
      if (!busy) begin
        addr <= '0;
        if (start) reading <= 1'b1;
      end else if (reading) begin
        if (addr == AW'(NUM_W - 1)) reading <= 1'b0;
        else addr <= addr + AW'(1);
      end
    end
  end

endmodule
