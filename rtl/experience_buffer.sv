// experience_buffer: replay memory of the agent's trajectories (s, a, r, s').
//
// Every step of training appends one trajectory. The memory holds up to DEPTH
// of them (10000 in the published configuration); once full, each new
// trajectory overwrites the oldest (ring buffer; the overwrite policy is this
// design's choice). As soon as at least BATCH (64) entries are stored, a batch
// request returns BATCH entries drawn uniformly at random, with replacement,
// from the stored ones, which is what the trainer consumes.
//
// How it works: the memory is a single-port-write, single-port-read array of
// trajectory_t words with a registered read. A 32-bit Galois LFSR (taps
// 0x80200003) gives a 16-bit random number u per drawn entry; the index is
// floor(u * count / 65536), which maps u onto [0, count) without a divider.
//
// Interface and timing:
//   wr_valid / wr_data     append one trajectory per clock.
//   count                  number of stored entries (saturates at DEPTH).
//   batch_avail            count >= BATCH.
//   batch_req              sampled while idle and batch_avail; ignored otherwise.
//   rd_valid / rd_data     the BATCH entries, one per clock, starting two clocks
//                          after the request; rd_last marks the final one and
//                          rd_index tells which slot each came from.
// A write in the same clock as a read of the same slot returns the old entry.
module experience_buffer
  import chares_pkg::*;
#(
  parameter int unsigned DEPTH = BUF_DEPTH,
  parameter int unsigned B     = BATCH,
  parameter logic [31:0] SEED  = 32'hACE1_2468,
  localparam int unsigned AW   = $clog2(DEPTH),
  localparam int unsigned CW   = $clog2(DEPTH + 1)
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          wr_valid,
  input  trajectory_t   wr_data,
  output logic [CW-1:0] count,
  output logic          batch_avail,
  input  logic          batch_req,
  output logic          rd_valid,
  output logic          rd_last,
  output logic [AW-1:0] rd_index,
  output trajectory_t   rd_data
);

  trajectory_t mem [DEPTH];

  logic [AW-1:0] wr_ptr;
  logic [31:0]   lfsr;
  logic          sampling;
  logic [$clog2(B+1)-1:0] drawn;
  logic          rd_en_q, rd_last_q;
  logic [AW-1:0] rd_addr;

  assign batch_avail = (count >= CW'(B));

  // random index in [0, count)
  logic [AW-1:0] rand_idx;
  logic [CW+15:0] scaled;
  always_comb begin
    scaled   = (CW+16)'(lfsr[15:0]) * (CW+16)'(count);
    rand_idx = AW'(scaled >> 16);
  end

  always_ff @(posedge clk) begin
    if (wr_valid) mem[wr_ptr] <= wr_data;
    if (rd_en_q)  rd_data     <= mem[rd_addr];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wr_ptr    <= '0;
      count     <= '0;
      lfsr      <= SEED;
      sampling  <= 1'b0;
      drawn     <= '0;
      rd_en_q   <= 1'b0;
      rd_last_q <= 1'b0;
      rd_addr   <= '0;
      rd_valid  <= 1'b0;
      rd_last   <= 1'b0;
      rd_index  <= '0;
    end else begin
      if (wr_valid) begin
        wr_ptr <= (wr_ptr == AW'(DEPTH - 1)) ? '0 : wr_ptr + AW'(1);
        if (count != CW'(DEPTH)) count <= count + CW'(1);
      end

      // stage 1: draw an index
      rd_en_q   <= 1'b0;
      rd_last_q <= 1'b0;
      if (!sampling) begin
        if (batch_req && batch_avail) begin
          sampling <= 1'b1;
          drawn    <= '0;
        end
      end else begin
        lfsr      <= lfsr[0] ? ((lfsr >> 1) ^ 32'h8020_0003) : (lfsr >> 1);
        rd_addr   <= rand_idx;
        rd_en_q   <= 1'b1;
        rd_last_q <= (drawn == ($clog2(B+1))'(B - 1));
        drawn     <= drawn + 1'b1;
        if (drawn == ($clog2(B+1))'(B - 1)) sampling <= 1'b0;
      end

      // stage 2: memory read (rd_data registered above)
      rd_valid <= rd_en_q;
      rd_last  <= rd_last_q;
      if (rd_en_q) rd_index <= rd_addr;
    end
  end

endmodule
