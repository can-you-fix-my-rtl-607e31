// learning_target: learning targets and critic losses for one batch.
//
// For each trajectory j of a batch it receives the reward r_j, the two target
// critics' values Q'_1, Q'_2 at (s'_j, a~_j) and the two main critics' values
// Q_1, Q_2 at (s_j, a_j), and computes
//   y_j   = r_j + gamma * min(Q'_1, Q'_2)             (clipped double-Q target)
//   e_i,j = Q_i(s_j, a_j) - y_j                        (Bellman error, i = 1, 2)
// and over the batch the mean-squared Bellman error
//   L_i   = (1/B) * sum_j e_i,j^2.
// These are the quantities the critic update minimises; the gradient step
// itself is left to the trainer.
//
// Number handling: r is an integer reward, aligned as r * 4096; gamma is an
// fx_t input (0.99 -> 4055 by default at the top); products are shifted right
// by 12 and saturated to fx_t for y and e. Squares are accumulated at 48 bits
// (each e^2 >>> 12) and the final sum is divided by B and saturated.
//
// Timing: in_valid with in_first on the batch's first entry (clears the sums)
// and in_last on its last. out_valid, y, err1 and err2 follow one clock after
// each in_valid; loss_valid, loss1 and loss2 one clock after in_last.
// The formulas follow the paper; formats and timing are this design's.
module learning_target
  import chares_pkg::*;
#(
  parameter int unsigned B = BATCH
) (
  input  logic    clk,
  input  logic    rst_n,
  input  fx_t     gamma,
  input  logic    in_valid,
  input  logic    in_first,
  input  logic    in_last,
  input  reward_t reward,
  input  fx_t     q_t1,       // target critic 1
  input  fx_t     q_t2,       // target critic 2
  input  fx_t     q_m1,       // main critic 1
  input  fx_t     q_m2,       // main critic 2
  output logic    out_valid,
  output fx_t     y,
  output fx_t     err1,
  output fx_t     err2,
  output logic    loss_valid,
  output fx_t     loss1,
  output fx_t     loss2
);

  fx_t                q_min, y_n, e1_n, e2_n;
  logic signed [47:0] y_w, sq1, sq2, acc1, acc2, acc1_n, acc2_n;

  always_comb begin
    q_min  = (q_t1 < q_t2) ? q_t1 : q_t2;
    y_w    = (48'(reward) <<< FX_FRAC) + ((48'(gamma) * 48'(q_min)) >>> FX_FRAC);
    y_n    = fx_sat(y_w);
    e1_n   = fx_sat(48'(q_m1) - 48'(y_n));
    e2_n   = fx_sat(48'(q_m2) - 48'(y_n));
    sq1    = (48'(e1_n) * 48'(e1_n)) >>> FX_FRAC;
    sq2    = (48'(e2_n) * 48'(e2_n)) >>> FX_FRAC;
    acc1_n = (in_first ? 48'sd0 : acc1) + sq1;
    acc2_n = (in_first ? 48'sd0 : acc2) + sq2;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid  <= 1'b0;
      y          <= '0;
      err1       <= '0;
      err2       <= '0;
      acc1       <= '0;
      acc2       <= '0;
      loss_valid <= 1'b0;
      loss1      <= '0;
      loss2      <= '0;
    end else begin
      out_valid  <= in_valid;
      loss_valid <= in_valid && in_last;
      if (in_valid) begin
        y    <= y_n;
        err1 <= e1_n;
        err2 <= e2_n;
        acc1 <= acc1_n;
        acc2 <= acc2_n;
        if (in_last) begin
          loss1 <= fx_sat(acc1_n / 48'(B));
          loss2 <= fx_sat(acc2_n / 48'(B));
        end
      end
    end
  end

endmodule
