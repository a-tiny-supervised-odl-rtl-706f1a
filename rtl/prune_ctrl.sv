// prune_ctrl: label acquisition with automatic data pruning.
//
// Decides, for each training-mode sample, whether the teacher must be asked
// for a label. The teacher is skipped (and the sample not trained) only when
// all three published conditions hold:
//   1. at least min_train samples have been trained in this training phase,
//   2. no data drift is currently signalled,
//   3. the confidence p1 - p2 (top-2 class probabilities) exceeds theta.
// query is combinational in trained_cnt, drift and conf.
//
// theta is tuned automatically over 1, 0.64, 0.32, 0.16, 0.08. It starts at
// the highest level after reset. A pulse on update reports the outcome of
// one sample: it counts as a success if conf > theta, or if the teacher was
// asked and its label equals the local prediction (match). X = x_consec
// consecutive successes step theta one level down; a failure (teacher asked
// with conf <= theta and the labels differ) steps it one level up and
// restarts the count. With auto_theta low, theta_fixed is used instead.
// The conditions, the levels and X follow the published design; the
// one-level steps, counting before condition 1 holds and restarting the
// count after each change are this design's choices.
module prune_ctrl
  import odl_pkg::*;
(
  input  logic        clk,
  input  logic        rst_n,
  // configuration
  input  logic        auto_theta,
  input  fxp_t        theta_fixed,
  input  logic [7:0]  x_consec,
  input  logic [15:0] min_train,
  // decision
  input  logic [15:0] trained_cnt,
  input  logic        drift,
  input  fxp_t        conf,
  output logic        query,
  // outcome of a sample
  input  logic        update,
  input  logic        match,
  // status
  output fxp_t        theta,
  output logic [2:0]  theta_idx,
  output logic [7:0]  succ_cnt
);

  logic confident;

  assign theta     = auto_theta ? THETA_TAB[theta_idx] : theta_fixed;
  assign confident = conf > theta;
  assign query     = !((trained_cnt >= min_train) && !drift && confident);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      theta_idx <= '0;
      succ_cnt  <= '0;
    end else if (update && auto_theta) begin
      if (confident || match) begin
        if (succ_cnt + 8'd1 >= x_consec) begin
          succ_cnt <= '0;
          if (theta_idx != 3'(NUM_THETA - 1)) theta_idx <= theta_idx + 3'd1;
        end else begin
          succ_cnt <= succ_cnt + 8'd1;
        end
      end else begin
        succ_cnt <= '0;
        if (theta_idx != '0) theta_idx <= theta_idx - 3'd1;
      end
    end
  end

endmodule
