// mode_ctrl: the operation mode of the top-level algorithm.
//
// In predicting mode a sample only runs prediction; when ev_start arrives
// with drift high, the mode becomes training from the next sample on (the
// current sample still returns a prediction, as in the published
// algorithm). Entering training clears the two counters: trained_cnt, the
// samples actually trained (pulse on trained), which feeds pruning
// condition 1, and ev_cnt, the samples seen in training mode (pulse on
// ev_done). IsTrainDone is taken as ev_cnt reaching train_len, after which
// the mode returns to predicting. The mode switch follows the published
// algorithm; using a sample count as the done condition is one of the two
// examples it gives (the other is the training loss).
module mode_ctrl
  import odl_pkg::*;
(
  input  logic        clk,
  input  logic        rst_n,
  input  logic [15:0] train_len,
  input  logic        ev_start,
  input  logic        drift,
  input  logic        trained,
  input  logic        ev_done,
  output mode_t       mode,
  output logic [15:0] trained_cnt,
  output logic [15:0] ev_cnt
);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      mode        <= MODE_PREDICT;
      trained_cnt <= '0;
      ev_cnt      <= '0;
    end else if (mode == MODE_PREDICT) begin
      if (ev_start && drift) begin
        mode        <= MODE_TRAIN;
        trained_cnt <= '0;
        ev_cnt      <= '0;
      end
    end else begin
      if (trained && trained_cnt != 16'hFFFF) trained_cnt <= trained_cnt + 16'd1;
      if (ev_done) begin
        if (ev_cnt + 16'd1 >= train_len) mode <= MODE_PREDICT;
        ev_cnt <= ev_cnt + 16'd1;
      end
    end
  end

endmodule
