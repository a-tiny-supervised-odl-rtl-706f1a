// tb_mode_ctrl: checks the mode switch of the top-level algorithm: drift is
// ignored until an event starts, an event starting with drift switches to
// training for the following events and clears both counters, trained
// samples are counted, the mode returns to predicting after train_len
// training events, and drift during training does not restart the phase.
module tb_mode_ctrl;
  import odl_pkg::*;

  logic clk = 1'b0, rst_n = 1'b0;
  logic [15:0] train_len = 16'd5, trained_cnt, ev_cnt;
  logic ev_start = 1'b0, drift = 1'b0, trained = 1'b0, ev_done = 1'b0;
  mode_t mode;
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  mode_ctrl dut (.*);

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic event_(input bit d, input bit tr);
    mode_t m0;
    @(negedge clk); drift = d; ev_start = 1'b1; m0 = mode;
    @(negedge clk); ev_start = 1'b0; drift = 1'b0;
    if (tr && m0 == MODE_TRAIN) begin trained = 1'b1; @(negedge clk); trained = 1'b0; end
    @(negedge clk); ev_done = (m0 == MODE_TRAIN);
    @(negedge clk); ev_done = 1'b0;
  endtask

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    check(mode == MODE_PREDICT, "reset mode");
    @(negedge clk); drift = 1'b1;
    @(negedge clk); drift = 1'b0;
    check(mode == MODE_PREDICT, "drift alone does nothing");
    event_(1'b0, 1'b0);
    check(mode == MODE_PREDICT, "no drift: stays predicting");
    event_(1'b1, 1'b0);
    check(mode == MODE_TRAIN && ev_cnt == 0 && trained_cnt == 0, "drift switches to training");
    for (int e = 1; e <= 5; e++) begin
      event_(e == 2, e != 3);
      if (e < 5) begin
        check(mode == MODE_TRAIN, $sformatf("training event %0d", e));
        check(int'(ev_cnt) == e, "event count");
        check(int'(trained_cnt) == e - (e >= 3 ? 1 : 0), "trained count");
      end
    end
    check(mode == MODE_PREDICT, "back to predicting after train_len events");
    event_(1'b1, 1'b0);
    check(mode == MODE_TRAIN && ev_cnt == 0 && trained_cnt == 0, "second drift restarts");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
