// tb_prune_ctrl: checks the label-acquisition decision and theta tuning.
// Directed part: theta starts at 1; X consecutive successes (confident or
// matching) step it through 0.64, 0.32, 0.16, 0.08 and it stays at 0.08; a
// mismatch with low confidence steps it back up and restarts the count; a
// confident sample is pruned only once min_train samples were trained and no
// drift is signalled. Random part: 3000 outcomes against a reference model.
// Fixed-theta mode is checked last.
module tb_prune_ctrl;
  import odl_pkg::*;

  logic clk = 1'b0, rst_n = 1'b0;
  logic auto_theta = 1'b1;
  fxp_t theta_fixed = '0;
  logic [7:0] x_consec = 8'd10;
  logic [15:0] min_train = 16'd288, trained_cnt = '0;
  logic drift = 1'b0, update = 1'b0, match = 1'b0, query;
  fxp_t conf = '0, theta;
  logic [2:0] theta_idx;
  logic [7:0] succ_cnt;
  int checks = 0, failures = 0;

  localparam int THT [5] = '{65536, 41943, 20972, 10486, 5243};

  always #5 clk = ~clk;

  prune_ctrl dut (.*);

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic outcome(input int cf, input bit m);
    @(negedge clk);
    conf = cf; match = m; update = 1'b1;
    @(negedge clk);
    update = 1'b0;
  endtask

  initial begin
    int idx, cnt, cf;
    bit m, exp_q;
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    check(theta == 65536, "theta starts at 1");
    // theta = 1: every confidence <= 1, so the teacher is always asked
    trained_cnt = 16'd1000; conf = 65536;
    #1 check(query, "no pruning at theta = 1");
    for (int lvl = 1; lvl <= 4; lvl++) begin
      for (int i = 0; i < 9; i++) outcome(0, 1'b1);
      check(int'(theta_idx) == lvl - 1, "no change before X successes");
      outcome(0, 1'b1);
      check(int'(theta_idx) == lvl, $sformatf("level %0d after X successes", lvl));
      check(theta == THT[lvl], "theta value");
    end
    for (int i = 0; i < 10; i++) outcome(0, 1'b1);
    check(theta_idx == 3'd4, "stays at the lowest level");
    // confident samples count as successes
    outcome(THT[4] + 1, 1'b0);
    check(succ_cnt == 8'd1, "confident outcome counted");
    // low-confidence mismatch raises theta and restarts the count
    outcome(THT[4], 1'b0);
    check(theta_idx == 3'd3 && succ_cnt == 0, "mismatch raises theta");
    // pruning conditions at theta = 0.16
    conf = THT[3] + 1; drift = 1'b0; trained_cnt = 16'd288;
    #1 check(!query, "all three conditions: pruned");
    conf = THT[3];
    #1 check(query, "confidence equal to theta: query");
    conf = THT[3] + 1; trained_cnt = 16'd287;
    #1 check(query, "too few trained samples: query");
    trained_cnt = 16'd288; drift = 1'b1;
    #1 check(query, "drift: query");
    drift = 1'b0;
    // random outcomes against the model
    idx = 3; cnt = 0;
    x_consec = 8'd3;
    for (int t = 0; t < 3000; t++) begin
      cf = int'($urandom_range(0, 70000));
      m  = ($urandom_range(0, 3) != 0);
      conf = cf; trained_cnt = 16'($urandom_range(280, 300)); drift = ($urandom_range(0, 7) == 0);
      #1;
      exp_q = !(int'(trained_cnt) >= 288 && !drift && cf > THT[idx]);
      check(query == exp_q, "random query decision");
      outcome(cf, m);
      if (cf > THT[idx] || m) begin
        if (cnt + 1 >= 3) begin cnt = 0; if (idx < 4) idx++; end
        else cnt++;
      end else begin
        cnt = 0; if (idx > 0) idx--;
      end
      check(int'(theta_idx) == idx && int'(succ_cnt) == cnt, "random theta tuning");
    end
    // fixed threshold
    auto_theta = 1'b0; theta_fixed = 32'sd20000; trained_cnt = 16'd300; drift = 1'b0;
    conf = 32'sd20001;
    #1 check(!query && theta == 32'sd20000, "fixed theta prunes");
    outcome(0, 1'b0);
    check(int'(theta_idx) == idx, "fixed theta: no tuning");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
