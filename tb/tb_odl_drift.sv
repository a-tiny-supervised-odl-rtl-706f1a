// tb_odl_drift: the data-drift scenario, run on synthetic data.
//
// The evaluation the core was built for uses a human-activity dataset that
// is not available here, so this test generates a stand-in: six classes,
// each a cluster around a random mean vector (entries within +-0.6) plus
// uniform noise (+-0.3). A "new subject" shifts every class mean (entries
// within +-0.8). The core (n = 24, N = 32, m = 6) runs
// these phases, all through its own training hardware:
//   A  learn from scratch (beta = 0, P = 4 I) on the original data, with
//      pruning held off, then test on original data (accuracy acc0);
//   B  test on shifted data before retraining (acc1_before);
//   C  drift: retrain on 300 shifted samples with automatic pruning (X = 10,
//      pruning allowed after 40 trained samples), counting teacher queries;
//   D  test on shifted data again (acc1_after).
// Checks: acc0 and acc1_after at least 80 %; acc1_after not below
// acc1_before; fewer queries than training-mode samples in C (pruning saved
// radio traffic); every event's latency bounded. The numbers are printed.
module tb_odl_drift;
  import odl_pkg::*;

  localparam int NI = 24;
  localparam int NH = 32;
  localparam int NO = 6;
  localparam int TRAIN_A = 150;
  localparam int TRAIN_C = 300;
  localparam int NTEST = 120;

  logic        clk = 1'b0;
  logic        rst_n = 1'b0;
  odl_cfg_t    cfg;
  logic        start = 1'b0, drift = 1'b0;
  logic        busy, done, queried, pruned, trained, query_valid;
  mode_t       ev_mode, mode;
  logic [7:0]  pred_class;
  fxp_t        p1, p2, theta, host_rdata, host_wdata;
  logic        label_valid = 1'b0, label_skip = 1'b0;
  logic [7:0]  label = '0;
  logic        host_en = 1'b0, host_we = 1'b0;
  mem_sel_t    host_sel = MEM_X;
  logic [AW-1:0] host_addr = '0;
  logic [2:0]  theta_idx;
  logic [15:0] trained_cnt;

  always #5 clk = ~clk;

  odl_top #(.N_IN_MAX(NI), .N_HID_MAX(NH), .N_OUT_MAX(NO)) dut (.*);

  int checks = 0, failures = 0;
  int mean  [NO][NI];
  int shift [NO][NI];

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  task automatic host_write(input mem_sel_t sel, input int addr, input int data);
    @(negedge clk);
    host_en = 1'b1; host_we = 1'b1; host_sel = sel;
    host_addr = AW'(addr); host_wdata = data;
    @(negedge clk);
    host_en = 1'b0; host_we = 1'b0;
  endtask

  // One event on a sample of class cls; returns whether it was classified
  // correctly. The teacher always knows the true class.
  int n_query = 0, n_train_mode = 0;
  task automatic sample(input int cls, input bit shifted, input bit drift_in, output bit correct);
    int v, cyc;
    for (int k = 0; k < NI; k++) begin
      v = mean[cls][k] + (shifted ? shift[cls][k] : 0) +
          int'($urandom_range(0, 39321)) - 19660;
      host_write(MEM_X, k, v);
    end
    @(negedge clk);
    drift = drift_in; start = 1'b1;
    @(negedge clk);
    start = 1'b0; drift = 1'b0;
    cyc = 0;
    while (!done && cyc < 100000) begin
      if (query_valid) begin
        repeat (2) @(negedge clk);
        label_valid = 1'b1; label = 8'(cls);
        @(negedge clk);
        label_valid = 1'b0;
      end else begin
        @(negedge clk);
        cyc++;
      end
    end
    check(done, "event finished in time");
    if (ev_mode == MODE_TRAIN) begin
      n_train_mode++;
      if (queried) n_query++;
    end
    correct = (int'(pred_class) == cls);
  endtask

  task automatic test(input bit shifted, output int pct);
    int ok;
    bit c;
    ok = 0;
    for (int i = 0; i < NTEST; i++) begin
      sample(i % NO, shifted, 1'b0, c);
      if (c) ok++;
    end
    pct = ok * 100 / NTEST;
  endtask

  initial begin
    repeat (30_000_000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int acc0, acc1b, acc1a, q_c, ev_c;
    bit c;
    cfg = '0;
    cfg.n_in = 16'(NI); cfg.n_hid = 16'(NH); cfg.n_out = 8'(NO);
    cfg.x_consec = 8'd10; cfg.min_train = 16'd60000; cfg.train_len = 16'(TRAIN_A);
    cfg.seed = 16'h5EED; cfg.auto_theta = 1'b1;
    for (int c0 = 0; c0 < NO; c0++)
      for (int k = 0; k < NI; k++) begin
        mean[c0][k]  = int'($urandom_range(0, 78643)) - 39321;   // +-0.6
        shift[c0][k] = int'($urandom_range(0, 104857)) - 52428;  // +-0.8
      end
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    for (int j = 0; j < NH; j++) begin
      for (int c0 = 0; c0 < NO; c0++) host_write(MEM_BETA, j * NO + c0, 0);
      for (int k = 0; k < NH; k++) host_write(MEM_P, j * NH + k, (j == k) ? 4 * 65536 : 0);
    end
    // A: learn the original subjects
    sample(0, 1'b0, 1'b1, c);                      // drift event: enter training
    for (int i = 0; i < TRAIN_A; i++) sample($urandom_range(0, NO - 1), 1'b0, 1'b0, c);
    check(mode == MODE_PREDICT, "initial training phase ended");
    test(1'b0, acc0);
    // B: new subject, before retraining
    test(1'b1, acc1b);
    // C: retrain with pruning
    cfg.min_train = 16'd40; cfg.train_len = 16'(TRAIN_C);
    n_query = 0; n_train_mode = 0;
    sample(0, 1'b1, 1'b1, c);
    for (int i = 0; i < TRAIN_C; i++) sample($urandom_range(0, NO - 1), 1'b1, 1'b0, c);
    q_c = n_query; ev_c = n_train_mode;
    check(mode == MODE_PREDICT, "retraining phase ended");
    // D: new subject, after retraining
    test(1'b1, acc1a);
    $display("accuracy: original %0d%%, shifted before retraining %0d%%, after %0d%%",
             acc0, acc1b, acc1a);
    $display("retraining: %0d of %0d samples sent to the teacher (%0d%% less traffic), final theta level %0d",
             q_c, ev_c, 100 - q_c * 100 / ev_c, theta_idx);
    check(acc0 >= 80, "accuracy on original data");
    check(acc1a >= 80, "accuracy after retraining");
    check(acc1a >= acc1b, "retraining does not lose accuracy");
    check(q_c < ev_c, "pruning reduced the number of queries");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
