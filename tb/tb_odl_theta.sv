// tb_odl_theta: the pruning-threshold sweep, run on synthetic data.
//
// The same stand-in for a human-activity dataset as the drift test: six
// classes, each a cluster around a random mean (entries within +-0.6) plus
// uniform noise (+-0.3), and a new subject that shifts every mean (entries
// within +-0.8). The core (n = 24, N = 32, m = 6) first learns the original
// data from scratch (beta = 0, P = 4 I) with pruning held off, and its beta
// and P are saved through the host port. Then, for each threshold setting
// (fixed theta = 1, 0.5, 0.1, 0.01, and automatic tuning with X = 10), the
// core is reset, beta and P are restored, a drift event starts retraining
// on 300 shifted samples (pruning allowed after 40 trained samples), and the
// accuracy on shifted data is measured afterwards. Queries and accuracy are
// printed for every setting.
// Checks: with theta = 1 every training-mode sample is sent to the teacher
// (the confidence can never exceed 1); theta = 0.01 and the automatic
// setting send fewer; accuracy after retraining is at least 80 % for
// theta = 1 and for the automatic setting; every event ends in time.
module tb_odl_theta;
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
    repeat (80_000_000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  localparam int NCFG = 5;
  localparam int THETA_CFG [NCFG] = '{65536, 32768, 6554, 655, 0};   // 0: automatic

  int sbeta [NH * NO];
  int sp    [NH * NH];

  task automatic host_read(input mem_sel_t sel, input int addr, output int data);
    @(negedge clk);
    host_en = 1'b1; host_we = 1'b0; host_sel = sel; host_addr = AW'(addr);
    @(negedge clk);
    host_en = 1'b0;
    data = host_rdata;
  endtask

  initial begin
    int acc0, q [NCFG], ev [NCFG], acc [NCFG];
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
    // learn the original subjects, then save the trained state
    sample(0, 1'b0, 1'b1, c);
    for (int i = 0; i < TRAIN_A; i++) sample($urandom_range(0, NO - 1), 1'b0, 1'b0, c);
    check(mode == MODE_PREDICT, "initial training phase ended");
    test(1'b0, acc0);
    for (int a = 0; a < NH * NO; a++) host_read(MEM_BETA, a, sbeta[a]);
    for (int a = 0; a < NH * NH; a++) host_read(MEM_P, a, sp[a]);
    // one retraining run per threshold setting, each from the same state
    for (int s = 0; s < NCFG; s++) begin
      @(negedge clk);
      rst_n = 1'b0;
      repeat (2) @(negedge clk);
      rst_n = 1'b1;
      for (int a = 0; a < NH * NO; a++) host_write(MEM_BETA, a, sbeta[a]);
      for (int a = 0; a < NH * NH; a++) host_write(MEM_P, a, sp[a]);
      cfg.min_train = 16'd40; cfg.train_len = 16'(TRAIN_C);
      cfg.auto_theta = (THETA_CFG[s] == 0);
      cfg.theta_fixed = THETA_CFG[s];
      n_query = 0; n_train_mode = 0;
      sample(0, 1'b1, 1'b1, c);
      for (int i = 0; i < TRAIN_C; i++) sample($urandom_range(0, NO - 1), 1'b1, 1'b0, c);
      check(mode == MODE_PREDICT, "retraining phase ended");
      q[s] = n_query; ev[s] = n_train_mode;
      test(1'b1, acc[s]);
      if (THETA_CFG[s] == 0)
        $display("theta auto : %0d of %0d samples queried, accuracy %0d%%", q[s], ev[s], acc[s]);
      else
        $display("theta %0d/65536: %0d of %0d samples queried, accuracy %0d%%",
                 THETA_CFG[s], q[s], ev[s], acc[s]);
    end
    $display("accuracy on the original data after the first training: %0d%%", acc0);
    check(acc0 >= 80, "accuracy on original data");
    check(q[0] == ev[0], "theta = 1 queries every sample");
    check(q[3] < q[0], "theta = 0.01 queries fewer samples than theta = 1");
    check(q[4] < q[0], "automatic theta queries fewer samples than theta = 1");
    check(acc[0] >= 80, "accuracy after retraining, theta = 1");
    check(acc[4] >= 80, "accuracy after retraining, automatic theta");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
