// tb_odl_full: end-to-end test of the ODL core with every parameter at its
// default (n = 561, N = 128, m = 6) and the published pruning settings
// (X = 10, 288 trained samples before pruning may start); beta and P are
// compared in full after the first and every 40th training step.
//
// A host loads beta and P (P = identity), then runs a sequence of sensing
// events with random class-cluster inputs. A bit-exact reference model of the whole
// algorithm (prediction, pruning decision, theta tuning, OS-ELM update) runs
// beside the core. After every event the predicted class, p1, p2, the mode,
// the queried/pruned/trained flags and theta are compared; after every
// training step the whole beta and P are read back through the host port
// and compared word by word. The event latency (cycles from start to done,
// teacher wait excluded) is checked against the cycle formula of the core.
// Inputs come from one cluster per class. The simulated teacher answers
// with the true class most of the time, sometimes with a wrong label and
// sometimes not at all, so that every
// mechanism occurs: drift switching to training, queries, pruned samples,
// an unavailable teacher, theta stepping down and up, drift blocking pruning
// and the return to predicting mode. A mechanism that never occurs counts
// as a failure.
module tb_odl_full;
  import odl_pkg::*;
  import odl_ref_pkg::*;

  localparam int NI = 561;
  localparam int NH = 128;
  localparam int NO = 6;
  localparam int NI_MAX = NI;       // built sizes (memory strides)
  localparam int NH_MAX = NH;
  localparam int NO_MAX = NO;
  localparam int NEV = 420;        // training-phase events
  localparam int X_CONSEC = 10;    // X
  localparam int MIN_TRAIN = 288;   // pruning condition 1
  localparam int TRAIN_LEN = 400;  // IsTrainDone after this many events
  localparam int CHK_EVERY = 40;   // compare beta and P every k-th training step

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

  odl_top dut (.*);

  int checks = 0, failures = 0;

  // ------------------------------------------------------------- model
  int mx [NI];
  int cmean [NO][NI];          // class cluster means of the test data
  int mbeta [NH][NO];
  int mp [NH][NH];
  int mh [NH];
  int mz [NO];
  int m_cls, m_p1, m_p2;
  int m_idx = 0, m_succ = 0, m_trained = 0, m_evcnt = 0;
  bit m_train = 0;

  // mechanism counters
  int n_to_train = 0, n_query = 0, n_prune = 0, n_tskip = 0, n_train = 0;
  int n_th_down = 0, n_th_up = 0, n_to_pred = 0, n_drift_block = 0, n_pred_only = 0;

  localparam int THT [5] = '{65536, 41943, 20972, 10486, 5243};

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  task automatic model_predict();
    shortint unsigned s;
    int acc, zmax, sum, inv, o[NO], e[NO];
    s = cfg.seed;
    if (s == 0) s = 16'hACE1;
    for (int j = 0; j < NH; j++) begin
      acc = 0;
      for (int k = 0; k < NI; k++) begin
        acc = radd(acc, rmul(mx[k], rxw(s)));
        s = rxs(s);
      end
      mh[j] = rsig(radd(acc, rxw(s)));
      s = rxs(s);
    end
    for (int c = 0; c < NO; c++) begin
      acc = 0;
      for (int j = 0; j < NH; j++) acc = radd(acc, rmul(mh[j], mbeta[j][c]));
      mz[c] = acc;
    end
    zmax = mz[0];
    for (int c = 1; c < NO; c++) if (mz[c] > zmax) zmax = mz[c];
    sum = 0;
    for (int c = 0; c < NO; c++) begin
      e[c] = rexp(mz[c] - zmax);
      sum  = radd(sum, rmul(e[c], int'(ONE)));
    end
    inv = rdiv(int'(ONE), sum);
    for (int c = 0; c < NO; c++) o[c] = rmul(e[c], inv);
    // top-2: largest first index wins ties
    m_cls = 0;
    for (int c = 1; c < NO; c++) if (o[c] > o[m_cls]) m_cls = c;
    m_p1 = o[m_cls];
    m_p2 = 0;
    for (int c = 0; c < NO; c++) if (c != m_cls && o[c] > m_p2) m_p2 = o[c];
  endtask

  task automatic model_train(input int t);
    int u[NH], acc, d, inv, w, err;
    for (int j = 0; j < NH; j++) begin
      acc = 0;
      for (int k = 0; k < NH; k++) acc = radd(acc, rmul(mp[j][k], mh[k]));
      u[j] = acc;
    end
    d = int'(ONE);
    for (int j = 0; j < NH; j++) d = radd(d, rmul(mh[j], u[j]));
    inv = rdiv(int'(ONE), d);
    for (int j = 0; j < NH; j++) begin
      w = rmul(-u[j], inv);
      for (int k = 0; k < NH; k++) mp[j][k] = radd(mp[j][k], rmul(w, u[k]));
    end
    for (int j = 0; j < NH; j++) begin
      w = rmul(-u[j], inv);
      for (int c = 0; c < NO; c++) begin
        err = (c == t) ? mz[c] - int'(ONE) : mz[c];
        mbeta[j][c] = radd(mbeta[j][c], rmul(w, err));
      end
    end
  endtask

  // ------------------------------------------------------------- host port
  task automatic host_write(input mem_sel_t sel, input int addr, input int data);
    @(negedge clk);
    host_en = 1'b1; host_we = 1'b1; host_sel = sel;
    host_addr = AW'(addr); host_wdata = data;
    @(negedge clk);
    host_en = 1'b0; host_we = 1'b0;
  endtask

  task automatic host_read(input mem_sel_t sel, input int addr, output int data);
    @(negedge clk);
    host_en = 1'b1; host_we = 1'b0; host_sel = sel; host_addr = AW'(addr);
    @(negedge clk);
    host_en = 1'b0;
    data = host_rdata;
  endtask

  // ------------------------------------------------------------- latency
  function automatic int pred_cycles();
    return NH * (NI + 2) + NO * (NH + 2) + 2 * NO + 52;
  endfunction
  function automatic int train_cycles();
    return NH * (NH + 2) + NH + 50 + NH * (NH + 1) + NH * 2 * NO;
  endfunction

  // ------------------------------------------------------------- one event
  // busy cycles outside the teacher wait, counted by a monitor
  int lat = 0;
  always @(posedge clk) begin
    if (start && !busy) lat <= 0;
    else if (busy && !query_valid) lat <= lat + 1;
  end

  int ev_no = 0;
  int n_train_ev = 0;
  int wrong_due = 0;

  task automatic run_event(input bit drift_in);
    int cycles, rd, exp_cycles, t, old_idx, conf, cls_true;
    bit exp_query, exp_train_mode, labelled, skip_t, match;
    // new input: a sample of a random class, its cluster mean plus noise
    cls_true = $urandom_range(0, NO - 1);
    for (int k = 0; k < NI; k++) begin
      mx[k] = cmean[cls_true][k] + int'($urandom_range(0, 39321)) - 19660;
      host_write(MEM_X, k, mx[k]);
    end
    model_predict();
    exp_train_mode = m_train;
    if (!m_train && drift_in) begin
      m_train = 1; m_trained = 0; m_evcnt = 0; n_to_train++;
    end
    @(negedge clk);
    drift = drift_in;
    start = 1'b1;
    @(negedge clk);
    start = 1'b0;
    cycles = 1;
    labelled = 0; skip_t = 0; t = 0;
    old_idx = m_idx;
    while (!done) begin
      if (query_valid) begin
        // teacher answers after a short delay
        if (!labelled && !skip_t) begin
          n_train_ev++;
          // the host reads x back to send it to the teacher
          for (int k = 0; k < NI; k += (NI + 3) / 4) begin
            host_read(MEM_X, k, rd);
            check(rd == mx[k], "x readable while waiting for the teacher");
          end
          if (n_train_ev % 11 == 5) skip_t = 1;
          else begin
            labelled = 1;
            // every 24th answer or later, once theta has come down, is wrong
            wrong_due++;
            t = cls_true;
            if (wrong_due >= 24 && m_idx > 0 && !drift_in) begin t = (cls_true + 1) % NO; wrong_due = 0; end
          end
          repeat (3) @(negedge clk);
          label_valid = labelled;
          label_skip  = skip_t;
          label       = 8'(t);
          @(negedge clk);
          label_valid = 1'b0;
          label_skip  = 1'b0;
          cycles++;
        end else begin
          @(negedge clk);
        end
      end else begin
        @(negedge clk);
        cycles++;
      end
      if (cycles > 2000000) break;
    end
    ev_no++;
    check(done, "event finished");
    check(ev_mode == (exp_train_mode ? MODE_TRAIN : MODE_PREDICT), "event mode");
    check(pred_class == 8'(m_cls), $sformatf("class dut=%0d ref=%0d", pred_class, m_cls));
    check(p1 == m_p1, $sformatf("p1 dut=%0d ref=%0d", p1, m_p1));
    check(p2 == m_p2, $sformatf("p2 dut=%0d ref=%0d", p2, m_p2));
    exp_cycles = pred_cycles();
    if (!exp_train_mode) n_pred_only++;
    if (exp_train_mode) begin
      conf = m_p1 - m_p2;
      exp_query = !((m_trained >= int'(cfg.min_train)) && !drift_in && conf > THT[m_idx]);
      if (drift_in && m_trained >= int'(cfg.min_train) && conf > THT[m_idx]) n_drift_block++;
      check(queried == exp_query, "query decision");
      check(pruned == !exp_query, "pruned flag");
      exp_cycles += 1;
      if (!exp_query) begin
        n_prune++;
        // success: confident
        if (m_succ + 1 >= int'(cfg.x_consec)) begin
          m_succ = 0; if (m_idx < 4) m_idx++;
        end else m_succ++;
      end else begin
        n_query++;
        if (skip_t) n_tskip++;
        if (labelled) begin
          match = (t == m_cls);
          if (conf > THT[m_idx] || match) begin
            if (m_succ + 1 >= int'(cfg.x_consec)) begin
              m_succ = 0; if (m_idx < 4) m_idx++;
            end else m_succ++;
          end else begin
            m_succ = 0; if (m_idx > 0) m_idx--;
          end
          model_train(t);
          m_trained++;
          n_train++;
          exp_cycles += train_cycles();
        end
      end
      check(trained == labelled, "trained flag");
      m_evcnt++;
      if (m_evcnt >= int'(cfg.train_len)) begin
        m_train = 0; n_to_pred++;
      end
    end
    if (m_idx < old_idx) n_th_up++;
    if (m_idx > old_idx) n_th_down++;
    check(int'(theta_idx) == m_idx, $sformatf("theta idx dut=%0d ref=%0d", theta_idx, m_idx));
    check(theta == THT[m_idx], "theta value");
    check((mode == MODE_TRAIN) == m_train, "mode after event");
    check(int'(trained_cnt) == m_trained || !m_train, "trained count");
    cycles = lat;
    check(cycles == exp_cycles, $sformatf("latency dut=%0d expected=%0d", cycles, exp_cycles));
    if (labelled && (n_train % CHK_EVERY == 0 || n_train == 1)) begin
      for (int j = 0; j < NH; j++)
        for (int c = 0; c < NO; c++) begin
          host_read(MEM_BETA, j * NO_MAX + c, rd);
          check(rd == mbeta[j][c], $sformatf("beta[%0d][%0d] dut=%0d ref=%0d", j, c, rd, mbeta[j][c]));
        end
      for (int j = 0; j < NH; j++)
        for (int k = 0; k < NH; k++) begin
          host_read(MEM_P, j * NH_MAX + k, rd);
          check(rd == mp[j][k], $sformatf("P[%0d][%0d] dut=%0d ref=%0d", j, k, rd, mp[j][k]));
        end
    end
  endtask

  // ------------------------------------------------------------- watchdog
  initial begin
    repeat (200_000_000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ------------------------------------------------------------- main
  initial begin
    int rd;
    cfg = '0;
    cfg.n_in       = 16'(NI);
    cfg.n_hid      = 16'(NH);
    cfg.n_out      = 8'(NO);
    cfg.x_consec   = 8'(X_CONSEC);
    cfg.min_train  = 16'(MIN_TRAIN);
    cfg.train_len  = 16'(TRAIN_LEN);
    cfg.seed       = 16'h1D2B;
    cfg.auto_theta = 1'b1;
    cfg.theta_fixed = '0;
    for (int c = 0; c < NO; c++)
      for (int k = 0; k < NI; k++) cmean[c][k] = int'($urandom_range(0, 78643)) - 39321;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    // load beta (random) and P = I
    for (int j = 0; j < NH; j++)
      for (int c = 0; c < NO; c++) begin
        mbeta[j][c] = int'($urandom_range(0, 32768)) - 16384;   // +-0.25
        host_write(MEM_BETA, j * NO_MAX + c, mbeta[j][c]);
      end
    for (int j = 0; j < NH; j++)
      for (int k = 0; k < NH; k++) begin
        mp[j][k] = (j == k) ? int'(ONE) : 0;
        host_write(MEM_P, j * NH_MAX + k, mp[j][k]);
      end
    host_read(MEM_BETA, 5, rd);
    check(rd == mbeta[5 / NO_MAX][5 % NO_MAX], "host read-back of beta");

    // predicting mode
    run_event(1'b0);
    run_event(1'b0);
    // drift: this event still predicts, the next ones train
    run_event(1'b1);
    for (int e = 0; e < NEV; e++)
      run_event((e % 9 == 8) || (e >= NEV / 2 && e % 3 == 0));
    // second drift after returning to predicting mode
    run_event(1'b1);
    for (int e = 0; e < 4; e++) run_event(1'b0);

    $display("mechanisms: to_train=%0d query=%0d prune=%0d teacher_skip=%0d train=%0d theta_down=%0d theta_up=%0d drift_block=%0d to_predict=%0d predict_only=%0d",
             n_to_train, n_query, n_prune, n_tskip, n_train, n_th_down, n_th_up,
             n_drift_block, n_to_pred, n_pred_only);
    check(n_to_train > 0, "mechanism: drift switches to training");
    check(n_query > 0, "mechanism: teacher queried");
    check(n_prune > 0, "mechanism: sample pruned");
    check(n_tskip > 0, "mechanism: teacher unavailable");
    check(n_train > 0, "mechanism: sequential training");
    check(n_th_down > 0, "mechanism: theta lowered");
    check(n_th_up > 0, "mechanism: theta raised");
    check(n_drift_block > 0, "mechanism: drift blocks pruning");
    check(n_to_pred > 0, "mechanism: training done");
    check(n_pred_only > 0, "mechanism: prediction only");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
