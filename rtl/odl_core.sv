// odl_core: controller and datapath of the supervised on-device learning core.
//
// One event (a pulse on start, with a new input vector x already in memory)
// runs the top-level algorithm: prediction, and in training mode label
// acquisition with automatic data pruning and one OS-ELM sequential training
// step. A single state machine drives one multiply-add unit (fxp_mac) and one
// division unit (fxp_div) through these phases:
//
//   prediction   H_j = G1(sum_k x_k alpha_kj + b_j), alpha and b generated by
//                a 16-bit xorshift in the order alpha_0j..alpha_(n-1)j, b_j;
//                z_c = sum_j H_j beta_jc; O = softmax(z) (one division for
//                1/sum); class = argmax O, p1/p2 = two largest O.
//   labelling    in training mode prune_ctrl decides whether to ask the
//                teacher; if it does, query_valid stays high until
//                label_valid (label t) or label_skip (teacher unavailable:
//                the sample is skipped).
//   training     u = P h'; d = 1 + h u; inv = 1/d;
//                P_new[j][k] = P[j][k] - (u_j inv) u_k  (written to the other
//                P bank, then the banks swap roles);
//                beta[j][c] += (u_j inv)(y_c - z_c), y = one-hot(t).
//
// The training step is the published OS-ELM update for one sample; it uses
// P_i h' = u/d, which follows from the update itself, instead of a second
// pass over P_i. All loops stream: a memory read is issued one cycle ahead of
// its use, so every multiply-add takes one cycle. Sizes n, N and m are read
// from cfg at each start and may be anything up to the *_MAX parameters.
// Memory map: x at XB[0..n-1], beta[j][c] at XB[N_IN_MAX + j*N_OUT_MAX + c],
// P[j][k] at word j*N_HID_MAX + k of the current P bank. While idle, a host
// reaches x, beta and the current P through the host port (read data one
// cycle after the request); the port also works while query_valid is high,
// so the host can read x and send it to the teacher. Latency of one event, in cycles with busy high,
// not counting cycles with query_valid high: prediction
// N(n+2) + m(N+2) + 2m + 52 (the division takes 49 of them); a
// training-mode event adds 1 for the pruning decision, and a trained sample
// adds N(N+2) + N + 50 + N(N+1) + 2Nm. At n = 561, N = 128, m = 6 that is
// 72,908 cycles for a prediction and 34,866 more for a training step.
// Fixed-point format, activation functions, memory split and handshakes are
// this design's choices.
module odl_core
  import odl_pkg::*;
#(
  parameter int unsigned N_IN_MAX  = 561,
  parameter int unsigned N_HID_MAX = 128,
  parameter int unsigned N_OUT_MAX = 6
) (
  input  logic        clk,
  input  logic        rst_n,
  input  odl_cfg_t    cfg,
  // event
  input  logic        start,
  input  logic        drift,
  output logic        busy,
  output logic        done,
  output mode_t       ev_mode,
  output logic [7:0]  pred_class,
  output fxp_t        p1,
  output fxp_t        p2,
  output logic        queried,
  output logic        pruned,
  output logic        trained,
  // teacher
  output logic        query_valid,
  input  logic        label_valid,
  input  logic        label_skip,
  input  logic [7:0]  label,
  // host access while idle
  input  logic        host_en,
  input  logic        host_we,
  input  mem_sel_t    host_sel,
  input  logic [AW-1:0] host_addr,
  input  fxp_t        host_wdata,
  output fxp_t        host_rdata,
  // memories: XB holds x and beta, PB[0]/PB[1] the two P banks
  output mem_req_t    xb_req,
  input  logic [W-1:0] xb_rdata,
  output mem_req_t    pb_req [2],
  input  logic [W-1:0] pb_rdata [2],
  // status
  output mode_t       mode,
  output fxp_t        theta,
  output logic [2:0]  theta_idx,
  output logic [15:0] trained_cnt
);

  localparam int unsigned BETA_BASE = N_IN_MAX;
  localparam int unsigned HW = $clog2(N_HID_MAX);
  localparam int unsigned OW = (N_OUT_MAX > 1) ? $clog2(N_OUT_MAX) : 1;

  typedef enum logic [4:0] {
    S_IDLE, S_H_COL, S_H_MAC, S_H_BIAS,
    S_O_COL, S_O_MAC, S_O_STORE,
    S_SM_EXP, S_SM_DIV, S_SM_WAIT, S_SM_NORM, S_TOP2,
    S_LABEL, S_WAIT_T,
    S_U_COL, S_U_MAC, S_U_STORE, S_D, S_D_DIV, S_D_WAIT,
    S_P_ROW, S_P_UPD, S_B_ROW, S_B_RD, S_B_WR, S_DONE
  } state_t;

  state_t state;

  // ---------------------------------------------------------------- vectors
  fxp_t h_vec [N_HID_MAX];   // hidden outputs H
  fxp_t u_vec [N_HID_MAX];   // u = P h'
  fxp_t z_vec [N_OUT_MAX];   // output logits h beta
  fxp_t e_vec [N_OUT_MAX];   // exp(z - max z)
  fxp_t o_vec [N_OUT_MAX];   // probabilities O

  logic [15:0] j, k;         // row / column counters
  logic [7:0]  c;            // class counter
  fxp_t        inv;          // result of the last division
  fxp_t        wj;           // -(u_j / d) for the current row
  logic [7:0]  t_lbl;        // teacher label
  logic        pcur;         // which P bank holds the current P

  // configuration sampled at start
  logic [15:0] n_in, n_hid;
  logic [7:0]  n_out;

  // ------------------------------------------------------- arithmetic units
  logic mac_use_acc, mac_en;
  fxp_t mac_a, mac_b, mac_c, mac_y, mac_acc;

  fxp_mac u_mac (
    .clk(clk), .rst_n(rst_n), .use_acc(mac_use_acc), .en(mac_en),
    .a(mac_a), .b(mac_b), .c(mac_c), .y(mac_y), .acc(mac_acc)
  );

  logic div_start, div_busy, div_done;
  fxp_t div_b, div_q;

  fxp_div u_div (
    .clk(clk), .rst_n(rst_n), .start(div_start), .a(FXP_ONE), .b(div_b),
    .busy(div_busy), .done(div_done), .q(div_q)
  );

  logic        xs_load, xs_step;
  logic [15:0] xs_state;
  fxp_t        xs_w;

  xorshift16 u_hash (
    .clk(clk), .rst_n(rst_n), .load(xs_load), .seed(cfg.seed),
    .step(xs_step), .state(xs_state), .weight(xs_w)
  );

  fxp_t g1_in, g1_out;
  assign g1_in = fxp_add(mac_acc, xs_w);   // sum + bias b_j
  sigmoid_plan u_g1 (.x(g1_in), .y(g1_out));

  fxp_t z_max, z_cur, exp_in, exp_out;
  always_comb begin
    z_max = z_vec[0];
    for (int i = 1; i < N_OUT_MAX; i++)
      if (i < int'(n_out) && z_vec[i] > z_max) z_max = z_vec[i];
    z_cur  = z_vec[c[OW-1:0]];
    exp_in = z_cur - z_max;
  end
  exp2_approx u_g2 (.z(exp_in), .e(exp_out));

  // top-2 of the probabilities
  fxp_t       t2_p1, t2_p2;
  logic [7:0] t2_cls;
  always_comb begin
    t2_p1  = o_vec[0];
    t2_p2  = '0;
    t2_cls = '0;
    for (int i = 1; i < N_OUT_MAX; i++) begin
      if (i < int'(n_out)) begin
        if (o_vec[i] > t2_p1) begin
          t2_p2  = t2_p1;
          t2_p1  = o_vec[i];
          t2_cls = 8'(i);
        end else if (o_vec[i] > t2_p2) begin
          t2_p2  = o_vec[i];
        end
      end
    end
  end

  // ------------------------------------------------------ mode and pruning
  logic ev_start, ev_done, tr_pulse;
  logic [15:0] ev_cnt;

  mode_ctrl u_mode (
    .clk(clk), .rst_n(rst_n), .train_len(cfg.train_len),
    .ev_start(ev_start), .drift(drift), .trained(tr_pulse), .ev_done(ev_done),
    .mode(mode), .trained_cnt(trained_cnt), .ev_cnt(ev_cnt)
  );

  logic pr_query, pr_update, pr_match;
  logic [7:0] pr_succ;

  prune_ctrl u_prune (
    .clk(clk), .rst_n(rst_n),
    .auto_theta(cfg.auto_theta), .theta_fixed(cfg.theta_fixed),
    .x_consec(cfg.x_consec), .min_train(cfg.min_train),
    .trained_cnt(trained_cnt), .drift(drift), .conf(p1 - p2),
    .query(pr_query), .update(pr_update), .match(pr_match),
    .theta(theta), .theta_idx(theta_idx), .succ_cnt(pr_succ)
  );

  // ----------------------------------------------------------- addressing
  function automatic logic [AW-1:0] x_addr(logic [15:0] kk);
    return AW'(kk);
  endfunction
  function automatic logic [AW-1:0] b_addr(logic [15:0] jj, logic [7:0] cc);
    return AW'(BETA_BASE + int'(jj) * N_OUT_MAX + int'(cc));
  endfunction
  function automatic logic [AW-1:0] p_addr(logic [15:0] jj, logic [15:0] kk);
    return AW'(int'(jj) * N_HID_MAX + int'(kk));
  endfunction

  // output error z_c - y_c for the beta update
  fxp_t err_c;
  assign err_c = (c == t_lbl) ? (z_cur - FXP_ONE) : z_cur;

  // ------------------------------------------------ combinational control
  mem_req_t xb_fsm, pr_fsm, pw_fsm;   // XB, read of current P, write of next P

  logic last_k_in, last_k_hid, last_j, last_c;
  assign last_k_in  = (k + 16'd1 >= n_in);
  assign last_k_hid = (k + 16'd1 >= n_hid);
  assign last_j     = (j + 16'd1 >= n_hid);
  assign last_c     = (c + 8'd1 >= n_out);

  always_comb begin
    mac_use_acc = 1'b0;
    mac_en      = 1'b0;
    mac_a       = '0;
    mac_b       = '0;
    mac_c       = '0;
    div_start   = 1'b0;
    div_b       = mac_acc;
    xs_load     = 1'b0;
    xs_step     = 1'b0;
    ev_start    = 1'b0;
    pr_update   = 1'b0;
    pr_match    = 1'b0;
    xb_fsm      = '0;
    pr_fsm      = '0;
    pw_fsm      = '0;

    unique case (state)
      S_IDLE: begin
        if (start) begin
          ev_start = 1'b1;
          xs_load  = 1'b1;
        end
      end
      // ---- hidden layer
      S_H_COL: begin
        mac_en      = 1'b1;                 // acc <= 0
        xb_fsm      = '{en: 1'b1, we: 1'b0, addr: x_addr('0), wdata: '0};
      end
      S_H_MAC: begin
        mac_use_acc = 1'b1;
        mac_en      = 1'b1;
        mac_a       = fxp_t'(xb_rdata);
        mac_b       = xs_w;
        xs_step     = 1'b1;
        if (!last_k_in)
          xb_fsm = '{en: 1'b1, we: 1'b0, addr: x_addr(k + 16'd1), wdata: '0};
      end
      S_H_BIAS: begin
        xs_step     = 1'b1;                 // b_j consumed
      end
      // ---- output layer
      S_O_COL: begin
        mac_en      = 1'b1;                 // acc <= 0
        xb_fsm      = '{en: 1'b1, we: 1'b0, addr: b_addr('0, c), wdata: '0};
      end
      S_O_MAC: begin
        mac_use_acc = 1'b1;
        mac_en      = 1'b1;
        mac_a       = h_vec[j[HW-1:0]];
        mac_b       = fxp_t'(xb_rdata);
        if (!last_j)
          xb_fsm = '{en: 1'b1, we: 1'b0, addr: b_addr(j + 16'd1, c), wdata: '0};
      end
      S_O_STORE: begin
        if (last_c) mac_en = 1'b1;          // acc <= 0 for the softmax sum
      end
      // ---- softmax
      S_SM_EXP: begin
        mac_use_acc = 1'b1;
        mac_en      = 1'b1;
        mac_a       = exp_out;
        mac_b       = FXP_ONE;
      end
      S_SM_DIV: div_start = 1'b1;
      S_SM_NORM: begin
        mac_a       = e_vec[c[OW-1:0]];
        mac_b       = inv;
      end
      // ---- label acquisition
      S_LABEL: begin
        if (!pr_query) pr_update = 1'b1;    // pruned: confident sample
      end
      S_WAIT_T: begin
        if (label_valid) begin
          pr_update = 1'b1;
          pr_match  = (label == pred_class);
        end
      end
      // ---- u = P h'
      S_U_COL: begin
        mac_en = 1'b1;                      // acc <= 0
        pr_fsm = '{en: 1'b1, we: 1'b0, addr: p_addr(j, '0), wdata: '0};
      end
      S_U_MAC: begin
        mac_use_acc = 1'b1;
        mac_en      = 1'b1;
        mac_a       = fxp_t'(pb_rdata[pcur]);
        mac_b       = h_vec[k[HW-1:0]];
        if (!last_k_hid)
          pr_fsm = '{en: 1'b1, we: 1'b0, addr: p_addr(j, k + 16'd1), wdata: '0};
      end
      S_U_STORE: begin
        if (last_j) begin
          mac_en = 1'b1;                    // acc <= 1
          mac_c  = FXP_ONE;
        end
      end
      // ---- d = 1 + h u, inv = 1/d
      S_D: begin
        mac_use_acc = 1'b1;
        mac_en      = 1'b1;
        mac_a       = h_vec[j[HW-1:0]];
        mac_b       = u_vec[j[HW-1:0]];
      end
      S_D_DIV: div_start = 1'b1;
      // ---- P update, row by row into the other bank
      S_P_ROW: begin
        mac_a  = -u_vec[j[HW-1:0]];
        mac_b  = inv;
        pr_fsm = '{en: 1'b1, we: 1'b0, addr: p_addr(j, '0), wdata: '0};
      end
      S_P_UPD: begin
        mac_c  = fxp_t'(pb_rdata[pcur]);
        mac_a  = wj;
        mac_b  = u_vec[k[HW-1:0]];
        pw_fsm = '{en: 1'b1, we: 1'b1, addr: p_addr(j, k), wdata: mac_y};
        if (!last_k_hid)
          pr_fsm = '{en: 1'b1, we: 1'b0, addr: p_addr(j, k + 16'd1), wdata: '0};
      end
      // ---- beta update (P_i h' = u/d)
      S_B_ROW: begin
        mac_a  = -u_vec[j[HW-1:0]];
        mac_b  = inv;
        xb_fsm = '{en: 1'b1, we: 1'b0, addr: b_addr(j, '0), wdata: '0};
      end
      S_B_RD: begin
        xb_fsm = '{en: 1'b1, we: 1'b0, addr: b_addr(j, c), wdata: '0};
      end
      S_B_WR: begin
        mac_c  = fxp_t'(xb_rdata);
        mac_a  = wj;
        mac_b  = err_c;
        xb_fsm = '{en: 1'b1, we: 1'b1, addr: b_addr(j, c), wdata: mac_y};
      end
      default: ;
    endcase
  end

  // -------------------------------------------------- memory port muxing
  logic host_ok;
  // The memories are free while idle and while waiting for the teacher (the
  // host then reads x to send it).
  assign host_ok = host_en && (((state == S_IDLE) && !start) || (state == S_WAIT_T));

  always_comb begin
    xb_req    = xb_fsm;
    pb_req[0] = '0;
    pb_req[1] = '0;
    if (pr_fsm.en) pb_req[pcur]  = pr_fsm;
    if (pw_fsm.en) pb_req[!pcur] = pw_fsm;
    if (host_ok) begin
      unique case (host_sel)
        MEM_X:    xb_req = '{en: 1'b1, we: host_we, addr: host_addr, wdata: host_wdata};
        MEM_BETA: xb_req = '{en: 1'b1, we: host_we, addr: AW'(BETA_BASE) + host_addr,
                             wdata: host_wdata};
        default:  pb_req[pcur] = '{en: 1'b1, we: host_we, addr: host_addr,
                                   wdata: host_wdata};
      endcase
    end
  end

  mem_sel_t host_sel_q;
  always_ff @(posedge clk) begin
    if (host_ok) host_sel_q <= host_sel;
  end
  assign host_rdata = (host_sel_q == MEM_P) ? fxp_t'(pb_rdata[pcur])
                                            : fxp_t'(xb_rdata);

  // ------------------------------------------------------ sequencing
  assign ev_done     = (state == S_DONE) && (ev_mode == MODE_TRAIN);
  assign tr_pulse    = (state == S_B_WR) && last_c && last_j;
  assign busy        = (state != S_IDLE);
  assign query_valid = (state == S_WAIT_T);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state      <= S_IDLE;
      j          <= '0;
      k          <= '0;
      c          <= '0;
      inv        <= '0;
      wj         <= '0;
      t_lbl      <= '0;
      pcur       <= 1'b0;
      n_in       <= '0;
      n_hid      <= '0;
      n_out      <= '0;
      ev_mode    <= MODE_PREDICT;
      pred_class <= '0;
      p1         <= '0;
      p2         <= '0;
      queried    <= 1'b0;
      pruned     <= 1'b0;
      trained    <= 1'b0;
      done       <= 1'b0;
      for (int i = 0; i < N_HID_MAX; i++) begin
        h_vec[i] <= '0;
        u_vec[i] <= '0;
      end
      for (int i = 0; i < N_OUT_MAX; i++) begin
        z_vec[i] <= '0;
        e_vec[i] <= '0;
        o_vec[i] <= '0;
      end
    end else begin
      done <= 1'b0;
      unique case (state)
        S_IDLE: begin
          if (start) begin
            ev_mode <= mode;                // mode before any drift switch
            n_in    <= cfg.n_in;
            n_hid   <= cfg.n_hid;
            n_out   <= cfg.n_out;
            queried <= 1'b0;
            pruned  <= 1'b0;
            trained <= 1'b0;
            j       <= '0;
            state   <= S_H_COL;
          end
        end
        S_H_COL: begin
          k     <= '0;
          state <= S_H_MAC;
        end
        S_H_MAC: begin
          k <= k + 16'd1;
          if (last_k_in) state <= S_H_BIAS;
        end
        S_H_BIAS: begin
          h_vec[j[HW-1:0]] <= g1_out;
          if (last_j) begin
            c     <= '0;
            state <= S_O_COL;
          end else begin
            j     <= j + 16'd1;
            state <= S_H_COL;
          end
        end
        S_O_COL: begin
          j     <= '0;
          state <= S_O_MAC;
        end
        S_O_MAC: begin
          if (last_j) state <= S_O_STORE;
          else        j <= j + 16'd1;
        end
        S_O_STORE: begin
          z_vec[c[OW-1:0]] <= mac_acc;
          if (last_c) begin
            c     <= '0;
            state <= S_SM_EXP;
          end else begin
            c     <= c + 8'd1;
            state <= S_O_COL;
          end
        end
        S_SM_EXP: begin
          e_vec[c[OW-1:0]] <= exp_out;
          if (last_c) state <= S_SM_DIV;
          else        c <= c + 8'd1;
        end
        S_SM_DIV: state <= S_SM_WAIT;
        S_SM_WAIT: begin
          if (div_done) begin
            inv   <= div_q;
            c     <= '0;
            state <= S_SM_NORM;
          end
        end
        S_SM_NORM: begin
          o_vec[c[OW-1:0]] <= mac_y;
          if (last_c) state <= S_TOP2;
          else        c <= c + 8'd1;
        end
        S_TOP2: begin
          pred_class <= t2_cls;
          p1         <= t2_p1;
          p2         <= t2_p2;
          state      <= (ev_mode == MODE_TRAIN) ? S_LABEL : S_DONE;
        end
        S_LABEL: begin
          if (pr_query) begin
            queried <= 1'b1;
            state   <= S_WAIT_T;
          end else begin
            pruned  <= 1'b1;
            state   <= S_DONE;
          end
        end
        S_WAIT_T: begin
          if (label_valid) begin
            t_lbl <= label;
            j     <= '0;
            state <= S_U_COL;
          end else if (label_skip) begin
            state <= S_DONE;
          end
        end
        S_U_COL: begin
          k     <= '0;
          state <= S_U_MAC;
        end
        S_U_MAC: begin
          k <= k + 16'd1;
          if (last_k_hid) state <= S_U_STORE;
        end
        S_U_STORE: begin
          u_vec[j[HW-1:0]] <= mac_acc;
          if (last_j) begin
            j     <= '0;
            state <= S_D;
          end else begin
            j     <= j + 16'd1;
            state <= S_U_COL;
          end
        end
        S_D: begin
          if (last_j) state <= S_D_DIV;
          else        j <= j + 16'd1;
        end
        S_D_DIV: state <= S_D_WAIT;
        S_D_WAIT: begin
          if (div_done) begin
            inv   <= div_q;
            j     <= '0;
            state <= S_P_ROW;
          end
        end
        S_P_ROW: begin
          wj    <= mac_y;
          k     <= '0;
          state <= S_P_UPD;
        end
        S_P_UPD: begin
          k <= k + 16'd1;
          if (last_k_hid) begin
            if (last_j) begin
              pcur  <= !pcur;
              j     <= '0;
              state <= S_B_ROW;
            end else begin
              j     <= j + 16'd1;
              state <= S_P_ROW;
            end
          end
        end
        S_B_ROW: begin
          wj    <= mac_y;
          c     <= '0;
          state <= S_B_WR;
        end
        S_B_RD: state <= S_B_WR;
        S_B_WR: begin
          if (!last_c) begin
            c     <= c + 8'd1;
            state <= S_B_RD;
          end else if (!last_j) begin
            j     <= j + 16'd1;
            state <= S_B_ROW;
          end else begin
            trained <= 1'b1;
            state   <= S_DONE;
          end
        end
        S_DONE: begin
          done  <= 1'b1;
          state <= S_IDLE;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  // ------------------------------------------------------------ checks
  a_cfg_fits: assert property (@(posedge clk) disable iff (!rst_n)
    (state == S_IDLE && start) |->
      (cfg.n_in != 0 && cfg.n_in <= 16'(N_IN_MAX) && cfg.n_hid != 0 &&
       cfg.n_hid <= 16'(N_HID_MAX) && cfg.n_out != 0 && cfg.n_out <= 8'(N_OUT_MAX)))
    else $error("odl_core: configuration exceeds the built sizes");

  a_label_range: assert property (@(posedge clk) disable iff (!rst_n)
    (state == S_WAIT_T && label_valid) |-> (label < n_out))
    else $error("odl_core: teacher label out of range");

  a_div_idle: assert property (@(posedge clk) disable iff (!rst_n)
    div_start |-> !div_busy)
    else $error("odl_core: division started while busy");

endmodule
