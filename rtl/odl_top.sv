// odl_top: the tiny supervised on-device learning core (hashed-weight
// variant), controller plus on-chip SRAM.
//
// An edge device calls this core once per sensing event. It classifies the
// input x with a single-hidden-layer network whose input weights are not
// stored but regenerated by a 16-bit xorshift, and, after a data drift has
// switched it to training mode, retrains the output weights beta with
// OS-ELM. To save radio power it asks a nearby teacher for the label only
// when the local prediction is not confident enough (top-2 probability gap
// p1 - p2 at most an automatically tuned threshold theta).
//
// Storage is 17 macros of 8 kB at the default sizes (n = 561, N = 128,
// m = 6): one for x and beta, eight for P and eight for the P bank the next
// P is written into; the two P banks swap after every training step.
//
// Interface: cfg sets the run-time sizes and pruning parameters; a host
// writes x (and, before use, beta and P) through the host port while busy is
// low (or while query_valid is high, to read x for the teacher), then pulses
// start. done pulses when the event ends, with pred_class,
// p1, p2 and the flags queried, pruned and trained. drift is the result of
// an external drift detector; query_valid/label_valid/label_skip/label form
// the handshake with the teacher's radio link. All signals are synchronous
// to clk; rst_n is an active-low asynchronous reset (SRAM contents are not
// reset). Timing is given in odl_core.
module odl_top
  import odl_pkg::*;
#(
  parameter int unsigned N_IN_MAX  = 561,
  parameter int unsigned N_HID_MAX = 128,
  parameter int unsigned N_OUT_MAX = 6
) (
  input  logic        clk,
  input  logic        rst_n,
  input  odl_cfg_t    cfg,
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
  output logic        query_valid,
  input  logic        label_valid,
  input  logic        label_skip,
  input  logic [7:0]  label,
  input  logic        host_en,
  input  logic        host_we,
  input  mem_sel_t    host_sel,
  input  logic [AW-1:0] host_addr,
  input  fxp_t        host_wdata,
  output fxp_t        host_rdata,
  output mode_t       mode,
  output fxp_t        theta,
  output logic [2:0]  theta_idx,
  output logic [15:0] trained_cnt
);

  mem_req_t     xb_req;
  logic [W-1:0] xb_rdata;
  mem_req_t     pb_req   [2];
  logic [W-1:0] pb_rdata [2];

  odl_core #(
    .N_IN_MAX(N_IN_MAX), .N_HID_MAX(N_HID_MAX), .N_OUT_MAX(N_OUT_MAX)
  ) u_core (
    .clk, .rst_n, .cfg, .start, .drift, .busy, .done, .ev_mode, .pred_class,
    .p1, .p2, .queried, .pruned, .trained, .query_valid, .label_valid,
    .label_skip, .label, .host_en, .host_we, .host_sel, .host_addr,
    .host_wdata, .host_rdata, .xb_req, .xb_rdata, .pb_req, .pb_rdata,
    .mode, .theta, .theta_idx, .trained_cnt
  );

  // x and beta share one bank
  sram_bank #(.DEPTH(N_IN_MAX + N_HID_MAX * N_OUT_MAX)) u_xb (
    .clk(clk), .req(xb_req), .rdata(xb_rdata)
  );

  // the two P banks
  for (genvar g = 0; g < 2; g++) begin : g_p
    sram_bank #(.DEPTH(N_HID_MAX * N_HID_MAX)) u_p (
      .clk(clk), .req(pb_req[g]), .rdata(pb_rdata[g])
    );
  end

endmodule
