// fpdeep_node -- one FPGA of the cluster, allocated to a share of one CONV
// layer under input-channel partitioning (it owns input channels
// BASE_IC .. BASE_IC+S_IC-1 of layer LAYER and all OC output channels).
//
// Forward: the upper link keeps the node's activations (Activation RAM),
// bypasses the rest, and feeds the partial sums of the preceding node to the
// FP module, whose Partial Activation Buffer adds the node's own partial
// results and sends the updated partial sums (or, on the last node of the
// layer, the finished, activated outputs) on to the next node.
// Backward: the lower link gathers the errors of the layer's outputs and
// passes them on; EB turns them into errors of the node's input channels,
// sent to the preceding node ahead of transit traffic; PG multiplies them
// with the activations read back from the Activation RAM and sums the
// gradients in the Local Gradient Buffer. After 2^LOG2_BATCH samples the
// LGB updates the LPRAM, as soon as EB has finished that sample.
// Parameter balancing: the last REMOTE_ROWS rows of this node's weights are
// held by node HOLDER; their gradients go back to it as GRAD packets and it
// returns the updated weights as PARAM packets. A node that holds weights
// for another (HOLD_WORDS > 0) has a BPRAM and a BGB for them; it sends them
// to node HOLD_DST at address HOLD_BASE when bal_push pulses and after
// every update.
// All four link ports are valid/ready packet streams (fpdeep_pkg::pkt_t).
// Parameter words (PARAM packets) loaded through fwd_in address the LPRAM
// (0 .. G*P*S_IC*K*K-1) and, above that, the BPRAM.
module fpdeep_node
  import fpdeep_pkg::*;
#(
  parameter int NODE_ID     = 0,
  parameter int LAYER       = 1,
  parameter int BASE_IC     = 0,
  parameter bit FIRST       = 1'b1,
  parameter bit LAST        = 1'b1,
  parameter int K           = 3,
  parameter int W           = 7,
  parameter int S_IC        = 4,
  parameter int OC          = 8,
  parameter int P           = 4,
  parameter int LOG2_BATCH  = 10,
  parameter int ACT_DEPTH   = 196,
  parameter int REMOTE_ROWS = 0,
  parameter int HOLDER      = 0,
  parameter int HOLD_WORDS  = 0,
  parameter int HOLD_DST    = 0,
  parameter int HOLD_BASE   = 0,
  parameter bit RELU        = 1'b1,
  parameter int NORM_SHIFT  = 0
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        fwd_in_valid,
  output logic        fwd_in_ready,
  input  pkt_t        fwd_in_pkt,
  output logic        fwd_out_valid,
  input  logic        fwd_out_ready,
  output pkt_t        fwd_out_pkt,
  input  logic        bwd_in_valid,
  output logic        bwd_in_ready,
  input  pkt_t        bwd_in_pkt,
  output logic        bwd_out_valid,
  input  logic        bwd_out_ready,
  output pkt_t        bwd_out_pkt,
  input  logic        bal_push,
  output node_stats_t stats
);
  localparam int G          = OC / P;
  localparam int GA         = (G > 1) ? $clog2(G) : 1;
  localparam int ROW_W      = P*S_IC*K*K;
  localparam int LP_WORDS   = G*ROW_W;
  localparam int LA         = $clog2(LP_WORDS);
  localparam int LOCAL_ROWS = G - REMOTE_ROWS;
  localparam int HW         = (HOLD_WORDS > 0) ? HOLD_WORDS : 1;
  localparam int HA         = (HW > 1) ? $clog2(HW) : 1;

  // ---------------- forward link ----------------
  logic act_wv, act_wr;
  logic [S_IC-1:0][DW-1:0] act_wd;
  logic psum_v, psum_r;
  pkt_t psum_p;
  logic lp_we; logic [LA-1:0] lp_wa; word_t lp_wd;
  logic bp_we; logic [HA-1:0] bp_wa; word_t bp_wd;
  logic fpo_v, fpo_r; pkt_t fpo_p;
  logic par_v, par_r; pkt_t par_p;

  fwd_link #(.NODE_ID(NODE_ID), .LAYER(LAYER), .BASE_IC(BASE_IC), .S_IC(S_IC), .LAST(LAST),
             .LP_WORDS(LP_WORDS), .BP_WORDS(HW)) u_fwd (
    .clk, .rst_n,
    .in_valid(fwd_in_valid), .in_ready(fwd_in_ready), .in_pkt(fwd_in_pkt),
    .act_valid(act_wv), .act_ready(act_wr), .act_vec(act_wd),
    .psum_valid(psum_v), .psum_ready(psum_r), .psum_pkt(psum_p),
    .lp_we, .lp_wa, .lp_wd, .bp_we, .bp_wa, .bp_wd,
    .loc_valid(fpo_v), .loc_ready(fpo_r), .loc_pkt(fpo_p),
    .par_valid(par_v), .par_ready(par_r), .par_pkt(par_p),
    .out_valid(fwd_out_valid), .out_ready(fwd_out_ready), .out_pkt(fwd_out_pkt),
    .n_act_bypass(stats.act_bypass), .n_act_taken(stats.act_taken),
    .n_param_loaded(stats.param_loaded), .n_stall(stats.fwd_stall));

  // ---------------- memories ----------------
  logic fa_v, fa_r, ba_v, ba_r;
  logic [S_IC-1:0][DW-1:0] fa_d, ba_d;

  act_ram #(.C(S_IC), .DEPTH(ACT_DEPTH)) u_act (
    .clk, .rst_n, .wr_valid(act_wv), .wr_ready(act_wr), .wr_data(act_wd),
    .fp_valid(fa_v), .fp_ready(fa_r), .fp_data(fa_d),
    .bp_valid(ba_v), .bp_ready(ba_r), .bp_data(ba_d), .used());

  logic [GA-1:0] fp_row, eb_row, up_row;
  logic [ROW_W-1:0][DW-1:0] fp_w, eb_w, up_w, up_wd;
  logic up_we;

  lpram #(.K(K), .S_IC(S_IC), .P(P), .ROWS(G)) u_lpram (
    .clk, .fp_row, .fp_data(fp_w), .eb_row, .eb_data(eb_w), .up_row, .up_data(up_w),
    .row_we(up_we), .row_wa(up_row), .row_wd(up_wd),
    .word_we(lp_we), .word_wa(lp_wa), .word_wd(lp_wd));

  // ---------------- forward propagation ----------------
  fp_module #(.K(K), .W(W), .S_IC(S_IC), .OC(OC), .P(P), .FIRST(FIRST), .LAST(LAST),
              .LAYER(LAYER), .RELU(RELU), .NORM_SHIFT(NORM_SHIFT)) u_fp (
    .clk, .rst_n, .act_valid(fa_v), .act_ready(fa_r), .act_vec(fa_d),
    .lp_row(fp_row), .lp_data(fp_w),
    .rin_valid(psum_v), .rin_ready(psum_r), .rin_pkt(psum_p),
    .out_valid(fpo_v), .out_ready(fpo_r), .out_pkt(fpo_p),
    .n_windows(stats.fp_windows), .n_clamped(stats.relu_clamped), .n_psum(stats.psum_added));

  // ---------------- backward link and error fork ----------------
  logic ev, er;
  logic [OC-1:0][DW-1:0] evec;
  logic [15:0] epos;
  logic bg_we; logic [HA-1:0] bg_wa; word_t bg_wd;
  logic own_v, own_r; pkt_t own_p;
  logic gr_v, gr_r; pkt_t gr_p;

  bwd_link #(.NODE_ID(NODE_ID), .LAYER(LAYER), .FIRST(FIRST), .OC(OC), .BG_WORDS(HW)) u_bwd (
    .clk, .rst_n,
    .in_valid(bwd_in_valid), .in_ready(bwd_in_ready), .in_pkt(bwd_in_pkt),
    .err_valid(ev), .err_ready(er), .err_vec(evec), .err_pos(epos),
    .bg_we, .bg_wa, .bg_wd,
    .own_valid(own_v), .own_ready(own_r), .own_pkt(own_p),
    .grad_valid(gr_v), .grad_ready(gr_r), .grad_pkt(gr_p),
    .out_valid(bwd_out_valid), .out_ready(bwd_out_ready), .out_pkt(bwd_out_pkt),
    .n_err_bypass(stats.err_bypass), .n_own_first(stats.own_err_first));

  logic eb_idle;
  logic qe_in_r, qp_in_r, qe_v, qe_r, qp_v, qp_r;
  logic [OC-1:0][DW-1:0] qe_d, qp_vec;
  logic [15:0] qp_pos;
  assign er = qe_in_r && qp_in_r;

  sync_fifo #(.WIDTH(OC*DW), .DEPTH(4)) u_eq_eb (
    .clk, .rst_n, .in_valid(ev && er), .in_ready(qe_in_r), .in_data(evec),
    .out_valid(qe_v), .out_ready(qe_r), .out_data(qe_d), .count());
  sync_fifo #(.WIDTH(OC*DW+16), .DEPTH(4)) u_eq_pg (
    .clk, .rst_n, .in_valid(ev && er), .in_ready(qp_in_r), .in_data({epos, evec}),
    .out_valid(qp_v), .out_ready(qp_r), .out_data({qp_pos, qp_vec}), .count());

  // ---------------- error back-propagation ----------------
  eb_module #(.K(K), .W(W), .S_IC(S_IC), .OC(OC), .P(P), .BASE_IC(BASE_IC), .LAYER(LAYER)) u_eb (
    .clk, .rst_n, .err_valid(qe_v), .err_ready(qe_r), .err_vec(qe_d),
    .lp_row(eb_row), .lp_data(eb_w),
    .out_valid(own_v), .out_ready(own_r), .out_pkt(own_p), .n_windows(stats.eb_windows),
    .idle(eb_idle));

  // ---------------- parameter gradients ----------------
  logic acc_v, acc_r, upd, upd_pend;
  logic [GA-1:0] acc_row;
  logic [ROW_W-1:0][DW-1:0] acc_vec;

  pg_module #(.K(K), .W(W), .S_IC(S_IC), .OC(OC), .P(P), .LOG2_BATCH(LOG2_BATCH)) u_pg (
    .clk, .rst_n, .act_valid(ba_v), .act_ready(ba_r), .act_vec(ba_d),
    .err_valid(qp_v), .err_ready(qp_r), .err_vec(qp_vec), .err_pos(qp_pos),
    .acc_valid(acc_v), .acc_ready(acc_r), .acc_row, .acc_vec,
    .update(upd), .n_windows(stats.pg_windows));

  lgb #(.K(K), .S_IC(S_IC), .P(P), .ROWS(G), .LOCAL_ROWS(LOCAL_ROWS),
        .LOG2_BATCH(LOG2_BATCH), .HOLDER(HOLDER)) u_lgb (
    .clk, .rst_n, .acc_valid(acc_v), .acc_ready(acc_r), .acc_row, .acc_vec,
    .update_start(upd_pend && eb_idle && !qe_v), .busy(),
    .lp_row(up_row), .lp_rdata(up_w), .lp_we(up_we), .lp_wdata(up_wd),
    .grad_valid(gr_v), .grad_ready(gr_r), .grad_pkt(gr_p), .n_updates(stats.lpram_updates));

  // The update waits until EB has finished the errors of the last sample of
  // the mini-batch, so that EB never reads half-updated weights.
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)                          upd_pend <= 1'b0;
    else if (upd)                        upd_pend <= 1'b1;
    else if (upd_pend && eb_idle && !qe_v) upd_pend <= 1'b0;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) stats.grad_sent <= '0;
    else if (gr_v && gr_r) stats.grad_sent <= stats.grad_sent + 1;
  end

  // ---------------- parameter balancing (holder side) ----------------
  if (HOLD_WORDS > 0) begin : g_hold
    logic upd_v, done;
    logic [HA-1:0] upd_a;
    word_t upd_d;

    bgb #(.WORDS(HOLD_WORDS), .LOG2_BATCH(LOG2_BATCH)) u_bgb (
      .clk, .rst_n, .in_valid(bg_we), .in_addr(bg_wa), .in_data(bg_wd),
      .upd_valid(upd_v), .upd_addr(upd_a), .upd_delta(upd_d), .done);

    bpram #(.WORDS(HOLD_WORDS), .DST(HOLD_DST), .DST_BASE(HOLD_BASE)) u_bpram (
      .clk, .rst_n, .word_we(bp_we), .word_wa(bp_wa), .word_wd(bp_wd),
      .upd_valid(upd_v), .upd_addr(upd_a), .upd_delta(upd_d),
      .push_start(bal_push || done), .push_busy(),
      .out_valid(par_v), .out_ready(par_r), .out_pkt(par_p));

    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n) begin
        stats.param_sent <= '0; stats.bpram_updates <= '0;
      end else begin
        if (par_v && par_r) stats.param_sent <= stats.param_sent + 1;
        if (done)           stats.bpram_updates <= stats.bpram_updates + 1;
      end
    end
  end else begin : g_nohold
    assign par_v = 1'b0;
    assign par_p = '0;
    assign stats.param_sent    = '0;
    assign stats.bpram_updates = '0;
  end
endmodule
