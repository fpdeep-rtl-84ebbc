// bwd_link -- the lower pair of interconnection modules (backward
// direction: errors and gradients).
//
// Receive side, from the succeeding node:
//  * errors of layer LAYER (the outputs this layer produced) are gathered,
//    OC channels per pixel, into one error vector for the EB and PG modules
//    and, unless this is the first node of the layer, also passed on to the
//    preceding node, which needs them too; a packet is only taken when both
//    can accept it;
//  * gradient words for this node go to the Balanced Gradient Buffer;
//  * everything else (errors for earlier layers computed by later nodes,
//    gradients for other nodes) is bypassed.
// Send side: the errors computed by this node's EB module go first; only
// when it has none waiting do bypassed packets, and then gradient words from
// the Local Gradient Buffer, get the link. The output is registered.
//
// Origin: the receive/bypass roles and the rule that a node sends its own
// errors before transit traffic follow FPDeep; packets, queue depth and the
// priority of gradients after bypass traffic are this implementation's
// choices.
module bwd_link
  import fpdeep_pkg::*;
#(
  parameter int NODE_ID   = 0,
  parameter int LAYER     = 1,
  parameter bit FIRST     = 1'b1,
  parameter int OC        = 8,
  parameter int BG_WORDS  = 1,
  parameter int BDEPTH    = 4,
  localparam int BA = (BG_WORDS > 1) ? $clog2(BG_WORDS) : 1,
  localparam int OA = (OC > 1) ? $clog2(OC) : 1
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic                  in_valid,
  output logic                  in_ready,
  input  pkt_t                  in_pkt,
  output logic                  err_valid,
  input  logic                  err_ready,
  output logic [OC-1:0][DW-1:0] err_vec,
  output logic [15:0]           err_pos,
  output logic                  bg_we,
  output logic [BA-1:0]         bg_wa,
  output word_t                 bg_wd,
  input  logic                  own_valid,
  output logic                  own_ready,
  input  pkt_t                  own_pkt,
  input  logic                  grad_valid,
  output logic                  grad_ready,
  input  pkt_t                  grad_pkt,
  output logic                  out_valid,
  input  logic                  out_ready,
  output pkt_t                  out_pkt,
  output logic [31:0]           n_err_bypass,
  output logic [31:0]           n_own_first
);
  logic is_err, is_grad, col_full, byp_in_ready, byp_push;
  logic byp_valid, byp_ready;
  logic [PKT_W-1:0] byp_data;
  logic [OA-1:0] col_n;

  assign is_err  = in_pkt.typ == PKT_ERR && int'(in_pkt.layer) == LAYER;
  assign is_grad = in_pkt.typ == PKT_GRAD && int'(in_pkt.dst) == NODE_ID;

  always_comb begin
    if (is_err)       in_ready = !col_full && (FIRST || byp_in_ready);
    else if (is_grad) in_ready = 1'b1;
    else              in_ready = byp_in_ready;
  end
  assign byp_push = in_valid && in_ready && !is_grad && (!is_err || !FIRST);

  assign bg_we = in_valid && is_grad;
  assign bg_wa = BA'(in_pkt.addr);
  assign bg_wd = in_pkt.data;

  // Gather the OC channels of one error pixel.
  assign err_valid = col_full;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      col_full <= 1'b0; col_n <= '0;
    end else begin
      if (err_valid && err_ready) col_full <= 1'b0;
      if (in_valid && in_ready && is_err) begin
        if (int'(col_n) == OC-1) begin col_n <= '0; col_full <= 1'b1; end
        else col_n <= col_n + 1'b1;
      end
    end
  end
  always_ff @(posedge clk) begin
    if (in_valid && in_ready && is_err) begin
      err_vec[in_pkt.ch[OA-1:0]] <= in_pkt.data;
      err_pos <= in_pkt.addr;
    end
  end

  sync_fifo #(.WIDTH(PKT_W), .DEPTH(BDEPTH)) u_byp (
    .clk, .rst_n, .in_valid(byp_push), .in_ready(byp_in_ready), .in_data(in_pkt),
    .out_valid(byp_valid), .out_ready(byp_ready), .out_data(byp_data), .count());

  // Own errors first, then bypassed traffic, then gradients.
  logic load;
  assign load       = !out_valid || out_ready;
  assign own_ready  = load && own_valid;
  assign byp_ready  = load && !own_valid && byp_valid;
  assign grad_ready = load && !own_valid && !byp_valid && grad_valid;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0; n_err_bypass <= '0; n_own_first <= '0;
    end else begin
      if (load) out_valid <= own_valid || byp_valid || grad_valid;
      if (byp_push && in_pkt.typ == PKT_ERR) n_err_bypass <= n_err_bypass + 1;
      if (own_ready && (byp_valid || grad_valid)) n_own_first <= n_own_first + 1;
    end
  end
  always_ff @(posedge clk) begin
    if (load) out_pkt <= own_valid ? own_pkt : byp_valid ? pkt_t'(byp_data) : grad_pkt;
  end
endmodule
