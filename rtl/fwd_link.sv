// fwd_link -- the upper pair of interconnection modules (forward direction:
// activations, partial sums, parameters).
//
// Receive side, one packet per accepted beat from the preceding node:
//  * activations of layer LAYER-1 whose channel lies in this node's segment
//    [BASE_IC, BASE_IC+S_IC) are kept; S_IC of them (one pixel, channels in
//    order) are gathered into one Activation RAM entry;
//  * activations of other channels are bypassed to the next node, except on
//    the last node of the layer, where nobody further needs them;
//  * partial sums of layer LAYER go to the Partial Activation Buffer;
//  * parameter words for this node are written into the LPRAM (address
//    below LP_WORDS) or the BPRAM (the addresses above);
//  * everything else is bypassed.
// Send side: a round-robin arbiter merges the bypass queue, the FP output
// (updated partial sums, or finished activations) and the BPRAM parameter
// stream into one registered output. A packet that cannot go on waits in
// place, which stalls the link behind it (valid/ready back-pressure).
//
// Origin: the receive, bypass, partial-sum and parameter-forwarding roles
// follow FPDeep's upper interconnection pair; the packet format, round-robin
// merge and dropping at the last node are this implementation's choices.
module fwd_link
  import fpdeep_pkg::*;
#(
  parameter int NODE_ID  = 0,
  parameter int LAYER    = 1,
  parameter int BASE_IC  = 0,
  parameter int S_IC     = 4,
  parameter bit LAST     = 1'b1,
  parameter int LP_WORDS = 288,
  parameter int BP_WORDS = 1,
  parameter int BDEPTH   = 4,
  localparam int LA = $clog2(LP_WORDS),
  localparam int BA = (BP_WORDS > 1) ? $clog2(BP_WORDS) : 1
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    in_valid,
  output logic                    in_ready,
  input  pkt_t                    in_pkt,
  output logic                    act_valid,
  input  logic                    act_ready,
  output logic [S_IC-1:0][DW-1:0] act_vec,
  output logic                    psum_valid,
  input  logic                    psum_ready,
  output pkt_t                    psum_pkt,
  output logic                    lp_we,
  output logic [LA-1:0]           lp_wa,
  output word_t                   lp_wd,
  output logic                    bp_we,
  output logic [BA-1:0]           bp_wa,
  output word_t                   bp_wd,
  input  logic                    loc_valid,
  output logic                    loc_ready,
  input  pkt_t                    loc_pkt,
  input  logic                    par_valid,
  output logic                    par_ready,
  input  pkt_t                    par_pkt,
  output logic                    out_valid,
  input  logic                    out_ready,
  output pkt_t                    out_pkt,
  output logic [31:0]             n_act_bypass,
  output logic [31:0]             n_act_taken,
  output logic [31:0]             n_param_loaded,
  output logic [31:0]             n_stall
);
  // ---------------- receive side ----------------
  logic is_act, is_local, is_drop, is_psum, is_param;
  logic byp_in_ready, byp_valid, byp_ready;
  logic [PKT_W-1:0] byp_data;
  logic col_full;
  logic [$clog2(S_IC+1)-1:0] col_n;

  assign is_act   = in_pkt.typ == PKT_ACT && int'(in_pkt.layer) == LAYER-1;
  assign is_local = is_act && int'(in_pkt.ch) >= BASE_IC && int'(in_pkt.ch) < BASE_IC + S_IC;
  assign is_drop  = is_act && !is_local && LAST;
  assign is_psum  = in_pkt.typ == PKT_PSUM && int'(in_pkt.layer) == LAYER;
  assign is_param = in_pkt.typ == PKT_PARAM && int'(in_pkt.dst) == NODE_ID;

  always_comb begin
    if (is_local)      in_ready = !col_full;
    else if (is_drop)  in_ready = 1'b1;
    else if (is_psum)  in_ready = psum_ready;
    else if (is_param) in_ready = 1'b1;
    else               in_ready = byp_in_ready;
  end

  assign psum_valid = in_valid && is_psum;
  assign psum_pkt   = in_pkt;

  assign lp_we = in_valid && is_param && int'(in_pkt.addr) <  LP_WORDS;
  assign bp_we = in_valid && is_param && int'(in_pkt.addr) >= LP_WORDS;
  assign lp_wa = LA'(in_pkt.addr);
  assign bp_wa = BA'(int'(in_pkt.addr) - LP_WORDS);
  assign lp_wd = in_pkt.data;
  assign bp_wd = in_pkt.data;

  // Gather the S_IC local channels of one pixel.
  assign act_valid = col_full;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      col_full <= 1'b0; col_n <= '0;
    end else begin
      if (act_valid && act_ready) col_full <= 1'b0;
      if (in_valid && is_local && !col_full) begin
        if (int'(col_n) == S_IC-1) begin col_n <= '0; col_full <= 1'b1; end
        else col_n <= col_n + 1'b1;
      end
    end
  end
  always_ff @(posedge clk) begin
    if (in_valid && is_local && !col_full) act_vec[int'(in_pkt.ch) - BASE_IC] <= in_pkt.data;
  end

  sync_fifo #(.WIDTH(PKT_W), .DEPTH(BDEPTH)) u_byp (
    .clk, .rst_n,
    .in_valid(in_valid && !is_local && !is_drop && !is_psum && !is_param),
    .in_ready(byp_in_ready), .in_data(in_pkt),
    .out_valid(byp_valid), .out_ready(byp_ready), .out_data(byp_data), .count());

  // ---------------- send side ----------------
  logic [2:0] req, gnt;
  logic [1:0] last;
  logic load;

  assign req  = {par_valid, loc_valid, byp_valid};
  assign load = (!out_valid || out_ready) && (req != '0);

  always_comb begin
    gnt = '0;
    for (int k = 1; k <= 3; k++) begin
      int s;
      s = (int'(last) + k) % 3;
      if (gnt == '0 && req[s]) gnt[s] = 1'b1;
    end
    if (!(!out_valid || out_ready)) gnt = '0;
  end
  assign byp_ready = gnt[0];
  assign loc_ready = gnt[1];
  assign par_ready = gnt[2];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0; last <= 2'd2;
      n_act_bypass <= '0; n_act_taken <= '0; n_param_loaded <= '0; n_stall <= '0;
    end else begin
      if (load) begin
        out_valid <= 1'b1;
        last <= gnt[0] ? 2'd0 : gnt[1] ? 2'd1 : 2'd2;
      end else if (out_ready) begin
        out_valid <= 1'b0;
      end
      if (in_valid && in_ready && is_act && !is_local && !is_drop) n_act_bypass <= n_act_bypass + 1;
      if (in_valid && in_ready && is_local)  n_act_taken <= n_act_taken + 1;
      if (in_valid && is_param)              n_param_loaded <= n_param_loaded + 1;
      if (out_valid && !out_ready)           n_stall <= n_stall + 1;
    end
  end
  always_ff @(posedge clk) begin
    if (load) out_pkt <= gnt[0] ? pkt_t'(byp_data) : gnt[1] ? loc_pkt : par_pkt;
  end

  a_onehot: assert property (@(posedge clk) disable iff (!rst_n) $onehot0(gnt));
endmodule
