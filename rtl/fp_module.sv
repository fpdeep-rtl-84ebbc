// fp_module -- forward propagation of one node's share of a CONV layer
// under input-channel partitioning.
//
// The Line Buffer takes the local S_IC channels, pixel by pixel, from the
// Activation RAM and forms K x K x S_IC windows. For every window the
// controller steps through the G = OC/P rows of the LPRAM, one per cycle;
// in each cycle the P Convolution Engines (S_IC tiles of K x K MACs each)
// produce the partial results of P output channels. So a window costs G
// cycles and gives OC partial results. These go to the Partial Activation
// Buffer, which adds the partial sums from the preceding node. On the last
// node of the layer (LAST) the finished sum passes through the SFU and
// leaves as an activation of layer LAYER; otherwise it leaves as a partial
// sum for the next node. The output pixel index is the raster index in the
// (W-K+1)^2 output map. Issue stalls when the PAB has no room.
//
// Origin: LB -> P engines of S_IC tiles -> PAB -> SFU follows FPDeep;
// applying the SFU only on the last node (after the full sum), the G-cycle
// row stepping and the stall rule are this implementation's choices.
module fp_module
  import fpdeep_pkg::*;
#(
  parameter int K          = 3,
  parameter int W          = 7,
  parameter int S_IC       = 4,
  parameter int OC         = 8,
  parameter int P          = 4,
  parameter bit FIRST      = 1'b1,
  parameter bit LAST       = 1'b1,
  parameter int LAYER      = 1,
  parameter bit RELU       = 1'b1,
  parameter int NORM_SHIFT = 0,
  parameter int LDEPTH     = 4,
  localparam int G     = OC / P,
  localparam int GA    = (G > 1) ? $clog2(G) : 1,
  localparam int ROW_W = P*S_IC*K*K,
  localparam int HO    = W - K + 1,
  localparam int PW    = (HO*HO > 1) ? $clog2(HO*HO) : 1
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     act_valid,
  output logic                     act_ready,
  input  logic [S_IC-1:0][DW-1:0]  act_vec,
  output logic [GA-1:0]            lp_row,
  input  logic [ROW_W-1:0][DW-1:0] lp_data,
  input  logic                     rin_valid,
  output logic                     rin_ready,
  input  pkt_t                     rin_pkt,
  output logic                     out_valid,
  input  logic                     out_ready,
  output pkt_t                     out_pkt,
  output logic [31:0]              n_windows,
  output logic [31:0]              n_clamped,
  output logic [31:0]              n_psum
);
  localparam int TAGW = GA + PW;

  logic win_valid, win_ready, win_last;
  logic [S_IC-1:0][K*K-1:0][DW-1:0] win;
  logic [PW-1:0] win_pos;
  logic [GA-1:0] g;
  logic issue;
  logic [$clog2(LDEPTH+1)-1:0] loc_free;

  line_buffer #(.C(S_IC), .W(W), .K(K)) u_lb (
    .clk, .rst_n, .in_valid(act_valid), .in_ready(act_ready), .in_pix(act_vec),
    .out_valid(win_valid), .out_ready(win_ready), .out_win(win), .out_pos(win_pos),
    .out_last(win_last));

  logic [P-1:0] ce_valid;
  logic [P-1:0][TAGW-1:0] ce_tag;
  word_t ce_y [P];
  logic [P-1:0][DW-1:0] loc_vec;

  assign issue     = win_valid && (int'(loc_free) > (ce_valid[0] ? 1 : 0));
  assign win_ready = issue && (int'(g) == G-1);
  assign lp_row    = g;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      g <= '0; n_windows <= '0;
    end else if (issue) begin
      if (int'(g) == G-1) begin
        g <= '0;
        n_windows <= n_windows + 1;
      end else begin
        g <= g + 1'b1;
      end
    end
  end

  for (genvar j = 0; j < P; j++) begin : g_ce
    logic [S_IC-1:0][K*K-1:0][DW-1:0] wk;
    always_comb begin
      for (int t = 0; t < S_IC; t++)
        for (int e = 0; e < K*K; e++)
          wk[t][e] = lp_data[(j*S_IC + t)*K*K + e];
    end
    conv_engine #(.K(K), .NT(S_IC), .TAGW(TAGW)) u_ce (
      .clk, .rst_n, .in_valid(issue), .in_tag({g, win_pos}), .a(win), .w(wk),
      .out_valid(ce_valid[j]), .out_tag(ce_tag[j]), .y(ce_y[j]));
    assign loc_vec[j] = ce_y[j];
  end

  logic          s_valid, s_ready;
  logic [11:0]   s_ch;
  logic [15:0]   s_pos;
  word_t         s_data, f_data;
  logic          clamped;

  pab #(.P(P), .OC(OC), .FIRST(FIRST), .LDEPTH(LDEPTH)) u_pab (
    .clk, .rst_n,
    .loc_valid(ce_valid[0]), .loc_g(ce_tag[0][TAGW-1 -: GA]), .loc_pos(16'(ce_tag[0][PW-1:0])),
    .loc_vec(loc_vec), .loc_free(loc_free),
    .rin_valid, .rin_ready, .rin_pkt,
    .out_valid(s_valid), .out_ready(s_ready), .out_ch(s_ch), .out_pos(s_pos), .out_data(s_data));

  sfu #(.RELU(RELU), .NORM_SHIFT(NORM_SHIFT)) u_sfu (.x(s_data), .y(f_data), .clamped(clamped));

  assign out_valid = s_valid;
  assign s_ready   = out_ready;
  always_comb begin
    out_pkt       = '0;
    out_pkt.typ   = LAST ? PKT_ACT : PKT_PSUM;
    out_pkt.layer = 4'(LAYER);
    out_pkt.ch    = s_ch;
    out_pkt.addr  = s_pos;
    out_pkt.data  = LAST ? f_data : s_data;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      n_clamped <= '0; n_psum <= '0;
    end else if (s_valid && s_ready) begin
      if (LAST && clamped) n_clamped <= n_clamped + 1;
      if (!FIRST)          n_psum    <= n_psum + 1;
    end
  end
endmodule
