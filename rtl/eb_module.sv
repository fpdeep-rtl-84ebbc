// eb_module -- error back-propagation for one node's S_IC input channels.
//
// The errors of the layer's OC output channels arrive one pixel at a time
// (all OC channels of pixel pos of the (W-K+1)^2 output map, raster order).
// A padding generator surrounds that map with K-1 rows and columns of zeros
// on every side, giving a (W+K-1)^2 map, and a Line Buffer forms OC-channel
// K x K windows over it: exactly W x W windows, one per input pixel. For
// each window the controller steps through the G = OC/P LPRAM rows; in
// each cycle the errors of P output channels are broadcast to S_IC
// Convolution Engines of P tiles each, tile j of engine i using the
// 180-degree rotated kernel W[g*P+j][i]. The engines' results are summed over
// the G cycles, so after OC/P cycles the complete errors of the S_IC input
// channels at that pixel go into the Error Buffer. The buffer is drained as
// ERR packets of layer LAYER-1, channel BASE_IC+i, pixel pos (raster index
// in the W x W map). Issue stalls when the Error Buffer could overflow.
// The error passed on is the gradient of the previous layer's output; the
// derivative of that layer's activation function is not applied here.
// `idle` is high when no error pixel of a started map is still in the module.
//
// Origin: S_IC engines of P tiles, P output channels per cycle, OC/P cycles
// per position and the Error Buffer follow FPDeep; padding, kernel rotation,
// buffer depth and packet format are this implementation's choices.
module eb_module
  import fpdeep_pkg::*;
#(
  parameter int K       = 3,
  parameter int W       = 7,
  parameter int S_IC    = 4,
  parameter int OC      = 8,
  parameter int P       = 4,
  parameter int BASE_IC = 0,
  parameter int LAYER   = 1,
  parameter int EDEPTH  = 4,
  localparam int G     = OC / P,
  localparam int GA    = (G > 1) ? $clog2(G) : 1,
  localparam int ROW_W = P*S_IC*K*K,
  localparam int WP    = W + K - 1,
  localparam int HO    = W - K + 1,
  localparam int PW    = (W*W > 1) ? $clog2(W*W) : 1,
  localparam int IA    = (S_IC > 1) ? $clog2(S_IC) : 1
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     err_valid,
  output logic                     err_ready,
  input  logic [OC-1:0][DW-1:0]    err_vec,
  output logic [GA-1:0]            lp_row,
  input  logic [ROW_W-1:0][DW-1:0] lp_data,
  output logic                     out_valid,
  input  logic                     out_ready,
  output pkt_t                     out_pkt,
  output logic [31:0]              n_windows,
  output logic                     idle
);
  localparam int TAGW = GA + PW;
  localparam int RW   = $clog2(WP+1);

  // ---- zero padding around the error map ----
  logic [RW-1:0] pr, pc;
  logic interior, pix_valid, pix_ready;
  logic [OC-1:0][DW-1:0] pix;

  assign interior  = (int'(pr) >= K-1) && (int'(pr) < K-1+HO) &&
                     (int'(pc) >= K-1) && (int'(pc) < K-1+HO);
  assign pix_valid = interior ? err_valid : 1'b1;
  assign pix       = interior ? err_vec : '0;
  assign err_ready = interior && pix_ready;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      pr <= '0; pc <= '0;
    end else if (pix_valid && pix_ready) begin
      if (int'(pc) == WP-1) begin
        pc <= '0;
        pr <= (int'(pr) == WP-1) ? '0 : pr + 1'b1;
      end else begin
        pc <= pc + 1'b1;
      end
    end
  end

  // ---- line buffer over the padded map ----
  logic win_valid, win_ready, win_last;
  logic [OC-1:0][K*K-1:0][DW-1:0] win;
  logic [PW-1:0] win_pos;

  line_buffer #(.C(OC), .W(WP), .K(K)) u_lb (
    .clk, .rst_n, .in_valid(pix_valid), .in_ready(pix_ready), .in_pix(pix),
    .out_valid(win_valid), .out_ready(win_ready), .out_win(win), .out_pos(win_pos),
    .out_last(win_last));

  // ---- controller ----
  logic [GA-1:0] g;
  logic issue;
  logic [$clog2(EDEPTH+1)-1:0] eb_count;
  logic eb_in_ready;

  assign issue     = win_valid && (int'(eb_count) <= EDEPTH-2);
  assign win_ready = issue && (int'(g) == G-1);
  assign lp_row    = g;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      g <= '0; n_windows <= '0;
    end else if (issue) begin
      if (int'(g) == G-1) begin g <= '0; n_windows <= n_windows + 1; end
      else g <= g + 1'b1;
    end
  end

  // Errors of the P output channels handled in this cycle.
  logic [P-1:0][K*K-1:0][DW-1:0] ew;
  always_comb begin
    for (int j = 0; j < P; j++) ew[j] = win[int'(g)*P + j];
  end

  logic [S_IC-1:0] ce_valid;
  logic [S_IC-1:0][TAGW-1:0] ce_tag;
  word_t ce_y [S_IC];
  word_t acc  [S_IC];
  logic [S_IC-1:0][DW-1:0] done_vec;

  for (genvar i = 0; i < S_IC; i++) begin : g_ce
    logic [P-1:0][K*K-1:0][DW-1:0] wk;
    always_comb begin
      for (int j = 0; j < P; j++)
        for (int a = 0; a < K; a++)
          for (int b = 0; b < K; b++)
            wk[j][a*K+b] = lp_data[(j*S_IC + i)*K*K + (K-1-a)*K + (K-1-b)];
    end
    conv_engine #(.K(K), .NT(P), .TAGW(TAGW)) u_ce (
      .clk, .rst_n, .in_valid(issue), .in_tag({g, win_pos}), .a(ew), .w(wk),
      .out_valid(ce_valid[i]), .out_tag(ce_tag[i]), .y(ce_y[i]));
    assign done_vec[i] = (ce_tag[i][TAGW-1 -: GA] == '0) ? ce_y[i] : acc[i] + ce_y[i];
    always_ff @(posedge clk) if (ce_valid[i]) acc[i] <= done_vec[i];
  end

  // ---- Error Buffer ----
  localparam int EW = PW + S_IC*DW;
  logic ebuf_push, ebuf_valid, ebuf_pop;
  logic [EW-1:0] ebuf_out;
  logic [PW-1:0] e_pos;
  logic [S_IC-1:0][DW-1:0] e_vec;
  logic [IA-1:0] i_out;

  assign ebuf_push = ce_valid[0] && (int'(ce_tag[0][TAGW-1 -: GA]) == G-1);
  sync_fifo #(.WIDTH(EW), .DEPTH(EDEPTH)) u_ebuf (
    .clk, .rst_n, .in_valid(ebuf_push), .in_ready(eb_in_ready),
    .in_data({ce_tag[0][PW-1:0], done_vec}),
    .out_valid(ebuf_valid), .out_ready(ebuf_pop), .out_data(ebuf_out), .count(eb_count));
  assign {e_pos, e_vec} = ebuf_out;

  assign out_valid = ebuf_valid;
  assign ebuf_pop  = out_valid && out_ready && (int'(i_out) == S_IC-1);
  always_comb begin
    out_pkt       = '0;
    out_pkt.typ   = PKT_ERR;
    out_pkt.layer = 4'(LAYER - 1);
    out_pkt.ch    = 12'(BASE_IC + int'(i_out));
    out_pkt.addr  = 16'(e_pos);
    out_pkt.data  = e_vec[i_out];
  end
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) i_out <= '0;
    else if (out_valid && out_ready) i_out <= (int'(i_out) == S_IC-1) ? '0 : i_out + 1'b1;
  end

  // Nothing of the current map left: padding generator waiting for the first
  // error pixel of the next map, no window, nothing in the engines or buffer.
  assign idle = (int'(pr) == K-1) && (int'(pc) == K-1) && !win_valid &&
                !ce_valid[0] && (eb_count == '0);

  a_ebuf: assert property (@(posedge clk) disable iff (!rst_n) ebuf_push |-> eb_in_ready);
endmodule
