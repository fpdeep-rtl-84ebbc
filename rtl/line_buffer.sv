// line_buffer -- Line Buffer (LB): turns a raster-order stream of C-channel
// pixels of a W x W map into K x K windows (stride 1, no padding).
//
// A shift register of (K-1)*W + K pixels holds the last K-1 rows plus K
// pixels, so every window is available from fixed taps. After the pixel at
// (r, c) has been shifted in, the window whose top-left corner is
// (r-K+1, c-K+1) is complete when r >= K-1 and c >= K-1; it is then offered
// on out_* until taken. out_pos is the window's raster index in the
// (W-K+1) x (W-K+1) output map and out_last marks the last window of a map.
// Taking a window and shifting the next pixel happen in the same cycle, so a
// map of W*W pixels passes in W*W cycles when nothing stalls.
// Window element (ch, kh*K+kw) is pixel (r-K+1+kh, c-K+1+kw) of channel ch.
//
// Origin: FPDeep feeds the engines through line buffers but does not describe
// them; this is the usual shift-register form.
module line_buffer
  import fpdeep_pkg::*;
#(
  parameter int C = 4,
  parameter int W = 7,
  parameter int K = 3,
  localparam int HO = W - K + 1,
  localparam int PW = (HO*HO > 1) ? $clog2(HO*HO) : 1
) (
  input  logic                         clk,
  input  logic                         rst_n,
  input  logic                         in_valid,
  output logic                         in_ready,
  input  logic [C-1:0][DW-1:0]         in_pix,
  output logic                         out_valid,
  input  logic                         out_ready,
  output logic [C-1:0][K*K-1:0][DW-1:0] out_win,
  output logic [PW-1:0]                out_pos,
  output logic                         out_last
);
  localparam int SR = (K-1)*W + K;
  localparam int RW = $clog2(W+1);

  logic [C-1:0][DW-1:0] sr [SR];
  logic [RW-1:0] row, col;
  logic shift;

  assign in_ready = !out_valid || out_ready;
  assign shift    = in_valid && in_ready;

  always_ff @(posedge clk) begin
    if (shift) begin
      sr[0] <= in_pix;
      for (int i = 1; i < SR; i++) sr[i] <= sr[i-1];
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      row <= '0; col <= '0; out_valid <= 1'b0; out_pos <= '0; out_last <= 1'b0;
    end else if (shift) begin
      out_valid <= (int'(row) >= K-1) && (int'(col) >= K-1);
      out_pos   <= PW'((int'(row) - K + 1) * HO + (int'(col) - K + 1));
      out_last  <= (int'(row) == W-1) && (int'(col) == W-1);
      if (int'(col) == W-1) begin
        col <= '0;
        row <= (int'(row) == W-1) ? '0 : row + 1'b1;
      end else begin
        col <= col + 1'b1;
      end
    end else if (out_ready) begin
      out_valid <= 1'b0;
    end
  end

  always_comb begin
    for (int ch = 0; ch < C; ch++)
      for (int kh = 0; kh < K; kh++)
        for (int kw = 0; kw < K; kw++)
          out_win[ch][kh*K+kw] = sr[(K-1-kh)*W + (K-1-kw)][ch];
  end
endmodule
