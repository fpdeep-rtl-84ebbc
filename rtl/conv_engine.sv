// conv_engine -- Convolution Engine (CE): NT convolution tiles whose results
// are summed into one partial result per cycle.
//
// In the FP module a CE has one tile per local input channel (NT = S_IC) and
// produces the partial result of one output channel per cycle. In the EB
// module a CE has one tile per output channel handled in a cycle (NT = P)
// and produces part of the error of one input channel. The result is
// registered: it appears one cycle after in_valid, together with the tag
// given with the inputs. No stall: the caller only issues when it can take
// the result.
//
// Origin: CEs built from K x K convolution tiles follow FPDeep; the single
// register stage and the tag are this implementation's choices.
module conv_engine
  import fpdeep_pkg::*;
#(
  parameter int K    = 3,
  parameter int NT   = 4,
  parameter int TAGW = 8
) (
  input  logic                         clk,
  input  logic                         rst_n,
  input  logic                         in_valid,
  input  logic [TAGW-1:0]              in_tag,
  input  logic [NT-1:0][K*K-1:0][DW-1:0] a,
  input  logic [NT-1:0][K*K-1:0][DW-1:0] w,
  output logic                         out_valid,
  output logic [TAGW-1:0]              out_tag,
  output word_t                        y
);
  word_t tile_y [NT];
  word_t sum;

  for (genvar t = 0; t < NT; t++) begin : g_tile
    conv_tile #(.K(K)) u_tile (.a(a[t]), .w(w[t]), .y(tile_y[t]));
  end

  always_comb begin
    sum = '0;
    for (int t = 0; t < NT; t++) sum = sum + tile_y[t];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) out_valid <= 1'b0;
    else        out_valid <= in_valid;
  end
  always_ff @(posedge clk) begin
    if (in_valid) begin
      y       <= sum;
      out_tag <= in_tag;
    end
  end
endmodule
