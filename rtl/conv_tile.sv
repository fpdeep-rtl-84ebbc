// conv_tile -- one convolution tile: K x K multiply-accumulate units.
//
// Multiplies a K x K window of data with a K x K kernel element by element
// and sums the K*K products, i.e. one K x K convolution operation per cycle,
// as each tile of a Convolution Engine does in the FP, EB and PG modules.
// Purely combinational; the engine around it registers the result.
// Element e of both vectors is kernel position (e / K, e % K).
//
// Origin: the K x K multiply-accumulate tile follows FPDeep; 32-bit integer
// arithmetic (instead of single-precision floating point) is this
// implementation's choice.
module conv_tile
  import fpdeep_pkg::*;
#(
  parameter int K = 3
) (
  input  logic [K*K-1:0][DW-1:0] a,   // data window
  input  logic [K*K-1:0][DW-1:0] w,   // kernel
  output word_t                  y
);
  always_comb begin
    y = '0;
    for (int e = 0; e < K*K; e++) y = y + mul(word_t'(a[e]), word_t'(w[e]));
  end
endmodule
