// lpram -- Local Parameter RAM: the S_IC x K x K x OC weights this node uses.
//
// Organised as S_IC*K*K banks (one per input channel and kernel position),
// each OC entries deep, read P output channels at a time: row g holds the
// weights of output channels g*P .. g*P+P-1, word (j*S_IC + i)*K*K + kh*K + kw
// being weight W[g*P+j][i][kh][kw]. One row is thus everything the P CEs of
// FP (or the S_IC CEs of EB) need in one cycle.
// Ports: two combinational row reads (FP and EB), a third row read and a row
// write for the mini-batch update, and a word write for loading parameters
// from the link (word address = row*ROW_W + word). A row write wins over a
// word write to the same word in the same cycle.
//
// Origin: an LPRAM holding SF x K x K x OC weights, banked so all weights for
// one cycle come out together, follows FPDeep; the row layout and the
// separate read ports are this implementation's choices.
module lpram
  import fpdeep_pkg::*;
#(
  parameter int K    = 3,
  parameter int S_IC = 4,
  parameter int P    = 4,
  parameter int ROWS = 2,
  localparam int ROW_W = P*S_IC*K*K,
  localparam int RA = (ROWS > 1) ? $clog2(ROWS) : 1,
  localparam int WA = $clog2(ROWS*ROW_W)
) (
  input  logic                     clk,
  input  logic [RA-1:0]            fp_row,
  output logic [ROW_W-1:0][DW-1:0] fp_data,
  input  logic [RA-1:0]            eb_row,
  output logic [ROW_W-1:0][DW-1:0] eb_data,
  input  logic [RA-1:0]            up_row,
  output logic [ROW_W-1:0][DW-1:0] up_data,
  input  logic                     row_we,
  input  logic [RA-1:0]            row_wa,
  input  logic [ROW_W-1:0][DW-1:0] row_wd,
  input  logic                     word_we,
  input  logic [WA-1:0]            word_wa,
  input  word_t                    word_wd
);
  logic [ROW_W-1:0][DW-1:0] mem [ROWS];

  assign fp_data = mem[fp_row];
  assign eb_data = mem[eb_row];
  assign up_data = mem[up_row];

  always_ff @(posedge clk) begin
    if (word_we) mem[int'(word_wa) / ROW_W][int'(word_wa) % ROW_W] <= word_wd;
    if (row_we)  mem[row_wa] <= row_wd;
  end
endmodule
