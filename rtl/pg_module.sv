// pg_module -- parameter gradient calculation for one node's weights.
//
// The large convolution dP[oc][i] = A[i] (*) E[oc] (filter as large as the
// error map) is cut into many K x K pieces: for every output pixel, the
// error of output channel oc at that pixel times the K x K window of input
// activations under it is that pixel's contribution to the K x K gradient
// kernel dP[oc][i]. The activations are read back from the Activation RAM in
// the order they were stored and re-windowed by a Line Buffer; the errors of
// the same pixel (all OC channels) come from the error collector. For each
// window the module spends G = OC/P cycles; in cycle g it forms the
// P x S_IC x K x K products for output channels g*P..g*P+P-1, in LPRAM row
// layout, and adds them to row g of the Local Gradient Buffer.
// After the last window of a map the sample count grows; when 2^LOG2_BATCH
// samples are done, `update` pulses to start the mini-batch update.
//
// Origin: cutting the large gradient convolution into K x K pieces per output
// pixel follows FPDeep; re-windowing from the Activation RAM and the row
// layout are this implementation's choices.
module pg_module
  import fpdeep_pkg::*;
#(
  parameter int K          = 3,
  parameter int W          = 7,
  parameter int S_IC       = 4,
  parameter int OC         = 8,
  parameter int P          = 4,
  parameter int LOG2_BATCH = 10,
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
  input  logic                     err_valid,
  output logic                     err_ready,
  input  logic [OC-1:0][DW-1:0]    err_vec,
  input  logic [15:0]              err_pos,
  output logic                     acc_valid,
  input  logic                     acc_ready,
  output logic [GA-1:0]            acc_row,
  output logic [ROW_W-1:0][DW-1:0] acc_vec,
  output logic                     update,
  output logic [31:0]              n_windows
);
  logic win_valid, win_ready, win_last;
  logic [S_IC-1:0][K*K-1:0][DW-1:0] win;
  logic [PW-1:0] win_pos;
  logic [GA-1:0] g;
  logic [LOG2_BATCH:0] samples;

  line_buffer #(.C(S_IC), .W(W), .K(K)) u_lb (
    .clk, .rst_n, .in_valid(act_valid), .in_ready(act_ready), .in_pix(act_vec),
    .out_valid(win_valid), .out_ready(win_ready), .out_win(win), .out_pos(win_pos),
    .out_last(win_last));

  assign acc_valid = win_valid && err_valid && acc_ready;
  assign acc_row   = g;
  assign win_ready = acc_valid && (int'(g) == G-1);
  assign err_ready = win_ready;

  always_comb begin
    for (int j = 0; j < P; j++)
      for (int i = 0; i < S_IC; i++)
        for (int e = 0; e < K*K; e++)
          acc_vec[(j*S_IC + i)*K*K + e] = mul(word_t'(err_vec[int'(g)*P + j]), word_t'(win[i][e]));
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      g <= '0; samples <= '0; update <= 1'b0; n_windows <= '0;
    end else begin
      update <= 1'b0;
      if (acc_valid) begin
        if (int'(g) == G-1) begin
          g <= '0;
          n_windows <= n_windows + 1;
          if (win_last) begin
            if (samples == (LOG2_BATCH+1)'((1 << LOG2_BATCH) - 1)) begin
              samples <= '0;
              update  <= 1'b1;
            end else begin
              samples <= samples + 1'b1;
            end
          end
        end else begin
          g <= g + 1'b1;
        end
      end
    end
  end

  // Activations and errors must describe the same output pixel.
  a_pos: assert property (@(posedge clk) disable iff (!rst_n)
    acc_valid |-> (16'(win_pos) == err_pos))
    else $error("pg pos mismatch win=%0d err=%0d", win_pos, err_pos);
endmodule
