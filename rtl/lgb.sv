// lgb -- Local Gradient Buffer: sums the parameter gradients produced by PG
// over a mini-batch and, when the mini-batch is complete, applies them.
//
// Same layout as the LPRAM (ROWS rows of ROW_W words). PG adds a whole row
// of products per cycle (acc_*). A pulse on update_start walks the rows:
//  * rows below LOCAL_ROWS belong to weights stored in this node's LPRAM;
//    the row is read from the LPRAM, the averaged gradient
//    (sum >>> LOG2_BATCH) is added and the row is written back, one row per
//    cycle;
//  * the remaining rows belong to weights held by another node (parameter
//    balancing). Their raw sums are sent to that node (HOLDER) as GRAD
//    packets, one word per accepted beat, word address counted from 0; the
//    holder averages and applies them.
// Each row is cleared once applied or sent. acc_ready is low while an update
// runs, so the next mini-batch waits (the weights are "slightly unaligned":
// forward passes of the next mini-batch continue on the old weights).
//
// Origin: accumulating gradients over a mini-batch and then updating the
// LPRAM follows FPDeep; the power-of-two average, the row-per-cycle walk and
// the return of balanced-row sums as packets are this implementation's
// choices.
module lgb
  import fpdeep_pkg::*;
#(
  parameter int K          = 3,
  parameter int S_IC       = 4,
  parameter int P          = 4,
  parameter int ROWS       = 2,
  parameter int LOCAL_ROWS = 2,
  parameter int LOG2_BATCH = 10,
  parameter int HOLDER     = 0,
  localparam int ROW_W = P*S_IC*K*K,
  localparam int RA = (ROWS > 1) ? $clog2(ROWS) : 1,
  localparam int CW = (ROW_W > 1) ? $clog2(ROW_W) : 1
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     acc_valid,
  output logic                     acc_ready,
  input  logic [RA-1:0]            acc_row,
  input  logic [ROW_W-1:0][DW-1:0] acc_vec,
  input  logic                     update_start,
  output logic                     busy,
  output logic [RA-1:0]            lp_row,
  input  logic [ROW_W-1:0][DW-1:0] lp_rdata,
  output logic                     lp_we,
  output logic [ROW_W-1:0][DW-1:0] lp_wdata,
  output logic                     grad_valid,
  input  logic                     grad_ready,
  output pkt_t                     grad_pkt,
  output logic [31:0]              n_updates
);
  logic [ROW_W-1:0][DW-1:0] acc [ROWS];
  logic [RA-1:0] r;
  logic [CW-1:0] c;
  logic remote;

  assign acc_ready = !busy;
  assign remote    = busy && (int'(r) >= LOCAL_ROWS);
  assign lp_row    = r;
  assign lp_we     = busy && !remote;
  always_comb begin
    for (int e = 0; e < ROW_W; e++)
      lp_wdata[e] = word_t'(lp_rdata[e]) + (word_t'(acc[r][e]) >>> LOG2_BATCH);
  end

  assign grad_valid = remote;
  always_comb begin
    grad_pkt      = '0;
    grad_pkt.typ  = PKT_GRAD;
    grad_pkt.dst  = 4'(HOLDER);
    grad_pkt.addr = 16'((int'(r) - LOCAL_ROWS) * ROW_W + int'(c));
    grad_pkt.data = acc[r][c];
  end

  logic row_done;
  assign row_done = busy && (!remote || (grad_ready && c == CW'(ROW_W-1)));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy <= 1'b0; r <= '0; c <= '0; n_updates <= '0;
      for (int i = 0; i < ROWS; i++) acc[i] <= '0;
    end else begin
      if (!busy) begin
        if (acc_valid) begin
          for (int e = 0; e < ROW_W; e++)
            acc[acc_row][e] <= word_t'(acc[acc_row][e]) + word_t'(acc_vec[e]);
        end
        if (update_start) begin busy <= 1'b1; r <= '0; c <= '0; end
      end else begin
        if (remote && grad_ready) c <= c + 1'b1;
        if (row_done) begin
          acc[r] <= '0;
          c <= '0;
          if (int'(r) == ROWS-1) begin
            busy <= 1'b0;
            n_updates <= n_updates + 1;
          end else begin
            r <= r + 1'b1;
          end
        end
      end
    end
  end
endmodule
