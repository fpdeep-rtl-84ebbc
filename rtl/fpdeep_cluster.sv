// fpdeep_cluster -- N_NODES FPGA nodes in a 1-D daisy chain that together
// train one CONV layer (K x K kernels, IC = N_NODES*S_IC input channels,
// OC output channels, W x W input maps) by input-channel partitioning.
//
// Node n owns input channels n*S_IC .. n*S_IC+S_IC-1. Forward, the input
// activations of all IC channels enter at node 0 (fwd_in, one word per beat,
// pixel by pixel, channel by channel); every node keeps its own channels and
// bypasses the rest. The partial sums of the OC outputs travel the same way:
// node n adds its share to what node n-1 sent, so node N_NODES-1 emits the
// finished, activated outputs of the layer on fwd_out. Backward, the errors
// of the layer's outputs enter at the last node (bwd_in) and are passed down
// the chain; each node sends the errors of its own input channels down first,
// and they leave node 0 on bwd_out. Parameter balancing: node 0 holds the
// last REMOTE_ROWS weight rows of node N_NODES-1 in its BPRAM; gradients go
// back to node 0 and updated weights forward to node N_NODES-1 over the same
// links. bal_push makes node 0 send the weights it holds (after loading).
// Weights are loaded as PARAM packets through fwd_in.
// Ports are valid/ready streams of fpdeep_pkg::pkt_t; the links between
// nodes stand in for the inter-FPGA transceivers.
module fpdeep_cluster
  import fpdeep_pkg::*;
#(
  parameter int N_NODES     = 4,
  parameter int K           = 3,
  parameter int W           = 7,
  parameter int S_IC        = 4,
  parameter int OC          = 8,
  parameter int P           = 4,
  parameter int LOG2_BATCH  = 10,
  parameter int ACT_DEPTH   = 196,
  parameter int REMOTE_ROWS = 1,
  parameter bit RELU        = 1'b1,
  parameter int NORM_SHIFT  = 0
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        fwd_in_valid,
  output logic        fwd_in_ready,
  input  pkt_t        fwd_in_pkt,
  output logic        fwd_out_valid,
  input  logic        fwd_out_ready,
  output pkt_t        fwd_out_pkt,
  input  logic        bwd_in_valid,
  output logic        bwd_in_ready,
  input  pkt_t        bwd_in_pkt,
  output logic        bwd_out_valid,
  input  logic        bwd_out_ready,
  output pkt_t        bwd_out_pkt,
  input  logic        bal_push,
  output node_stats_t stats [N_NODES]
);
  localparam int G        = OC / P;
  localparam int ROW_W    = P*S_IC*K*K;
  localparam bit BALANCE  = (N_NODES > 1) && (REMOTE_ROWS > 0);
  localparam int BAL_WORDS = REMOTE_ROWS * ROW_W;

  // Link n carries traffic between node n-1 and node n (forward) and
  // between node n and node n-1 (backward); links 0 and N_NODES are ports.
  logic f_valid [N_NODES+1];
  logic f_ready [N_NODES+1];
  pkt_t f_pkt   [N_NODES+1];
  logic b_valid [N_NODES+1];
  logic b_ready [N_NODES+1];
  pkt_t b_pkt   [N_NODES+1];

  assign f_valid[0]       = fwd_in_valid;
  assign fwd_in_ready     = f_ready[0];
  assign f_pkt[0]         = fwd_in_pkt;
  assign fwd_out_valid    = f_valid[N_NODES];
  assign f_ready[N_NODES] = fwd_out_ready;
  assign fwd_out_pkt      = f_pkt[N_NODES];

  assign b_valid[N_NODES] = bwd_in_valid;
  assign bwd_in_ready     = b_ready[N_NODES];
  assign b_pkt[N_NODES]   = bwd_in_pkt;
  assign bwd_out_valid    = b_valid[0];
  assign b_ready[0]       = bwd_out_ready;
  assign bwd_out_pkt      = b_pkt[0];

  for (genvar n = 0; n < N_NODES; n++) begin : g_node
    localparam bit IS_HOLDER   = BALANCE && (n == 0);
    localparam bit IS_CONSUMER = BALANCE && (n == N_NODES-1);
    fpdeep_node #(
      .NODE_ID(n), .LAYER(1), .BASE_IC(n*S_IC),
      .FIRST(n == 0), .LAST(n == N_NODES-1),
      .K(K), .W(W), .S_IC(S_IC), .OC(OC), .P(P),
      .LOG2_BATCH(LOG2_BATCH), .ACT_DEPTH(ACT_DEPTH),
      .REMOTE_ROWS(IS_CONSUMER ? REMOTE_ROWS : 0), .HOLDER(0),
      .HOLD_WORDS(IS_HOLDER ? BAL_WORDS : 0), .HOLD_DST(N_NODES-1),
      .HOLD_BASE((G - REMOTE_ROWS) * ROW_W),
      .RELU(RELU), .NORM_SHIFT(NORM_SHIFT)
    ) u_node (
      .clk, .rst_n,
      .fwd_in_valid(f_valid[n]), .fwd_in_ready(f_ready[n]), .fwd_in_pkt(f_pkt[n]),
      .fwd_out_valid(f_valid[n+1]), .fwd_out_ready(f_ready[n+1]), .fwd_out_pkt(f_pkt[n+1]),
      .bwd_in_valid(b_valid[n+1]), .bwd_in_ready(b_ready[n+1]), .bwd_in_pkt(b_pkt[n+1]),
      .bwd_out_valid(b_valid[n]), .bwd_out_ready(b_ready[n]), .bwd_out_pkt(b_pkt[n]),
      .bal_push(IS_HOLDER ? bal_push : 1'b0),
      .stats(stats[n]));
  end
endmodule
