// pab -- Partial Activation Buffer: adds the partial output activations made
// on this node to the partial sums arriving from the preceding node of the
// same layer (the pipelined reduction of input-channel partitioning).
//
// Local results arrive P at a time (output channels g*P .. g*P+P-1 of pixel
// pos) and are queued in LDEPTH entries; partial sums from the link are
// queued in RDEPTH entries. Both streams run in the same order (pixel by
// pixel, output channel by output channel), so the buffer pairs the head of
// each queue, emits one sum per cycle and checks by assertion that channel
// and pixel agree. The first node of a layer (FIRST) has no predecessor and
// adds zero. loc_space tells the FP controller how many vectors it may still
// issue.
//
// Origin: adding local partial results to those of the preceding node follows
// FPDeep; the two-FIFO pairing and the one-word-per-cycle output are this
// implementation's choices.
module pab
  import fpdeep_pkg::*;
#(
  parameter int P      = 4,
  parameter int OC     = 8,
  parameter bit FIRST  = 1'b0,
  parameter int LDEPTH = 4,
  parameter int RDEPTH = 8,
  localparam int G  = OC / P,
  localparam int GA = (G > 1) ? $clog2(G) : 1,
  localparam int JA = (P > 1) ? $clog2(P) : 1
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 loc_valid,
  input  logic [GA-1:0]        loc_g,
  input  logic [15:0]          loc_pos,
  input  logic [P-1:0][DW-1:0] loc_vec,
  output logic [$clog2(LDEPTH+1)-1:0] loc_free,
  input  logic                 rin_valid,
  output logic                 rin_ready,
  input  pkt_t                 rin_pkt,
  output logic                 out_valid,
  input  logic                 out_ready,
  output logic [11:0]          out_ch,
  output logic [15:0]          out_pos,
  output word_t                out_data
);
  localparam int LW = GA + 16 + P*DW;
  logic [LW-1:0] lq_in, lq_out;
  logic lq_valid, lq_pop, lq_in_ready;
  logic [$clog2(LDEPTH+1)-1:0] lq_count;
  logic [$clog2(RDEPTH+1)-1:0] rq_count;
  logic rq_valid, rq_pop;
  logic [PKT_W-1:0] rq_out;
  pkt_t rq_pkt;
  logic [GA-1:0] hg;
  logic [15:0] hpos;
  logic [P-1:0][DW-1:0] hvec;
  logic [JA-1:0] j;
  logic [11:0] ch;
  logic have_r;

  assign lq_in = {loc_g, loc_pos, loc_vec};
  assign {hg, hpos, hvec} = lq_out;
  assign loc_free = $clog2(LDEPTH+1)'(LDEPTH) - lq_count;

  sync_fifo #(.WIDTH(LW), .DEPTH(LDEPTH)) u_lq (
    .clk, .rst_n, .in_valid(loc_valid), .in_ready(lq_in_ready), .in_data(lq_in),
    .out_valid(lq_valid), .out_ready(lq_pop), .out_data(lq_out), .count(lq_count));

  sync_fifo #(.WIDTH(PKT_W), .DEPTH(RDEPTH)) u_rq (
    .clk, .rst_n, .in_valid(rin_valid), .in_ready(rin_ready), .in_data(rin_pkt),
    .out_valid(rq_valid), .out_ready(rq_pop), .out_data(rq_out), .count(rq_count));
  assign rq_pkt = pkt_t'(rq_out);

  assign ch       = 12'(int'(hg) * P + int'(j));
  assign have_r   = FIRST || rq_valid;
  assign out_valid = lq_valid && have_r;
  assign out_ch   = ch;
  assign out_pos  = hpos;
  assign out_data = word_t'(hvec[j]) + (FIRST ? word_t'(0) : rq_pkt.data);
  assign rq_pop   = !FIRST && out_valid && out_ready;
  assign lq_pop   = out_valid && out_ready && (int'(j) == P-1);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) j <= '0;
    else if (out_valid && out_ready) j <= (int'(j) == P-1) ? '0 : j + 1'b1;
  end

  // The two streams must describe the same output activation.
  a_match: assert property (@(posedge clk) disable iff (!rst_n)
    (out_valid && !FIRST) |-> (rq_pkt.ch == ch && rq_pkt.addr == hpos && rq_pkt.typ == PKT_PSUM));
  a_no_overflow: assert property (@(posedge clk) disable iff (!rst_n)
    loc_valid |-> lq_in_ready);
endmodule
