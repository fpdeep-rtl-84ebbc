// bpram -- Balanced Parameter RAM: weights kept on this node on behalf of a
// node whose own memory is too small for them (parameter balancing).
//
// WORDS words, written from the link when the cluster is loaded. A pulse on
// push_start streams all words, in address order, as PARAM packets for node
// DST, each word landing at address DST_BASE + i of that node's LPRAM; the
// stream obeys valid/ready and a new push_start during a stream is ignored.
// The update port adds a delta (the averaged gradient computed by the BGB)
// to one word per cycle.
//
// Origin: FPDeep holds balanced parameters for memory-poor nodes in a BPRAM;
// pushing the whole BPRAM once per mini-batch as PARAM packets is this
// implementation's simplification.
module bpram
  import fpdeep_pkg::*;
#(
  parameter int WORDS    = 144,
  parameter int DST      = 3,
  parameter int DST_BASE = 144,
  localparam int WA = (WORDS > 1) ? $clog2(WORDS) : 1
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          word_we,
  input  logic [WA-1:0] word_wa,
  input  word_t         word_wd,
  input  logic          upd_valid,
  input  logic [WA-1:0] upd_addr,
  input  word_t         upd_delta,
  input  logic          push_start,
  output logic          push_busy,
  output logic          out_valid,
  input  logic          out_ready,
  output pkt_t          out_pkt
);
  word_t mem [WORDS];
  logic [WA-1:0] rd;

  always_ff @(posedge clk) begin
    if (word_we)   mem[word_wa] <= word_wd;
    if (upd_valid) mem[upd_addr] <= mem[upd_addr] + upd_delta;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      push_busy <= 1'b0; rd <= '0;
    end else if (!push_busy) begin
      if (push_start) begin push_busy <= 1'b1; rd <= '0; end
    end else if (out_ready) begin
      if (rd == WA'(WORDS-1)) push_busy <= 1'b0;
      else                    rd <= rd + 1'b1;
    end
  end

  assign out_valid = push_busy;
  always_comb begin
    out_pkt       = '0;
    out_pkt.typ   = PKT_PARAM;
    out_pkt.dst   = 4'(DST);
    out_pkt.addr  = 16'(DST_BASE + int'(rd));
    out_pkt.data  = mem[rd];
  end
endmodule
