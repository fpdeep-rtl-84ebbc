// act_ram -- Activation RAM: a FIFO-based memory that keeps the input
// activations of the local channel segment from forward propagation until
// the parameter-gradient step of back-propagation has used them.
//
// One entry is one pixel of the S_IC local channels. Entries are written in
// arrival order. Two read pointers follow the write pointer: the FP pointer
// feeds the forward line buffer, the BP pointer (never ahead of the FP
// pointer) feeds the PG line buffer and frees the entry. An entry therefore
// stays in the memory from its arrival until PG has read it, which is the
// storage the fine-grained pipeline needs. Reads are combinational from the
// entry under the pointer; all three ports use valid/ready.
//
// Origin: a FIFO-organised activation cache that keeps activations from FP
// until PG has used them is the FPDeep design; the two read pointers, the
// depth (four 7 x 7 frames) and the handshakes are choices of this
// implementation.
module act_ram
  import fpdeep_pkg::*;
#(
  parameter int C     = 4,
  parameter int DEPTH = 196
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 wr_valid,
  output logic                 wr_ready,
  input  logic [C-1:0][DW-1:0] wr_data,
  output logic                 fp_valid,
  input  logic                 fp_ready,
  output logic [C-1:0][DW-1:0] fp_data,
  output logic                 bp_valid,
  input  logic                 bp_ready,
  output logic [C-1:0][DW-1:0] bp_data,
  output logic [$clog2(DEPTH+1)-1:0] used
);
  localparam int AW = (DEPTH > 1) ? $clog2(DEPTH) : 1;
  localparam int CW = $clog2(DEPTH+1);
  logic [C-1:0][DW-1:0] mem [DEPTH];
  logic [AW-1:0] wp, fpp, bpp;
  logic [CW-1:0] n_fp;          // written but not yet read by FP
  logic wr, fr, br;

  assign wr_ready = (used != CW'(DEPTH));
  assign fp_valid = (n_fp != '0);
  assign bp_valid = (used != n_fp);   // read by FP, not yet by BP
  assign fp_data  = mem[fpp];
  assign bp_data  = mem[bpp];
  assign wr = wr_valid && wr_ready;
  assign fr = fp_valid && fp_ready;
  assign br = bp_valid && bp_ready;

  function automatic logic [AW-1:0] inc(input logic [AW-1:0] p);
    return (p == AW'(DEPTH-1)) ? '0 : p + 1'b1;
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wp <= '0; fpp <= '0; bpp <= '0; used <= '0; n_fp <= '0;
    end else begin
      if (wr) wp  <= inc(wp);
      if (fr) fpp <= inc(fpp);
      if (br) bpp <= inc(bpp);
      used <= used + CW'(wr) - CW'(br);
      n_fp <= n_fp + CW'(wr) - CW'(fr);
    end
  end
  always_ff @(posedge clk) if (wr) mem[wp] <= wr_data;
endmodule
