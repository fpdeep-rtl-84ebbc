// bgb -- Balanced Gradient Buffer: collects the gradient sums of the BPRAM
// weights that the consuming node sends back at the end of a mini-batch,
// then applies them.
//
// GRAD words are written by address. When all WORDS words of a mini-batch
// have arrived, the buffer walks through them, one per cycle, and gives the
// BPRAM the averaged gradient (sum >>> LOG2_BATCH) to add. After the last
// word it pulses `done`, which the node uses to send the updated weights to
// the consumer again.
//
// Origin: a buffer for the gradients of balanced parameters is part of
// FPDeep; its insides (collect all words, then one averaged delta per cycle)
// are this implementation's own.
module bgb
  import fpdeep_pkg::*;
#(
  parameter int WORDS      = 144,
  parameter int LOG2_BATCH = 10,
  localparam int WA = (WORDS > 1) ? $clog2(WORDS) : 1
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          in_valid,
  input  logic [WA-1:0] in_addr,
  input  word_t         in_data,
  output logic          upd_valid,
  output logic [WA-1:0] upd_addr,
  output word_t         upd_delta,
  output logic          done
);
  word_t mem [WORDS];
  logic [$clog2(WORDS+1)-1:0] got;
  logic busy;
  logic [WA-1:0] ptr;

  always_ff @(posedge clk) if (in_valid) mem[in_addr] <= in_data;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      got <= '0; busy <= 1'b0; ptr <= '0; done <= 1'b0;
    end else begin
      done <= 1'b0;
      if (in_valid) got <= got + 1'b1;
      if (!busy && got == ($clog2(WORDS+1))'(WORDS)) begin
        busy <= 1'b1; ptr <= '0; got <= '0;
      end else if (busy) begin
        if (ptr == WA'(WORDS-1)) begin busy <= 1'b0; done <= 1'b1; end
        else ptr <= ptr + 1'b1;
      end
    end
  end

  assign upd_valid = busy;
  assign upd_addr  = ptr;
  assign upd_delta = mem[ptr] >>> LOG2_BATCH;
endmodule
