// sfu -- Special Function Unit: activation and normalisation of a finished
// output feature.
//
// Applies ReLU (when RELU is set) and then rescales by an arithmetic right
// shift of NORM_SHIFT bits (the normalisation of a fixed-point value; 0
// leaves it unchanged). Combinational. `clamped` reports that ReLU set a
// negative value to zero. Pooling ("sampling") is not part of this unit.
//
// Origin: FPDeep's SFU activates, normalises and samples; here only ReLU and
// a shift are built (no pooling), which is this implementation's reduction.
module sfu
  import fpdeep_pkg::*;
#(
  parameter bit RELU       = 1'b1,
  parameter int NORM_SHIFT = 0
) (
  input  word_t x,
  output word_t y,
  output logic  clamped
);
  always_comb begin
    clamped = RELU && (x < 0);
    y       = (clamped ? word_t'(0) : x) >>> NORM_SHIFT;
  end
endmodule
