// tb_sfu -- ReLU and normalising shift: negative inputs become zero and are
// reported as clamped, others are shifted right by NORM_SHIFT (here 2).
module tb_sfu;
  import fpdeep_pkg::*;
  word_t x, y;
  logic clamped;
  int checks = 0, failures = 0;
  sfu #(.RELU(1'b1), .NORM_SHIFT(2)) dut (.x, .y, .clamped);
  initial begin
    for (int t = 0; t < 400; t++) begin
      int expv;
      x = (t == 0) ? 0 : (t == 1) ? -1 : word_t'($urandom_range(0, 2000)) - 1000;
      #1;
      expv = (x < 0) ? 0 : (int'(x) >>> 2);
      checks++;
      if (y != expv || clamped != (x < 0)) begin
        failures++; $display("FAIL x=%0d y=%0d clamped=%0b", x, y, clamped);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    #100000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
