// tb_conv_tile -- checks that a 3 x 3 tile returns the dot product of the
// window and the kernel (32-bit wrap-around arithmetic) for random and
// corner-case inputs.
module tb_conv_tile;
  import fpdeep_pkg::*;
  localparam int K = 3;
  logic [K*K-1:0][DW-1:0] a, w;
  word_t y;
  int checks = 0, failures = 0;

  conv_tile #(.K(K)) dut (.a, .w, .y);

  initial begin
    for (int t = 0; t < 500; t++) begin
      int expv;
      expv = 0;
      for (int e = 0; e < K*K; e++) begin
        a[e] = (t < 2) ? ((t == 0) ? 32'h7fff_ffff : 32'h8000_0000) : 32'($urandom_range(0, 400)) - 32'd200;
        w[e] = (t < 2) ? 32'd3 : 32'($urandom_range(0, 60)) - 32'd30;
        expv += int'(a[e]) * int'(w[e]);
      end
      #1;
      checks++;
      if (y != expv) begin
        failures++;
        $display("FAIL t=%0d got %0d exp %0d", t, y, expv);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
