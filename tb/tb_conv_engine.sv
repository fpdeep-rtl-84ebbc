// tb_conv_engine -- a CE of 4 tiles (3 x 3): the registered result must be
// the sum of the four tile dot products, with its tag, exactly one cycle
// after the inputs, and out_valid must follow in_valid by one cycle.
module tb_conv_engine;
  import fpdeep_pkg::*;
  localparam int K = 3, NT = 4, TAGW = 8;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic in_valid = 0, out_valid;
  logic [TAGW-1:0] in_tag = '0, out_tag;
  logic [NT-1:0][K*K-1:0][DW-1:0] a, w;
  word_t y;
  int checks = 0, failures = 0;

  conv_engine #(.K(K), .NT(NT), .TAGW(TAGW)) dut (.clk, .rst_n, .in_valid, .in_tag, .a, .w,
    .out_valid, .out_tag, .y);

  int exp_q [$];
  int tag_q [$];
  bit v_d = 0;

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 300; t++) begin
      int expv;
      expv = 0;
      @(negedge clk);
      in_valid = ($urandom % 4) != 0;
      in_tag = TAGW'($urandom);
      for (int n = 0; n < NT; n++)
        for (int e = 0; e < K*K; e++) begin
          a[n][e] = 32'($urandom_range(0, 200)) - 32'd100;
          w[n][e] = 32'($urandom_range(0, 20)) - 32'd10;
          expv += int'(a[n][e]) * int'(w[n][e]);
        end
      if (in_valid) begin exp_q.push_back(expv); tag_q.push_back(int'(in_tag)); end
      v_d = in_valid;
      @(posedge clk); #1;
      checks++;
      if (out_valid != v_d) begin failures++; $display("FAIL latency t=%0d", t); end
      if (out_valid) begin
        int e1, t1;
        e1 = exp_q.pop_front(); t1 = tag_q.pop_front();
        checks++;
        if (y != e1 || int'(out_tag) != t1) begin
          failures++; $display("FAIL t=%0d y=%0d exp %0d", t, y, e1);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
