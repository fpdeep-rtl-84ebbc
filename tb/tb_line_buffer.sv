// tb_line_buffer -- streams three 7 x 7 two-channel maps through a 3 x 3
// line buffer. Every window must hold exactly the 3 x 3 pixels under its
// top-left corner, carry the right raster position, and the last window of a
// map must be flagged. Frame 1 runs without stalls and must take W*W cycles
// (one pixel per cycle); frames 2 and 3 see random gaps on both sides.
module tb_line_buffer;
  import fpdeep_pkg::*;
  localparam int C = 2, W = 7, K = 3, HO = W-K+1, NF = 3;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic in_valid = 0, in_ready, out_valid, out_ready = 0, out_last;
  logic [C-1:0][DW-1:0] in_pix = '0;
  logic [C-1:0][K*K-1:0][DW-1:0] out_win;
  logic [$clog2(HO*HO)-1:0] out_pos;
  int checks = 0, failures = 0;
  int img [NF][C][W][W];
  int nwin = 0;
  int t_first, t_last;
  int cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  line_buffer #(.C(C), .W(W), .K(K)) dut (.clk, .rst_n, .in_valid, .in_ready, .in_pix,
    .out_valid, .out_ready, .out_win, .out_pos, .out_last);

  // consumer
  initial begin
    forever begin
      @(negedge clk);
      out_ready = (nwin < HO*HO) ? 1'b1 : (($urandom % 3) != 0);
      #1;
      if (out_valid && out_ready) begin
        int f, p, y, x;
        bit ok;
        f = nwin / (HO*HO); p = nwin % (HO*HO); y = p / HO; x = p % HO;
        ok = (int'(out_pos) == p) && (out_last == (p == HO*HO-1));
        for (int c = 0; c < C; c++)
          for (int kh = 0; kh < K; kh++)
            for (int kw = 0; kw < K; kw++)
              if (int'(out_win[c][kh*K+kw]) != img[f][c][y+kh][x+kw]) ok = 0;
        checks++;
        if (!ok) begin failures++; $display("FAIL window f=%0d p=%0d pos=%0d", f, p, out_pos); end
        nwin++;
      end
    end
  end

  initial begin
    for (int f = 0; f < NF; f++) for (int c = 0; c < C; c++)
      for (int y = 0; y < W; y++) for (int x = 0; x < W; x++) img[f][c][y][x] = int'($urandom % 1000);
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int f = 0; f < NF; f++)
      for (int p = 0; p < W*W; p++) begin
        @(negedge clk);
        if (f > 0) while (($urandom % 3) == 0) begin in_valid = 0; @(negedge clk); end
        in_valid = 1;
        for (int c = 0; c < C; c++) in_pix[c] = img[f][c][p/W][p%W];
        #1; while (!in_ready) begin @(negedge clk); #1; end
        if (f == 0 && p == 0) t_first = cyc;
        if (f == 0 && p == W*W-1) t_last = cyc;
        @(posedge clk); #1 in_valid = 0;
      end
    wait (nwin == NF*HO*HO);
    repeat (5) @(posedge clk);
    checks++;
    if (t_last - t_first != W*W-1) begin
      failures++; $display("FAIL rate: %0d cycles for %0d pixels", t_last - t_first + 1, W*W);
    end
    checks++;
    if (nwin != NF*HO*HO) failures++;
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
