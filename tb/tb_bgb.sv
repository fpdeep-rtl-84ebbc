// tb_bgb -- writes 16 gradient sums in scrambled order; only after the last
// one may the buffer start, and it must then give, one per cycle in address
// order, the averaged gradient (sum >>> LOG2_BATCH, here 2) and pulse done
// once. Done twice to check the count restarts.
module tb_bgb;
  import fpdeep_pkg::*;
  localparam int WORDS = 16, L2 = 2;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic in_valid = 0, upd_valid, done;
  logic [3:0] in_addr = '0, upd_addr;
  word_t in_data = '0, upd_delta;
  int checks = 0, failures = 0;
  int g [WORDS];

  bgb #(.WORDS(WORDS), .LOG2_BATCH(L2)) dut (.clk, .rst_n, .in_valid, .in_addr, .in_data,
    .upd_valid, .upd_addr, .upd_delta, .done);

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int round = 0; round < 2; round++) begin
      int k, ndone;
      for (int i = 0; i < WORDS; i++) g[i] = int'($urandom % 2001) - 1000;
      for (int i = 0; i < WORDS; i++) begin
        @(negedge clk); in_valid = 1; in_addr = 4'((i * 5) % WORDS); in_data = g[(i * 5) % WORDS];
        #1;
        if (i < WORDS - 1) begin
          checks++;
          if (upd_valid) begin failures++; $display("FAIL started early"); end
        end
      end
      @(negedge clk); in_valid = 0;
      k = 0; ndone = 0;
      for (int c = 0; c < WORDS + 4; c++) begin
        #1;
        if (upd_valid) begin
          checks++;
          if (int'(upd_addr) != k || upd_delta != (g[k] >>> L2)) begin
            failures++; $display("FAIL upd %0d: addr=%0d delta=%0d", k, upd_addr, upd_delta);
          end
          k++;
        end
        if (done) ndone++;
        @(negedge clk);
      end
      checks++;
      if (k != WORDS || ndone != 1) begin failures++; $display("FAIL k=%0d done=%0d", k, ndone); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (2000) @(posedge clk); failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
