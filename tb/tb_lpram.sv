// tb_lpram -- loads every word of a 2-row LPRAM (P = 4, S_IC = 4, K = 3)
// through the word port, then checks all three row-read ports against the
// expected layout and that a row write replaces exactly one row.
module tb_lpram;
  import fpdeep_pkg::*;
  localparam int K = 3, S_IC = 4, P = 4, ROWS = 2, ROW_W = P*S_IC*K*K;
  logic clk = 0;
  always #5 clk = ~clk;
  logic fp_row = 0, eb_row = 0, up_row = 0, row_we = 0, row_wa = 0, word_we = 0;
  logic [ROW_W-1:0][DW-1:0] fp_data, eb_data, up_data, row_wd = '0;
  logic [$clog2(ROWS*ROW_W)-1:0] word_wa = '0;
  word_t word_wd = '0;
  int checks = 0, failures = 0;

  lpram #(.K(K), .S_IC(S_IC), .P(P), .ROWS(ROWS)) dut (.clk, .fp_row, .fp_data, .eb_row, .eb_data,
    .up_row, .up_data, .row_we, .row_wa, .row_wd, .word_we, .word_wa, .word_wd);

  function automatic int val(int a); return a * 13 - 700; endfunction

  initial begin
    for (int a = 0; a < ROWS*ROW_W; a++) begin
      @(negedge clk); word_we = 1; word_wa = 9'(a); word_wd = val(a);
    end
    @(negedge clk); word_we = 0;
    for (int r = 0; r < ROWS; r++) begin
      fp_row = 1'(r); eb_row = 1'(1 - r); up_row = 1'(r); #1;
      for (int e = 0; e < ROW_W; e++) begin
        checks++;
        if (int'(fp_data[e]) != val(r*ROW_W + e) || int'(eb_data[e]) != val((1-r)*ROW_W + e) ||
            int'(up_data[e]) != val(r*ROW_W + e)) begin
          failures++; $display("FAIL r=%0d e=%0d", r, e);
        end
      end
    end
    @(negedge clk); row_we = 1; row_wa = 1;
    for (int e = 0; e < ROW_W; e++) row_wd[e] = 32'(e);
    @(negedge clk); row_we = 0; fp_row = 1; eb_row = 0; #1;
    for (int e = 0; e < ROW_W; e++) begin
      checks++;
      if (int'(fp_data[e]) != e || int'(eb_data[e]) != val(e)) begin failures++; $display("FAIL row write e=%0d", e); end
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
