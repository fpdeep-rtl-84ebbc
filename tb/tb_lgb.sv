// tb_lgb -- Local Gradient Buffer with two rows, one local and one remote
// (K = 3, S_IC = 1, P = 2, mini-batch 2^2). Random gradient rows are added,
// then an update is started: the local row must come back from the LPRAM
// model as old + (sum >>> 2), the remote row must leave as GRAD packets to
// the holder with word addresses 0.. and the raw sums, under random
// back-pressure. A second round checks that the rows were cleared and that
// accumulation is refused while the update runs.
module tb_lgb;
  import fpdeep_pkg::*;
  localparam int K = 3, S_IC = 1, P = 2, ROWS = 2, L2 = 2, HOLDER = 5, ROW_W = P*S_IC*K*K;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic acc_valid = 0, acc_ready, acc_row = 0, update_start = 0, busy, lp_row, lp_we;
  logic grad_valid, grad_ready = 0;
  logic [ROW_W-1:0][DW-1:0] acc_vec = '0, lp_rdata, lp_wdata;
  pkt_t grad_pkt;
  logic [31:0] n_updates;
  int checks = 0, failures = 0;
  int lp_mem [ROWS][ROW_W];
  int sum [ROWS][ROW_W];
  int exp_lp [ROW_W];

  lgb #(.K(K), .S_IC(S_IC), .P(P), .ROWS(ROWS), .LOCAL_ROWS(1), .LOG2_BATCH(L2), .HOLDER(HOLDER)) dut (
    .clk, .rst_n, .acc_valid, .acc_ready, .acc_row, .acc_vec, .update_start, .busy, .lp_row,
    .lp_rdata, .lp_we, .lp_wdata, .grad_valid, .grad_ready, .grad_pkt, .n_updates);

  always_comb for (int e = 0; e < ROW_W; e++) lp_rdata[e] = lp_mem[lp_row][e];
  always @(posedge clk) if (lp_we) for (int e = 0; e < ROW_W; e++) lp_mem[lp_row][e] <= lp_wdata[e];

  initial begin
    for (int r = 0; r < ROWS; r++) for (int e = 0; e < ROW_W; e++) lp_mem[r][e] = r*1000 + e;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int round = 0; round < 2; round++) begin
      int got, wrote;
      for (int r = 0; r < ROWS; r++) for (int e = 0; e < ROW_W; e++) sum[r][e] = 0;
      for (int n = 0; n < 12; n++) begin
        @(negedge clk);
        acc_valid = 1; acc_row = 1'($urandom % 2);
        for (int e = 0; e < ROW_W; e++) begin
          acc_vec[e] = int'($urandom % 201) - 100;
          sum[acc_row][e] += int'(acc_vec[e]);
        end
      end
      @(negedge clk); acc_valid = 0;
      for (int e = 0; e < ROW_W; e++) exp_lp[e] = lp_mem[0][e] + (sum[0][e] >>> L2);
      update_start = 1;
      @(negedge clk); update_start = 0;
      checks++;
      if (!busy || acc_ready) begin failures++; $display("FAIL busy/acc_ready during update"); end
      // a row offered now must be ignored
      acc_valid = 1; acc_row = 1;
      for (int e = 0; e < ROW_W; e++) acc_vec[e] = 32'd7777;
      got = 0;
      while (busy) begin
        grad_ready = ($urandom % 3) != 0; #1;
        if (grad_valid && grad_ready) begin
          checks++;
          if (grad_pkt.typ != PKT_GRAD || int'(grad_pkt.dst) != HOLDER || int'(grad_pkt.addr) != got ||
              int'(grad_pkt.data) != sum[1][got]) begin
            failures++; $display("FAIL grad %0d: addr=%0d data=%0d exp %0d", got, grad_pkt.addr, grad_pkt.data, sum[1][got]);
          end
          got++;
        end
        @(negedge clk);
      end
      acc_valid = 0; grad_ready = 0;
      checks++;
      if (got != ROW_W || int'(n_updates) != round + 1) begin failures++; $display("FAIL got=%0d n_updates=%0d", got, n_updates); end
      for (int e = 0; e < ROW_W; e++) begin
        checks++;
        if (lp_mem[0][e] != exp_lp[e]) begin failures++; $display("FAIL lp word %0d: %0d exp %0d", e, lp_mem[0][e], exp_lp[e]); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (3000) @(posedge clk); failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
