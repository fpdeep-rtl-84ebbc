// tb_pg_module -- parameter gradients of a small layer (K = 3, W = 5,
// S_IC = 2, OC = 4, P = 2) with a mini-batch of 2 samples, over 4 samples.
// The rows the module adds into the gradient buffer are summed here and
// compared with the direct result
// dW[oc][i][kh][kw] = sum over output pixels (r,c) of E[oc](r,c) * A[i](r+kh, c+kw),
// stored in the same row layout as the weights. The update pulse must come
// exactly once per 2 samples and after the last window of the 2nd sample;
// the buffer's ready is toggled at random to show the module waits.
module tb_pg_module;
  import fpdeep_pkg::*;
  localparam int K = 3, W = 5, S_IC = 2, OC = 4, P = 2, G = OC/P, HO = W-K+1, NF = 4, L2 = 1;
  localparam int ROW_W = P*S_IC*K*K;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic act_v = 0, act_r, err_v = 0, err_r, acc_v, acc_r = 0, acc_row, update;
  logic [S_IC-1:0][DW-1:0] act_vec = '0;
  logic [OC-1:0][DW-1:0] err_vec = '0;
  logic [15:0] err_pos = '0;
  logic [ROW_W-1:0][DW-1:0] acc_vec;
  logic [31:0] n_windows;
  int checks = 0, failures = 0;
  int A [NF][S_IC][W*W];
  int E [NF][OC][HO*HO];
  int got [G][ROW_W];
  int expv [G][ROW_W];
  int n_upd = 0, frames_err = 0;
  bit done = 0;

  pg_module #(.K(K), .W(W), .S_IC(S_IC), .OC(OC), .P(P), .LOG2_BATCH(L2)) dut (
    .clk, .rst_n, .act_valid(act_v), .act_ready(act_r), .act_vec, .err_valid(err_v), .err_ready(err_r),
    .err_vec, .err_pos, .acc_valid(acc_v), .acc_ready(acc_r), .acc_row, .acc_vec, .update, .n_windows);

  always @(posedge clk) begin
    if (acc_v) for (int e = 0; e < ROW_W; e++) got[acc_row][e] += int'(acc_vec[e]);
    if (update) begin
      n_upd++;
      checks++;
      // the pulse follows the last window of every 2nd sample
      if (int'(n_windows) != n_upd * 2 * HO*HO) begin failures++; $display("FAIL update after %0d windows", n_windows); end
    end
  end

  initial begin
    for (int g = 0; g < G; g++) for (int e = 0; e < ROW_W; e++) begin got[g][e] = 0; expv[g][e] = 0; end
    for (int f = 0; f < NF; f++) begin
      for (int t = 0; t < S_IC; t++) for (int x = 0; x < W*W; x++) A[f][t][x] = int'($urandom % 41) - 20;
      for (int o = 0; o < OC; o++) for (int p = 0; p < HO*HO; p++) E[f][o][p] = int'($urandom % 41) - 20;
      for (int o = 0; o < OC; o++) for (int t = 0; t < S_IC; t++) for (int kh = 0; kh < K; kh++) for (int kw = 0; kw < K; kw++)
        for (int p = 0; p < HO*HO; p++)
          expv[o/P][((o%P)*S_IC + t)*K*K + kh*K + kw] += E[f][o][p] * A[f][t][(p/HO + kh)*W + p%HO + kw];
    end
    repeat (2) @(posedge clk);
    rst_n = 1;
    fork
      begin : drive_act
        for (int f = 0; f < NF; f++) for (int x = 0; x < W*W; x++) begin
          @(negedge clk);
          act_v = 1;
          for (int t = 0; t < S_IC; t++) act_vec[t] = A[f][t][x];
          #1; while (!act_r) begin @(negedge clk); #1; end
          @(posedge clk); #1 act_v = 0;
        end
      end
      begin : drive_err
        for (int f = 0; f < NF; f++) for (int p = 0; p < HO*HO; p++) begin
          @(negedge clk);
          while (($urandom % 3) == 0) @(negedge clk);
          err_v = 1; err_pos = 16'(p);
          for (int o = 0; o < OC; o++) err_vec[o] = E[f][o][p];
          #1; while (!err_r) begin @(negedge clk); #1; end
          @(posedge clk); #1 err_v = 0;
        end
        done = 1;
      end
      begin : ready_toggle
        while (!done) begin @(negedge clk); acc_r = ($urandom % 4) != 0; end
      end
    join
    repeat (4) @(negedge clk);
    for (int g = 0; g < G; g++) for (int e = 0; e < ROW_W; e++) begin
      checks++;
      if (got[g][e] != expv[g][e]) begin failures++; $display("FAIL dW row %0d word %0d: %0d exp %0d", g, e, got[g][e], expv[g][e]); end
    end
    checks++;
    if (n_upd != NF / 2 || int'(n_windows) != NF*HO*HO) begin failures++; $display("FAIL updates %0d windows %0d", n_upd, n_windows); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (20000) @(posedge clk); failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
