// tb_fpdeep_cluster -- end-to-end test of the 4-node cluster at its default
// parameters: one CONV layer (IC = 16, OC = 8, 3 x 3 kernels, 7 x 7 maps)
// trained over a full mini-batch of 1024 samples, plus one more sample.
//
// The weights are loaded through the forward port; the last weight row of
// node 3 is loaded into node 0's BPRAM instead and reaches node 3 by the
// parameter-balancing push. For every sample the bench sends the 16-channel
// input map, checks all 200 activated outputs against a reference
// convolution, answers with a random error map and checks all 784
// back-propagated errors. After the mini-batch it waits until every node has
// updated its weights (node 3's balanced row through node 0's BGB/BPRAM and a
// second push) and checks the forward and backward results of sample 1025
// against the reference weights W + (sum of gradients >>> 10).
// Output ports are randomly back-pressured. Every mechanism (bypass,
// partial-sum reduction, ReLU, stall, error bypass, own-errors-first,
// parameter push, gradient return, LPRAM and BPRAM updates) must occur.
module tb_fpdeep_cluster;
  import fpdeep_pkg::*;

  localparam int N = 4, K = 3, W = 7, S_IC = 4, OC = 8, P = 4;
  localparam int IC = N*S_IC, HO = W-K+1, G = OC/P, ROW_W = P*S_IC*K*K;
  localparam int LP_WORDS = G*ROW_W, BATCH = 1024, NS = BATCH + 1;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic fi_v = 0, fi_r, fo_v, fo_r = 0, bi_v = 0, bi_r, bo_v, bo_r = 0, bal_push = 0;
  pkt_t fi_p = '0, fo_p, bi_p = '0, bo_p;
  node_stats_t stats [N];

  fpdeep_cluster dut (
    .clk, .rst_n,
    .fwd_in_valid(fi_v), .fwd_in_ready(fi_r), .fwd_in_pkt(fi_p),
    .fwd_out_valid(fo_v), .fwd_out_ready(fo_r), .fwd_out_pkt(fo_p),
    .bwd_in_valid(bi_v), .bwd_in_ready(bi_r), .bwd_in_pkt(bi_p),
    .bwd_out_valid(bo_v), .bwd_out_ready(bo_r), .bwd_out_pkt(bo_p),
    .bal_push, .stats);

  int checks = 0, failures = 0;
  int A [NS][IC][W][W];
  int E [NS][OC][HO][HO];
  int W0 [OC][IC][K][K];
  int W1 [OC][IC][K][K];
  int out_cnt = 0, ein_cnt = 0;
  int ein_k [IC];
  int relu_zero = 0;
  bit done_fwd = 0, done_bwd = 0, updated = 0;
  longint cycles = 0;

  always @(posedge clk) cycles <= cycles + 1;

  function automatic int rnd(int lo, int hi);
    return lo + int'($urandom % (hi - lo + 1));
  endfunction

  function automatic int wt(int s, int oc, int ic, int kh, int kw);
    return (s < BATCH) ? W0[oc][ic][kh][kw] : W1[oc][ic][kh][kw];
  endfunction

  function automatic int ref_raw(int s, int oc, int y, int x);
    int acc = 0;
    for (int ic = 0; ic < IC; ic++)
      for (int kh = 0; kh < K; kh++)
        for (int kw = 0; kw < K; kw++)
          acc += A[s][ic][y+kh][x+kw] * wt(s, oc, ic, kh, kw);
    return acc;
  endfunction

  function automatic int ref_ein(int s, int ic, int y, int x);
    int acc = 0;
    for (int oc = 0; oc < OC; oc++)
      for (int kh = 0; kh < K; kh++)
        for (int kw = 0; kw < K; kw++)
          if (y-kh >= 0 && y-kh < HO && x-kw >= 0 && x-kw < HO)
            acc += E[s][oc][y-kh][x-kw] * wt(s, oc, ic, kh, kw);
    return acc;
  endfunction

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("FAIL %s", what);
    end
  endtask

  // ---- drivers: change inputs at the falling edge, transfer at the rising edge
  task automatic send_fwd(pkt_t p);
    @(negedge clk); fi_v = 1; fi_p = p;
    #1; while (!fi_r) begin @(negedge clk); #1; end
    @(posedge clk); #1 fi_v = 0;
  endtask
  task automatic send_bwd(pkt_t p);
    @(negedge clk); bi_v = 1; bi_p = p;
    #1; while (!bi_r) begin @(negedge clk); #1; end
    @(posedge clk); #1 bi_v = 0;
  endtask

  function automatic pkt_t mk(pkt_type_e t, int layer, int dst, int ch, int addr, int data);
    pkt_t p;
    p = '0; p.typ = t; p.layer = 4'(layer); p.dst = 4'(dst);
    p.ch = 12'(ch); p.addr = 16'(addr); p.data = data;
    return p;
  endfunction

  // ---- forward output receiver
  initial begin
    forever begin
      @(negedge clk);
      fo_r = ($urandom % 8) != 0;
      #1;
      if (fo_v && fo_r) begin
        int s, r, pos, oc, expv;
        s = out_cnt / (OC*HO*HO); r = out_cnt % (OC*HO*HO);
        pos = r / OC; oc = r % OC;
        expv = ref_raw(s, oc, pos / HO, pos % HO);
        if (expv < 0) begin relu_zero++; expv = 0; end
        check(fo_p.typ == PKT_ACT && fo_p.layer == 4'd1 && int'(fo_p.ch) == oc &&
              int'(fo_p.addr) == pos && fo_p.data == expv,
              $sformatf("out s=%0d pos=%0d oc=%0d got ch=%0d addr=%0d %0d exp %0d",
                        s, pos, oc, fo_p.ch, fo_p.addr, fo_p.data, expv));
        out_cnt++;
      end
    end
  end

  // ---- backward output receiver (per channel, errors arrive in order)
  initial begin
    for (int c = 0; c < IC; c++) ein_k[c] = 0;
    forever begin
      @(negedge clk);
      bo_r = ($urandom % 8) != 0;
      #1;
      if (bo_v && bo_r) begin
        int c, s, pos, expv;
        c = int'(bo_p.ch);
        if (c >= IC) begin
          check(0, "bad error channel");
        end else begin
          s = ein_k[c] / (W*W); pos = ein_k[c] % (W*W);
          expv = ref_ein(s, c, pos / W, pos % W);
          check(bo_p.typ == PKT_ERR && bo_p.layer == 4'd0 && int'(bo_p.addr) == pos &&
                bo_p.data == expv,
                $sformatf("ein s=%0d ch=%0d pos=%0d got addr=%0d %0d exp %0d",
                          s, c, pos, bo_p.addr, bo_p.data, expv));
          ein_k[c]++;
          ein_cnt++;
        end
      end
    end
  end

  // ---- stimulus
  initial begin
    int dsum [OC][IC][K][K];
    for (int s = 0; s < NS; s++) begin
      for (int c = 0; c < IC; c++) for (int y = 0; y < W; y++) for (int x = 0; x < W; x++)
        A[s][c][y][x] = rnd(-31, 31);
      for (int c = 0; c < OC; c++) for (int y = 0; y < HO; y++) for (int x = 0; x < HO; x++)
        E[s][c][y][x] = rnd(-31, 31);
    end
    for (int o = 0; o < OC; o++) for (int c = 0; c < IC; c++)
      for (int kh = 0; kh < K; kh++) for (int kw = 0; kw < K; kw++) begin
        W0[o][c][kh][kw] = rnd(-15, 15);
        dsum[o][c][kh][kw] = 0;
      end
    for (int s = 0; s < BATCH; s++)
      for (int o = 0; o < OC; o++) for (int c = 0; c < IC; c++)
        for (int kh = 0; kh < K; kh++) for (int kw = 0; kw < K; kw++)
          for (int y = 0; y < HO; y++) for (int x = 0; x < HO; x++)
            dsum[o][c][kh][kw] += E[s][o][y][x] * A[s][c][y+kh][x+kw];
    for (int o = 0; o < OC; o++) for (int c = 0; c < IC; c++)
      for (int kh = 0; kh < K; kh++) for (int kw = 0; kw < K; kw++)
        W1[o][c][kh][kw] = W0[o][c][kh][kw] + (dsum[o][c][kh][kw] >>> 10);

    repeat (5) @(posedge clk);
    rst_n = 1;

    // load weights; node N-1's last row goes to node 0's BPRAM
    for (int n = 0; n < N; n++)
      for (int g = 0; g < G; g++)
        for (int j = 0; j < P; j++) for (int i = 0; i < S_IC; i++) for (int e = 0; e < K*K; e++) begin
          int v, wa;
          v = W0[g*P+j][n*S_IC+i][e/K][e%K];
          wa = (j*S_IC + i)*K*K + e;
          if (n == N-1 && g == G-1) send_fwd(mk(PKT_PARAM, 0, 0, 0, LP_WORDS + wa, v));
          else                      send_fwd(mk(PKT_PARAM, 0, n, 0, g*ROW_W + wa, v));
        end
    @(negedge clk); fi_v = 0; bal_push = 1;
    @(negedge clk); bal_push = 0;
    wait (stats[N-1].param_loaded == 32'(LP_WORDS));

    fork
      // activations
      begin
        for (int s = 0; s < NS; s++) begin
          if (s == BATCH) begin
            @(negedge clk); fi_v = 0;
            wait (updated);
          end
          for (int y = 0; y < W; y++) for (int x = 0; x < W; x++) for (int c = 0; c < IC; c++)
            send_fwd(mk(PKT_ACT, 0, 0, c, y*W + x, A[s][c][y][x]));
        end
        @(negedge clk); fi_v = 0;
      end
      // errors, each sample after its outputs
      begin
        for (int s = 0; s < NS; s++) begin
          wait (out_cnt >= (s+1)*OC*HO*HO);
          for (int pos = 0; pos < HO*HO; pos++) for (int o = 0; o < OC; o++)
            send_bwd(mk(PKT_ERR, 1, 0, o, pos, E[s][o][pos/HO][pos%HO]));
        end
        @(negedge clk); bi_v = 0;
      end
      // mini-batch update completion
      begin
        wait (stats[0].lpram_updates == 1 && stats[1].lpram_updates == 1 &&
              stats[2].lpram_updates == 1 && stats[N-1].lpram_updates == 1 &&
              stats[0].bpram_updates == 1 &&
              stats[N-1].param_loaded == 32'(LP_WORDS + ROW_W));
        updated = 1;
      end
    join
    wait (out_cnt == NS*OC*HO*HO && ein_cnt == NS*IC*W*W);
    repeat (20) @(posedge clk);

    check(out_cnt == NS*OC*HO*HO, "output count");
    check(ein_cnt == NS*IC*W*W, "error count");
    // mechanisms
    check(stats[0].act_bypass > 0 && stats[N-2].act_bypass > 0, "activation bypass");
    check(stats[N-1].act_bypass == 0, "last node drops foreign activations");
    check(stats[0].act_taken == 32'(NS*S_IC*W*W), "activations kept by node 0");
    check(stats[1].psum_added > 0 && stats[N-1].psum_added == 32'(NS*OC*HO*HO), "partial-sum reduction");
    check(stats[N-1].relu_clamped == 32'(relu_zero) && relu_zero > 0, "ReLU in SFU");
    check(stats[0].fwd_stall + stats[N-1].fwd_stall > 0, "forward back-pressure stall");
    check(stats[1].err_bypass > 0, "error bypass");
    check(stats[0].own_err_first + stats[1].own_err_first + stats[2].own_err_first > 0,
          "own errors before transit traffic");
    check(stats[0].param_sent == 32'(2*ROW_W), "balanced parameters pushed twice");
    check(stats[N-1].grad_sent == 32'(ROW_W), "gradients returned to holder");
    check(stats[0].bpram_updates == 1, "BPRAM update");
    for (int n = 0; n < N; n++) begin
      check(stats[n].lpram_updates == 1, $sformatf("LPRAM update node %0d", n));
      check(stats[n].fp_windows == 32'(NS*HO*HO), "FP windows");
      check(stats[n].eb_windows == 32'(NS*W*W), "EB windows");
      check(stats[n].pg_windows == 32'(NS*HO*HO), "PG windows");
    end
    $display("mechanisms: act_bypass=%0d psum=%0d relu=%0d stall=%0d err_bypass=%0d own_first=%0d param_sent=%0d grad_sent=%0d",
             stats[0].act_bypass, stats[N-1].psum_added, relu_zero, stats[0].fwd_stall + stats[N-1].fwd_stall,
             stats[1].err_bypass, stats[0].own_err_first + stats[1].own_err_first + stats[2].own_err_first,
             stats[0].param_sent, stats[N-1].grad_sent);
    $display("cycles=%0d for %0d samples", cycles, NS);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (6000000) @(posedge clk);
    failures++;
    $display("watchdog: out=%0d ein=%0d", out_cnt, ein_cnt);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
