// tb_fp_module -- forward propagation of a small layer (K = 3, W = 5,
// S_IC = 2, OC = 4, P = 2) on two frames. Two instances see the same input
// activations and weights: a first-and-not-last node, whose outputs must be
// the raw partial sums as PSUM packets, and a last-but-not-first node, which
// must add the partial sums arriving on its link, apply ReLU and send ACT
// packets. Every output word is compared with a direct convolution; the
// number of windows, of ReLU clamps and of partial sums added are checked,
// and consecutive windows must be at least G = OC/P cycles apart.
module tb_fp_module;
  import fpdeep_pkg::*;
  localparam int K = 3, W = 5, S_IC = 2, OC = 4, P = 2, G = OC/P, HO = W-K+1, NF = 2, LAYER = 3;
  localparam int ROW_W = P*S_IC*K*K, NOUT = NF*HO*HO*OC;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic act_v = 0, ra, rb, oa_v, ob_v, oa_r = 0, ob_r = 0, rin_v = 0, rin_r, rin_r_b;
  logic [S_IC-1:0][DW-1:0] act_vec = '0;
  logic lp_row_a, lp_row_b;
  logic [ROW_W-1:0][DW-1:0] lp_a, lp_b;
  pkt_t rin_pkt = '0, oa_pkt, ob_pkt;
  logic [31:0] nwa, nwb, nca, ncb, npa, npb;
  int checks = 0, failures = 0;
  int A [NF][S_IC][W*W];
  int Wt [OC][S_IC][K*K];
  int ps [NF][HO*HO][OC];
  int conv [NF][HO*HO][OC];
  int na = 0, nb = 0, exp_clamp = 0;
  logic [G-1:0][ROW_W-1:0][DW-1:0] wrow;

  // a: first node of the layer, not last; b: last node, not first.
  fp_module #(.K(K), .W(W), .S_IC(S_IC), .OC(OC), .P(P), .FIRST(1'b1), .LAST(1'b0), .LAYER(LAYER)) u_a (
    .clk, .rst_n, .act_valid(act_v && rb), .act_ready(ra), .act_vec, .lp_row(lp_row_a), .lp_data(lp_a),
    .rin_valid(1'b0), .rin_ready(rin_r_b), .rin_pkt('0), .out_valid(oa_v), .out_ready(oa_r), .out_pkt(oa_pkt),
    .n_windows(nwa), .n_clamped(nca), .n_psum(npa));
  fp_module #(.K(K), .W(W), .S_IC(S_IC), .OC(OC), .P(P), .FIRST(1'b0), .LAST(1'b1), .LAYER(LAYER)) u_b (
    .clk, .rst_n, .act_valid(act_v && ra), .act_ready(rb), .act_vec, .lp_row(lp_row_b), .lp_data(lp_b),
    .rin_valid(rin_v), .rin_ready(rin_r), .rin_pkt, .out_valid(ob_v), .out_ready(ob_r), .out_pkt(ob_pkt),
    .n_windows(nwb), .n_clamped(ncb), .n_psum(npb));
  assign lp_a = wrow[lp_row_a];
  assign lp_b = wrow[lp_row_b];

  int last_w = -1, min_gap = 1000, cyc = 0;
  logic [31:0] nwa_q = 0;
  always @(posedge clk) begin
    cyc++;
    if (rst_n && nwa != nwa_q) begin
      if (last_w >= 0 && cyc - last_w < min_gap) min_gap = cyc - last_w;
      last_w = cyc;
    end
    nwa_q <= rst_n ? nwa : 32'd0;
  end

  initial begin
    for (int f = 0; f < NF; f++) for (int t = 0; t < S_IC; t++) for (int x = 0; x < W*W; x++)
      A[f][t][x] = int'($urandom % 41) - 20;
    for (int o = 0; o < OC; o++) for (int t = 0; t < S_IC; t++) for (int e = 0; e < K*K; e++) begin
      Wt[o][t][e] = int'($urandom % 21) - 10;
      wrow[o/P][((o%P)*S_IC + t)*K*K + e] = Wt[o][t][e];
    end
    for (int f = 0; f < NF; f++) for (int p = 0; p < HO*HO; p++) for (int o = 0; o < OC; o++) begin
      conv[f][p][o] = 0;
      for (int t = 0; t < S_IC; t++) for (int kh = 0; kh < K; kh++) for (int kw = 0; kw < K; kw++)
        conv[f][p][o] += A[f][t][(p/HO + kh)*W + p%HO + kw] * Wt[o][t][kh*K+kw];
      ps[f][p][o] = int'($urandom % 401) - 200;
      if (conv[f][p][o] + ps[f][p][o] < 0) exp_clamp++;
    end
    repeat (2) @(posedge clk);
    rst_n = 1;
    fork
      begin : drive_act
        for (int f = 0; f < NF; f++) for (int x = 0; x < W*W; x++) begin
          @(negedge clk);
          act_v = 1;
          for (int t = 0; t < S_IC; t++) act_vec[t] = A[f][t][x];
          #1; while (!(ra && rb)) begin @(negedge clk); #1; end
          @(posedge clk); #1 act_v = 0;
        end
      end
      begin : drive_psum
        for (int f = 0; f < NF; f++) for (int p = 0; p < HO*HO; p++) for (int o = 0; o < OC; o++) begin
          @(negedge clk);
          while (($urandom % 3) == 0) @(negedge clk);
          rin_v = 1; rin_pkt = '0; rin_pkt.typ = PKT_PSUM; rin_pkt.layer = 4'(LAYER); rin_pkt.ch = 12'(o);
          rin_pkt.addr = 16'(p); rin_pkt.data = ps[f][p][o];
          #1; while (!rin_r) begin @(negedge clk); #1; end
          @(posedge clk); #1 rin_v = 0;
        end
      end
      begin : sink
        while (na < NOUT || nb < NOUT) begin
          @(negedge clk); oa_r = 1; ob_r = ($urandom % 4) != 0; #1;
          if (oa_v && oa_r) begin
            int f, p, o;
            f = na / (HO*HO*OC); p = (na / OC) % (HO*HO); o = na % OC;
            checks++;
            if (oa_pkt.typ != PKT_PSUM || int'(oa_pkt.ch) != o || int'(oa_pkt.addr) != p || int'(oa_pkt.layer) != LAYER ||
                int'(oa_pkt.data) != conv[f][p][o]) begin
              failures++; $display("FAIL psum out %0d: %0d exp %0d", na, oa_pkt.data, conv[f][p][o]);
            end
            na++;
          end
          if (ob_v && ob_r) begin
            int f, p, o, e;
            f = nb / (HO*HO*OC); p = (nb / OC) % (HO*HO); o = nb % OC;
            e = conv[f][p][o] + ps[f][p][o];
            if (e < 0) e = 0;
            checks++;
            if (ob_pkt.typ != PKT_ACT || int'(ob_pkt.ch) != o || int'(ob_pkt.addr) != p || int'(ob_pkt.data) != e) begin
              failures++; $display("FAIL act out %0d: %0d exp %0d", nb, ob_pkt.data, e);
            end
            nb++;
          end
        end
      end
    join
    repeat (3) @(negedge clk);
    checks++;
    if (int'(nwa) != NF*HO*HO || int'(nwb) != NF*HO*HO) begin failures++; $display("FAIL windows %0d %0d", nwa, nwb); end
    checks++;
    if (int'(ncb) != exp_clamp || int'(nca) != 0) begin failures++; $display("FAIL clamps %0d exp %0d", ncb, exp_clamp); end
    checks++;
    if (int'(npb) != NOUT || int'(npa) != 0) begin failures++; $display("FAIL psum count %0d", npb); end
    checks++;
    if (min_gap < G) begin failures++; $display("FAIL windows only %0d cycles apart", min_gap); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (20000) @(posedge clk); failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
