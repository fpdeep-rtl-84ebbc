// tb_eb_module -- error back-propagation of a small layer (K = 3, W = 5,
// S_IC = 2, OC = 4, P = 2, first input channel 2, layer 3) on two error
// maps. The expected input-side errors are computed directly as
// E_in[i](y,x) = sum over oc, kh, kw of E[oc](y-kh, x-kw) * W[oc][i][kh][kw]
// (terms outside the 3 x 3 error map are zero), which is the full
// convolution with the rotated kernel that the module performs through
// padding. Every ERR packet (layer, channel, pixel, value) is checked under
// random back-pressure, as are the window count (W x W per map) and the
// idle flag before, during and after the work.
module tb_eb_module;
  import fpdeep_pkg::*;
  localparam int K = 3, W = 5, S_IC = 2, OC = 4, P = 2, G = OC/P, HO = W-K+1, NF = 2, LAYER = 3, BASE = 2;
  localparam int ROW_W = P*S_IC*K*K, NOUT = NF*W*W*S_IC;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic err_v = 0, err_r, out_v, out_r = 0, idle, lp_row;
  logic [OC-1:0][DW-1:0] err_vec = '0;
  logic [ROW_W-1:0][DW-1:0] lp_data;
  logic [G-1:0][ROW_W-1:0][DW-1:0] wrow;
  pkt_t out_pkt;
  logic [31:0] n_windows;
  int checks = 0, failures = 0;
  int E [NF][OC][HO*HO];
  int Wt [OC][S_IC][K*K];
  int ein [NF][S_IC][W*W];
  int n = 0;
  bit busy_seen = 0;

  eb_module #(.K(K), .W(W), .S_IC(S_IC), .OC(OC), .P(P), .BASE_IC(BASE), .LAYER(LAYER)) dut (
    .clk, .rst_n, .err_valid(err_v), .err_ready(err_r), .err_vec, .lp_row, .lp_data,
    .out_valid(out_v), .out_ready(out_r), .out_pkt, .n_windows, .idle);
  assign lp_data = wrow[lp_row];

  initial begin
    for (int f = 0; f < NF; f++) for (int o = 0; o < OC; o++) for (int p = 0; p < HO*HO; p++)
      E[f][o][p] = int'($urandom % 61) - 30;
    for (int o = 0; o < OC; o++) for (int t = 0; t < S_IC; t++) for (int e = 0; e < K*K; e++) begin
      Wt[o][t][e] = int'($urandom % 21) - 10;
      wrow[o/P][((o%P)*S_IC + t)*K*K + e] = Wt[o][t][e];
    end
    for (int f = 0; f < NF; f++) for (int t = 0; t < S_IC; t++) for (int y = 0; y < W; y++) for (int x = 0; x < W; x++) begin
      ein[f][t][y*W+x] = 0;
      for (int o = 0; o < OC; o++) for (int kh = 0; kh < K; kh++) for (int kw = 0; kw < K; kw++)
        if (y-kh >= 0 && y-kh < HO && x-kw >= 0 && x-kw < HO)
          ein[f][t][y*W+x] += E[f][o][(y-kh)*HO + x-kw] * Wt[o][t][kh*K+kw];
    end
    repeat (2) @(posedge clk);
    rst_n = 1;
    // the padding generator first fills the top padding rows: about 2*(W+K-1) cycles
    repeat (40) @(negedge clk);
    checks++;
    if (!idle) begin failures++; $display("FAIL not idle before the first map"); end
    fork
      begin : drive
        for (int f = 0; f < NF; f++) for (int p = 0; p < HO*HO; p++) begin
          @(negedge clk);
          err_v = 1;
          for (int o = 0; o < OC; o++) err_vec[o] = E[f][o][p];
          #1; while (!err_r) begin @(negedge clk); #1; end
          @(posedge clk); #1 err_v = 0;
        end
      end
      begin : sink
        while (n < NOUT) begin
          @(negedge clk); out_r = ($urandom % 3) != 0; #1;
          if (!idle) busy_seen = 1;
          if (out_v && out_r) begin
            int f, x, t;
            f = n / (W*W*S_IC); x = (n / S_IC) % (W*W); t = n % S_IC;
            checks++;
            if (out_pkt.typ != PKT_ERR || int'(out_pkt.layer) != LAYER-1 || int'(out_pkt.ch) != BASE + t ||
                int'(out_pkt.addr) != x || int'(out_pkt.data) != ein[f][t][x]) begin
              failures++; $display("FAIL err %0d: ch=%0d addr=%0d data=%0d exp %0d", n, out_pkt.ch, out_pkt.addr, out_pkt.data, ein[f][t][x]);
            end
            n++;
          end
        end
      end
    join
    repeat (40) @(negedge clk);
    checks++;
    if (int'(n_windows) != NF*W*W) begin failures++; $display("FAIL windows %0d", n_windows); end
    checks++;
    if (!idle || !busy_seen || out_v) begin failures++; $display("FAIL idle=%0d busy_seen=%0d ", idle, busy_seen); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (20000) @(posedge clk); failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
