// tb_bwd_link -- backward interconnection of node 1 of layer 3 (not the
// first node, 4 output channels). Sent in: error pixels of layer 3 (4
// packets each), errors of a later layer, gradient words for this node and
// for node 0. Checked: each error pixel reaches the EB/PG port as a vector
// with its pixel index, and is also passed on; this node's gradient words
// reach the gradient buffer port; the rest is passed on in order. The node's
// own errors and gradient words are offered at the same time, and whenever
// an own error is waiting when the output register loads, it must be the
// one loaded (own errors first). The counters are checked at the end.
module tb_bwd_link;
  import fpdeep_pkg::*;
  localparam int NODE = 1, LAYER = 3, OC = 4, BGW = 8, NIN = 300, NOWN = 80, NGR = 30;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic in_v = 0, in_r, err_v, err_r = 0, bg_we, own_v = 0, own_r, gr_v = 0, gr_r, out_v, out_r = 0;
  pkt_t in_pkt = '0, own_pkt = '0, gr_pkt = '0, out_pkt;
  logic [OC-1:0][DW-1:0] err_vec;
  logic [15:0] err_pos;
  logic [2:0] bg_wa;
  word_t bg_wd;
  logic [31:0] n_err_byp, n_own_first;
  int checks = 0, failures = 0;
  pkt_t q_in[$], q_byp[$], q_own[$], q_gr[$], q_bg[$], s_own[$], s_gr[$];
  int q_pix[$];
  int e_err_byp = 0, total_out = 0, exp_total, pend_chk = 0;
  pkt_t pend_pkt;

  bwd_link #(.NODE_ID(NODE), .LAYER(LAYER), .FIRST(1'b0), .OC(OC), .BG_WORDS(BGW)) dut (
    .clk, .rst_n, .in_valid(in_v), .in_ready(in_r), .in_pkt, .err_valid(err_v), .err_ready(err_r), .err_vec, .err_pos,
    .bg_we, .bg_wa, .bg_wd, .own_valid(own_v), .own_ready(own_r), .own_pkt, .grad_valid(gr_v), .grad_ready(gr_r), .grad_pkt(gr_pkt),
    .out_valid(out_v), .out_ready(out_r), .out_pkt, .n_err_bypass(n_err_byp), .n_own_first);

  function automatic pkt_t mk(pkt_type_e t, int layer, int dst, int ch, int addr, int data);
    pkt_t p;
    p = '0; p.typ = t; p.layer = 4'(layer); p.dst = 4'(dst); p.ch = 12'(ch); p.addr = 16'(addr); p.data = data;
    return p;
  endfunction

  task automatic send(ref logic v, ref pkt_t pk, ref logic r, input pkt_t p);
    @(negedge clk);
    v = 1; pk = p;
    #1; while (!r) begin @(negedge clk); #1; end
    @(posedge clk); #1 v = 0;
  endtask

  initial begin
    int pix = 0;
    while (q_in.size() < NIN) begin
      case ($urandom % 4)
        0: begin
          for (int c = 0; c < OC; c++) begin
            q_in.push_back(mk(PKT_ERR, LAYER, 0, c, pix, pix*8 + c)); q_byp.push_back(q_in[$]); e_err_byp++;
          end
          q_pix.push_back(pix); pix++;
        end
        1: begin q_in.push_back(mk(PKT_ERR, 6, 0, 2, pix, int'($urandom))); q_byp.push_back(q_in[$]); e_err_byp++; end
        2: begin q_in.push_back(mk(PKT_GRAD, 0, NODE, 0, int'($urandom % BGW), int'($urandom))); q_bg.push_back(q_in[$]); end
        default: begin q_in.push_back(mk(PKT_GRAD, 0, 0, 0, int'($urandom % 64), int'($urandom))); q_byp.push_back(q_in[$]); end
      endcase
    end
    for (int i = 0; i < NOWN; i++) q_own.push_back(mk(PKT_ERR, LAYER-1, 0, 4 + i % 2, i / 2, -i));
    for (int i = 0; i < NGR; i++) q_gr.push_back(mk(PKT_GRAD, 0, 0, 77, i, i * 9));
    s_own = q_own; s_gr = q_gr;
    exp_total = q_byp.size() + NOWN + NGR;
    repeat (2) @(posedge clk);
    rst_n = 1;
    fork
      begin foreach (q_in[i]) send(in_v, in_pkt, in_r, q_in[i]); end
      begin for (int i = 0; i < NOWN; i++) begin repeat ($urandom % 6) @(negedge clk); send(own_v, own_pkt, own_r, s_own[i]); end end
      begin for (int i = 0; i < NGR; i++) send(gr_v, gr_pkt, gr_r, s_gr[i]); end
    join_none
  end

  initial begin
    wait (rst_n);
    while (total_out < exp_total || q_pix.size() != 0 || q_bg.size() != 0) begin
      @(negedge clk);
      err_r = ($urandom % 3) != 0; out_r = ($urandom % 3) != 0;
      #2;
      if (pend_chk != 0) begin
        checks++;
        if (out_pkt != pend_pkt) begin failures++; $display("FAIL own error not first"); end
        pend_chk = 0;
      end
      if (own_v && (!out_v || out_r)) begin pend_chk = 1; pend_pkt = own_pkt; end
      if (err_v && err_r) begin
        checks++;
        if (q_pix.size() == 0 || int'(err_pos) != q_pix[0] ||
            int'(err_vec[0]) != q_pix[0]*8 || int'(err_vec[3]) != q_pix[0]*8 + 3) begin
          failures++; $display("FAIL error vector pos=%0d", err_pos);
        end
        if (q_pix.size() != 0) void'(q_pix.pop_front());
      end
      if (bg_we) begin
        checks++;
        if (q_bg.size() == 0 || int'(bg_wa) != int'(q_bg[0].addr) || bg_wd != q_bg[0].data) begin failures++; $display("FAIL grad write"); end
        if (q_bg.size() != 0) void'(q_bg.pop_front());
      end
      if (out_v && out_r) begin
        pkt_t e;
        checks++; total_out++;
        if (out_pkt.typ == PKT_ERR && int'(out_pkt.layer) == LAYER-1) e = q_own.size() != 0 ? q_own.pop_front() : '0;
        else if (out_pkt.typ == PKT_GRAD && int'(out_pkt.ch) == 77) e = q_gr.size() != 0 ? q_gr.pop_front() : '0;
        else e = q_byp.size() != 0 ? q_byp.pop_front() : '0;
        if (out_pkt != e) begin failures++; $display("FAIL out packet typ=%0d ch=%0d addr=%0d", out_pkt.typ, out_pkt.ch, out_pkt.addr); end
      end
    end
    repeat (3) @(negedge clk);
    checks++;
    if (int'(n_err_byp) != e_err_byp || n_own_first == 0) begin
      failures++; $display("FAIL counters err_bypass=%0d/%0d own_first=%0d", n_err_byp, e_err_byp, n_own_first);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (20000) @(posedge clk); failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
