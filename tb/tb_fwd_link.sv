// tb_fwd_link -- forward interconnection of node 2 of layer 3 (local input
// channels 4 and 5, not the last node). A random mix of packets is sent in:
// local activations (pairs of channels 4, 5), activations of other channels,
// partial sums, parameter words for this node (LPRAM and BPRAM addresses)
// and for other nodes, and errors. The testbench checks that local pixels
// reach the Activation RAM port in order, partial sums the PAB port, each
// parameter the right memory and address, and that everything else leaves
// on the output in order, merged with the node's own activations and
// parameter stream. Random ready on every port exercises the stalls; the
// event counters are compared at the end.
module tb_fwd_link;
  import fpdeep_pkg::*;
  localparam int NODE = 2, LAYER = 3, BASE = 4, S_IC = 2, LPW = 16, BPW = 8, NIN = 400, NLOC = 60, NPAR = 40;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic in_v = 0, in_r, act_v, act_r = 0, ps_v, ps_r = 0, lp_we, bp_we, loc_v = 0, loc_r, par_v = 0, par_r, out_v, out_r = 0;
  pkt_t in_pkt = '0, ps_pkt, loc_pkt = '0, par_pkt = '0, out_pkt;
  logic [S_IC-1:0][DW-1:0] act_vec;
  logic [3:0] lp_wa;
  logic [2:0] bp_wa;
  word_t lp_wd, bp_wd;
  logic [31:0] n_byp, n_taken, n_par, n_stall;
  int checks = 0, failures = 0;
  pkt_t q_in[$], q_byp[$], q_loc[$], q_par[$], s_loc[$], s_par[$], q_ps[$], q_lp[$], q_bp[$];
  int q_act[$];
  int e_byp_act = 0, e_taken = 0, e_par = 0, n_out_loc = 0, n_out_par = 0, n_out_byp = 0, total_out = 0;
  bit in_done = 0;

  fwd_link #(.NODE_ID(NODE), .LAYER(LAYER), .BASE_IC(BASE), .S_IC(S_IC), .LAST(1'b0), .LP_WORDS(LPW), .BP_WORDS(BPW)) dut (
    .clk, .rst_n, .in_valid(in_v), .in_ready(in_r), .in_pkt, .act_valid(act_v), .act_ready(act_r), .act_vec,
    .psum_valid(ps_v), .psum_ready(ps_r), .psum_pkt(ps_pkt), .lp_we, .lp_wa, .lp_wd, .bp_we, .bp_wa, .bp_wd,
    .loc_valid(loc_v), .loc_ready(loc_r), .loc_pkt, .par_valid(par_v), .par_ready(par_r), .par_pkt,
    .out_valid(out_v), .out_ready(out_r), .out_pkt, .n_act_bypass(n_byp), .n_act_taken(n_taken),
    .n_param_loaded(n_par), .n_stall);

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
      int k;
      k = int'($urandom % 7);
      case (k)
        0: begin
          q_in.push_back(mk(PKT_ACT, LAYER-1, 0, BASE, pix, pix*10));
          q_in.push_back(mk(PKT_ACT, LAYER-1, 0, BASE+1, pix, pix*10+1));
          q_act.push_back(pix); pix++; e_taken += 2;
        end
        1: begin
          q_in.push_back(mk(PKT_ACT, LAYER-1, 0, (($urandom % 2) != 0) ? 1 : 7, pix, int'($urandom)));
          q_byp.push_back(q_in[$]); e_byp_act++;
        end
        2: begin q_in.push_back(mk(PKT_PSUM, LAYER, 0, int'($urandom % 8), pix, int'($urandom))); q_ps.push_back(q_in[$]); end
        3: begin q_in.push_back(mk(PKT_PARAM, 0, NODE, 0, int'($urandom % LPW), int'($urandom))); q_lp.push_back(q_in[$]); e_par++; end
        4: begin q_in.push_back(mk(PKT_PARAM, 0, NODE, 0, LPW + int'($urandom % BPW), int'($urandom))); q_bp.push_back(q_in[$]); e_par++; end
        5: begin q_in.push_back(mk(PKT_PARAM, 0, 7, 0, int'($urandom % 64), int'($urandom))); q_byp.push_back(q_in[$]); end
        default: begin q_in.push_back(mk(PKT_ERR, 5, 0, 3, pix, int'($urandom))); q_byp.push_back(q_in[$]); end
      endcase
    end
    for (int i = 0; i < NLOC; i++) q_loc.push_back(mk(PKT_ACT, LAYER, 0, i % 8, i / 8, i * 3));
    for (int i = 0; i < NPAR; i++) q_par.push_back(mk(PKT_PARAM, 0, 9, 0, i, i * 5));
    s_loc = q_loc; s_par = q_par;
    repeat (2) @(posedge clk);
    rst_n = 1;
    fork
      begin foreach (q_in[i]) send(in_v, in_pkt, in_r, q_in[i]); in_done = 1; end
      begin for (int i = 0; i < NLOC; i++) send(loc_v, loc_pkt, loc_r, s_loc[i]); end
      begin for (int i = 0; i < NPAR; i++) send(par_v, par_pkt, par_r, s_par[i]); end
    join_none
  end

  int exp_total;
  initial begin
    wait (rst_n);
    exp_total = q_byp.size() + NLOC + NPAR;
    while (total_out < exp_total || q_act.size() != 0 || q_ps.size() != 0 || q_lp.size() != 0 || q_bp.size() != 0) begin
      @(negedge clk);
      act_r = ($urandom % 3) != 0; ps_r = ($urandom % 3) != 0; out_r = ($urandom % 3) != 0;
      #2;
      if (act_v && act_r) begin
        checks++;
        if (q_act.size() == 0 || int'(act_vec[0]) != q_act[0]*10 || int'(act_vec[1]) != q_act[0]*10+1) begin
          failures++; $display("FAIL act vector %0d %0d", act_vec[0], act_vec[1]);
        end
        if (q_act.size() != 0) void'(q_act.pop_front());
      end
      if (ps_v && ps_r) begin
        checks++;
        if (q_ps.size() == 0 || ps_pkt != q_ps[0]) begin failures++; $display("FAIL psum"); end
        if (q_ps.size() != 0) void'(q_ps.pop_front());
      end
      if (lp_we) begin
        checks++;
        if (q_lp.size() == 0 || int'(lp_wa) != int'(q_lp[0].addr) || lp_wd != q_lp[0].data) begin failures++; $display("FAIL lp write"); end
        if (q_lp.size() != 0) void'(q_lp.pop_front());
      end
      if (bp_we) begin
        checks++;
        if (q_bp.size() == 0 || int'(bp_wa) != int'(q_bp[0].addr) - LPW || bp_wd != q_bp[0].data) begin failures++; $display("FAIL bp write"); end
        if (q_bp.size() != 0) void'(q_bp.pop_front());
      end
      if (out_v && out_r) begin
        pkt_t e;
        checks++; total_out++;
        if (out_pkt.typ == PKT_ACT && int'(out_pkt.layer) == LAYER) begin
          e = q_loc.size() != 0 ? q_loc.pop_front() : '0; n_out_loc++;
        end else if (out_pkt.typ == PKT_PARAM && int'(out_pkt.dst) == 9) begin
          e = q_par.size() != 0 ? q_par.pop_front() : '0; n_out_par++;
        end else begin
          e = q_byp.size() != 0 ? q_byp.pop_front() : '0; n_out_byp++;
        end
        if (out_pkt != e) begin failures++; $display("FAIL out packet typ=%0d ch=%0d addr=%0d", out_pkt.typ, out_pkt.ch, out_pkt.addr); end
      end
    end
    repeat (3) @(negedge clk);
    checks++;
    if (int'(n_byp) != e_byp_act || int'(n_taken) != e_taken || int'(n_par) != e_par) begin
      failures++; $display("FAIL counters byp=%0d/%0d taken=%0d/%0d par=%0d/%0d", n_byp, e_byp_act, n_taken, e_taken, n_par, e_par);
    end
    checks++;
    if (n_stall == 0 || n_out_loc != NLOC || n_out_par != NPAR || out_v) begin failures++; $display("FAIL stall=%0d loc=%0d par=%0d", n_stall, n_out_loc, n_out_par); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (20000) @(posedge clk); failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
