// tb_bpram -- loads 16 balanced weights, pushes them (random back-pressure)
// and checks each PARAM packet's destination, address (DST_BASE + i) and
// value; then applies deltas through the update port and checks a second
// push carries the updated weights. A push_start during a push is ignored.
module tb_bpram;
  import fpdeep_pkg::*;
  localparam int WORDS = 16, DST = 3, BASE = 100;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic word_we = 0, upd_valid = 0, push_start = 0, push_busy, out_valid, out_ready = 0;
  logic [3:0] word_wa = '0, upd_addr = '0;
  word_t word_wd = '0, upd_delta = '0;
  pkt_t out_pkt;
  int checks = 0, failures = 0;
  int ref_w [WORDS];
  int got = 0;

  bpram #(.WORDS(WORDS), .DST(DST), .DST_BASE(BASE)) dut (.clk, .rst_n, .word_we, .word_wa, .word_wd,
    .upd_valid, .upd_addr, .upd_delta, .push_start, .push_busy, .out_valid, .out_ready, .out_pkt);

  task automatic receive_all();
    got = 0;
    while (got < WORDS) begin
      @(negedge clk); out_ready = ($urandom % 2) != 0;
      if (got == 3) push_start = 1; else push_start = 0;
      #1;
      if (out_valid && out_ready) begin
        checks++;
        if (out_pkt.typ != PKT_PARAM || int'(out_pkt.dst) != DST || int'(out_pkt.addr) != BASE + got ||
            out_pkt.data != ref_w[got]) begin
          failures++; $display("FAIL word %0d: addr=%0d data=%0d exp %0d", got, out_pkt.addr, out_pkt.data, ref_w[got]);
        end
        got++;
      end
    end
    @(negedge clk); out_ready = 0; push_start = 0;
    repeat (3) @(negedge clk);
    checks++;
    if (out_valid) begin failures++; $display("FAIL stream did not stop"); end
  endtask

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int i = 0; i < WORDS; i++) begin
      ref_w[i] = i * 11 - 50;
      @(negedge clk); word_we = 1; word_wa = 4'(i); word_wd = ref_w[i];
    end
    @(negedge clk); word_we = 0; push_start = 1;
    @(negedge clk); push_start = 0;
    receive_all();
    for (int i = 0; i < WORDS; i++) begin
      @(negedge clk); upd_valid = 1; upd_addr = 4'(i); upd_delta = i - 8; ref_w[i] += i - 8;
    end
    @(negedge clk); upd_valid = 0; push_start = 1;
    @(negedge clk); push_start = 0;
    receive_all();
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (2000) @(posedge clk); failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
