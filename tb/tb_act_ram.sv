// tb_act_ram -- the Activation RAM as a two-reader FIFO (depth 8): entries
// come out of the FP port in write order, come out of the BP port in the
// same order but never before FP has read them, space is only freed by the
// BP read, and writes are refused when 8 entries are held.
module tb_act_ram;
  import fpdeep_pkg::*;
  localparam int C = 2, DEPTH = 8;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic wr_valid = 0, wr_ready, fp_valid, fp_ready = 0, bp_valid, bp_ready = 0;
  logic [C-1:0][DW-1:0] wr_data = '0, fp_data, bp_data;
  logic [$clog2(DEPTH+1)-1:0] used;
  int checks = 0, failures = 0;
  int nw = 0, nf = 0, nb = 0;

  act_ram #(.C(C), .DEPTH(DEPTH)) dut (.clk, .rst_n, .wr_valid, .wr_ready, .wr_data,
    .fp_valid, .fp_ready, .fp_data, .bp_valid, .bp_ready, .bp_data, .used);

  function automatic logic [C-1:0][DW-1:0] val(int k);
    return {32'(k * 7 + 1), 32'(k * 3 + 5)};
  endfunction

  task automatic chk(bit ok, string s);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", s); end
  endtask

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    // fill completely with FP and BP idle
    for (int k = 0; k < DEPTH; k++) begin
      @(negedge clk); wr_valid = 1; wr_data = val(nw); #1;
      chk(wr_ready, "ready while not full");
      @(posedge clk); nw++; #1 wr_valid = 0;
    end
    @(negedge clk); wr_valid = 1; wr_data = val(nw); #1;
    chk(!wr_ready && used == 4'(DEPTH), "full refuses writes");
    chk(!bp_valid, "BP waits for FP");
    wr_valid = 0;
    // FP reads everything; space is not freed
    for (int k = 0; k < DEPTH; k++) begin
      @(negedge clk); fp_ready = 1; #1;
      chk(fp_valid && fp_data == val(nf), "FP order");
      @(posedge clk); nf++; #1 fp_ready = 0;
    end
    #1 chk(!fp_valid && !wr_ready && bp_valid, "read by FP but still held");
    // random traffic on all three ports
    for (int cyc = 0; cyc < 600; cyc++) begin
      @(negedge clk);
      wr_valid = ($urandom % 2) != 0; wr_data = val(nw);
      fp_ready = ($urandom % 2) != 0;
      bp_ready = ($urandom % 2) != 0;
      #1;
      chk(int'(used) == nw - nb, "occupancy");
      if (fp_valid && fp_ready) begin chk(fp_data == val(nf), "FP data"); end
      if (bp_valid && bp_ready) begin chk(bp_data == val(nb), "BP data"); end
      chk(bp_valid == (nb < nf), "BP never ahead of FP");
      begin
        bit w, f, b;
        w = wr_valid && wr_ready; f = fp_valid && fp_ready; b = bp_valid && bp_ready;
        @(posedge clk);
        nw += int'(w); nf += int'(f); nb += int'(b);
      end
    end
    chk(nb > 100, "traffic flowed");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (3000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
