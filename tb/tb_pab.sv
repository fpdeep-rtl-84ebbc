// tb_pab -- Partial Activation Buffer, P = 2, OC = 4. Two instances see the
// same local result vectors: one is the first node of a layer (adds zero),
// the other adds partial sums that arrive as PSUM packets at random times.
// Every output sum, channel and pixel is compared with the expected value;
// local vectors are only offered while loc_free reports room.
module tb_pab;
  import fpdeep_pkg::*;
  localparam int P = 2, OC = 4, G = OC/P, NPIX = 20;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic loc_valid = 0, loc_g = 0;
  logic [15:0] loc_pos = '0;
  logic [P-1:0][DW-1:0] loc_vec = '0;
  logic [2:0] free_a, free_b;
  logic rin_valid = 0, rin_ready, rin_ready_a, oa_valid, ob_valid, oa_ready = 0, ob_ready = 0;
  pkt_t rin_pkt = '0, dummy = '0;
  logic [11:0] oa_ch, ob_ch;
  logic [15:0] oa_pos, ob_pos;
  word_t oa_data, ob_data;
  int checks = 0, failures = 0;
  int lv [NPIX][OC];
  int ps [NPIX][OC];
  int na = 0, nb = 0;

  pab #(.P(P), .OC(OC), .FIRST(1'b1)) u_a (.clk, .rst_n, .loc_valid(loc_valid && free_b != 0), .loc_g, .loc_pos, .loc_vec,
    .loc_free(free_a), .rin_valid(1'b0), .rin_ready(rin_ready_a), .rin_pkt(dummy),
    .out_valid(oa_valid), .out_ready(oa_ready), .out_ch(oa_ch), .out_pos(oa_pos), .out_data(oa_data));
  pab #(.P(P), .OC(OC), .FIRST(1'b0)) u_b (.clk, .rst_n, .loc_valid(loc_valid && free_a != 0), .loc_g, .loc_pos, .loc_vec,
    .loc_free(free_b), .rin_valid, .rin_ready, .rin_pkt,
    .out_valid(ob_valid), .out_ready(ob_ready), .out_ch(ob_ch), .out_pos(ob_pos), .out_data(ob_data));

  initial begin
    for (int p = 0; p < NPIX; p++) for (int c = 0; c < OC; c++) begin
      lv[p][c] = int'($urandom % 1001) - 500; ps[p][c] = int'($urandom % 1001) - 500;
    end
    repeat (2) @(posedge clk);
    rst_n = 1;
    fork
      begin : drive_loc
        for (int p = 0; p < NPIX; p++) for (int g = 0; g < G; g++) begin
          @(negedge clk);
          while (free_a == 0 || free_b == 0 || ($urandom % 4) == 0) begin loc_valid = 0; @(negedge clk); end
          loc_valid = 1; loc_g = 1'(g); loc_pos = 16'(p);
          for (int j = 0; j < P; j++) loc_vec[j] = lv[p][g*P+j];
        end
        @(negedge clk); loc_valid = 0;
      end
      begin : drive_rin
        for (int p = 0; p < NPIX; p++) for (int c = 0; c < OC; c++) begin
          @(negedge clk);
          rin_valid = ($urandom % 3) != 0;
          while (!rin_valid) begin @(negedge clk); rin_valid = ($urandom % 3) != 0; end
          rin_pkt = '0; rin_pkt.typ = PKT_PSUM; rin_pkt.ch = 12'(c); rin_pkt.addr = 16'(p); rin_pkt.data = ps[p][c];
          #1; while (!rin_ready) begin @(negedge clk); #1; end
          @(posedge clk); #1 rin_valid = 0;
        end
      end
      begin : sink
        while (na < NPIX*OC || nb < NPIX*OC) begin
          @(negedge clk); oa_ready = ($urandom % 2) != 0; ob_ready = ($urandom % 2) != 0; #1;
          if (oa_valid && oa_ready) begin
            checks++;
            if (int'(oa_data) != lv[na/OC][na%OC] || int'(oa_ch) != na%OC || int'(oa_pos) != na/OC) begin
              failures++; $display("FAIL first %0d: %0d", na, oa_data);
            end
            na++;
          end
          if (ob_valid && ob_ready) begin
            checks++;
            if (int'(ob_data) != lv[nb/OC][nb%OC] + ps[nb/OC][nb%OC] || int'(ob_ch) != nb%OC || int'(ob_pos) != nb/OC) begin
              failures++; $display("FAIL chained %0d: %0d", nb, ob_data);
            end
            nb++;
          end
        end
      end
    join
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (5000) @(posedge clk); failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
