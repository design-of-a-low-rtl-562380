// tb_norm_gen: checks the three running inner products of norm_gen.
//
// Streams random row pairs of random length (with gaps in i_valid), computes
// alpha, beta and gamma in the testbench with 64-bit integer arithmetic and
// the same per-product rounding, and checks the sums two clocks after the
// last element (the block's stated latency).
//
// The three sums are the published alpha, beta and gamma; the
// rounding and the latency are this design's own.
`timescale 1ns/1ps
module tb_norm_gen;
  import svd_pkg::*;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  logic clr = 1'b0, valid = 1'b0;
  data_t ui = '0, uj = '0;
  acc_t alpha, beta, gamma;
  norm_gen dut (.clk, .rst_n, .i_clr(clr), .i_valid(valid), .i_ui(ui), .i_uj(uj),
                .o_alpha(alpha), .o_beta(beta), .o_gamma(gamma));
  int checks = 0, failures = 0;
  function automatic longint rnd(input longint p);
    return (p + (64'sd1 <<< (FRAC_W - 1))) >>> FRAC_W;
  endfunction
  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1'b1;
    for (int t = 0; t < 20; t++) begin
      longint ea, eb, eg;
      int n;
      ea = 0; eb = 0; eg = 0;
      n = $urandom_range(1, 40);
      clr <= 1'b1; @(posedge clk); clr <= 1'b0;
      for (int k = 0; k < n; k++) begin
        data_t a, b;
        if ($urandom_range(0, 3) == 0) begin valid <= 1'b0; @(posedge clk); end
        a = data_t'($signed($urandom_range(0, 2 ** 23)) - 2 ** 22);
        b = data_t'($signed($urandom_range(0, 2 ** 23)) - 2 ** 22);
        ea += rnd(longint'(a) * a); eb += rnd(longint'(b) * b); eg += rnd(longint'(a) * b);
        valid <= 1'b1; ui <= a; uj <= b; @(posedge clk);
      end
      valid <= 1'b0;
      @(posedge clk); @(posedge clk); #1;
      checks++;
      if (alpha !== ea || beta !== eb || gamma !== eg) begin
        failures++;
        $display("FAIL t=%0d: %0d %0d %0d vs %0d %0d %0d", t, alpha, beta, gamma, ea, eb, eg);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
