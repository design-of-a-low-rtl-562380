// tb_param_gen: row pair in, rotation parameters out.
//
// Streams random row pairs into param_gen, starts the angle computation two
// clocks after the last element, and compares cos/sin with a floating-point
// Jacobi rotation of the same rows; also checks that the rotated rows would
// be orthogonal.
//
// The split into norm_gen and CosSin_gen follows the published PU;
// the start protocol is this design's own.
`timescale 1ns/1ps
module tb_param_gen;
  import svd_pkg::*;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  logic clr = 1'b0, valid = 1'b0, start = 1'b0, done;
  data_t ui = '0, uj = '0;
  cs_t c, s;
  param_gen dut (.clk, .rst_n, .i_clr(clr), .i_valid(valid), .i_ui(ui), .i_uj(uj),
                 .i_cs_start(start), .o_cs_done(done), .o_cos(c), .o_sin(s));
  int checks = 0, failures = 0;
  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1'b1;
    for (int t = 0; t < 20; t++) begin
      real ra [64], rb [64], al, be, ga, z, tt, ec, es, gc, gs, dot;
      int n;
      n = $urandom_range(4, 64);
      al = 0; be = 0; ga = 0;
      clr <= 1'b1; @(posedge clk); clr <= 1'b0;
      for (int k = 0; k < n; k++) begin
        data_t a, b;
        a = data_t'($signed($urandom_range(0, 2 ** 21)) - 2 ** 20);
        b = data_t'($signed($urandom_range(0, 2 ** 21)) - 2 ** 20);
        ra[k] = real'(a) / 2.0 ** FRAC_W; rb[k] = real'(b) / 2.0 ** FRAC_W;
        al += ra[k] * ra[k]; be += rb[k] * rb[k]; ga += ra[k] * rb[k];
        valid <= 1'b1; ui <= a; uj <= b; @(posedge clk);
      end
      valid <= 1'b0;
      repeat (2) @(posedge clk);
      start <= 1'b1; @(posedge clk); start <= 1'b0;
      while (!done) @(posedge clk);
      #1;
      z = (be - al) / (2.0 * ga);
      tt = ((z >= 0) ? 1.0 : -1.0) / ((z >= 0 ? z : -z) + $sqrt(1.0 + z * z));
      ec = 1.0 / $sqrt(1.0 + tt * tt); es = ec * tt;
      gc = real'(c) / 2.0 ** CS_FRAC; gs = real'(s) / 2.0 ** CS_FRAC;
      checks++;
      if ((gc - ec) > 1e-4 || (ec - gc) > 1e-4 || (gs - es) > 1e-4 || (es - gs) > 1e-4) begin
        failures++; $display("FAIL t=%0d: %f %f vs %f %f", t, gc, gs, ec, es);
      end
      dot = 0;
      for (int k = 0; k < n; k++) dot += (gc * ra[k] - gs * rb[k]) * (gs * ra[k] + gc * rb[k]);
      checks++;
      if (dot > 1e-3 * (al + be) || -dot > 1e-3 * (al + be)) begin
        failures++; $display("FAIL t=%0d: rotated dot %f", t, dot);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
