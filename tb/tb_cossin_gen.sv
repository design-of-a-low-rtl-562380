// tb_cossin_gen: checks the CORDIC sin/cos of the Jacobi angle.
//
// Draws random alpha, beta, gamma (with gamma^2 <= alpha*beta, as for real
// rows) over a wide range of magnitudes, plus corner cases (gamma = 0,
// alpha = beta, beta < alpha). The expected rotation comes from the textbook
// formula t = sign(z)/(|z| + sqrt(1 + z^2)), z = (beta - alpha)/(2 gamma),
// in floating point. Checks cos and sin to 2^-18, that the rotated pair would
// be orthogonal, and that done comes 2*CORDIC_ITER + 3 clocks after start.
//
// The reference formula is the standard Jacobi angle; the latency
// checked is this design's own (none is published for this unit).
`timescale 1ns/1ps
module tb_cossin_gen;
  import svd_pkg::*;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  logic start = 1'b0, done;
  acc_t al = '0, be = '0, ga = '0;
  cs_t  c, s;
  cossin_gen dut (.clk, .rst_n, .i_start(start), .i_alpha(al), .i_beta(be), .i_gamma(ga),
                  .o_done(done), .o_cos(c), .o_sin(s));
  int checks = 0, failures = 0;
  task automatic chk(input bit ok, input string m);
    checks++; if (!ok) begin failures++; if (failures < 20) $display("FAIL: %s", m); end
  endtask
  task automatic run(input longint a, input longint b, input longint g);
    real ra, rb, rg, z, t, ec, es, gc, gs, orth;
    int lat;
    al <= a; be <= b; ga <= g; start <= 1'b1;
    @(posedge clk); start <= 1'b0; lat = 0;
    while (!done) begin @(posedge clk); lat++; end
    #1;
    ra = a; rb = b; rg = g;
    if (g == 0) begin ec = 1.0; es = 0.0; end
    else begin
      z = (rb - ra) / (2.0 * rg);
      t = ((z >= 0) ? 1.0 : -1.0) / ((z >= 0 ? z : -z) + $sqrt(1.0 + z * z));
      ec = 1.0 / $sqrt(1.0 + t * t); es = ec * t;
    end
    gc = real'(c) / 2.0 ** CS_FRAC; gs = real'(s) / 2.0 ** CS_FRAC;
    if (a == b && g < 0) es = -es;   // tie: either sign of pi/4 orthogonalises
    chk((gc - ec) < 4e-6 && (ec - gc) < 4e-6 && (gs - es) < 4e-6 && (es - gs) < 4e-6,
        $sformatf("a=%0d b=%0d g=%0d: cos %f sin %f expected %f %f", a, b, g, gc, gs, ec, es));
    orth = gc * gs * (ra - rb) + (gc * gc - gs * gs) * rg;
    chk(orth < 1e-5 * (ra + rb + 1) && -orth < 1e-5 * (ra + rb + 1), "not orthogonal");
    chk(lat == 2 * CORDIC_ITER + 3, $sformatf("latency %0d", lat));
  endtask
  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1'b1;
    run(1000, 2000, 0);
    run(5000, 5000, 1234);
    run(9000, 100, -800);
    run(64'd1 << 50, 64'd3 << 48, -(64'd1 << 47));
    for (int k = 0; k < 60; k++) begin
      longint a, b, g; real lim; int sh;
      sh = $urandom_range(4, 40);
      a = (longint'($urandom) << sh) >> 8;
      b = (longint'($urandom) << sh) >> 8;
      lim = $sqrt(real'(a) * real'(b));
      g = longint'(lim * (real'($urandom_range(0, 2000)) / 1000.0 - 1.0));
      run(a, b, g);
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
