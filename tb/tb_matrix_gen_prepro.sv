// tb_matrix_gen_prepro: scheduler, PU array and selector together.
//
// Loads one block of four rows into two PUs, runs two sweeps, and checks the
// two final-read streams against a floating-point model with the same pair
// order: the NormGen stream must carry the rotated rows in order, the
// NormUpdate stream the same rows (one phase later) and the rotated identity
// rows of V. The normaliser is replaced by a constant ready.
//
// The pair order comes from the published scheduling example; the
// stream timing checked is this design's own.
`timescale 1ns/1ps
module tb_matrix_gen_prepro;
  import svd_pkg::*;
  localparam int P = 2, ML = 16, AW = 4, ROWS = 4, COLS = 7, SWEEPS = 2;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  logic start = 0, busy, done, a_valid = 0, a_ready, ng_valid, ng_last, nu_valid, advance;
  data_t a_data = '0, ng_data, nu_u, nu_v;
  logic [AW+1:0] nu_tag;
  logic [AW:0] out_row;
  logic [3:0] level;
  logic [7:0] sweep;
  matrix_gen_prepro #(.NUM_PU(P), .MAX_LEN(ML)) dut (
    .clk, .rst_n, .i_start(start), .i_cfg_rows((AW+1)'(ROWS)), .i_cfg_cols((AW+1)'(COLS)),
    .i_cfg_sweeps(8'(SWEEPS)), .o_busy(busy), .o_done(done), .i_a_valid(a_valid), .i_a_data(a_data),
    .o_a_ready(a_ready), .o_ng_valid(ng_valid), .o_ng_last(ng_last), .o_ng_data(ng_data),
    .o_nu_valid(nu_valid), .o_nu_tag(nu_tag), .o_nu_u(nu_u), .o_nu_v(nu_v), .o_advance(advance),
    .i_norm_ready(1'b1), .o_out_row(out_row), .o_level(level), .o_sweep(sweep));
  int checks = 0, failures = 0;
  task automatic chk(input bit ok, input string m);
    checks++; if (!ok) begin failures++; if (failures < 20) $display("FAIL: %s", m); end
  endtask
  function automatic real r(input data_t v); return real'(v) / 2.0 ** FRAC_W; endfunction
  data_t A [ROWS][COLS];
  real w [ROWS][COLS], vm [ROWS][ROWS];
  task automatic rotate(input int i, input int j);
    real al, be, ga, z, t, c, s, xi, xj;
    al = 0; be = 0; ga = 0;
    for (int e = 0; e < COLS; e++) begin
      al += w[i][e] * w[i][e]; be += w[j][e] * w[j][e]; ga += w[i][e] * w[j][e];
    end
    z = (be - al) / (2.0 * ga);
    t = ((z >= 0) ? 1.0 : -1.0) / ((z >= 0 ? z : -z) + $sqrt(1.0 + z * z));
    c = 1.0 / $sqrt(1.0 + t * t); s = c * t;
    for (int e = 0; e < COLS; e++) begin
      xi = w[i][e]; xj = w[j][e]; w[i][e] = c * xi - s * xj; w[j][e] = s * xi + c * xj;
    end
    for (int e = 0; e < ROWS; e++) begin
      xi = vm[i][e]; xj = vm[j][e]; vm[i][e] = c * xi - s * xj; vm[j][e] = s * xi + c * xj;
    end
  endtask
  int ng_row = 0, ng_e = 0, n_nu = 0, n_ng = 0;
  always @(posedge clk) if (rst_n) begin
    if (ng_valid) begin
      chk((r(ng_data) - w[ng_row][ng_e]) < 1e-4 && (w[ng_row][ng_e] - r(ng_data)) < 1e-4,
          $sformatf("NormGen row %0d [%0d] %f vs %f", ng_row, ng_e, r(ng_data), w[ng_row][ng_e]));
      n_ng++;
      if (ng_last) begin ng_row++; ng_e = 0; end else ng_e++;
    end
    if (nu_valid) begin
      int e, x;
      e = int'(nu_tag[AW-1:0]); x = int'(out_row);
      if (nu_tag[AW+1]) chk((r(nu_u) - w[x][e]) < 1e-4 && (w[x][e] - r(nu_u)) < 1e-4,
                            $sformatf("NormUpdate U row %0d [%0d]", x, e));
      if (nu_tag[AW]) chk((r(nu_v) - vm[x][e]) < 1e-4 && (vm[x][e] - r(nu_v)) < 1e-4,
                          $sformatf("NormUpdate V row %0d [%0d] %f vs %f", x, e, r(nu_v), vm[x][e]));
      n_nu++;
    end
  end
  initial begin
    for (int i = 0; i < ROWS; i++) begin
      for (int e = 0; e < COLS; e++) begin
        A[i][e] = data_t'($signed($urandom_range(0, 2 ** 21)) - 2 ** 20);
        w[i][e] = r(A[i][e]);
      end
      for (int e = 0; e < ROWS; e++) vm[i][e] = (i == e) ? 1.0 : 0.0;
    end
    for (int s = 0; s < SWEEPS; s++) begin
      rotate(0, 2); rotate(1, 3); rotate(0, 3); rotate(1, 2); rotate(0, 1); rotate(2, 3);
    end
    repeat (2) @(posedge clk);
    rst_n = 1'b1;
    start <= 1; @(posedge clk); start <= 0;
    for (int i = 0; i < ROWS; i++)
      for (int e = 0; e < COLS; e++) begin
        a_valid <= 1; a_data <= A[i][e]; @(posedge clk);
        while (!a_ready) @(posedge clk);
      end
    a_valid <= 0;
    while (!done) @(posedge clk);
    repeat (6) @(posedge clk);
    chk(n_ng == ROWS * COLS && n_nu == ROWS * COLS, $sformatf("stream lengths %0d %0d", n_ng, n_nu));
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
