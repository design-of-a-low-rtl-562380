// tb_matrix_col_normalized: sigma and normalised rows from the two reads.
//
// Runs the overlapped read pattern of the scheduler on random rows of
// different magnitudes (and one all-zero row): phase k streams row k for the
// norm and row k-1 for the output. Checks sigma_k = ||row k|| (floating-point
// reference), every output element against row/sigma, the V pass-through,
// the element flags and addresses, and that o_ready drops while a sigma is
// pending.
//
// The two-read pattern follows the published output scheme; the
// reciprocal-based normalisation and its timing are this design's own.
`timescale 1ns/1ps
module tb_matrix_col_normalized;
  import svd_pkg::*;
  localparam int AW = 5, NR = 6, L = 20, LV = 14;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  logic ng_valid = 0, ng_last = 0, advance = 0, nu_valid = 0, ready, s_valid, u_valid, v_valid;
  data_t ng_data = '0, nu_u = '0, nu_v = '0, s_data, u_data, v_data;
  logic [AW+1:0] nu_tag = '0;
  logic [AW-1:0] addr;
  matrix_col_normalized #(.AW(AW)) dut (
    .clk, .rst_n, .i_ng_valid(ng_valid), .i_ng_last(ng_last), .i_ng_data(ng_data), .o_ready(ready),
    .i_advance(advance), .o_s_valid(s_valid), .o_s_data(s_data),
    .i_nu_valid(nu_valid), .i_nu_tag(nu_tag), .i_nu_u(nu_u), .i_nu_v(nu_v),
    .o_u_valid(u_valid), .o_u_data(u_data), .o_v_valid(v_valid), .o_v_data(v_data), .o_addr(addr));
  int checks = 0, failures = 0;
  task automatic chk(input bit ok, input string m);
    checks++; if (!ok) begin failures++; if (failures < 20) $display("FAIL: %s", m); end
  endtask
  function automatic real r(input data_t v); return real'(v) / 2.0 ** FRAC_W; endfunction
  data_t U [NR][L], V [NR][L];
  real sig [NR];
  int cur = -1, n_u = 0, n_v = 0, n_notready = 0;
  always @(negedge clk) if (rst_n) begin
    if (!ready) n_notready++;
    if (s_valid) chk((r(s_data) - sig[cur]) < 1e-4 * (1 + sig[cur]) && (sig[cur] - r(s_data)) < 1e-4 * (1 + sig[cur]),
                     $sformatf("sigma %0d: %f vs %f", cur, r(s_data), sig[cur]));
    if (u_valid) begin
      real e;
      e = (sig[cur] == 0.0) ? 0.0 : r(U[cur][addr]) / sig[cur];
      chk(int'(addr) < L && (r(u_data) - e) < 1e-5 && (e - r(u_data)) < 1e-5,
          $sformatf("U row %0d [%0d] %f vs %f", cur, addr, r(u_data), e));
      n_u++;
    end
    if (v_valid) begin
      chk(int'(addr) < LV && v_data == V[cur][addr], $sformatf("V row %0d [%0d]", cur, addr));
      n_v++;
    end
  end
  initial begin
    for (int k = 0; k < NR; k++) begin
      real s2;
      int sh;
      s2 = 0; sh = $urandom_range(0, 12);
      for (int e = 0; e < L; e++) begin
        U[k][e] = (k == 3) ? '0 : data_t'(($signed($urandom_range(0, 2 ** 21)) - 2 ** 20) >>> sh);
        V[k][e] = $urandom;
        s2 += r(U[k][e]) * r(U[k][e]);
      end
      sig[k] = $sqrt(s2);
    end
    repeat (2) @(posedge clk);
    rst_n = 1'b1;
    for (int x = 0; x <= NR; x++) begin
      if (x > 0) begin
        advance <= 1; @(posedge clk); advance <= 0;
        cur = x - 1;
      end
      for (int e = 0; e < L; e++) begin
        ng_valid <= (x < NR); ng_last <= (e == L - 1); ng_data <= (x < NR) ? U[x][e] : '0;
        nu_valid <= (x > 0); nu_tag <= {1'b1, e < LV, AW'(e)};
        nu_u <= (x > 0) ? U[x-1][e] : '0; nu_v <= (x > 0) ? V[x-1][e] : '0;
        @(posedge clk);
      end
      ng_valid <= 0; nu_valid <= 0; ng_last <= 0;
      repeat (4) @(posedge clk);
      while (!ready) @(posedge clk);
    end
    repeat (4) @(posedge clk);
    chk(n_u == NR * L && n_v == NR * LV, $sformatf("outputs u=%0d v=%0d", n_u, n_v));
    chk(n_notready > NR * 50, $sformatf("ready low for %0d clocks only", n_notready));
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
