// tb_svd_kernel_full: the SVD engine at its default size (32 PUs, rows of up
// to 4096 elements, no parameter overrides) on the four smallest matrix
// sizes of the published timing table, run back to back on the same
// instance: 128 x 128 (two blocks of 64 rows), 256 x 256, 512 x 512 and
// 1024 x 1024 (sixteen blocks), one sweep each; then 128 x 128 again with
// six sweeps, as in the published study of the sweep count, where the
// columns of U inside each block must also have become close to orthogonal.
//
// For each matrix it streams random data (with random gaps on the input
// handshake) and collects sigma, U and V. A floating-point model with the
// same block-wise pair order is run too, but only reported, not compared
// element by element: 64-row blocks of random data contain nearly degenerate
// pairs whose rotation angle depends on rounding, so the model and the
// engine take different, equally valid paths (the reduced end-to-end test
// compares element-wise). The checks here hold whatever path was taken:
// V is orthogonal, V^T diag(sigma) U^T reproduces the input, every column
// of U has unit length, the sum of sigma^2 of each block equals the block's
// squared Frobenius norm, and the row pairs rotated last are orthogonal.
//
// It also checks one element per clock in the rotation steps, counts the
// mechanisms (input stalls, every schedule level, several blocks, overlapped
// final reads, restart after a finished matrix) and checks the run time:
// without the input gaps the testbench inserts, each decomposition must end
// within the published time for 32 PUs at 200 MHz: 0.537, 1.565, 5.095 and
// 18.055 ms, i.e. 107,400, 313,000, 1,019,000 and 3,611,000 clocks.
`timescale 1ns/1ps
module tb_svd_kernel_full;
  import svd_pkg::*;

  localparam int P       = 32;      // the engine's default
  localparam int MAX_LEN = 4096;    // the engine's default
  localparam int AW      = $clog2(MAX_LEN);
  localparam int NMAX    = 1024;    // largest matrix simulated here
  localparam real OTOL   = 1.0e-3;  // U orthogonality inside a block after several sweeps
  localparam real RTOL   = 1.0e-3;  // orthogonality and reconstruction

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic          start = 1'b0, busy, done, a_valid = 1'b0, a_ready;
  data_t         a_data = '0;
  logic [AW:0]   cfg_rows = '0, cfg_cols = '0;
  logic [7:0]    cfg_sweeps = 8'd1;
  logic [AW:0]   row;
  logic          s_valid, u_valid, v_valid;
  data_t         s_data, u_data, v_data;
  logic [AW-1:0] addr;
  logic [3:0]    level;
  logic [7:0]    sweep;

  svd_kernel dut (
    .clk, .rst_n, .i_start(start),
    .i_cfg_rows(cfg_rows), .i_cfg_cols(cfg_cols), .i_cfg_sweeps(cfg_sweeps),
    .o_busy(busy), .o_done(done), .i_a_valid(a_valid), .i_a_data(a_data), .o_a_ready(a_ready),
    .o_row(row), .o_s_valid(s_valid), .o_s_data(s_data), .o_u_valid(u_valid), .o_u_data(u_data),
    .o_v_valid(v_valid), .o_v_data(v_data), .o_addr(addr), .o_level(level), .o_sweep(sweep)
  );

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL: %s", msg);
    end
  endtask

  function automatic real fx2r(input data_t v);
    return real'(v) / real'(1 << FRAC_W);
  endfunction

  // Current problem size (rows n of the working matrix, row length m).
  int n = 0, m = 0, sweeps = 1;

  // ---- reference model ----
  data_t a_fx [NMAX][NMAX];
  real   w [NMAX][NMAX];
  real   vm [NMAX][NMAX];
  real   sig_ref [NMAX];

  task automatic rotate(input int i, input int j);
    real al, be, ga, zeta, t, c, s, xi, xj;
    al = 0; be = 0; ga = 0;
    for (int e = 0; e < m; e++) begin
      al += w[i][e] * w[i][e]; be += w[j][e] * w[j][e]; ga += w[i][e] * w[j][e];
    end
    if (ga == 0.0) begin c = 1.0; s = 0.0; end
    else begin
      zeta = (be - al) / (2.0 * ga);
      t = ((zeta >= 0) ? 1.0 : -1.0) / ((zeta >= 0 ? zeta : -zeta) + $sqrt(1.0 + zeta * zeta));
      c = 1.0 / $sqrt(1.0 + t * t);
      s = c * t;
    end
    for (int e = 0; e < m; e++) begin
      xi = w[i][e]; xj = w[j][e];
      w[i][e] = c * xi - s * xj; w[j][e] = s * xi + c * xj;
    end
    for (int e = 0; e < n; e++) begin
      xi = vm[i][e]; xj = vm[j][e];
      vm[i][e] = c * xi - s * xj; vm[j][e] = s * xi + c * xj;
    end
  endtask

  task automatic reference();
    for (int r = 0; r < n; r++) begin
      for (int e = 0; e < m; e++) w[r][e] = fx2r(a_fx[r][e]);
      for (int e = 0; e < n; e++) vm[r][e] = (r == e) ? 1.0 : 0.0;
    end
    for (int b = 0; b < n; b += 2 * P)
      for (int sw = 0; sw < sweeps; sw++)
        for (int h = P; h >= 1; h /= 2)           // level: half-group size h
          for (int r = 0; r < h; r++)
            for (int g = 0; g < P / h; g++)
              for (int q = 0; q < h; q++)
                rotate(b + g * 2 * h + q, b + g * 2 * h + h + (q + r) % h);
    for (int r = 0; r < n; r++) begin
      real n2;
      n2 = 0;
      for (int e = 0; e < m; e++) n2 += w[r][e] * w[r][e];
      sig_ref[r] = $sqrt(n2);
    end
  endtask

  // ---- output capture ----
  real sig_out [NMAX], u_out [NMAX][NMAX], v_out [NMAX][NMAX];
  int  n_s = 0, n_u = 0, n_v = 0;
  always @(posedge clk) if (rst_n) begin
    if (s_valid) begin sig_out[int'(row)] = fx2r(s_data); n_s++; end
    if (u_valid) begin u_out[int'(row)][int'(addr)] = fx2r(u_data); n_u++; end
    if (v_valid) begin v_out[int'(row)][int'(addr)] = fx2r(v_data); n_v++; end
  end

  // ---- mechanism and rate counters (cleared per matrix) ----
  int n_stall = 0, n_taken = 0, n_rd = 0, n_overlap = 0, n_wrap = 0, n_blocks = 0, cycles = 0;
  int lvl_seen [8] = '{default: 0};
  logic [7:0] sweep_q = '0;
  logic [3:0] level_q = '0;
  always @(posedge clk) if (rst_n) begin
    if (a_ready && !a_valid) n_stall++;
    if (a_ready && a_valid) n_taken++;
    if (dut.u_matrix_gen_prepro.u_svd_schedule.o_rd_en) n_rd++;
    if (dut.u_matrix_gen_prepro.u_svd_schedule.o_ng_valid &&
        dut.u_matrix_gen_prepro.u_svd_schedule.o_nu_valid) n_overlap++;
    if (level != level_q) lvl_seen[int'(level)]++;
    if (sweep == sweep_q + 1'b1) n_wrap++;   // next sweep of a block started
    if (s_valid && (int'(row) % (2 * P)) == 0) n_blocks++;
    if (busy) cycles++;
    level_q <= level;
    sweep_q <= sweep;
  end

  task automatic clear_counters();
    n_s = 0; n_u = 0; n_v = 0;
    n_stall = 0; n_taken = 0; n_rd = 0; n_overlap = 0; n_wrap = 0; n_blocks = 0; cycles = 0;
    for (int l = 0; l < 8; l++) lvl_seen[l] = 0;
  endtask

  // One complete decomposition of an rows x cols working matrix.
  int n_runs = 0;
  task automatic run_case(input int rows, input int cols, input int nsw, input int paper_cycles);
    n = rows;
    m = cols;
    sweeps = nsw;
    for (int r = 0; r < n; r++)
      for (int e = 0; e < m; e++)
        a_fx[r][e] = data_t'($signed($urandom_range(0, 2 ** (FRAC_W + 1))) - 2 ** FRAC_W);
    reference();
    while (busy) @(posedge clk);
    clear_counters();
    cfg_rows <= (AW+1)'(n);
    cfg_cols <= (AW+1)'(m);
    cfg_sweeps <= 8'(sweeps);
    start    <= 1'b1;
    @(posedge clk);
    start    <= 1'b0;
    // Stream rows with random gaps.
    for (int r = 0; r < n; r++)
      for (int e = 0; e < m; e++) begin
        while ($urandom_range(0, 3) == 0) begin
          a_valid <= 1'b0;
          @(posedge clk);
        end
        a_valid <= 1'b1;
        a_data  <= a_fx[r][e];
        @(posedge clk);
        while (!a_ready) @(posedge clk);
      end
    a_valid <= 1'b0;
    while (!done) @(posedge clk);
    repeat (10) @(posedge clk);

    check(n_taken == n * m, $sformatf("%0dx%0d: elements taken %0d", n, m, n_taken));
    check(n_s == n && n_u == n * m && n_v == n * n,
          $sformatf("%0dx%0d: output counts s=%0d u=%0d v=%0d", n, m, n_s, n_u, n_v));
    check(n_rd == (n / (2 * P)) * sweeps * (2 * P - 1) * ((m > n) ? m : n),
          $sformatf("%0dx%0d: rotation read cycles %0d (one element per clock)", n, m, n_rd));
    // Invariants that hold whatever rounding path the rotations took.
    for (int r = 0; r < n; r++) begin
      real d;
      d = -1.0;
      for (int e = 0; e < m; e++) d += u_out[r][e] * u_out[r][e];
      check(d < RTOL && -d < RTOL, $sformatf("column %0d of U has |u|^2 - 1 = %g", r, d));
    end
    for (int b = 0; b < n; b += 2 * P) begin
      real fa, fs;
      fa = 0; fs = 0;
      for (int r = b; r < b + 2 * P; r++) begin
        fs += sig_out[r] * sig_out[r];
        for (int e = 0; e < m; e++) fa += fx2r(a_fx[r][e]) * fx2r(a_fx[r][e]);
      end
      check((fs - fa) < RTOL * fa && (fa - fs) < RTOL * fa,
            $sformatf("block %0d: sum sigma^2 %f vs Frobenius^2 %f", b / (2 * P), fs, fa));
    end
    // The last level rotates rows 2k and 2k+1 against each other, so those
    // pairs must come out orthogonal.
    for (int k = 0; k < n; k += 2) begin
      real d;
      d = 0;
      for (int e = 0; e < m; e++) d += u_out[k][e] * u_out[k + 1][e];
      check(d < RTOL && -d < RTOL, $sformatf("U columns %0d,%0d not orthogonal: %g", k, k + 1, d));
    end
    // Path-independent checks: V is orthogonal and A^T = V^T * diag(sigma) * U^T rows.
    begin
      real maxo, maxr, maxd;
      maxo = 0; maxr = 0; maxd = 0;
      for (int i = 0; i < n; i++)
        for (int j = 0; j < n; j++) begin
          real d;
          d = (i == j) ? -1.0 : 0.0;
          for (int e = 0; e < n; e++) d += v_out[i][e] * v_out[j][e];
          if (d < 0) d = -d;
          if (d > maxo) maxo = d;
        end
      for (int i = 0; i < n; i++)
        for (int e = 0; e < m; e++) begin
          real d;
          d = -fx2r(a_fx[i][e]);
          for (int k = 0; k < n; k++) d += v_out[k][i] * sig_out[k] * u_out[k][e];
          if (d < 0) d = -d;
          if (d > maxr) maxr = d;
          d = u_out[i][e] - w[i][e] / sig_ref[i];
          if (d < 0) d = -d;
          if (d > maxd) maxd = d;
        end
      check(maxo < RTOL, $sformatf("%0dx%0d: V orthogonality error %g", n, m, maxo));
      check(maxr < RTOL, $sformatf("%0dx%0d: reconstruction error %g", n, m, maxr));
      $display("%0dx%0d: max |V V^T - I| = %g, max reconstruction error = %g, max U deviation from the model = %g",
               n, m, maxo, maxr, maxd);
    end
    // Mechanisms of this run.
    check(n_stall > 0, "input stall never happened");
    for (int l = 0; l <= $clog2(P); l++) check(lvl_seen[l] > 0, $sformatf("level %0d never ran", l));
    check(n_wrap == (n / (2 * P)) * (sweeps - 1), $sformatf("sweep advances %0d", n_wrap));
    check(n_blocks == n / (2 * P), $sformatf("blocks %0d", n_blocks));
    check(n_overlap > 0, "final reads never overlapped");
    if (sweeps > 1) begin
      // Several sweeps: all columns of U inside a block are close to orthogonal.
      real mx;
      mx = 0;
      for (int b = 0; b < n; b += 2 * P)
        for (int i = b; i < b + 2 * P; i++)
          for (int j = i + 1; j < b + 2 * P; j++) begin
            real d;
            d = 0;
            for (int e = 0; e < m; e++) d += u_out[i][e] * u_out[j][e];
            if (d < 0) d = -d;
            if (d > mx) mx = d;
          end
      check(mx < OTOL, $sformatf("%0dx%0d, %0d sweeps: U orthogonality inside a block %g", n, m, sweeps, mx));
      $display("%0dx%0d, %0d sweeps: max |u_i . u_j| inside a block = %g", n, m, sweeps, mx);
    end
    if (paper_cycles > 0)
      check(cycles - n_stall <= paper_cycles, $sformatf("%0dx%0d: %0d clocks without input gaps, published %0d",
                                                      n, m, cycles - n_stall, paper_cycles));
    $display("%0dx%0d, %0d sweep(s): cycles=%0d stalls=%0d -> %0d clocks (published %0d, 0 = none), overlap=%0d blocks=%0d wraps=%0d",
             n, m, sweeps, cycles, n_stall, cycles - n_stall, paper_cycles, n_overlap, n_blocks, n_wrap);
    n_runs++;
  endtask

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    @(posedge clk);
    run_case(128, 128, 1, 107400);
    run_case(256, 256, 1, 313000);
    run_case(512, 512, 1, 1019000);
    run_case(1024, 1024, 1, 3611000);
    run_case(128, 128, 6, 0);          // several sweeps, no published time
    check(n_runs == 5, "restart after a finished matrix");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (10000000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
