// tb_svd_kernel: end-to-end test of the streaming Jacobi SVD engine.
//
// Streams a random matrix (with random gaps on the input handshake) into
// svd_kernel, collects sigma, U and V, and compares them with a floating-point
// model that applies the same block-wise pair order with textbook Jacobi
// rotations. It also checks the load and rotation rates (one element per
// clock) and counts the mechanisms of the design: input stalls, every
// schedule level, sweep wrap-around, several blocks, and the overlap of the
// two final reads. Parameters are reduced so that it runs in seconds.
//
// The pair order, block size and output scheme follow the published
// design; the tolerances reflect this design's own number formats.
`timescale 1ns/1ps
module tb_svd_kernel;
  import svd_pkg::*;

  localparam int P       = 4;
  localparam int MAX_LEN = 32;
  localparam int AW      = $clog2(MAX_LEN);
  localparam int ROWS    = 16;      // two blocks of 2P rows
  localparam int COLS    = 12;
  localparam int SWEEPS  = 3;
  localparam real TOL    = 2.0e-3;   // element-wise, against the model
  localparam real RTOL   = 1.0e-3;   // orthogonality and reconstruction

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic          start = 1'b0, busy, done, a_valid = 1'b0, a_ready;
  data_t         a_data = '0;
  logic [AW:0]   row;
  logic          s_valid, u_valid, v_valid;
  data_t         s_data, u_data, v_data;
  logic [AW-1:0] addr;
  logic [3:0]    level;
  logic [7:0]    sweep;

  svd_kernel #(.NUM_PU(P), .MAX_LEN(MAX_LEN)) dut (
    .clk, .rst_n, .i_start(start),
    .i_cfg_rows((AW+1)'(ROWS)), .i_cfg_cols((AW+1)'(COLS)), .i_cfg_sweeps(8'(SWEEPS)),
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

  // ---- reference model ----
  data_t a_fx [ROWS][COLS];
  real   w [ROWS][COLS];
  real   vm [ROWS][ROWS];
  real   sig_ref [ROWS];

  task automatic rotate(input int i, input int j);
    real al, be, ga, zeta, t, c, s, xi, xj;
    al = 0; be = 0; ga = 0;
    for (int e = 0; e < COLS; e++) begin
      al += w[i][e] * w[i][e]; be += w[j][e] * w[j][e]; ga += w[i][e] * w[j][e];
    end
    if (ga == 0.0) begin c = 1.0; s = 0.0; end
    else begin
      zeta = (be - al) / (2.0 * ga);
      t = ((zeta >= 0) ? 1.0 : -1.0) / ((zeta >= 0 ? zeta : -zeta) + $sqrt(1.0 + zeta * zeta));
      c = 1.0 / $sqrt(1.0 + t * t);
      s = c * t;
    end
    for (int e = 0; e < COLS; e++) begin
      xi = w[i][e]; xj = w[j][e];
      w[i][e] = c * xi - s * xj; w[j][e] = s * xi + c * xj;
    end
    for (int e = 0; e < ROWS; e++) begin
      xi = vm[i][e]; xj = vm[j][e];
      vm[i][e] = c * xi - s * xj; vm[j][e] = s * xi + c * xj;
    end
  endtask

  task automatic reference();
    for (int r = 0; r < ROWS; r++) begin
      for (int e = 0; e < COLS; e++) w[r][e] = fx2r(a_fx[r][e]);
      for (int e = 0; e < ROWS; e++) vm[r][e] = (r == e) ? 1.0 : 0.0;
    end
    for (int b = 0; b < ROWS; b += 2 * P)
      for (int sw = 0; sw < SWEEPS; sw++)
        for (int h = P; h >= 1; h /= 2)           // level: half-group size h
          for (int r = 0; r < h; r++)
            for (int g = 0; g < P / h; g++)
              for (int q = 0; q < h; q++)
                rotate(b + g * 2 * h + q, b + g * 2 * h + h + (q + r) % h);
    for (int r = 0; r < ROWS; r++) begin
      real n2;
      n2 = 0;
      for (int e = 0; e < COLS; e++) n2 += w[r][e] * w[r][e];
      sig_ref[r] = $sqrt(n2);
    end
  endtask

  // ---- output capture ----
  real sig_out [ROWS], u_out [ROWS][COLS], v_out [ROWS][ROWS];
  int  n_s = 0, n_u = 0, n_v = 0;
  always @(posedge clk) if (rst_n) begin
    if (s_valid) begin sig_out[int'(row)] = fx2r(s_data); n_s++; end
    if (u_valid) begin u_out[int'(row)][int'(addr)] = fx2r(u_data); n_u++; end
    if (v_valid) begin v_out[int'(row)][int'(addr)] = fx2r(v_data); n_v++; end
  end

  // ---- mechanism and rate counters ----
  int n_stall = 0, n_taken = 0, n_rd = 0, n_overlap = 0, n_wrap = 0, n_blocks = 0;
  int lvl_seen [4] = '{default: 0};
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
    level_q <= level;
    sweep_q <= sweep;
  end

  int cycles = 0;
  always @(posedge clk) if (rst_n && busy) cycles++;
  initial begin
    for (int r = 0; r < ROWS; r++)
      for (int e = 0; e < COLS; e++)
        a_fx[r][e] = data_t'($signed($urandom_range(0, 2 ** (FRAC_W + 1))) - 2 ** FRAC_W);
    reference();
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    @(posedge clk);
    start <= 1'b1;
    @(posedge clk);
    start <= 1'b0;
    // Stream rows with random gaps.
    for (int r = 0; r < ROWS; r++)
      for (int e = 0; e < COLS; e++) begin
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

    check(n_taken == ROWS * COLS, $sformatf("elements taken %0d", n_taken));
    check(n_s == ROWS && n_u == ROWS * COLS && n_v == ROWS * ROWS,
          $sformatf("output counts s=%0d u=%0d v=%0d", n_s, n_u, n_v));
    check(n_rd == (ROWS / (2 * P)) * SWEEPS * (2 * P - 1) * ((COLS > ROWS) ? COLS : ROWS),
          $sformatf("rotation read cycles %0d (one element per clock)", n_rd));
    for (int r = 0; r < ROWS; r++) begin
      real d;
      d = sig_out[r] - sig_ref[r];
      check(d < TOL * (1.0 + sig_ref[r]) && -d < TOL * (1.0 + sig_ref[r]),
            $sformatf("sigma[%0d] %f vs %f", r, sig_out[r], sig_ref[r]));
      for (int e = 0; e < COLS; e++) begin
        d = u_out[r][e] - w[r][e] / sig_ref[r];
        check(d < TOL && -d < TOL, $sformatf("U[%0d][%0d] %f vs %f", r, e, u_out[r][e], w[r][e] / sig_ref[r]));
      end
      for (int e = 0; e < ROWS; e++) begin
        d = v_out[r][e] - vm[r][e];
        check(d < TOL && -d < TOL, $sformatf("V[%0d][%0d] %f vs %f", r, e, v_out[r][e], vm[r][e]));
      end
    end
    // Path-independent checks: V is orthogonal and A^T = V^T * diag(sigma) * U^T rows.
    begin
      real maxo, maxr, maxd [2];
      maxo = 0; maxr = 0; maxd[0] = 0; maxd[1] = 0;
      for (int i = 0; i < ROWS; i++)
        for (int j = 0; j < ROWS; j++) begin
          real d;
          d = (i == j) ? -1.0 : 0.0;
          for (int e = 0; e < ROWS; e++) d += v_out[i][e] * v_out[j][e];
          if (d < 0) d = -d;
          if (d > maxo) maxo = d;
        end
      for (int i = 0; i < ROWS; i++)
        for (int e = 0; e < COLS; e++) begin
          real d;
          d = -fx2r(a_fx[i][e]);
          for (int k = 0; k < ROWS; k++) d += v_out[k][i] * sig_out[k] * u_out[k][e];
          if (d < 0) d = -d;
          if (d > maxr) maxr = d;
          d = u_out[i][e] - w[i][e] / sig_ref[i];
          if (d < 0) d = -d;
          if (d > maxd[i / (2 * P) % 2]) maxd[i / (2 * P) % 2] = d;
        end
      check(maxo < RTOL, $sformatf("V orthogonality error %g", maxo));
      check(maxr < RTOL, $sformatf("reconstruction error %g", maxr));
      $display("max |V V^T - I| = %g, max reconstruction error = %g, max U deviation block0/1 = %g / %g",
               maxo, maxr, maxd[0], maxd[1]);
    end
    // Mechanisms.
    check(n_stall > 0, "input stall never happened");
    for (int l = 0; l <= $clog2(P); l++) check(lvl_seen[l] > 0, $sformatf("level %0d never ran", l));
    check(n_wrap == (ROWS / (2 * P)) * (SWEEPS - 1), $sformatf("sweep advances %0d", n_wrap));
    check(n_blocks == ROWS / (2 * P), $sformatf("blocks %0d", n_blocks));
    check(n_overlap > 0, "final reads never overlapped");
    $display("cycles=%0d stalls=%0d overlap=%0d wraps=%0d blocks=%0d levels=%0d/%0d/%0d",
             cycles, n_stall, n_overlap, n_wrap, n_blocks, lvl_seen[0], lvl_seen[1], lvl_seen[2]);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
