// svd_kernel: streaming one-sided Jacobi SVD engine (top level).
//
// The input is the working matrix W = A^T, streamed row by row (that is, A
// column by column), i_cfg_rows rows of i_cfg_cols elements. W is processed in
// blocks of 2*NUM_PU rows: every pair of rows inside a block is made
// orthogonal by plane rotations, i_cfg_sweeps times over, with the same
// rotations applied to the matching rows of an identity matrix (V). Rows of
// different blocks are never paired, as in the source algorithm. Each
// resulting row k is then split into its length sigma_k and its direction
// (a column of U); the rotated identity row k is column k of V.
//
// Structure: matrix_gen_prepro (scheduler, PU array, output selector) feeds
// matrix_col_normalized, as in the system diagram of the source architecture.
//
// Interface: i_start with the configuration; input elements are taken when
// i_a_valid and o_a_ready are high. Results leave without back-pressure: for
// output row k (o_row), o_s_valid pulses once with sigma_k, then o_u_valid
// marks elements of column k of U and o_v_valid elements of column k of V,
// each with its index in o_addr. o_done pulses after the last row.
// Numbers are signed fixed point (svd_pkg: 32 bits, 20 fractional).
module svd_kernel
  import svd_pkg::*;
#(
  parameter int NUM_PU  = 32,
  parameter int MAX_LEN = 4096,
  parameter int AW      = $clog2(MAX_LEN)
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          i_start,
  input  logic [AW:0]   i_cfg_rows,
  input  logic [AW:0]   i_cfg_cols,
  input  logic [7:0]    i_cfg_sweeps,
  output logic          o_busy,
  output logic          o_done,
  input  logic          i_a_valid,
  input  data_t         i_a_data,
  output logic          o_a_ready,
  output logic [AW:0]   o_row,
  output logic          o_s_valid,
  output data_t         o_s_data,
  output logic          o_u_valid,
  output data_t         o_u_data,
  output logic          o_v_valid,
  output data_t         o_v_data,
  output logic [AW-1:0] o_addr,
  output logic [3:0]    o_level,
  output logic [7:0]    o_sweep
);
  logic          ng_valid, ng_last, nu_valid, advance, norm_ready;
  data_t         ng_data, nu_u, nu_v;
  logic [AW+1:0] nu_tag;

  matrix_gen_prepro #(.NUM_PU(NUM_PU), .MAX_LEN(MAX_LEN), .AW(AW)) u_matrix_gen_prepro (
    .clk, .rst_n, .i_start, .i_cfg_rows, .i_cfg_cols, .i_cfg_sweeps, .o_busy, .o_done,
    .i_a_valid, .i_a_data, .o_a_ready,
    .o_ng_valid(ng_valid), .o_ng_last(ng_last), .o_ng_data(ng_data),
    .o_nu_valid(nu_valid), .o_nu_tag(nu_tag), .o_nu_u(nu_u), .o_nu_v(nu_v),
    .o_advance(advance), .i_norm_ready(norm_ready), .o_out_row(o_row),
    .o_level, .o_sweep
  );

  matrix_col_normalized #(.AW(AW)) u_matrix_col_normalized (
    .clk, .rst_n,
    .i_ng_valid(ng_valid), .i_ng_last(ng_last), .i_ng_data(ng_data), .o_ready(norm_ready),
    .i_advance(advance), .o_s_valid, .o_s_data,
    .i_nu_valid(nu_valid), .i_nu_tag(nu_tag), .i_nu_u(nu_u), .i_nu_v(nu_v),
    .o_u_valid, .o_u_data, .o_v_valid, .o_v_data, .o_addr
  );
endmodule
