// param_gen: rotation parameters of one row pair.
//
// Chains norm_gen (alpha, beta, gamma of the two rows as they stream in) and
// cossin_gen (sin/cos of the angle that orthogonalises them), as in the PU
// structure of the source architecture. The scheduler pulses i_cs_start once
// the last element of the pair has been streamed; starting the angle
// computation on an explicit command is this design's choice.
//
// Timing: i_cs_start may come two clocks after the last valid element at the
// earliest; o_cs_done follows i_cs_start by 2*CORDIC_ITER + 3 clocks.
module param_gen
  import svd_pkg::*;
(
  input  logic  clk,
  input  logic  rst_n,
  input  logic  i_clr,
  input  logic  i_valid,
  input  data_t i_ui,
  input  data_t i_uj,
  input  logic  i_cs_start,
  output logic  o_cs_done,
  output cs_t   o_cos,
  output cs_t   o_sin
);
  acc_t alpha, beta, gamma;

  norm_gen u_norm_gen (
    .clk, .rst_n, .i_clr, .i_valid, .i_ui, .i_uj,
    .o_alpha(alpha), .o_beta(beta), .o_gamma(gamma)
  );

  cossin_gen u_cossin_gen (
    .clk, .rst_n, .i_start(i_cs_start),
    .i_alpha(alpha), .i_beta(beta), .i_gamma(gamma),
    .o_done(o_cs_done), .o_cos, .o_sin
  );
endmodule
