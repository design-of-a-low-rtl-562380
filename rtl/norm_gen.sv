// norm_gen: accumulates the three inner products of a row pair.
//
// While rows i and j of the working matrix stream past one element per clock,
// it keeps alpha = sum(ui*ui), beta = sum(uj*uj) and gamma = sum(ui*uj). These
// are the quantities from which the Jacobi rotation of the pair is derived.
// Each product is rounded to FRAC_W fractional bits before it is added (a
// choice of this design).
//
// Interface: i_clr zeroes the sums (it may coincide with the first valid
// element, which is then the first term). i_valid qualifies i_ui / i_uj.
// Timing: the sums include an element one clock after it is presented, and
// the two-stage product pipeline adds one more clock: o_* are final two
// clocks after the last valid element.
module norm_gen
  import svd_pkg::*;
(
  input  logic  clk,
  input  logic  rst_n,
  input  logic  i_clr,
  input  logic  i_valid,
  input  data_t i_ui,
  input  data_t i_uj,
  output acc_t  o_alpha,
  output acc_t  o_beta,
  output acc_t  o_gamma
);
  localparam int PW = 2 * DATA_W;

  logic signed [PW-1:0] p_aa, p_bb, p_ab;
  logic                 p_valid, p_clr;

  // Stage 1: products.
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      p_aa <= '0; p_bb <= '0; p_ab <= '0; p_valid <= 1'b0; p_clr <= 1'b0;
    end else begin
      p_aa    <= i_ui * i_ui;
      p_bb    <= i_uj * i_uj;
      p_ab    <= i_ui * i_uj;
      p_valid <= i_valid;
      p_clr   <= i_clr;
    end
  end

  function automatic acc_t scale(input logic signed [PW-1:0] p);
    logic signed [PW-1:0] t;
    t = (p + (PW'(1) <<< (FRAC_W - 1))) >>> FRAC_W;
    return acc_t'(t);
  endfunction

  // Stage 2: accumulate.
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      o_alpha <= '0; o_beta <= '0; o_gamma <= '0;
    end else if (p_clr) begin
      o_alpha <= p_valid ? scale(p_aa) : '0;
      o_beta  <= p_valid ? scale(p_bb) : '0;
      o_gamma <= p_valid ? scale(p_ab) : '0;
    end else if (p_valid) begin
      o_alpha <= o_alpha + scale(p_aa);
      o_beta  <= o_beta  + scale(p_bb);
      o_gamma <= o_gamma + scale(p_ab);
    end
  end
endmodule
