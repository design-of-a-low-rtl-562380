// update_matrix: applies the Jacobi rotation to a row pair of U and of V.
//
// For every element position it computes
//   ui' = c*ui - s*uj,   uj' = s*ui + c*uj
// and the same for the V rows, with the (cos, sin) pair produced by
// param_gen for this row pair. Products are rounded to the element format and
// the sums saturate at the limits of DATA_W (both choices of this design).
//
// Interface: i_valid with the four input elements; o_valid with the four
// rotated elements; i_tag (element address and flags) travels alongside.
// Timing: two-stage pipeline, outputs two clocks after the inputs, one element
// per clock.
module update_matrix
  import svd_pkg::*;
#(
  parameter int TAG_W = 16
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             i_valid,
  input  logic [TAG_W-1:0] i_tag,
  input  cs_t              i_cos,
  input  cs_t              i_sin,
  input  data_t            i_u_rowi,
  input  data_t            i_u_rowj,
  input  data_t            i_v_rowi,
  input  data_t            i_v_rowj,
  output logic             o_valid,
  output logic [TAG_W-1:0] o_tag,
  output data_t            o_dout_u_rowi,
  output data_t            o_dout_u_rowj,
  output data_t            o_dout_v_rowi,
  output data_t            o_dout_v_rowj
);
  localparam int PW = DATA_W + CS_W;
  typedef logic signed [PW-1:0] prod_t;

  // Stage 1 products: c*xi, s*xj, s*xi, c*xj for U (index 0) and V (index 1).
  prod_t cxi [2], sxj [2], sxi [2], cxj [2];
  logic             s1_valid;
  logic [TAG_W-1:0] s1_tag;
  data_t            xi [2], xj [2];

  assign xi[0] = i_u_rowi;
  assign xj[0] = i_u_rowj;
  assign xi[1] = i_v_rowi;
  assign xj[1] = i_v_rowj;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      s1_valid <= 1'b0;
      s1_tag   <= '0;
      for (int m = 0; m < 2; m++) begin
        cxi[m] <= '0; sxj[m] <= '0; sxi[m] <= '0; cxj[m] <= '0;
      end
    end else begin
      s1_valid <= i_valid;
      s1_tag   <= i_tag;
      for (int m = 0; m < 2; m++) begin
        cxi[m] <= i_cos * xi[m];
        sxj[m] <= i_sin * xj[m];
        sxi[m] <= i_sin * xi[m];
        cxj[m] <= i_cos * xj[m];
      end
    end
  end

  function automatic data_t round_sat(input logic signed [PW:0] v);
    logic signed [PW:0] r;
    r = (v + ((PW+1)'(1) <<< (CS_FRAC - 1))) >>> CS_FRAC;
    if (r > (PW+1)'(2**(DATA_W-1) - 1))   return {1'b0, {(DATA_W-1){1'b1}}};
    if (r < -(PW+1)'(2**(DATA_W-1)))      return {1'b1, {(DATA_W-1){1'b0}}};
    return data_t'(r);
  endfunction

  data_t yi [2], yj [2];
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      o_valid <= 1'b0;
      o_tag   <= '0;
      for (int m = 0; m < 2; m++) begin
        yi[m] <= '0; yj[m] <= '0;
      end
    end else begin
      o_valid <= s1_valid;
      o_tag   <= s1_tag;
      for (int m = 0; m < 2; m++) begin
        yi[m] <= round_sat((PW+1)'(cxi[m]) - (PW+1)'(sxj[m]));
        yj[m] <= round_sat((PW+1)'(sxi[m]) + (PW+1)'(cxj[m]));
      end
    end
  end

  assign o_dout_u_rowi = yi[0];
  assign o_dout_u_rowj = yj[0];
  assign o_dout_v_rowi = yi[1];
  assign o_dout_v_rowj = yj[1];
endmodule
