// normalized_src_sel: picks the PU whose buffers feed the normaliser.
//
// During the final reads only one PU answers each of the two read streams
// (NormGen: U row for the norm; NormUpdate: U and V rows for the output).
// This block delays the scheduler's stream controls by the one-clock RAM read
// latency, selects the answering PU's data with them, and registers the
// result. The source architecture names the block and places it between the
// PUs and the normaliser; the registered multiplexer is this design's form.
//
// Timing: outputs are two clocks after the read request that the controls
// accompany (one for the RAM, one for this register).
module normalized_src_sel
  import svd_pkg::*;
#(
  parameter int NUM_PU = 32,
  parameter int AW     = 12
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          i_ng_valid,
  input  logic          i_ng_last,
  input  logic [$clog2(NUM_PU)-1:0] i_ng_pu,
  input  logic          i_nu_valid,
  input  logic [AW+1:0] i_nu_tag,
  input  logic [$clog2(NUM_PU)-1:0] i_nu_pu,
  input  data_t         i_ng_data [NUM_PU],
  input  data_t         i_nu_u    [NUM_PU],
  input  data_t         i_nu_v    [NUM_PU],
  output logic          o_ng_valid,
  output logic          o_ng_last,
  output data_t         o_ng_data,
  output logic          o_nu_valid,
  output logic [AW+1:0] o_nu_tag,
  output data_t         o_nu_u,
  output data_t         o_nu_v
);
  logic                        ng_valid_d, ng_last_d, nu_valid_d;
  logic [$clog2(NUM_PU)-1:0]   ng_pu_d, nu_pu_d;
  logic [AW+1:0]               nu_tag_d;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      ng_valid_d <= 1'b0; ng_last_d <= 1'b0; nu_valid_d <= 1'b0;
      ng_pu_d <= '0; nu_pu_d <= '0; nu_tag_d <= '0;
      o_ng_valid <= 1'b0; o_ng_last <= 1'b0; o_ng_data <= '0;
      o_nu_valid <= 1'b0; o_nu_tag <= '0; o_nu_u <= '0; o_nu_v <= '0;
    end else begin
      ng_valid_d <= i_ng_valid;
      ng_last_d  <= i_ng_last;
      ng_pu_d    <= i_ng_pu;
      nu_valid_d <= i_nu_valid;
      nu_tag_d   <= i_nu_tag;
      nu_pu_d    <= i_nu_pu;
      o_ng_valid <= ng_valid_d;
      o_ng_last  <= ng_last_d;
      o_ng_data  <= i_ng_data[ng_pu_d];
      o_nu_valid <= nu_valid_d;
      o_nu_tag   <= nu_tag_d;
      o_nu_u     <= i_nu_u[nu_pu_d];
      o_nu_v     <= i_nu_v[nu_pu_d];
    end
  end
endmodule
