// processing_unit: one PU of the array, rotating one row pair per step.
//
// A PU is pu_ram_ctrl (four row buffers), param_gen (alpha, beta, gamma of the
// row pair as it arrives, then sin/cos) and update_matrix (the rotation of
// the buffered U and V rows), as in the PU structure of the source
// architecture. In one step the scheduler streams the new row pair in
// (written to the buffers and summed by param_gen), starts the angle
// computation, and then reads the pair back through update_matrix; the
// rotated rows leave on o_dout_* and are routed by the scheduler to the PUs of
// the next step, where they arrive while those PUs are reading theirs.
//
// Timing: o_cs_done comes 2*CORDIC_ITER + 3 clocks after i_cs_start; o_dout_*
// follow a rotation read request (i_rd_en) by three clocks (RAM read plus the
// two update_matrix stages), with the request's tag in o_dout_tag. Final
// reads return data one clock after the request.
//
// The three parts, the port names and the four buffers follow the published
// PU. This design's own choices: param_gen is fed through pu_ram_ctrl (one
// register stage) rather than straight from the inputs, so that during the
// initial load, when rows arrive one at a time, row i can be read back from
// its buffer and paired with row j as it arrives; the tag that travels with
// each rotated element; and all timing numbers above.
module processing_unit
  import svd_pkg::*;
#(
  parameter int MAX_LEN = 4096,
  parameter int AW      = $clog2(MAX_LEN)
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          i_wr_valid,
  input  logic [AW-1:0] i_wr_addr,
  input  logic          i_wr_uok,
  input  logic          i_wr_vok,
  input  logic          i_wr_i,
  input  logic          i_wr_j,
  input  data_t         i_din_u_rowi,
  input  data_t         i_din_u_rowj,
  input  data_t         i_din_v_rowi,
  input  data_t         i_din_v_rowj,
  input  logic          i_acc_en,
  input  logic          i_acc_ram_i,
  input  logic          i_acc_clr,
  input  logic          i_cs_start,
  output logic          o_cs_done,
  input  logic          i_rd_en,
  input  logic [AW-1:0] i_rd_addr,
  input  logic          i_rd_uok,
  input  logic          i_rd_vok,
  output logic          o_dout_valid,
  output logic [AW+1:0] o_dout_tag,
  output data_t         o_dout_u_rowi,
  output data_t         o_dout_u_rowj,
  output data_t         o_dout_v_rowi,
  output data_t         o_dout_v_rowj,
  input  logic          i_ng_rd,
  input  slot_e         i_ng_slot,
  input  logic [AW-1:0] i_ng_addr,
  input  logic          i_nu_rd,
  input  slot_e         i_nu_slot,
  input  logic [AW-1:0] i_nu_addr,
  output data_t         o_dout_NormGen_u_data,
  output data_t         o_dout_NormUpdate_u_data,
  output data_t         o_dout_NormUpdate_v_data
);
  logic          pg_clr, pg_valid, up_valid;
  data_t         pg_ui, pg_uj;
  logic [AW+1:0] up_tag;
  data_t         up_ui, up_uj, up_vi, up_vj;
  cs_t           cos_q, sin_q;

  pu_ram_ctrl #(.MAX_LEN(MAX_LEN), .AW(AW)) u_pu_ram_ctrl (
    .clk, .rst_n,
    .i_wr_valid, .i_wr_addr, .i_wr_uok, .i_wr_vok, .i_wr_i, .i_wr_j,
    .i_din_u_rowi, .i_din_u_rowj, .i_din_v_rowi, .i_din_v_rowj,
    .i_acc_en, .i_acc_ram_i, .i_acc_clr,
    .o_pg_clr(pg_clr), .o_pg_valid(pg_valid), .o_pg_ui(pg_ui), .o_pg_uj(pg_uj),
    .i_rd_en, .i_rd_addr, .i_rd_uok, .i_rd_vok,
    .o_up_valid(up_valid), .o_up_tag(up_tag),
    .o_up_u_rowi(up_ui), .o_up_u_rowj(up_uj), .o_up_v_rowi(up_vi), .o_up_v_rowj(up_vj),
    .i_ng_rd, .i_ng_slot, .i_ng_addr, .i_nu_rd, .i_nu_slot, .i_nu_addr,
    .o_dout_NormGen_u_data, .o_dout_NormUpdate_u_data, .o_dout_NormUpdate_v_data
  );

  param_gen u_param_gen (
    .clk, .rst_n, .i_clr(pg_clr), .i_valid(pg_valid), .i_ui(pg_ui), .i_uj(pg_uj),
    .i_cs_start, .o_cs_done, .o_cos(cos_q), .o_sin(sin_q)
  );

  update_matrix #(.TAG_W(AW+2)) u_update_matrix (
    .clk, .rst_n, .i_valid(up_valid), .i_tag(up_tag), .i_cos(cos_q), .i_sin(sin_q),
    .i_u_rowi(up_ui), .i_u_rowj(up_uj), .i_v_rowi(up_vi), .i_v_rowj(up_vj),
    .o_valid(o_dout_valid), .o_tag(o_dout_tag),
    .o_dout_u_rowi, .o_dout_u_rowj, .o_dout_v_rowi, .o_dout_v_rowj
  );
endmodule
