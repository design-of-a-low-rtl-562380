// matrix_gen_prepro: the scheduler, the PU array and the output selector.
//
// Wires svd_schedule to NUM_PU processing units (their write side through the
// scheduler's crossbar, their rotated outputs back into it) and routes the
// PUs' final-read outputs through normalized_src_sel. This grouping follows
// the system diagram of the source architecture. All PUs run in lock-step,
// so PU 0's output valid, tag and sin/cos-done stand for the whole array.
//
// Interface: configuration, start/done and the input stream pass to the
// scheduler; the selected final-read streams go to the normaliser.
module matrix_gen_prepro
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
  // To the normaliser.
  output logic          o_ng_valid,
  output logic          o_ng_last,
  output data_t         o_ng_data,
  output logic          o_nu_valid,
  output logic [AW+1:0] o_nu_tag,
  output data_t         o_nu_u,
  output data_t         o_nu_v,
  output logic          o_advance,
  input  logic          i_norm_ready,
  output logic [AW:0]   o_out_row,
  output logic [3:0]    o_level,
  output logic [7:0]    o_sweep
);
  localparam int P  = NUM_PU;
  localparam int NS = 2 * P;

  logic          wr_valid, wr_uok, wr_vok, cs_start, rd_en, rd_uok, rd_vok;
  logic [AW-1:0] wr_addr, rd_addr, ng_addr, nu_addr;
  logic [P-1:0]  wr_i, wr_j, acc_en, acc_ram_i, acc_clr, ng_rd, nu_rd;
  data_t         din_u [NS], din_v [NS], pu_u [NS], pu_v [NS];
  slot_e         ng_slot, nu_slot;
  logic          pu_valid [P];
  logic [AW+1:0] pu_tag [P];
  logic          cs_done [P];
  data_t         ng_data [P], nu_u [P], nu_v [P];
  logic          s_ng_valid, s_ng_last, s_nu_valid;
  logic [$clog2(P)-1:0] s_ng_pu, s_nu_pu;
  logic [AW+1:0] s_nu_tag;

  svd_schedule #(.NUM_PU(P), .MAX_LEN(MAX_LEN), .AW(AW)) u_svd_schedule (
    .clk, .rst_n, .i_start, .i_cfg_rows, .i_cfg_cols, .i_cfg_sweeps, .o_busy, .o_done,
    .i_a_valid, .i_a_data, .o_a_ready,
    .i_pu_valid(pu_valid[0]), .i_pu_tag(pu_tag[0]), .i_pu_u(pu_u), .i_pu_v(pu_v),
    .i_cs_done(cs_done[0]),
    .o_wr_valid(wr_valid), .o_wr_addr(wr_addr), .o_wr_uok(wr_uok), .o_wr_vok(wr_vok),
    .o_wr_i(wr_i), .o_wr_j(wr_j), .o_din_u(din_u), .o_din_v(din_v),
    .o_acc_en(acc_en), .o_acc_ram_i(acc_ram_i), .o_acc_clr(acc_clr), .o_cs_start(cs_start),
    .o_rd_en(rd_en), .o_rd_addr(rd_addr), .o_rd_uok(rd_uok), .o_rd_vok(rd_vok),
    .o_ng_rd(ng_rd), .o_ng_slot(ng_slot), .o_ng_addr(ng_addr),
    .o_nu_rd(nu_rd), .o_nu_slot(nu_slot), .o_nu_addr(nu_addr),
    .o_ng_valid(s_ng_valid), .o_ng_last(s_ng_last), .o_ng_pu(s_ng_pu),
    .o_nu_valid(s_nu_valid), .o_nu_tag(s_nu_tag), .o_nu_pu(s_nu_pu),
    .o_advance, .i_norm_ready, .o_out_row, .o_level, .o_sweep
  );

  for (genvar k = 0; k < P; k++) begin : g_pu
    processing_unit #(.MAX_LEN(MAX_LEN), .AW(AW)) u_pu (
      .clk, .rst_n,
      .i_wr_valid(wr_valid), .i_wr_addr(wr_addr), .i_wr_uok(wr_uok), .i_wr_vok(wr_vok),
      .i_wr_i(wr_i[k]), .i_wr_j(wr_j[k]),
      .i_din_u_rowi(din_u[2*k]), .i_din_u_rowj(din_u[2*k+1]),
      .i_din_v_rowi(din_v[2*k]), .i_din_v_rowj(din_v[2*k+1]),
      .i_acc_en(acc_en[k]), .i_acc_ram_i(acc_ram_i[k]), .i_acc_clr(acc_clr[k]),
      .i_cs_start(cs_start), .o_cs_done(cs_done[k]),
      .i_rd_en(rd_en), .i_rd_addr(rd_addr), .i_rd_uok(rd_uok), .i_rd_vok(rd_vok),
      .o_dout_valid(pu_valid[k]), .o_dout_tag(pu_tag[k]),
      .o_dout_u_rowi(pu_u[2*k]), .o_dout_u_rowj(pu_u[2*k+1]),
      .o_dout_v_rowi(pu_v[2*k]), .o_dout_v_rowj(pu_v[2*k+1]),
      .i_ng_rd(ng_rd[k]), .i_ng_slot(ng_slot), .i_ng_addr(ng_addr),
      .i_nu_rd(nu_rd[k]), .i_nu_slot(nu_slot), .i_nu_addr(nu_addr),
      .o_dout_NormGen_u_data(ng_data[k]), .o_dout_NormUpdate_u_data(nu_u[k]),
      .o_dout_NormUpdate_v_data(nu_v[k])
    );
  end

  normalized_src_sel #(.NUM_PU(P), .AW(AW)) u_normalized_src_sel (
    .clk, .rst_n,
    .i_ng_valid(s_ng_valid), .i_ng_last(s_ng_last), .i_ng_pu(s_ng_pu),
    .i_nu_valid(s_nu_valid), .i_nu_tag(s_nu_tag), .i_nu_pu(s_nu_pu),
    .i_ng_data(ng_data), .i_nu_u(nu_u), .i_nu_v(nu_v),
    .o_ng_valid, .o_ng_last, .o_ng_data, .o_nu_valid, .o_nu_tag, .o_nu_u, .o_nu_v
  );
endmodule
