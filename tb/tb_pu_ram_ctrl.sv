// tb_pu_ram_ctrl: checks the four row buffers and their port multiplexing.
//
// Writes a row pair of U and V, then checks: the param_gen feed during a
// normal write, the rotation read-back with its tag, the load-time partner
// read (row i from its RAM while a new row j is written), the write masks
// (slot select and the U/V length flags), and two simultaneous final reads
// from different slots. Read data must arrive exactly one clock after the
// request.
//
// The four buffers and their reuse follow the published PU; the port
// multiplexing and one-clock read latency are this design's own.
`timescale 1ns/1ps
module tb_pu_ram_ctrl;
  import svd_pkg::*;
  localparam int L = 16, AW = 4;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  logic wr_valid = 0, wr_uok = 0, wr_vok = 0, wr_i = 0, wr_j = 0, acc_en = 0, acc_ram_i = 0, acc_clr = 0;
  logic [AW-1:0] wr_addr = '0, rd_addr = '0, ng_addr = '0, nu_addr = '0;
  data_t d_ui = '0, d_uj = '0, d_vi = '0, d_vj = '0;
  logic pg_clr, pg_valid, rd_en = 0, rd_uok = 0, rd_vok = 0, up_valid, ng_rd = 0, nu_rd = 0;
  data_t pg_ui, pg_uj, up_ui, up_uj, up_vi, up_vj, ngd, nud_u, nud_v;
  logic [AW+1:0] up_tag;
  slot_e ng_slot = SLOT_I, nu_slot = SLOT_I;
  pu_ram_ctrl #(.MAX_LEN(L)) dut (
    .clk, .rst_n, .i_wr_valid(wr_valid), .i_wr_addr(wr_addr), .i_wr_uok(wr_uok), .i_wr_vok(wr_vok),
    .i_wr_i(wr_i), .i_wr_j(wr_j), .i_din_u_rowi(d_ui), .i_din_u_rowj(d_uj), .i_din_v_rowi(d_vi),
    .i_din_v_rowj(d_vj), .i_acc_en(acc_en), .i_acc_ram_i(acc_ram_i), .i_acc_clr(acc_clr),
    .o_pg_clr(pg_clr), .o_pg_valid(pg_valid), .o_pg_ui(pg_ui), .o_pg_uj(pg_uj),
    .i_rd_en(rd_en), .i_rd_addr(rd_addr), .i_rd_uok(rd_uok), .i_rd_vok(rd_vok),
    .o_up_valid(up_valid), .o_up_tag(up_tag), .o_up_u_rowi(up_ui), .o_up_u_rowj(up_uj),
    .o_up_v_rowi(up_vi), .o_up_v_rowj(up_vj),
    .i_ng_rd(ng_rd), .i_ng_slot(ng_slot), .i_ng_addr(ng_addr), .i_nu_rd(nu_rd), .i_nu_slot(nu_slot),
    .i_nu_addr(nu_addr), .o_dout_NormGen_u_data(ngd), .o_dout_NormUpdate_u_data(nud_u),
    .o_dout_NormUpdate_v_data(nud_v));
  int checks = 0, failures = 0;
  task automatic chk(input bit ok, input string m);
    checks++; if (!ok) begin failures++; if (failures < 20) $display("FAIL: %s", m); end
  endtask
  data_t A [L], B [L], C [L], D [L], F [L];
  initial begin
    for (int e = 0; e < L; e++) begin
      A[e] = $urandom; B[e] = $urandom; C[e] = $urandom; D[e] = $urandom; F[e] = $urandom;
    end
    repeat (2) @(posedge clk);
    rst_n = 1'b1;
    // 1. Normal write of both slots, param feed follows one clock later.
    for (int e = 0; e < L; e++) begin
      wr_valid <= 1; wr_uok <= 1; wr_vok <= 1; wr_i <= 1; wr_j <= 1; acc_en <= 1;
      wr_addr <= AW'(e); d_ui <= A[e]; d_uj <= B[e]; d_vi <= C[e]; d_vj <= D[e];
      @(posedge clk); #1;
      chk(pg_valid && pg_ui == A[e] && pg_uj == B[e], $sformatf("pg feed %0d", e));
    end
    wr_valid <= 0; acc_en <= 0;
    // 2. Rotation read-back.
    for (int e = 0; e < L; e++) begin
      rd_en <= 1; rd_addr <= AW'(e); rd_uok <= 1; rd_vok <= (e < 8);
      @(posedge clk); #1;
      chk(up_valid && up_ui == A[e] && up_uj == B[e] && up_vi == C[e] && up_vj == D[e]
          && up_tag == {1'b1, e < 8, AW'(e)}, $sformatf("rotation read %0d", e));
    end
    rd_en <= 0;
    // 3. Load-time partner read: new j row F, i row from the RAM; V not written (vok=0).
    for (int e = 0; e < L; e++) begin
      wr_valid <= 1; wr_uok <= 1; wr_vok <= 0; wr_i <= 0; wr_j <= 1; acc_en <= 1; acc_ram_i <= 1;
      wr_addr <= AW'(e); d_ui <= '0; d_uj <= F[e]; d_vi <= '0; d_vj <= '0;
      @(posedge clk); #1;
      chk(pg_valid && pg_ui == A[e] && pg_uj == F[e], $sformatf("partner read %0d", e));
    end
    wr_valid <= 0; acc_en <= 0; acc_ram_i <= 0;
    @(posedge clk);
    // 4. Two final reads at once: NormGen from slot j, NormUpdate from slot i.
    for (int e = 0; e < L; e++) begin
      ng_rd <= 1; ng_slot <= SLOT_J; ng_addr <= AW'(e);
      nu_rd <= 1; nu_slot <= SLOT_I; nu_addr <= AW'(L - 1 - e);
      @(posedge clk); #1;
      chk(ngd == F[e] && nud_u == A[L-1-e] && nud_v == C[L-1-e], $sformatf("final reads %0d", e));
    end
    // And the other way round: V row j must be unchanged (its write was masked).
    for (int e = 0; e < L; e++) begin
      ng_rd <= 1; ng_slot <= SLOT_I; ng_addr <= AW'(e);
      nu_rd <= 1; nu_slot <= SLOT_J; nu_addr <= AW'(e);
      @(posedge clk); #1;
      chk(ngd == A[e] && nud_u == F[e] && nud_v == D[e], $sformatf("final reads swapped %0d", e));
    end
    ng_rd <= 0; nu_rd <= 0;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (2000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
