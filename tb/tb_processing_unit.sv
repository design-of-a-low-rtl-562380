// tb_processing_unit: one PU through a load, an angle computation and a
// rotation.
//
// Loads row i, then row j while the PU reads row i back for alpha/beta/gamma
// (the load-time path), with V rows e_0 and e_1. Starts sin/cos, streams
// the rotation read and compares the rotated U and V rows with a
// floating-point Jacobi rotation of the same rows. Checks that the rotated
// U rows are orthogonal, the output tag, and that outputs arrive three
// clocks after the read requests, one per clock. Finally checks a final read.
//
// The PU structure follows the published one; the three-clock
// rotation latency is this design's own.
`timescale 1ns/1ps
module tb_processing_unit;
  import svd_pkg::*;
  localparam int L = 24, AW = 5;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  logic wr_valid = 0, wr_i = 0, wr_j = 0, acc_en = 0, acc_ram_i = 0, acc_clr = 0;
  logic cs_start = 0, cs_done, rd_en = 0, ovalid, ng_rd = 0, nu_rd = 0;
  logic [AW-1:0] wr_addr = '0, rd_addr = '0, ng_addr = '0;
  logic [AW+1:0] otag;
  data_t dui = '0, duj = '0, dvi = '0, dvj = '0, oui, ouj, ovi, ovj, ngd, nuu, nuv;
  processing_unit #(.MAX_LEN(32)) dut (
    .clk, .rst_n, .i_wr_valid(wr_valid), .i_wr_addr(wr_addr), .i_wr_uok(1'b1), .i_wr_vok(1'b1),
    .i_wr_i(wr_i), .i_wr_j(wr_j), .i_din_u_rowi(dui), .i_din_u_rowj(duj), .i_din_v_rowi(dvi),
    .i_din_v_rowj(dvj), .i_acc_en(acc_en), .i_acc_ram_i(acc_ram_i), .i_acc_clr(acc_clr),
    .i_cs_start(cs_start), .o_cs_done(cs_done), .i_rd_en(rd_en), .i_rd_addr(rd_addr),
    .i_rd_uok(1'b1), .i_rd_vok(1'b1), .o_dout_valid(ovalid), .o_dout_tag(otag),
    .o_dout_u_rowi(oui), .o_dout_u_rowj(ouj), .o_dout_v_rowi(ovi), .o_dout_v_rowj(ovj),
    .i_ng_rd(ng_rd), .i_ng_slot(SLOT_J), .i_ng_addr(ng_addr), .i_nu_rd(nu_rd), .i_nu_slot(SLOT_I),
    .i_nu_addr(ng_addr), .o_dout_NormGen_u_data(ngd), .o_dout_NormUpdate_u_data(nuu),
    .o_dout_NormUpdate_v_data(nuv));
  int checks = 0, failures = 0;
  task automatic chk(input bit ok, input string m);
    checks++; if (!ok) begin failures++; if (failures < 20) $display("FAIL: %s", m); end
  endtask
  function automatic real r(input data_t v); return real'(v) / 2.0 ** FRAC_W; endfunction
  data_t A [L], B [L];
  real yi [L], yj [L], vi [L], vj [L];
  int cyc = 0, first_out = -1, n_out = 0, rd_start;
  always @(posedge clk) cyc++;
  always @(negedge clk) if (ovalid) begin
    int e;
    e = int'(otag[AW-1:0]);
    if (first_out < 0) first_out = cyc;
    chk(e == n_out, "output order");
    yi[e] = r(oui); yj[e] = r(ouj); vi[e] = r(ovi); vj[e] = r(ovj);
    n_out++;
  end
  initial begin
    real al, be, ga, z, t, c, s, dot;
    al = 0; be = 0; ga = 0;
    for (int e = 0; e < L; e++) begin
      A[e] = data_t'($signed($urandom_range(0, 2 ** 21)) - 2 ** 20);
      B[e] = data_t'($signed($urandom_range(0, 2 ** 21)) - 2 ** 20);
      al += r(A[e]) * r(A[e]); be += r(B[e]) * r(B[e]); ga += r(A[e]) * r(B[e]);
    end
    z = (be - al) / (2.0 * ga);
    t = ((z >= 0) ? 1.0 : -1.0) / ((z >= 0 ? z : -z) + $sqrt(1.0 + z * z));
    c = 1.0 / $sqrt(1.0 + t * t); s = c * t;
    repeat (2) @(posedge clk);
    rst_n = 1'b1;
    for (int e = 0; e < L; e++) begin
      wr_valid <= 1; wr_i <= 1; wr_addr <= AW'(e); dui <= A[e];
      dvi <= (e == 0) ? DATA_ONE : '0;
      @(posedge clk);
    end
    wr_valid <= 0; wr_i <= 0; acc_clr <= 1; @(posedge clk); acc_clr <= 0;
    for (int e = 0; e < L; e++) begin
      wr_valid <= 1; wr_j <= 1; acc_en <= 1; acc_ram_i <= 1; wr_addr <= AW'(e); duj <= B[e];
      dvj <= (e == 1) ? DATA_ONE : '0;
      @(posedge clk);
    end
    wr_valid <= 0; wr_j <= 0;
    repeat (4) @(posedge clk);
    acc_en <= 0; acc_ram_i <= 0;
    cs_start <= 1; @(posedge clk); cs_start <= 0;
    while (!cs_done) @(posedge clk);
    rd_start = cyc + 1;
    for (int e = 0; e < L; e++) begin
      rd_en <= 1; rd_addr <= AW'(e); @(posedge clk);
    end
    rd_en <= 0;
    repeat (6) @(posedge clk);
    chk(n_out == L, $sformatf("outputs %0d", n_out));
    chk(first_out == rd_start + 3, $sformatf("latency %0d", first_out - rd_start));
    dot = 0;
    for (int e = 0; e < L; e++) begin
      real ei, ej;
      ei = c * r(A[e]) - s * r(B[e]); ej = s * r(A[e]) + c * r(B[e]);
      chk((yi[e] - ei) < 1e-4 && (ei - yi[e]) < 1e-4 && (yj[e] - ej) < 1e-4 && (ej - yj[e]) < 1e-4,
          $sformatf("U[%0d] %f %f vs %f %f", e, yi[e], yj[e], ei, ej));
      dot += yi[e] * yj[e];
    end
    chk(dot < 1e-3 && dot > -1e-3, $sformatf("rotated rows not orthogonal: %f", dot));
    chk((vi[0] - c) < 1e-5 && (c - vi[0]) < 1e-5 && (vi[1] + s) < 1e-5 && (-s - vi[1]) < 1e-5 &&
        (vj[0] - s) < 1e-5 && (s - vj[0]) < 1e-5 && (vj[1] - c) < 1e-5 && (c - vj[1]) < 1e-5,
        $sformatf("V %f %f %f %f vs c=%f s=%f", vi[0], vi[1], vj[0], vj[1], c, s));
    // Final reads: NormGen from slot j, NormUpdate from slot i.
    for (int e = 0; e < L; e++) begin
      ng_rd <= 1; nu_rd <= 1; ng_addr <= AW'(e); @(posedge clk); #1;
      chk(ngd == B[e] && nuu == A[e] && nuv == ((e == 0) ? DATA_ONE : '0), $sformatf("final read %0d", e));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
