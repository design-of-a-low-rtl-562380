// tb_update_matrix: checks the element-wise rotation of U and V rows.
//
// Random cos/sin pairs and elements, including saturation cases, are pushed
// one per clock; expected outputs are computed in the testbench with 64-bit
// integers (round to nearest, saturate to 32 bits) and compared two clocks
// later together with the tag.
//
// The rotation is the standard Jacobi update; the number format,
// saturation and two-clock latency are this design's own.
`timescale 1ns/1ps
module tb_update_matrix;
  import svd_pkg::*;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  logic valid = 1'b0, ovalid;
  logic [15:0] tag = '0, otag;
  cs_t c = '0, s = '0;
  data_t xi [4], y [4];
  update_matrix #(.TAG_W(16)) dut (
    .clk, .rst_n, .i_valid(valid), .i_tag(tag), .i_cos(c), .i_sin(s),
    .i_u_rowi(xi[0]), .i_u_rowj(xi[1]), .i_v_rowi(xi[2]), .i_v_rowj(xi[3]),
    .o_valid(ovalid), .o_tag(otag),
    .o_dout_u_rowi(y[0]), .o_dout_u_rowj(y[1]), .o_dout_v_rowi(y[2]), .o_dout_v_rowj(y[3]));
  int checks = 0, failures = 0;
  function automatic data_t rs(input longint v);
    longint r;
    r = (v + (64'sd1 <<< (CS_FRAC - 1))) >>> CS_FRAC;
    if (r > 64'sd2147483647) return 32'h7fffffff;
    if (r < -64'sd2147483648) return 32'h80000000;
    return data_t'(r);
  endfunction
  data_t exp_q [$];
  logic [15:0] tag_q [$];
  initial begin
    for (int m = 0; m < 4; m++) xi[m] = '0;
    repeat (2) @(posedge clk);
    rst_n = 1'b1;
    for (int t = 0; t < 200; t++) begin
      real th;
      cs_t cc, ss;
      data_t a [4];
      th = (real'($urandom_range(0, 1000)) / 1000.0 - 0.5) * 3.14159265 / 2.0;
      cc = cs_t'($rtoi($cos(th) * 2.0 ** CS_FRAC));
      ss = cs_t'($rtoi($sin(th) * 2.0 ** CS_FRAC));
      for (int m = 0; m < 4; m++)
        a[m] = (t % 50 == 7) ? 32'h7ff00000 : data_t'($urandom);
      c <= cc; s <= ss; valid <= 1'b1; tag <= 16'(t);
      for (int m = 0; m < 4; m++) xi[m] <= a[m];
      for (int m = 0; m < 2; m++) begin
        exp_q.push_back(rs(longint'(cc) * a[2*m] - longint'(ss) * a[2*m+1]));
        exp_q.push_back(rs(longint'(ss) * a[2*m] + longint'(cc) * a[2*m+1]));
      end
      tag_q.push_back(16'(t));
      @(posedge clk);
    end
    valid <= 1'b0;
    repeat (4) @(posedge clk);
    if (tag_q.size() != 0) begin failures++; $display("FAIL: %0d outputs missing", tag_q.size()); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  // Outputs: compared against the queue; two clocks of latency checked by tag order.
  int cyc = 0;
  always @(posedge clk) cyc++;
  always @(negedge clk) if (rst_n && ovalid) begin
    logic [15:0] et;
    et = tag_q.pop_front();
    checks++;
    if (otag !== et || int'(et) != cyc - 4) begin
      failures++; $display("FAIL: tag %0d expected %0d at cycle %0d", otag, et, cyc);
    end
    for (int m = 0; m < 4; m++) begin
      data_t e;
      e = exp_q.pop_front();
      checks++;
      if (y[m] !== e) begin failures++; if (failures < 10) $display("FAIL: out %0d %h vs %h", m, y[m], e); end
    end
  end
  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
